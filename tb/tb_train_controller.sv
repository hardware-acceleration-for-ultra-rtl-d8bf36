// tb_train_controller: self-checking test of the training sequencer.
// Runs one training and one inference sample and records every cycle's
// issues. Checks, against a schedule worked out here from the layer sizes
// 256-128-64-32-16-2 and 256 inputs:
//  * forward: every 16-row block of every layer issued once, in order, with
//    the right weight block, activation vector, ReLU flag and tag, and the
//    forward phase lasting exactly 56 cycles;
//  * backward: every 16x32 tile of every layer pair (6 down to 1) issued
//    once in order with the right block, chunk, bias-update flag and ReLU
//    mask enable, one output-delta load before it and one finalize after
//    each pair, the backward phase lasting 238 cycles;
//  * inference runs the forward pass only; done pulses once per sample.
module tb_train_controller;
  import mrf_nn_pkg::*;

  logic       clk = 0, rst_n = 1;
  logic       start_valid = 0, start_train = 0;
  logic       start_ready, busy, done;
  phase_t     phase;
  blk_t       rd_blk;
  layer_t     rd_layer;
  logic [2:0] chunk;
  logic [3:0] up_blk;
  logic       na_valid, na_relu, de_load, bp_valid, bp_upd_bias, bp_dmask_en, de_finalize;
  logic [7:0] na_tag, bp_tag;
  int checks = 0, failures = 0;

  train_controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sizes [7] = '{256, 256, 128, 64, 32, 16, 2};

  // expected issue lists
  typedef struct { int blk; int layer; int sub; int chunk; logic flag; logic relu; } iss_t;
  iss_t fwd_exp [$], bwd_exp [$];

  task automatic build_schedule();
    int base [7];
    int acc = 0;
    for (int k = 1; k <= 6; k++) begin base[k] = acc; acc += (sizes[k] + 15) / 16; end
    for (int k = 1; k <= 6; k++)
      for (int r = 0; r < (sizes[k] + 15) / 16; r++)
        fwd_exp.push_back('{base[k] + r, k, r, 0, 1'b0, k != 6});
    for (int k = 6; k >= 1; k--)
      for (int r = 0; r < (sizes[k] + 15) / 16; r++)
        for (int c = 0; c < (sizes[k-1] + 31) / 32; c++)
          bwd_exp.push_back('{base[k] + r, k - 1, r, c, c == 0, k != 1});
  endtask

  int n_fwd_cyc, n_bwd_cyc, n_err, n_fin, n_done, fi, bi;
  logic in_train;

  always @(posedge clk) if (rst_n) begin
    if (phase == PH_FWD) n_fwd_cyc++;
    if (phase == PH_BWD) n_bwd_cyc++;
    if (de_load) n_err++;
    if (de_finalize) n_fin++;
    if (done) n_done++;
    if (na_valid) begin
      checks++;
      if (fi >= fwd_exp.size() || int'(rd_blk) != fwd_exp[fi].blk || int'(rd_layer) != fwd_exp[fi].layer - 1 ||
          na_tag != {1'b0, 3'(fwd_exp[fi].layer), 4'(fwd_exp[fi].sub)} || na_relu != fwd_exp[fi].relu) begin
        failures++;
        $display("forward issue %0d wrong: blk %0d layer %0d tag %h", fi, rd_blk, rd_layer, na_tag);
      end
      fi++;
    end
    if (bp_valid) begin
      checks++;
      if (!in_train || bi >= bwd_exp.size() || int'(rd_blk) != bwd_exp[bi].blk ||
          int'(rd_layer) != bwd_exp[bi].layer || int'(chunk) != bwd_exp[bi].chunk ||
          int'(up_blk) != bwd_exp[bi].sub || bp_upd_bias != bwd_exp[bi].flag ||
          bp_dmask_en != bwd_exp[bi].relu || bp_tag != {rd_blk, chunk}) begin
        failures++;
        $display("tile %0d wrong: blk %0d layer %0d chunk %0d up %0d", bi, rd_blk, rd_layer, chunk, up_blk);
      end
      bi++;
    end
  end

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d, expected %0d", what, got, exp); end
  endtask

  task automatic run(input logic train);
    n_fwd_cyc = 0; n_bwd_cyc = 0; n_err = 0; n_fin = 0; n_done = 0; fi = 0; bi = 0;
    in_train = train;
    @(negedge clk);
    expect_eq("ready when idle", int'(start_ready), 1);
    start_valid = 1; start_train = train;
    @(negedge clk);
    start_valid = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    expect_eq("forward issues", fi, fwd_exp.size());
    expect_eq("forward cycles", n_fwd_cyc, 56);
    expect_eq("done pulses", n_done, 1);
    expect_eq("back to idle", int'(busy), 0);
    if (train) begin
      expect_eq("tiles", bi, bwd_exp.size());
      expect_eq("backward cycles", n_bwd_cyc, 238);
      expect_eq("output delta loads", n_err, 1);
      expect_eq("finalizes", n_fin, 6);
    end else begin
      expect_eq("tiles in inference", bi, 0);
      expect_eq("backward cycles in inference", n_bwd_cyc, 0);
    end
  endtask

  initial begin
    build_schedule();
    #1 rst_n = 0;
    #20 rst_n = 1;
    run(1'b1);
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
