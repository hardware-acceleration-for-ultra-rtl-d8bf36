// tb_mrf_nn_trainer: end-to-end test of the trainer at its full default size
// (256 inputs, layers 256-128-64-32-16-2).
// Loads random weights and biases (zero padding) through the host port, then
// runs inference and training samples and compares the network outputs
// after every sample, and every weight and bias after training, with a
// reference model of the same integer network and SGD rule written here
// with plain loops (no tiling). Also checks the forward (56 cycles) and
// backward (238 cycles) phase lengths, that a sample offered while busy
// waits, and counts the mechanisms the design has: inference mode, training
// mode, ReLU clipping, weight and bias updates, multi-tile accumulation of
// a lower-layer delta, and saturation of an output delta.
module tb_mrf_nn_trainer;
  import mrf_nn_pkg::*;

  localparam int NROW = N_BLK * N_NODES;

  logic             clk = 0, rst_n = 1;
  logic             w_wr_en = 0, b_wr_en = 0;
  logic [ROW_W-1:0] w_wr_row = 0, b_wr_row = 0, rd_row = 0;
  data_t            w_wr_data [MAX_FANIN];
  data_t            b_wr_data = 0;
  data_t            rd_w_row [MAX_FANIN];
  data_t            rd_bias;
  logic             sample_valid = 0, sample_ready, sample_train = 0;
  data_t            sample_x [N_SIG];
  data_t            sample_t [N_OUT];
  logic [4:0]       lr_shift = 5'd2;
  logic             result_valid;
  data_t            result_y [N_OUT];
  phase_t           phase;
  logic             busy;

  mrf_nn_trainer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model ----------------------------------------------------------
  localparam int L = 6;
  int sz [L+1] = '{256, 256, 128, 64, 32, 16, 2};
  int rw [L+1][256][256];   // rw[k][j][i]: weight from neuron i of layer k-1 to j of layer k
  int rb [L+1][256];
  int ra [L+1][256];
  int rdl[L+1][256];

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  int n_clip = 0, n_wupd = 0, n_bupd = 0, n_dsat = 0, n_infer = 0, n_train = 0, n_multi = 0;

  task automatic ref_forward(input int x [256]);
    for (int i = 0; i < 256; i++) ra[0][i] = (i < sz[0]) ? x[i] : 0;
    for (int k = 1; k <= L; k++)
      for (int j = 0; j < sz[k]; j++) begin
        longint s;
        s = 0;
        for (int i = 0; i < sz[k-1]; i++) s += longint'(ra[k-1][i]) * longint'(rw[k][j][i]);
        s = (s + longint'(rb[k][j]) * 256) >>> 8;
        if (k < L && s < 0) begin ra[k][j] = 0; n_clip++; end
        else ra[k][j] = sat16(s);
      end
  endtask

  task automatic ref_backward(input int t [2], input int lr);
    for (int j = 0; j < 2; j++) begin
      longint d;
      d = longint'(ra[L][j]) - longint'(t[j]);
      if (d != longint'(sat16(d))) n_dsat++;
      rdl[L][j] = sat16(d);
    end
    for (int k = L; k >= 1; k--) begin
      if (k > 1) begin
        if (sz[k] > 16) n_multi++;
        for (int i = 0; i < sz[k-1]; i++) begin
          longint s;
          s = 0;
          if (ra[k-1][i] > 0)
            for (int j = 0; j < sz[k]; j++) s += longint'(rw[k][j][i]) * longint'(rdl[k][j]);
          rdl[k-1][i] = sat16(s >>> 8);
        end
      end
      for (int j = 0; j < sz[k]; j++) begin
        int nb;
        nb = sat16(longint'(rb[k][j]) - (longint'(rdl[k][j]) >>> lr));
        if (nb != rb[k][j]) n_bupd++;
        rb[k][j] = nb;
        for (int i = 0; i < sz[k-1]; i++) begin
          int nw;
          nw = sat16(longint'(rw[k][j][i]) - ((longint'(ra[k-1][i]) * longint'(rdl[k][j])) >>> (8 + lr)));
          if (nw != rw[k][j][i]) n_wupd++;
          rw[k][j][i] = nw;
        end
      end
    end
  endtask

  // global weight row of neuron j of layer k
  function automatic int row_of(input int k, input int j);
    int base;
    base = 0;
    for (int m = 1; m < k; m++) base += (sz[m] + 15) / 16;
    return base * 16 + j;
  endfunction

  // ---- phase length monitor -----------------------------------------------------
  int fwd_cyc, bwd_cyc;
  always @(posedge clk) if (rst_n) begin
    if (phase == PH_FWD) fwd_cyc++;
    if (phase == PH_BWD) bwd_cyc++;
  end

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d, expected %0d", what, got, exp); end
  endtask

  task automatic load_network();
    // zero everything (padding), then write the real rows
    for (int row = 0; row < NROW; row++) begin
      int k, j, base;
      k = 0; j = 0; base = 0;
      for (int m = 1; m <= L; m++) begin
        int nb;
        nb = (sz[m] + 15) / 16;
        if (row >= base * 16 && row < (base + nb) * 16) begin k = m; j = row - base * 16; end
        base += nb;
      end
      @(negedge clk);
      w_wr_en = 1; w_wr_row = ROW_W'(row);
      b_wr_en = 1; b_wr_row = ROW_W'(row);
      for (int i = 0; i < MAX_FANIN; i++)
        w_wr_data[i] = (k != 0 && j < sz[k] && i < sz[k-1]) ? data_t'(rw[k][j][i]) : '0;
      b_wr_data = (k != 0 && j < sz[k]) ? data_t'(rb[k][j]) : '0;
    end
    @(negedge clk);
    w_wr_en = 0; b_wr_en = 0;
  endtask

  task automatic run_sample(input logic train, input int hold_cycles);
    int x [256];
    int t [2];
    for (int i = 0; i < 256; i++) x[i] = $signed($urandom_range(0, 511)) - 256;
    for (int j = 0; j < 2; j++) t[j] = $signed($urandom_range(0, 1023)) - 512;
    if (hold_cycles > 0) t[0] = 30000;   // large target error: output delta saturates
    @(negedge clk);
    for (int i = 0; i < N_SIG; i++) sample_x[i] = data_t'(x[i]);
    for (int j = 0; j < N_OUT; j++) sample_t[j] = data_t'(t[j]);
    sample_train = train;
    sample_valid = 1;
    fwd_cyc = 0; bwd_cyc = 0;
    @(posedge clk);
    while (!sample_ready) @(posedge clk);
    @(negedge clk) sample_valid = 0;
    // a second sample offered while busy must wait
    repeat (hold_cycles) begin
      @(negedge clk);
      sample_valid = 1;
      checks++;
      if (sample_ready) begin failures++; $display("ready while busy"); end
    end
    @(negedge clk) sample_valid = 0;
    ref_forward(x);
    while (!result_valid) @(posedge clk);
    #1;
    for (int j = 0; j < N_OUT; j++) expect_eq($sformatf("output %0d", j), int'(result_y[j]), ra[L][j]);
    if (train) begin
      ref_backward(t, int'(lr_shift));
      n_train++;
    end else n_infer++;
    @(negedge clk);
    expect_eq("forward phase cycles", fwd_cyc, 56);
    expect_eq("backward phase cycles", bwd_cyc, train ? 238 : 0);
  endtask

  task automatic compare_network();
    for (int k = 1; k <= L; k++)
      for (int j = 0; j < sz[k]; j++) begin
        int errs;
        errs = 0;
        rd_row = ROW_W'(row_of(k, j));
        #1;
        for (int i = 0; i < sz[k-1]; i++) if (int'(rd_w_row[i]) != rw[k][j][i]) errs++;
        if (int'(rd_bias) != rb[k][j]) errs++;
        checks++;
        if (errs != 0) begin
          failures++;
          $display("layer %0d neuron %0d: %0d weights/bias differ", k, j, errs);
        end
      end
  endtask

  initial begin
    for (int k = 1; k <= L; k++) begin
      int amp;
      amp = (k == 1) ? 24 : (k == 2) ? 24 : (k == 3) ? 34 : (k == 4) ? 48 : (k == 5) ? 68 : 96;
      for (int j = 0; j < sz[k]; j++) begin
        rb[k][j] = $signed($urandom_range(0, 128)) - 64;
        for (int i = 0; i < sz[k-1]; i++) rw[k][j][i] = $signed($urandom_range(0, 2 * amp)) - amp;
      end
    end
    #1 rst_n = 0;
    #20 rst_n = 1;
    load_network();
    compare_network();
    run_sample(1'b0, 0);
    run_sample(1'b1, 5);
    run_sample(1'b1, 0);
    run_sample(1'b1, 0);
    run_sample(1'b0, 0);
    compare_network();
    $display("mechanisms: inference %0d training %0d relu-clip %0d weight-updates %0d bias-updates %0d multi-tile-deltas %0d delta-saturations %0d",
             n_infer, n_train, n_clip, n_wupd, n_bupd, n_multi, n_dsat);
    checks++;
    if (n_infer == 0 || n_train == 0 || n_clip == 0 || n_wupd == 0 || n_bupd == 0 || n_multi == 0 || n_dsat == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
