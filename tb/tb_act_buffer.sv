// tb_act_buffer: self-checking test of the activation store.
// Checks that reset clears every vector, that a sample load fills vector 0
// (leaving the padding above the sample length at zero), that node-array
// block writes land in the addressed layer and block, and that the output
// port shows the first entries of the last layer.
module tb_act_buffer;
  import mrf_nn_pkg::*;

  localparam int NL = 3, NI = 8, N = 4, NSIG = 6, NO = 2;
  logic clk = 0, rst_n = 1;
  logic [LAYER_W-1:0]     rd_layer = 0, nw_layer = 0;
  data_t                  rd_vec [NI];
  logic                   ld_en = 0, nw_en = 0;
  data_t                  ld_data [NSIG];
  logic [$clog2(NI/N)-1:0] nw_blk = 0;
  data_t                  nw_data [N];
  data_t                  out_y [NO];
  data_t                  shadow [NL+1][NI];
  int checks = 0, failures = 0;

  act_buffer #(.NL(NL), .N_IN(NI), .N(N), .NSIG(NSIG), .NO(NO)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int k = 0; k <= NL; k++) begin
      rd_layer = LAYER_W'(k);
      #1;
      for (int i = 0; i < NI; i++) begin
        checks++;
        if (rd_vec[i] !== shadow[k][i]) begin
          failures++; $display("layer %0d entry %0d: %0d exp %0d", k, i, rd_vec[i], shadow[k][i]);
        end
      end
    end
    for (int j = 0; j < NO; j++) begin
      checks++;
      if (out_y[j] !== shadow[NL][j]) begin failures++; $display("out_y[%0d] wrong", j); end
    end
  endtask

  initial begin
    for (int k = 0; k <= NL; k++) for (int i = 0; i < NI; i++) shadow[k][i] = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    check_all();
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      ld_en = ($urandom_range(0, 3) == 0);
      nw_en = $urandom_range(0, 1);
      nw_layer = LAYER_W'($urandom_range(1, NL));
      nw_blk = $urandom;
      for (int i = 0; i < NSIG; i++) ld_data[i] = data_t'($urandom);
      for (int j = 0; j < N; j++) nw_data[j] = data_t'($urandom);
      if (ld_en) for (int i = 0; i < NSIG; i++) shadow[0][i] = ld_data[i];
      if (nw_en) for (int j = 0; j < N; j++) shadow[nw_layer][int'(nw_blk) * N + j] = nw_data[j];
      @(posedge clk);
      #1 ld_en = 0; nw_en = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
