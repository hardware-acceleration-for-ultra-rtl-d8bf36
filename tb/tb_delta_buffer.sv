// tb_delta_buffer: self-checking test of the delta store.
// Loads an output delta, accumulates random partial sums into random column
// chunks, finalizes (rescale by >>> FRAC with saturation) and checks up[]
// after every step against a model kept here, including that finalize
// clears the accumulator and that load_out zeroes the rest of up[].
module tb_delta_buffer;
  import mrf_nn_pkg::*;

  localparam int NI = 16, N = 4, TW = 4;
  logic clk = 0, rst_n = 1;
  data_t up [NI];
  logic  add_en = 0, load_out = 0, finalize = 0;
  logic [$clog2(NI/TW)-1:0] add_chunk = 0;
  acc_t  add_psum [TW];
  data_t out_delta [N];
  longint acc_m [NI];
  data_t  up_m  [NI];
  int checks = 0, failures = 0, n_sat = 0;

  delta_buffer #(.N_IN(NI), .N(N), .TW(TW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_up();
    for (int i = 0; i < NI; i++) begin
      checks++;
      if (up[i] !== up_m[i]) begin failures++; $display("up[%0d]=%0d exp %0d", i, up[i], up_m[i]); end
    end
  endtask

  initial begin
    for (int i = 0; i < NI; i++) begin acc_m[i] = 0; up_m[i] = '0; end
    #1 rst_n = 0;
    #20 rst_n = 1;
    #1 check_up();
    for (int it = 0; it < 300; it++) begin
      int op;
      @(negedge clk);
      op = $urandom_range(0, 9);
      add_en = (op < 7); load_out = (op == 7); finalize = (op >= 8);
      add_chunk = $urandom;
      for (int j = 0; j < TW; j++)
        add_psum[j] = (it % 13 == 0) ? acc_t'(48'sd5000000000) : acc_t'($signed($urandom_range(0, 2000000)) - 1000000);
      for (int j = 0; j < N; j++) out_delta[j] = data_t'($urandom);
      if (add_en) for (int j = 0; j < TW; j++) acc_m[int'(add_chunk) * TW + j] += longint'(add_psum[j]);
      if (load_out) for (int i = 0; i < NI; i++) up_m[i] = (i < N) ? out_delta[i] : '0;
      if (finalize) for (int i = 0; i < NI; i++) begin
        longint v;
        v = acc_m[i] >>> 8;
        if (v > 32767) begin up_m[i] = 16'sh7fff; n_sat++; end
        else if (v < -32768) begin up_m[i] = 16'sh8000; n_sat++; end
        else up_m[i] = data_t'(v);
        acc_m[i] = 0;
      end
      @(posedge clk);
      #1 add_en = 0; load_out = 0; finalize = 0;
      check_up();
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
