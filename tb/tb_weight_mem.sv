// tb_weight_mem: self-checking test of the weight store.
// Performs random host row writes and backpropagation tile writes (alone and
// in the same cycle) against a shadow copy kept here, and after every edge
// reads every block through the asynchronous read port and compares it with
// the shadow copy.
module tb_weight_mem;
  import mrf_nn_pkg::*;

  localparam int NB = 4, N = 4, NI = 8, TW = 4;
  logic clk = 0;
  logic [$clog2(NB)-1:0]    rd_blk = 0, tw_blk = 0;
  data_t                    rd_w [N][NI];
  logic                     hw_en = 0, tw_en = 0;
  logic [$clog2(NB*N)-1:0]  hw_row = 0;
  data_t                    hw_data [NI];
  logic [$clog2(NI/TW)-1:0] tw_chunk = 0;
  data_t                    tw_data [N][TW];
  data_t                    shadow [NB][N][NI];
  int checks = 0, failures = 0;

  weight_mem #(.NB(NB), .N(N), .N_IN(NI), .TW(TW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int bk = 0; bk < NB; bk++) begin
      rd_blk = bk[$clog2(NB)-1:0];
      #1;
      for (int r = 0; r < N; r++) for (int c = 0; c < NI; c++) begin
        checks++;
        if (rd_w[r][c] !== shadow[bk][r][c]) begin
          failures++;
          $display("blk %0d row %0d col %0d: %0d exp %0d", bk, r, c, rd_w[r][c], shadow[bk][r][c]);
        end
      end
    end
  endtask

  initial begin
    // initial load of every row
    for (int row = 0; row < NB * N; row++) begin
      @(negedge clk);
      hw_en = 1; hw_row = row[$clog2(NB*N)-1:0];
      for (int c = 0; c < NI; c++) begin
        hw_data[c] = data_t'($urandom);
        shadow[row / N][row % N][c] = hw_data[c];
      end
    end
    @(negedge clk) hw_en = 0;
    check_all();
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      hw_en = $urandom_range(0, 1);
      tw_en = $urandom_range(0, 1);
      hw_row = $urandom;
      tw_blk = $urandom;
      tw_chunk = $urandom;
      for (int c = 0; c < NI; c++) hw_data[c] = data_t'($urandom);
      for (int r = 0; r < N; r++) for (int c = 0; c < TW; c++) tw_data[r][c] = data_t'($urandom);
      if (hw_en) for (int c = 0; c < NI; c++) shadow[hw_row / N][hw_row % N][c] = hw_data[c];
      if (tw_en) for (int r = 0; r < N; r++) for (int c = 0; c < TW; c++)
        shadow[tw_blk][r][int'(tw_chunk) * TW + c] = tw_data[r][c];
      @(posedge clk);
      #1 hw_en = 0; tw_en = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
