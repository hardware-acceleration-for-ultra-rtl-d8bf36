// tb_bias_mem: self-checking test of the bias store.
// Random single-bias host writes and 16-wide block writes from the
// backpropagation path are mirrored in a shadow copy; every block is read
// back through the asynchronous port after each edge and compared.
module tb_bias_mem;
  import mrf_nn_pkg::*;

  localparam int NB = 4, N = 4;
  logic clk = 0;
  logic [$clog2(NB)-1:0]   rd_blk = 0, bw_blk = 0;
  data_t                   rd_b [N];
  logic                    hw_en = 0, bw_en = 0;
  logic [$clog2(NB*N)-1:0] hw_row = 0;
  data_t                   hw_data;
  data_t                   bw_data [N];
  data_t                   shadow [NB][N];
  int checks = 0, failures = 0;

  bias_mem #(.NB(NB), .N(N)) dut (.*);

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
      for (int r = 0; r < N; r++) begin
        checks++;
        if (rd_b[r] !== shadow[bk][r]) begin
          failures++;
          $display("blk %0d row %0d: %0d exp %0d", bk, r, rd_b[r], shadow[bk][r]);
        end
      end
    end
  endtask

  initial begin
    for (int row = 0; row < NB * N; row++) begin
      @(negedge clk);
      hw_en = 1; hw_row = row[$clog2(NB*N)-1:0]; hw_data = data_t'($urandom);
      shadow[row / N][row % N] = hw_data;
    end
    @(negedge clk) hw_en = 0;
    check_all();
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      hw_en = $urandom_range(0, 1);
      bw_en = $urandom_range(0, 1);
      hw_row = $urandom; hw_data = data_t'($urandom);
      bw_blk = $urandom;
      for (int r = 0; r < N; r++) bw_data[r] = data_t'($urandom);
      if (hw_en) shadow[hw_row / N][hw_row % N] = hw_data;
      if (bw_en) for (int r = 0; r < N; r++) shadow[bw_blk][r] = bw_data[r];
      @(posedge clk);
      #1 hw_en = 0; bw_en = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
