// tb_output_error: self-checking test of the output-layer delta.
// Applies random outputs and targets, including extremes that saturate, and
// checks delta_j = sat(y_j - t_j) for the real outputs and zero for the
// padding rows.
module tb_output_error;
  import mrf_nn_pkg::*;

  localparam int NO = 2, N = 16;
  data_t y [NO], t [NO], delta [N];
  int checks = 0, failures = 0;

  output_error #(.NO(NO), .N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int j = 0; j < NO; j++) begin
        y[j] = data_t'($urandom);
        t[j] = (it % 2) ? data_t'($urandom) : data_t'(int'(y[j]) - 100 + $urandom_range(0, 200));
      end
      #1;
      for (int j = 0; j < N; j++) begin
        int d;
        data_t e;
        d = (j < NO) ? int'(y[j]) - int'(t[j]) : 0;
        e = (d > 32767) ? 16'sh7fff : (d < -32768) ? 16'sh8000 : data_t'(d);
        checks++;
        if (delta[j] !== e) begin failures++; $display("delta[%0d]=%0d exp %0d", j, delta[j], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
