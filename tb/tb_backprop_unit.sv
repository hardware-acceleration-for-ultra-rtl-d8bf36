// tb_backprop_unit: self-checking test of the backpropagation tile.
// Drives random weight tiles, biases, upper-layer deltas, lower-layer
// activations, ReLU masks and learning-rate shifts, and compares the
// updated weights and biases and the masked delta partial sums with the SGD
// equations evaluated here. Checks the three-cycle latency, that the tag and
// bias-update flag travel with the data, and that one tile per cycle is
// accepted.
module tb_backprop_unit;
  import mrf_nn_pkg::*;

  localparam int NU = 4, NL = 8, TW = 8;
  logic          clk = 0, rst_n = 1;
  logic          in_valid = 0, upd_bias = 0;
  logic [TW-1:0] in_tag = 0;
  logic [4:0]    lr_shift = 0;
  data_t         w [NU][NL], b [NU], delta [NU], y_lo [NL];
  logic [NL-1:0] dmask = 0;
  logic          out_valid, out_upd_bias;
  logic [TW-1:0] out_tag;
  data_t         w_new [NU][NL], b_new [NU];
  acc_t          psum [NL];
  int            checks = 0, failures = 0, cyc = 0;

  backprop_unit #(.NU(NU), .NL(NL), .TAG_W(TW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    data_t w [NU][NL]; data_t b [NU]; longint p [NL];
    logic ub; logic [TW-1:0] tag; int t;
  } exp_t;
  exp_t q [$];

  function automatic data_t sat16(input longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return data_t'(v);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (out_tag !== e.tag || out_upd_bias !== e.ub || cyc - e.t != 3) begin
      failures++;
      $display("tag %0d exp %0d ub %0b latency %0d", out_tag, e.tag, out_upd_bias, cyc - e.t);
    end
    for (int l = 0; l < NL; l++) begin
      checks++;
      if (longint'(psum[l]) != e.p[l]) begin
        failures++; $display("psum[%0d]=%0d exp %0d", l, psum[l], e.p[l]);
      end
    end
    for (int u = 0; u < NU; u++) begin
      checks++;
      if (b_new[u] !== e.b[u]) begin failures++; $display("b[%0d]=%0d exp %0d", u, b_new[u], e.b[u]); end
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (w_new[u][l] !== e.w[u][l]) begin
          failures++; $display("w[%0d][%0d]=%0d exp %0d", u, l, w_new[u][l], e.w[u][l]);
        end
      end
    end
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int it = 0; it < 300; it++) begin
      exp_t e;
      #1;
      for (int u = 0; u < NU; u++) begin
        for (int l = 0; l < NL; l++) w[u][l] = (it % 7 == 0) ? data_t'($urandom) : data_t'($signed($urandom_range(0, 511)) - 256);
        b[u]     = data_t'($signed($urandom_range(0, 2047)) - 1024);
        delta[u] = data_t'($signed($urandom_range(0, 4095)) - 2048);
      end
      for (int l = 0; l < NL; l++) y_lo[l] = (it % 5 == 0) ? data_t'($urandom) : data_t'($urandom_range(0, 2047));
      dmask    = NL'($urandom);
      lr_shift = 5'($urandom_range(0, 10));
      upd_bias = $urandom_range(0, 1);
      in_tag   = TW'(it);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int l = 0; l < NL; l++) begin
        longint s; s = 0;
        for (int u = 0; u < NU; u++) s += longint'(w[u][l]) * longint'(delta[u]);
        e.p[l] = dmask[l] ? s : 0;
      end
      for (int u = 0; u < NU; u++) begin
        e.b[u] = sat16(longint'(b[u]) - (longint'(delta[u]) >>> lr_shift));
        for (int l = 0; l < NL; l++)
          e.w[u][l] = sat16(longint'(w[u][l]) - ((longint'(y_lo[l]) * longint'(delta[u])) >>> (8 + lr_shift)));
      end
      e.ub  = upd_bias;
      e.tag = in_tag;
      e.t   = cyc;
      if (in_valid) q.push_back(e);
      @(posedge clk);
    end
    #1 in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
