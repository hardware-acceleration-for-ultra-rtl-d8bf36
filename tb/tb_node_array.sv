// tb_node_array: self-checking test of the parallel node array.
// Issues random input vectors with a distinct weight row and bias per node
// and a tag per issue, back to back and with gaps, and checks every node's y
// and z, the returned tag and the four-cycle latency against a reference
// neuron computed here.
module tb_node_array;
  import mrf_nn_pkg::*;

  localparam int N = 4, NI = 8, TW = 8;
  logic          clk = 0, rst_n = 1;
  logic          in_valid = 0, relu_en = 0;
  logic [TW-1:0] in_tag = 0;
  data_t         x [NI], w [N][NI], b [N];
  logic          out_valid;
  logic [TW-1:0] out_tag;
  data_t         y [N], z [N];
  int            checks = 0, failures = 0, cyc = 0;

  node_array #(.N(N), .N_IN(NI), .TAG_W(TW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { data_t y [N]; data_t z [N]; logic [TW-1:0] tag; int t; } exp_t;
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
    if (out_tag !== e.tag || cyc - e.t != 4) begin
      failures++;
      $display("tag %0d exp %0d latency %0d", out_tag, e.tag, cyc - e.t);
    end
    for (int n = 0; n < N; n++) begin
      checks++;
      if (y[n] !== e.y[n] || z[n] !== e.z[n]) begin
        failures++;
        $display("node %0d: y=%0d exp %0d z=%0d exp %0d", n, y[n], e.y[n], z[n], e.z[n]);
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
      for (int i = 0; i < NI; i++) x[i] = data_t'($signed($urandom_range(0, 1023)) - 512);
      for (int n = 0; n < N; n++) begin
        for (int i = 0; i < NI; i++) w[n][i] = data_t'($signed($urandom_range(0, 255)) - 128);
        b[n] = data_t'($signed($urandom_range(0, 2047)) - 1024);
      end
      relu_en  = $urandom_range(0, 1);
      in_tag   = TW'(it);
      in_valid = ($urandom_range(0, 2) != 0);
      for (int n = 0; n < N; n++) begin
        longint s; s = 0;
        for (int i = 0; i < NI; i++) s += longint'(x[i]) * longint'(w[n][i]);
        s = (s + longint'(b[n]) * 256) >>> 8;
        e.z[n] = sat16(s);
        e.y[n] = (relu_en && s < 0) ? data_t'(0) : sat16(s);
      end
      e.tag = in_tag;
      e.t   = cyc;
      if (in_valid) q.push_back(e);
      @(posedge clk);
    end
    #1 in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
