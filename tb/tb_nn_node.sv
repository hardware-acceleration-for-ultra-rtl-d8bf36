// tb_nn_node: self-checking test of one neuron.
// Streams random input vectors, weights, biases and activation modes into
// nn_node, one per cycle, and compares y and z with a reference computed
// here from the neuron equation (Q7.8, floor rescale, saturation). Also
// checks that every result appears exactly four cycles after its input and
// that saturation and ReLU clipping both occurred.
module tb_nn_node;
  import mrf_nn_pkg::*;

  localparam int N = 8;
  logic  clk = 0, rst_n = 1;
  logic  in_valid = 0, relu_en = 0;
  data_t x [N], w [N], b;
  logic  out_valid;
  data_t y, z;
  int    checks = 0, failures = 0;
  int    cyc = 0;

  nn_node #(.N_IN(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { data_t y; data_t z; int t; } exp_t;
  exp_t q [$];
  int n_sat = 0, n_clip = 0;

  function automatic void ref_node(input data_t xv [N], input data_t wv [N], input data_t bv,
                                   input logic relu, output data_t yv, output data_t zv);
    longint s = 0;
    for (int i = 0; i < N; i++) s += longint'(xv[i]) * longint'(wv[i]);
    s = (s + (longint'(bv) * 256)) >>> 8;
    if (s > 32767) zv = 16'sh7fff; else if (s < -32768) zv = 16'sh8000; else zv = data_t'(s);
    yv = (relu && s < 0) ? data_t'(0) : zv;
  endfunction

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (y !== e.y || z !== e.z || cyc - e.t != 4) begin
      failures++;
      $display("mismatch: y=%0d exp %0d z=%0d exp %0d latency %0d", y, e.y, z, e.z, cyc - e.t);
    end
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      exp_t e;
      int big;
      big = (n % 10 == 0);
      #1;
      for (int i = 0; i < N; i++) begin
        x[i] = big ? data_t'($urandom) : data_t'($signed($urandom_range(0, 1023)) - 512);
        w[i] = big ? data_t'($urandom) : data_t'($signed($urandom_range(0, 255)) - 128);
      end
      b        = data_t'($signed($urandom_range(0, 2047)) - 1024);
      relu_en  = $urandom_range(0, 1);
      in_valid = ($urandom_range(0, 3) != 0);
      ref_node(x, w, b, relu_en, e.y, e.z);
      e.t = cyc;
      if (in_valid) begin
        q.push_back(e);
        if (e.z == 16'sh7fff || e.z == 16'sh8000) n_sat++;
        if (relu_en && e.z < 0) n_clip++;
      end
      @(posedge clk);
    end
    #1 in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_sat == 0 || n_clip == 0) begin
      failures++;
      $display("left %0d, saturations %0d, clips %0d", q.size(), n_sat, n_clip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
