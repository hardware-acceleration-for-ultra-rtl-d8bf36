// nn_node: one neuron, y = sigma(sum_i x_i * w_i + b).
//
// All N_IN products are formed in parallel (one multiplier per input, as the
// DSP count of the original design implies) and the result leaves a fixed
// four-stage pipeline, matching the paper's "4 clock cycles" per node:
//   stage 1  x_i * w_i for every input            (registered products)
//   stage 2  adder tree over the products          (registered sum)
//   stage 3  + bias aligned to the product scale, rescale by >>> FRAC
//   stage 4  activation (ReLU or linear) and saturation to 16 bits
// A new input vector may be accepted every cycle. in_valid travels with the
// data and appears as out_valid four cycles later. z is the pre-activation
// value (saturated) needed by backpropagation.
// Fixed-point format (Q7.8), floor rounding of the rescale and saturation are
// this design's choices; the paper states only that the network is integer.
module nn_node
  import mrf_nn_pkg::*;
#(
  parameter int N_IN = MAX_FANIN
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  relu_en,           // 1: ReLU (hidden layers), 0: linear (output)
  input  data_t x [N_IN],
  input  data_t w [N_IN],
  input  data_t b,
  output logic  out_valid,
  output data_t y,
  output data_t z
);

  logic [NODE_LAT-1:0] vld;
  logic [2:0]          relu_p;
  logic signed [PW-1:0] prod_q [N_IN];
  data_t                b_q1, b_q2;
  acc_t                 sum_q, z_q;

  // stage 1: products
  always_ff @(posedge clk) begin
    for (int i = 0; i < N_IN; i++) prod_q[i] <= x[i] * w[i];
    b_q1 <= b;
  end

  // stage 2: adder tree
  acc_t sum_c;
  always_comb begin
    sum_c = '0;
    for (int i = 0; i < N_IN; i++) sum_c += acc_t'(prod_q[i]);
  end
  always_ff @(posedge clk) begin
    sum_q <= sum_c;
    b_q2  <= b_q1;
  end

  // stage 3: bias and rescale
  always_ff @(posedge clk) z_q <= (sum_q + (acc_t'(b_q2) <<< FRAC)) >>> FRAC;

  // stage 4: activation
  always_ff @(posedge clk) begin
    z <= sat(z_q);
    if (relu_p[2] && z_q < 0) y <= '0;
    else                      y <= sat(z_q);
  end

  // valid and mode pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      relu_p <= '0;
    end else begin
      vld    <= {vld[NODE_LAT-2:0], in_valid};
      relu_p <= {relu_p[1:0], relu_en};
    end
  end
  assign out_valid = vld[NODE_LAT-1];

endmodule
