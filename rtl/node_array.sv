// node_array: N_NODES neurons evaluated side by side on one input vector.
//
// The paper places 16 nodes of the network's second layer on the FPGA and
// iterates them over every layer. Each issue presents one input vector x
// (the previous layer's activations, zero-padded to N_IN), one 16-row weight
// block and the matching 16 biases; 16 neuron outputs return NODE_LAT (4)
// cycles later. A tag (here the layer and block number) travels with the
// data so the sequencer knows where to store the results. One issue per
// cycle is accepted; there is no back-pressure.
module node_array
  import mrf_nn_pkg::*;
#(
  parameter int N     = N_NODES,
  parameter int N_IN  = MAX_FANIN,
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             relu_en,
  input  logic [TAG_W-1:0] in_tag,
  input  data_t            x [N_IN],
  input  data_t            w [N][N_IN],
  input  data_t            b [N],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output data_t            y [N],
  output data_t            z [N]
);

  logic [N-1:0] vld;

  for (genvar n = 0; n < N; n++) begin : g_node
    nn_node #(.N_IN(N_IN)) u_node (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .relu_en  (relu_en),
      .x        (x),
      .w        (w[n]),
      .b        (b[n]),
      .out_valid(vld[n]),
      .y        (y[n]),
      .z        (z[n])
    );
  end

  // tag pipeline, aligned with the node latency
  logic [TAG_W-1:0] tag_p [NODE_LAT];
  always_ff @(posedge clk) begin
    tag_p[0] <= in_tag;
    for (int s = 1; s < NODE_LAT; s++) tag_p[s] <= tag_p[s-1];
  end

  assign out_valid = vld[0];
  assign out_tag   = tag_p[NODE_LAT-1];

  // all nodes share the same valid pipeline
  a_valid_aligned: assert property (@(posedge clk) disable iff (!rst_n) (vld == '0 || vld == '1))
    else $error("node valid pipelines diverged");

endmodule
