// act_buffer: activation store, one vector of N_IN entries per layer.
//
// Vector 0 holds the input sample, vector k the outputs y of layer k. The
// forward pass reads vector k-1 as the input of layer k; the backward pass
// reads it again as y^{l} for the weight gradient and, through y > 0, as the
// ReLU derivative sigma'(z). Entries above a layer's size are never written
// and stay at their reset value of zero, which is what zero-pads the node
// inputs and the backpropagation tiles.
// Ports: asynchronous read of a whole vector, a whole-vector write of the
// input sample, a 16-entry write of node-array results at block nw_blk, and
// the output layer's first N_OUT entries as a dedicated output. Writes take
// effect at the clock edge. Keeping the activations on chip is implied by
// the paper's backpropagation equations; the organisation is this design's.
module act_buffer
  import mrf_nn_pkg::*;
#(
  parameter int NL   = N_LAYERS,
  parameter int N_IN = MAX_FANIN,
  parameter int N    = N_NODES,
  parameter int NSIG = N_SIG,
  parameter int NO   = N_OUT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [LAYER_W-1:0]        rd_layer,
  output data_t                     rd_vec [N_IN],
  input  logic                      ld_en,
  input  data_t                     ld_data [NSIG],
  input  logic                      nw_en,
  input  logic [LAYER_W-1:0]        nw_layer,
  input  logic [$clog2(N_IN/N)-1:0] nw_blk,
  input  data_t                     nw_data [N],
  output data_t                     out_y [NO]
);

  data_t vec [NL+1][N_IN];

  always_comb rd_vec = vec[rd_layer];
  always_comb for (int i = 0; i < NO; i++) out_y[i] = vec[NL][i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= NL; k++)
        for (int i = 0; i < N_IN; i++) vec[k][i] <= '0;
    end else begin
      if (ld_en)
        for (int i = 0; i < NSIG; i++) vec[0][i] <= ld_data[i];
      if (nw_en)
        for (int j = 0; j < N; j++) vec[nw_layer][int'(nw_blk) * N + j] <= nw_data[j];
    end
  end

endmodule
