// bias_mem: bias storage, one bias per neuron, organised like weight_mem in
// N_BLK blocks of N (16) so that a block read gives the biases of the 16
// neurons the node array computes in one issue.
// Ports: asynchronous block read, host write of one bias (initial load), and
// a block write of 16 updated biases from the backpropagation unit. Writes
// take effect at the clock edge; the block write wins on a collision.
// Biases are stored in the same Q7.8 format as activations. The paper only
// states that biases are stored on chip.
module bias_mem
  import mrf_nn_pkg::*;
#(
  parameter int NB = N_BLK,
  parameter int N  = N_NODES
) (
  input  logic                      clk,
  input  logic [$clog2(NB)-1:0]     rd_blk,
  output data_t                     rd_b [N],
  input  logic                      hw_en,
  input  logic [$clog2(NB*N)-1:0]   hw_row,
  input  data_t                     hw_data,
  input  logic                      bw_en,
  input  logic [$clog2(NB)-1:0]     bw_blk,
  input  data_t                     bw_data [N]
);

  data_t mem [NB][N];

  always_comb rd_b = mem[rd_blk];

  always_ff @(posedge clk) begin
    if (hw_en) mem[int'(hw_row) / N][int'(hw_row) % N] <= hw_data;
    if (bw_en) mem[bw_blk] <= bw_data;
  end

endmodule
