// weight_mem: weight storage for every layer of the network.
//
// Weights are kept as N_BLK blocks of N (16) rows by N_IN (256) columns; a
// block holds the weight rows of 16 neurons of one layer, so the node array
// reads exactly one block per issue. Layer k occupies blocks
// layer_base(k) .. layer_base(k)+layer_blocks(k)-1; the 2-neuron output
// layer is padded to a whole block and columns beyond a layer's fan-in are
// padding. Padding must be written as zero; SGD then leaves it at zero
// because the activations that multiply it are zero.
// Ports: one asynchronous block read (forward pass, backward pass and host
// readback share it), a host row write (loading the initial weights), and a
// tile write of 16 rows by TW (32) columns from the backpropagation unit.
// Both writes take effect at the clock edge; the tile write wins if both are
// asserted for the same row. The paper only states that weights are stored
// on chip; the organisation is this design's.
module weight_mem
  import mrf_nn_pkg::*;
#(
  parameter int NB   = N_BLK,
  parameter int N    = N_NODES,
  parameter int N_IN = MAX_FANIN,
  parameter int TW   = BP_LO
) (
  input  logic                          clk,
  // block read
  input  logic [$clog2(NB)-1:0]         rd_blk,
  output data_t                         rd_w [N][N_IN],
  // host row write; row = block * N + row within block
  input  logic                          hw_en,
  input  logic [$clog2(NB*N)-1:0]       hw_row,
  input  data_t                         hw_data [N_IN],
  // tile write from backpropagation
  input  logic                          tw_en,
  input  logic [$clog2(NB)-1:0]         tw_blk,
  input  logic [$clog2(N_IN/TW)-1:0]    tw_chunk,
  input  data_t                         tw_data [N][TW]
);

  data_t mem [NB][N][N_IN];

  always_comb rd_w = mem[rd_blk];

  always_ff @(posedge clk) begin
    if (hw_en)
      mem[int'(hw_row) / N][int'(hw_row) % N] <= hw_data;
    if (tw_en)
      for (int r = 0; r < N; r++)
        for (int c = 0; c < TW; c++)
          mem[tw_blk][r][int'(tw_chunk) * TW + c] <= tw_data[r][c];
  end

endmodule
