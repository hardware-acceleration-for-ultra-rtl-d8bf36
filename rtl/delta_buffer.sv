// delta_buffer: error terms (delta) of the backward pass.
//
// up[] holds delta of the upper layer of the layer pair being processed and
// feeds the backpropagation unit. acc[] collects, column by column, the
// masked partial sums (W^T delta o sigma') the unit returns for the lower
// layer, at product scale. When a layer pair is finished, finalize rescales
// acc by >>> FRAC, saturates it into up[] (the lower layer becomes the upper
// one) and clears acc. load_out seeds up[] with the output-layer delta.
// Ports: whole-vector read of up[]; add of TW (32) partial sums at column
// chunk add_chunk; load_out with N (16) values (rest of up[] cleared);
// finalize. All take effect at the clock edge; at most one of them should be
// asserted per cycle (checked by an assertion).
module delta_buffer
  import mrf_nn_pkg::*;
#(
  parameter int N_IN = MAX_FANIN,
  parameter int N    = N_NODES,
  parameter int TW   = BP_LO
) (
  input  logic                        clk,
  input  logic                        rst_n,
  output data_t                       up [N_IN],
  input  logic                        add_en,
  input  logic [$clog2(N_IN/TW)-1:0]  add_chunk,
  input  acc_t                        add_psum [TW],
  input  logic                        load_out,
  input  data_t                       out_delta [N],
  input  logic                        finalize
);

  acc_t acc [N_IN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_IN; i++) begin
        up[i]  <= '0;
        acc[i] <= '0;
      end
    end else if (load_out) begin
      for (int i = 0; i < N_IN; i++) up[i] <= (i < N) ? out_delta[i % N] : '0;
    end else if (finalize) begin
      for (int i = 0; i < N_IN; i++) begin
        up[i]  <= sat(acc[i] >>> FRAC);
        acc[i] <= '0;
      end
    end else if (add_en) begin
      for (int j = 0; j < TW; j++)
        acc[int'(add_chunk) * TW + j] <= acc[int'(add_chunk) * TW + j] + add_psum[j];
    end
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
                             (32'(add_en) + 32'(load_out) + 32'(finalize) <= 1))
    else $error("delta_buffer: more than one operation in a cycle");

endmodule
