// backprop_unit: stochastic-gradient backpropagation on one weight tile.
//
// The tile joins NU (16) neurons of an upper layer l+1 to NL (32) neurons of
// the lower layer l, the 16-by-32 size the paper implements ("between the
// layers containing 16 and 32 nodes"). Larger layer pairs are covered by
// iterating the unit over tiles. For one tile it evaluates the paper's
// equations
//   delta^l      = (W^{l+1})^T delta^{l+1} o sigma'(z^l)
//   dL/dW^{l+1}  = y^l delta^{l+1},   dL/db^{l+1} = delta^{l+1}
// and applies plain SGD with a power-of-two learning rate 2^-lr_shift:
//   w <- sat(w - (y*delta >>> (FRAC+lr_shift)))
//   b <- sat(b - (delta   >>> lr_shift))          (only when upd_bias)
// psum is this tile's contribution to delta^l, masked by sigma'(z^l) (dmask,
// 1 where the lower neuron's ReLU was active) and kept at product scale
// (2*FRAC fractional bits); the caller sums the contributions of all tiles
// of a column and rescales once. psum uses the weights before the update.
// Pipeline, three cycles as in the paper: products | column sums and update
// steps | subtract, saturate, mask. One tile per cycle may be issued; the tag
// travels with it.
module backprop_unit
  import mrf_nn_pkg::*;
#(
  parameter int NU    = BP_UP,
  parameter int NL    = BP_LO,
  parameter int TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic             upd_bias,
  input  logic [4:0]       lr_shift,
  input  data_t            w     [NU][NL],
  input  data_t            b     [NU],
  input  data_t            delta [NU],     // delta of the upper layer
  input  data_t            y_lo  [NL],     // activations of the lower layer
  input  logic [NL-1:0]    dmask,          // sigma'(z) of the lower layer
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output logic             out_upd_bias,
  output data_t            w_new [NU][NL],
  output data_t            b_new [NU],
  output acc_t             psum  [NL]
);

  // ---- stage 1: products ----------------------------------------------------
  logic signed [PW-1:0] pd_q [NU][NL];   // w * delta
  logic signed [PW-1:0] pg_q [NU][NL];   // y * delta
  data_t                w_q1 [NU][NL];
  data_t                b_q1 [NU];
  data_t                d_q1 [NU];
  logic [NL-1:0]        m_q1;
  logic [4:0]           lr_q1;

  always_ff @(posedge clk) begin
    for (int u = 0; u < NU; u++) begin
      for (int l = 0; l < NL; l++) begin
        pd_q[u][l] <= w[u][l] * delta[u];
        pg_q[u][l] <= y_lo[l] * delta[u];
        w_q1[u][l] <= w[u][l];
      end
      b_q1[u] <= b[u];
      d_q1[u] <= delta[u];
    end
    m_q1  <= dmask;
    lr_q1 <= lr_shift;
  end

  // ---- stage 2: column sums and update steps --------------------------------
  acc_t  colsum_c [NL];
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      colsum_c[l] = '0;
      for (int u = 0; u < NU; u++) colsum_c[l] += acc_t'(pd_q[u][l]);
    end
  end

  acc_t  colsum_q [NL];
  acc_t  wstep_q  [NU][NL];
  acc_t  bstep_q  [NU];
  data_t w_q2     [NU][NL];
  data_t b_q2     [NU];
  logic [NL-1:0] m_q2;

  always_ff @(posedge clk) begin
    for (int l = 0; l < NL; l++) colsum_q[l] <= colsum_c[l];
    for (int u = 0; u < NU; u++) begin
      for (int l = 0; l < NL; l++) begin
        wstep_q[u][l] <= acc_t'(pg_q[u][l]) >>> (FRAC + int'(lr_q1));
        w_q2[u][l]    <= w_q1[u][l];
      end
      bstep_q[u] <= acc_t'(d_q1[u]) >>> lr_q1;
      b_q2[u]    <= b_q1[u];
    end
    m_q2 <= m_q1;
  end

  // ---- stage 3: update, saturate, mask --------------------------------------
  always_ff @(posedge clk) begin
    for (int l = 0; l < NL; l++) psum[l] <= m_q2[l] ? colsum_q[l] : '0;
    for (int u = 0; u < NU; u++) begin
      for (int l = 0; l < NL; l++) w_new[u][l] <= sat(acc_t'(w_q2[u][l]) - wstep_q[u][l]);
      b_new[u] <= sat(acc_t'(b_q2[u]) - bstep_q[u]);
    end
  end

  // ---- control pipeline ------------------------------------------------------
  logic [BP_LAT-1:0] vld;
  logic [BP_LAT-1:0] ub;
  logic [TAG_W-1:0]  tag_p [BP_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      ub  <= '0;
    end else begin
      vld <= {vld[BP_LAT-2:0], in_valid};
      ub  <= {ub[BP_LAT-2:0], upd_bias};
    end
  end
  always_ff @(posedge clk) begin
    tag_p[0] <= in_tag;
    for (int s = 1; s < BP_LAT; s++) tag_p[s] <= tag_p[s-1];
  end
  assign out_valid    = vld[BP_LAT-1];
  assign out_upd_bias = ub[BP_LAT-1];
  assign out_tag      = tag_p[BP_LAT-1];

endmodule
