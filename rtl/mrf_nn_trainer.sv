// mrf_nn_trainer: on-chip forward pass and SGD training of the integer MRF
// network N_SIG -> 256 -> 128 -> 64 -> 32 -> 16 -> 2 (T1, T2).
//
// One 16-node array (node_array) evaluates every layer 16 neurons at a time,
// and one 16x32 backpropagation unit (backprop_unit) walks every layer pair
// tile by tile; train_controller schedules both. Weights and biases live in
// weight_mem and bias_mem, activations in act_buffer and error terms in
// delta_buffer. output_error forms the MSE output delta.
//
// Host side (what a PCIe endpoint would drive; the endpoint itself is not
// part of this RTL):
//   * w_wr_*  write one 256-entry weight row, b_wr_* one bias; row index =
//     block*16 + row within block; accepted only while idle. All rows,
//     including padding, must be written before the first sample.
//   * rd_row  reads back one weight row and its bias (combinational, idle only).
//   * sample_valid/sample_ready hand over one input vector and its two
//     targets; sample_train selects training (forward + backward + update)
//     or inference (forward only).
//   * result_valid pulses for one cycle when the sample is finished;
//     result_y holds the network outputs of that sample's forward pass
//     (before the weight update) until the next sample overwrites them.
// Timing at the default sizes: forward pass 56 cycles, output error 1,
// backward pass 238, plus one cycle each to accept and finish.
// Learning rate is 2^-lr_shift (plain SGD); the data format is signed Q7.8.
// The node array's pre-activation output z and the spare tag bit are left
// unconnected: the ReLU derivative is taken from the stored activation
// (y > 0), which is the same for ReLU with this rounding.
module mrf_nn_trainer
  import mrf_nn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // host weight / bias load and readback
  input  logic        w_wr_en,
  input  logic [ROW_W-1:0] w_wr_row,
  input  data_t       w_wr_data [MAX_FANIN],
  input  logic        b_wr_en,
  input  logic [ROW_W-1:0] b_wr_row,
  input  data_t       b_wr_data,
  input  logic [ROW_W-1:0] rd_row,
  output data_t       rd_w_row [MAX_FANIN],
  output data_t       rd_bias,
  // samples
  input  logic        sample_valid,
  output logic        sample_ready,
  input  logic        sample_train,
  input  data_t       sample_x [N_SIG],
  input  data_t       sample_t [N_OUT],
  input  logic [4:0]  lr_shift,
  // results and status
  output logic        result_valid,
  output data_t       result_y [N_OUT],
  output phase_t      phase,
  output logic        busy
);

  // ---- controller -------------------------------------------------------------
  blk_t       c_rd_blk;
  layer_t     c_rd_layer;
  logic [2:0] c_chunk;
  logic [3:0] c_up_blk;
  logic       na_valid, na_relu, de_load, bp_valid, bp_upd_bias, bp_dmask_en, de_finalize;
  logic [7:0] na_tag, bp_tag;

  train_controller u_ctrl (
    .clk, .rst_n,
    .start_valid (sample_valid),
    .start_ready (sample_ready),
    .start_train (sample_train),
    .phase, .busy,
    .done        (result_valid),
    .rd_blk      (c_rd_blk),
    .rd_layer    (c_rd_layer),
    .chunk       (c_chunk),
    .up_blk      (c_up_blk),
    .na_valid, .na_relu, .na_tag,
    .de_load,
    .bp_valid, .bp_upd_bias, .bp_dmask_en, .bp_tag,
    .de_finalize
  );

  logic accept;
  assign accept = sample_valid && sample_ready;

  // targets are captured with the sample
  data_t tgt_q [N_OUT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int j = 0; j < N_OUT; j++) tgt_q[j] <= '0;
    else if (accept) tgt_q <= sample_t;
  end

  // ---- memories ---------------------------------------------------------------
  data_t blk_w [N_NODES][MAX_FANIN];
  data_t blk_b [N_NODES];
  blk_t  mem_rd_blk;
  assign mem_rd_blk = busy ? c_rd_blk : blk_t'(int'(rd_row) / N_NODES);

  logic              bp_out_valid, bp_out_ub;
  logic [7:0]        bp_out_tag;
  data_t             bp_w_new [BP_UP][BP_LO];
  data_t             bp_b_new [BP_UP];
  acc_t              bp_psum  [BP_LO];

  weight_mem u_wmem (
    .clk,
    .rd_blk   (mem_rd_blk),
    .rd_w     (blk_w),
    .hw_en    (w_wr_en && !busy),
    .hw_row   (w_wr_row),
    .hw_data  (w_wr_data),
    .tw_en    (bp_out_valid),
    .tw_blk   (bp_out_tag[7:3]),
    .tw_chunk (bp_out_tag[2:0]),
    .tw_data  (bp_w_new)
  );

  bias_mem u_bmem (
    .clk,
    .rd_blk  (mem_rd_blk),
    .rd_b    (blk_b),
    .hw_en   (b_wr_en && !busy),
    .hw_row  (b_wr_row),
    .hw_data (b_wr_data),
    .bw_en   (bp_out_valid && bp_out_ub),
    .bw_blk  (bp_out_tag[7:3]),
    .bw_data (bp_b_new)
  );

  assign rd_w_row = blk_w[int'(rd_row) % N_NODES];
  assign rd_bias  = blk_b[int'(rd_row) % N_NODES];

  // ---- activations ------------------------------------------------------------
  data_t       act_vec [MAX_FANIN];
  logic        na_out_valid;
  logic [7:0]  na_out_tag;
  data_t       na_y [N_NODES];
  data_t       na_z [N_NODES];

  act_buffer u_act (
    .clk, .rst_n,
    .rd_layer (c_rd_layer),
    .rd_vec   (act_vec),
    .ld_en    (accept),
    .ld_data  (sample_x),
    .nw_en    (na_out_valid),
    .nw_layer (na_out_tag[6:4]),
    .nw_blk   (na_out_tag[3:0]),
    .nw_data  (na_y),
    .out_y    (result_y)
  );

  // ---- forward datapath -------------------------------------------------------
  node_array u_nodes (
    .clk, .rst_n,
    .in_valid  (na_valid),
    .relu_en   (na_relu),
    .in_tag    (na_tag),
    .x         (act_vec),
    .w         (blk_w),
    .b         (blk_b),
    .out_valid (na_out_valid),
    .out_tag   (na_out_tag),
    .y         (na_y),
    .z         (na_z)
  );

  // ---- output error and deltas ------------------------------------------------
  data_t out_delta [N_NODES];
  data_t delta_up  [MAX_FANIN];

  output_error u_err (
    .y     (result_y),
    .t     (tgt_q),
    .delta (out_delta)
  );

  delta_buffer u_delta (
    .clk, .rst_n,
    .up        (delta_up),
    .add_en    (bp_out_valid),
    .add_chunk (bp_out_tag[2:0]),
    .add_psum  (bp_psum),
    .load_out  (de_load),
    .out_delta (out_delta),
    .finalize  (de_finalize)
  );

  // ---- backward datapath: tile selection ----------------------------------------
  data_t         t_w  [BP_UP][BP_LO];
  data_t         t_d  [BP_UP];
  data_t         t_y  [BP_LO];
  logic [BP_LO-1:0] t_m;

  always_comb begin
    for (int l = 0; l < BP_LO; l++) begin
      t_y[l] = act_vec[int'(c_chunk) * BP_LO + l];
      t_m[l] = bp_dmask_en && (t_y[l] > 0);
    end
    for (int u = 0; u < BP_UP; u++) begin
      t_d[u] = delta_up[int'(c_up_blk) * BP_UP + u];
      for (int l = 0; l < BP_LO; l++) t_w[u][l] = blk_w[u][int'(c_chunk) * BP_LO + l];
    end
  end

  backprop_unit #(.TAG_W(8)) u_bp (
    .clk, .rst_n,
    .in_valid     (bp_valid),
    .in_tag       (bp_tag),
    .upd_bias     (bp_upd_bias),
    .lr_shift     (lr_shift),
    .w            (t_w),
    .b            (blk_b),
    .delta        (t_d),
    .y_lo         (t_y),
    .dmask        (t_m),
    .out_valid    (bp_out_valid),
    .out_tag      (bp_out_tag),
    .out_upd_bias (bp_out_ub),
    .w_new        (bp_w_new),
    .b_new        (bp_b_new),
    .psum         (bp_psum)
  );

endmodule
