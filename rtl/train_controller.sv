// train_controller: sequencer of the forward pass, the output error and the
// backward pass for one training sample (or the forward pass alone in
// inference mode).
//
// Forward pass: for each layer k = 1..6 it issues the layer's 16-row weight
// blocks to the node array on consecutive cycles, then waits NODE_LAT (4)
// cycles for the last block's results before the next layer, whose input is
// the layer just written. A layer of B blocks therefore takes B + 4 cycles,
// and the whole forward pass 16+8+4+2+1+1 + 6*4 = 56 cycles, the figure the
// paper quotes for all levels.
// Backward pass (training mode only): one cycle loads the output delta, then
// for each layer pair k = 6..1 it issues every 16x32 tile (upper block r
// outer, lower column chunk c inner) to the backpropagation unit, waits
// BP_LAT (3) cycles for the last write-back and spends one cycle
// finalizing the lower layer's delta. The paper's 104-cycle backward figure
// cannot be derived from its text; this schedule takes 238 cycles at the
// default sizes.
// (That figure equals the 86 tiles of pairs 6..2 plus 3 cycles for each of
// the six pairs, i.e. it omits the input layer's 128 tiles, which are
// trained here.)
// Handshake: start_valid/start_ready accept a sample in PH_IDLE; done pulses
// for one cycle in PH_DONE, after which the controller returns to idle.
// Tags carry the destination of each result so the top can write it back.
module train_controller
  import mrf_nn_pkg::*;
#(
  parameter int NL = N_LAYERS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_valid,
  output logic          start_ready,
  input  logic          start_train,       // 1: train on the sample, 0: inference only
  output phase_t        phase,
  output logic          busy,
  output logic          done,
  // memory addressing
  output blk_t          rd_blk,            // weight/bias block read
  output layer_t        rd_layer,          // activation vector read
  output logic [2:0]    chunk,             // lower-layer column chunk of the current tile
  output logic [3:0]    up_blk,            // upper-layer block of the current tile
  // node array issue
  output logic          na_valid,
  output logic          na_relu,
  output logic [7:0]    na_tag,            // {layer, block within layer}
  // output error
  output logic          de_load,
  // backprop issue
  output logic          bp_valid,
  output logic          bp_upd_bias,
  output logic          bp_dmask_en,       // lower layer is a ReLU layer
  output logic [7:0]    bp_tag,            // {global block, chunk}
  output logic          de_finalize
);

  typedef enum logic [2:0] {
    S_IDLE, S_FWD_ISSUE, S_FWD_WAIT, S_ERR, S_BWD_ISSUE, S_BWD_WAIT, S_BWD_FIN, S_DONE
  } state_t;

  state_t     state;
  logic [2:0] k;        // current layer (forward) or upper layer of the pair (backward)
  logic [3:0] r;        // block within the layer
  logic [2:0] c;        // column chunk
  logic [2:0] wcnt;
  logic       train_q;

  int nblk_k, nchk_k, base_k;
  always_comb begin
    nblk_k = layer_blocks(int'(k));
    nchk_k = layer_chunks(int'(k));
    base_k = layer_base(int'(k));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k       <= '0;
      r       <= '0;
      c       <= '0;
      wcnt    <= '0;
      train_q <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start_valid) begin
          train_q <= start_train;
          k       <= 3'd1;
          r       <= '0;
          state   <= S_FWD_ISSUE;
        end
        S_FWD_ISSUE: begin
          if (int'(r) == nblk_k - 1) begin
            wcnt  <= '0;
            state <= S_FWD_WAIT;
          end else r <= r + 1'b1;
        end
        S_FWD_WAIT: begin
          wcnt <= wcnt + 1'b1;
          if (int'(wcnt) == NODE_LAT - 1) begin
            r <= '0;
            if (int'(k) == NL) state <= train_q ? S_ERR : S_DONE;
            else begin
              k     <= k + 1'b1;
              state <= S_FWD_ISSUE;
            end
          end
        end
        S_ERR: begin
          k     <= 3'(NL);
          r     <= '0;
          c     <= '0;
          state <= S_BWD_ISSUE;
        end
        S_BWD_ISSUE: begin
          if (int'(c) == nchk_k - 1) begin
            c <= '0;
            if (int'(r) == nblk_k - 1) begin
              wcnt  <= '0;
              state <= S_BWD_WAIT;
            end else r <= r + 1'b1;
          end else c <= c + 1'b1;
        end
        S_BWD_WAIT: begin
          wcnt <= wcnt + 1'b1;
          if (int'(wcnt) == BP_LAT - 1) state <= S_BWD_FIN;
        end
        S_BWD_FIN: begin
          r <= '0;
          c <= '0;
          if (k == 3'd1) state <= S_DONE;
          else begin
            k     <= k - 1'b1;
            state <= S_BWD_ISSUE;
          end
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    start_ready = (state == S_IDLE);
    busy        = (state != S_IDLE);
    done        = (state == S_DONE);
    case (state)
      S_IDLE:                               phase = PH_IDLE;
      S_FWD_ISSUE, S_FWD_WAIT:              phase = PH_FWD;
      S_ERR:                                phase = PH_ERR;
      S_BWD_ISSUE, S_BWD_WAIT, S_BWD_FIN:   phase = PH_BWD;
      default:                              phase = PH_DONE;
    endcase
    rd_blk      = blk_t'(base_k + int'(r));
    rd_layer    = k - 1'b1;
    chunk       = c;
    up_blk      = r;
    na_valid    = (state == S_FWD_ISSUE);
    na_relu     = (int'(k) != NL);
    na_tag      = {1'b0, k, r};
    de_load     = (state == S_ERR);
    bp_valid    = (state == S_BWD_ISSUE);
    bp_upd_bias = (c == '0);
    bp_dmask_en = (k != 3'd1);
    bp_tag      = {rd_blk, c};
    de_finalize = (state == S_BWD_FIN);
  end

endmodule
