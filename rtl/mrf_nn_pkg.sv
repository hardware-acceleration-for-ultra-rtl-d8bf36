// mrf_nn_pkg: types, constants and layer geometry shared by the MRF network
// trainer.
//
// The network is the reduced MRF regression net: the two real/imaginary
// signal halves (N_SIG values) feed five ReLU layers of 256, 128, 64, 32 and
// 16 neurons and a linear output layer of 2 neurons (T1 and T2). Layer sizes,
// the 16-node compute array, the 16x32 backpropagation tile and the node and
// backpropagation latencies follow the paper. The number format (signed
// 16-bit fixed point with 8 fractional bits), N_SIG, the padding of the
// 2-neuron output layer to one 16-row block and the block numbering of the
// weight store are this design's own choices.
package mrf_nn_pkg;

  // ---- number format -------------------------------------------------------
  localparam int DW    = 16;          // activations, weights, biases, deltas
  localparam int FRAC  = 8;           // fractional bits (Q7.8)
  localparam int PW    = 2 * DW;      // product width
  localparam int ACC_W = 48;          // accumulator width (sum of <=256 products)

  typedef logic signed [DW-1:0]    data_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam data_t DATA_MAX = data_t'(16'sh7fff);
  localparam data_t DATA_MIN = data_t'(16'sh8000);

  // ---- array geometry ------------------------------------------------------
  localparam int N_NODES   = 16;      // nodes computed in parallel
  localparam int MAX_FANIN = 256;     // inputs per node (second layer fan-in)
  localparam int BP_UP     = 16;      // backprop tile: upper-layer rows
  localparam int BP_LO     = 32;      // backprop tile: lower-layer columns
  localparam int NODE_LAT  = 4;       // node latency in cycles
  localparam int BP_LAT    = 3;       // backprop unit latency in cycles

  // ---- network geometry ----------------------------------------------------
  localparam int N_SIG     = 256;     // input vector length (real + imaginary)
  localparam int N_LAYERS  = 6;       // 5 hidden ReLU layers + linear output
  localparam int N_OUT     = 2;       // T1, T2
  localparam int N_BLK     = 32;      // 16-row weight blocks over all layers
  localparam int BLK_W     = $clog2(N_BLK);
  localparam int ROW_W     = $clog2(N_BLK * N_NODES);
  localparam int LAYER_W   = 3;

  typedef logic [LAYER_W-1:0] layer_t;
  typedef logic [BLK_W-1:0]   blk_t;

  // neurons in layer k (1..6); layer 0 is the input vector
  function automatic int layer_size(input int k);
    case (k)
      0: return N_SIG;
      1: return 256;
      2: return 128;
      3: return 64;
      4: return 32;
      5: return 16;
      6: return N_OUT;
      default: return 0;
    endcase
  endfunction

  // 16-row weight blocks of layer k (output layer padded to one block)
  function automatic int layer_blocks(input int k);
    return (layer_size(k) + N_NODES - 1) / N_NODES;
  endfunction

  // first weight block of layer k
  function automatic int layer_base(input int k);
    int b = 0;
    for (int j = 1; j < k; j++) b += layer_blocks(j);
    return b;
  endfunction

  // 32-column chunks of the fan-in of layer k
  function automatic int layer_chunks(input int k);
    return (layer_size(k - 1) + BP_LO - 1) / BP_LO;
  endfunction

  // saturate a wide signed value to the data format
  function automatic data_t sat(input acc_t v);
    if (v > acc_t'(DATA_MAX)) return DATA_MAX;
    if (v < acc_t'(DATA_MIN)) return DATA_MIN;
    return data_t'(v);
  endfunction

  // controller phase, visible at the top for monitoring
  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,
    PH_FWD   = 3'd1,
    PH_ERR   = 3'd2,
    PH_BWD   = 3'd3,
    PH_DONE  = 3'd4
  } phase_t;

endpackage
