// output_error: delta of the linear output layer under the MSE loss.
//
// For the loss sum_j (y_j - t_j)^2 and a linear output activation the
// output-layer error is delta_j = y_j - t_j (the constant factor 2 is folded
// into the learning rate). The result is saturated to 16 bits and placed in
// the first NO entries of an N-entry vector whose other entries, the padding
// rows of the output weight block, are zero so that they are never updated.
// Purely combinational.
module output_error
  import mrf_nn_pkg::*;
#(
  parameter int NO = N_OUT,
  parameter int N  = N_NODES
) (
  input  data_t y     [NO],   // network outputs (T1, T2)
  input  data_t t     [NO],   // targets
  output data_t delta [N]
);

  always_comb
    for (int j = 0; j < N; j++)
      delta[j] = (j < NO) ? sat(acc_t'(y[j % NO]) - acc_t'(t[j % NO])) : '0;

endmodule
