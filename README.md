# On-chip training of an integer MRF regression network

Magnetic resonance fingerprinting (MRF) estimates tissue parameters such as
T1 and T2 from the time course of a complex MR signal. A fully connected
neural network maps the real and imaginary parts of that signal to (T1, T2).
The network has to be retrained whenever the acquisition changes: a different
scanner, field strength or sequence. On a CPU that retraining takes hours.
This RTL runs both inference and training of the network on an FPGA. It uses
integer arithmetic and a small set of compute units that are reused for every
layer.

The network is the reduced, quantised variant of the MRF network:

    input (N_SIG = 256 values: real and imaginary samples)
      -> 256 ReLU -> 128 ReLU -> 64 ReLU -> 32 ReLU -> 16 ReLU -> 2 linear (T1, T2)

Training uses plain stochastic gradient descent with batch size one. The loss
is the mean squared error, and the learning rate is a power of two.

## Main idea: two small engines, reused over the whole network

The whole network does not fit in fabric at once, so the design has only two
compute engines and moves through the network with them:

* **The node array.** It has 16 neurons (`nn_node`), and each one has 256
  multipliers in parallel. That is enough for one neuron of the second layer,
  whose fan-in is 256. One *issue* sends the array a full input vector and one
  block of 16 weight rows with their 16 biases. The array returns 16 neuron
  outputs four cycles later. It accepts a new issue every cycle.
* **The backpropagation tile unit.** `backprop_unit` works on a tile of 16
  upper-layer neurons by 32 lower-layer neurons. That is the shape of the
  16-to-32 layer pair. In three pipelined cycles it does three things. It
  forms the tile's share of the lower layer's error. It updates the tile's
  512 weights. It updates the 16 biases of the upper neurons.

Larger layers are covered by sending blocks and tiles one after another.
`train_controller` generates the schedule. The two engines together hold 16*256 + 2*16*32 = 5120
multipliers, in line with the roughly 5k DSP blocks estimated for the
original FPGA design.

## Number format

Every stored quantity is a signed 16-bit fixed-point number with 8 fractional
bits (Q7.8, range about -128 to +128). This covers inputs, activations,
weights, biases and errors. Products have 16 fractional bits and are summed in
48 bits. The result goes back to Q7.8 by an arithmetic right shift (rounding
toward minus infinity) and is saturated to the 16-bit range. Biases are shifted
left by 8 before they are added, so they sit at the product scale. The
original network was quantised to integers by quantisation-aware training, but
its word width was not published. The 16-bit width, the 8 fractional bits,
floor rounding and saturation are this design's own choices. To change the
format, edit `DW`, `FRAC` and `ACC_W` in `mrf_nn_pkg`.

## Forward pass: 56 cycles

A layer of B blocks of 16 neurons is issued on B consecutive cycles. The
controller then waits the node latency of 4 cycles, so the last block's
outputs are in the activation buffer before the next layer reads them. A layer
therefore costs B + 4 cycles. The six layers have 16, 8, 4, 2, 1 and 1 blocks;
the 2-neuron output layer is padded to one block. The forward pass takes

    (16+8+4+2+1+1) + 6*4 = 56 cycles,

which is the figure published for the original design. The weight and bias
memories and the activation buffer are read asynchronously. This lets an issue
use the data in the same cycle.

Inside a node the four stages are:

1. all products x_i * w_i;
2. the adder tree;
3. adding the aligned bias and rescaling;
4. ReLU (hidden layers) or no activation (output layer), then saturation.

## Backward pass: tiles and delta accumulation

First the output error is formed: `output_error` computes delta = y - target
for T1 and T2. The padding rows of the output block get zero, so their weights
never change. This takes one cycle. Then the layer pairs are processed from
the top down, k = 6 to 1. Pair k is made of upper layer k, its weights W^k and
lower layer k-1:

* Every 16x32 tile of W^k is sent to the backprop unit. The order is: upper
  block r in the outer loop, lower column chunk c in the inner loop. The unit
  receives:
  * the tile;
  * the 16 upper deltas;
  * the 32 lower activations y;
  * a mask sigma'(z) = (y > 0), the ReLU derivative.
* The unit returns three results:
  * the new weights, `w - (y*delta >>> (8+lr_shift))`, saturated;
  * for the first chunk of each row block only, the new biases,
    `b - (delta >>> lr_shift)`;
  * 32 partial sums `sum_u w[u][l]*delta[u]`, masked by sigma' and kept at
    product scale.
* `delta_buffer` adds each tile's partial sums into a 48-bit accumulator for
  the matching columns. The error of a lower neuron is the sum over every
  upper block. Because the ReLU mask is elementwise, masking each partial sum
  gives the same result as masking the total.
* After the last tile the controller waits the unit's 3-cycle latency. It then
  spends one cycle on *finalize*. Finalize rescales the accumulator to Q7.8 and
  saturates it. The result becomes the upper-layer delta for the next pair, and
  the accumulator is cleared.

The error terms of a pair are always computed from the weights before they
are updated, because the unit reads the tile once and uses it for both
results. The input layer (pair 1) has no error term to pass on: its mask is
held at zero and only its weights and biases are updated.

Pair k costs (tiles + 4) cycles:

| pair (upper x lower) | tiles | cycles |
|---|---|---|
| 2(pad 16) x 16 | 1 | 5 |
| 16 x 32 | 1 | 5 |
| 32 x 64 | 4 | 8 |
| 64 x 128 | 16 | 20 |
| 128 x 256 | 64 | 68 |
| 256 x 256 (input) | 128 | 132 |

That is 238 cycles in total. A full training step, from accepting the sample
to `result_valid`, takes 1 + 56 + 1 + 238 + 1 = 297 cycles. For 250 million
training samples at 200 MHz this is about 371 s.

The published estimate is 104 cycles for the backward pass, giving 160 cycles
per sample and 200 s. It cannot be reproduced from the published description
of a 3-cycle, 16-by-32 unit: one unit of that size has to visit 214 tiles.
Here this design departs from the published figure. The forward figure
matches exactly. The published number is reproduced if the tiles of pairs 6
to 2 are counted, 1+1+4+16+64 = 86, and three cycles of latency are added for
each of the six pairs: 86 + 18 = 104. That count leaves out the 128 tiles of
the input-layer weights. This design trains those weights as well.

## Storage layout

* **`weight_mem`** holds 32 blocks of 16 rows by 256 columns. Each row is one
  neuron's weights. Layer k starts at block `layer_base(k)`: 0, 16, 24, 28,
  30, 31. Global row = block*16 + row in the block. Columns beyond a layer's
  fan-in are padding, and so are rows 2..15 of block 31. Padding must be
  loaded as zero. Training keeps it at zero, because the activations or
  deltas that multiply it are zero. The memory has one asynchronous block
  read, one host row write and one 16x32 tile write.
* **`bias_mem`** has the same block structure, one bias per neuron.
* **`act_buffer`** holds seven 256-entry vectors. Vector 0 is the input, and
  vector k is the output of layer k. Entries beyond a layer's size are never
  written. Reset clears them, so they act as zero padding for the node inputs
  and for the backprop tiles.
* **`delta_buffer`** holds the current upper-layer delta (256 x 16 bits) and
  the lower-layer accumulator (256 x 48 bits).

The 256 x 256 input-layer weights take 64k of the 131k weight slots. Together
all layers need 109,088 weights and 498 biases.

## Host interface

The top, `mrf_nn_trainer`, has plain ports for what a PCIe endpoint and a
DMA engine would drive. The endpoint itself is not included.

| signal | use |
|---|---|
| `w_wr_en`, `w_wr_row`, `w_wr_data[256]` | write one weight row (global row index); ignored while `busy` |
| `b_wr_en`, `b_wr_row`, `b_wr_data` | write one bias; ignored while `busy` |
| `rd_row` -> `rd_w_row[256]`, `rd_bias` | combinational readback, valid while idle |
| `sample_valid` / `sample_ready` | hand over a sample; `ready` is high only when idle |
| `sample_train` | 1: train on the sample, 0: inference only |
| `sample_x[256]`, `sample_t[2]` | input vector and targets, captured at the handshake |
| `lr_shift` | learning rate 2^-lr_shift; keep it stable during a sample |
| `result_valid`, `result_y[2]` | one-cycle pulse at the end of a sample; `result_y` holds the forward-pass outputs (before the update) until the next sample |
| `phase`, `busy` | controller phase (idle, forward, error, backward, done) |

Load every row, padding included, once after reset. Then stream samples. Each
training sample is one SGD step. There is no internal epoch or dataset
handling: the host decides the order, the mix of inference and training, and
when to read the weights back.

## Files

`rtl/`:

* `mrf_nn_pkg.sv` — format, sizes, layer geometry functions, `sat()`,
  `phase_t`
* `nn_node.sv` — one neuron
* `node_array.sv` — 16 neurons with a result tag
* `backprop_unit.sv` — the 16x32 SGD tile
* `weight_mem.sv`, `bias_mem.sv`, `act_buffer.sv`, `delta_buffer.sv` —
  storage
* `output_error.sv` — the MSE output delta
* `train_controller.sv` — the schedule above
* `mrf_nn_trainer.sv` — the top, which also selects the tile slices and
  routes the write-backs

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. The unit
testbenches use small parameter values. `tb_mrf_nn_trainer` runs the top at
its full default size. It loads a random network and runs inference and
training samples. It compares the outputs after each sample, and every weight
and bias after training, with a plain loop-based model of the same integer
arithmetic that does not use tiles. It checks the 56-cycle and 238-cycle phase
lengths and that `sample_ready` stays low while busy. It also counts how often
each mechanism ran, and fails if one never ran: inference mode, training mode,
ReLU clipping, weight and bias updates, errors accumulated over several tiles,
and output-delta saturation.

Simulating with Verilator (5.x), for example the top:

    verilator --binary --timing --assert -Wno-fatal -Irtl rtl/mrf_nn_pkg.sv \
        $(ls rtl/*.sv | grep -v mrf_nn_pkg) tb/tb_mrf_nn_trainer.sv \
        --top-module tb_mrf_nn_trainer -j 4
    ./obj_dir/Vtb_mrf_nn_trainer

Each run finishes in well under a minute. Verilator has only two states, so
every state that is read is reset or loaded before use. The weight and bias
memories are not reset: load them before the first sample.

## What follows the published design and what does not

Taken from the publication:

* the layer sizes (256-128-64-32-16-2) and the two outputs T1 and T2;
* ReLU in the hidden layers and a linear output;
* the neuron equation and the SGD equations for delta, weight gradient and
  bias gradient;
* MSE loss;
* 16 parallel nodes, each with the fan-in of the second layer;
* a 4-cycle node and a 16x32, 3-cycle backpropagation unit;
* the 56-cycle forward pass.

This design's own choices:

* the input length of 256, which was not published;
* the Q7.8 format, rounding and saturation;
* the power-of-two learning rate and batch size one;
* the internal pipeline stages of both engines;
* the tile order and the accumulation of delta across tiles;
* the memory organisation and its zero padding;
* the host interface and handshakes;
* asynchronous reset of the control pipelines and buffers.

The software training of the original network used Adam with a learning rate
of 1e-4. The hardware uses plain SGD, as published for the FPGA version; 2^-13
is the power of two nearest to 1e-4.

Not included: the PCIe endpoint and the on-chip security firewall of the
original system. Only the endpoint's resource cost and the firewall's name
were published.

Departures and limits:

* The backward pass takes 238 cycles, not the published 104.
* The input is limited to 256 values. A longer signal would need the node to
  accumulate over several issues.
* The ReLU derivative is taken from the stored output (y > 0). This equals
  sigma'(z) for ReLU with this rounding. The node's z output is therefore
  unused at the top.
* Each node is a single-cycle 256-input adder tree. A real 200 MHz build would
  need more pipelining inside stages 1 and 2, which changes the 4-cycle
  latency. Timing was not closed for any device.
