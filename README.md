# ADA-GP-MAX: a training accelerator that predicts gradients

Training a neural network needs a forward pass (FW) and a backward pass (BW). The backward pass is
about twice as expensive as the forward pass, and a layer cannot update its weights until the
gradient has travelled back to it through every later layer. Adaptive gradient prediction removes
the backward pass from most batches. A small extra network, the **predictor**, looks at a layer's
output activations and guesses the gradient of that layer's weights. When the guess is trusted,
each layer updates its weights straight after its forward pass, and the batch has no backward pass
at all.

The predictor has to learn, so training alternates between batches of three kinds:

| Phase | What the accelerator does | Weights updated with | Predictor |
|---|---|---|---|
| Warm Up | normal FW + BW for the first L epochs | true gradients | trained on true gradients |
| Phase BP | normal FW + BW | true gradients | trained on true gradients; its outputs are not applied |
| Phase GP | FW only, no BW | predicted gradients, right after each layer's FW | used only, not trained |

After Warm Up, each group of batches starts with **k** batches of Phase GP and ends with **m**
batches of Phase BP. The k:m ratio eases off as training goes on: 4:1, then 3:1, then 2:1, each for
four epochs, then 1:1 for the rest of training. A Phase GP batch costs roughly a forward pass plus
the predictor. A Phase BP batch costs a full training step plus the predictor's own training.

This RTL builds the MAX organisation of the idea. It starts from a conventional weight-stationary
accelerator: a global buffer and a 180-PE array. Next to that it adds a second, smaller PE array
and a memory that belong only to the predictor.

## Block diagram

```
            host_wr_* (inputs, weights)      host_rd_* (activations, gradients)
                      |                                ^
                      v                                |
   cmd ---->  +-----------------+   +--------------------------------+
   phase_ctrl |  layer_sequencer|<->| global_buffer 4096 x 16 lanes  |
   (schedule) +-----------------+   +--------------------------------+
                |      |      |
                v      v      v
         pe_array   tensor_reorg --> predictor_unit  <-- pm_* (predictor weights)
         12 x 15     (batch mean,     predictor_memory (8 words)
         (180 PEs)    pooling)        pe_array 8 x 10 (80 PEs)
                      weight_update (SGD, 16 lanes)
```

| Module | Role |
|---|---|
| `ada_gp_pkg` | data types (Q8.8 data, 40-bit accumulators, 16-lane vectors), phase and opcode enums, the layer command struct, rounding/saturation |
| `pe` | input register, weight register, multiply-add of the partial sum |
| `pe_array` | ROWS x COLS weight-stationary systolic array with input skew and output de-skew |
| `global_buffer` | 4096-word buffer, 16 lanes of 16 bits per word, 1 read and 1 write port |
| `predictor_memory` | the predictor's weights, one word per predictor input |
| `tensor_reorg` | turns a layer's outputs into one predictor input vector per output channel |
| `predictor_unit` | predictor forward pass on its own 8 x 10 array; predictor training |
| `weight_update` | w - g * 2^-lr, saturated, on 16 lanes at once |
| `phase_ctrl` | Warm Up / Phase GP / Phase BP schedule and the k:m table |
| `layer_sequencer` | runs one layer command (FW or BW) on the datapath, phase-dependent |
| `ada_gp_top` | ties it all together; the host port and command interface |

## Numbers and vectors

Every stored value is a signed 16-bit fixed-point number with 8 fraction bits (Q8.8). PEs multiply
into 40-bit accumulators. When a result is written back, it is shifted right by 8 bits and
saturated to 16 bits (`requant` in the package). One buffer word is a vector of 16 such lanes.

## The main array and its dataflow

PE (r, c) holds weight W[r][c] and never moves it during a pass. An input vector of ROWS lanes
enters from the left. Lane r is delayed r cycles (skew), so it meets the partial sum coming down
column c at the right time. Each PE passes its input one PE to the right and its partial sum one
PE down. The column sums leave at the bottom. A second set of delays (de-skew) lines the COLS
outputs up again. So one input vector goes in per cycle, and the matching output vector comes out
**LAT = ROWS + COLS = 27 cycles** later. After the first result, the array delivers one output
vector per cycle.

Weights can be loaded a row or a column at a time. This lets the sequencer place a weight matrix
either way round: W for the forward pass, and its transpose for the input-gradient pass.

## Layer commands and buffer layout

The host sends one `layer_cmd_t` per layer and pass. It gives the operation (FW or BW), the sizes
and the buffer base addresses. A layer is written as a matrix product. A convolution is unrolled,
so each output position of each sample is one input vector of K = in_channels x kh x kw values.

| Field | Meaning |
|---|---|
| `k_len` | K, inputs per filter (at most min(ROWS, G) = 10) |
| `c_len` | C, filters / output channels (at most min(ROWS, COLS) = 12) |
| `n_len` | N, vectors in the batch = samples x output positions |
| `log2_b`, `log2_s`, `log2_pool` | batch size, positions per sample and pooling window, as powers of two |
| `dx_en` | in BW, also compute the input gradient for the previous layer |
| `x_addr`, `w_addr`, `y_addr`, `dy_addr`, `dx_addr` | input, weight, output, output-gradient and input-gradient regions |
| `a_addr`, `gp_addr` | reorganized predictor inputs and predicted gradients, kept from FW for BW |

Buffer layout: X, Y, dY and dX hold one vector per word (word n). W holds one filter per word
(word c, K lanes). A holds one predictor input per channel (P lanes). Gp holds one predicted
gradient per channel (K of G lanes). A layer's output region is the next layer's input region, so
activations stay on chip between layers.

A layer larger than one tile (K > 10 or C > 12) must be split by the host. The array cannot add a
tile's partial sums onto a previous tile's, so such a split only works along C. The paper's
benchmark networks are all much larger than one tile. See "Limits" below.

## Forward pass (FW)

1. Load the C filters into the array's columns.
2. Stream the N input vectors through. Requantize each output vector, write it to Y, and also pass
   it to `tensor_reorg`.
3. Flush `tensor_reorg`. It gives one P-lane vector per output channel. Run each vector through
   the predictor, which returns a K-lane predicted gradient for that filter.
4. What happens next depends on the phase:
   - **Phase GP:** update the filter at once, `W[c] -= Gp[c] * 2^-lr`, in place in the buffer.
   - **Warm Up / Phase BP:** store A[c] and Gp[c] for the coming BW, and leave W unchanged.

## Backward pass (BW)

A BW command in Phase GP does nothing except finish at once; it is counted as skipped. In the
other phases it runs three steps on the same weight-stationary array:

1. **Input gradient** (if `dx_en`): dX = dY · W. W is loaded transposed (filter c into row c).
   The N output-gradient vectors are streamed through. This uses the old weights, as
   backpropagation requires.
2. **Weight gradient** dW = Xᵀ · dY, tiled over the batch. Up to ROWS = 12 input vectors become
   the array's weights (one vector per row). The matching dY rows are streamed through. The
   partial sums are added up over the tiles in accumulators inside the sequencer. Divide-by-batch
   is folded into the learning rate.
3. **Per filter c:** update W[c] with the true gradient. Then train the predictor on the pair it
   made in FW: error = Gp[c] - dW[c], and `Wp[p][g] -= A[c][p] * err[g] * 2^-(8+lrp)`.

## Tensor reorganization and the predictor

A predictor of fixed size must serve every layer, whatever its shape. So the layer's outputs are
reduced before the predictor sees them:

* They are averaged over the batch (a sum, then a shift by `log2_b`).
* Each output channel then becomes its own predictor sample. Its spatial map is average-pooled
  down to P = 8 values (`log2_pool` positions per value).

The sums are built while the outputs stream past, so no extra buffer pass is needed.

The predictor itself is one fully connected layer of P = 8 inputs and G = 10 outputs. It runs on
an 8 x 10 PE array loaded from `predictor_memory`. The array is reloaded only when the weights
have changed since the last load. A layer with K < G uses the first K outputs, and the rest are
masked. One input vector gives its gradient vector P + G = 18 cycles later, and vectors can
follow each other every cycle. A training step walks the P rows of the weight memory (read,
update, write back), about 2P cycles per filter.

## Schedule control

`phase_ctrl` counts batches (a `batch_done` pulse from the host) and epochs (`batches_per_epoch`).
It gives the current phase, k and m.

* Warm Up lasts `warmup_epochs`.
* After that, every epoch starts a new group with Phase GP. k comes from the table {4, 3, 2, 1}:
  4 epochs per step, then 1 for good. m = 1.

The top also counts:

* batches of each kind;
* FW and BW commands;
* BW commands that were skipped;
* weight updates from predicted and from true gradients;
* predictor training steps.

## Timing observed

The full-size end-to-end test trains a two-layer convolutional network: 3x3 conv 1→8 channels,
then 1x1 conv 8→4. The batch is 4 samples of 4x4 outputs. Counting only command cycles:

* a Phase BP batch (FW + FW + BW + BW) takes **1264 cycles**;
* a Phase GP batch (FW + FW) takes **284 cycles**, 4.5 times fewer.

The gap is wider than the 1.5x or so expected on real networks, because here the backward pass
carries the serial predictor training and the batch-tiled weight-gradient pass.

## Where this RTL departs from the paper

* **Array shape and sizes.** The paper gives 180 PEs for the main array. The 12 x 15 shape is
  chosen here. The predictor array (8 x 10 = 80 PEs) is sized from the paper's extra DSP count
  for this organisation. Buffer sizes, number format, word width and command format are all
  this design's own.
* **Predictor front end.** The paper puts pooling layers and a small convolution in front of the
  fully connected layer, sized by the layer's input. Only the pooling is built, with a
  power-of-two window.
* **Optimisers.** The paper trains the network with SGD with momentum and the predictor with Adam.
  Here both use plain SGD with power-of-two learning rates. Momentum and Adam would need extra
  state memories.
* **Overlap.** In the paper's MAX organisation, the predictor's forward pass overlaps the next
  layer's forward pass. Here it runs at the end of its own layer's command. Results are the same,
  but Phase GP takes a little longer.
* **Tile size.** A command holds one array tile (K ≤ 10, C ≤ 12, checked by an assertion). Layers
  of real networks need tiling along K with partial-sum accumulation, and a predictor with as
  many outputs as the largest filter. Neither is built, so the paper's benchmark networks cannot
  be run as they are.
* **Epoch boundary.** The paper does not say whether a GP/BP group carries across an epoch
  boundary. Here every epoch restarts with Phase GP.
* **Not built.** The lower-cost organisations (the predictor sharing the main array, or having no
  memory of its own) and multi-device pipeline training are not built. Off-chip memory and the
  host are outside the chip; the top brings out their ports.

## Verifying and simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. `tb/ada_gp_ref_pkg.sv` is a
bit-exact model of the layer commands, written separately from the RTL. `tb_layer_sequencer` and
`tb_ada_gp_top` compare every output, weight and predictor weight against this model after every
command or batch.

`tb_ada_gp_top` runs the top at its default parameters for 1 Warm Up epoch and 13 more epochs of
5 batches, so every k:m ratio appears. It also requires each mechanism to occur at least once:

* Warm Up, Phase BP and Phase GP;
* k = 4, 3, 2, 1;
* predicted-gradient and true-gradient updates;
* predictor training;
* a skipped BW;
* the input-gradient pass.

With plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/ada_gp_pkg.sv tb/ada_gp_ref_pkg.sv rtl/*.sv tb/tb_ada_gp_top.sv \
  --top-module tb_ada_gp_top -o sim && ./obj_dir/sim
```

For a single block, list the package, the block's module and its sub-modules, and its testbench,
e.g. `rtl/ada_gp_pkg.sv rtl/pe.sv rtl/pe_array.sv tb/tb_pe_array.sv --top-module tb_pe_array`.
The full-size run takes under a minute, most of it compilation.

To change the size, override `ROWS`, `COLS`, `P`, `G` or `GB_DEPTH` on `ada_gp_top`. The
per-command limits follow from them: K ≤ min(ROWS, G), C ≤ min(ROWS, COLS). `AW` and `NW` in the
package must cover `GB_DEPTH`.
