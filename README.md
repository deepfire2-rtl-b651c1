# DeepFire2 in SystemVerilog: a streaming convolutional SNN pipeline

DeepFire2 runs a convolutional spiking neural network (SNN) as one long
hardware pipeline, one stage per network layer, with every weight held on
chip. Two ideas make it scale to large networks on a multi-die FPGA:

* **Neurons without LUT logic for the AND.** A binary spike multiplied by a
  weight is just "the weight, or zero". The neuron core loads the weight into
  a register whose synchronous reset is driven by the inverted spike. The
  register *is* the AND gate and also serves as a pipeline register.
* **Split-kernel mapping.** The output channels of a layer are served by
  `OMEGA` parallel weight units. They can be cut into `PARTS` groups, each
  placed in a different die (SLR). Only spikes cross between dies, never
  weights or partial sums.

This RTL implements the pipeline for the MNIST network
(pConv3-1-16, Conv2-2-16, pConv3-1-32, Conv2-2-32, pConv3-1-64, Conv3-2-64,
Fc-128, Fc-10, about 140k weights). It is parameterised so that other layer
stacks can be built from the same modules.

## Network notation

* `pConv3-1-16` is a 3x3 convolution with "same" padding, stride 1 and 16
  output channels.
* `Conv2-2-16` is a 2x2 convolution with stride 2 and no padding. It replaces
  max pooling and has trained weights.
* `Fc-128` is a fully-connected layer. Here it is built as a convolution whose
  kernel covers the whole feature map.

The first layer is the **transduction layer**. It takes 8-bit pixels and
multiplies them with 8-bit weights in real multipliers. Every later layer
takes binary spikes.

Each neuron fires once per window: over its whole window it accumulates
the sum of weight x input. Its spike is `1` when that sum is strictly greater
than its trained threshold `t`, otherwise `0`. There is no leak and no state
between windows.

## Data flow through one layer

```
 prev layer ──bytes──> FBF stage 1 (one column) ──shift──> FBF stage 2 (KW columns = window)
                                                               │
                      layer_ctrl: loaded? next empty? ──issue beats──┐
                                                               ▼     ▼
             W&T units (OMEGA) ── w,t ──> kernel_array KAPPA x OMEGA cores
                                                               │ spikes
                                  spike_packer per row ──bytes──> rr_merge per row ──> next FBF stage 1
```

### Feature buffer (`fbf`)

**Stage 1** gathers one complete column of the previous layer's output:
`H` rows x `C` channels, one bit per channel (8 bits for pixels). There is
one byte-wide write port per row. The stage counts the bytes it has received.
When the column is complete, `s1_full` goes high.

**Stage 2** is the window: the last `KW` columns. A shift moves every column
one place, drops the oldest and takes in the stage-1 column, which empties
stage 1. A shift can also take in an all-zero column; that is how "same"
padding is made at the left and right edges. Padding at the top and bottom
is made by tying the out-of-range rows of the window to zero.

The classic description of this buffer uses one FIFO per vertical kernel
position. Here one shared window register is used instead, and every kernel
unit reads its own (overlapping) rows from it. The contents are the same, with
fewer copies.

### Controller (`layer_ctrl`)

The controller walks the output columns. For output column `oc` it needs
padded columns `oc*S .. oc*S+KW-1` in the window. It shifts until exactly
that many have entered:

* a zero column is shifted in at once;
* a real column is shifted in when stage 1 is full.

A kernel operation starts only when both of these hold:

1. its own window is **loaded**;
2. the next layer's stage 1 is **empty**, so the whole output column will fit.

If condition 2 fails, the controller waits and raises `stall`. Because stage 1
then stays full, the wait propagates back layer by layer to the image input.
This is the only flow control in the pipeline, and no buffer can overflow.

A kernel operation issues `ROUNDS x BEATS` beats, one per clock:

* `ROUNDS = C_OUT / OMEGA`: each weight unit serves `ROUNDS` neurons in turn.
* `BEATS = ceil(KH*KW*C_IN / 8)`: a beat carries 8 window elements.
* Window elements are ordered by column (`dx`), then row (`dy`), then channel.
  The 8 elements of a beat are consecutive in that order.

After the last beat, the controller waits for `col_done`: every byte of the
output column has reached the next layer. Only then does it move to the next
column. After the last output column it shifts the rest of the image through
and starts over. It also shifts in the leading padding of the next image
without waiting.

### Neuron cores (`neuron_core`, `trans_core`)

| stage | neuron_core (spikes) | trans_core (pixels) |
|---|---|---|
| 1 | AND registers: `w` lane on D, `!si` on sync reset | register pixels and weights |
| 2 | register the AND result | 8 multipliers (signed weight x unsigned pixel) |
| 3-5 | adder tree 8 -> 4 -> 2 -> 1 | adder tree 8 -> 4 -> 2 -> 1 |
| 6 | accumulate: the first beat of a neuron restarts the sum | same |
| 7 | `so <= acc > t` with `so_en` | same |

`pipe_en` travels with the data and comes out as `so_en`, seven cycles after
the last beat (`CORE_LAT`). The threshold is needed only at the fire stage, so
the weight unit delays it to arrive there.

### Kernel array and re-timing (`kernel_array`)

There are `KAPPA` kernel units, one per output row of the column. Each has
`OMEGA` cores, so the cores form a `KAPPA x OMEGA` array. Weight unit `j`
feeds core `j` of every kernel unit.

To keep long broadcast nets short, the cores are counted row by row and cut
into groups of `GROUP = 8`:

* Core `(k, j)` is in group `(k*OMEGA + j) / 8`.
* At each group boundary, the weights, thresholds and control pass one extra
  register.
* With `OMEGA = 2`, four kernel units share a group. With `OMEGA = 16`, one
  kernel unit spans two groups.

The input beat of each kernel unit is delayed to match its group. Each row's
spikes are then realigned, so all `OMEGA` spikes of a row leave together.

### Split-kernel mapping (`df2_layer`, `slr_bridge`, `spike_packer`, `rr_merge`)

With `PARTS > 1`, the `OMEGA` weight units are divided into `PARTS` equal
parts of `OP = OMEGA/PARTS`.

* **Part 0** sits with the buffer and the controller.
* **Each further part** sits in another die. It receives the beat bus through
  an Rx register pipeline (`slr_bridge`). It returns packed spike bytes
  through a Tx pipeline.

Neuron numbering is chosen so that every part produces whole bytes:

```
part p, core j, round r  ->  s = r*OP + j          (neuron within the part)
                             global byte = (s/8)*PARTS + p,  bit = s % 8
```

So with two parts, bytes 0, 2, 4, ... come from part 0 and bytes 1, 3, 5, ...
from part 1.

Each part has one `spike_packer` per kernel row:

* When `OP < 8`, it collects `8/OP` rounds into a byte.
* When `OP >= 8`, it emits `OP/8` bytes per round.

Per row, an `rr_merge` takes the bytes of all parts, with a small FIFO per
part. It writes one byte per cycle into the next buffer, serving the parts in
round-robin order.

### Parameter load bus

Weights and thresholds are written once, before the images, through the
`prm` struct on `df2_top`:

* A weight write (`we`) addresses `layer`, `part`, `unit` and word
  `addr = round*BEATS + beat`. Its `wdata` holds 8 signed bytes; lane `i`
  pairs with window element `beat*8 + i`.
* A threshold write (`twe`) uses `addr = round` and `tdata`.

To load neuron `n` of a layer, invert the numbering above to get its part,
unit and round. `df2_ref_pkg::locate` in the testbenches shows how.

## Top level (`df2_top`)

| port | meaning |
|---|---|
| `img_valid/img_ready/img_data` | pixel stream, column by column, rows top to bottom, channels fastest |
| `prm` | parameter load bus (`prm_wr_t` in `df2_pkg`) |
| `res_valid/res_ready/res_spikes` | output spikes of the last layer, one vector per image |
| `layer_stall` | per layer, high while it waits for the next buffer |

The layer stack is the `CFG` parameter, an array of `layer_cfg_t` listed
with the output layer first. Each entry holds the map size, kernel, stride,
padding, output channels, `OMEGA`, `PARTS`, `GROUP` and bridge depth.

`MNIST_CFG` in `df2_pkg` is the default:

| layer | geometry | OMEGA | PARTS |
|---|---|---|---|
| 0 | pConv3-1-16 (transduction) on 28x28x1 | 8 | 1 |
| 1 | Conv2-2-16 | 4 | 1 |
| 2 | pConv3-1-32 | 8 | 1 |
| 3 | Conv2-2-32 | 4 | 1 |
| 4 | pConv3-1-64 | 8 | 1 |
| 5 | Conv3-2-64, 7x7 -> 3x3 | 8 | 1 |
| 6 | Fc-128 as a 3x3 kernel over 3x3x64 | 16 | 1 |
| 7 | Fc-10, built as 16 neurons | 2 | 1 |

`OMEGA` must be 1, 2, 4 or a multiple of 8, so that spikes pack into whole
bytes with the grouping above. An elaboration-time assertion checks this.

At these defaults, one image takes 3006 cycles in steady state when nothing
downstream stalls.

## Where this RTL departs from the original design, or fills gaps

* **Choices of this design.** These are not specified for the original:
  * the number of weight units per layer;
  * the order of elements within a beat and the weight-word layout;
  * the load bus;
  * the image stream format;
  * the output handshake.
* **Fc-10 has 16 neurons.** Spikes travel in bytes. Give neurons 10 to 15
  thresholds that never fire, and ignore them.
* **Weight memory.** Each weight unit is a plain array of exactly
  `ROUNDS*BEATS` words. The original design sizes these memories by cascading
  BRAM/URAM blocks; that is left to synthesis here.
* **Symmetric splits only.** Asymmetric splits (for example two thirds / one
  third) are not built. `C_OUT` must also be a multiple of `OMEGA`, so a
  layer cannot end with a partly used round.
* **Bridges.** In the original, the die-crossing bridges use separate clock
  roots. Here they are plain register pipelines in one clock domain.
* **Window storage.** One shared window register replaces one FIFO per
  vertical window position (see the feature buffer).
* **Column completion.** A layer waits until its whole output column has been
  written downstream before it starts the next column. This costs a few
  cycles per column but keeps the round-robin merge simple.
* **Outside the pipeline.** The host DMA, DDR, AXI DMA, interconnect and clock
  generator are not included. The `img`, `prm` and `res` ports are where they
  would connect.
* **Other networks.** Only the MNIST network is built by default. The
  Cifar-10, Cifar-100, Tiny-ImageNet and ImageNet networks need millions of
  weights and different `CFG` values. Maps taller than `MAXK = 32` rows (in
  `df2_pkg`) also need `MAXK` raised. None of these has been simulated.

## Files

`rtl/`:

* `df2_pkg`: constants, structs and the MNIST configuration.
* `delay_line`: a plain delay register chain.
* `neuron_core` and `trans_core`: the two neuron core types.
* `wt_unit`: weight and threshold memory of one weight unit.
* `kernel_array`: the core array with re-timing.
* `spike_packer`, `slr_bridge` and `rr_merge`: the split-kernel path.
* `fbf`: the feature buffer.
* `layer_ctrl`: the layer controller.
* `df2_layer`: one layer.
* `result_buf`: the output buffer.
* `df2_top`: the whole pipeline.

`tb/`:

* One self-checking bench per module, named `tb_<module>`.
* `df2_ref_pkg`: an independent reference model of the network. It computes
  each layer straight from the definition of a convolution.
* `df2_top_harness`: loads random parameters, streams random images with
  random gaps, and takes results with a random `res_ready`.
* `tb_df2_layer` and `tb_df2_layer_3way`: one layer split two ways
  (8 units) and three ways (24 units). They are checked against the
  reference model while the next layer holds columns for random times.
* `tb_df2_top`: a 4-layer network that exercises the mechanisms:
  * a transduction layer split over two parts;
  * a split spiking layer with a 3-stage bridge;
  * a fully-connected layer;
  * padding and strides.

  It counts stalls, padding columns, bytes from each part, image-stream
  holds and result holds. It fails if any of them never happens.
* `tb_df2_top_full`: runs the default MNIST `df2_top` on three images. It
  checks the results bit for bit and prints the cycles per image.

Every bench prints one line `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5. Put the packages first; the benches that use the reference
model also need `tb/df2_ref_pkg.sv`:

```
verilator --binary --timing --assert rtl/df2_pkg.sv tb/df2_ref_pkg.sv \
  rtl/delay_line.sv rtl/neuron_core.sv rtl/trans_core.sv rtl/wt_unit.sv \
  rtl/kernel_array.sv rtl/spike_packer.sv rtl/slr_bridge.sv rtl/rr_merge.sv \
  rtl/fbf.sv rtl/layer_ctrl.sv rtl/df2_layer.sv rtl/result_buf.sv rtl/df2_top.sv \
  tb/df2_top_harness.sv tb/tb_df2_top.sv --top-module tb_df2_top -Mdir obj
./obj/Vtb_df2_top
```

For a unit bench, list only the package and the modules it uses. Building
the full-size bench takes a few minutes, because the MNIST pipeline has
several thousand neuron cores. Running it takes seconds.
