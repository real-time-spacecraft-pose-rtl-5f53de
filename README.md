# A layer-per-unit dataflow accelerator for a 4-bit MobileNetV2 pose-estimation backbone

A spacecraft pose estimator takes a camera image of a known target and
regresses its orientation and position. Nearly all of its arithmetic is in
the convolutional backbone: a MobileNetV2 that turns a 240 x 240 image into
an 8 x 8 x 1280 feature map. This RTL implements that backbone as a single
streaming pipeline, in the style of FINN-generated FPGA accelerators.

- Every layer of the network has its own hardware unit.
- All units run at once, each on a different part of the image.
- Units are joined by FIFOs and pass pixels over valid/ready streams.
- No weight and no feature map ever goes to external memory.

The network is quantised with mixed precision:

- every activation is 4 bits;
- the weights are 3 bits, except in the three layers that are most
  sensitive to quantisation: the stem convolution (4 bits), the first
  depthwise convolution (6 bits) and the first projection (4 bits).

At these widths the whole model fits on chip: 6.57 Mbit of weights in all.

The clock target is 187.5 MHz and the throughput target is 250 frames per
second. Together they give every unit a budget of **750 000 cycles per
frame**. Each unit is made just wide enough to meet that budget. The
slowest unit, block 13's projection, needs 737 280 cycles. The pipeline
therefore sustains about 254 frames/s once it is full.

The position and orientation heads, a few small fully connected layers, run
in software on the host processor and are not part of this RTL.

## The pipeline

```
pixels (3 x 8-bit signed) -> sliding_window 3x3/s2 -> mvau (stem, 27 -> 32, 4-bit W)
  -> 17 x inverted_residual
  -> thresholding (shared activation) -> mvau (head 1x1, 320 -> 1280, 3-bit W)
  -> feature pixels (1280 x 4-bit unsigned)
```

Every inverted residual block is itself a chain of units:

```
in -> thresholding (shared act., signed 4-bit) -+-> mvau 1x1 expansion (BN+ReLU thresholds)
                                                |   -> sliding_window 3x3 -> vvau depthwise (BN+ReLU)
                                                |   -> mvau 1x1 projection (raw accumulator)
                                                |   -> thresholding (shared act.) -> add -> out
                                                +--> shortcut FIFO ---------------------^
```

Block 0 has expansion factor 1 and so no expansion unit. Blocks without a
residual (stride 2, or a change in channel count) end at the projection
accumulator.

The table below gives the network at its default size: the standard
MobileNetV2 with width 1.0 and a 240 x 240 input. "H" is the block's input
height and width. The cycle columns give cycles per frame at the folding the
package computes.

| unit | in -> out ch | expand | stride | H | weight bits | slowest unit in it (cycles/frame) |
|---|---|---|---|---|---|---|
| stem 3x3 | 3 -> 32 | - | 2 | 240 | 4 | 460 800 |
| block 0 | 32 -> 16 | 1 | 1 | 120 | dw 6, proj 4 | 460 800 |
| block 1 | 16 -> 24 | 6 | 2 | 120 | 3 | 691 200 |
| block 2 | 24 -> 24 | 6 | 1 | 60 | 3 | 691 200 |
| block 3 | 24 -> 32 | 6 | 2 | 60 | 3 | 691 200 |
| blocks 4-5 | 32 -> 32 | 6 | 1 | 30 | 3 | 691 200 |
| block 6 | 32 -> 64 | 6 | 2 | 30 | 3 | 691 200 |
| blocks 7-9 | 64 -> 64 | 6 | 1 | 15 | 3 | 691 200 |
| block 10 | 64 -> 96 | 6 | 1 | 15 | 3 | 691 200 |
| blocks 11-12 | 96 -> 96 | 6 | 1 | 15 | 3 | 691 200 |
| block 13 | 96 -> 160 | 6 | 2 | 15 | 3 | 737 280 |
| blocks 14-15 | 160 -> 160 | 6 | 1 | 8 | 3 | 655 360 |
| block 16 | 160 -> 320 | 6 | 1 | 8 | 3 | 655 360 |
| head 1x1 | 320 -> 1280 | - | 1 | 8 | 3 | 655 360 |

That is 52 convolutions with 356 million multiply-accumulates per frame,
done on 688 MAC lanes. Residuals are used in blocks 2, 4, 5, 7-9, 11, 12,
14 and 15.

## Streams and number formats

Every stream carries **one whole pixel per beat**: all channels side by
side, channel `c` at bits `[c*W +: W]`. A beat moves when `valid` and
`ready` are both high. Each unit takes one pixel (or one window) at a time.
It computes on it over several cycles, folding channels internally, and
presents the result as one beat.

The element width changes along the pipeline:

| point | width | signed |
|---|---|---|
| image input | 8 | yes |
| stem, expansion, depthwise and head outputs (BN+ReLU thresholds) | 4 | no |
| output of a block's input activation (shared activation) | 4 | yes |
| block output with a residual (sum of two signed 4-bit values) | 5 | yes |
| block output without a residual (projection accumulator) | `IB + WB + clog2(Cin)` | yes |

The accumulator width of a matrix-vector unit is `IB + WB + clog2(MW)`:
input bits plus weight bits plus enough for the sum.

## Activation as a staircase of thresholds

No unit multiplies by a batch-norm scale or rounds a product. Batch
normalisation, ReLU and 4-bit quantisation together form a monotone
staircase from the accumulator to the 4-bit output. That staircase is
stored as 15 ascending integer thresholds per channel. The activation is
the count of thresholds that the accumulator reaches: 0 to 15, or -8 to 7
for signed outputs. A channel's batch-norm sign and offset live entirely in
its thresholds.

`mvau` and `vvau` apply the thresholds of their own layer. `thresholding`
is the same staircase as a standalone unit, for places without a preceding
convolution.

## Residuals through a shared activation

In the stock MobileNetV2 the projection has a linear (identity) activation,
and the residual adds two tensors on different scales. That needs a
rescale before the add. In this modified block both operands of the add
first pass a **shared activation**, so that they land on the same 4-bit
grid:

- the block's input goes through a thresholding unit with signed output;
- the projection accumulator goes through a second thresholding unit with
  the same step;
- the add is then a plain integer sum of two 4-bit signed values.

The 5-bit sum leaves the block, and the next block's input activation
requantises it to 4 bits.

The shortcut is a FIFO. It must hold every pixel that enters the block
before the first pixel leaves the main path: about one input line, plus
what sits in the unit buffers. Otherwise the fork stalls the main path and
the block deadlocks. The shortcut depth is therefore `H + SC_EXTRA` pixels.
`dup_streams`, the fork, consumes an input only when both branches have
taken it. The add consumes both operands in the same cycle.

## Folding to a frame budget

A unit that handles `pix` pixels per frame costs the following cycles per
frame:

| unit | cycles per frame |
|---|---|
| matrix-vector unit with an `MH x MW` matrix | `pix * (MW/SIMD) * (MH/PE)` |
| channel-parallel unit (depthwise, thresholds) over `C` channels | `pix * (C/PE)` |

`spe_pkg::fold_simd`, `fold_pe` and `fold_ch` pick the smallest parallelism
that meets `BUDGET`. `SIMD` is widened first, then `PE`, and each steps
through the divisors of its dimension. Because the budget is a parameter,
the same RTL gives a faster or a smaller pipeline. `spe_accel` also has
`IMG` (image size) and `CH_DIV` (divides every channel count) so that
reduced copies of the network can be simulated. With `CH_DIV > 1` the
network is the same with narrower layers; every block keeps its structure,
strides and bit-widths.

In a matrix-vector unit, row `nf*SF + sf` of the weight memory holds the
`PE*SIMD` weights used in fold step `(nf, sf)`. Here `SF = MW/SIMD` and
`NF = MH/PE`.

Inside each unit:

- `mvau` takes one input vector into a buffer and runs
  `(MW/SIMD)*(MH/PE)` fold steps on it. It starts the next vector in the
  cycle after the last step, and holds its last step while the previous
  output has not been taken.
- `vvau` (depthwise) takes one 3x3 window of all channels and processes
  `PE` channels per cycle.
- `sliding_window` keeps `K+S` lines in a ring of line buffers. It emits a
  window as soon as the lines it needs are present, and zero-pads the
  border.

## Loading weights and thresholds

Weights and thresholds sit in arrays inside the units. The arrays map to
block or distributed RAM. They are written before frames are streamed,
one value per cycle, over the `cfg` bus (`spe_pkg::cfg_t`):

| field | meaning |
|---|---|
| `we` | write strobe |
| `sel` | `CFG_WEIGHT` or `CFG_THRESH` |
| `unit` | target unit number |
| `row` | output channel |
| `col` | input index (weight) or threshold number 0-14 (threshold) |
| `data` | signed value |

Units are numbered as follows:

| units | what |
|---|---|
| 0 | stem |
| 1, 2 | block 0 depthwise, projection |
| `3b`, `3b+1`, `3b+2` | block `b >= 1` expansion, depthwise, projection |
| 51 | head convolution |
| `64 + 2b` | block `b` input activation |
| `65 + 2b` | block `b` activation before the residual add |
| 98 | activation before the head |

A weight's `col` index is the unit's input index. For a 3x3 convolution it
is `(ky*3 + kx)*Cin + c`, the order in which `sliding_window` lays out a
window. For a depthwise unit it is the tap `ky*3 + kx`.

## Modules

| file | what it is |
|---|---|
| `spe_pkg.sv` | bit-widths, network table, folding functions, config bus type, unit numbering |
| `stream_fifo.sv` | first-word-fall-through FIFO between units |
| `dup_streams.sv` | stream fork for the residual shortcut |
| `add_streams.sv` | residual adder, signed `IB` + signed `IB` -> `IB+1` |
| `sliding_window.sv` | line buffers, K x K windows with stride and zero padding |
| `mvau.sv` | folded matrix-vector unit (1x1 and 3x3 convolutions) with optional thresholds |
| `vvau.sv` | folded depthwise 3x3 unit with thresholds |
| `thresholding.sv` | standalone multi-threshold activation (the shared activation) |
| `inverted_residual.sv` | one block: the chain above, sized from the package |
| `spe_accel.sv` | the top: stem, 17 blocks, head |

## Simulating

Everything is plain SystemVerilog for Verilator 5. For example, to run the
end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_spe_accel \
    rtl/spe_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_spe_accel.sv
./obj_dir/Vtb_spe_accel
```

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. A
watchdog counts a failure if the design hangs.

`tb_ref_pkg` is an integer reference model of the network: convolution,
depthwise convolution, threshold activation and add, on flat arrays. The
testbenches generate weights and thresholds from formulas, so they need no
data files:

- weights are a hash of (unit, row, column) reduced to the signed range of
  the layer's weight width;
- thresholds for each channel ascend with a spacing of
  `1 + isqrt(fan_in) * m / 4`, with a channel-dependent offset.

These values keep activations spread over all 16 levels through the depth
of the network, so errors do not vanish into saturated outputs.

| testbench | what it covers |
|---|---|
| `tb_stream_fifo`, `tb_dup_streams`, `tb_add_streams` | stream primitives under random valid/ready |
| `tb_sliding_window` | every window against a direct im2col, strides 1 and 2, several sizes |
| `tb_mvau`, `tb_vvau`, `tb_thresholding` | bit-exact outputs against the model at several foldings, plus cycles per vector |
| `tb_inverted_residual` | blocks with and without residual, expansion, stride 2, under back-pressure |
| `tb_spe_accel` | the whole network at 32 x 32 pixels with channels divided by 8 |
| `tb_spe_accel_full` | the whole network at its default size (240 x 240, full channel counts) |

`tb_spe_accel` compares every output bit with the reference model over five
frames. The first frames run under random input gaps and output
back-pressure. It then measures the frame interval with the pipeline
flowing freely and checks it against the budget (1 728 cycles measured
against a budget of 2 000 at that size). It counts the residual additions,
input and output back-pressure, stem stalls and stem windows, and fails if
any of them never happened.

`tb_spe_accel_full` runs the same test with no parameter override on the
top: three 240 x 240 frames through the full network. It finishes in a few
minutes of Verilator time, with these results:

- 245 766 output values checked, none wrong;
- frame interval measured at 737 280 cycles, against a budget of 750 000;
- loading every weight and threshold over the bus takes 2 457 961 cycles.

## Departures from the published design

- **Stream shape.** FINN streams fold a pixel's channels over several
  beats. Here a whole pixel moves in one beat and each unit folds
  internally. Throughput per unit is the same; the wide streams cost
  wires, and the unit-internal buffers cost registers.
- **Weight loading.** In a FINN build the weights are constants in the
  bitstream. Here they are written over a configuration bus, so one
  bitstream serves any set of trained weights.
- **Layer table.** Channel counts, expansion factors and strides are those
  of the standard MobileNetV2. The published description states only the
  240 x 240 input, the 3x3 stem, the 17 blocks, the missing expansion in
  the first block, the 1x1 head and the 288 weights of the first depthwise
  layer (32 channels x 9). The last of these agrees with the 32-channel
  stem used here.
- **Input pixels.** Pixels are assumed to be 8-bit signed, after the
  host's normalisation.
- **FIFO depths.** These are this design's own: 4 beats between units, and
  one line plus 32 pixels on shortcuts. The published accelerator sized
  its FIFOs automatically. On the board it ran about four times below its
  estimate (58.7 instead of 250 frames/s) because the FIFOs had to be cut
  to fit the block RAM. This RTL does not model that limit.
- **Folding rule.** Parallelism is derived from the frame budget by the
  simple rule above, not taken from the published folding configuration,
  which is not given.
- **Not included.** The pose heads and the processor system that runs
  them. Also absent is the board-level data movement between host memory
  and the streams: DMA, bus interfaces and clocking.
- **Not measured.** Area, power and timing closure at 187.5 MHz have not
  been measured for this RTL.
