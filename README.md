# A fixed-point convolution node for split neural networks

A camera-equipped wearable (smart glasses, say) cannot afford to run a whole
image autoencoder on its battery. It cannot afford to stream raw frames over a
low-power radio either. Splitting the network is the compromise. The wearable,
the *node*, runs the first few layers up to the point where the feature map is
smallest relative to the work done. It sends that small map over the radio to a
*hub*, a phone or laptop, which runs the rest. The split point is chosen by a
figure of merit, the product of a layer's output data volume (W x H x C) and
its multiply-accumulate count.

This RTL is the node side of such a split, sized for the encoder front of a
128x128 RGB autoencoder. It has three convolution layers with 128 5x5 kernels,
then 64 3x3, then 32 3x3. They run on narrow fixed-point MAC units, either on
wide parallel engines (one window per clock) or on a narrow serial engine (one
kernel column per clock). The serial engine trades latency for area. The
result is streamed out on a valid/ready port meant for the radio. The radio
and the hub's decoder are not part of this RTL.

## Number formats

| quantity | format | where |
|---|---|---|
| weight | 10-bit sign-magnitude: bit 9 sign, bit 8 integer, bits 7..0 fraction (step 1/256, meant for -1..1) | `weight_t` |
| feature value | 8-bit unsigned integer (a pixel, or an activation) | `fmap_t` |
| MAC product | signed 10-bit integer | `prod_t` |
| window and channel sums | signed 16-bit | `acc_t` |

`distnn_pkg` defines these types and two helpers, `sat_add` and `relu_clip8`.

## The MAC unit (`mac_unit`)

The multiplier never multiplies signed numbers. The weight's 9-bit magnitude
is multiplied by the 8-bit feature value, giving a 17-bit magnitude. Dropping
the 8 fraction bits leaves a 9-bit integer. The weight's sign bit then chooses
between that integer and its two's complement `~x + 1`. In integers:

    prod = sign(w) * floor(|w| * in / 256)          -511 <= prod <= 511

Truncation rounds the magnitude down, so a negative product is rounded toward
zero. The 9-bit integer is widened to 10 bits before it is complemented. The
unit is purely combinational, and the adding is done by the engines around it.

## Convolution engines

**`conv3x3_parallel` and `conv5x5_parallel`.** These have 9 or 25 MAC units,
one per kernel tap, and an adder tree. Tap `i` sits at kernel row `i % k`,
column `i / k`. Each row of the array is summed first, then the row sums are
added. The engines are combinational. The datapath registers the sum, so a
new window can enter every clock. The largest sum is 25 x 511, which fits in
16 bits.

**`conv_serial`.** This has `LANES` = 5 MAC units working on one kernel column.
Their column sum is added into the accumulator register `accm`. `clr` marks a
window's first column, which loads the column sum instead of adding it. A
k x k window takes k clocks, and its sum is on `out_conv` one clock after the
last column. For a 3x3 kernel the two spare lanes get zeros.

The top contains both kinds of engine. `serial_mode`, sampled at `start`,
chooses which one a frame uses.

## How a frame is computed

Each layer is a stride-2 convolution with k/2 zero padding. It is followed by
2x2 max pooling and an activation that maps the signed 16-bit result back to
8 bits: negative values become 0 and values above 255 become 255. No bias is
added. With the default parameters:

| layer | input | kernels | conv output | pooled output (stored) |
|---|---|---|---|---|
| 0 | 128x128x3 | 128 of 5x5 | 64x64x128 | 32x32x128 |
| 1 | 32x32x128 | 64 of 3x3 | 16x16x64 | 8x8x64 |
| 2 | 8x8x64 | 32 of 3x3 | 4x4x32 | 2x2x32 (sent out) |

`node_ctrl` issues one *window operation* per clock. In parallel mode that is
a whole k x k window of one input channel. In serial mode it is one kernel
column of that window. The loops, from outermost to innermost, run over the
filter, the pooled row, the pooled column, the four positions inside the
pooling window, the input channel, and (in serial mode only) the kernel column.
Because the input channel is the inner loop, each convolution output is
finished after C_in window sums. Because the four pooling positions come just
outside it, those four outputs leave the adder one after another. That is all
`maxpool` needs: a running maximum over four consecutive values.

The pipeline in `distnn_node` has four stages:

1. **S0.** The controller issues an operation. The address generator computes
   25 feature addresses, 25 weight addresses and a mask of in-bounds taps.
   In serial mode only ports 0..4 are used, for the rows of the current column.
2. **S1.** The memories return the window. Masked taps are forced to zero,
   which is how padding is done. The engines compute.
3. **S2.** The window sum is added to the channel accumulator with signed
   16-bit saturation. After the last channel, the sum goes to `maxpool`.
4. **S3.** The pooled value is passed through ReLU, clipped to 8 bits and
   written to the other buffer.

When a layer's last operation has been issued, the controller waits 4 clocks
for the pipeline to empty before it starts the next layer.

**Buffers.** Buffer A (`DEPTH_A` = 49,152 bytes) holds the image and then
layer 1's result. Buffer B (131,072 bytes) holds layer 0's result and then
layer 2's result. Layer 1 overwrites the image, so the image must be loaded
again for every frame. The weight memory holds 101,760 ten-bit words, stored
layer after layer. Within a layer, weight `(f, c, ky, kx)` is at
`((f*C_in + c)*k + ky)*k + kx`. Every memory (`mp_ram`) has one write port and
25 read ports with one clock of read latency. This lets a whole 5x5 window be
read in one clock. In silicon the same behaviour would come from banked SRAM.

## Timing

A frame takes `sum over layers of (OH*OW*F*C_in * (serial ? k : 1) + 4)`
clocks of compute. OH x OW is the convolution output size, before pooling.
Streaming out the result then takes at least 2 clocks per value.

| mode | compute clocks | at 100 MHz |
|---|---|---|
| parallel | 1,572,864 + 2,097,152 + 32,768 + 12 = 3,702,796 | 37.0 ms |
| serial | 7,864,320 + 6,291,456 + 98,304 + 12 = 14,254,092 | 142.5 ms |

These times are longer than the published latencies for this layer set
(5.24 ms and 26 ms for the first layer). Those figures count one k x k window
per output value, as if every layer had one input channel. This design sums
over every input channel, which is what a convolution with C_in > 1 needs. It
keeps the one-window-per-clock and k-clocks-per-window rates, so its cycle
counts are C_in times the published ones. As a result, neither mode finishes
a frame within the 33 ms that 30 frames per second allow at 100 MHz. Parallel
mode misses by about 10 %, and would fit with a clock of about 112 MHz or with
a second parallel engine.

## Interface of `distnn_node`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `ld_img_we/addr/data` | in | write a pixel to buffer A at `(c*IMG + y)*IMG + x`; ignored while busy |
| `ld_w_we/addr/data` | in | write a weight; ignored while busy |
| `start`, `serial_mode` | in | begin a frame, choosing the engine; `start` is ignored while busy |
| `busy`, `done` | out | frame in progress; `done` pulses after the last output value was accepted |
| `tx_valid/tx_data/tx_last/tx_ready` | out/out/out/in | output feature map in `(f*P + y)*P + x` order; `tx_data` holds while `tx_ready` is low |

Parameters `IMG, C_IN, K1, F1, K2, F2, K3, F3` set the layer sizes. `IMG`
must be a multiple of 64, and kernels may be 3 or 5 (`K = 5` selects the 5x5
engine). Leave the derived parameters alone.

## Where this departs from the published design, and what is assumed

* Stride 2, k/2 padding and pooling after every layer are read from the layer
  sizes. They were not stated. So was pooling after the third layer, which
  gives a 2x2x32 output rather than 4x4x32.
* Channel accumulation makes the cycle counts C_in times the published ones
  (see Timing).
* The published design gives no activation, bias, requantisation or overflow
  handling. ReLU with clipping to 8 bits, no bias, and a saturating 16-bit
  channel sum are choices made here.
* The serial engine is described in the text as k MACs in parallel, but drawn
  with one. It is built with 5 lanes.
* The memories, the controller, the run-time mode switch and the load and
  stream ports are this design's own.
* Power and energy figures (pJ per MAC, µW at 30 fps) are outside the scope of
  RTL and are not modelled.

## Files and simulation

`rtl/` holds one module or package per file. The leaves are `mac_unit`,
`conv3x3_parallel`, `conv5x5_parallel`, `conv_serial`, `maxpool` and `mp_ram`.
`node_ctrl` is the sequencer, and `distnn_node` is the top. `tb/` holds a
self-checking testbench for each of them, each printing
`TB_RESULT checks=N failures=M`. `distnn_ref_pkg` is an integer reference
model of the arithmetic and the layers. `tb_distnn_node_body.svh` is the
shared body of the three top-level testbenches:

* `tb_distnn_node` uses a 64x64x3 image and 4/4/3 filters. It runs a frame in
  parallel mode, the same frame in serial mode, and a saturating frame. It
  checks the output, both intermediate feature maps and the cycle count. It
  also counts padding, saturation, clipping, output stalls and the mode
  switch. It also checks that loads and a second `start` during a frame are
  ignored.
* `tb_distnn_node_full` runs one frame at the default size in parallel mode,
  about 3.9 M clocks including loading. It takes a few seconds in Verilator.
* `tb_distnn_node_full_serial` runs the same frame on the serial engine,
  about 14.4 M clocks, in roughly 15 seconds.

To run one:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/distnn_pkg.sv tb/distnn_ref_pkg.sv tb/tb_distnn_node.sv \
        --top-module tb_distnn_node -o sim && obj_dir/sim

Verilator finds the other modules through `-Irtl`.
