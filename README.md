# A streaming FPGA accelerator for the feature branch of a quantised Siamese tracker

A Siamese tracker finds an object in a new video frame by comparing two feature maps. One comes from a
small *exemplar* image of the object, computed once. The other comes from a larger *search region* (ROI)
cut from each new frame. The tracker cross-correlates the two maps into a similarity map, and the peak
of that map gives the object's new position. Computing the features is the expensive part. This RTL is
a hardware accelerator for it: a small, 4-bit quantised convolutional network that turns a 238x238 RGB
search region into a 22x22x128 feature map.

The accelerator follows the streaming *dataflow* style of FPGA inference engines. Each network layer
is its own hardware stage. The stages are chained by valid/ready streams, and all six work at the same
time on successive parts of the image. Nothing goes to external memory between layers. Each stage sets
its own parallelism through two numbers, which together are called its *folding*:

* **SIMD**: how many input channels it takes per cycle;
* **PE**: how many output channels it computes in parallel.

With PE x SIMD multipliers, a layer needs `(9*CIN/SIMD) * (COUT/PE)` cycles per output pixel. The
slowest stage sets the frame rate.

The network, its precisions, the 238x238 input size and the folding come from a published
hardware-software SiamFC tracker. That tracker ran this network on the programmable logic of a Zynq
UltraScale+ MPSoC at 100 MHz, and everything else in Python on the ARM cores. The stage internals, the
stream format, the configuration bus and a few widths are this design's own. They are listed under
"Departures and open points" below.

## The network

There are six 3x3 convolutions with stride 1 and no padding. The first three are followed by 2x2 max
pooling, and every layer except the last ends in batch normalisation and a 4-bit quantised activation.
The parameters are 554,688 weights and no biases.

| stage (`siamfc_accel` instance) | in -> out channels | weights | activation | pool | map side (ROI) | (PE, SIMD) | cycles / output pixel | cycles / frame |
|---|---|---|---|---|---|---|---|---|
| Conv 1.1 (`u_conv1_1`) | 3 -> 64    | 8 bit | 4 bit | 2x2 | 238 -> 236 -> 118 | (32, 3)  | 9 x 2 = 18  | 1,002,528 |
| Conv 1.2 (`u_conv1_2`) | 64 -> 64   | 4 bit | 4 bit | 2x2 | 118 -> 116 -> 58  | (32, 16) | 36 x 2 = 72 | 968,832 |
| Conv 2 (`u_conv2`)     | 64 -> 128  | 4 bit | 4 bit | 2x2 | 58 -> 56 -> 28    | (32, 16) | 36 x 4 = 144 | 451,584 |
| Conv 3 (`u_conv3`)     | 128 -> 128 | 4 bit | 4 bit | -   | 28 -> 26          | (32, 16) | 72 x 4 = 288 | 194,688 |
| Conv 4 (`u_conv4`)     | 128 -> 128 | 4 bit | 4 bit | -   | 26 -> 24          | (32, 16) | 72 x 4 = 288 | 165,888 |
| Conv 5 (`u_conv5`)     | 128 -> 128 | 8 bit | none: 24-bit accumulators out | - | 24 -> 22 | (32, 16) | 72 x 4 = 288 | 139,392 |

Input pixels are 8-bit unsigned. Activations are 4-bit unsigned (0..15). Weights are signed
two's-complement. The same network applied to the 110x110 exemplar gives 6x6x128, and the correlation
of 6x6 with 22x22 is the usual 17x17 SiamFC score map. That size relationship is why "zero padding" is
read here as *no* padding.

## Stream format and folding: how data moves

The hardest thing to follow in the RTL is the order of the stream beats, because every stage relies on
it.

**Feature-map streams.** Pixels come in raster order (row by row, left to right). Each pixel is a
number of consecutive beats, and each beat carries a group of consecutive channels. Lane `j` of beat
`f` is channel `f*LANES + j`, packed at bits `[j*W +: W]`. The accelerator input is one pixel per
beat: R, G and B in lanes 0, 1 and 2. The accelerator output is `128/PE` beats per pixel of `PE`
signed 24-bit values.

**Window stream (`swg`).** For every output pixel `(oy, ox)`, the sliding-window generator sends the
3x3xCIN window as `9*CIN/SIMD` beats. The order is `ky`, then `kx`, then channel fold. Each beat is
called a *synapse fold* `sf`. Within beat `sf`, lane `j` is synapse `sf*SIMD + j`, where synapse
`s = (ky*3 + kx)*CIN + c`. The generator keeps 4 input rows in a circular buffer. It emits windows
from the 3 complete rows while the 4th row fills from the input.

**MVAU.** The matrix-vector-activation unit computes `COUT/PE` *neuron folds* per window. During neuron
fold `nf`, PE lane `p` computes output channel `nf*PE + p`. Each cycle it takes one synapse fold and
adds SIMD products per PE to that lane's accumulator. The window is read from the input stream only
during the first neuron fold. It is stored in a small buffer (`ibuf`) at the same time and replayed
from that buffer for the remaining folds. So a layer takes input at only `1/NF` of its cycles, and the
stage before it waits. After the last synapse fold of each neuron fold, one beat of PE results leaves
through a register.

**Lane conversion (`dwc`).** The PE lanes of one layer rarely equal the SIMD lanes of the next. A
width converter splits each beat into smaller ones (32 -> 16 in the default folding) or gathers small
beats into wider ones. Channel order is kept either way.

**Pooling (`maxpool`)** works on the MVAU's beat format. It holds the first pixel of each horizontal
pair per channel fold and keeps the horizontal maxima of even rows in a half-row buffer. On odd rows
it combines the two and sends one beat.

## Activation: batch normalisation as thresholds

Batch normalisation followed by 4-bit quantisation is a monotone step function of the integer
accumulator. Each output channel `c` therefore stores 15 thresholds `T[c][0..14]`, and its activation
is the number of thresholds the accumulator reaches (`acc >= T`). For a trained layer with batch
normalisation `y = g*(acc - mu)/sigma + b` (with `g > 0`) and quantisation step `s`, the thresholds are
`T[c][k] = ceil(mu + sigma/g * (s*(k + 0.5) - b))` for `k = 0..14`. The hardware only compares, so any
other monotone quantiser can be loaded the same way. The last layer has no batch normalisation and
sends its raw accumulators.

## Loading weights and thresholds

Before the first frame, all parameters are written over the `cfg` bus (`finn_pkg::cfg_wr_t`), one
write per clock while `cfg.we` is high. `cfg.layer` selects the stage (0..5).

* **Weights** (`kind = CFG_WEIGHT`). One write holds the SIMD weights of one PE for one memory word.
  Set `pe = p` and `addr = nf*SF + sf`, where `SF = 9*CIN/SIMD`. Put weight
  `W[nf*PE + p][sf*SIMD + j]` in `data[j*WB +: WB]`, where WB is 8 for layers 0 and 5 and 4
  otherwise. At the default folding this takes 35,136 writes.
* **Thresholds** (`kind = CFG_THRESH`, layers 0..4). Set `addr = channel*16 + k` and put
  `T[channel][k]` in `data[23:0]`. This takes 8,640 writes.

The memories are plain arrays with no reset. Parameters survive a reset of the stream logic.

## Throughput and latency

At the default (V5) folding, Conv 1.1 is the slowest stage: 236 x 236 pixels x 18 cycles is 1,002,528
cycles. The full-size simulation takes **1,040,435 cycles** from the first pixel accepted to the last
feature value sent. At 100 MHz that is 10.4 ms, or about 96 frames per second for the network alone.
The published measurement for this folding is 49.03 frames per second (2,039,567 cycles at 100 MHz),
and the full-size test requires the design to stay below that. Where the measured system lost the
other half of its cycles is not documented. This RTL is an ideal pipeline in which the slowest stage is
always busy. Treat 96 FPS as an upper bound of the dataflow, not as a prediction for that system.

Frames can be streamed back to back. Each sliding-window generator starts accepting the next frame
once it has sent the last window of the current one, which leaves a short refill bubble of three rows. Successive frames then finish about one
slowest-stage period apart: 1,006,565 cycles in the full-size test, so three search regions (a
three-scale tracker's frame) take 3,053,567 cycles, 30.5 ms at 100 MHz.

Other foldings are parameter overrides on `PE` and `SIMD`. Each PE must divide its layer's output
channels and each SIMD its input channels, and `SIMD[0]` must be 3. The published foldings V1 to V6 all
satisfy this. Only in V1 does Conv 5 become the slowest stage, at 1,115,136 cycles per frame. For all
the others it is Conv 1.1. Because Conv 1.1 is folded the same way in every version, this model cannot
reproduce the frame-rate differences that were measured between the versions.

## What is outside this RTL

The tracker around the accelerator is software on the processor:

* reading frames;
* cropping and resizing the search region;
* packing and unpacking the data;
* cross-correlation with the exemplar features;
* upsampling the score map;
* locating the peak with a cosine window.

The DMA path between processor memory and the accelerator is platform infrastructure and is not built
either. The accelerator offers plain valid/ready streams where it would connect. The exemplar features
need the same network on a 110x110 input, which means a second elaboration with `IMG_DIM = 110`: the
size is fixed when the design is built.

## Departures and open points

These are choices made where the source description is silent or ambiguous:

* **PE versus SIMD.** The source text calls PE the input-channel parallelism and SIMD the output
  channels, but its folding table only makes sense the other way round: the first layer's SIMD is 3,
  its number of input channels. The table is followed: SIMD means input channels, PE means output
  channels.
* **Padding.** "Zero padding" is read as no padding, as explained above.
* **Activation.** Unsigned 4-bit activations and a threshold-based batch-norm/quantiser are assumed.
  The last layer outputs 24-bit accumulators; 23 bits would suffice.
* **Input.** Pixels are assumed to be 8-bit unsigned.
* **Control and interfaces.** The handshakes, reset (synchronous, active low), configuration bus,
  stage internals and frame-to-frame behaviour are this design's own.
* **Verification data.** All tests use random weights, thresholds and images, compared against an
  integer model written independently of the RTL (`tb/net_ref_pkg.sv`). No trained network is
  available, so tracking accuracy has not been reproduced.

## Simulating

Every testbench is self-checking and ends with a line `TB_RESULT checks=N failures=M`. Packages must
come first on the command line, and `-y` lets verilator find the modules:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
    rtl/finn_pkg.sv tb/net_ref_pkg.sv tb/tb_siamfc_accel.sv --top-module tb_siamfc_accel
./obj_dir/Vtb_siamfc_accel
```

| testbench | what it covers |
|---|---|
| `tb_swg` | window order, frame-to-frame reuse, one beat per cycle |
| `tb_mvau` | middle-layer and first/last-layer shapes, thresholds, raw accumulators, SF*NF cycles per window |
| `tb_maxpool` | 2x2 maxima on an odd-sized map, full rate |
| `tb_conv_layer` | a complete stage, configuration decoding, back-pressure |
| `tb_siamfc_accel` | all six stages at 78x78 with narrow layers; counts stalls, fold replays, pooling, activation range |
| `tb_siamfc_accel_v1`, `tb_siamfc_accel_v6` | the least and most parallel published foldings, full channel counts, 78x78 |
| `tb_siamfc_accel_exemplar` | the 110x110 exemplar elaboration (6x6x128 out), default folding, 224,426 cycles a frame |
| `tb_siamfc_accel_full` | three 238x238 search regions back to back (one frame of a three-scale tracker) at the default parameters, about 100 s of simulation after a 30 s build |

To change the design:

* **Input size:** change `IMG_DIM`.
* **Folding:** change the `PE` and `SIMD` arrays of `siamfc_accel`.
* **Layer widths:** change `COUT`.
* **Precisions and the configuration-bus layout:** these are in `rtl/finn_pkg.sv`.
