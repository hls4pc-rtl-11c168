# Streaming URS + KNN + shared-MLP stage for point-based point-cloud networks

Point-based networks such as PointMLP classify a 3D point cloud by repeatedly picking a set
of sample points, gathering the K nearest neighbours of each, running a small shared MLP
(1x1 convolution) over every neighbour and max-pooling the results per sample. On a GPU the
sampling and neighbour search are the awkward part: they are irregular, memory bound and
sequential. This RTL implements that mapping step and the layers that follow it as a chain
of streaming hardware blocks, in the form of the HLS4PC library for FPGAs: sampling is
done by a linear-feedback shift register instead of farthest point sampling, the neighbour
search by X parallel distance units and a repeated minimum search, and the convolution,
ReLU and max-pooling layers by folded, fixed-point processing elements, all with 8-bit
weights and activations.

The top module, `hls4pc_stage`, is the first stage of such a network at the sizes of the
compressed PointMLP-Lite model: 512 input points, 256 samples, 16 neighbours, 4 distance
units. The remaining stages and the classifier are not included (see "What is not here").

## Dataflow of a stage

```
point stream ──► knn_unit ──► grouper ──► conv1d_layer ──► relu_simd ──► maxpool_simd ──► features
 (N points)      │ line buffer      (3 beats per   (COUT/NPE beats   (NPE lanes)   (max over K
                 │ lfsr_gen         neighbour)      per neighbour)                  neighbours)
                 │ X x distance_pe
                 │ distance buffer + selection loop
                 └ output buffer (stream_fifo)
```

Every arrow is a valid/ready stream: a beat moves on a clock edge where both are high, and a
producer keeps its beat stable while `ready` is low. All blocks run at once; a stall anywhere
propagates back towards the input through the `ready` signals.

* **Input**: one point per beat, `point_t` = {x, y, z}, each a signed 8-bit fixed-point
  coordinate. A cloud is exactly N points.
* **Grouper** (inside `hls4pc_stage`): for each neighbour produced by the KNN unit it emits
  three beats, the neighbour's x, y and z minus those of its sample point, saturated to
  [-128, 127]. These are the 3 input channels of the convolution.
* **Convolution**: 1x1 kernel (a shared MLP) from 3 to COUT = 32 channels, NPE = 4 output
  channels per beat.
* **ReLU and max-pool** work on the same NPE lanes; the pool keeps, per channel, the maximum
  over the K neighbours of a sample.
* **Output**: per sample, COUT/NPE = 8 beats of 4 signed 8-bit features, `out_last` on the
  8th. Samples appear in the order the LFSR draws them; as the seed is fixed, that order is
  known in advance (the sample index is available inside `knn_unit` on `out_sample_idx`).
* **Weights**: the convolution's weights and biases are written through `w_we/w_addr/w_data`
  and `b_we/b_addr/b_data` before the first cloud; weight (o, c) lives at address o*3 + c.

## The KNN unit

`knn_unit` does the work that dominates a stage's run time. It has five phases, driven by
one state machine:

1. **LOAD** (N clocks). The N points of the cloud are written into the line buffer, an
   array organised as N/X rows of X points so that X points can be read per clock.
2. **SAMPLE** (1 clock). `lfsr_gen` supplies the next sample index, and the point at that
   index becomes the current sample (centre).
3. **DIST** (N/X + 1 clocks). Each clock, X `distance_pe` units take the next row of X
   points and compute the squared Euclidean distance of each to the centre; one clock later
   the X results are written into the distance buffer.
4. **SCAN** (N/SEL clocks) and **EMIT** (1 clock), repeated K times. The distance buffer
   is organised as N/SEL rows of SEL entries (SEL, a multiple of X, defaults to X). SCAN
   walks it a row per clock, keeping the smallest distance and its index (a strict `<`
   comparison, so on a tie the lower point index wins). EMIT writes the winner to the
   output buffer and overwrites its distance with the all-ones maximum of the distance type,
   so the next pass finds the next-nearest point. EMIT waits while the output buffer is full.
5. After K passes the next sample starts at SAMPLE; after NUM_SAMP samples the unit goes
   back to LOAD and the LFSR returns to its seed.

Since the centre is one of the input points, its distance is 0 and it is always its own
first neighbour. Neighbours leave nearest first.

Each output beat carries the sample index, the neighbour index, both points, `out_last` on
the K-th neighbour of a sample and `out_cloud_last` on the last beat of the cloud.

**Timing.** Without back-pressure one sample takes exactly

    2 + N/X + K * (N/SEL + 1) clocks = 2194 clocks at N = 512, X = SEL = 4, K = 16,

so a 512-point cloud with 256 samples takes 512 + 256 * 2194 = 562,176 clocks, about
5.6 ms at 100 MHz. The convolution needs K * (3 + 8 * 4) = 560 clocks for the 16
neighbours of a sample and is idle most of the time: the selection loop sets the rate.
Widening the scan to SEL = 32 (32 comparators and a 32-wide distance-buffer row) cuts a
sample to 2 + 128 + 16 * 17 = 402 clocks and a cloud to 103,424 clocks, about 967 clouds/s
at 100 MHz; at that point the convolution (560 clocks per sample) would become the
bottleneck unless NPE is raised too.

**Sampling.** `lfsr_gen` is a Fibonacci LFSR of WIDTH = log2(N) bits whose feedback taps are
a primitive polynomial (x^9 + x^5 + 1 for 9 bits; `hls4pc_pkg::lfsr_taps` lists widths 3 to
16). It runs through all 2^WIDTH - 1 non-zero states before repeating, so the up to 511
samples of one cloud are all different, i.e. sampling is without replacement. The sample
index is state - 1, so point N-1 is never chosen as a sample (it can still be a neighbour).
The seed is a parameter and is reloaded for every cloud, so the hardware draws the same
samples as a software model started from the same state, which is what lets a network be
trained with the same sampling.

## Convolution layer

`conv1d_layer` is a general 1D convolution with kernel size KSIZE, stride 1 and no padding;
with KSIZE = 1 it is the shared MLP used in the stage, and with LEN = 1 a fully connected
layer. Input is one activation per beat, all CIN channels of a position in turn.

* The **convolution generator / line buffer** is a shift register of KSIZE*CIN activations:
  every input beat shifts it by one, so after each complete position it holds the
  kernel-size segment, oldest position first. A counter restarts the window at every
  sequence of LEN positions.
* Once a segment is complete, the COUT outputs are computed in COUT/NPE **folds**. In a
  fold, PE p handles output channel fold*NPE + p: KSIZE*CIN clocks of multiply-accumulate
  with weights from the on-chip weight array, then the bias is added (`conv_pe`: MAC, then
  bias ADD, giving the partial sum).
* The partial sum is rescaled by an arithmetic right shift of SHIFT = W_BITS - 1 bits
  (weights are read as fractions, Q1.7 at 8 bits, so the output keeps the input's scale)
  and saturated to A_BITS bits. The NPE results of a fold form one beat into the output
  buffer (`stream_fifo`).

Batch normalisation is not a separate unit: it is meant to be folded into the weights and
the bias offline, which is why the PE only adds a bias.

Per window the layer spends CIN input clocks plus COUT/NPE * (KSIZE*CIN + 1) compute clocks;
it does not take input while it computes.

**Precision** is a compile-time choice per layer: A_BITS and W_BITS set the activation and
weight widths (8/8 by default), and the accumulator and bias grow with them. Layers of
different precision can follow each other, which is how a mixed-precision network is
built; the testbenches run the layer at 4/4, 6/6, 8/4, 8/8 and 16/16 bits. The KNN path and
the stage top stay at 8 bits (the widths in `hls4pc_pkg`).

## ReLU and max-pooling

`relu_simd` handles N_SIMD channels per clock and clamps negatives to zero; a C-channel
vector takes the folding factor F = C / N_SIMD beats, and the unit marks the F-th.
`maxpool_simd` reduces POOL consecutive vectors to their channel-wise maximum: a buffer of
C running maxima is loaded by the first vector and updated by the following ones; the beats
of the last vector go straight to the output with their final maxima.

## Number formats

| quantity | format |
|---|---|
| coordinates, activations | signed 8 bit (`coord_t`) |
| weights | signed 8 bit, read as Q1.7 |
| bias | signed 16 bit, same scale as the accumulator |
| accumulator | signed 24 bit |
| squared distance | unsigned 19 bit (`dist_t`), all-ones = "already taken" |

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `hls4pc_stage`, `knn_unit` | N | 512 | points per cloud (power of two) |
| | NUM_SAMP | 256 | samples per cloud (< N) |
| | K | 16 | neighbours per sample |
| | X | 4 | distance PEs (power of two, >= 2) |
| | SEL | X | distance entries compared per clock in the selection loop (power-of-two multiple of X, < N) |
| | SEED | 1 | LFSR start state |
| `hls4pc_stage`, `conv1d_layer` | COUT | 32 | output channels |
| | NPE | 4 | PEs of the convolution = SIMD lanes of ReLU and pool |
| | SHIFT | 7 | output rescaling |
| `conv1d_layer` | CIN, KSIZE, LEN | 3, 1, 16 | input channels, kernel size, positions per sequence |
| `conv1d_layer`, `conv_pe` | A_BITS, W_BITS | 8, 8 | activation and weight precision |
| | ACC_W, BIAS_W | A_BITS+W_BITS+8, A_BITS+W_BITS | accumulator and bias widths |
| `relu_simd`, `maxpool_simd` | D_BITS | 8 | activation precision |

N = 512, NUM_SAMP = 256, K = 16, X = 4 and the 8-bit precision are those of the
PointMLP-Lite model. The later stages of that model use 128, 64 and 32 samples; a
`knn_unit` or `hls4pc_stage` instantiated with N = 256/128/64 and NUM_SAMP = 128/64/32
covers their grouping. COUT = 32, NPE = 4, SHIFT and all widths not listed in that sentence
are this design's own choices.

## Where this design departs from, or goes beyond, the published description

* **Throughput.** The published accelerator runs the whole PointMLP-Lite network at 990
  clouds/s at 100 MHz, i.e. within about 101,000 clocks per cloud. At its default
  SEL = X = 4 the selection loop here compares only 4 distances per clock and runs after,
  not alongside, the distance phase, so stage 1 alone needs 562,176 clocks (about 178
  clouds/s). SEL = 32 brings stage 1 to about 103,000 clocks; the whole network at the
  published rate would need that and more. How the original parallelises the selection
  is not published.
* **Neighbour search on coordinates only.** The KNN unit measures distances between 3D
  points; the original also allows the points to carry features.
* **Features into the convolution**: relative coordinates (neighbour minus sample). The
  original removes PointMLP's learnable affine normalisation; what normalisation, if any,
  remains is not described.
* **Distance metric**: squared Euclidean distance; **ties**: lower index first.
* **Weight load port**: the original compiles trained parameters into on-chip memory; here
  they are written at run time, so any trained set can be loaded.
* **Sample index = LFSR state - 1**, LFSR taps and seed, FIFO depths, handshakes, reset
  (active-low, asynchronous for control state) and all stream formats are this design's.

## What is not here

Only one stage is built. The complete PointMLP-Lite network (24 convolution layers in four
stages, a three-layer MLP classifier) is not, because the channel widths of its layers and
its trained weights are not published. Farthest point sampling, "Top-K", "Sorting" and
"Stream Index", which the HLS4PC library lists, are not implemented: the design uses URS
instead of FPS, and the others are named without a description. The host processor, DMA
and DRAM of the Zynq board are outside the design. Other weight/activation precisions
are parameters of the convolution, ReLU and pooling blocks, but the KNN path and the stage top are fixed at
8 bits.

## Files

| file | content |
|---|---|
| `rtl/hls4pc_pkg.sv` | types (`point_t`, `coord_t`, `dist_t`), widths, LFSR tap table, saturation |
| `rtl/lfsr_gen.sv` | URS index generator |
| `rtl/distance_pe.sv` | squared-distance PE |
| `rtl/knn_unit.sv` | line buffer, distance PEs, distance buffer, selection loop, output buffer |
| `rtl/stream_fifo.sv` | output buffer FIFO (with a handshake assertion) |
| `rtl/conv_pe.sv` | MAC + bias PE |
| `rtl/conv1d_layer.sv` | convolution / MLP layer |
| `rtl/relu_simd.sv`, `rtl/maxpool_simd.sv` | SIMD activation and pooling |
| `rtl/hls4pc_stage.sv` | the stage top |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_knn_stages.sv`, `tb/knn_stage_check.sv` | KNN at the sizes of all four stages: 512/256 points/samples with SEL = 32, then 256/128, 128/64, 64/32 |
| `tb/tb_conv_precisions.sv`, `tb/conv_check.sv` | convolution layer at 4/4, 6/6, 8/4 and 16/16 bits; `conv_check` is also used by `tb_conv1d_layer` (kernel-3 conv and MLP) |
| `tb/tb_hls4pc_stage.sv` | end-to-end test at reduced sizes with back-pressure |
| `tb/tb_hls4pc_stage_full.sv` | end-to-end test of one 512-point cloud at the default sizes |

## Simulating

Each testbench generates its own random stimulus, computes the expected results with an
independent behavioural model (its own LFSR model, a brute-force neighbour search,
integer convolution), compares every output and prints
`TB_RESULT checks=<n> failures=<m>`. The KNN, convolution and stage testbenches also check
the clock counts given above. The end-to-end tests count how often each mechanism
occurred (KNN output-buffer stall, convolution stall, consumer back-pressure, coordinate
saturation, ReLU clamping, pool update) and fail if one never did. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/hls4pc_pkg.sv tb/tb_hls4pc_stage_full.sv \
          --top-module tb_hls4pc_stage_full -Mdir obj && obj/Vtb_hls4pc_stage_full
```

The full-size test simulates about 570,000 clocks and finishes in a few seconds; the
other testbenches take well under a second. Replace the testbench name to run another one.
