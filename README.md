# A streaming INT8 CNN accelerator for SAR target recognition

Synthetic-aperture-radar (SAR) automatic target recognition classifies small
radar image chips (here 128 x 128 pixels, one intensity channel) into target
classes. The classifiers are compact convolutional networks that have been
pruned channel-by-channel and quantized to INT8. After pruning, each layer
has an irregular channel count. A fixed-size array of processing elements
would then sit partly idle.

This RTL is a *layer-pipelined streaming* accelerator for such networks.
Every layer gets its own engine, sized at build time for that layer:

* a convolution engine (CCE) with one processing element (PE) per output
  channel;
* a max-pooling engine (MCE), which also requantizes;
* a GEMM engine (GCE) for the fully connected classifier.

The engines are chained by small on-chip FIFO streams. The image enters once
and the class scores leave once. No feature map goes off chip.

When a layer has more output channels than the PE budget allows
(`N_pe^max`, from {8, 16, 32, 64}), it is *channel-folded*. The engine
computes `ceil(C/N_pe)` groups of channels in successive passes. A
*repacking stage* then reassembles the groups into the layout the next layer
reads.

The design follows the streaming configuration of the ARMOR
model/hardware co-design work (its FPGA templates are written in HLS). The
same engines there can also be time-multiplexed on a small FPGA; that mode
is not part of this RTL.

## The default instance

The engines are generic. The top level `armor_top` wires up one concrete
example network, because a streaming accelerator is always built for a
specific model:

| stage | shape in | operation | engine parameters |
|---|---|---|---|
| input buffer | 128x128x1 | holds the image, streams it pixel by pixel | `H=W=128, C=1` |
| CCE1 + MCE1 | 128x128x1 | 3x3 conv, pad 1 -> 8 ch; 2x2 max pool; requantize | `PE=8` (one PE per channel) |
| repack 1 | 64x64x8 | store the map, replay it twice | `REPLAY=2` |
| CCE2 + MCE2 | 64x64x8 | 3x3 conv -> 16 ch in **2 folds**; 2x2 pool; requantize | `PE=8` |
| repack 2 | 32x32x(2x8) | fold-major -> pixel-major, 16 channels per word | `IN_VEC=8, C=16` |
| CCE3 + MCE3 | 32x32x16 | 3x3 conv -> 16 ch; **pool bypassed**, requantize only | `PE=16`, `bypass=1` |
| GCE | 16,384 | fully connected, 10 classes, 1x10 systolic array | `KD=16384, N=10` |
| result buffer | 10 x int32 | class scores for the host | `NRES=10` |

The following come from the reference work:

* the image size;
* the 10 classes (the MSTAR benchmark);
* INT8 weights and activations with 32-bit accumulation;
* the allowed PE counts.

The layer shapes are this design's own. The reference does not list the
shapes of its pruned models. Change the `armor_top` parameters (`IMG_H`,
`IMG_W`, `C1..C3`, `PE1..PE3`, `KM`, `NCLS`) to build other three-layer
networks.

## Convolution engine (`cce`)

### Structure

The CCE holds:

* `PE` convolution PEs (`conv_pe`). Each has K x K multipliers feeding an
  adder tree. The products and the tree sum are registered, so a PE has a
  latency of 2.
* A weight/bias store (`weight_bias_buffer`), laid out as
  `W[FOLD][IC][PE][K*K]` and `B[FOLD][PE]`.
* A K-row circular line buffer (`line_buffer`).
* A controller that walks the loop nest:

```
for fold:                          # ceil(OC/PE) passes
  for each output row oh:
    load input rows until row oh*S-P+K-1 is present
    for each output column ow:
      sum[pe] = bias[fold][pe]
      for c in 0..IC-1:            # one input channel per cycle
        sum[pe] += window(c) . W[fold][c][pe]     # all PEs in parallel
      emit sum[0..PE-1]            # one PE-wide vector word
```

### Line buffer

Row `r` of the input is kept in slot `r mod K`. A rotating head pointer
names the slot the next incoming row overwrites. Moving down by a stride of
S therefore overwrites exactly S rows; the other rows are never copied.
Padding costs no storage: window positions outside the image read as zero.
The head returns to slot 0 at the start of each frame and of each fold.

### Folding

The CCE keeps only K rows. So for each fold it consumes the whole input
frame again. The producer re-sends it:

* the input buffer has a replay count;
* the repacking stage replays its stored map `REPLAY` times.

Lanes of the last fold whose channel index is `>= OC` output zero.

### Timing

When neither side stalls:

* each output pixel costs `IC + 4` cycles (IC issue cycles plus the
  two-stage PE pipeline and the output register);
* each input pixel costs one cycle to load;
* a frame takes `FOLD * (IH*IW + OH*OW*(IC+4))` cycles;
* `frame_done` follows one cycle later.

Loading and computing are not overlapped. This is the same split the
reference performance model uses (a row-buffer term and a compute term). The
constants differ, because this is cycle-level RTL rather than HLS:

* per-pixel overhead: the model's `D_conv + t_ov = 14` becomes 4 here;
* row refill: the model's `S*W_in + 3` becomes `S*W_in` here.

The unit testbench checks the frame count exactly.

## Pooling and requantization engine (`mce`)

### Structure

The MCE takes one PE-wide vector of 32-bit sums per cycle. It has:

* a KM-row window store;
* `PE` comparator trees (`cmp_tree`) over KM x KM windows;
* one requantizer (`requant`) per lane.

### Operation

A window is complete when its bottom-right pixel arrives. The pixel is then
compared together with the stored KM*KM-1 values, and the result is
requantized and emitted in the same cycle. The rows live in a circular
buffer of KM rows (slot = row mod KM). The pooling stride `SM` defaults to
KM but may be smaller, so overlapping windows such as 3x3 stride 2 work.
Pooling padding is not supported.

When `bypass` is set (a layer with no pooling), each pixel is only
requantized.

### Requantization

```
q = clamp( ((x * mult + 2^(shift-1)) >>> shift) + zero_point, -128, 127 )
```

* `mult` is a 32-bit unsigned multiplier, `shift` ranges 0..63, and the
  product is computed in 64 bits.
* Rounding is half-up.
* Requantizing after the maximum (rather than before) is valid for a
  non-negative scale. It keeps requantization off the convolution's critical
  path.

### Throughput

The MCE sustains one pixel per cycle with one output register and
back-pressure. The reference HLS engine runs at an initiation interval of 6.
This RTL does not need banking, so it runs at 1.

## GEMM engine (`gce`, `systolic_array`, `mac_pe`)

### Operands

The fully connected layer computes `Y[M][N] = A[M][KD] x B[KD][N] + bias[N]`.

* The streamed activations (`IN_VEC` per word) are first collected in an
  operand store of `KD/IN_VEC` words per row.
* B and the biases are preloaded.

### Dataflow

The array is `ROWS x COLS` multiply-accumulate units and is
output-stationary:

* A enters from the left, skewed by one cycle per row;
* B enters from the top, skewed by one cycle per column;
* each operand moves one unit per cycle;
* each unit keeps its own accumulator.

One tile of `ROWS x COLS` results needs `KD + ROWS + COLS - 2` cycles after
a one-cycle clear. The results are then read out one row per cycle, with the
bias added. Larger problems are tiled over `ceil(M/ROWS) x ceil(N/COLS)`
tiles.

In the default instance, M=1 (one image) and N=10, so the array is 1 x 10.
The reduction over 16,384 inputs dominates: about 17,400 cycles.

## Streams, buffers and repacking

* `stream_fifo` carries vector words (a whole PE-wide result per beat)
  between engines. It uses a valid/ready handshake. An assertion checks that
  a producer held by `in_ready = 0` keeps its word stable.
* `fmap_repack` is the input repacking stage. It accepts a feature map as
  `IN_VEC`-channel words: fold 0 for every pixel, then fold 1, and so on.
  It stores the map in channel-group banks. It then emits it pixel by pixel
  with all `C` channels in one word, `REPLAY` times. Filling and draining
  alternate, so the stage holds one full map.
* `input_buffer` holds the image, written through a simple write port, and
  streams it on `start`.
* `result_buffer` collects the class scores and raises `done`.

## Host interface of `armor_top`

| port | use |
|---|---|
| `img_we, img_addr, img_data` | write pixel `h*IMG_W+w` |
| `cfg_en, cfg_sel, cfg_bias, cfg_a, cfg_b, cfg_kk, cfg_data` | preload parameters, see below |
| `start` | one-cycle pulse: run one inference |
| `busy, done` | input streaming in progress; all class scores present |
| `res_addr, res_data` | read class score `n` (32-bit) |

`cfg_sel` selects the target:

* 0..2 selects convolution layer 1..3. `cfg_a` is the output channel,
  `cfg_b` the input channel and `cfg_kk` the tap `kh*K+kw`.
* 3 selects the fully connected layer. `cfg_a` is the flattened input index
  `(h*W3+w)*C3+c` and `cfg_b` the class.
* 4 selects the requantization constants of layer `cfg_a`. `cfg_kk` chooses
  the field: 0 the multiplier, 1 the shift, 2 the zero point.

With `cfg_bias` set, `cfg_data` is a 32-bit bias. Otherwise its low 8 bits
are a signed weight.

This port stands in for the path from external DRAM through a memory
controller, which is not part of the RTL.

## Performance of the default instance

At full size, one inference takes **242,707 cycles** from `start` to `done`
in simulation. That is 0.81 ms at 300 MHz. The per-stage breakdown is:

| stage | cycles |
|---|---|
| CCE1 | 98,304 (16,384 loads + 16,384 pixels x 5) |
| CCE2 | 106,496 (2 folds x (4,096 + 4,096 x 12)) |
| CCE3 | 21,504 |
| GCE | 17,419 (1,024 operand beats + 16,394 array cycles + 1 readout) |

The two repacking stages store a complete map before releasing it, so the
layers run largely one after another within an image. Pipelining across
successive images is what the stream chain allows.

## Where this RTL departs from the reference design

* **Example network.** The default shapes are illustrative.
  * There is no ReLU or other activation function, because none is
    specified.
  * Batch normalization is assumed already folded into the weights and
    biases.
* **Cycle constants.** The RTL pipelines differ from the HLS initiation
  intervals and depths quoted in the reference performance model:
  * MCE initiation interval: 1 here, 6 there;
  * convolution overhead per pixel: 4 here, 14 there.

  The structure of the latency formula (folds x (pixels x per-pixel loop +
  row refills)) is kept.
* **Pooling.** Pooling padding is not supported. The stride may not exceed
  the window size.
* **Folding.** Each fold re-reads the full input frame. It is replayed by the
  upstream buffer or repacking stage.
* **Repacking.** The repacking stage stores a whole feature map and does not
  double-buffer. That serializes layers 2 and 3 within one image.
* **Requantization form.** Scales are integer multiplier + shift.
* **GEMM parallelism.** One GEMM array is built. Several arrays working in
  parallel on independent matrix products are not instantiated, because the
  classifier here is a single product.
* **Temporal mode.** The temporal resource-reuse mode is not implemented:
  one CCE/MCE/GCE time-shared across layers, with feature maps in external
  memory.
* **Outside the RTL.** The external memory, memory controller and host are
  outside the RTL.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against an independent model and prints one
`TB_RESULT checks=N failures=M` line. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_cce` | 6x5x3 -> 5 channels, stride 2, 2 PEs (3 folds) against a direct convolution; exact frame cycle count; a second frame with random stalls |
| `tb_line_buffer` | every window of two frames, including padding; head pointer wrap and reset |
| `tb_conv_pe` | random dot products and the 2-cycle latency |
| `tb_weight_bias_buffer` | folded addressing; ignored out-of-range writes |
| `tb_mce` | overlapping 3x3 stride-2 pooling at full rate (cycle count), with stalls, and a bypass frame |
| `tb_requant` | rounding, saturation, zero point; 2,000 random cases against an exact rational reference |
| `tb_gce`, `tb_systolic_array` | tiled GEMM with bias against a reference; cycle counts; array finishing time |
| `tb_stream_fifo`, `tb_fmap_repack`, `tb_input_buffer`, `tb_result_buffer` | ordering, back-pressure, replay, `done` |

The end-to-end tests share `tb/armor_tb_body.svh`. That file holds a
bit-exact reference of the whole network and counts each mechanism: input
stalls, line-buffer wraps, folds, replays, pooled and bypassed outputs, and
GEMM runs. It fails if any count is zero.

* `tb_armor_top` runs a 16x16 image with 4/8/8 channels and 5 classes, for
  two images with different weights.
* `tb_armor_top_full` runs the top with all defaults (128x128, 10 classes):
  one inference, 242,707 cycles.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/armor_pkg.sv tb/tb_cce.sv --top-module tb_cce
./obj_dir/Vtb_cce
```

The full-size test takes about five minutes, mostly C++ compilation.
