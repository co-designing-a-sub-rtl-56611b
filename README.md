# A sparse dataflow accelerator for event-based eye tracking

An event camera watching an eye reports only the pixels whose brightness
changed. Collect those events over a short time slice and you get a frame in
which most pixels are exactly zero: the pupil edge and eyelid light up and the
rest stays empty. A dense CNN spends almost all of its work on those zeros. It
also spreads non-zero values outward with every 3x3 convolution, so the
sparsity does not last beyond the first few layers.

This RTL implements the feature-extraction part of such an eye tracker as a
**sparse dataflow accelerator**. It follows the architecture of "Co-designing a
Sub-millisecond Latency Event-based Eye Tracking System with Submanifold Sparse
CNN". It has two key properties:

* **Submanifold sparse convolution.** A 3x3 convolution produces an output
  only at pixels that are non-zero in its input, and it reads only the
  non-zero neighbours of those pixels. The set of active pixels is therefore
  the same in every layer. Work scales with the number of active pixels, not
  with the frame area.
* **Dataflow with all layers on chip.** Every layer is its own hardware stage
  with its weights held locally. Pixels stream from stage to stage in raster
  order. Every stage works at once, each on a different pixel.

The accelerator turns each frame into one feature vector, the *embedding*.
The rest of the eye tracker runs in software on a host processor: a GRU fuses
the embeddings over time, and a fully connected layer regresses the
normalised pupil centre. That software is not part of this RTL.

## The token-feature stream

Every stage-to-stage link is one valid/ready stream. Each beat carries:

| field        | width       | meaning                                          |
|--------------|-------------|--------------------------------------------------|
| `tok.y`      | 8           | row of the non-zero pixel                        |
| `tok.x`      | 8           | column of the non-zero pixel                     |
| `tok.eof`    | 1           | end of frame; x, y and the feature are ignored   |
| `feat`       | C x int8    | that pixel's feature vector                      |

The types `token_t` and `s8_t` are defined in `see_pkg`. Rules that every
stage relies on:

1. Pixels of a frame appear in raster order: left to right, then top to
   bottom. Each pixel appears at most once.
2. After the last pixel there is exactly one end beat, even when the frame is
   empty.
3. A beat transfers on a rising edge where `valid && ready` is high. Once
   raised, `valid` and the payload stay stable until the transfer.

Submanifold layers keep the pixel set unchanged, so a token leaving a layer is
the same token that entered it. Only the feature changes.

## Datapath

```
 bitmap rows ─┐                                                              embedding
              ├─► tokenizer ─► block 1: stem ─► NUM_MID blocks ─► block N ─► global pool ─►
 features ────┘               (slb + full 3x3,  (C1→C1,          (C1→C2)    (C2 sums + count)
                               C_IN→C1)          residual)

 one block (sparse_conv_block):
   in ─┬─► conv1x1 expand ─► slb ─► dwconv3x3 ─► conv1x1 project ─► (+) ─► out
       │     (×EXP, ReLU)          (ReLU)         (no ReLU)          ▲
       └──────────────── bypass FIFO (residual blocks only) ─────────┘
```

* **`tokenizer`** takes two input streams from the host. The first is a bitmap
  of the frame, one W-bit row per beat. The second holds the feature vectors of
  the set bits only, in raster order. A priority encoder picks the lowest set
  bit of the current row and pairs it with the next feature vector. It clears
  that bit and repeats until the row is empty.
* **`sparse_stem`** is the first block. It is a line buffer followed by a
  full 3x3 convolution (`conv3x3`) that mixes all C_IN input channels into C1
  outputs, like the 3x3 convolution that opens MobileNetV2. The stride is 1
  because the design has no down-sampling.
* **`sparse_conv_block`** is a MobileNetV2-style inverted bottleneck, in the
  structure shown in the architecture's block diagram. The NUM_MID blocks
  after the stem keep C1 channels and add their input back. The last block
  widens to C2 and has no residual path.
* **`global_pool`** adds each channel over all pixels of the frame and counts
  the pixels. At the end beat it presents the sums and the count as the
  embedding. Zeros never arrive, so the sum equals the dense sum. The host
  divides by the frame area to get the average.

Default sizes (parameters of `see_accel`): 80x60 frame, 4 input channels,
C1 = 16, C2 = 32, expansion 4, one residual block, and 4 multipliers per
pointwise or full 3x3 engine.

## The sparse line buffer (`slb`)

This stage is where sparsity and the 3x3 kernel meet, and it is the least
obvious part of the design.

A 3x3 output at pixel (x, y) needs the inputs of rows y-1, y and y+1. Pixels
arrive in raster order, so it can only be computed once the stream has moved
past (x+1, y+1). The line buffer holds three elements:

* **Token FIFO.** Every incoming token is pushed. Its *tail* is the newest
  token and its *head* is the oldest. The output tokens are exactly the input
  tokens, so the head is also the next token to output and the centre of the
  window being read.
* **Three-row feature buffer.** It holds 3 x W feature vectors. The tail's
  feature is written at `[tail.x, tail.y % 3]`. Each of the three row slots
  carries a tag, which is the image row it currently holds, and one occupancy
  bit per column. When a token opens a new row in a slot, that slot's tag is
  replaced and its occupancy bits are cleared. Rows that contain no pixels are
  never written at all. A neighbour counts as present only if its slot's tag
  matches its row and its occupancy bit is set.
* **Control.** Two rules link the head and the tail:
  * *Release.* The head's window is complete once the newest known token lies
    beyond (head.x+1, head.y+1) in raster order. The newest known token is the
    last one written, or the one waiting at the input. The window is also
    complete once the end token has arrived.
  * *Hold.* An input token whose row is more than head.y+1 waits at the input,
    because writing it would overwrite row head.y-1, which the head still
    needs. The token waiting at the input still counts for the release rule,
    so this cannot deadlock.

When the head is released, a 9-bit mask of its present neighbours is formed.
The buffer then streams one beat per present neighbour, in ascending kernel
offset. Each beat carries the head's token, the **kernel offset** (0..8,
row-major, 4 = centre) and the neighbour's feature, and the last beat is
flagged. Absent neighbours cost nothing. A pixel with one active neighbour
takes two beats, and an isolated pixel takes one. After the last beat the head
is popped. The end token leaves as a single beat and invalidates all row tags
for the next frame.

Throughput: a window costs its neighbour count plus one cycle. At the start of
each image row, the head waits up to three cycles while the tail fills the row
below it. The token FIFO is 2W+4 deep, which is more than the tokens that can
lie between head and tail under the hold rule.

## Compute engines and integer arithmetic

All arithmetic is integer. Weights and activations are int8, products are
summed into 32-bit accumulators, and each layer rescales with a dyadic
factor:

    q = saturate_int8( (acc * S + 2^(n-1)) >> n )      (ReLU: negatives -> 0)

Here S is a 16-bit unsigned multiplier and n a 5-bit shift, one pair per layer
(`requant`). The multiply-and-shift form replaces a real-valued rescale. The
rounding, the saturation and the per-layer (not per-channel) scale are choices
made here.

* **`conv1x1`** (pointwise). A token register and a feature buffer hold the
  pixel. For each output channel in turn, PI multipliers take PI input
  channels per cycle into an adder tree, and an accumulator sums the groups.
  A pixel occupies the engine for `1 + COUT*CIN/PI` cycles. The next pixel
  can start while the previous result waits in the output register.
* **`dwconv3x3`** (depthwise). The kernel offset of each beat selects one of
  nine weight sets. C lanes, one per channel, multiply and accumulate in
  parallel. On the window's last beat the sums are requantized and output.
  The engine takes one beat per cycle.
* **`conv3x3`** (full 3x3, used in the stem). It combines the two engines
  above: the beat's kernel offset selects the weight matrix, and a PI-wide
  multiplier row walks all output channels for that neighbour. A per-channel
  accumulator sums across the window's beats. A beat costs
  `1 + COUT*CIN/PI` cycles, so a pixel with n neighbours costs n times that.
* **Residual add.** The bypass FIFO holds each block input. The adder pairs
  each projection output with the FIFO head, and an assertion checks that
  their tokens match. The pair is added with int8 saturation, and both
  operands are taken to share one scale. The FIFO is 2W+8 deep, enough for
  every token the block can hold in flight.

## Configuration

Weights live in on-chip memories written through one byte-wide bus.
`cfg_layer = 0` selects the stem. `cfg_layer = 1 + 3*b + l` selects layer
`l` of bottleneck block `b`, where l = 0 is the expansion, 1 the depthwise
layer and 2 the projection. Blocks 0 to NUM_MID-1 are the residual blocks and
block NUM_MID is the last one. The addresses within a layer are:

| layer      | weight address | scale low / high / shift     |
|------------|----------------|------------------------------|
| pointwise  | `o*CIN + i`    | `CIN*COUT` + 0 / 1 / 2       |
| depthwise  | `c*9 + k`      | `9*C` + 0 / 1 / 2            |
| full 3x3   | `(k*COUT + o)*CIN + i` | `9*COUT*CIN` + 0 / 1 / 2 |

Load every layer after reset and before the first frame. The scales reset to
S = 1, n = 0. Weights have no reset value.

## Performance

The pointwise engines dominate. With the defaults, the last block's
projection (64 -> 32 channels, PI = 4) needs 513 cycles per pixel, and every
other stage is faster. The stem needs 17 cycles per present neighbour, so at
most 153 per pixel. Because all stages overlap, a frame costs about 513 cycles
per active pixel plus a fill time of a few rows. A simulated default-size
frame with 244 active pixels (about 5 %) took 130,665 cycles from its first
bitmap row to its embedding. The pointwise engines are the
place to add parallelism: raise PI, or give each layer its own PI, to balance
the stages. No clock frequency is specified for this RTL.

## How this relates to the published design

Taken from the published architecture:

* the token-feature streaming between stages, with the [x, y, end] token;
* the tokenizer fed by a bitmap and a feature stream;
* the inverted-bottleneck block: conv 1x1, line buffer, depthwise 3x3,
  conv 1x1, and the bypass FIFO with an adder;
* conv 3x3 as one of the dataflow layer types;
* the line buffer's token FIFO, head/tail control, `[tail.x, tail.y%3]`
  addressing and kernel-offset stream;
* the offset-indexed depthwise weight sets;
* global pooling at the end;
* int8 weights and activations with multiply-and-shift requantization.

Choices made here, where the source is silent:

* the handshake, the end-of-frame beat and the 8-bit coordinates;
* the row-per-beat bitmap format;
* the release and hold rules and the row tags of the line buffer;
* PI = 4, one pointwise output channel at a time, and full channel
  parallelism in the depthwise engine;
* rounding and saturation, ReLU after the expansion and depthwise layers, no
  bias terms, and a residual add at a shared scale;
* the pooling output as sums plus a count;
* a full 3x3 stem as the first block, whose insides the source does not show;
* the frame size, the channel counts, the expansion and the number of blocks.

Two departures matter:

* **Weights are loadable.** The published design fixes the trained weights in
  on-chip memory at build time. Here a configuration bus writes them, so one
  netlist serves any model of the same shape.
* **The network shape is an example.** The published models (SEE-A to SEE-D,
  178K to 465K parameters counting the host-side GRU and FC) come out of a
  model search and are not given layer by layer. The default chain here holds
  6,848 int8 weights. A real model needs its own block count and widths.

Not provided: stride-2 or pooling layers inside the backbone, the GRU and
fully connected layers, and the DMA and bus infrastructure around the
accelerator. The top-level streams are plain
valid/ready ports, ready to be bridged to an AXI-Stream DMA.

## Files

| file                        | content                                                    |
|-----------------------------|------------------------------------------------------------|
| `rtl/see_pkg.sv`            | token and feature types, configuration offsets             |
| `rtl/requant.sv`            | dyadic requantizer                                         |
| `rtl/tokenizer.sv`          | bitmap + features -> token-feature stream                  |
| `rtl/conv1x1.sv`            | pointwise engine                                           |
| `rtl/slb.sv`                | sparse line buffer                                         |
| `rtl/dwconv3x3.sv`          | depthwise engine                                           |
| `rtl/conv3x3.sv`            | full 3x3 engine                                            |
| `rtl/sparse_stem.sv`        | first block: line buffer + full 3x3                        |
| `rtl/sync_fifo.sv`          | FIFO used for the residual bypass                          |
| `rtl/sparse_conv_block.sv`  | inverted-bottleneck block                                  |
| `rtl/global_pool.sv`        | frame pooling -> embedding                                 |
| `rtl/see_accel.sv`          | top level                                                  |
| `tb/see_ref_pkg.sv`         | frame-level integer reference model used by the testbenches|
| `tb/tb_*.sv`                | one self-checking testbench per module                     |
| `tb/see_accel_tb_body.svh`  | shared body of the two end-to-end testbenches              |

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops by itself, and each has a watchdog
that fails the run if it hangs. With Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/see_pkg.sv tb/see_ref_pkg.sv tb/tb_see_accel.sv --top-module tb_see_accel
    obj_dir/Vtb_see_accel

Replace `tb_see_accel` with any other testbench name. The testbenches do the
following:

* `tb_see_accel` runs the whole accelerator at a reduced size (12x8 frame,
  4/8 channels, expansion 2) over four frames: dense, stalled output, empty
  and sparse.
  It compares each embedding with the reference model. It also confirms that
  each of these occurred: line-buffer holds, windows with missing
  neighbours, residual adds, back-pressure into the tokenizer, embedding
  stalls and an empty frame.
* `tb_see_accel_full` runs the same flow at the default parameters, on one
  sparse 80x60 frame and one empty frame. It takes about ten seconds.
* The block testbenches check each stage bit-exactly against independent
  integer arithmetic, with random stalls. Where a rate is defined they also
  check cycle counts: the tokenizer frame cost, the pointwise
  `1 + COUT*CIN/PI` interval, the full 3x3 per-beat cost, one depthwise beat
  per cycle, and the line buffer's window cost.

To change the network, change the parameters of `see_accel`, or chain
`sparse_stem` and `sparse_conv_block` instances differently. Then load
matching weights over the configuration bus.
