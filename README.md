# A streaming YOLOv5 accelerator: every layer in its own piece of hardware

This is synthesizable SystemVerilog for a *streaming* (dataflow) object-detection accelerator in
the style of SATAY ("A Streaming Architecture Toolflow for Accelerating YOLO Models on FPGA
Devices", Montgomerie-Corcoran, Toupas, Yu and Bouganis). The RTL here is an independent
reconstruction from the published description. It is not the authors' code.

The idea is simple. Most CNN accelerators build one compute engine and run the layers through it
one after another, loading weights and feature maps from DRAM each time. Here every layer of the
network gets its own block on the chip instead:

- All the blocks run at the same time. Each works on a different part of the same image.
- The image enters as a stream of 16-bit words, one pixel channel per word.
- It flows through the chain of layers and leaves as three streams of detection-head outputs.
- All weights sit in on-chip memories, so inference itself reads no weights from DRAM.
- Feature maps are never stored whole. A 3x3 layer only keeps the rows its window needs.

What remains hard are the long skip connections of YOLO. A feature map computed early in the
network is needed again much later. It must wait in a buffer while the rest of the network
catches up. Most such buffers stay on chip. The two largest leave the chip through a pair of
stream ports, so that a buffer in DRAM can close the loop.

## Streams, words and numbers

Every connection between blocks is a ready/valid stream. A word moves on a rising clock edge
when `valid` and `ready` are both high. A block may hold `ready` low for any time; this is how
back-pressure travels up the pipeline.

- **Order.** Feature maps travel in NHWC order: for each row, for each column, all channels of
  that pixel, channel index fastest.
- **Activations** are 16-bit signed fixed point with 8 fractional bits (Q8.8). The 16-bit width
  matches the W8A16 precision of the original work; the split into 8.8 is this design's choice.
- **Weights** are 8-bit signed integers.
- **Reset** is synchronous and active low (`rst_n`).
- **Package.** Shared constants, the activation enum (`act_e`) and the saturating helper
  (`sat_act`) are in `satay_pkg`.

## The window generator (`sliding_window`)

Convolution and max pooling both start with a window generator. It is the most intricate
block, and every spatial layer depends on it.

The input is an NHWC stream. The output is one K x K window per (output position, channel),
as a packed array `out_win[i*K+j]`: row `i = 0` is the oldest row and column `j = 0` the
leftmost.

- **Padded frame.** The block walks the *zero-padded* frame, with counters row `r`, column `c`
  and channel `ch` over (H+2·PAD) x (W+2·PAD) x C.
  - At a padding position it inserts the constant `PADVAL` and takes no input word. Conv uses
    0; max pooling uses -32768.
  - Otherwise it takes one input word.
- **Line buffers.** K-1 line buffers, each one padded row of `WP·C` words, hold the previous
  rows. Reading all of them at address `(c, ch)` gives the vertical column of K words through
  the current position. The oldest row is then dropped and the new word stored. This is the
  "(K-1)·W·C words" of storage that makes streaming convolution cheap.
- **Column registers.** Channels are interleaved, so the column seen at channel `ch` is needed
  again only at the same channel of the next pixel, C steps later. The K-1 window column
  registers are therefore C entries deep, indexed by `ch`.
- **Emission.** A window is emitted when both `r` and `c` are at least K-1 and the position lies
  on the stride grid (`(r-K+1) % STRIDE == 0`, same for `c`).
- **Rate.** One step per cycle. A step that emits a window waits only if the output register is
  still full. The block therefore needs (H+2P)(W+2P)C cycles per frame, whatever the stride.

## Convolution engine (`conv`)

`conv` = window generator + matrix-vector engine + accumulators + output buffer.

- **One window, F/PF cycles.** The engine latches a window of one input channel and keeps it
  for F/PF cycles.
  - In each cycle PF filters are evaluated. Each is a K·K-term dot product of the window with
    that filter's weights for that channel.
  - This uses K·K·PF multipliers, which is the resource model of the original work (K²·p DSPs).
- **Accumulation.** One accumulator per filter sums the partial results over the C input
  channels. The first channel of a position overwrites it.
- **Output.** During the last channel, each finished filter group is shifted right by `SHIFT`
  (default 7), saturated to 16 bits and written into an F-word output buffer. The buffer then
  streams out the F results of the pixel.
- **Timing.** A position costs C·F/PF cycles. A layer costs H_out·W_out·C·F/PF cycles, matching
  the latency model `l = H·W·C·F / p` of the original work. `tb_conv` checks this.
  - Stride-2 layers are bound by the window generator's walk of the input (see above).
  - A layer with a single input channel (C = 1) waits for the output buffer to drain between
    pixels.
- **Weights** live in `wmem[F][C][K*K]` and are loaded through the weight port:

  | signal      | width | meaning                                              |
  |-------------|-------|------------------------------------------------------|
  | `wt_we`     | 1     | write strobe                                         |
  | `wt_layer`  | 8     | layer id; only the conv whose `LAYER_ID` matches writes |
  | `wt_addr`   | 24    | `((f*C + c)*K + i)*K + j`                            |
  | `wt_data`   | 8     | signed weight                                        |

  Addresses past the end of a layer's memory are ignored. Batch normalisation is assumed to be
  folded into the weights. There is no bias term, and the quantisation zero point is assumed to
  be folded into the signed weights.

**Parallelism.** The original work shows the parallel engines working on different *input*
channels, with partial sums crossing between accumulators. This RTL parallelises over *filters*
instead (parameter `PF`). It gives the same resource and latency arithmetic while keeping one
word per beat on every stream. The other blocks have parallelism 1.

## The other layer blocks

| module        | what it does | timing |
|---------------|--------------|--------|
| `maxpool`     | window generator (pad value -32768), then a balanced comparator tree over K·K elements | 1 result per window, registered |
| `resize`      | 2x nearest-neighbour upsampling, on the fly | 4 output words per input word |
| `hardswish`   | `x·RELU6(x+3)/6` as ADD 3 → CLIP → DIV 6 → multiply by x; DIV 6 is a multiply by round(2¹⁶/6) and a 16-bit shift (two multipliers) | 1/cycle, 1 cycle latency |
| `leaky_relu`  | `x > 0 ? x : ALPHA·x`, with ALPHA = 26/256 ≈ 0.1 | 1/cycle, 1 cycle latency |
| `add`         | element-wise sum of two streams, saturating | 1/cycle, 1 cycle latency |
| `split`       | a demultiplexer sends the first C/N channels of each pixel to output 0, the next to output 1, ...; each output has a FIFO | 1/cycle |
| `concat`      | input FIFOs, then a multiplexer: C words of input 0, then C of input 1, ... per pixel | 1/cycle |
| `stream_fork` | copies one stream to N consumers; a per-consumer "taken" flag lets them accept in different cycles | no storage |
| `stream_fifo` | circular-buffer FIFO with first-word fall-through; an assertion checks that an offered word is held until taken | 1/cycle |

How `resize` works:

- While an input row arrives, each pixel's C words pass straight through. They are also written
  into a W·C-word line buffer.
- The same C words are then replayed from the buffer as the second copy of the pixel.
- Once the row is complete, the whole doubled row is replayed from the buffer while the input
  waits.

HardSwish replaces YOLOv5's SiLU, as in the original work, because it needs no exponential.

## Composite blocks

- **`cbs`.** A conv with "same" padding (K/2) followed by an activation. The activation is set
  by `ACT`: `ACT_HARDSWISH` (default), `ACT_LEAKY` (YOLOv3-style) or `ACT_NONE`.
- **`bottleneck`.**
  - The input is forked. One copy goes through CBS 1x1 and then CBS 3x3. The other waits in a
    FIFO. An `add` merges them.
  - With `SHORTCUT=0` (the neck C3 blocks) only the two CBS remain.
  - Layer ids: `LAYER_ID`, `LAYER_ID+1`.
- **`c3`.**
  - A `split` chunks the input channels into two halves.
  - Half A: CBS 1x1 → FIFO.
  - Half B: CBS 1x1 → N bottlenecks → CBS 1x1.
  - A `concat` joins them, A first. The output has C_OUT channels.
  - Layer ids: A, B, two per bottleneck, the final CBS (3+2N ids).
- **`sppf`.**
  - A plain 1x1 conv halves the channels.
  - Three 5x5 stride-1 max poolings are chained. Each output is forked to the next pooling and,
    through a FIFO, to a 4-input concat: conv output, pool 1, pool 2, pool 3.
  - A plain 1x1 conv restores C channels.
  - Layer ids: `LAYER_ID`, `LAYER_ID+1`.

## The network (`satay_yolov5_top`)

The top wires the YOLOv5 graph. Widths derive from `CW`: C1..C5 = CW, 2CW, 4CW, 8CW, 16CW.
Spatial sizes derive from `IMG`: S1..S5 = IMG/2 .. IMG/32.

```
image IMGxIMGx3
 L0  CBS 3x3 s2 -> C1        L1 CBS 3x3 s2 -> C2        L2 C3 (N2)
 L3  CBS 3x3 s2 -> C3W       L4 C3 (N4)  ==> P3 (on-chip FIFO)
 L5  CBS 3x3 s2 -> C4        L6 C3 (N6)  ==> P4 (on-chip FIFO)
 L7  CBS 3x3 s2 -> C5        L8 C3 (N8)   L9 SPPF
 L10 CBS 1x1 -> C4  ==> A (off chip: im_out[0] ... im_in[0])
 L11 resize  L12 concat(up, P4)  L13 C3 no-shortcut -> C4
 L14 CBS 1x1 -> C3W ==> B (off chip: im_out[1] ... im_in[1])
 L15 resize  L16 concat(up, P3)  L17 C3 -> C3W  -> head 0 (1x1 conv, S3xS3)
 L18 CBS 3x3 s2  L19 concat(L18, B)  L20 C3 -> C4  -> head 1 (S4xS4)
 L21 CBS 3x3 s2  L22 concat(L21, A)  L23 C3 -> C5  -> head 2 (S5xS5)
```

The defaults build YOLOv5n at 640x640: `IMG=640`, `CW=16`, bottlenecks `N2,N4,N6,N8 = 1,2,3,1`,
`NH=1`, and `N_OUT_HEAD=255` (3 anchors x 85). That is 60 convolution layers with 1,613,552 weights.
Layer ids are handed out in the order above, and a C3 takes 3+2N of them. `ID_*` localparams in
the top give the exact numbers; the end-to-end testbench repeats the same list.

Ports:

- `in_*`: the image stream.
- `wt_*`: weight loading.
- `head_valid/ready/data[2:0]`: the three detection maps, NHWC.
- `im_out_*[1:0]` and `im_in_*[1:0]`: the two diverted skip connections.
  - Whatever leaves on `im_out[k]` must come back, in order, on `im_in[k]`.
  - Connection 0 is A (S5·S5·C4 words per image); connection 1 is B (S4·S4·C3W words).
  - In the original system this is a "software FIFO": two DMAs and a loop on the host processor
    move chunks of 256 words through DRAM. A chunk is sent back only after it has been fully
    received.
  - `tb/sw_fifo_model.sv` models exactly that behaviour. Any FIFO deep enough can be attached
    instead.

The first layer is a 3x3 stride-2 CBS, where released YOLOv5 uses a 6x6 kernel. The head
convolutions have no activation, and no box decoding is done on chip.

## Buffer sizing, and why the pipeline cannot deadlock

Deadlock is the main risk of a streaming design with skip connections:

- Wherever a stream is forked and later merged, the short branch must buffer everything the
  long branch holds back.
- Otherwise the fork stalls, the long branch starves, and the pipeline stops.

The original work sizes each such buffer from simulated occupancy. This RTL uses a bound that
needs no simulation: every skip buffer holds a whole feature map. This covers:

- the bottleneck shortcut FIFO, the C3 branch-A FIFO and the SPPF FIFOs, including the SPPF
  concat's own input FIFOs;
- the P3/P4 FIFOs in the top.

A full-map buffer can never fill before the merge starts consuming, so no fork can block. It
costs memory: 3,379,200 words on chip at the defaults. Shrink the `DEPTH` expressions to measured
occupancies to recover it.

The concat and split FIFOs that sit behind such a buffer only absorb the channel interleaving
(2·C words). The two off-chip connections rely on the external buffer being deep enough for a
whole map.

## What follows the original work and what is this design's own

**Taken from the original work:**

- the block set and their structure: line-buffer window generators, the K x K multiplier array
  with accumulation, the comparator tree, resize by line buffer and MUX, FIFO + MUX concat,
  DEMUX + FIFO split, HardSwish as ADD 3 / CLIP / DIV 6 / multiply, Leaky ReLU as constant
  multiply + MUX;
- ready/valid streams, NHWC order, weights kept on chip;
- the YOLOv5 block graph with the FIFOs and the two off-chip skip connections as drawn;
- 16-bit activations and 8-bit weights;
- the latency and multiplier-count models the conv engine meets.

**This design's own choices:**

- Q8.8 format, shift-and-saturate requantisation, no bias;
- the weight-loading port;
- padding and stride handling in the window generator;
- filter-wise (not input-wise) parallelism, and only in convolutions;
- the exact sequencing of resize, with a factor fixed at 2;
- equal channel counts on every concat/split input;
- whole-map skip buffers;
- YOLOv5n widths, depths, kernel sizes and the 3x3 first layer. These come from the YOLOv5
  model itself, not from the accelerator description.

The block diagrams of the original work label CBS as Conv + SiLU, while its text replaces SiLU by
HardSwish in hardware; HardSwish is what is built here.

**Not built:**

- the design-space exploration (it chooses the parallelism factors and which buffers go off chip;
  here `PF` and buffer placement are parameters and wiring);
- the DMA engines, DRAM and host software;
- YOLOv3-tiny and YOLOv8 top levels. Their building blocks exist except YOLOv8's C2f and
  decoupled head.

## Simulating

Each block has a self-checking testbench in `tb/`, which prints
`TB_RESULT checks=N failures=M`. The testbenches:

- compute their expected output independently, with integer reference models of every layer in
  `tb/satay_ref_pkg.sv`. These are direct convolution sums and formula-based activations, with
  weights from the same hash function `wgen(layer, index)` that the testbench loads into the
  hardware;
- stream the input twice: once with random gaps and random output back-pressure, once at full
  rate;
- check cycle counts against the latency models.

Build and run one with plain Verilator, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/satay_pkg.sv tb/satay_ref_pkg.sv tb/tb_conv.sv --top-module tb_conv -o sim
./obj_dir/sim
```

`tb_satay_yolov5_top` runs the whole network end to end on a 32x32 image. It uses `CW=4`, one
bottleneck per C3 and 6 head channels, with the two off-chip connections closed by
`sw_fifo_model` (chunks of 8 words).

- All three heads are compared word by word with the reference network.
- The test counts input stalls, head back-pressure, P3/P4 occupancy, words and chunks through
  both off-chip buffers, and resize replays. Each must occur at least once.
- It also compares every word sent off chip with the reference tensors.
- It takes about 40,000 cycles per image and under a minute to build and run.

`tb_workload_yolov5n` runs the YOLOv5n network itself on a 64x64 image, with every width and depth
at its real value: base width 16, C3 depths 1/2/3/1, 255 head channels, all 60 convolution layers
and 1.9 M weights loaded through the weight port. It makes the same checks as the small test
(44,386 in all) and uses chunks of 64 words off chip. One image takes about 2.56 M cycles, and the
run takes about two minutes in Verilator. That frame time is the latency of one image on its own.
The three heads finish one after another, because head 1 and head 2 depend on data that head 0
throttles through the fork after layer 17.

This is the largest size simulated. Only the spatial size differs from the default 640x640, which
needs over 10⁸ cycles per frame with parallelism 1, far beyond a practical Verilator run. The
defaults are checked by lint and elaboration only.
