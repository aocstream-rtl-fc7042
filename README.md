# Stream-based line-buffer CNN accelerator (AoCStream-style) in SystemVerilog

A conventional CNN accelerator runs a network layer by layer and keeps a
whole feature map between layers, so its activation memory grows with the
square of the image size and usually ends up in DRAM. This design follows
the opposite approach of the AoCStream architecture (H.-J. Kang, "AoCStream:
All-on-Chip CNN Accelerator With Stream-Based Line-Buffer Architecture"):

* every layer of the network gets its own hardware block;
* the blocks are chained, and activations *stream* from one block to the
  next in row-major order, so all layers work at the same time;
* a block with a KxK kernel stores only the last K-1 rows of its input
  (a line buffer), so activation storage grows only linearly with the image
  width;
* every input window is used for all the computation it takes part in as
  soon as it is complete (the dataflow reuses inputs, never weights), which
  is what keeps the buffer at K-1 lines instead of K or K+1;
* because weights are never reused across windows they must all sit on chip;
  accelerator-aware pruning (6 of every 8 weights along the channel axis
  are zero) shrinks them enough for that.

The RTL here provides the layer blocks of that architecture (convolution,
depth-wise convolution, pooling), the pruned processing element, and a top
level that chains four of them into the start of a MobileNetV1-style
network running on a 512 x 512 image. The complete object-detection network
evaluated with the architecture (MobileNetV1 + SSDLiteX, about 270 layers)
is not reproduced: its layer list is not published alongside the
architecture. The blocks are parameterised so that such a network could be
assembled from them.

## Streams, groups and intervals

All blocks talk through the same kind of stream: a `valid` bit and a
packed array of 8-bit signed activations. There is no back-pressure. A
pixel with N channels is sent as G = N/N_i *groups* of N_i channels
(channel g*N_i + c in element c of group g), groups of one pixel back to
back, pixels in row-major order. A block promises that its groups are at
least I cycles apart and relies on its input doing the same:

| symbol | meaning |
|---|---|
| N, M | input / output channels of a layer |
| N_I, G_I = N/N_I, I_I | input group size, groups per pixel, minimum cycles between input groups |
| M_O, G_O = M/M_O, I_O | output group size, groups per position, cycles between output groups |
| M_I = M/I_I | number of PEs of a convolution block |
| K, S | kernel size, stride |

A block keeps up with its input when, per output position,
G_I * I_I * S >= G_O * I_O holds for positions inside one row (the stride
spaces output positions S input pixels apart); the convolution blocks
refuse to elaborate otherwise. Every block checks the input
spacing with an assertion, and every output unit raises a sticky `overflow`
flag if a position is finished before the previous one has left.

## The convolution block and its dataflow

`conv_block` is the heart of the design and the part that needs most care.

```
in groups --> line_buffer --window--> s0: weight read (I_I cycles)
                                      s1: M_I x sparse_pe, acc/bias read
                                      s2: add, write acc_buffer  or  requant -> output_unit --> out groups
```

1. **Line buffer.** `line_buffer` holds K-1 row memories of W*G_I words
   (one word = one group of N_i activations), addressed by x*G_I + g. When
   group g of pixel (y, x) arrives, the K-1 values stored at its address
   plus the new group form the newest column of the window; the rows move
   up by one at the same address. The K-1 older columns of every group are
   kept in a small register file (K x (K-1) x N_i per group). The window
   of output position (Y, X) = (y-K+1, x-K+1), the full KxKxN_i block of
   input data that group g contributes to that position, is ready two
   cycles after the group arrived. For stride S only windows with Y and X
   divisible by S are emitted. There is no padding: a W-wide input gives
   (W-K)/S+1 output columns.

2. **Partial sums over I_I cycles.** During the I_I cycles that follow a
   window, the M_I = M/I_I PEs compute every partial sum that window
   contributes: in cycle t, PE p works on output channel m = t*M_I + p
   and reads its weights from word g*I_I + t of the weight buffer. So one
   group is consumed per I_I cycles and each weight is read once per window.

3. **Pruned PE.** `sparse_pe` has K*K*N_i*KEEP/BLK multipliers (with
   BLK = 8, KEEP = 2: K*K*N_i/4, the 75 % pruning ratio). The channels of
   each kernel tap are split into blocks of 8; for each block two weights
   are stored together with their 3-bit position in the block, and that
   position selects the multiplier's activation. An adder tree sums the
   products; the result is registered. Dense layers use BLK = KEEP = 1.

4. **Accumulation.** `acc_buffer` holds the M running sums of the current
   output position (I_I words of M_I sums). Group 0 starts from the bias
   instead of the buffer; groups 1..G_I-2 add into it; the last group sends
   its sums through `requant()` (arithmetic shift by SHIFT, optional ReLU,
   saturation to 8 bits) into the output unit instead of back.

5. **Output unit.** `output_unit` collects the M results of a position and
   sends them as G_O groups of M_O channels, channel 0 first, I_O cycles
   apart. It has two banks: the last groups of position X-1 are still
   leaving while the PEs produce position X.

The window is copied along the pipeline, so the next window can start the
cycle after the previous one's I_I cycles end. The first output group of a
position leaves I_I + 5 cycles after the last input group of that position
arrived (2 cycles line buffer, I_I cycles of weight reads, PE, accumulate,
output register).

## Depth-wise and pooling blocks

`dw_block` has the same line buffer and stream interface. A depth-wise
output depends on one channel only, so there is no accumulation across
groups. It has P single-MAC PEs (`dw_pe`, P >= K*K*N_i/I_i): PE p works on
channel g*N_i + b*P + p for the batches b = 0..N_i/P-1, one kernel tap per
cycle, starting from the bias. A group therefore takes (N_i/P)*K*K cycles,
which must not exceed I_I (checked at elaboration). Finished batches go
through `requant()` into an output unit.

`pool_block` is a line buffer followed by a channel-wise maximum over the
KxK window; its output keeps the grouping and timing of its input. The
architecture gives pooling blocks a line buffer but nothing more; max
pooling is this implementation's choice.

## The top level

`aocstream_top` chains four blocks, the first three being the first three
layers of MobileNetV1 (without padding) at the pruning ratio of the
architecture:

| layer | block | operation | PEs | output map (512 input) | out group / interval |
|---|---|---|---|---|---|
| L0 | conv_block | 3x3 stride 2, 3 -> 32, dense, shift 8 | 2 x 27 mult. | 255 x 255 x 32 | 16 ch / 16 cyc |
| L1 | dw_block | 3x3 depth-wise, 32 ch, shift 7 | 16 MAC | 253 x 253 x 32 | 8 / 8 |
| L2 | conv_block | 1x1, 32 -> 64, 2 of 8 kept, shift 6 | 8 x 2 mult. | 253 x 253 x 64 | 8 / 4 |
| L3 | pool_block | 2x2 max, stride 2 | - | 126 x 126 x 64 | 8 / 4 |

The image enters as one 3-channel pixel every 16 cycles. That rate equals
the throughput reported for the full network on a 512 x 512 image
(89.3 frames/s at 375 MHz, about 4.2 M cycles per frame), and each layer's
group sizes and intervals were chosen so the pipeline keeps up with it.
All ReLUs are on. The total line storage is 35,584 bytes (L0 3,072,
L1 16,320, L3 16,192; a 1x1 layer needs none); a frame buffer for the same
layers would need 4 MB.

### Loading weights

Each weighted layer has a weight memory and a bias memory with their own
write ports (`lN_w_*`, `lN_b_*` on the top). Load them before streaming.

* conv_block weight word `g*I_I + t` holds, for PE p at bits
  `[p*PEW +: PEW]`, entries `e = (tap*NB + b)*KEEP + k` (tap = i*K + j,
  NB = N_i/BLK) of `ENTW = 8 + clog2(BLK)` bits, each `{index, weight}`,
  for output channel `m = t*M_I + p` and input channel
  `g*N_i + b*BLK + index`. Bias word t holds the biases of channels
  `t*M_I + p` (16 bits each).
* dw_block weight word `(g*B + b)*K*K + tap` holds the P weights of
  channels `g*N_i + b*P + p` (B = N_i/P); bias word `g*B + b` their biases.

`tb/tb_aocstream_top.sv` shows the packing for all three layers.

## What follows the architecture and what is this design's own

Taken from the architecture description: one block per layer running
concurrently; the (K-1)-line buffer sized (K-1) x W x N; row-major streaming
in groups of N_i channels at interval I_i; output position
(Y, X) = (y-K+1, x-K+1); M/I_i PEs per convolution block, each with
K*K*N_i*(1-r) multipliers and an adder tree; the accumulation buffer of
size M; the output unit streaming G_o groups of M_o at interval I_o, channel
0 first; single-MAC depth-wise PEs with at least K*K*N_i/I_i of them; 75 %
pruning as 6 of every 8 weights along the channel axis; all weights on chip.

Choices made here where the description is silent: 8-bit activations and
weights (the original uses 8-10 bits), 16-bit biases, 32-bit sums; the
shift/ReLU/saturate requantisation; no padding; how stride is applied; the
column-register window former; the {index, weight} storage of pruned
weights and the multiplexer in front of each multiplier; the channel-to-cycle
mapping of the PEs; bias added at the first group; the two-bank output unit
and overflow flag; valid-only streams; the pipeline depths; load ports for
the weights; the depth-wise tap schedule; max pooling; the layer chain and
all per-layer sizes and intervals of the top; asynchronous active-low reset
of control state (memories are not reset).

Not built: the complete detection network and its SSDLiteX heads, and the
FPGA memory primitives (memories are plain arrays that synthesis tools map
to block RAM).

## Verification

Every module has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench (for the layer blocks, the
convolution sums written straight from the equations), checks the stream
intervals and latencies, and prints `TB_RESULT checks=N failures=F`:

| testbench | what it covers |
|---|---|
| tb_line_buffer | 2 frames, stride 1 and 2, full-rate and gapped input, every window value, 2-cycle latency |
| tb_weight_buffer, tb_acc_buffer | read latency, hold, write-first bypass |
| tb_sparse_pe | random windows and random 2-of-8 index patterns against a dense reference |
| tb_dw_pe | MAC sequences with bias |
| tb_output_unit | group order, exact I_O spacing, both banks, forced overflow |
| tb_conv_block | 3x3 conv 16 -> 8 with 2-of-8 pruning, 2 groups, full input rate, no ReLU (negative and saturated values) |
| tb_conv_block_s2 | the same with stride 2 and 1-of-8 (87.5 %) pruning |
| tb_dw_block_s2 | the depth-wise test with stride 2 |
| tb_dw_block | 3x3 depth-wise, 2 groups x 2 batches, schedule exactly filling I_I |
| tb_pool_block | 2x2/2 max pool with odd sizes and gapped input |
| tb_aocstream_top | whole pipeline on three back-to-back 17 x 17 images, with counters for stride skipping, accumulation, sparse indices, bank switching, depth-wise groups and pooling |
| tb_aocstream_full | the same at the default size: a full 512 x 512 image, about 1.14 M checked values, 4,194,382 cycles for the image |

Run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv rtl/aoc_pkg.sv tb/tb_conv_block.sv \
    --top-module tb_conv_block -Mdir obj -o sim
./obj/sim
```

The full-size test builds and runs in well under a minute.

## Changing the design

* A layer block is configured entirely through its parameters; the top just
  instantiates them. Keep N divisible by N_I, M by I_I and by M_O, N_I by
  BLK (conv) or by P (depth-wise), and respect the rate rule above for the
  stream between two blocks.
* The image size is `IMG_W`/`IMG_H` of the top; the layer map sizes follow
  from it.
* A different pruning ratio is `KEEP` out of `BLK` (for example 1 of 8 for
  87.5 %).
* Widths of activations, weights, biases and sums, and the requantisation
  function, are in `rtl/aoc_pkg.sv`.
