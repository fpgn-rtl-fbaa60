# FPGN-6 in SystemVerilog: a LUT-native streaming CNN

An FPGA is built from small lookup tables (LUTs). A 6-input LUT can hold any
Boolean function of six bits. FPGN treats every LUT as a neuron. The network is
trained so that each neuron's learned function *is* the LUT's contents. So the
network's LUTs do not compute multiply-accumulates; they are the network.
Nothing is fetched from memory and no DSP or block RAM is used. A whole image
streams through a fixed pipeline of LUTs, adders, comparators and registers.

This RTL implements that architecture for the FPGN-6 topology at width
multiplier 8 (the "G" size). This is the network described in *FPGN: Redefining
Ultra-Fast Programmable Gate-based Neural Acceleration with Differentiable LUTs*.
It classifies 32×32 RGB images (CIFAR-10 or SVHN) into ten classes. The trained
LUT contents and thresholds are not public, so the RTL computes deterministic
pseudo-random stand-ins. Everything else is the real structure. Section 7 shows
how to load trained values.

## 1. The network as built

| Stage | What it is | Map in → out | Channels in → out | LUT-neurons |
|---|---|---|---|---|
| Aggregation | one LUT-tree per output channel over one colour's 8 bits (1×1 kernel) | 32×32 | 3×8 bits → 3×40 | 120 trees of 3 LUTs |
| Conv 1 | 3×3, stride 2, starts block 1 | 32 → 16 | 120 → 128 | 128 × 180 |
| Conv 2 | 3×3, stride 1, + identity of conv 1 | 16 → 16 | 128 → 128 | 128 × 192 |
| Conv 3 | 3×3, stride 2, starts block 2 | 16 → 8 | 128 → 256 | 256 × 192 |
| Conv 4 | 3×3, stride 1, + identity of conv 3 | 8 → 8 | 256 → 256 | 256 × 384 |
| Conv 5 | 3×3, stride 2, starts block 3 | 8 → 4 | 256 → 512 | 512 × 384 |
| Conv 6 | 3×3, stride 1, + identity of conv 5 | 4 → 4 | 512 → 512 | 512 × 768 |
| Flatten | 4×4×512 map gathered in order | | 8192 bits | |
| FC 1, FC 2 | one LUT-vector each | | 8192 → 2000 → 2000 | 2 × 2000 |
| Group sum | ten popcounts over 200-bit groups | | 2000 → 10 scores (8 bits) | |

The channel counts follow the rule C = m·k: m = 16 for aggregation and 16, 32
and 64 for the convolutions, with k = 8. The aggregation uses (16/3)·8 = 40
channels per colour. All activations between layers are single bits. Integers
exist only inside a layer, between its popcount and its threshold, and on the
identity path of a residual block.

## 2. LUT primitives and how they are wired

**k-LUT neuron** (`klut`, evaluated inline through `fpgn_pkg::lut_eval`). The
output is configuration bit number `x`, where input i has weight 2^i. With
k = 6 there are 64 configuration bits per neuron.

**LUT-vector** (`lut_vector`). This is a row of N independent LUTs fed from an
M-bit vector. Nothing is learned about the wiring: it is fixed and local. This
keeps routing short. The rule is:

1. The first N_base = ⌈M/6⌉ LUTs take the input bits in order, six at a time.
2. If the last of those LUTs gets only a < 6 bits, its spare pins repeat those
   a bits cyclically. This gives a padded sequence of M̂ = 6·N_base bits.
3. Any further LUTs (N > N_base) take the padded sequence again from its
   start, in order. When it runs out they start over.

Example: 9 bits into 4 LUTs gives pins (0‥5), (6,7,8,6,7,8), (0‥5), (6,7,8,6,7,8).
Step 3 spreads fan-out evenly over all input bits. No single net drives an
outsized load.

**In-order flattening.** A multi-dimensional tensor becomes a bit-vector in
a fixed order. Bit order is wiring order, so neighbouring data land on
neighbouring LUTs. A convolution window is flattened as (row, column,
channel), with channels fastest. The final feature map is flattened in raster
order, with channels fastest.

**LUT-tree** (`lut_tree`). This reduces N bits to one bit. The tree is a
stack of LUT-vectors with ⌈N/6⌉, ⌈⌈N/6⌉/6⌉, … LUTs, so it has ⌈log₆ N⌉ levels.
An aggregation tree over 8 bits has two LUTs in level 1 and one in level 2.

**Popcount** (`popcount`). This is a balanced binary adder tree over N bits.
It has a register after every `PER` adder levels (default 2) and after the
last level. Its latency is ⌈⌈log₂N⌉/PER⌉ cycles. Each register stage has an
enable, so the surrounding layer can stall it.

## 3. LUT-Conv and the residual path

`conv_layer` handles one window position per copy. There are `WU` copies
for column unrolling. For each output channel it does three things:

1. A LUT-vector of NL = ⌈9·C_in/6⌉ LUTs reads the flattened 3×3×C_in window.
   Each LUT already reduces six bits to one. So the popcount that follows adds
   NL bits instead of 9·C_in bits, which is a tree about log₂6 levels
   shallower.
2. The popcount gives the channel's integer sum.
3. In the second layer of a residual block, the first layer's integer sum for
   the same pixel and channel is added *before* normalisation. The sum is then
   compared with a per-channel threshold (`bn_threshold`). Batch-norm followed
   by sign binarisation reduces to exactly that comparison, so the identity
   path stays in small integers and no fractional arithmetic is needed.

The pipeline is: LUT-vector → register → popcount stages → add + compare →
output register. The latency is `pc_latency(NL,PER) + 2` cycles, and the layer
takes one window beat per cycle.

The identity sums travel through `res_fifo`, a register FIFO. The top forks
the output of each block's first layer: the bits go to the next line buffer
and the integer sums go to the FIFO. A beat leaves only when both can take
it. The second layer pops one FIFO word per window beat. The word belongs to
the same pixel, because the stride-1 layer produces its outputs in the same
raster order as the stride-2 layer before it. The FIFO must cover the lag
between the two. Its depth is (K + S + 1)·W_out/WU + 8 words, which is 88
words for block 1 at default sizes. A layer waits for its identity word if the word is late. It takes the
word only in the cycle its result moves into the output register.

## 4. The stationary-window circular line buffer

Between two layers, `line_buffer` turns a raster stream of pixels into 3×3
windows. A conventional line buffer reads a sliding window, and each window
position needs a multiplexer over all columns. Here the **read window never
moves**. It is always columns 0 … K+(WU−1)·S−1 of the K active rows. The data
move instead, and every register has a small, fixed set of sources.

**Storage.** The buffer holds K *active* rows, each W + 2P pixels wide (pad
columns included), plus S *fill* rows of W pixels. The producer writes into
the fill rows. A fill row is a shift register: new pixels enter at its right
end and after W/PW beats the row is complete. The S fill rows are the
"additional rows for the producer's data" next to the active chunk. With them
the producer writes the next rows while the consumer reads windows from the
current ones.

**Fire (horizontal circular shift).** When the conv layer takes a window
beat, every active row rotates left by WU·S columns, circularly. This moves
the next WU window positions under the fixed window. After W_out/WU fires the
output row is done. Each row has rotated by S·W_out mod (W+2P) columns in
total. This is a known constant.

**Promote (vertical row promotion).** After the last fire of an output row,
the rows move up by S:

* Active row r takes row r+S, rotated back by that constant so that column 0
  is the left pad again.
* The bottom S active rows take the fill rows, with zero pad columns added.
  A row above or below the image is loaded as all zeros.

This implements zero padding with no extra logic in the datapath.

Promotion waits until every needed fill row has been completely written
(`fills_ready`). The producer is stalled (`in_ready` low) while its fill slot
still holds a row that has not been promoted. `in_ready` depends only on
registers.

**Frame sequencing.** After reset, the active rows are zero and the buffer
*primes*: it promotes without firing until active row 0 is image row −P. For
stride 2 and P = 1 that takes two promotions. At the end, the last output row
covers image rows −P+S·(H_out−1) … The buffer then returns to its reset state.
The producer cannot write rows of the next image before that, since its row
counter runs to H and stops, so there is a short gap between images.

**Each register has four sources.** They are hold, rotate by WU·S, promote
from the row S below (a fixed rotation), and write from the fill row. That
holds whatever the image width. This is why the layout is cheap in LUTs.

**Not built.** Row unrolling, several output rows per promotion (the row
factor h > 1), is not built. Each chunk produces one output row.

Per window beat the timing is one cycle per fire and one cycle per promotion.
For example, a 32-wide stride-2 layer with WU = 1 spends 16 fire cycles and at
least 1 promotion cycle per output row. In that time it must receive 2 new input rows,
64 pixels. At one pixel per beat, the stride-2 layers are therefore limited by
their input rate.

## 5. Output stage

* `flatten_buffer` shifts pixels of the last map into an 8192-bit vector.
  When the vector is full it offers it and accepts nothing until it is taken.
* `fc_layer` is one LUT-vector, with locality-aware padding over the full
  input, and one register stage.
* `group_sum` cuts the 2000 outputs of FC 2 into ten contiguous groups of
  200 and counts each group with a pipelined popcount. The ten counts are the
  class scores; the largest one wins. Argmax is left to the consumer.

## 6. Interfaces, flow control and timing

The top, `fpgn_top`, has a pixel input and a score output:

| Port | Width | Meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | clock; asynchronous active-low reset |
| `in_valid`, `in_ready`, `in_pix` | 1, 1, AW·24 | AW pixels per beat in raster order; pixel a, colour c, bit b at ((a·3)+c)·8+b |
| `out_valid`, `out_ready`, `out_scores` | 1, 1, 10·8 | one score vector per image; class j at j·8 |

Every link inside the top uses valid/ready. A beat moves when both are high,
and a stalled stage holds its data. So any stage can be starved or
back-pressured without losing or duplicating data. The schedule has no
data-dependent branches, so latency is deterministic for a given parameter
set and input rate. The end-to-end test checks this: two images sent
separately take the same number of cycles.

At the default size, with one pixel per beat and no unrolling, one image
takes 1179 cycles from its first pixel to its scores. At least 1024 of them are
spent feeding the pixels in.

The reduced configuration used in the end-to-end test (8×8 image, multiplier
1, two-pixel beats, WU = 2 in block 1) needs 94 cycles from the first pixel to
the scores.

Unrolling parameters are `AW` (pixels per input beat) and `WU1`…`WU6`
(window positions per cycle for each conv layer). They trade LUTs for
latency. The source architecture lets a compiler choose them per design
budget. Here they default to 1, and the following rules apply:

* WU of a layer must divide its output width.
* Both layers of a residual block must use the same WU, because the identity
  word is one output beat of the first layer. The top checks this at
  elaboration.
* The producer beat (AW, or the previous layer's WU) must divide the input
  width.

## 7. Trained values

Two functions in `fpgn_pkg` stand in for training results:

* `lut_init(seed, idx)` gives the 64 configuration bits of LUT `idx` in the
  layer identified by `seed`. It is a splitmix64 hash of the pair.
* `bn_thresh(seed, ch, maxv)` gives the threshold of channel `ch`: ⌊maxv/2⌋+3
  minus a hashed 0…7.

The seeds are fixed per instance, for example `(i+2)<<16` plus the channel for
conv layer i. To deploy a trained network, replace these two functions with
lookups of the exported tables. The wiring, padding and dataflow stay as they
are. The fused form compares the sum with `>=` against the threshold. That
holds for a positive batch-norm scale; a negative scale would turn the
comparison around.

## 8. Where this RTL departs from, or goes beyond, the source

* **Kernel and padding.** The published configuration gives strides and
  channel counts but not kernel size or padding. 3×3 kernels with zero
  padding 1 are used throughout.
* **Block pairing.** Layers (1,2), (3,4) and (5,6) form the residual blocks.
  They use 16·8, 32·8 and 64·8 channels; this pairing is inferred.
* **Aggregation input.** Aggregation input is taken as one colour's 8 bits
  per tree, with 40 trees per colour.
* **Unroll factors.** All unroll factors default to 1, and row unrolling is
  not built. The published 658 ns latency and 3.21 M images/s belong to a
  compiler-chosen, heavily unrolled configuration. They are not reproduced at
  these defaults.
* **Chunk formula.** The published chunk-size formula is written with the
  column factor (k + (w−1)·s rows), while its description says the chunk
  depends on the row factor. The buffer here follows the description: K rows
  per chunk at h = 1. The column factor sets the width of the fixed read
  window.
* **Pipeline registers.** Pipeline register placement (every two adder levels
  in popcounts, one register per LUT-vector stage) is a fixed rule. The
  source describes an adaptive rule based on carry-chain length.
* **Flow control.** Flow control, reset, the identity FIFO and frame restart
  are this design's own; the source does not describe them.
* **Stand-in values.** LUT contents and thresholds are stand-ins (section 7).
* **Not hardware.** The training method and the design-space compiler are
  software and not part of this RTL.

## 9. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The expected values come from
`tb/fpgn_ref_pkg.sv`, a reference written directly from the definitions. It
spells out the padded pin sequence explicitly instead of using the RTL's index
function. The RTL and the reference share only the stand-in weight functions.

* **Primitives.** klut, lut_vector, lut_tree, popcount, bn_threshold,
  flatten_buffer, fc_layer and group_sum are tested on random inputs. The
  lut_vector test also checks the 9-bit pin example above, and popcount checks
  its latency. The tests use random valid/ready where there is a handshake.
* **`tb_line_buffer`.** Three configurations: stride 1; stride 2 with two
  windows per fire and two-pixel beats; and stride 1 unrolled the same way.
  Every window is compared with a padded reference image. The test counts
  fires, promotions, producer stalls and cycles where a write and a read
  happen together, and each count must be non-zero.
* **`tb_conv_layer`.** A residual layer with WU = 2 and a plain layer, under
  random valid/ready and late identity words. It checks every integer sum,
  every bit, and the latency at full rate. It also checks that every accepted
  window comes out.
* **`tb_fpgn_top`.** Runs the whole network end to end at reduced size: 8×8
  images, multiplier 1, FC 30/20, AW = 2, and WU = 2 in block 1. A full
  behavioural model of the network gives the expected scores. The test sends
  two images separately at full rate and checks that their latencies are
  equal. It then sends two more back to back with random valid and ready. It
  counts window fires, unrolled fires, promotions, frame restarts, overlapped
  writes and reads, residual additions, input stalls and output back-pressure.
  Each count must be non-zero.
* **`tb_fpgn_top_full`.** Runs one image through the top at its default
  (full) size against the same model. It passes: all ten scores match, and
  the line buffers fire, promote and overlap writes with reads. It is slow to
  build: Verilator's C++ compile of the full network takes about 15 minutes
  on four cores, and the simulation itself takes about 25 seconds.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_fpgn_top \
  rtl/fpgn_pkg.sv tb/fpgn_ref_pkg.sv rtl/*.sv tb/tb_fpgn_top.sv
./obj_dir/Vtb_fpgn_top +verilator+rand+reset+2
```

## 10. Files

| File | Content |
|---|---|
| `rtl/fpgn_pkg.sv` | LUT size, padding map, stand-in weights, width and latency helpers |
| `rtl/klut.sv`, `lut_vector.sv`, `lut_tree.sv`, `popcount.sv` | primitives |
| `rtl/agg_layer.sv` | aggregation stage |
| `rtl/line_buffer.sv` | stationary-window circular line buffer |
| `rtl/conv_layer.sv`, `bn_threshold.sv`, `res_fifo.sv` | LUT-Conv, fused threshold, identity FIFO |
| `rtl/flatten_buffer.sv`, `fc_layer.sv`, `group_sum.sv` | output stage |
| `rtl/fpgn_top.sv` | the FPGN-6 accelerator |
| `tb/fpgn_ref_pkg.sv`, `tb/tb_*.sv` | reference model and testbenches |
