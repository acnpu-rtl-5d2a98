# ACNPU: a tile-fused super-resolution accelerator in SystemVerilog

This is RTL for an accelerator that upscales video frames by 2x or 4x with a
small convolutional network built almost entirely from *asymmetric*
convolutions (3x1 and 1x3 kernels instead of 3x3). The network is small
enough (under 600 weight words) that its weights stay on chip. The whole
network therefore runs on one small tile of the input frame before the next
tile starts. The only off-chip traffic is the input frame, the weights (once)
and the output frame. Only the 3x1 layers reach across tile borders, and only
vertically. Their partial sums are parked in a dedicated boundary memory until
the tile row below is processed.

The design follows the ACNPU architecture published for this network: six
processing clusters of 18 PE + 8 PE', feature, weight and boundary SRAMs, an
input buffer, and four operating modes of the clusters. The cycle-level
schedule, the data mappings inside a cluster, the memory word layouts and all
port protocols are this implementation's own. They are described below and
marked as such in each file's header comment.

## The network

Channel counts are fixed at 32 internally.

| layer | kernel | channels | mode |
|---|---|---|---|
| conv1 | 3x1 | 1 -> 32 | M1 |
| CBB x n (n = 1..8, 8 nominal) | 1x3 then 1x1 on ch 0-7 and on ch 8-15, ch 16-31 bypassed, then 1x1 | 32 -> 32 | M2, M3 |
| conv2 | 3x1 group conv, 4 groups, LeakyReLU | 32 -> 32 | M4 |
| conv3 | 3x1 group conv, 4 groups | 32 -> 4 (x2) or 16 (x4) | M4 |
| pixel shuffle | depth to space | 4/16 -> 1 | output path |

A CBB (channel bypass block) splits its 32 input channels into 8 + 8 + 16.
Each 8-channel branch does a 1x3 convolution to 16 channels and a 1x1
convolution back to 8 channels, followed by LeakyReLU. The 16 bypass channels
pass through unchanged. A 1x1 32->32 fusion layer then mixes all 32 channels.
(One sentence of the source describes the split as three groups of 16. The
figure and the dataflow description say 8 + 8 + 16, which is what is built.)

The network has no biases and no global residual connection. LeakyReLU uses a
slope of 1/8 (exponent minus 3). The slope is this design's choice.

### Number formats (`acnpu_pkg`)

* Features are FP13 (sign, 5-bit exponent, 7-bit mantissa).
* Weights are FP10 (sign, 5-bit exponent, 4-bit mantissa).
* The exponent bias is 15.
* There are no subnormals: an exponent field of zero means zero, and results that underflow are flushed to zero.
* There is no infinity or NaN: overflow saturates to the largest magnitude.
* Every multiply and add rounds to nearest, ties to even. Additions keep three guard bits. (Truncation, and rounding ties away from zero, were tried first. Their small bias in every operation moved the outputs of the full 27-layer network by 10-20%.)

Only the two bit widths come from the published design. The rest is chosen
here.

## Holistic tiling and the row delay

The frame is cut into tiles of 3 rows x 192 columns (`TILE_W`). The controller
runs all layers on a tile, then moves on: left to right across the frame, then
one tile row down.

A 3x1 layer on tile row *t* needs input rows 3t-1 .. 3t+3. Rows 3t+3 and 3t+4
do not exist yet, so each 3x1 layer produces its output *one row higher* than
its input:

* The first 3x1 layer outputs rows 3t-1, 3t, 3t+1.
* The second outputs rows 3t-2 .. 3t.
* The third outputs rows 3t-3 .. 3t-1, which is exactly the previous tile row.

For each PE-column pair, the two sums that still lack their lower inputs
(the future rows 3t+2 and 3t+3) go to the boundary SRAM. The tile row below
reads them back to complete its top two rows.

Consequences:

* Output row block *t-1* appears while tile row *t* is processed. After the last tile row, the controller runs one more *flush* tile row of zero input.
* Rows that fall outside the frame (above row 0 or below the last row) are written back as zeros. This gives the zero padding the next vertical layer needs.
* On tile row 0 the stored boundary sums are ignored.
* The 1x3 layers are zero padded at the left and right edge of every tile. Tiles are independent horizontally, so nothing crosses a vertical tile seam. This is a choice of this design. Outputs near tile seams therefore differ slightly from a whole-frame convolution.

## Inside a cluster (`acnpu_cluster`)

A cluster has:

* a 6 x 3 grid of PEs, each with eight FP13 x FP10 multipliers, an adder tree, and one add of an incoming partial sum (`acnpu_pe`);
* eight PE' elements (`acnpu_pe_prime`).

A cluster holds up to six pixels x 32 channels stationary in its feature
buffer. Every cycle it receives one weight word with four columns of eight
FP10 weights: W0..W2 feed the three PE columns and W3 feeds the PE'. Only
two things change between modes: where each PE takes its eight features from,
and where it takes its partial sum from.

**Vertical modes (M1 and M4).** The six buffered pixels are two pixel
columns of three rows.

* PE(i, j) multiplies input row *i* by tap *j*.
* Partial sums run down the diagonals, PE(i-1, j-1) -> PE(i, j), and are cut between the two columns.
* Along each diagonal, row - tap is constant, so each diagonal ends in one output row: rows -1, 0 and 1 leave PE column 2, and the partial sums of rows 2 and 3 leave the bottom PE row.
* The vertical boundary process adds the stored partials from the boundary SRAM to rows -1 and 0. The new partials of rows 2 and 3 go out on `bnd_out`.
* In M1 only lane 0 is used: the first layer has one input channel.
* In M4 the 8-channel group changes with the output channel (every 8 output channels for conv2, every 1 or 4 for conv3).

The results of each cycle (one output channel for all six pixels) go into
the output buffer at that channel's position.

**M2: 1x3 cascaded into 1x1.** The six pixels are consecutive pixels of one
row.

* The diagonals are not cut, so they yield the 1x3 result of output positions -1 .. 6 for one 1x3 output channel *k* per cycle.
* Positions -1 .. 4 come out of PE column 2 into PE' 0..5. Positions 5 and 6 come out of the bottom row into PE' 6 and 7.
* The PE' run in accumulate mode: each multiplies its incoming sum by the eight 1x1 weights of channel *k* (W3) and accumulates.
* After 16 cycles each PE' holds the eight 1x1 outputs of its position.

There is no activation between the two convolutions, so a position that
straddles two segments can be completed after the 1x1. PE' 6 and 7 are kept
in the *boundary buffer* (2 x 8 x 13 bits) and added to PE' 0 and 1 of the
next segment. LeakyReLU is then applied.

**M3: 1x1 32 -> 32.** The 18 PEs and the PE' form six chains of four stages,
one chain per pixel. The chain stages take channels 0-7, 8-15, 16-23 and
24-31, so each cycle produces one complete output channel for six pixels.

## The schedule (`acnpu_ctrl`)

Every layer is cut into *steps*. During a step the features stay in the
clusters and K weight words stream past.

| layer | a step covers | K (cycles) |
|---|---|---|
| conv1 (M1), fusion (M3), conv2 (M4) | 12 columns: clusters 0-2 take segment 2n, clusters 3-5 take segment 2n+1 | 32 |
| 1x3+1x1 (M2) | one 6-pixel segment: clusters 0-2 run branch A (ch 0-7), clusters 3-5 run branch B (ch 8-15) on the same rows | 16 |
| conv3 (M4) | 12 columns | 4 (x2) or 16 (x4) |

A step takes K + 3 cycles:

| pc | what happens |
|---|---|
| 0 | read the first segment |
| 1 | read the second segment, load clusters 0-2, issue channel 0 |
| 2 | load clusters 3-5 |
| 1 .. K | issue channel pc-1 (weight SRAM read) |
| + 1 | weight word in the clusters, boundary SRAM read |
| + 2 | compute, boundary SRAM write, output buffer write |

The output buffers are written back to the feature SRAM in pc 1 and 2 of the
next step. After the last step of a layer there is a 3-cycle tail. The last
layer sends its output buffers to the pixel shuffle, one cluster per cycle, in
a 7-cycle tail after every step.

The cycles for one full 192-column tile of the x2 network with 8 CBBs are:

    conv1 16*35+3 + 8*(M2 32*19+3 + M3 16*35+3) + conv2 16*35+3 + conv3 16*(7+7)
      = 10,742 cycles

A 960 x 540 input (1920 x 1080 output) needs 5 x 181 tiles, i.e. 9.72 M cycles.
At 270 MHz that is 27.8 frames per second.

Two weight SRAM read ports are needed because the two branches of M2 use
different weights in the same cycle.

### Weight SRAM word map

One word holds 4 columns x 8 FP10 weights (320 bits). 592 of the 640 words
are used.

| words | layer | column j, lane l |
|---|---|---|
| 0-31 | conv1, word = output channel | col 0-2 lane 0 = tap j |
| 32+64b + k, k<16 | CBB b, branch A 1x3 channel k | col 0-2: tap j of input channel l; col 3: 1x1 weight from channel k to output l |
| 32+64b+16 + k | CBB b, branch B | as branch A |
| 32+64b+32 + k, k<32 | CBB b fusion, output channel k | weight of input channel 8j+l |
| 544 + k | conv2, output channel k | tap j, input channel 8*(k/8)+l |
| 576 + k | conv3, output channel k | tap j, input channel of group k/(1 or 4) |

### Boundary SRAM word map

One word holds six clusters x two pixel columns x two partial rows of FP13
(312 bits). The address is

    (layer * (IMG_W_MAX/12) + 12-column step) * 32 + output channel

A word is read one cycle after the channel is issued, and the new partials
are written to the same address one cycle later.

## Memories

| memory | organisation | size |
|---|---|---|
| feature SRAM | 32 words of 3 rows x 6 pixels x 32 ch FP13, per-8-channel write mask, read and written in place layer after layer | 29,952 B (the published design quotes 30 KB) |
| weight SRAM | 640 words x 320 bits, two read ports | 25,600 B (25 KB) |
| boundary SRAM | 7,680 words x 312 bits: 3 layers x 80 twelve-column steps x 32 channels | 299,520 B (the published design quotes 142 KB with ping-pong buffering) |

All memories are plain arrays with a registered read. A synthesis flow maps
them to SRAM macros.

## Ports of `acnpu_top`

* **Configuration.** `scale_x4`, `n_cbb` (1..8), `img_w` (a multiple of 12, at most `IMG_W_MAX`) and `img_h` (a multiple of 3) are latched on `start`. `busy` is high while a frame runs, and `done` pulses at the end.
* **Weights**, before `start`. `wl_valid`/`wl_first`/`wl_data` carry 40-bit beats of four FP10 weights. Eight beats make one weight word, in the order column 0 lanes 0-3, column 0 lanes 4-7, column 1 ... Words are written from address 0, which `wl_first` restarts.
* **Input frame.** `px_req` with `px_row`/`px_col` asks off-chip memory for a 3 x 6 block of pixels. The block must arrive on `px_data` in the same cycle. Rows at or below `img_h` are zeroed inside.
* **Output frame.** `out_valid` comes with a block of high-resolution pixels `out_blk` (12 x 8, of which `out_rows` x `out_cols` are valid). The block's top-left pixel is (`out_row`, `out_col`). Each block covers 3 low-resolution rows x 2 columns. Every output pixel is written exactly once.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=... failures=...` and has a watchdog.

* `tb_acnpu_pe`, `tb_acnpu_pe_prime`, `tb_acnpu_boundary_process`: random operands against a reference computed in `real` arithmetic. The tolerance is set from the number format.
* `tb_acnpu_cluster`: all four modes against direct convolution sums. This covers the stored boundary sums in and out, and a three-segment M2 row with the boundary buffer.
* Memories, input buffer, pixel shuffle: checked against testbench models.
* `tb_acnpu_ctrl`: the complete issue sequence of a frame (mode and both weight addresses of every issue), the idle cycles between steps, and the numbers of requests, reads, writes and output blocks.
* `tb_acnpu_top` (tiles of 24 columns) and `tb_acnpu_top_full` (all defaults, a 384 x 6 frame of two 192-column tiles, x2, 8 CBBs): whole frames against a `real` model of the network.
  * The model applies the same tile-edge padding.
  * Every output pixel must lie within 10% of the frame's RMS output of the model. Test pixels are positive and weights have a positive mean, so the outputs do not come from the cancellation of large terms. The largest error seen in these runs is below 2% of the RMS output.
  * The frame time must equal the schedule formula exactly.
  * Each mechanism must occur at least once: the four modes, boundary SRAM reuse, boundary buffer reuse, zeroed out-of-frame rows, the flush tile row, tile seams, a narrow last tile, x2 and x4, and short and full CBB counts.

To run a testbench with Verilator (package files first):

    verilator --binary --timing --assert --top-module tb_acnpu_top \
      rtl/acnpu_pkg.sv tb/acnpu_tb_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
      tb/acnpu_top_harness.sv tb/tb_acnpu_top.sv -o sim
    ./obj_dir/sim

Building the top takes a few minutes because of the 1,248 floating-point
multipliers; the simulation itself takes seconds.

The simulation is two-state. Every testbench initialises what it drives, and
the design resets all its control state.

## Where this design departs from the published one

* **Throughput.** The schedule here spends 3 idle cycles per step and 7 per output step. At 270 MHz it reaches 27.8 fps for x2 Full HD against the published 31.7 fps, and about 108 fps for x4 against 124.4 fps.
* **Boundary SRAM size.** It keeps two partial rows x 32 channels for all three 3x1 layers over the full 960-column width, without ping-pong. That is 292 KB against the published 142 KB.
* **Weight port width.** A PE takes 80 bits of weights (eight FP10). One block diagram of the published design labels this port 104 bits.
* **Mode 4 input hold.** The feature buffer of a cluster holds all 32 channels for a whole step, and the PEs switch between 8-channel groups every 8 (conv2) or 1/4 (conv3) cycles. The published description speaks of updating the input every 8 cycles. The PEs see the same data either way.
* **Mode 3 mapping.** The published description hands channels 0-15 and 16-31 to the clusters in two cycles. Here each cluster gets all 32 channels of six pixels at once, and the four chain stages take 8 channels each.
* **Tile-edge padding.** The 1x3 convolutions are zero padded at every tile edge, not at the frame edge only.
* **Image size.** The width must be a multiple of 12 and the height a multiple of 3.
* **Not built.** The off-chip DRAM is not built: the top exposes its read and write ports. Clocking, power and the SRAM macros themselves are technology specific.
