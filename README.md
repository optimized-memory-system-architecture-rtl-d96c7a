# A bank-split line-buffer memory system for a VDC-M decoder back end

VESA VDC-M decodes a picture in 8x2-pixel blocks. Each block is predicted from
up to 99 earlier pixels. 33 of them come from the last row of the previous
blockline (one blockline is two picture rows), and 66 come from the 33 columns
of the current blockline to the left of the block. A picture may also be cut into
up to four slice columns, and each slice column is decoded on its own. A
straightforward decoder back end therefore needs three line buffers and about
100 pixels of flip-flop storage per slice column.

This RTL implements the most economical of the back-end memory organisations
from the paper "Optimized Memory System Architecture for VESA VDC-M Decoder
with Multi-Slice Support" (Yang et al.). That organisation is called "Type 2"
there. It uses three ideas:

* **Half-line delay.** Each picture row is sent to the display while the next
  half blockline is decoded. Two SRAM lines are enough: one for the upper row
  and one for the lower row of the blockline.
* **Bank split.** Each line is split into two single-port banks. Bank 0 holds
  the blocks with an even index in their slice; bank 1 holds the odd ones.
  This frees enough SRAM cycles to read most of the prediction range
  directly from the line buffer, every time it is needed.
* **Block forwarding.** The block reconstructed last is still held in the write
  register. It is handed straight back to prediction.

With these, the per-slice flip-flop buffer (the "reconstruction buffer") holds
only 25 pixels: 94 bytes per slice and 376 bytes for four slices. The line
buffer is 4 banks x 240 words x 256 bits = 30.72 KB. The design decodes
4 pixels per clock. A 3840x2160 frame with four slice columns takes
2,073,602 clocks, which is 96.45 frames/s at 200 MHz.

The prediction, inverse quantisation and reconstruction unit is not included.
Neither is the decoder front end (rate buffer, substream demultiplexer, funnel
shifters, entropy decoding, rate control). These are defined by the VDC-M
standard and the paper does not describe them. `dbe_top` brings out their
connection as ports.

## The prediction range of one block

For a block whose left column is at slice-local position x, on picture rows
y and y+1:

| name | where | pixels | comes from |
|---|---|---|---|
| A0-A7 | row y-1, x-8 .. x-1 | 8 | reconstruction buffer (RGB) |
| B0-B15 | row y-1, x .. x+15 | 16 | reconstruction buffer (RGB) |
| B16-B23 | row y-1, x+16 .. x+23 | 8 | line 1, read in this slot |
| B24 | row y-1, x+24 | 1 | line 1, read in this slot |
| C0-C24 | row y, x-33 .. x-9 | 25 | line 0, read in this slot |
| C25-C32 | row y, x-8 .. x-1 | 8 | forwarded block |
| C33 | row y+1, x-33 | 1 | reconstruction buffer (YCoCg) |
| C34-C57 | row y+1, x-32 .. x-9 | 24 | line 1, read in this slot |
| C58-C65 | row y+1, x-8 .. x-1 | 8 | forwarded block |

The paper's figure shows A as 8 pixels followed by B as 25 pixels, but it
gives no coordinates. Placing A above-left of the block is the only choice
for which every bank in the paper's access schedule matches the even/odd rule,
so that placement is used here. Pixels outside the slice are not delivered,
and neither is row y-1 when it belongs to the slice above
(`prev_line_valid` = 0). Handling those edges is the prediction unit's job.

Why are A, B0-B15 and C33 kept in flip-flops? The line-buffer words that hold
them are either already overwritten (block j-1 of row y-1 was replaced by the
lower row of block j-1 at the start of this slot) or have no free SRAM cycle
left in the slot.

## The four-cycle slot

One block is decoded per slot of four cycles (`cyc_dec` 0-3). Blocks are
numbered j within their slice. Bank b of a line holds blocks with j mod 2 = b,
at word address slice_base + j/2. In the slot of block j the line buffer is
used as follows. Each SRAM bank does at most one access per cycle.

| cycle | line 0, bank j%2 | line 0, bank !j%2 | line 1, bank j%2 | line 1, bank !j%2 |
|---|---|---|---|---|
| 0 | – | write block j-1 (upper row) | read B16-B23 (block j+2) | write block j-1 (lower row) |
| 1 | bank 0: C17-C24 (j even) or C9-C16 (j odd); bank 1: output | | bank 0: C50-C57 or C42-C49; bank 1: output | |
| 2 | C1-C8 (block j-4) | C0 (last pixel of block j-5) | C34-C41 (block j-4) | B24 (first pixel of block j+3) |
| 3 | bank 0: output; bank 1: first C word of block j+1 | | bank 0: output; bank 1: first C word of block j+1 | |

Cycles 1 and 3 are written per bank number, not per parity. Bank 1 in cycle 1
and bank 0 in cycle 3 are always reserved for the display output. The other
bank does prediction reads: bank 0 in cycle 1, bank 1 in cycle 3. The "first C
word" of block j+1 is C9-C16/C42-C49 when j+1 is even, and
C17-C24/C50-C57 when j+1 is odd. These accesses match the cells printed in the
paper's Type 2 schedule.

SRAM read data appears one cycle after the access. So all line-buffer words
of block j reach the prediction unit during slot j itself, on
`pr_beat[line][bank]`. Each word carries a tag (`dbe_pkg::seg_e`) that says which
segment it is, counted relative to the block of the current slot.

The reconstruction buffer is a three-word sliding window. In cycle 1 the
B16-B23 word (block j+2) arrives. It is converted to RGB and shifted in, so
the window then holds blocks j, j+1 and j+2, which are A, B0-B7 and B8-B15 of
block j+1. In cycle 3 the last pixel of the C34-C41 word becomes C33 of the
next block.

Prediction-unit protocol, slot of block j:

* `pr_ab` (A0-A7, B0-B15 converted back to YCoCg) and `pr_c33` are valid in
  cycles 0 and 1.
* `pr_fwd_up`/`pr_fwd_lo` hold block j-1 for the whole slot
  (`pr_fwd_valid`).
* the reconstructed block j must be on `rec_blk_up`/`rec_blk_lo` in cycle 3. It
  is captured by `align_blk`, written in cycle 0 of the next slot, and
  forwarded during that slot.

A real prediction unit would be pipelined around these points. The exact cycle
positions are choices of this design. The paper gives only the order of
accesses within the slot.

## Half-line delay and the display output

Decoding proceeds across the full frame width in every blockline (see
multi-slice below). Each slot also reads two output words (16 pixels) in its
reserved cycles: cycle 3 reads bank 0 and cycle 1 of the next slot reads
bank 1.

* While blockline n decodes the right half of the frame, the output reads the
  **upper** row of blockline n from line 0. The output pointer moves twice as
  fast as the decoder, starts at 0 when the decoder is at mid-frame, and
  reaches the end of the row just as the decoder does. It never passes data
  that has not been written yet.
* While blockline n+1 decodes the left half, the output reads the **lower**
  row of blockline n from line 1. The output stays ahead of the new lower row
  being written into the same line.

`output_register` turns each 8-pixel word into 4 pixels per cycle. The result
is a gap-free raster stream at exactly the decoding rate. Display output
starts half a blockline after decoding starts. After the last blockline there
is a flush of half a blockline plus two cycles. The frame takes
4·H·G + 4·(G/2) + 2 cycles, where H is the number of blocklines and G is the
number of blocks per blockline.

The paper's text says the upper line is read out "during the first half" of
the line. Its schedule figure, indexed by the decoder position, shows line 1
read in the left half and line 0 in the right half. This RTL follows the
figure. The two agree if the half is counted from the start of output.

## Multi-slice operation

The configuration inputs set 1, 2 or 4 slice columns. Slice s owns words
[s·240/N, (s+1)·240/N) of every bank, so one slice gets the whole buffer and
four slices get 60 words per bank each. One 3840-pixel line has 480 blocks,
which fits in every mode.

The paper does not say in which order slice columns are decoded. Here each
blockline decodes slice 0 from left to right, then slice 1, and so on, so the
decoder position sweeps the frame width exactly as in the paper's schedule
figures. Each slice column has its own reconstruction buffer, as in the paper,
selected by `slice_idx`.

When a slice's row ends, the next slice's window must be loaded before its
block 0 (B0-B7 and B8-B15 from its previous line). This is done in the last
slot of the ending row. In that slot the B16-B23 and B24 reads of the normal
schedule fall outside the slice, so those two line-1 cycles are free. They
load the next slice's buffer instead. No extra slot is needed, and the rate
stays at 4 pixels per clock. This priming is this design's own solution.

## Colour spaces

The line buffer stores YCoCg: Y in 10 bits, Co and Cg in 11-bit two's
complement, 32 bits per pixel, eight pixels per 256-bit word. As in the paper,
the reconstruction buffer keeps A/B in RGB and C33 in YCoCg. So line-1 words
entering it pass through a YCoCg-to-RGB converter, one per line-1 bank, and
its A/B output passes through an RGB-to-YCoCg converter on the way to
prediction. The display path also has a YCoCg-to-RGB converter. The
converters use the reversible YCoCg-R transform, so the round trip is
lossless. `cfg_rgb = 0` bypasses all of them for content that is not RGB.

The paper claims support for 4:2:2 but does not describe how 4:2:2 samples
are stored. Here, 4:2:2 support goes no further than the bypass.

## Modules

| module | role |
|---|---|
| `dbe_pkg` | pixel types, segment tags, line-buffer command/beat structs |
| `dbe_top` | the back end: wires everything below |
| `dbe_controller` | slot counters, the access schedule, output pointer, slice allocation, priming |
| `line_buffer` | 2 lines x 2 banks of `sp_sram`, returns tagged read data |
| `sp_sram` | single-port 240 x 256 SRAM bank, one-cycle read, written as an array (stands in for an SRAM macro) |
| `rec_buffer` | one slice's 25-pixel reconstruction buffer (instantiated four times) |
| `align_blk` | holds the last reconstructed block: line write data and forwarded block |
| `output_register` | 8 pixels in, 4 pixels per cycle out |
| `csc_ycocg2rgb`, `csc_rgb2ycocg` | colour conversion with bypass |

Parameters default to the paper's configuration: bank depth 240 and four
slice columns. The frame geometry (blocks per slice row, blocklines, slice
height) is set at run time on `cfg_*` inputs. Requirements: blocks per slice
row even, at least 4, and at most 480/N.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/dbe_pkg.sv tb/tb_dbe_top.sv --top-module tb_dbe_top -o sim
    ./obj_dir/sim

* `tb_dbe_top` uses `tb/dbe_env.sv`, which models the image, the prediction
  unit and the display. It runs small frames with 4, 2 and 1 slice columns,
  RGB and bypass, and 3840-wide frames with one and two slice columns. It checks every
  prediction pixel delivered, checks that every in-slice segment arrived in its
  slot, checks the display stream pixel by pixel, and checks the exact frame
  cycle count. It also counts each mechanism: half-line-delay start, even/odd
  bank writes, output reads on both lines, forwarding, priming, C33 and slice
  switches.
* `tb_dbe_top_full` runs one 3840x2160 frame with four slice columns, with
  all parameters at their defaults. It takes about 8 s.
* `tb_dbe_controller` keeps its own map of which block each SRAM word holds.
  It checks that every read returns the block its tag claims: never before
  the block is written, never after it is overwritten.
* The remaining block testbenches (`tb_line_buffer`, `tb_sp_sram`,
  `tb_rec_buffer`, `tb_align_blk`, `tb_output_register`, `tb_csc_*`) check
  each block against a behavioural reference.

## How far to trust it

The memory system is checked end to end against an independent model. Every
delivered prediction pixel, every output pixel and the frame timing were
compared at full 4K size. What has not been tested is real VDC-M decoding: no
prediction unit or front end exists here, so no conformance bitstream has
been run.

Synthesised alone (generic cells, no technology library), the memory system
has 245,760 SRAM bits and about 3,900 flip-flop bits. 3,008 of those flip-flop
bits are the four reconstruction buffers, and 512 are the block-holding
register. The paper's gate count (about 419K gates for its Type 2 back end)
includes the prediction and reconstruction logic, so it cannot be compared
with this RTL.

Departures from, or additions to, the paper:

* A and B placement.
* Slice decoding order.
* Priming of the next slice's buffer.
* The cycle-level protocol toward the prediction unit.
* The read tags.
* The flush and the start/done handshake.
* 4:2:2 only as a colour-conversion bypass.
* Clamping in the YCoCg-to-RGB converter.
* Asynchronous reset.

All of these are described in the module headers.
