# Line-pipelined fingerprint binarization, dilation and thinning

This is synthesizable SystemVerilog for a streaming image pipeline that turns
a gray-scale fingerprint into a thin binary ridge map. It follows the design
in "Hardware design for binarization and thinning of fingerprint images"
(F. Kheiri, S. Samavi, N. Karimi). The pipeline has three steps:

1. **Local adaptive thresholding.** The image is cut into 16x16 blocks. Each
   pixel is compared with the mean gray value of its block.
2. **2x2 dilation.** This closes small holes and breaks in the binary ridges
   before thinning, so they do not become false minutiae.
3. **Six iterations of a two-pass parallel thinning rule.** This is a
   Zhang-Suen variant with a 3x3 window.

The central idea is that the pipeline never stores a frame. It works on whole
image lines. A line of 512 pixels arrives over a 32-bit bus, four pixels per
clock, so a new line is ready every 128 clocks. At that moment every stage of
the pipeline takes one **step**: each line register passes its line to the
next one. The stages between the registers work on all 512 columns at once:

- 34 block-mean units
- 512 comparators
- a 512-wide OR network
- twelve rows of 512 thinning cells

A line-scan sensor can therefore feed the pipeline directly. A frame of any
height leaves at the same rate it arrives, after a fixed delay of 42 lines.

This code is an independent implementation, not the authors' own. The paper
leaves some points open, and a few of its statements conflict. The choices
made for these are listed in
[Departures and choices](#departures-from-the-paper-and-own-choices).

## Pipeline at a glance

```
 32-bit bus ──► line_loader ──► binarizer ───────────────► dilation ──► 6 × thin_superstage ──► output_stage ──► 32-bit bus
 4 px/clock     512×8-bit       34 mvcu + 18-line delay     2×2 OR       (TPC1 row, TPC2 row)     512 one-bit
                line register   + 34 thresholds + 512 CMP                 each = 1 iteration        buffers, 16 words
```

| Stage | Module | Registers per line step | Delay in steps |
|---|---|---|---|
| Input assembly (stage 1) | `line_loader` | 512 × 8 bit | (line completes) |
| Block means | `mvcu` ×34 inside `binarizer` | 13 + 8 + 8 bits per unit | runs beside the delay chain |
| Row delay and compare | `binarizer` | 18 × 512 × 8 bit | 18 |
| Dilation | `dilation` | 512 × 1 bit (previous row) | 0 |
| Thinning, 6 iterations | `thin_superstage` ×6 (2 × `thin_half` each) | 6 × 6 × 512 × 1 bit | 6 × 4 = 24 |
| Output | `output_stage` | 512 × 1 bit | sends 16 words |

All logic runs on one clock. The step is a one-clock enable pulse, `adv`.
The line loader raises it in the clock after it takes a line's last word.
When a word arrives on every clock, this is the main clock divided by 128,
which is the rate the paper describes.

Each line carries a small tag through the pipeline. The tag holds:

- `valid`: the line came from the input, not from reset.
- `first` and `last`: the line is the first or last row of a frame.
- `blk_first` and `blk_last`: the line is the first or last row of a 16-row
  band of blocks.

The tag tells the block-mean units when a block starts and ends. It also
tells the thinning windows where the frame edges are. Rows are counted
modulo `HEIGHT` from reset.

**Throughput and latency.**

- The pipeline takes one line per 128 clocks. A 512x512 frame takes 65,536
  clocks.
- The line taken from stage 1 at step *n* is sent on the output bus in the
  16 clocks after step *n* + 42.
- The last rows of a frame leave only when 42 more lines have been pushed in
  behind them. These can be the next frame, or any filler data.

## Thresholding: block means without a divider

The threshold of a block is the floor of the mean of its 256 pixels, that is,
its sum divided by 256. The pipeline sees one row of a block per step. A
block-mean unit (`mvcu`) therefore adds 16 new pixels per step. It also has
to carry the partial result forward. The paper's unit does this cheaply, and
this is the least obvious part of the design:

- A 17-input adder (`dadda_tree17`) adds the 16 pixels of the current row and
  the **low byte of the previous row's result**. The 13-bit sum is
  registered.
- Only the **top 5 bits** of that sum go on. A carry look-ahead adder (`cla`)
  adds them into an 8-bit accumulator.

The low byte is never lost, because it is carried into the next row's sum. So
after the 16th row the accumulator holds exactly ⌊Σ/256⌋, and no divider or
wide accumulator is needed. For a block's first row, the fed-back byte and the
accumulator restart from zero.

The 17-input adder is a carry-save tree with the operand counts the paper
gives:

- a first layer of four carry-save adders takes the 17 operands down to 13;
- five more layers go 13 → 9 → 6 → 4 → 3 → 2;
- a carry look-ahead adder built from 4-bit groups adds the last two words.

Each layer is a `csa_layer` of word-wide 3:2 compressors (`csa`).

**Block geometry.** The blocks are 16 pixels wide and start every 15 columns,
so neighbouring blocks share one column. That gives (512 − 16)/15 + 1 = 34
units for a 512-pixel line, which is the count the paper gives. Column *c* is
compared with the threshold of block min(⌊c/15⌋, 33). A shared column goes
with the block on its right. Column 511 lies in no whole block and uses block
33. Vertically, the blocks are bands of 16 rows that do not overlap.

**Timing of a band.** A row's sum is in the 13-bit register one step after
the row passed stage 1, and in the accumulator one step later. When the
unit's accumulator holds a finished block, the binarizer copies it into that
column group's threshold register. That register therefore changes once every
16 steps. The lines themselves wait in a chain of 18 line registers. This
chain length makes rows 0..15 of a band reach the comparators during the 16
steps in which that band's thresholds are held. A comparator outputs 1 where
the pixel is **greater** than the threshold, as in the paper's equation
g = 1 if f > T.

## Dilation

`dilation` outputs a 1 for a pixel when any pixel of its 2x2 window is 1. The
window is columns *c* and *c*+1 of rows *r*−1 and *r*. Row *r* comes straight
from the comparators. Row *r*−1 is held in a one-bit line register. Pixels
outside the frame count as 0. The stage adds no delay.

## Thinning

A thinning processor circuit (`tpc`) looks at a centre pixel P1 and its ring
of eight neighbours. The ring starts at P2 above P1 and runs clockwise:
P3 above-right, P4 right, … , P9 above-left. A set pixel is deleted when all
of these hold:

- a) 3 ≤ B ≤ 6, where B is the number of ones in the ring;
- b) A = 1, where A is the number of 0→1 transitions around the ring;
- the two product conditions of the pass:
  - sub-iteration I (TPC1): P2·P4·P6 = 0 and P4·P6·P8 = 0;
  - sub-iteration II (TPC2): P2·P4·P8 = 0 and P2·P6·P8 = 0.

The lower bound of 3 in condition a is the paper's change to Zhang-Suen, which
uses 2.

Conditions a and b together say that the ones form one unbroken run of 3 to 6
pixels around the ring. There are 4 run lengths and 8 start positions, so
32 ring patterns pass them. The product conditions remove 6 of the 32. So each
circuit deletes for exactly 26 ring patterns, and the circuit is the OR of
these 26 minterms. The RTL does not list the minterms by hand. An elaboration-
time function builds them by enumerating the runs, and the testbench checks
them against a direct count of A and B.

`thin_half` holds one pass:

- three one-bit line registers hold rows *r*+1, *r* and *r*−1;
- 512 TPCs work on the middle row;
- columns −1 and 512, the row above a frame's first row and the row below its
  last row all count as 0.

Every pixel of a pass is decided from the previous pass's image, so this is
the parallel form of the algorithm, with no order dependence. A
`thin_superstage` is one full iteration: a TPC1 pass followed by a TPC2 pass,
six line registers in all. It has a delay of 4 steps. `fp_top` chains six of
them, which is the iteration count the paper settles on.

## Input and output buses

- **Input (`line_loader`).** A 7-bit word counter drives a one-hot decoder.
  Output *k* of the decoder loads pixel registers 4*k* … 4*k*+3. Bits [7:0]
  of the word go to pixel 4*k*, and bits [31:24] go to pixel 4*k*+3. While
  `in_valid` is high, a word is taken on every clock. There is no
  back-pressure.
- **Output (`output_stage`).** On each step the thinned line is loaded into
  512 one-bit buffers in 16 groups of 32. A 4-bit counter and a one-hot
  decoder then put one group per clock on the bus. Word *k* holds pixels
  32*k* … 32*k*+31, with pixel 32*k* in bit 0. For each line:
  - `out_valid` is high for 16 consecutive clocks;
  - `out_first` marks the first word of a frame;
  - `out_last` marks the last word of a frame.

  Lines that only fill the pipeline after reset are not sent.

## Departures from the paper and own choices

- **Length of the row delay chain.** The paper's two drawings of the
  binarization stages show 15 or 14 pixel-line stages, and give no timing.
  This design uses 18 line registers. That is the number its block-mean
  latency needs so that each row meets its own block's threshold. It costs
  about 3 × 4 kbit more registers than the drawings suggest.
- **Output rate.** The text says 512 bits leave in 16 clocks, and also that
  the output decoder is fed by the main clock divided by 16. The second would
  need 256 clocks per line, while lines arrive every 128 clocks. This design
  follows the first statement.
- **Overlap.** The paper says each block overlaps its neighbours by one
  pixel. It also says the threshold register changes every 16 steps, which
  rules out a vertical overlap. The overlap is implemented horizontally only.
  Which threshold a shared pixel uses is not stated. The mapping used here is
  given above.
- **Dilation window.** The paper names a 2x2 window and an OR network, but
  which neighbours form the window cannot be read from its drawing. This
  design uses (r−1, r) × (c, c+1).
- **Tree adder.** The carry-save tree keeps the paper's layer and operand
  counts, but reduces whole 13-bit words instead of bit columns. The paper's
  five CSA cell types (drawn in figures not reproduced here) therefore do
  not appear.
- **This design's own additions**, none of them described in the paper:
  - a clock-enable step instead of a divided clock;
  - the line tag, with frame-edge zero padding for thinning and dilation and
    block start and end for the mean units;
  - `in_valid`;
  - the reset values.
- **Polarity.** The pipeline binarizes as in the paper, with 1 for a pixel
  brighter than its block mean, and then dilates and thins the ones. On a
  scanner that images ridges dark, the ones are the valleys, so the caller
  may want to invert the input (255 − f). The paper does not discuss this.
- **Not included.** The paper chose the 16x16 block size by studying
  block-size variance and comparing against Otsu's method. That was a
  software study, not hardware, and it is not included.

## Cost and speed

At the default size the design holds about 98,000 flip-flops:

| Part | Flip-flops |
|---|---|
| Input line | 4,096 |
| Row delay chain | 73,728 |
| Mean units and thresholds | about 1,100 |
| Dilation row | 512 |
| Thinning line registers | 18,432 |
| Output buffers | 512 |

The combinational logic is:

- 34 carry-save trees with their 13-bit and 8-bit look-ahead adders;
- 512 eight-bit comparators;
- 6,144 thinning cells (a 256-entry constant function each);
- the OR network.

The critical path is the block-mean unit: a six-layer CSA tree, followed by a
13-bit look-ahead adder into a register.

The paper reports 79.4 MHz on a Virtex-II Pro and 6.84 ms per 512x512 image.
At 128 clocks per line, this RTL needs 65,536 clocks per frame, or 0.83 ms at
79.4 MHz, plus 42 lines of delay. The paper's 6.84 ms cannot be derived from
the architecture it describes, so it is not a target here.

## Parameters

- `fp_top #(WIDTH = 512, HEIGHT = 512)` sets the line width and frame height.
- `WIDTH` must be a multiple of 32, and at least 16.
- `HEIGHT` must be a multiple of 16.
- The number of mean units follows from `WIDTH`: (WIDTH − 16)/15 + 1.
- The block size, overlap, pixel width, bus width and the six iterations are
  fixed constants in `fp_pkg`. The mean unit is built for 16-pixel rows and a
  17-input adder.

## Verification and simulation

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The expected values come from
`fp_ref_pkg`, a frame-at-a-time software model that does not use the RTL's
structure:

- it sums blocks directly;
- it decides thinning by counting A and B;
- it works on whole images in arrays.

| Testbench | What it checks |
|---|---|
| `tb_cla` | 8-bit adder exhaustively; 13-bit adder with random and extreme operands |
| `tb_dadda_tree17` | 17-operand sum: random sets, walking bits, all 0 and all 255 |
| `tb_mvcu` | 60 blocks back to back with idle clocks; the mean equals ⌊Σ/256⌋ exactly one step after a block |
| `tb_line_loader` | 512-pixel lines with input gaps; the step comes one clock after the 128th word; contents and tags |
| `tb_binarizer` | 64-pixel lines (4 mean units), 3 frames; output equals the reference 18 steps later |
| `tb_dilation` | random rows; 2x2 OR with frame edges |
| `tb_tpc` | all 512 windows for both passes; 26 deleting patterns each |
| `tb_thin_superstage` | one iteration on random and blob images; 4-step delay |
| `tb_output_stage` | 16 consecutive words per line, bit order, frame markers, suppression of non-valid lines |
| `tb_fp_top` | whole pipeline, 64x32, two frames (see below) |
| `tb_fp_top_full` | the same test at the default 512x512 size, two frames |

`tb_fp_top` checks every output word and the following:

- one step per 16 clocks (the line time at this width);
- the 42-step delay;
- the frame markers.

It also counts thresholds latched, distinct thresholds, pixels set by
dilation, and pixels deleted by each pass. A mechanism that never acted
counts as a failure. The full-size run takes under a second of simulation.

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/fp_pkg.sv tb/fp_ref_pkg.sv tb/tb_fp_top_full.sv --top-module tb_fp_top_full
./obj_dir/Vtb_fp_top_full
```

Replace the last file and the top-module name to run another testbench. The
test image is synthetic: slanted stripes with a varying period, a brightness
gradient and noise. Its ridge widths are similar to those of a 500 dpi
fingerprint. No real fingerprint data is included.
