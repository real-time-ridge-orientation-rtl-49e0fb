# Pipelined ridge orientation estimator for fingerprint images

Most fingerprint matchers work on minutiae, the ridge endings and
bifurcations. Finding them, and enhancing the image before that, needs
the local ridge direction of each part of the image. This design computes
that direction in hardware for every 16 x 16 block of a 256 x 256 grey-level
image. It uses a pixel-based method that needs only additions, comparisons
and counters: no multiplications, divisions, square roots or trigonometry.

The method works in three steps:

1. **Pixel direction.** For a pixel `f(i,j)` and each of N = 16 quantised
   directions `d`, take n = 8 pixels along a short line starting next to
   `(i,j)` and form
   `S_d = sum_k |f(i,j) - f_d(i_k, j_k)|`.
   Along a ridge the grey level hardly changes, so the direction with the
   **least** `S_d` is the pixel direction (a 4-bit index).
2. **Block vote.** Each 16 x 16 block has 16 counters, one per direction.
   Every pixel of the block increments the counter of its direction.
3. **Block direction.** After all 256 pixels, the direction with the
   **largest** count is the block orientation. It is written, 4 bits per
   block, into a 256-entry orientation RAM.

The circuit is a four-stage pipeline. Its main cost is memory bandwidth:
every pixel needs 128 other pixels read from the image memory. So the
throughput depends on how many copies of the image are read in parallel,
and on whether the fetch overlaps with the arithmetic. The RTL covers all
four published combinations through two parameters. The default is the
configuration that was built on an FPGA: eight image copies and no overlap
bank. It takes 32 clocks per pixel, or 2,097,152 clocks for a frame.

This RTL was written from the published description of the architecture.
Where that description is incomplete, this design makes its own choices.
The section "What is published and what is chosen here" lists them.

## The sixteen directions and the offset table

The directions divide the half-turn into 16 sectors of 11.25 degrees.
Direction `d` is centred on `d * 11.25` degrees, measured from the +j axis
(columns, to the right) towards +i (rows, downwards). Direction 0 is
horizontal, 8 is vertical and 15 is 168.75 degrees. Every line starts at a
neighbour of `(i,j)` and runs into the half plane `i >= 0`: the same rows or
the rows below, up to 8 columns to either side.

The published description gives the pixel lists for only two directions.
Both use offsets `(di, dj)` for k = 1..8:

| direction | pixels k = 1..8 |
|---|---|
| 2  | (0,1) (1,2) (1,3) (2,4) (2,5) (3,6) (3,7) (4,8) |
| 10 | (1,0) (2,-1) (3,-1) (4,-2) (5,-2) (6,-3) (7,-3) (8,-4) |

This design extends them with one rule, `orient_pkg::offset_of`:

* Let `m` be the distance of `d` from the nearest axis direction
  (0, 8 or 16), so `m = 0..4`. Then `m/4` is `tan(m * 11.25 deg)` rounded
  to the nearest quarter: 0, 0.25, 0.5, 0.75, 1.
* Pixel `k` is `k` steps along the axis nearer the line (+j for d <= 4, +i
  for 5 <= d <= 12, -j for d >= 13) and `floor(k*m/4)` steps along the
  other axis. The sign of the second step follows the quadrant.

The rule gives exactly the two published lines. The table has 128 entries
(`t = 8d + k - 1`) and is computed at elaboration, not stored as a file.
The testbenches do not reuse the rule: they derive the offsets again from
`$sin`/`$cos`.

The reference pixel `(i,j)` itself is not one of the 128. It is read
through a second read port of image copy 0.

**Image edges.** The address adders are `COORD_W` bits wide (8 by default),
so coordinates wrap modulo 256. A line that leaves the image on one side
continues on the other. Pixels in the last 8 rows, and in the first and
last 8 columns, therefore see a few pixels from the opposite edge. The
reference model in the testbenches wraps in the same way.

## Arithmetic: AVD and the S_d calculation unit

**AVD** (`avd.sv`) forms `|a - b|` for two 8-bit pixels with a comparator,
two multiplexers and an 8-bit carry lookahead adder:
`larger + ~smaller + 1`. The carry out is dropped.

**SdCU** (`sdcu.sv`) adds the eight AVD outputs with a carry-save tree,
following the published drawing exactly. The bit ranges are the positions
each word occupies; carry words start at bit 1.

```
csa1: AVD0 AVD1 AVD2            -> s1[0-7]  c1[1-8]
csa2: AVD3 AVD4 AVD5            -> s2[0-7]  c2[1-8]
csa3: c1 s1 c2                  -> s3[0-8]  c3[1-9]
csa4: s2 AVD6 AVD7              -> s4[0-7]  c4[1-8]
csa5: s3 c4 s4                  -> s5[0-8]  c5[1-9]
csa6: c3 c5 s5                  -> s6[0-9]  c6[1-10]
10-bit CLA on bits 1..10, bit 0 = s6[0]   -> S_d, 11 bits (max 2040)
```

`cla_adder.sv` is a generic W-bit lookahead adder. Each carry is written as
the full generate/propagate expansion from the carry in. `csa.sv` is one
full adder per bit.

## Minimum, decoder, counters and Maximum

The **switch element** (`switch_elem.sv`) is a comparator plus a
multiplexer. It passes on the `{index, value}` pair with the smaller
value (Minimum) or the larger value (Maximum). On a tie, input `a` wins.
Both trees place the lower index on input `a`, so **the lowest direction
index wins every tie**. This matters in practice: in a flat image region,
all 16 sums are equal and the pixel is assigned direction 0.

* **Minimum** (`minimum_unit.sv`, built from `min_layer.sv`): 15 switches
  in layers of 8, 4, 2 and 1. Each carries a 15-bit `{4-bit index, 11-bit
  S_d}` word.
* **Decoder:** turns the winning index into 16 one-hot counter enables.
* **Counters** (in `stage3.sv`): sixteen 8-bit counters. A block has 256
  pixels, so one counter can reach 256, which does not fit in 8 bits. The
  counters therefore **saturate at 255**. The result stays exact: a counter
  at 255 leaves at most one pixel for all the others.
* **Maximum** (`maximum_unit.sv`): 15 switches over the counts. The indices
  are the input positions, and the last switch outputs the block direction.

## Pipeline and timing

```
           +---------+   +--------+   +--------+   +--------+
 image --> | stage 0 |-->|[bank]  |-->| stage 1|-R>| stage 2|-R>| stage 3 |--> orientation RAM
 copies    | fetch   |   |optional|   | 16 SdCU|   | 3 min  |   | counters|    (256 x 4 bits)
           | 128+1 px|   |129 x 8 |   | +1 min |   | layers |   | Maximum |
           +---------+   +--------+   | layer  |   | +dec.  |   | 9b/8b   |
                                      +--------+   +--------+   | counters|
                                   8 x 15 bits    16 bits      +---------+
```

The published circuit has two clocks:

* CLK1 steps the fetch counter.
* CLK2, the pipeline clock, advances the pixel coordinate and the later
  stages.

This RTL uses **one clock (CLK1)**. CLK2 becomes `tick`, an enable that is
high for one clock at the end of each pipeline period. All pipeline
registers, the ij generator and stage 3 update only on `tick`.

With `N_RAM` image copies, a fetch takes `STEPS = 128 / N_RAM` clocks,
one step per clock. In each step the N_RAM lanes read N_RAM pixels. With
8 copies, one step reads the 8 pixels of one direction.

| N_RAM | STAGE_REGS | pipeline period (clocks per pixel) | frame (256 x 256) |
|---|---|---|---|
| 1 | 0 | 256 (fetch 128, then stage 1 works 128) | 16.8 M clocks |
| 1 | 1 | 128 (fetch and stage 1 overlap) | 8.4 M clocks |
| **8** | **0** | **32** (fetch 16, stage 1 works 16) — default | **2.1 M clocks** |
| 8 | 1 | 16 | 1.05 M clocks |

**Without the extra bank (`STAGE_REGS = 0`):** the 128 fetch registers are
the inputs of stage 1. Loading stops for the second half of the period, and
in that time the stage 1 logic settles. Stage 1's result is captured at
`tick`.

**With the extra bank (`STAGE_REGS = 1`):** fetching never pauses. In the
first clock of each period (`ph0`), stage 0 holds the complete previous
pixel while it overwrites its first register group. At that moment the
bank copies it.

**Multicycle paths.** Stage 1 (sixteen SdCUs and one switch layer) has
`STEPS` or `STEPS - 1` clocks to settle. Stages 2 and 3 have a whole period.
A timing constraint for synthesis must declare these multicycle paths.
Otherwise the tool will try to close a CLK1 period through a whole SdCU.

**Latency.** A pixel fetched in period `p` is in the stage 1 register at
the end of `p`, in the stage 2 register at the end of `p+1`, and counted at
the end of `p+2`. With the bank, each step is one period later. This
matches the published reservation table: the stage 3 result appears three
pipeline clocks after the fetch.

**Block bookkeeping.** The 9-bit counter in stage 3 counts the pixels
taken in. When its bit 8 is set, at the next `tick`:

* the Maximum result is written at the 8-bit block address;
* the block address advances;
* the counters restart, already counting the first pixel of the next
  block.

Blocks therefore follow each other with no idle period. The frame ends
when the last block is written (`done`). Measured at the default settings:
65536 x 32 + 97 clocks from `start` to `done`.

**Scan order.** The ij generator issues pixels block by block: blocks in
raster order, rows within a block, j fastest. Internally it is one counter
`{block_row, block_col, row, col}`, and the block index equals the
orientation RAM address.

## Interface of `orient_est_top`

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (CLK1), asynchronous active-low reset |
| `img_we`, `img_waddr`, `img_wdata` | in | 1, 2*COORD_W, 8 | load the image; writes all N_RAM copies; address `{i, j}` |
| `start` | in | 1 | start a frame (ignored while busy) |
| `busy`, `done` | out | 1 | frame running; one-clock pulse when the last block is written |
| `ori_raddr`, `ori_rdata` | in/out | 2*(COORD_W-4), 4 | read block orientations, address `{block_row, block_col}`, asynchronous |

Parameters: `N_RAM` (8), `STAGE_REGS` (0) and `COORD_W` (8, an image of
2^COORD_W x 2^COORD_W pixels). `COORD_W` must be 5 or more, so that the
8-pixel lines fit and there is at least one 16 x 16 block per row. `N_RAM`
must divide 128.

To operate the design:

1. Reset it.
2. Write the image.
3. Pulse `start`.
4. Wait for `done`.
5. Read the 2^(2*(COORD_W-4)) results.

The image memories are arrays with asynchronous read, standing in for the
external static RAM chips of the original board. On an FPGA or ASIC they
would map to external memory or to block RAMs with a registered read. A
registered read would add one clock to every fetch step.

## What is published and what is chosen here

The following follow the published description:

* n = 8 and N = 16.
* The AVD structure.
* The SdCU carry-save tree with its bit ranges and the 10-bit final CLA.
* The 15-bit Minimum words and the 8-4-2-1 switch tree.
* The split of the Minimum tree between stages 1 and 2.
* The decoder, the sixteen 8-bit counters and the Maximum tree.
* The 9-bit block counter and 8-bit address counter.
* The 256 x 4-bit orientation RAM.
* 8-bit signed offsets and 8-bit address adders.
* Eight 64 KB image copies.
* The four speed configurations and their clocks per pixel.
* The offsets of directions 2 and 10.

The following are this design's own choices, where the description is
silent:

* The offsets of the other 14 directions (the rule above).
* How the reference pixel is read (a second read port).
* The scan order.
* Tie-breaking (lowest index wins).
* Counter saturation.
* Wrap-around at the image edges.
* The single clock with an enable in place of the CLK1/CLK2 pair.
* The synchronous restart in place of the drawn reset from the 9-bit
  counter.
* Counting valid pixels rather than raw pipeline clocks.
* The exact moment the optional bank copies.
* The host interface and reset.

Differences that remain:

* The published waveform starts its scan at (8,8). This design starts at
  (0,0) and covers every pixel, wrapping at the edges.
* The original was mapped to a Virtex-4 with 2343 flip-flops. A generic
  synthesis of this RTL at the defaults has about 1300 flip-flop bits:
  129 x 8 pixel registers plus pipeline and control. The two numbers are
  not directly comparable.
* The published accuracy figure (about 1.5 degrees against a gradient
  method on real fingerprints) was not reproduced. The tests check
  bit-exact agreement with a model of the same pixel-based method on
  synthetic ridge images.

## Files

`rtl/` (one module or package per file):

* `orient_pkg.sv`: sizes, types (`cand_t`, `offset_t`), offset rule.
* `cla_adder.sv`, `csa.sv`, `avd.sv`, `sdcu.sv`: arithmetic.
* `switch_elem.sv`, `min_layer.sv`, `minimum_unit.sv`, `maximum_unit.sv`:
  comparison trees.
* `offset_rom.sv`, `ij_generator.sv`, `image_ram.sv`, `stage0_fetch.sv`:
  fetch stage.
* `stage1.sv`, `stage2.sv`, `stage3.sv`, `orientation_ram.sv`: later
  stages.
* `orient_est_top.sv`: the whole estimator.

`tb/`:

* `orient_ref_pkg.sv`: reference model. It derives offsets from
  trigonometry, computes pixel and block directions, and generates the
  synthetic ridge images.
* One self-checking testbench per module, `<module>_tb.sv`.
* `orient_est_top_tb.sv`: a 64 x 64 image through all four speed
  configurations. It checks every block result and the clocks per pixel,
  and requires that counter saturation, tie decisions, edge wrap, fetch
  overlapping stage 3 and the bank copy each occur at least once.
* `orient_est_full_tb.sv`: one full 256 x 256 frame at the default
  parameters. It checks all 256 block results and the frame time. It runs
  in about 15 s.

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog if the design hangs. To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module orient_est_full_tb \
    -y rtl -y tb +libext+.sv rtl/orient_pkg.sv tb/orient_ref_pkg.sv \
    tb/orient_est_full_tb.sv -Mdir obj_full
obj_full/Vorient_est_full_tb
```

Replace the top module and the last file name to run any other testbench.
