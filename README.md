# Hydra: a tiled permeability-filter accelerator in SystemVerilog

Hydra filters video with the *permeability filter* (PF), an edge-aware
smoothing filter. The filter spreads information along image rows and
columns. How far it spreads depends on per-pixel *permeabilities* π: near 1
inside smooth regions and near 0 across edges. Its uses include HDR tone
mapping, disparity maps, and turning sparse optical-flow vectors into dense
ones.

Filtering a whole frame needs the whole frame on hand, because the X passes
and Y passes alternate. The accelerator avoids this by filtering small
overlapping tiles and blending them. Each tile stays in on-chip SRAM through
all of its iterations. Between neighbouring tiles only a 16-pixel strip is
exchanged with external memory.

This RTL builds the full datapath and control of such an accelerator:

- twelve single-cycle FP24 filter units;
- a conflict-free banked tile memory that is never moved or transposed;
- an input buffer;
- a merger that blends the tiles;
- a frame controller.

A complete 1280×720 frame (3354 tiles) simulates correctly and matches a
real-valued reference model.

## 1. The filter and its tiled form

For one line (a row in an X pass, a column in a Y pass) with input `A`,
current estimate `J` and permeability `π_p` between pixel p and p+1, one
iteration computes:

```
forward : F_{p+1} = π_p (F_p + J_p)          F̂_{p+1} = π_p (F̂_p + 1)
backward: B_p     = π_p (B_{p+1} + J_{p+1})  B̂_p     = π_p (B̂_{p+1} + 1)
output  : J'_p    = (F_p + B_p + J_p + λ(A_p − J_p)) / (F̂_p + B̂_p + 1)
```

- `J` starts as `A`.
- An *XY iteration* is one X pass over all rows followed by one Y pass over
  all columns.
- The design runs K = 4 XY iterations, which is 8 passes.
- λ is a run-time FP24 constant.

The frame is cut into **48×48 tiles with a stride of 16**. Each tile is three
16-pixel *blocks* wide and three blocks high, so every pixel away from the
border lies in 3×3 = 9 tiles. Each tile is filtered on its own. The results
are then blended with a separable linear weight: per axis, in units of 1/64,
the weight is:

| block of the tile | weight at position u = 0..15 in the block |
|---|---|
| 0 (leading)  | 2u + 1 |
| 1 (middle)   | 32 |
| 2 (trailing) | 31 − 2u |

The three tiles covering a pixel along one axis therefore always add up to
64/64 exactly. At the frame border, the border tile takes the share of the
neighbour that does not exist. The 2-D weight is `wy·wx/4096`, which is exact
in FP24.

Tiles are visited in a **snake order**: left to right along the first tile
row, one step down, right to left along the next row, and so on. A frame of
`tiles_x × tiles_y` tiles is `16(tiles_x+2) × 16(tiles_y+2)` pixels. For 720p
this is 78 × 43 = 3354 tiles.

## 2. Number format (FP24)

All data is 24-bit floating point: 1 sign bit, a 6-bit exponent (bias 31) and
a 17-bit fraction with a hidden one.

- An exponent field of 0 means zero. There are no denormals, infinities or
  NaNs.
- Results are rounded to nearest, ties to even.
- Underflow flushes to zero. Overflow saturates to the largest magnitude.
- Division by zero also saturates. It cannot happen in the filter, whose
  denominators are ≥ 1.

The adder (`fp24_add`), multiplier (`fp24_mul`) and divider (`fp24_div`) are
combinational, so each fits in one clock cycle. Rounding and packing are
shared in `fp24_pkg::fp_pack`. This matters for the filter: its recursions are
feedback loops, so a multi-cycle operator would leave the loop idle.

## 3. The filter unit: one ring, two lines

The recursion `F_{p+1} = π_p (F_p + J_p)` is a loop through one adder and one
multiplier. With a register after each, the loop is two cycles long. Each
filter unit (`filter_unit`) therefore works on **two lines interleaved**: the
even line on even cycles and the odd line on odd cycles. The adder and
multiplier are then busy every cycle. The F̂/B̂ recursion has its own adder
and multiplier alongside.

**Forward phase.** The unit walks both lines from position 0 to 47. It saves
F and F̂ in two 96×24 stores, which hold 48 positions × 2 lines.

**Backward phase.** The unit walks back from 47 to 0. It uses the same
operators, entered the other way round:

```
B_p = π_p · S_{p+1}      (multiplier first)
S_p = B_p + J_p          (then the adder)
```

S_p and Ŝ_p = B̂_p + 1 are exactly the backward terms the output needs.
Behind the ring are:

- one stage that forms the numerator `F + S + λ(A−J)` and the denominator
  `F̂ + Ŝ`;
- one stage for the divider.

Output J' appears **6 cycles** after a backward pixel is presented. Forward
pixels produce no output, so the divider is busy half of the time.

A forward pixel uses adder-then-multiplier and a backward pixel uses
multiplier-then-adder. At a phase switch, the first backward pixel would
therefore need the multiplier in the same cycle as the last forward pixel.
The sequencer inserts **one idle cycle at every forward↔backward switch**, and
an assertion in the unit checks this. One pass of a line pair thus takes
2·96 + 2 cycles.

Each FU covers four lines per pass: logical lines 2(f+12k) and 2(f+12k)+1,
for k = 0 and 1. So one pass takes 2·(2·96+2) = **388 cycles**, and the 8
passes of a tile take **3104 cycles**.

## 4. The tile memory: banking without transposition

The twelve FUs run in lockstep, all at the same position. In an X pass they
read twelve different rows at one column position. In a Y pass they read
twelve different columns at one row position. A single memory layout must
serve both directions without conflicts, and the tile must never be copied or
transposed.

**Banking rule.** The tile is divided into 2×2 pixel squares s(i, j), with
i = py/2 and j = px/2, giving a 24 × 24 grid of squares. Square s(i, j) is
stored in bank

```
bank = (i + j) mod 12,       word = 8·i + 4·[j ≥ 12] + 2·(py mod 2) + (px mod 2)
```

Each bank holds 192 words.

**Why this is conflict-free.** FU f's lines 2(f+12k) and 2(f+12k)+1 both lie
in square row (or column) f + 12k.

- At a fixed position, the twelve FUs therefore touch square rows k·12 + 0 …
  k·12 + 11 of one square column.
- These rows are twelve consecutive values of i at a fixed j, so they fall in
  twelve distinct banks.
- The same holds for the columns in a Y pass, by symmetry of i + j.

**Crossbars.** A read crossbar hands each FU its bank's word. A write
crossbar returns each result to the bank it came from. Two bank arrays share
the same mapping:

- J: 12 banks of 192×24;
- the input data {A, πX, πY}: 12 banks of 192×72.

**Fragmentation.** When the tile window moves by 16 pixels, two thirds of it
are still valid. The design does not shift data. Only the 16-pixel strip that
left the window is overwritten with the strip that enters, so the logical
tile lies in the memory rotated by whole blocks:

```
py = (ly + 16·offy) mod 48,   px = (lx + 16·offx) mod 48
```

The offsets change with each step, all mod 3:

| step  | offset change |
|-------|---------------|
| right | offx + 1      |
| left  | offx − 1      |
| down  | offy + 1      |

There are nine such *fragmentation states*. The rotation is by multiples of 16
pixels, which is 8 squares. The lines the FUs touch together are therefore
still twelve consecutive square rows modulo 24, and the banks stay distinct
in every state. `tile_addr_map` computes the physical position, bank and word
for a logical pixel and fragmentation state.

## 5. Strips, the input buffer and the burst

A *strip* is one block column or one block row of the physical tile: 16×48 =
768 pixels.

**Enumeration.** A strip is enumerated (`hydra_pkg::strip_pixel`) in 192
groups of four pixels. Each group is the same pixel offset in four adjacent
2×2 squares along the strip. Those four squares are in four consecutive
banks, so a group can always be written in one cycle.

**Input buffer** (`input_buffer`). It has four banks of 192×72 bits, exactly
one strip.

- For the tile being filled, it requests each pixel of the entering strip in
  group order, as frame coordinates (`in_x`, `in_y`).
- It writes pixel u of group g into buffer bank u at address g. The chip
  takes at most one word per cycle, so this fill runs in the background of
  the current tile's filtering.
- It then **bursts** one group per cycle into the tile's data memory, on four
  lanes with four different banks: 192 cycles per strip.

The entering strip of a step sits at the same physical place as the strip
that left the window:

| step  | physical block column or row |
|-------|------------------------------|
| right | column `offx` of the old tile |
| left  | column `(offx + 2) mod 3` |
| down  | row `offy` |

## 6. The merger: blending overlapping tiles

The merger keeps a **window of partial sums** the size of a tile. It is made
of twelve merge units, one per tile bank, each with a 192×24 store. The
window uses the same bank/word mapping and fragmentation state as the tile
memory.

**Accumulating.** During a tile's last Y pass, each FU result J(K) goes to the
merge unit of the bank it belongs to. The unit works in two steps:

1. Its weight generator computes the blending weight w, and the multiplier
   forms w·J, while the stored sum is read.
2. One cycle later the adder writes sum + w·J back.

Each pixel of a tile is accumulated once, so there is no read-after-write
hazard.

**Strip operations.** Between tiles, a *strip operation* walks the strip that
the step replaces. For each pixel it does two things:

- **Emit** the stored sum with its frame coordinates. The pixel is **final**
  (O) when no later tile in snake order covers it: its logical row is in the
  tile's top block, or the tile is in the last tile row. Otherwise it is
  **partially blended** (Ô) and goes to external memory.
- **Load** the value the entering pixel starts with for the next tile.
  - It reads back the pixel's Ô from external memory when an earlier tile row
    already contributed to it: the next tile is not in the first tile row and
    the pixel is in its top two block rows.
  - Otherwise it loads zero.

The stored sum is therefore always the total of all processed tiles that
cover the pixel. Once all nine tiles (fewer at the border) have added their
share, the pixel leaves as final. The frame's first tile zero-loads all three
block columns. The last tile emits all three.

**Overlap with filtering.** A strip operation takes at least 2 cycles per
pixel (read, then transfer), so at least 1536 cycles. It runs while the
cluster filters the next tile. The cluster is held before its last pass only
if the merger has not finished by then. That happens only when the output
side is slow: it never happened in the 720p run with an unthrottled memory.

## 7. Frame control and timing

`tile_scheduler` walks the snake. For the current and next tile it provides
the coordinates, fragmentation offsets and border flags, and it reports the
kind of step (right, left or down). The controller in `hydra_top` runs one
loop per tile:

1. Burst the entering strip into the cluster. For the frame's first tile this
   is all three strips.
2. Start filling the input buffer with the next tile's strip.
3. Filter the 8 passes, holding the last one while the merger is busy.
4. Start the merger's strip operation for the step just taken, or the final
   flush. Then advance the scheduler.

One tile costs 3104 filter cycles + 12 drain + 192 burst + a few control
cycles, which is **3314 cycles**. A 720p frame takes 11.12 M cycles:
**23.3 frames/s at 259 MHz** and 27 frames/s at 300 MHz.

## 8. Top-level interface (`hydra_top`)

| signal | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `start` | in | start a frame; `tiles_x`, `tiles_y` (8 bit) and `lambda` (FP24) are sampled |
| `busy`, `done` | out | frame running; one-cycle pulse at the end |
| `in_req`, `in_x`, `in_y` | out | request for the input word at frame pixel (x, y) |
| `in_valid`, `in_data[71:0]` | in | `{A, πX, πY}`, A in bits 71:48; taken when `in_valid` |
| `out_valid`, `out_x`, `out_y`, `out_final`, `out_data` | out | result word: final (1) or partially blended (0) |
| `out_ready` | in | result accepted |
| `pb_req`, `pb_x`, `pb_y` | out | read-back request for a partially blended word |
| `pb_valid`, `pb_data` | in | read-back answer |
| `stall_input`, `stall_merger` | out | controller waiting on input data / cluster held for the merger |

Permeability convention: `πX` at (x, y) is the permeability between (x, y)
and (x+1, y), and `πY` likewise towards (x, y+1).

The external memory has three jobs:

- it supplies the input words;
- it stores partially blended words and returns them when asked;
- it collects the final words.

The final words and the partially blended words for one pixel pass through
the same output port.

## 9. Where this design departs from the chip it follows

**Throughput.** The design is about 6% slower than the chip's reported 24.8
frames/s at 259 MHz. There are two causes:

- The chip bursts the entering strip *during* the last Y pass. Here the burst
  follows the last pass, because the last pass still reads the {A, π} words
  that the burst would overwrite. This costs 192 + 12 cycles per tile.
- There is one idle cycle per phase switch in each filter unit, so the
  adder/multiplier utilisation is 99.0% rather than 99.9%.

**Memories.** The memories are plain synchronous two-port arrays (`sram_2p`)
standing in for SRAM macros. Their total, 47.25 kB, equals the chip's:

- J: 6.75 kB;
- {A, π}: 20.25 kB;
- FU stores: 6.75 kB;
- input buffer: 6.75 kB;
- merger: 6.75 kB.

F and F̂ are kept in two 96×24 arrays per unit. A single 96×48 macro per unit
would match the chip's macro count.

**This design's own choices.** The following are not taken from the chip:

- the bank word order;
- the strip group order;
- the final/partial and read-back rules, which are derived from the tiling;
- the external handshakes and coordinate addressing;
- the 1-D weight profile. Its shape (linear, 16-pixel blocks) is the chip's,
  but the exact values here are chosen to sum to one.

**Resolution limits.** Frames must be multiples of 16 pixels in each
dimension, with at most 4096 pixels per side because coordinates are 12-bit.
Smaller frames are padded outside the chip.

**Channels.** There is one channel per run. Two-channel data such as an
optical-flow field takes two runs.

## 10. Verification

Every module has its own self-checking testbench in `tb/`. Each ends with a
line `TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_fp24_add/mul/div` | 25 000 random and corner operands each, bit-exact against an independent reference rounding of the real-valued result |
| `tb_sram_2p` | random reads and writes against a model, old data on a same-address read and write |
| `tb_tile_addr_map` | all 9 states × 2304 pixels: position, bank rule, one pixel per word, and twelve distinct banks for every lockstep FU access in X and Y passes |
| `tb_filter_unit` | line pairs against the real-valued recursion, the 6-cycle latency and the pass length |
| `tb_cluster_sequencer` | the complete step sequence of a tile, 3104 + drain cycles, and the hold before the last pass |
| `tb_filter_cluster` | two tiles in different fragmentation states: every value against the 8-pass real reference, bank/word of every result, and tile time |
| `tb_input_buffer` | two strips with throttled input: every request, every burst lane's bank/word/data, and burst length |
| `tb_weight_generator` | each weight against the profile, and that the weights of the covering tiles sum to exactly 1 over a 4×3-tile frame |
| `tb_merge_unit` | accumulation and transfer ports against a model |
| `tb_merger` | zero-load, accumulation, a right-step strip operation with read-back, and a final flush, with throttled output and read-back |
| `tb_tile_scheduler` | snake order, offsets, border flags and step kinds |
| `tb_hydra_top` | a 3×3-tile (80×80) frame with input, output and read-back all throttled at random (see below) |
| `tb_hydra_720p` | a full 1280×720 frame at full memory rate with all parameters at their defaults |

`tb_hydra_top` compares every pixel with the blended real-valued reference
(relative tolerance 2·10⁻³). It also counts every mechanism and fails if one
never occurs:

- steps in all three directions;
- all nine fragmentation states;
- input stalls and merger holds;
- partial outputs and read-backs.

`tb_hydra_720p` checks every one of the 921 600 pixels against the reference
and bounds the frame time. It takes about 90 s in Verilator and reports 3316
cycles per tile.

**Not verified.** The tolerance is loose compared with FP24 rounding, because
the reference is in double precision over 8 passes. The design has not been
compared with the chip's own results or images.

## 11. Simulating

The sources need Verilator 5 with `--timing`. Packages come first:

```
FILES="rtl/fp24_pkg.sv rtl/hydra_pkg.sv tb/tb_fp24_util.sv tb/tb_tpf_ref.sv \
  rtl/fp24_add.sv rtl/fp24_mul.sv rtl/fp24_div.sv rtl/sram_2p.sv rtl/tile_addr_map.sv \
  rtl/filter_unit.sv rtl/cluster_sequencer.sv rtl/filter_cluster.sv rtl/input_buffer.sv \
  rtl/weight_generator.sv rtl/merge_unit.sv rtl/merger.sv rtl/tile_scheduler.sv rtl/hydra_top.sv"
verilator --binary --timing --assert -Wno-fatal --top-module tb_hydra_top $FILES tb/tb_hydra_top.sv
./obj_dir/Vtb_hydra_top
```

Replace `tb_hydra_top` with any other testbench name to run it. The frame
size of the end-to-end test is set by `TX`/`TY` in the testbench. The design
itself has no size parameters on the top. Tile size (48), block (16),
bank count (12) and K (4) are constants in `hydra_pkg`; they are tied
together by the banking rule, which needs `TILE/2` square rows to be a
multiple of the FU count.

## 12. Module map

| module | role |
|---|---|
| `fp24_pkg`, `hydra_pkg` | number format, rounding; tile/strip constants, structs, bank mapping, strip enumeration |
| `fp24_add`, `fp24_mul`, `fp24_div` | single-cycle FP24 operators |
| `sram_2p` | two-port synchronous memory |
| `tile_addr_map` | logical pixel → physical position, bank, word |
| `filter_unit` | two-line interleaved PF datapath with forward stores |
| `cluster_sequencer` | pass / phase / position sequence for the twelve FUs |
| `filter_cluster` | 12 FUs, J and data banks, crossbars |
| `input_buffer` | strip collection and 4-lane burst |
| `weight_generator`, `merge_unit`, `merger` | blending and strip output/read-back |
| `tile_scheduler` | snake walk and fragmentation state |
| `hydra_top` | frame controller and top-level wiring |
