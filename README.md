# Gaussian Blending Unit (GBU) — synthesizable RTL

3D Gaussian Splatting draws a scene as millions of semi-transparent 2D
ellipses ("Gaussians"). Each one is projected to the screen, sorted by depth,
and alpha-blended front to back into every pixel it covers. On an edge GPU the
blending step dominates the frame time. Two things hurt it:

- Work per pixel row is very uneven. SIMT lanes that shade a tile in lock-step
  spend most of their time idle.
- The same Gaussian is fetched again for every tile it touches.

The GBU is a small unit next to the GPU's processing clusters that takes over
only this blending step. It rests on three ideas.

1. **Rows, not pixels.** Each Gaussian is mapped into a space where its
   ellipse becomes a circle and one pixel step to the right is a step along one
   axis only. In that space the covered pixels of a row are one contiguous run,
   and its start can be found cheaply. Each pixel row of a tile gets its own
   small processing element (Row PE) with its own work queue. Each PE walks a
   Gaussian's run in its row, one fragment per cycle.
2. **A cache that knows the future.** Every Gaussian is binned to tiles before
   any tile is rendered, so the order in which the tile engine will ask for
   features is known in advance. Each list entry carries the distance, in
   tiles, to the next use of the same Gaussian. The cache evicts the line whose
   next use is furthest away.
3. **Chunks.** Gaussians are processed in depth-ordered chunks. One chunk is
   binned while the previous one is rendered.

The GPU still projects and sorts the Gaussians. The GBU starts from the
depth-sorted list of 2D Gaussians and returns the blended frame.

## Block structure

```
            2D Gaussians (depth order)          feature store, tile lists,
                     |                          frame buffer (L2 / DRAM)
                     v                                ^   ^   ^
  +------------------------------+   features / list entries
  | dnb_engine                   |----------------------+   |   |
  |  decomposition -> threshold  |                          |   |
  |  -> binning + reuse distance |  per-tile counts, 2 banks|   |
  +------------------------------+--------------+           |   |
                                                v           |   |
  +----------------+   features   +----------------------------------+
  | reuse_cache    |<------------>| tile_engine                      |
  | 1024 x 32 B    |   misses --->|  list reader -> Gaussian buffer  |
  +----------------+              |  -> row_gen_engine -> row select |
                                  |  -> 8 x row_pe (2 rows each)     |--> pixel
                                  +----------------------------------+    load/store
```

`gbu` (the top) holds the chunk controller and the performance counters. It
connects the three engines. Every memory stream leaves the top as its own
valid/ready port; the GPU's L2 and DRAM sit outside this design.

| File | Block |
|---|---|
| `rtl/gbu_pkg.sv` | types (`feature_t`, `gauss2d_t`, `row_task_t`, `pixel_t`), FP16/FP32 helpers |
| `rtl/gbu.sv` | top, chunk pipeline, counters |
| `rtl/dnb_engine.sv` | decomposition and binning, D&B list counts |
| `rtl/reuse_cache.sv` | reuse-distance cache |
| `rtl/tile_engine.sv` | row-centric tile engine |
| `rtl/row_gen_engine.sv` | covered rows and first fragment per row |
| `rtl/row_pe.sv` | Row PE: queue, threshold, exponential table, blending, pixel buffer |
| `rtl/row_buffer.sv` | Row Buffer FIFO |
| `rtl/threshold_unit.sv` | d² of a fragment and the truncation test |
| `rtl/exp_lut.sv` | exp(−d²/2) table |
| `rtl/color_unit.sv` | front-to-back blending of one fragment |

## The transform: turning an ellipse into a circle with a horizontal step

A projected Gaussian has a mean μ and an inverse covariance ("conic")
`[a b; b c]`. It weights a pixel P with o·exp(−d²/2), where
d² = (P−μ)ᵀ·conic·(P−μ).

The D&B engine factors the conic as ΘAᵀΘA with an upper-triangular ΘA:

```
m00 = sqrt(a)      m01 = b / m00      m11 = sqrt(c - m01^2)
ThetaA = [m00 m01; 0 m11]     ThetaB = -ThetaA * mu
P'' = ThetaA * P + ThetaB          d^2 = x''^2 + y''^2
```

Because ΘA is upper triangular, y'' = m11·Y + v1 depends only on the pixel
row. One step to the right adds m00 to x'' and nothing to y''. Along a row,
therefore:

- y''² is a constant;
- x'' is an arithmetic sequence;
- the set of pixels with d² < Th is one contiguous run (the disc is convex).

The same property could be reached with an eigen-decomposition followed by a
rotation. The triangular factor gets there directly with two square roots and
one division, and it gives the same d² for every pixel.

**Threshold.** A fragment counts only if its alpha o·exp(−d²/2) is at least
1/255, the cut-off of the usual software renderer. That gives a per-Gaussian
threshold on d²:

```
Th = 2 ln(255 o)
```

A Gaussian with Th ≤ 0 cannot reach any pixel. It is dropped during binning
and counted as culled. ln(o) is computed as E·ln 2 + ln(1+f), with a 32-entry
table over the top five fraction bits of the FP16 opacity.

## Finding the rows and the first fragments (`row_gen_engine`)

This is the part that makes the Row PEs efficient. Work for one Gaussian on
one 16×16 tile goes through three steps.

1. **Row test.** y''² is formed for all 16 rows at once. Every row with
   y''² ≥ Th is skipped, since no pixel in it can be inside. The remaining
   rows are walked from the top.
2. **Leftmost pixel.** x'' of the tile's leftmost pixel in the row is
   computed. If d² < Th there, it is the first fragment.
3. **Direction test or search.** If the leftmost pixel is outside and x'' has
   the same sign as the step m00, the row moves away from the centre. Nothing
   in the row can be inside, and the row is dropped. Otherwise a binary
   search over the 16 columns finds the first inside column. The predicate it
   searches is "outside and still left of the centre". That predicate is true
   up to the first covered column and false from there on, so 4 steps always
   suffice. If it finds no inside column, the row is dropped.

For each surviving row, a `row_task_t` is sent to the Row PE that owns the
row. It holds:

- the first column;
- x'' at that column;
- the step m00;
- y''²;
- Th, opacity and colour.

**Precision.** Steps 1–3 run in FP32, because m00·X + v0 mixes absolute
screen coordinates of a thousand pixels or more. In FP16 that sum would
cancel down to a few bits. The task values are rounded to FP16 for the Row
PEs.

**Timing.**

- 1 cycle to accept the Gaussian;
- 1 cycle for the row test of all 16 rows;
- for each remaining row, 1 cycle for the leftmost test, plus 1 per search
  step, plus 1 to hand over the task.

`done` pulses after the last task of the Gaussian has been handed over.

## Row PEs: one fragment per cycle, pixels stay put (`row_pe`)

The tile engine has 8 Row PEs. Tile row r belongs to PE r/2, so each PE owns
2 rows of 16 pixels. Each PE contains:

- a **Row Buffer** (`row_buffer`, 8-deep FIFO of row tasks). When it is full,
  Row Generation stalls;
- a **threshold unit** (`threshold_unit`), which computes
  x''ₖ = x''₀ + k·m00 and d² = x''ₖ² + y''². It multiplies by the step count
  instead of adding repeatedly, so rounding does not build up along the row;
- an **exponential table** (`exp_lut`): 512 bins over d² ∈ [0,16), each
  holding exp(−d²/2) at the bin centre. The table is computed at elaboration
  by a constant function. Th never exceeds 11.1, so real inputs stay in range;
- a **colour unit** (`color_unit`), which computes α = min(o·G, 0.99),
  C += T·α·c and T *= (1−α), all in FP16;
- the **Row Pixel Buffer**: colour and transmittance T of its 2×16 pixels.
  They stay in the PE for the whole tile.

A task walks right from its first column, shading one fragment per cycle. It
ends at the first fragment outside Th, or at the tile edge. A single task with
n inside fragments takes n cycles, plus one if it ends on an outside fragment,
plus one cycle through the Row Buffer.

**The first fragment of a task never ends the task.** Row Generation
found that fragment inside in FP32. The FP16 re-test in the PE can disagree
with it right at the edge of the ellipse. If a disagreement there ended the
task, the rest of the run would be lost: a whole visible span. So the PE
blends or skips the first fragment as its own test decides, and only a later
outside fragment stops the walk.

Rows keep depth order without any reordering. Each row's tasks reach its PE
in the order the Gaussians are handed to Row Generation, which is depth order.
Different rows may run ahead of each other freely. That independence is the
point of the design.

## Tile engine flow (`tile_engine`)

Per pass (one chunk), the tiles are visited in serpentine order. Even tile
rows go left to right and odd tile rows right to left, so the traversal index
is t = ty·TX + (ty odd ? TX−1−tx : tx). The D&B engine uses the same order
when it computes reuse distances.

For each tile:

1. Set the pixel buffers to C = 0, T = 1 for the first chunk of a frame.
   For later chunks, load them from the frame buffer, one pixel per cycle.
2. Read the tile's entry count from the D&B engine. Reading it also clears
   it, so the bank is empty for its next chunk.
3. For each entry {id, reuse distance}:
   - read the entry from the list memory;
   - look the feature up in the reuse cache;
   - place it in a one-entry Gaussian buffer.

   Row Generation works on Gaussian i while Gaussian i+1 is being fetched.
4. When all Row PEs have drained, write the 256 pixels back. Then pulse the
   cache's tile counter.

At the start of each pass, the cache is flushed.

## Reuse-distance cache (`reuse_cache`)

The cache is fully associative, with 1024 lines of 32 B each, i.e. 32 KB. A
240-bit feature record sits in a 32-byte line. Each line holds:

- the tag (Gaussian id);
- the feature;
- an RD field: the absolute tile number of the line's next use, i.e. reuse
  distance + global tile counter.

On a lookup:

- **Hit.** The RD field is refreshed with the new entry's distance plus the
  counter. The feature is returned the next cycle.
- **Miss.** The victim is the first invalid line. If there is none, it is the
  line whose remaining distance (RD − counter) is largest. Lines never used
  again (RD_NEVER = 0xFFFF) go first, and ties go to the highest index. The
  feature is read from memory, installed with RD = distance + counter, and
  returned.

This is Belady's optimal replacement, made possible because the future
accesses are known. Tags and RD fields are registers searched in parallel;
the feature array is a plain memory. One lookup is in flight at a time.
`flush` clears all lines and the counter, because reuse distances are
computed per chunk.

## Decomposition and binning (`dnb_engine`)

For each 2D Gaussian, in depth order, the engine:

1. computes ΘA, ΘB and Th, or culls the Gaussian;
2. writes the feature record to the feature store through `fw_*`;
3. visits every tile of the exact bounding box of the truncation ellipse, in
   traversal order. The half extents are √Th·√(1+(m01/m11)²)/m00 in x and
   √Th/m11 in y, and the box is clamped to the frame;
4. appends the entry {id, reuse distance} to each tile's list through `bw_*`.

The reuse distance is the number of tiles from this tile to the next tile
of the same Gaussian, or RD_NEVER for its last tile. It is found with a
one-entry look-ahead.

The engine keeps the per-tile entry counts for two banks (2 × MAX_TILES
counters of log2(CHUNK)+1 bits). The entries themselves live in memory at
(bank, tile, slot). After reset, the counts are cleared one per cycle while
`ready` is low.

The latency is 6 cycles, plus the feature write, plus one cycle per binned
tile.

The box test is conservative. A tile in the box that the ellipse misses is
rejected later by Row Generation: it costs cycles, not correctness. A
Gaussian lying wholly off-frame is binned to the nearest border tiles for the
same reason.

## Chunk pipeline (`gbu`)

The frame's Gaussians are split into chunks of CHUNK = 256 in depth order.
Chunk k uses bank k mod 2.

- The D&B engine may start chunk k once the tile engine has finished chunk
  k−2, which frees that bank.
- The tile engine starts chunk k once it has been binned.

So binning chunk k+1 overlaps rendering chunk k. The `pc_overlap` counter
counts those cycles.

A pixel's state passes from one chunk to the next through the frame buffer:
each pass stores RGB and T, and the next pass loads them. Only the final pass
leaves the finished image. The driver-level pipeline (GPU frame n+1 alongside
GBU frame n, via a DRAM double buffer) needs nothing from the hardware beyond
`start`/`busy`.

## Interfaces of the top

Host side:

- `start` with `tiles_x`, `tiles_y` (frame size in 16-pixel tiles, 8 bits
  each) and `num_gauss`;
- `busy`, high while a frame is in progress.

Memory streams: valid/ready requests, valid-only responses, one outstanding
request per stream.

| Port group | Purpose |
|---|---|
| `g2d_*` | read the idx-th 2D Gaussian in depth order (`gauss2d_t`: mean, conic, colour, opacity) |
| `fw_*` / `fr_*` | write / read feature records (`feature_t`, 240 bits) by Gaussian id |
| `bw_*` / `br_*` | write / read list entries at (bank, tile, slot) |
| `pl_*` / `ps_*` | load / store pixel state (`pixel_t`: FP16 RGB and T) at (x, y) |

Performance counters are 32 bits each and cleared on `start`:

- `pc_hits`, `pc_misses`
- `pc_frags`
- `pc_row_stalls`
- `pc_overlap`
- `pc_rows_skipped`, `pc_searches`, `pc_row_away`
- `pc_culled`
- `pc_gauss_in`, `pc_gauss_done`

The output is RGB premultiplied by coverage, together with the final
transmittance T. Compositing over a background is C + T·background.

## Sizes and defaults

| Parameter | Default | Origin |
|---|---|---|
| `N_PE` | 8 Row PEs × 2 rows | evaluated configuration |
| tile | 16 × 16 (package constant) | evaluated configuration |
| `CACHE_LINES` | 1024 (32 KB) | evaluated configuration, 32-byte line assumed |
| `MAX_TILES` | 5440 = 85 × 64 (1352 × 1014 pixels) | largest main-evaluation resolution |
| `CHUNK` | 256 | own choice |
| `FIFO_DEPTH` | 8 | own choice |
| `LUT_ENTRIES` | 512 | own choice |
| `TAG_W` | 24 (16.7 M Gaussians) | own choice |

All evaluated resolutions from 676×507 up to 1352×1014 fit the defaults.
2704×2028 needs 169 × 127 = 21463 tiles and therefore `MAX_TILES` ≥ 21463.

Rough on-chip storage:

- cache: 32 KB data, plus about 5 KB of tags and RD fields;
- D&B counts: about 12 KB;
- pixel buffers: 2 KB;
- Row Buffers: about 1 KB.

## Number formats

- FP16 for colour, opacity, Th, the Row PE datapath and the pixel state.
- FP32 for ΘA, ΘB and the 2D Gaussian's mean and conic.

All arithmetic goes through one unpacked format (`uf_t`, 24-bit mantissa) in
`gbu_pkg`. Results are rounded once on packing: round-half-up for FP16,
truncation for FP32.

- Subnormals flush to zero.
- Overflow saturates.
- There is no NaN or infinity handling; the datapath cannot produce them from
  valid input.

The FP16/FP32 split is this design's choice.

## Where this RTL departs from the original description

- **Factorisation.** ΘA comes from a triangular factorisation of the conic,
  not from an eigen-decomposition plus rotation. d² is identical.
- **Direction test.** The original text says the same-sign test rules out the
  whole tile. It only rules out the row that was tested, so only that row is
  dropped.
- **Binning.** Binning uses the ellipse's bounding box, not a per-tile row
  test.
- **Alpha clamp and cut-off.** α is clamped at 0.99 and fragments below
  1/255 are cut, following the common software renderer. Neither is stated
  in the original description.
- **Cache size.** The cache is 32 KB. One figure caption mentions 64 KB;
  that size is `CACHE_LINES = 2048`.
- **Not fixed by the original description.** These are this design's choices:
  - chunk size;
  - FIFO depth and table size;
  - tile traversal order;
  - memory port protocol;
  - pixel reload between chunks;
  - cache associativity and tie rules;
  - all cycle timings.
- **Outside the design.** The GPU, its L2/DRAM and the driver API are not
  part of this RTL.

## Simulation

Each block has a self-checking testbench in `tb/`. They print
`TB_RESULT checks=N failures=M`, have a watchdog, and draw stimulus from
`$urandom`. The reference models use real arithmetic.

| Testbench | What it checks |
|---|---|
| `exp_lut_tb`, `threshold_unit_tb`, `color_unit_tb` | arithmetic against `$exp` and real math |
| `row_buffer_tb` | FIFO order, full/empty, back-pressure |
| `row_pe_tb` | blended pixels against a model, cycles per task |
| `row_gen_engine_tb` | one task per covered row at the first covered column; all three skip paths occur |
| `reuse_cache_tb` | hit/miss sequence against a model of the replacement policy (8 lines), data, fills |
| `dnb_engine_tb` | transform, threshold, culling, list contents and reuse distances |
| `tile_engine_tb` | two chunks over 3 × 2 tiles against a reference renderer |
| `gbu_tb` | whole frame at reduced sizes, with every mechanism counted and required to occur |
| `gbu_full_tb` | whole frame with every parameter at its default, 8 × 6 tiles, two chunks |

`gbu_tb` uses 4 PEs, 2-deep FIFOs, 8 cache lines and 16-Gaussian chunks. At
those sizes the following all occur:

- stalls and evictions;
- several chunks;
- hits and misses;
- row skips, sign drops and searches;
- culled Gaussians;
- overlap of binning with rendering.

Run a testbench with plain Verilator (5.x). For example:

```
verilator --binary --timing -Wno-fatal rtl/gbu_pkg.sv -y rtl tb/gbu_tb.sv --top-module gbu_tb
./obj_dir/Vgbu_tb
```

Replace `gbu_tb` with any other testbench name. `gbu_full_tb` builds and runs
in well under a minute.

The blended images match the real-valued reference within an absolute
tolerance of 0.04–0.05 on colour and T, which lie in [0,1]. The remaining error comes from FP16
accumulation, the table's bin width, and fragments whose d² lies within
rounding of Th.
