# A foveated Gaussian-splatting rasterizer in SystemVerilog

Gaze-tracked VR headsets only need full detail where the eye is looking.
This design is a hardware renderer for 3D Gaussian splatting that exploits
that fact. The scene is one point cloud that serves four quality levels
nested inside each other. Level 1 (the fovea) uses every point. Each
coarser level uses a subset of the points of the level above it. Every
point therefore carries a *quality bound* `m`: it is used at levels
`1..m` and nowhere else. It also carries four versions of its opacity and
its base colour, one for each level. Rendering a peripheral tile at level
3 or 4 touches far fewer Gaussians than rendering it at level 1, and one
sorted list per tile serves all levels.

The rasterizer is a conventional tile-based splatting pipeline:
projection, then per-tile depth sort, then front-to-back alpha blending.
Foveation adds three things to it:

- A **filter** that drops points whose quality bound is below the level of
  the region they fall in.
- A **blend** at the edge of every region, so that the seams between
  levels do not show.
- Two load-balancing measures, because per-tile work varies by three
  orders of magnitude between busy foveal tiles and sparse peripheral
  ones: **tile merging** and **incremental pipelining**.

The RTL covers everything after projection. The projection, culling and
SH-conversion units are outside this design. So are the DRAM and the
SRAM macros. The top module exposes their interfaces as plain ports.

## Data flow of one frame

```
 projected points                                   features by point id
      |                                                       |
  Fov filter -> line buffer 1 -> duplication unit             |
                                   |   (tile,depth,id)        |
                 tile merge unit <-+-> DRAM (arrival order)   |
                 stage 1: count per tile                      |
                 stage 2: walk, merge, prefix sums            |
                        |                                     |
                 binner: DRAM arrival order -> tile order     |
                        |                                     |
                 bank loader -> double buffer (2 x 4096)      |
                        |                                     |
                 hierarchical sorting unit                    |
                        | 16-entry depth-sorted sub-tiles     |
                 line buffer 2                                |
                        |                                     v
                 volume rendering core (16x16 pixel units, 2 levels)
                        | blend units, one pixel row per cycle
                     pixels
```

`metasapiens_accel` runs a frame in four phases:

1. **Projection.** Projected points stream in on `pt_*`.
   - The filter keeps a point if its rectangle of covered tiles is
     non-empty and on screen, and its bound `m` is at least the level `t`
     of the tile holding its centre.
   - Line buffer 1 decouples the filter from the duplication unit.
   - The duplication unit walks the point's tile rectangle and writes one
     64-bit entry per covered tile: tile, 16-bit depth, 24-bit point id.
     Entries go to memory from address 0 in arrival order.
   - Stage 1 of the tile merge unit counts the entries of each tile.
2. **Merge walk** (one tile per cycle). Stage 2 reads every tile's count
   in raster order and produces three things:
   - A running prefix sum, which is the tile's start in tile-ordered
     memory.
   - A merged-tile ID.
   - A descriptor each time a merged tile closes.
3. **Binning.** Each entry is copied from arrival order to
   `REGION_B + offset[tile]++`. This is a counting sort by tile: the
   coarse level of the hierarchical sort.
4. **Sort and render**, overlapped across merged tiles:
   - The bank loader fills one double-buffer bank with a merged tile
     while the sorting unit works on the other.
   - The sorter emits each tile's entries in depth order in 16-entry
     sub-tiles.
   - Line buffer 2 passes each sub-tile to the rendering core once it is
     complete.
   - The core writes 16 pixel rows per tile.

`done` pulses after the last tile's last row.

## Levels, eccentricity and the blend bands

The host supplies `cfg` (`fov_cfg_t` in `mts_pkg`):

- The gaze tile.
- For the three boundaries between the four regions:
  - a squared radius `rb2[k]`;
  - the start of a blend band `blo2[k]`;
  - the reciprocal band width `binv[k]`.

All distances are squared tile distances from the gaze tile. For a tile
at squared distance `d2`, `tile_level` computes:

```
level  = number of k with d2 >= rb2[k]                  (0..3, 0 = fovea)
blend  = level < 3 and d2 >= blo2[level]
weight = min(255, ((d2 - blo2[level]) * binv[level]) >> 16)
```

A band tile is therefore rendered at `level` and at `level+1`. The two
results are mixed as `(a*(256-w) + b*w) >> 8` per channel. The weight
rises from 0 at the inner edge of the band towards 1 at the region
boundary, so the image crosses over continuously into the coarser level.

The mapping from visual angle to tiles is left to the host. The
boundaries are meant to sit at 0°, 18°, 27° and 33° of eccentricity, and
the tile distance those angles correspond to depends on the display and
the eye relief. Because the measure is per tile, levels and weights are
constant over each 16×16 tile, not per pixel.

The level rule is applied twice:

- **Once per point, in the filter.** A point is dropped if its bound is
  below the level at its centre. This is the rule as stated for the
  algorithm: a point projected to a tile of level `t > m` takes no further
  part.
- **Once per covered tile, in the core.** A point that survived the filter
  still contributes to a tile only at levels `L <= m`. A large ellipse may
  reach into coarser regions, and there subsetting must still hold.

## Tile merging

Tiles are small, but a foveal tile may hold over a thousand Gaussians
while a peripheral tile holds a handful. Since sort and render are
pipelined per tile, a light tile behind a heavy one leaves the renderer
idle. The tile merge unit therefore groups consecutive light tiles (in
raster order) into *merged tiles*. The sorter and the bank loader handle
a merged tile as one unit of work.

Stage 2 keeps a running total `acc` for the open group. Before adding
tile `i`'s count `c`, it closes the group if `acc + c > beta` and the
group is not empty. A merged tile therefore holds at most `beta`
intersections, unless it is a single tile that exceeds `beta` by itself.

`beta` is an input. It should be at most `BANK_ENTRIES`. A merged tile
larger than a bank is clipped, and the clip is counted in
`st_bank_overflows`. Every tile keeps its own identity inside a merged
tile. The sorter still sorts and emits per tile, and the core still
renders per tile.

## Hierarchical sort and incremental pipelining

The sort has two levels:

1. **Bin by tile.** This is the counting sort above. It costs two memory
   passes and no comparisons.
2. **Sort within a tile, one chunk at a time.** For each tile, the
   sorting unit reads the tile's entries from the bank in one pass. It
   keeps the `CHUNK` (16) smallest keys greater than the last key emitted
   in a small insertion array. The key is `{depth, position}`, so ties
   keep arrival order. At the end of the pass it emits those 16 entries in
   order, then starts another pass.

A tile of `n` entries costs `n * ceil(n/16)` read cycles. In exchange,
the first 16 front-most points of a tile are available after a single
pass, and the core can start blending them right away. Front-to-back
blending only needs the points in order, never the whole list.

This is the incremental pipelining: line buffer 2 holds sub-tiles, not
tiles. The core starts on a tile while the sorter is still producing
that tile's later sub-tiles. `st_incremental_starts` counts the tiles
whose rendering began before their sort finished.

Each line buffer is a ring of row memories. A row is visible to the
reader once it is full (`ROW_LEN` words) or the writer marks its end.
Both buffers are sized to 1 KB:

- Line buffer 1: rows of one 106-bit point, 77 rows.
- Line buffer 2: rows of one 16 × 43-bit sub-tile, 11 rows.

A tile with no entries still produces one entry flagged `empty`, so the
core writes the tile's background pixels.

## The volume rendering core

The core is a 16×16 array of `vrc_pe` pixel units. For each sorted entry,
the core fetches the point's features by id. The fetch takes one cycle:

- 2D mean, in Q12.4 pixels.
- Conic `(a, b, c)`, in signed Q4.20.
- A cutoff `qbound` on the quadratic form.
- Four 8-bit opacities.
- Four 24-bit colours.

The core then broadcasts the point to all 256 units. Each unit does the
following:

```
dx, dy = pixel centre - mean
q      = a dx^2 + 2 b dx dy + c dy^2          (Gaussian sample)
skip if q > qbound                             (compare with Th)
alpha  = min(252/256, opacity[L] * exp(-q/2)); skip if alpha < 1/256
C     += T * alpha * rgb[L];  T *= (1 - alpha) (T in Q0.16, C in Q8.16)
stop updating once T < 7/65536
```

The exponential is `2^(-q * log2(e) / 2)`:

- `log2(e)` is the constant `5909/4096`.
- `2^-f` for the fractional part comes from a 17-entry table with linear
  interpolation. The table holds `round(65536 * 2^(-k/16))` for
  `k = 0..16`.
- The integer part is a shift.

Each unit holds two accumulator sets. Set A renders the tile's level `t`.
Set B renders level `t+1` on band tiles, reading the same sorted list in
the same pass. Set B is therefore the "store the second rendering until
blending" buffer. A point with bound `m` updates set A only if `t <= m`,
and set B only if `t+1 <= m`.

After the tile's last entry, 16 `blend_unit`s mix the two sets row by
row. Band tiles use the weight from `tile_level`; other tiles pass set A
through. The core outputs one row of 16 pixels per cycle. A tile of `n`
points takes about `n + 17` cycles, and the core accepts the next tile
when its output is done.

## Memory and ports of the top

- **Entries.** 64 bits each: `{8'b0, tile(16), depth(16), pid(24)}`.
  - Written in arrival order from word address 0.
  - Binned into tile order from `REGION_B` (default `32'h0100_0000`).
  - `mem_rd_data` must arrive one cycle after `mem_rd_en`.
- **Features.** `feat_rd_en`/`feat_rd_pid` to `feat_rd_data`, one cycle
  later. The layout is the `gauss_feat_t` struct. The view-dependent
  colour is expected to be already evaluated by the conversion units.
- **Projected points.** `pt_valid`/`pt_ready` with `pt_last`. The
  `proj_point_t` struct carries:
  - the point id;
  - the Q12.4 mean;
  - the depth;
  - the covered tile rectangle;
  - the quality bound.
- **Statistics.** The `st_*` outputs count each mechanism over the last
  frame:
  - points in and points dropped;
  - entries;
  - merged tiles, and those made of two or more tiles;
  - blend tiles;
  - incremental starts;
  - bank overflows;
  - line-buffer-full cycles;
  - frame cycles.

Default parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `TILES_X` × `TILES_Y` | 100 × 68 | screen in 16×16 tiles (1600×1088 pixels) |
| `BANK_ENTRIES` | 4096 | entries per double-buffer bank; 2 × 4096 × 64 bit = 64 KB |
| `CHUNK` | 16 | entries per sorted sub-tile |
| `LB_BITS` | 8192 | capacity of each line buffer (1 KB) |

The design has one sorting unit and a 16×16 pixel array. The eight
projection units of the full accelerator would sit in front of `pt_*`.

## Where this RTL departs from, or fills in, the published description

- **Filter rule.** The architecture text says a point passes when
  `t > m`, and the algorithm text says it is dropped when `t > m`. The
  RTL keeps points with `t <= m`, which is the only reading consistent
  with levels being nested subsets.
- **Tile-merge threshold.** Merging is described both as "while the sum
  is below β" and as "a merged tile forms once β is exceeded". The RTL
  closes a group *before* the tile that would exceed β.
- **Order of merging.** Raster order, merged in a separate walk after all
  points are counted, because a tile's count is only final then.
- **Sorting method.** The chunked selection sort and the bin-by-tile
  first level are this design's own. Only the name of the unit and its
  place in the pipeline are given.
- **Where entries live between projection and sorting.** In DRAM, in
  arrival order and then in binned order. This choice, and the whole
  memory layout, are this design's own.
- **Eccentricity.** Measured in squared tile distance from the gaze tile,
  per tile, with host-programmed boundaries and linear blend bands.
- **Pixel arithmetic.** The alpha clamp, the skip and stop thresholds,
  the cutoff test and all fixed-point formats follow common
  Gaussian-splatting practice. The published description gives only the
  order of operations.
- **Screen size.** The published description gives none. The default of
  100×68 tiles holds the largest frames of the datasets the design targets
  (about 78×52 tiles for the largest scenes).
- **Not built:**
  - the projection/culling/conversion units;
  - the DRAM controller;
  - SRAM macros (buffers are register arrays).

  The clock rate, area and power are not modelled.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if
something hangs. With Verilator 5, from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_metasapiens_accel \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/mts_pkg.sv tb/mts_ref_pkg.sv \
  tb/tb_metasapiens_accel.sv
./obj_dir/Vtb_metasapiens_accel
```

Replace the top module and the last file to run another testbench.
`tb/mts_ref_pkg.sv` holds the reference models shared by the testbenches:

- level and weight;
- floating-point Gaussian sample;
- fixed-point pixel step;
- blend.

| Testbench | What it checks |
|---|---|
| `tb_fov_filter` | keep/drop and clipping against a reference, random points around a random gaze, with back-pressure |
| `tb_line_buffer` | order, row boundaries, early row ends, full/empty behaviour with random stalls |
| `tb_duplication_unit` | exact entry sequence per point, one entry per cycle, with stalls |
| `tb_tile_merge_unit` | per-tile counts, prefix sums, merged-tile IDs and descriptors against a software walk, walk length |
| `tb_double_buffer` | bank independence, commit/release, refill while the other bank is kept, descriptors |
| `tb_hierarchical_sorting_unit` | per-tile depth order with stable ties, sub-tile boundaries, empty tiles, first sub-tile n + 3 cycles after commit |
| `tb_blend_unit` | random colours, weights and blend flags against the formula |
| `tb_volume_rendering_core` | every pixel of random tiles at every level, inside and outside blend bands, against the reference compositing; n + 17 cycles per tile |
| `tb_metasapiens_accel` | three frames end to end on an 8×6-tile screen with a small bank and 4-entry sub-tiles; every pixel and every statistic against a software model of the whole pipeline; fails if filtering, multi-tile merges, blending or incremental starts never happen |
| `tb_metasapiens_accel_full` | one frame with all parameters at their defaults (100×68 tiles, 8000 Gaussians crowded around the gaze); every pixel checked; about 1.5 M cycles |

The end-to-end testbenches share `tb/accel_tb_body.svh`. It contains:

- a behavioural memory for entries and features;
- a random scene generator;
- the reference pipeline: filter, duplicate, stable sort by tile and
  depth, and per-level rendering with blending.
