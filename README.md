# Neo: a 3D Gaussian Splatting renderer that reuses last frame's sort

A 3D Gaussian Splatting (3DGS) renderer draws a scene made of millions of
coloured, semi-transparent 3D Gaussians. For every frame it projects each
Gaussian onto the screen, lists the Gaussians that touch each 64x64-pixel tile,
sorts each tile's list by depth, and alpha-blends the list front to back into
the tile's pixels. On an embedded device the sort is the bottleneck. It is
repeated from scratch every frame, and each pass over the per-tile lists goes
through DRAM.

Neo's idea is that consecutive frames of a moving camera are nearly the same.
A tile's list from the last frame is already almost in depth order, and it
mostly holds the same Gaussians. So instead of sorting again, each tile keeps
its table from one frame to the next and repairs it in four steps:

1. **Reorder.** *Dynamic Partial Sorting* (DPS) sorts the old table in place,
   one 256-entry chunk at a time. Each chunk is read from DRAM and written back
   once.
2. **Insert.** Gaussians that have newly entered the tile are sorted
   separately and merged in.
3. **Delete.** Gaussians that have left the tile were flagged invalid during
   the last frame. They are dropped during that same merge, so the table never
   has to be shifted to close gaps.
4. **Update depths.** The depths used by the next frame's reorder are written
   back by the rasterizer, which already has them on chip.

This repository is a SystemVerilog model of the accelerator built around that
scheme. It has a Preprocessing Engine, a Sorting Engine of 16 cores, a
Rasterization Engine of 4 cores, and a memory arbiter in front of one DRAM
port. By default it is configured for 2560x1440 (QHD) output.

## Dynamic Partial Sorting: why the chunk boundaries alternate

Sorting only inside fixed chunks would trap an entry in its chunk forever. An
entry at position 10 that belongs at position 300 could never get past 255.
DPS therefore moves the chunk boundaries by half a chunk on every other frame
(C = chunk size, here 256):

| frame | chunks |
|---|---|
| odd  | [0,C), [C,2C), [2C,3C), ... |
| even | [0,C/2), [C/2,3C/2), [3C/2,5C/2), ... |

An entry can therefore move by up to half a chunk per frame across what was
a boundary the frame before. Over a few frames an out-of-place entry drifts to
its right position. As long as the camera moves smoothly, most entries move
only a little per frame, so the tables stay close to sorted. `dps_range_gen`
produces these ranges. `tb_dps_range_gen` replays the ten-entry, chunk-of-four
example of the original description step by step.

In the original description, the pseudocode starts even frames at an offset
of C/2 for a whole chunk. That would leave entries C/2..C-1 unsorted on even
frames. The boundary illustration and the prose describe the half chunk first.
The RTL follows the illustration.

A reordered table is only *approximately* sorted. That is the accepted cost of
the method, and the RTL makes no attempt to hide it. In the end-to-end test
about 10-13% of adjacent pairs are out of order in frames 2-4, while the first
frame (a full sort) has none. A rendered pixel blends its Gaussians in table
order, so small misorderings change pixel values slightly.

## Data in DRAM

All traffic goes through one 64-bit, word-addressed port (`mem_req_t` =
{we, addr, wdata} with valid/ready). Read data comes back in request order
and cannot be stalled. Regions, set by `neo_top` parameters:

| region | contents | per item |
|---|---|---|
| `GAUSS_BASE` | 3D Gaussians: mean, opacity, covariance, SH coefficients | 8 words |
| `FEAT_BASE` | feature table: 2D mean, conic, opacity, radius, depth, colour, tile rectangle | 8 words (5 used) |
| `TBL0_BASE`, `TBL1_BASE` | per-tile Gaussian tables, `TBL_CAP` entries per tile; the two alternate each frame | 1 word per entry |
| `INC_BASE` | per-tile incoming tables, `INC_CAP` entries per tile | 1 word per entry |
| `SCR_BASE` | scratch space for merging long incoming tables | 1 word per entry |
| `FB_BASE` | frame buffer, row-major | 1 word per pixel |

A table entry (`entry_t`) is {valid, depth[30:0] in Q15.16, id[31:0]}.
Sorting uses only the depth field. A pixel word is {T, R, G, B}: T is the
final transmittance in Q1.16 at bits 48:32, and the 8-bit colours are at bits
23:0. All field layouts are written out in `rtl/neo_pkg.sv`. The feature
region must be zero before the first frame, because word 4 (the previous tile
rectangle) is read back on every frame.

## One frame

`neo_top` runs a frame in three stages, one after another, for each `start`
pulse:

1. **Preprocessing** (`preprocessing_engine`, 4 lanes). Each lane takes a
   Gaussian id and reads its 3D record and the tile rectangle it had last
   frame. The lane's `projection_unit` does the usual 3DGS EWA projection:
   camera transform, near-plane cull at z < 0.2, Jacobian, 2D covariance plus
   0.3 px low-pass, conic by division, and a 3-sigma radius from the larger
   eigenvalue. At the same time its `color_unit` evaluates degree-1 spherical
   harmonics. The lane writes the feature record. Then its `duplication_unit`
   walks the new tile rectangle and emits an incoming entry for each tile the
   Gaussian touches now but did not touch last frame. A Gaussian still inside
   a tile is already in that tile's reused table, so it is not inserted again.
   One writer appends the entries to the per-tile incoming tables. Entries
   beyond `INC_CAP` are counted and dropped.
2. **Sorting** (`sorting_engine`, 16 `sorting_core`s). Each tile is one job,
   given to an idle core. A core:
   - runs DPS on the old table in place. Each chunk is loaded, its 16-entry
     sub-chunks are sorted by the `bitonic_sort_unit` (BSU), the sorted runs
     are merged pairwise by `msu_plus` (MSU+), and the chunk is written back;
   - sorts the incoming table the same way. If it is longer than one chunk,
     the sorted chunks are merged globally, pass by pass, through the scratch
     region;
   - merges the reordered table with the sorted incoming table into the other
     table region. The MSU+ invalid-bit filter is on, so entries flagged
     invalid disappear here. The new table length goes back to the frame
     controller.
3. **Rasterization** (`rasterization_engine`, 4 `rasterization_core`s). Each
   tile is one job; see the next section.

After rasterization, the two table regions swap roles and `frame_no`
advances.

## Inside a Rasterization Core

A 64x64 tile is split into 64 subtiles of 8x8 pixels. They are handled in 16
groups of four. The core works on its table in batches of up to `NB`
entries. For each batch it loads the entries, then loads each entry's
features into the feature buffer, then runs the groups as a two-stage
pipeline:

- In stage *s*, the four `intersection_test_unit`s (ITU) test one Gaussian per
  cycle against the four subtiles of group *s*. They write 4-bit rows into one
  bank of the bitmap buffer.
- In the same stage, the four `subtile_compute_unit`s (SCU) blend group *s-1*,
  using the bitmaps from the other bank. Each SCU walks the batch in depth
  order. A Gaussian whose bitmap bit is 0 costs one cycle. One that hits costs
  4 cycles: 64 pixels, 16 per cycle.

Only group 0 has to wait for its bitmaps. After that, the intersection tests
are hidden behind blending. A stage ends when both sides are done, so a stage
takes max(ITU, SCU) cycles.

The ITU test is a square of half-width `radius` around the Gaussian's integer
mean, checked against the subtile. The ITUs also chain a cumulative OR over
all subtiles of the tile. A Gaussian whose OR is still 0 at the end no longer
touches the tile.

When all groups of a batch are done, the batch is written back into the table
in place. Each entry gets the valid bit from the cumulative OR and the depth
from the feature buffer. This is steps 3 and 4 of the scheme. When all batches
are done, the 4096 pixels go to the frame buffer. Pixels outside the screen
are skipped.

Blending is standard 3DGS:

- q = a dx² + 2b dx dy + c dy², where (a, b, c) is the conic;
- alpha = min(0.99, opacity · exp(-q/2)); contributions with alpha below 1/255
  are skipped;
- a pixel stops taking contributions once its transmittance T would fall
  below 1e-4.

exp(-x) is computed as 2^(-x log2 e): a shift plus a 17-entry table with
linear interpolation, accurate to about 0.1%.

### Why the tables stay consistent

Three places decide whether a Gaussian "touches" a tile: the tile rectangle
from the projection, the duplication unit's old/new comparison, and the ITU's
cumulative OR. All three use the same test: the square of half-width
`radius`, clipped to the grid. As a result, after each frame the entries
marked valid in a tile's table are exactly the Gaussians whose footprint
touches the tile that frame. The end-to-end testbench checks this for every
tile and every frame.

## What is this design's own, and where it departs

The original description gives the block structure: the engines, the unit
counts, the 256-entry chunks and 16-entry BSU, the ITU/SCU pipelining, the
bitmap, feature and pixel buffers, and deferred depth and valid update. The
following were filled in here:

- Number formats throughout: Q16.16 positions and depths, Q8.24 conic, Q2.30
  rotation, Q4.12 SH coefficients.
- The memory map, the table capacities (8192 entries per tile) and the frame
  controller.
- The ITU footprint test. The membership test in duplication, which reuses
  the previous tile rectangle.
- SH degree 1 only. Full 3DGS uses degree 3.
- Sequential (iterative) dividers and square roots in preprocessing. A lane
  works through several divisions and a square root per Gaussian, one after
  another, at one result bit per cycle; for example, colour alone takes 119
  cycles. This part is sized for correctness, not for matched throughput.
- Round-robin arbitration everywhere, and dispatch to the lowest idle core.

Departures from the described hardware:

- **No double buffering in the sorting cores.** The original uses
  double-buffered I/O buffers to hide memory latency. Here a core has three
  256-entry banks and waits for its loads. Results are the same; it is slower.
- **Buffer sizes.** Sorting buffers total 96 KB (16 cores x 3 banks x 256 x
  8 B), against 64 KB in the original configuration table. The rasterization
  buffers total about 225 KB for four cores, against 200 KB.
- **Stages do not overlap.** Preprocessing, sorting and rasterization run one
  after another for the whole frame.
- **Fixed resolution.** The screen size is a parameter, not a run-time input.
  HD and FHD need `SCREEN_W`/`SCREEN_H` overridden.
- **Not modelled.** The DRAM (LPDDR4 in the original evaluation) and SRAM
  macros are not modelled. Memories are plain arrays, and `tb/tb_dram.sv` is
  a behavioural memory for simulation only.

## Files

`rtl/`: one module per file.

| module | role |
|---|---|
| `neo_pkg` | types (`entry_t`, `feat2d_t`, `camera_t`, jobs, `pix_t`) and layouts |
| `neo_top` | the three engines, memory arbiter and frame controller |
| `preprocessing_engine`, `preprocess_lane` | lanes and incoming-table writer |
| `projection_unit`, `color_unit`, `duplication_unit` | per-lane units |
| `seq_div`, `seq_sqrt` | iterative divider (W+1 cycles) and square root (W/2+1 cycles) |
| `sorting_engine`, `sorting_core` | 16 cores; DPS, incoming sort, merge |
| `dps_range_gen` | DPS chunk ranges |
| `bitonic_sort_unit` | 16-entry sorting network, 1-cycle latency |
| `msu_plus` | two-stream merge with invalid-bit filters |
| `rasterization_engine`, `rasterization_core` | 4 cores; subtile pipeline |
| `intersection_test_unit`, `subtile_compute_unit` | ITU and SCU |
| `mem_arbiter` | round-robin arbiter with in-order read routing |
| `sync_fifo` | show-ahead FIFO |

`tb/`: a self-checking testbench `tb_<module>.sv` per block, plus:

- `tb_dram.sv`: the DRAM model, with latency and random back-pressure;
- `tb_sort_ref_pkg.sv`: a sorting reference model;
- `tb_neo_top.sv`: the reduced end-to-end test;
- `tb_neo_full.sv`: the same test at full size.

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. Each
has a watchdog.

## Simulating

With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Irtl -Itb rtl/neo_pkg.sv \
        tb/tb_neo_top.sv --top-module tb_neo_top -Mdir obj -o sim
    obj/sim

Modules are found through `-Irtl`. `tb_sorting_core` and `tb_sorting_engine`
also need `tb/tb_sort_ref_pkg.sv` on the command line, before the testbench.

`tb_neo_top` uses a 256x128 screen, 4 sorting cores, 2 rasterization cores,
16-entry chunks and batches, and 160 Gaussians. It renders four frames while
the camera slides and turns. Each frame takes about 65k cycles and the whole
run about 15 s. Besides checking every table and every pixel against a
real-valued reference, it counts the following and fails if any count stays
at zero:

- DPS on odd frames and on even frames;
- insertion into reused tables;
- deletion of outgoing Gaussians;
- global merges;
- ITU/SCU overlap cycles;
- early pixel termination;
- culled Gaussians;
- DRAM stalls.

`tb_neo_full` instantiates `neo_top` with all defaults: QHD, 920 tiles, 16
sorting cores, 4 rasterization cores, 256-entry chunks. It renders one frame
of 400 Gaussians. It checks every tile's table and the pixels of every
seventh tile, and takes about 7.5 minutes of simulation after a build of about
a minute. It runs one frame, so it does not reach the reuse path; that path is
covered by `tb_neo_top`.

Testbench tolerances: fixed-point results are compared with floating-point
references. Transmittance must be within 0.01 and colours within 3 codes.
Pixels whose transmittance lands next to the 1e-4 stop threshold are not
compared, because the two models can stop one Gaussian apart there.

To change the configuration, override the `neo_top` parameters: `SCREEN_W`,
`SCREEN_H`, `NPRE`, `NSORT`, `NRAST`, `CHUNK` (the sort buffer size), `NB`
(the raster batch size) and the capacities. `TILE`/`SUBTILE` other than
64/8 have not been tested.
