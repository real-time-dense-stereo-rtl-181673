# ELAS stereo matching on an FPGA: streaming accelerators in SystemVerilog

ELAS ("Efficient Large-Scale Stereo") computes a dense disparity map from a
rectified stereo pair. It does not search the full disparity range at every
pixel. First it finds a sparse set of **support points**: pixels whose best
match is clearly better than every other candidate. A triangle mesh through
these points gives a piecewise-planar estimate of the scene. The dense pass
then searches each pixel only among a few disparities, namely those suggested
by that plane and by the support points nearby.

On a CPU-plus-FPGA system-on-chip, the work divides naturally:

| step | character | where it runs |
|---|---|---|
| support point extraction | same arithmetic at every pixel, local window | FPGA, this RTL |
| support point filtering | local window, streaming | FPGA, this RTL |
| Delaunay triangulation, remapping the mesh to one prior disparity per pixel | sequential, data-dependent | processor |
| pooling support points into per-cell *grid vectors*, one-hot encoding them | one value at a time | processor |
| dense matching | same arithmetic at every pixel, local window | FPGA, this RTL |

This repository contains the three FPGA accelerators, a top level that
wires them together into one accelerator set, and a system top that holds
two such sets side by side, so that two processor cores can each work on
their own frame. The processor side, the DMA engines and the memory are
not included. Their data crosses the top level's ports as plain streams.

Every accelerator consumes **one pixel per clock** in raster order. It stores
only a few image rows, and it emits one result per pixel at the same rate,
after a fixed latency. A frame of `IMG_W x IMG_H` pixels therefore takes
`IMG_W*IMG_H` clocks plus a few tens of clocks of latency. This holds whatever
the window sizes, the disparity range or the number of support points.

## Block diagram

```
 pass 1                                                           to memory
 left,right ──> support_extraction ───────────> support_filter ──> sparse support map
               (census cost volume,             (consistency,
                min/second-min tree,             backward-only redundancy)
                ambiguity test)

 pass 2                                                            to memory
 left,right,prior ──> dense_matching ─────────────────────────────> dense disparity map
 grid vectors ──────> (grid-vector RAM, census cost volume,
                       candidate mask, min tree)
```

Module hierarchy (`rtl/`):

```
elas_fpga_multi                  (NUM_SYS = 2 accelerator sets)
└── elas_fpga_top                (one set)
    ├── support_extraction
    │   ├── census_cost_volume
    │   │   ├── line_window_buffer   (x2, left and right)
    │   │   └── census_transform     (x2)
    │   ├── min2_tree
    │   └── ambiguity_test
    ├── support_filter
    │   └── line_window_buffer
    └── dense_matching
        ├── census_cost_volume       (same structure as above)
        ├── line_window_buffer       (delays the prior stream to the window centre)
        └── min2_tree
elas_pkg                          (pixel and disparity types)
```

## Streams and their alignment

All streams use one signal, `valid`, and have no back-pressure. A beat is
accepted whenever `valid` is high. Idle clocks between beats are allowed. An
optional `sof` flag marks pixel (0,0) of a frame; without it, the position
wraps after `IMG_W*IMG_H` beats. A disparity travels as `disp_t =
{valid, d[7:0]}`. `valid = 0` means "no disparity here".

The windows are centred, so the result for a pixel can only be formed once
the pixels below and to the right of it have arrived. Each block therefore
emits, for input beat `(x, y)`, the result of pixel `(x-R, y-R)`:

| path | output beat `(x, y)` holds pixel | latency (clocks) | with defaults |
|---|---|---|---|
| `support_extraction` | `(x-RS, y-RS)`, `RS = (W_SUPPORT-1)/2` | `6 + ceil(log2 D)` | 14 |
| `support_filter` | `(x-F, y-F)` of its input, `F = (FILTER_WIN-1)/2` | 3 | 3 |
| pass 1 at the top, `sp_out_*` | `(x-RS-F, y-RS-F)` | `9 + ceil(log2 D)` | 17 |
| pass 2 at the top, `dm_out_*` | `(x-RD, y-RD)`, `RD = (W_DENSE-1)/2` | `6 + ceil(log2 D)` | 14 |

Output beats whose pixel would lie at a negative position, or whose window
does not fit in the frame, carry `valid = 0`. The consumer, i.e. the address
generator of the DMA that writes the map, accounts for the constant offset.
Pixels in the last `R` columns and rows never get a window of their own, so
they get no result. The two passes share no state. Pass 2 of one frame may
run while pass 1 of the next frame is in flight.

## Getting whole windows at one pixel per clock

`line_window_buffer` is the storage scheme behind every window operation
here. A `W x W` window needs `W-1` previous rows. These rows sit in a memory
of `IMG_W` words, each word holding the `W-1` older pixels of one column. On
every beat, the word at the current column `x` is read. Its oldest pixel falls
off the top, the others move up one row, the new pixel is appended at the
bottom, and the word is written back to the same address. That is one read
and one write per clock, which is what a block RAM provides. The column read
out, together with the new pixel, becomes the new right-hand column of a
`W x W` register window, while the other window columns move one place to the
left. The whole window is thus present in registers on every clock, and no
extra cycles are spent fetching data.

Window positions that fall outside the frame (above row 0, or left of column
0 and wrapping from the previous row) hold stale data. Every user masks them
with the frame coordinates that the buffer reports.

## Census matching and the feature buffer

Matching uses the census transform of the full window. Bit `r*W+c` of a
pixel's descriptor is 1 when `win[r][c]` is darker than the centre pixel. All
`W*W` positions contribute, so a 9 x 9 window gives 81 bits and a 5 x 5 window
gives 25 bits. The cost of disparity `d` at left pixel `(u, v)` is the Hamming
distance between the left descriptor at `(u, v)` and the right descriptor at
`(u-d, v)`.

A descriptor depends only on its own image, so it is computed once per pixel
and reused for all disparities. `census_cost_volume` keeps the right-image
descriptors of the last `D` window centres in a shift register, the *feature
buffer*. In the clock after the left descriptor of `(u, v)` is formed, the
feature buffer holds exactly the `D` right descriptors it must be compared
with. All `D` Hamming distances are produced in parallel. A disparity is
masked out when its right window would reach past the left image edge
(`u - d < R`). The alternative, SAD matching, would need all `D` window
differences recomputed at every pixel, plus a buffer of column sums.

## Support points: best and second-best match

`min2_tree` reduces the `D` masked costs in a binary tree, with one register
level per tree level (8 levels for `D = 256`). Each node carries the best
cost `m1`, its disparity, and the runner-up `m2`. When two nodes merge, the
winner keeps its `m1` and index, and its `m2` becomes the smaller of its own
`m2` and the loser's `m1`. A tie goes to the lower disparity. A minimum shared
by two disparities therefore gives `m2 = m1`. A single candidate leaves `m2`
at all ones.

`ambiguity_test` keeps the match if `m1 <= T(m2)`, where
`T(m2) = m2/2 + m2/4 + m2/8 + m2/32 = 0.90625*m2`. This replaces the original
ratio test `m1/m2 <= 0.9` with shifts and adds, so no multiplier is needed.
Each shift truncates. A pixel with fewer than two evaluable disparities gives
no support point. Every pixel is a candidate; the original CPU code only
looks at a sparse grid of candidates.

## Filtering the support points

`support_filter` sits directly behind the extractor and works on the sparse
map in two steps.

**Consistency.** Its own `line_window_buffer` forms a `FW x FW` window
(11 x 11 by default) around each point. The point survives if at least
`INCON_MIN` (5) valid points of the window, itself included, lie within
`INCON_THRESH` (5) disparities of it.

**Redundancy, looking only backwards.** Flat surfaces produce long runs of
support points with the same disparity. They add nothing to the mesh except
triangles. The original algorithm drops a point when identical values exist
on *both* sides of it, in its row or in its column. A streaming design knows
only the past, and applying the rule with past values alone has a trap. If
each point is compared with the raw values before it, every point of a run
sees an identical predecessor, and the whole run disappears except its first
point. This design compares each point only with earlier points that
*survived* the test. A point is removed when one of the `REDUN_DIST` (5)
previous positions in its row, or in its column, holds a surviving point
within `REDUN_THRESH` (1) disparities. In a run of equal values, the first
point survives and the next five are removed. The sixth no longer sees a
survivor within reach, so it survives, and so on. The run thins to one point
every `REDUN_DIST+1` pixels instead of vanishing.

The row history is a shift register of the last `REDUN_DIST` decisions. The
column history is a memory of `IMG_W` words, each holding the last
`REDUN_DIST` decisions of one column. The word is read and rewritten at `x`
on every beat, like the line buffers.

## Dense matching

The candidate set of pixel `(u, v)` is the union of two sets:

* the **grid vector** of the `GRID x GRID` cell (20 x 20 by default) that
  contains the pixel. This is a `D`-bit one-hot set of the disparities of the
  support points in that cell, widened by ±1 by the processor when it builds
  the set;
* the **prior band**: disparities within ±`PRIOR_RADIUS` (1) of the pixel's
  prior disparity, i.e. the value of the triangulated plane at that pixel.
  This applies only when the pixel has a prior.

The band is then limited to disparities whose right window lies inside the
frame. The output is the candidate with the smallest census cost, ties going
to the smaller disparity. A pixel with no candidate gets `valid = 0`.

The grid vectors of a whole frame (`ceil(IMG_H/GRID) * ceil(IMG_W/GRID)`
words of `D` bits, 1197 x 256 bits by default) are written through
`gv_we/gv_addr/gv_data` before the frame streams in. The address is
`cell_row * GRID_COLS + cell_col`. The priors arrive with the pixels, one per
beat. A second `line_window_buffer` delays them to the window centre, and
three registers align them with the cost volume. An assertion checks this
alignment.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_SYS` | 2 | number of accelerator sets in `elas_fpga_multi` (the dual system) |
| `IMG_W x IMG_H` | 1242 x 375 | KITTI frame size, the main evaluation |
| `W_SUPPORT` | 9 | support matching window; gives the 81-bit descriptor |
| `W_DENSE` | 5 | dense matching window; gives the 25-bit descriptor |
| `PRIOR_RADIUS` | 1 | the ±1 widening of the prior |
| shift-sum threshold | m2/2+m2/4+m2/8+m2/32 | fixed in `ambiguity_test` |
| `D` | 256 | design choice: the original ELAS library's default range 0..255 |
| `FILTER_WIN`, `INCON_THRESH`, `INCON_MIN` | 11, 5, 5 | design choice: ELAS library defaults (±5 window), here on the pixel grid |
| `REDUN_DIST`, `REDUN_THRESH` | 5, 1 | design choice: ELAS library defaults |
| `GRID` | 20 | design choice: ELAS library default |
| pixel / disparity width | 8 / 8 bits | design choice |

Window sizes must be odd and at least 3. `D` may be at most 256. The frame
size is fixed at build time. A different resolution, e.g. 640 x 480 or
900 x 750, or another window pair (support 7 to 13, dense 3 to 7) needs a
rebuild with other parameters.

At the defaults, one pass over a KITTI frame takes 465,750 clocks plus 17
clocks of latency, which was measured in simulation. The clock frequency is
not fixed by the RTL. For comparison, the original FPGA implementation
reports 4.84 ms of accelerator time per KITTI frame, which is about
96 million pixels per second.

## Where this RTL departs from, or goes beyond, the source design

The original accelerators were written in C++ for high-level synthesis and
have not been published as RTL. Everything above follows the published
description: the partitioning, the line and window buffers, full-window
census with a feature buffer, one pixel per clock, the shift-sum ambiguity
test, backward-only redundancy, and per-cell grid vectors plus per-pixel
priors with ±1. The following points are this design's own:

* All the sizes marked "design choice" in the table above.
* The stream handshake, which is valid-only with no back-pressure, and the
  `sof` flag. The original uses vendor stream interfaces.
* Border handling: no result where a window leaves the frame, disparities
  that would leave the image masked out, and the constant output offset.
* No support point where fewer than two disparities can be evaluated. Ties
  resolve to the smaller disparity.
* The prior only restricts the candidate set. The original ELAS also adds a
  prior energy term to the matching cost, and how the hardware version used
  it is not described, so it is not modelled.
* The consistency check as in the ELAS library, counting neighbours within
  5 disparities in a ±5 window. It is applied here on the pixel grid, and
  the check runs before the redundancy check.
* All grid vectors of a frame held on chip, loaded before the frame.
* The left/right consistency check and the texture test of the original
  library are not included. Neither is the sub-sampling of support points,
  which happens on the processor.
* The dual system: `elas_fpga_multi` holds `NUM_SYS` (default 2)
  independent copies of `elas_fpga_top` with port arrays indexed by set.
  The sets share only the clock and reset. The source design mentions
  "some shared overhead" between the two sets but does not say what it is,
  so nothing else is shared here.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
expected values come from `tb/elas_ref_pkg.sv`, a frame-at-a-time software
model written with plain loops over whole arrays. It has no line buffers,
window registers or pipelines, so it states independently what each
accelerator must compute.

| testbench | what it checks |
|---|---|
| `tb_line_window_buffer` | every in-frame window element against the stored frame, two frames, random idle clocks |
| `tb_census_transform` | descriptors of random windows, including many pixels equal to the centre |
| `tb_census_cost_volume` | coordinates, masks and all Hamming costs; 4-clock latency |
| `tb_ambiguity_test` | all 128 x 128 pairs (m1, m2) against the formula, plus worked values |
| `tb_support_extraction` | each output beat against the model on a scene with two depths, noise and a flat patch; latency |
| `tb_support_filter` | each output beat and the number of points removed by each check |
| `tb_dense_matching` | each output beat with random grid vectors and priors; grid-only, prior-only and empty candidate sets all occur |
| `tb_elas_fpga_top` | both passes end to end on a 40 x 14 frame, with a processor stand-in building grid vectors and a simple row-wise prior, and a pass overlapped with the next frame; counts every mechanism |
| `tb_elas_fpga_top_full` | the same at the default parameters: a full 1242 x 375 frame, 256 disparities, every beat compared; checks that a frame takes exactly `N + latency` clocks |
| `tb_elas_fpga_multi` | two sets at reduced size, driven at the same time with different scenes, grid vectors and priors; every beat of each set against its own model, so crossed wiring between sets fails |
| `tb_elas_fpga_multi_full` | the system top at its defaults: two full KITTI frames at once, both passes, every beat of both sets compared |

The processor stand-in in the top-level testbenches is deliberately simple.
Its prior is the nearest surviving support point to the left in the same
row, not a triangulated plane. It exercises the interface, not the accuracy
of the algorithm. The accuracy figures of the source design (KITTI error
rates) are not reproduced here.

To simulate one testbench with Verilator (from the directory that holds
`rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/elas_pkg.sv tb/elas_ref_pkg.sv tb/tb_elas_fpga_top.sv \
    --top-module tb_elas_fpga_top -Mdir obj_top
./obj_top/Vtb_elas_fpga_top
```

Replace the testbench name to run another one. The full-size runs take
about one minute (one set) and one and a half minutes (two sets). To lint the synthesizable design:

```
verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/elas_pkg.sv rtl/elas_fpga_multi.sv
```

The remaining lint warnings are intentional unused signals: coordinates and
second-minimum outputs that one user of a shared block does not need.
