# LS-Gaussian in SystemVerilog: streaming 3D Gaussian splatting without redundant work

This RTL renders a stream of video frames from a 3D Gaussian splatting
(3DGS) scene. Consecutive frames of a moving camera look almost alike, so
most of a frame need not be rendered at all. A frame is normally made by
warping the previous one to the new viewpoint. Only the 16x16-pixel tiles
that the warp does not cover well are rendered again.

Three further ideas keep the renderer busy and its work small:

* The warp also predicts, per tile, how deep rendering will go before every
  pixel is opaque. Gaussians behind that depth are dropped before sorting.
* A cheap but tight Gaussian-tile intersection test removes most of the
  false Gaussian-tile pairs.
* Tiles are spread over the rasterization blocks so that the blocks finish
  at about the same time. Within a block, tiles run from light to heavy so
  that sorting stays ahead of rendering.

Much of the hardware is shared between these jobs. The per-tile counter
memory, the threshold comparator and the sorter each serve two purposes.

## 1. The frame loop

`ls_gaussian_top` runs one frame per `frame_start` pulse, in phases:

| phase  | what happens | unit |
|--------|--------------|------|
| CLR1   | clear the per-tile counters and the per-tile depth buffer | `counter_buffer` x2 |
| REPROJ | sparse frames only: every pixel of the previous frame is reprojected; landing pixels are written out and counted per tile | `vtu`, `reproj_unit` |
| CLASS  | each tile is compared with Thr.2 (213 of 256 pixels): above it the tile is interpolated, otherwise re-rendered. Key frames re-render everything | `vtu`, `threshold_cmp` |
| CLR2   | clear the counters again: they now count work per tile | |
| PRE    | Gaussians are culled, converted and intersected with tiles. Pairs of interpolated tiles, and pairs deeper than the tile's predicted depth, are dropped. Kept pairs go to memory and are counted per tile | `ccu`, `depth_truncation` |
| DIST   | tiles are assigned to blocks in Z order against Thr.1 | `load_distributor`, `threshold_cmp` |
| INTRA  | each block's tiles are sorted by load, light first | `sorting_unit` |
| RENDER | tile by tile: fetch the pair list, depth-sort it, queue it to its block | `sorting_unit`, `vru` x NUM_VRU |

Interpolation runs next to PRE through RENDER. The tiles marked for
interpolation are requested from memory with their warped pixels, and the
holes are filled (`interp_unit`).

The frame cadence is one key frame followed by `N_WIN` = 5 sparse frames.

The phases run strictly one after another. An accelerator built for speed
would overlap them: reprojection with preprocessing, distribution with
sorting, and rendering of one frame with preprocessing of the next. The
order of work and every decision are the same either way. Only the cycle
count differs, so the frame times this RTL reports are longer than what
the architecture can reach.

## 2. Tile warping and the mask

A reference pixel carries its colour, its *scene depth* and its *truncated
depth*:

* Scene depth is the opacity-weighted sum of the depths of the Gaussians
  that covered it.
* Truncated depth is the depth of the last Gaussian the renderer touched
  for that pixel. That is either where the pixel became opaque, or the
  last Gaussian of the tile.

`reproj_unit` takes the pixel centre through three matrix products:
pixel to camera ray, ray times depth to a 3D point, rigid transform to
the new camera, and projection. A perspective divide then gives the target
pixel. The truncated depth travels along the same ray and is also
transformed.

Every landing pixel increments its tile's counter, and the tile's depth
word keeps the largest truncated depth. The decision per tile is:

* more than 5/6 of the pixels present: keep the warped pixels and fill the
  rest;
* otherwise: render the whole tile from scratch.

Filled pixels are flagged (`io_interp`). In the next sparse frame a flagged
pixel is not used as a source (`ref_pix.masked`). Without this mask,
interpolation errors would be warped again and again and build up over the
window.

The fill rule in `interp_unit` is simple. A hole takes the mean of the
nearest present pixels to its left and right in its row. If only one of
them exists, it takes that one. If the row is empty, it takes the mean of
the whole tile.

## 3. Predicted early stopping

A re-rendered tile of a sparse frame inherits a depth limit: the largest
reprojected truncated depth of its pixels. Pixels that became opaque last
frame at depth d are expected to become opaque near d again. Gaussians
beyond the limit are therefore dropped before they are sorted
(`depth_truncation`).

A tile that received no reprojected pixel has no limit. Key frames have no
reference, so the check is skipped for them.

The counts of surviving pairs are each tile's *effective load*. This is the
figure the load distributor works with.

## 4. The intersection test (CCU)

A projected Gaussian has a mean, a 2D covariance S = [a b; b c] and an
opacity o. Its footprint is taken to end where alpha falls to
tau = 1/255. With k = 2 ln(o / tau), the footprint is the ellipse
d^T S^-1 d <= k.

**Stage I (`tait_bbox`).**
* The eigenvalues of S give R_major = sqrt(k l1) and R_minor = sqrt(k l2).
* The axis-aligned box that just contains the ellipse has half-width
  sqrt(k a) and half-height sqrt(k c). These are the extrema of the
  ellipse in x and y.
* The published box formula has l2 in the height term. Taken literally it
  does not give the extremum, so the extremum is built.
* ln is computed with Mitchell's approximation (leading-one position plus
  the linear mantissa). The square root is the restoring digit-by-digit
  method, unrolled. Both are combinational.

**Stage II (`tait_tile_test`).** Each tile of the box is tested once. Let l
run from the ellipse centre to the tile centre, and take its component
along the minor axis. If that component is more than R_minor + r, where
r = 8 sqrt(2) is the tile's circumradius, the tile cannot touch the ellipse
and is dropped.

* The published inequality has the sign of r the other way round. The
  conservative form above is the one built; with the other sign, tiles
  that touch the ellipse would be lost.
* The test is evaluated squared, with an unnormalised minor-axis vector,
  so it needs no division and no square root.

`ccu` also inverts S to the conic used by the renderer. It culls Gaussians
that are transparent, nearer than 0.2, degenerate or off screen. It walks
the box one tile per cycle.

The projection of 3D Gaussians to the screen and the spherical-harmonics
colour are not part of this RTL: the CCU receives Gaussians already in
screen space.

## 5. Load distribution (LDU)

After preprocessing, the counter buffer holds each re-rendered tile's load.
With B blocks, the unit computes:

* W = total load / B, the ideal load of a block;
* N = tiles / B, the tiles per block;
* Thr.1 = W + W / N = (1 + 1/N) W.

It then visits the tiles in Morton (Z) order, which keeps neighbouring
tiles in the same block. A tile joins the current block unless the block's
running load plus this tile would exceed Thr.1. In that case the tile opens
the next block. An empty block always takes its first tile, and the last
block takes whatever is left.

The comparison runs on the same comparator that classified tiles against
Thr.2; its Ctrl input selects the threshold. The loads are read from the
same counter buffer that counted warped pixels.

Each block's tiles are then sorted by load, lightest first, on the
Gaussian sorter. During rendering, the next tile always goes to the block
whose queue is emptiest. Heavy tiles, which take long to sort, thus meet
blocks that are still busy with light ones.

## 6. Rendering

`sorting_unit` is a stable insertion sorter of `SORT_N` = 256 entries. It
accepts one record per cycle and drains one per cycle. A tile's pair list
is fetched, depth-sorted and queued, framed by a header and an end marker,
to the block's `vru`.

**Limitation.** A list longer than `SORT_N` is sorted in consecutive runs
of `SORT_N`, so its order is then only approximate. The top counts such
tiles (`stats.long_lists`).

`vru` holds a tile's 256 pixels and applies one Gaussian to 16 pixels per
cycle:

* alpha = o exp(-q/2), where q is the conic form of the pixel offset;
* alpha below 1/256 is ignored;
* colour and depth accumulate with weight alpha T, and T *= (1 - alpha);
* a pixel stops when T < 1e-4;
* once all 256 pixels have stopped, the remaining Gaussians of the tile are
  consumed at one per cycle without work.

exp is computed as 2^(-q log2 e), with a 16-entry table for the fraction
and linear interpolation between entries.

## 7. Numbers and formats

| quantity | format |
|----------|--------|
| screen coordinates | Q12.4 pixels |
| 2D covariance | Q.8 |
| conic | Q.16 |
| depth, truncated depth | unsigned Q8.8 (0 means "none") |
| opacity, alpha | /256 codes |
| transmittance T | Q0.16 |
| colour accumulators | Q8.16, saturated to 8 bits on output |
| camera matrices | signed Q16.16 |
| k = 2 ln(o/tau) | Q4.12 |

Default sizes:

* tile grid 120 x 68 (a 1920x1088 frame);
* a counter buffer of 8192 16-bit words (16 KB);
* 4 rasterization blocks of 16 lanes, with 8-entry command queues;
* a 256-entry sorter;
* Thr.2 = 213;
* N_WIN = 5.

The 16 KB, the 5/6 threshold, the 1/255 and 1e-4 thresholds, the 16x16
tiles and the window of 5 come from the published description. The other
sizes are choices of this implementation.

Frames larger than the grid (for example 1959x1090 Tanks and Temples
frames, 123x69 tiles) need a larger `TILES_X`/`TILES_Y` and `CB_ENTRIES`.

## 8. Interfaces of the top

Everything that lives in DRAM is reached through valid/ready streams:

* `ref_*` in: the reference frame;
* `tgt_*` out: the warped pixels;
* `irq_*` out / `ip_*` in / `io_*` out: interpolation requests, the warped
  tile's pixels, and the filled rows;
* `g_*` in: screen-space Gaussians;
* `pr_*` out: kept Gaussian-tile pairs, to be binned per tile;
* `fr_*` out / `fd_*` in: a tile's pair-list request and the list itself,
  in any order;
* `px_*` out: one group of 16 rendered pixels per block and cycle, each
  with colour, depth and truncated depth.

`cam` holds the three matrices of the current reference-to-target step.
`stats` counts every event the design has: frames, tiles, hits and misses,
culls, Stage II drops, truncations, pairs, deferrals, long lists, queue
stalls, idle block-cycles, and applied and skipped Gaussians.

## 9. Simulating

Every unit has a self-checking testbench `tb/tb_<module>.sv`. The helpers
`isqrt`, `ln_unit` and `sync_fifo` are tested inside their users.
Each bench prints `TB_RESULT checks=<n> failures=<m>`. Example:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/ls_pkg.sv tb/tb_vru.sv --top-module tb_vru
./obj_dir/Vtb_vru
```

`-y rtl` lets verilator find each module in `rtl/<module>.sv`. Only the
package needs to be named. `-Wno-fatal` keeps width and unused-signal
warnings from stopping the build.

The block benches compare against independent models:

* floating-point reprojection and alpha blending;
* a reference Morton-order distribution;
* the textbook interpolation rule;
* brute-force ellipse-tile distances.

`tb_ls_gaussian_top` plays host and memory for a 4x4-tile frame over five
frames (key, sparse, sparse, key, sparse).
* The scene is a dense opaque wall with occluders, hidden Gaussians behind
  it, thin diagonal Gaussians and some Gaussians that must be culled. The
  camera slides sideways.
* Key frames are checked per pixel against a floating-point render.
* Sparse frames are checked on average.
* Every pixel must be written exactly once per frame.
* Every mechanism listed under `stats` must occur at least once.

`tb_ls_gaussian_top_full` runs the same test on the design at its default
size: 120x68 tiles, three frames, about five million cycles, roughly two
minutes in Verilator.

## 10. Where this departs from the described accelerator

* Sequential phases instead of overlapped stages (section 1).
* The 3D projection and spherical-harmonics colour are outside the CCU.
* The sorter is exact only up to 256 entries per list.
* The interpolation rule, the culling rules, all number formats, the
  number of blocks, lanes and queue entries, and the tile grid are this
  implementation's own.
* Two published formulas are read as their derivation requires: the
  box height, and the sign of the tile radius in the Stage II test
  (section 4).
* Every landing pixel counts towards the 5/6 threshold, even when two
  reference pixels land on the same target pixel.
* The deferral rule is read as "the block's load including this tile would
  pass Thr.1". The published wording ("the cumulative load exceeds") could
  also mean the load before the tile.
* The 16 KB counter memory is organised as 8192 words of 16 bits. One word
  per tile is enough for 8160 tiles, and 16 bits hold both a pixel count
  (at most 256) and a pair count, which saturates at 65535.
