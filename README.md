# Dense stereo depth on an FPGA + CPU system: programmable-logic RTL

Dense stereo matching usually forces a trade-off: semi-global matching (SGM)
on an FPGA is fast but misses detail on thin or weakly textured structures,
while slanted-plane methods on a CPU are accurate but slow. This design splits
the work. The FPGA runs a cut-down streaming SGM twice to get two sparse but
reliable disparity maps. It also turns them into *support points* (trusted
pixels) and *grid vectors* (which disparities occur in each 50x50 region). A
CPU triangulates a sparse subset of the support points and interpolates a
plane *prior* for each pixel. Finally the FPGA runs SGM a third time, with each
pixel's cost vector bent towards its prior and limited to the disparities seen
in its region. The result is a dense, edge-preserving disparity map at frame
rate.

This repository holds SystemVerilog for everything that runs in the
programmable logic. The CPU steps, the DMA engines and the DRAM stay outside
the top level as plain stream ports:

* image flipping between passes;
* Delaunay triangulation;
* per-pixel plane interpolation.

## The pipeline and its three modes

Every block except `median_filter` (one per output map) is instantiated once.
`stereo_accel_top` reuses the blocks in
three modes, set by the `mode` input. Change `mode` only when the datapath is
idle; an assertion checks this.

| mode | input | blocks used | output |
|---|---|---|---|
| `MODE_SGM` | stereo pair on `pix_*` | `fast_r3sgm` -> two `median_filter` -> `lr_check` | left-referenced, consistency-checked sparse map on `disp_*` |
| `MODE_PRIOR` | left map and right map on `dm_*` | `lr_check` -> `support_check` -> `redundancy_check` and `grid_vector_extraction` | support image on `sup_*`, sparse anchors on `anc_*`, `grid_done` pulse |
| `MODE_DENSE` | pair plus per-pixel support and prior on `pix_*` | `fast_r3sgm` (cost modification on, grid vectors read from `grid_vector_extraction`) -> left `median_filter` | dense map on `disp_*` |

A full frame is processed by the host in this order:

1. `MODE_SGM` with the pair in raster order. This gives the left map.
2. `MODE_SGM` with both images rotated by 180 degrees and swapped (right
   image first). This gives a rotated right map, which the host rotates back.

   Why two passes: the streaming SGM only looks at pixels above and to the
   left, so one pass is biased. The second pass sees the image from the other
   corner.
3. `MODE_PRIOR` with the two maps, pixel-aligned.
   * A second `lr_check` pass keeps only the pixels where both maps agree.
   * `support_check` keeps the pixels that enough of their neighbours agree
     with.
   * `redundancy_check` drops support points whose disparity already occurs
     just above or to the left. Its output is the sparse anchor set for the
     triangulation.
   * `grid_vector_extraction` stores the grid vectors.
4. Host: triangulate the anchors, then interpolate a plane prior for each
   pixel.
5. `MODE_DENSE` with the raster pair, each pixel's support point (the support
   image from step 3) and its prior.

## Stream conventions

* **Pixel type.** A disparity pixel is `disp_t = {valid, d[7:0]}` from
  `stereo_pkg`. An invalid pixel still takes its slot in the raster.
* **Handshake.** Every stream is raster order, at most one pixel per clock.
  Inside the top, streams are valid-only.
* **Back-pressure.** Only the `pix_*` input has it. `pix_ready` drops while
  `fast_r3sgm` or a window block flushes at the end of a frame.
* **Flushes.**
  * A window block needs the rows below a pixel before it can output that
    pixel. After the last pixel of a frame it therefore pushes
    `LY*IMG_W+LX` padding pixels. These are the window rows below the anchor
    and the window columns to its right.
  * `fast_r3sgm` additionally flushes `NDISP-1` clocks to push out the tail of
    its right-image output.
  * While a flush runs, `in_ready` is low.
* **`dm_*` input.** It has no ready signal. Drive it without gaps inside a
  row pair, as `lr_check` expects.

All window operators are built on the helper `window_gen`:

* It is a line buffer of `WIN_H-1` rows plus a register window.
* Its anchor `(CY, CX)` says which window position is the output pixel.
* It also outputs an `inside` mask for the image border and the pixel
  coordinates.

## Fast R3SGM (`fast_r3sgm`)

The standard R3SGM keeps four scanline directions. This version drops the
left-to-right direction, so that no pixel waits on its left neighbour. It
keeps the three paths that arrive from the row above: from the upper-left,
from straight above and from the upper-right. It can then output one
disparity per clock.

* **Matching cost.** A 5x5 census transform is computed on both images.
  * The second image's census words of the last `NDISP-1` pixels sit in a
    shift register.
  * The cost for disparity `d` is the Hamming distance to the word `d` places
    back.
  * Disparities pointing outside the image cost `COST_MAX`, which is 63.
* **Cost modification.** `prior_cost_modifier` is a combinational block
  inside `fast_r3sgm`. It does nothing unless `prior_en` is high.
* **Aggregation.** Each path applies the SGM recursion (P1 = 3, P2 = 20)
  against its predecessor's vector from the previous row.
  * Each path keeps the previous row's vectors in an `IMG_W`-entry row
    memory.
  * The upper-left path also needs one saved vector, because its write
    overtakes its read by one pixel.
  * The three path costs are summed.
* **Left-image output.** `argmin_d S(x,d)` over `d <= x`, taking the smallest
  `d` on ties.
* **Right-image output.** The right-image disparity of pixel `xr` is
  `argmin_d S(xr+d, d)`. This needs `S` from up to `NDISP-1` pixels to the
  right, so it is computed by a systolic chain.
  * The chain has `NDISP` running-minimum slots and shifts one slot per pixel.
  * Slot `d` folds in `S(x,d)` as the pixel passes.
  * A result leaves the chain `NDISP-1` pixels after its left-image
    counterpart.
  * This is why the block needs `IMG_W >= NDISP` and why there is a frame-end
    flush.
* **Timing.**
  * Throughput is one pixel per clock.
  * The first output comes `IMG_W*2 + 6` clocks after the first input. Most
    of that is the census window waiting for two rows.

Both output maps go through their own 3x3 median filter before `lr_check`.

## Cost modification (`prior_cost_modifier`)

For each pixel, in this order:

1. **Plane prior.** A negative Gaussian centred on the prior's disparity is
   subtracted from the costs, saturating at zero.
   * The weights are `round(16*exp(-k^2/8))` for `|k| <= 4`, that is
     16, 14, 10, 5, 2.
   * The table is computed at elaboration time from the parameters.
2. **Grid vector.** Disparities whose bit is 0 in the pixel's cell get
   `COST_MAX`.
3. **Support point.** All costs become `COST_MAX` except 0 at the support
   disparity. The output disparity of a support point is also forced to its
   own value, so support points are never recomputed.

## The post-processing blocks

* **`median_filter`** is a 3x3 median by rank counting.
  * It counts, for each element, the elements that are smaller, or equal
    with a lower index. It then selects the one of rank 4.
  * Border pixels pass through unchanged.
  * The output keeps the centre pixel's valid flag.
* **`lr_check`** keeps a left disparity `d` at `x` only if the right map at
  `x-d` is valid and within `THRESH = 1`.
  * Both inputs are written into two-row ping-pong buffers.
  * A sweep reads the completed row while the next one arrives. It needs no
    back-pressure as long as the right stream is not more than a row behind
    the left one.
  * `out_last` marks a frame's last pixel.
* **`support_check`** keeps a valid pixel if at least 10 of the valid pixels
  in its 5x5 window are within 5 of its own disparity. Pixels outside the
  image never count.
* **`redundancy_check`** (K = 5) drops a support point if the same disparity
  appears either in the 2K rows above it, within ±K columns, or in the K
  pixels to its left. Its window is 11x11, anchored at the bottom middle.
* **`grid_vector_extraction`** splits the image into 50x50 cells. For every
  valid support point with disparity `d` in a cell, it sets bits `d-1`, `d`
  and `d+1` of the cell's `NDISP`-bit vector.
  * Accumulation runs per cell column over a row band. A band is stored when
    its last row ends.
  * The read port is combinational, by pixel coordinate. `fast_r3sgm`
    addresses it with the coordinates of the pixel it is costing.
  * Cells at the right and bottom edges are partial (1242 = 24·50 + 42,
    375 = 7·50 + 25).

## Parameters

Defaults are sized for KITTI frames.

| parameter | default | origin |
|---|---|---|
| `IMG_W` x `IMG_H` | 1242 x 375 | KITTI frame size |
| `GRID_CELL` | 50 | grid cell size |
| support window / count / difference | 5x5 / 10 / 5 | given in the source as an example setting |
| `NDISP` | 128 | chosen |
| census window | 5 | chosen |
| `COST_W` | 6 | chosen |
| `P1` / `P2` | 3 / 20 | chosen |
| median window | 3x3 | chosen |
| `lr_check` `THRESH` | 1 | chosen |
| redundancy `K` | 5 | the value stated for the predecessor window, kept for the wider one |
| Gaussian amplitude / sigma / radius | 16 / 2 / 4 | chosen |

At the default size, one frame of the four passes is about 1.87 M clocks. At
200 MHz that is about 9 ms, so the FPGA side stays well inside a 50 fps
budget.

## Where this departs from the description it follows

* **Cost function.** The source describes the SGM block only at the level of
  "one disparity per clock from the three upper scanlines". The census cost,
  the penalties, the widths and the disparity range are this design's own
  choices.
* **Reuse of blocks.** The source draws three L/R checks and three median
  filters.
  * The second `lr_check` use runs on the same instance in `MODE_PRIOR`.
  * The final median runs on the left median instance in `MODE_DENSE`.
  * The source only says that accelerators are reused with results buffered
    in memory.
* **Support image for the dense pass.** It leaves the top on `sup_*` and
  comes back with the pixel stream in `MODE_DENSE`, rather than through a
  direct internal path.
* **Redundancy check.** It is read as an exact-disparity match against the
  incoming support points.
* **`grid_vector_extraction` buffering.** The memory is single-buffered, so
  the grid must be finished (`grid_done`) before the dense pass reads it.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. Most
testbenches override the image size to keep runs short.

For example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/stereo_pkg.sv \
    tb/tb_fast_r3sgm.sv --top-module tb_fast_r3sgm -o sim
./obj_dir/sim
```

Swap the file and top name for any other testbench.

* **`tb_fast_r3sgm`** checks every output of both streams against a
  whole-frame reference model of the census, the recursion and the
  winner-take-all, with and without cost modification. It also checks the
  rate and the first-output latency.
* **`tb_stereo_accel_top`** runs the five-step sequence above on a 64x16
  synthetic pair with a known disparity. It uses a crude stand-in for the
  CPU's triangulation: each pixel takes the last anchor met in raster order.
  It requires each mechanism to occur at least once:
  * back-pressure;
  * L/R rejection;
  * support rejection;
  * redundancy removal;
  * grid completion;
  * all three modes.
* **`tb_stereo_accel_top_full`** is the same sequence at the default
  1242x375, 128-disparity size. It takes about 40 s of simulation. In that
  run, 463,123 of 463,125 interior pixels of the dense map come out at the
  true disparity.

The synthetic scenes are fronto-parallel. They exercise the mechanics, not
the matching quality on real images.
