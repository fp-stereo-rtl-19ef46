# Streaming semi-global stereo matching in SystemVerilog

This design turns a rectified stereo image pair into a dense disparity map,
one pixel per few clock cycles, with no frame buffer. Pixels from both cameras
arrive in raster order. Each stage keeps only the rows its neighbourhood
operator needs, and the disparity map leaves in the same order.

The algorithm is semi-global matching (SGM). Every pixel gets a matching cost
for each candidate disparity. The costs are smoothed along several 1-D paths
through the image, and the disparity with the lowest smoothed cost wins. A
median filter then removes isolated outliers.

The RTL implements one point of a configurable accelerator family:

| setting              | value                              |
|----------------------|------------------------------------|
| cost function        | census transform, 7 x 7 window     |
| disparity range      | 128 (`DMAX`)                       |
| disparities / cycle  | 32 (`UF`, the unroll factor)       |
| aggregation paths    | 4: 0, 45, 90 and 135 degrees       |
| disparity selection  | winner takes all                   |
| refinement           | 3 x 3 median, no left-right check  |
| largest frame        | 1242 x 374 (KITTI), 8-bit pixels   |

## Pipeline

```
 base px ─► window_line_buffer ─► census_transform ─┐
                                                     ├─► stream_fifo ─► census_cost ─► cost_aggregation ─► wta_disparity ─► median_filter ─► disparity
 match px ─► window_line_buffer ─► census_transform ─┘      (II=1)      (UF costs/cycle)  (4 paths, 1 cycle)   (compare tree)     (3x3)
```

Each arrow is a stream with a valid signal. The stages are:

1. **Census front end** (`window_line_buffer`, `census_transform`).
   - It takes one pixel pair per cycle.
   - Each image has its own window buffer with line buffers behind it. Together they hold the last seven rows, so each new pixel completes a 7 x 7 window.
   - The census string has 48 bits, one per neighbour, in raster order with the centre skipped. A bit is 1 when the centre is brighter than that neighbour.
2. **Stream FIFO** (`stream_fifo`).
   - It holds four base/match census pairs.
   - The front end can accept a short burst at full speed, while the stages after it take `DMAX/UF` cycles per pixel.
   - `in_ready` at the top drops when the pairs already in the FIFO plus the pair in flight would overfill it.
3. **Matching cost** (`census_cost`).
   - A shift register holds the last 128 match census strings, with the newest at disparity 0.
   - For each pixel it emits `NCH = DMAX/UF = 4` chunks. Each chunk holds 32 Hamming distances, `popcount(CT_b(p) ^ CT_m(p-d))`.
4. **Aggregation** (`cost_aggregation`, `path_line_buffer`).
   - Implements the SGM path recursion; see the next section.
5. **Winner takes all** (`wta_disparity`).
   - Each chunk of 32 aggregated costs goes through a 5-level compare/select tree.
   - A running best is kept across the four chunks. Among equal costs, the smaller disparity wins.
6. **Median** (`median_filter`).
   - A second window/line buffer, 3 x 3 and 7 bits wide.
   - The median is picked by ranking: each value is compared with the other eight in parallel.

The rate is set by stages 3–5: one pixel per `DMAX/UF` cycles. One frame therefore takes

    cycles = IL + II * (H * W * DMAX / UF - 1),   with II = 1 cycle per chunk

For 1242 x 374 that is 1,858,032 cycles plus a latency IL of a few cycles. The
full-size simulation measures 1,858,039 cycles from the first pixel in to the
last disparity out. At a 300 MHz clock this is 161 frames per second.

## The path recursion in one cycle

For each direction r, pixel p and disparity d:

    L_r(p,d) = C(p,d) + min( L_r(p-r,d),
                             L_r(p-r,d-1) + P1,
                             L_r(p-r,d+1) + P1,
                             min_i L_r(p-r,i) + P2 ) - min_i L_r(p-r,i)
    S(p,d)   = sum over r of L_r(p,d)

The predecessor `p-r` depends on the direction:

| direction | predecessor       | where its costs are kept                                  |
|-----------|-------------------|-----------------------------------------------------------|
| 0°        | (x-1, y)          | registers; this is the pixel just finished                |
| 45°       | (x-1, y-1)        | `path_line_buffer`, holding one row of path costs         |
| 90°       | (x, y-1)          | `path_line_buffer`                                        |
| 135°      | (x+1, y-1)        | `path_line_buffer`                                        |

Each path line buffer stores 32 costs per word and 4 words per column, 8 bits
per cost. A path with no predecessor inside the image starts again with
`L = C`.

Two things make this hard to pipeline.

- **The recursion needs `min_i L_r(p-r,i)` over all 128 disparities of the predecessor before it can start on chunk 0.**
  - The aggregation therefore reads the next pixel's predecessors from the line buffers while it works on the current pixel. It reads one chunk per cycle into a staging register and keeps a running minimum.
  - When the last chunk of the current pixel finishes, the staged costs and their minimum become the predecessor state.
  - For the 0° path, the pixel that just finished is the predecessor. Its minimum is accumulated as its chunks are produced.
- **Chunk d's neighbours d-1 and d+1 may sit in the neighbouring chunk.**
  - All four chunks of the predecessor are held in registers, so chunk edges need no special case.

With this arrangement, one chunk finishes in one cycle for all four directions.
The 0° dependence on the left neighbour therefore costs no extra cycles.

The line buffer has a combinational read that returns the old contents when
the same word is written in that cycle. The aggregation relies on this: a
column's word is read for the next row's use in the same cycle it is
overwritten.

Widths follow from the bounds:

- `L_r <= C + P2`, so 8 bits hold `48 + 120`.
- `S <= 4 (C + P2)`, so 10 bits.

These widths are computed in `fp_stereo_pkg` from the parameters.

## Geometry and borders

- **Causal windows.** Both window stages use the newest pixel as the bottom-right corner of their window.
  - The census of the k-th input pixel (x, y) belongs to (x-3, y-3).
  - The median adds one more row and column of delay.
  - So the disparity emitted for input (x, y) belongs to pixel (x-4, y-4).
  - Positions above or left of the image read as zero.
- **Disparities past the left edge.** A pixel near the left edge can still be given a disparity d larger than x. The match string at stream index `n-d` is then from the end of the previous row, or from the previous frame. Right after reset that string is zero.
- **Frame size.** `width` and `height` are run-time inputs, up to `MAX_COLS` x `MAX_ROWS`. Frames follow each other with no gap and no reset between them.

## Departures from the published architecture

- **Interleaving and reordering.** The published design splits the cost volume in two and interleaves the halves. This moves dependent pixels on the 0° path further apart, and four FIFOs restore the order afterwards. The reason is the latency of the 0° recursion in a high-level-synthesis schedule. Here the recursion closes in one cycle, so there is no latency to hide, and this stage is not built. The throughput is the same, one chunk per cycle.
- **Constants.** The penalties `P1 = 10` and `P2 = 120`, the 3 x 3 median size and the FIFO depth of 4 are not given by the source and were chosen here. The same holds for the census bit order, the tie rule in the winner-takes-all stage, and the mapping of 45° and 135° to the upper-left and upper-right neighbours.
- **Border handling** is this design's choice, as described above.
- **Stream interfaces.** The host side (DMA, processor, DRAM) is not included. The top exposes plain pixel and disparity streams. The output has no back-pressure, so the consumer must always accept.
- **Not built.** The other cost functions of the family (SAD, zero-mean SAD, rank transform) and both left-right consistency checks.

## Files

| file | contents |
|------|----------|
| `rtl/fp_stereo_pkg.sv` | default sizes, penalties and width functions |
| `rtl/fp_stereo_top.sv` | the pipeline |
| `rtl/window_line_buffer.sv` | K x K window and K-1 line buffers |
| `rtl/census_transform.sv` | census string of a window |
| `rtl/stream_fifo.sv` | valid/ready FIFO with fill level |
| `rtl/census_cost.sv` | match census shift register, Hamming costs |
| `rtl/path_line_buffer.sv` | packed row of path costs |
| `rtl/cost_aggregation.sv` | 4-path recursion and sum |
| `rtl/wta_disparity.sv` | minimum-cost disparity |
| `rtl/median_filter.sv` | K x K median |
| `tb/sgm_ref_pkg.sv` | software reference of the whole algorithm |
| `tb/tb_<block>.sv` | one self-checking test per block |
| `tb/tb_fp_stereo_top.sv` | end to end, two 40 x 10 frames |
| `tb/tb_fp_stereo_full.sv` | end to end, one 1242 x 374 frame |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

**Reference model.** `tb/sgm_ref_pkg.sv` computes the same algorithm directly
from the equations: census, cost volume, four path passes, winner takes all,
and median. It follows the border conventions above. It shares no code with
the RTL.

**End-to-end tests.**

- `tb_fp_stereo_top` streams two frames back to back.
  - Input gaps are random.
  - Every disparity must match the reference bit for bit.
  - It also checks that the rate is 4 cycles per pixel.
  - It counts input stalls, full-rate bursts, path restarts, wins of each recursion term (`P1`, `P2`) and the frame wrap. If any of these never happened, it counts a failure.
- `tb_fp_stereo_full` runs one 1242 x 374 frame at the default parameters.
  - The frame is a synthetic pair with a known disparity in each half (21 and 57).
  - All 464,508 outputs must match the reference.
  - The cycle count must follow the formula above.
  - At least 95 % of interior pixels must recover the true disparity. A run reaches 98.7 %.
  - It takes about 5 minutes of simulation plus about 2 minutes to build.

**Block tests** compare each block with its own definition:

- windows against the image;
- census bits against the comparison rule;
- the FIFO against a queue;
- Hamming costs against `$countones`;
- path sums against the reference recursion;
- the winner against a linear scan, including ties;
- the median against sorting.

To run a test with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fp_stereo_pkg.sv tb/sgm_ref_pkg.sv tb/tb_fp_stereo_top.sv \
    --top-module tb_fp_stereo_top -Mdir obj && ./obj/Vtb_fp_stereo_top
```

Other sizes can be set on the top through its parameters (`WIN`, `DMAX`, `UF`,
`MAX_COLS`, `MAX_ROWS`, `P1`, `P2`, `MED_K`, `FIFO_DEPTH`).

- `UF` must divide `DMAX`.
- The testbenches keep their own copies of these constants, so change them there too.
