# Streaming stereo matching pipeline (SGM with cost-volume and disparity post-processing)

This is synthesizable SystemVerilog for a complete stereo-vision pipeline of
the kind used in FPGA depth sensors such as Nerian's SceneScan. A pair of
synchronized camera images goes in, one pixel pair per handshake. A dense
disparity map (inverse depth) comes out, one 12-bit value per pixel, at
1/16-pixel resolution. Every stage works on a pixel stream in raster order.
Stages keep only the image rows they need, never a whole frame.

The matching core is Semi-Global Matching (SGM). For each left pixel it
compares `P = 32` candidate disparities per clock cycle. The disparity range
is covered in `n_i` cycles, so the largest disparity is
`d_max = o_d + n_i * P - 1`, where `o_d` is a run-time disparity offset.
Around that core sit:

* a rectification stage in front of it;
* a census pre-processing stage;
* cost-volume checks after it: sub-pixel refinement, uniqueness and left-right
  consistency;
* disparity-map filters after those: texture, speckle, gap interpolation and
  noise reduction.

The stage order, the main sizes and the tests follow the published
description of SceneScan Pro:

* 79 x 79 rectification window;
* p = 32;
* disparity range up to 256;
* 4 fractional disparity bits;
* images up to 1856 x 1856;
* the uniqueness and consistency formulas;
* the `min(l_h, l_v) <= l_max` gap rule.

That description says what most stages do but not how. Where it is silent,
the method used here is the simplest one that does the stated job. Each such
choice is listed in "Departures and own choices" below.

## Data flow

```
 cam_l/cam_r ──► rectify ──► preproc ──► sgm_stereo ──► cost_volume_pp ──► speckle_filter ──► gap_interp ──► noise_reduce ──► disp
 map ─────────────┘          census L/R   P costs per    WTA, sub-pixel,     small components   fill small      edge-aware
                             + texture    cycle, 4 paths  uniqueness,         → invalid          gaps            3x3 mean
                               flag                       texture, L/R check
```

| module | role |
|---|---|
| `ss_pkg` | widths, the rectification-map word `rect_map_t`, the configuration record `cfg_t` |
| `win_stream` | generic K x K raster window with line buffers and row/frame flushing (helper) |
| `rectify` | bilinear remapping of both images through the rectification map |
| `preproc` | census codes of both images and the texture flag of the left image |
| `census_xform`, `texture_filter` | combinational window functions used by `preproc` |
| `sgm_stereo` | matching costs and SGM aggregation, P disparities per cycle |
| `cost_volume_pp` | disparity selection, sub-pixel, uniqueness, texture invalidation |
| `subpixel_fit`, `uniq_check` | combinational parts of `cost_volume_pp` |
| `consistency_check` | right disparity inferred from the left cost volume; L/R test |
| `speckle_filter`, `gap_interp`, `noise_reduce` | disparity-map filters |
| `scenescan_top` | the whole pipeline |

### Conventions

* **Streams.** Every link uses `valid`/`ready`. A transfer happens on a clock
  edge where both are high. Once a producer raises `valid`, it holds the
  value until the transfer. Pixels are in raster order. No start-of-frame
  flag is carried: each stage counts rows and columns against `cfg.width` and
  `cfg.height`.
* **Reset.** Reset is asynchronous and active low (`rst_n`). It clears control
  state only. Data storage that is always written before it is read is not
  reset.
* **Disparity format.** A disparity is an unsigned 8.4 fixed-point number: 8
  integer bits and 4 fractional bits. The code `12'hFFF` means "invalid". The
  largest real value is 255.0, because no sub-pixel offset is added at the end
  of the range.
* **Configuration.** `cfg_t` holds the image size, the SGM penalties P1/P2,
  `n_iter` (n_i), `disp_offset` (o_d), the uniqueness factor q, the
  consistency threshold t_c, the texture threshold t_t, the speckle window
  w_s, the gap limit l_max, and three similarity thresholds. q is a Q4.4
  value, so 16 means 1.0. The record is read continuously and must not change
  during a frame. Keep `disp_offset + n_iter * P <= DMAX`; an assertion in
  `sgm_stereo` checks this.

## Rectification (`rectify`)

Each output pixel (x, y) of each camera gets a sub-pixel source position
(x + dx, y + dy). One map word per output pixel carries (dx, dy) for the left
image and for the right image, so a single stream serves both cameras. The
offsets are signed, with 4 fractional bits. The integer part is clamped to
-39..+39, which is the 79 x 79 window. The output is the bilinear mix of the
four pixels around the source position, rounded to nearest. Source pixels
outside the image are clamped to the border.

Each camera has a circular memory of 81 image rows. An internal cursor walks
the frame with 40 extra columns at the end of each row and 40 extra rows at
the end of the frame. Each real position stores one camera pixel. Each step
also makes the output pixel 40 rows and 40 columns behind the cursor pending.
A pending pixel leaves together with one map word: it needs `map_valid` and
`out_ready`. The 81st row slot lets the input write row y + 41 while row y is
still being read, so input and output overlap.

The map stream is uncompressed. The original system stores its map
compressed, at about one byte per pixel, but that format is not public. A
decompressor would sit in front of the `map` port.

## Census pre-processing and the texture score (`preproc`)

One `win_stream` holds a 5 x 5 window over both images at once. Each census
code has 24 bits, one per neighbour: the bit is set when the neighbour is
darker than the centre. Neighbours outside the image give 0. The texture
score is computed on the same left-image window. It is the sum of the
absolute differences between horizontally adjacent pixels. A pixel is
textured when the score is at least `tex_thresh`. The texture flag then
travels with the pixel through SGM, and an untextured pixel's disparity is
made invalid where it is formed.

## SGM core (`sgm_stereo`)

**Cycles per pixel.** A left pixel takes exactly `n_iter` cycles, with no
overhead. The next pixel is accepted in the cycle its predecessor's last
iteration completes.

**One iteration.** In iteration i the core compares the left census code with
the right codes of disparities `d = o_d + i*P + j`, for j = 0..P-1. The right
codes come from a shift register holding the last DMAX codes of the row. The
matching cost is the Hamming distance between the two codes. If the right
pixel lies left of the image, the cost is the largest possible value, 24.

**Paths.** Four aggregation paths are updated in the same cycle, arriving from
the left, upper-left, top and upper-right neighbours. All four come from
already-processed pixels, so one pass over the image is enough. The recurrence
is the standard SGM one:

```
L(p,d) = C(p,d) + min( L(q,d), L(q,d-1)+P1, L(q,d+1)+P1, min_k L(q,k)+P2 ) - min_k L(q,k)
```

The neighbours d-1 and d+1 may fall in another group of P. That is fine,
because the previous pixel's vector is complete by then. At the ends of the
range they are left out. A path with no predecessor (image border) uses L = C.

**Storage.**

* The left path keeps its last full vector in registers.
* The top, upper-left and upper-right paths each keep one row memory. A
  memory word holds DMAX path costs plus their minimum, one word per column.
* While processing column x, the core reads `mem_t[x]` and `mem_tr[x+1]`, and
  `mem_tl[x-1]` from a copy taken one pixel earlier. At the end of the pixel
  it writes column x of all three memories.

**Widths.** Path costs are 10 bits; they are bounded by 24 + P2. The
aggregated cost S, the sum of the four paths, is 12 bits.

The output is one registered record per iteration: the P costs S, the
iteration index, a "last group of this pixel" flag, the coordinates and the
texture flag.

## Cost-volume post-processing (`cost_volume_pp`, `consistency_check`)

This is the least obvious part of the design. It works on the cost volume
while it streams past in groups of P, and never stores a pixel's full cost
vector.

### Winner-takes-all and sub-pixel refinement

While one pixel's groups pass, the module keeps a running record:

* the best cost c* and its index;
* the cost just left of the best, which can come from the previous group's
  last element;
* the cost just right of the best, which can be "pending" until the next
  group's first element arrives;
* the smallest cost at any other disparity, c2.

Ties go to the smaller disparity. With the last group, `subpixel_fit` fits a
parabola through (c_left, c*, c_right). The vertex offset is
`(c_left - c_right) / (2 (c_left + c_right - 2 c*))`, in 1/16 pixel, rounded,
and at most 1/2 pixel. At either end of the range the offset is 0.
`uniq_check` accepts the match when `c* * q < c2`. This is done exactly in
integers, so a tie between two disparities is not unique.

### Left-right consistency without a second matching pass

The right image's disparity map is inferred from the same costs. Right pixel
x_r is seen by left pixel x = x_r + d at disparity d. Its disparity d_r is the
d of the smallest such S(x_r + d, d).

`consistency_check` keeps a shift array `rm[]` of running (cost, disparity)
minima. Entry i belongs to right pixel X - i, where X is the left pixel now
being processed. Each incoming group updates P entries at once. Each finished
left pixel shifts the array by one and inserts an empty entry for the new
right pixel X + 1.

Right pixel X - i has received all its candidates once i >= d_max. Left
results therefore wait in a delay line of DMAX pixels. When a result leaves
the line, it is checked against entry DMAX + d_l, which is final by then. The
match passes when `|d_l - d_r| <= t_c` and the right pixel lies inside the
image. Otherwise the disparity becomes invalid.

At the end of each row the delay line is flushed with DMAX empty steps. The
input is held off during the flush, so each row costs DMAX extra cycles (256
with the default sizes).

## Disparity-map filters

All three filters use `win_stream`. They accept one pixel per cycle. Each
outputs a pixel K/2 rows and K/2 columns after it entered.

* **Speckle filter.** The window is up to 9 x 9; `w_s` is set at run time.
  Two 4-neighbouring valid pixels are connected when their disparities differ
  by at most `speckle_sim`. A region is grown from the centre for 18
  dilation steps, inside the w_s x w_s window. If it never reaches that
  window's border ring, the centre's component fits inside the window, so it
  is a speckle and becomes invalid. This is a local test of "component
  smaller than the window". A component that is cut off by the image border
  inside the window counts as small.
* **Gap interpolation.** The window is 17 x 17; only its centre row and
  column are used. For an invalid pixel, the module finds the nearest valid
  pixels left, right, up and down, within 8 pixels. This gives
  `l_h = a + b - 1` and `l_v = u + v - 1`. The pixel is filled when
  `min(l_h, l_v) <= l_max` and the two edge disparities of that gap differ by
  at most `gap_sim`. The fill is the linear interpolation between the edges
  of the shorter gap that qualifies.
* **Noise reduction.** This is a 3 x 3 mean over the valid neighbours whose
  disparity lies within `nr_thresh` of the centre. Averaging therefore never
  crosses a depth edge and never uses invalid pixels. Invalid pixels stay
  invalid.

## `win_stream`, the window generator

The window generator keeps K-1 line buffers and a K x K register window. Its
cursor walks a frame padded by R = K/2 zero columns per row and R zero rows
per frame. The padding positions take no input. The padding pushes out the
last windows of each row and each frame without any special flush logic. The
generator also reports, cell by cell, which window cells lie inside the
image (`in_img`), so each user module decides its own border behaviour.

## Throughput and sizes

The SGM stage sets the rate. One frame takes about

  `W * H * n_i + H * DMAX` cycles,

plus a small padding overhead in the window stages, which run in parallel.
The original system reaches 5.1 billion disparity evaluations per second over
a 256-pixel range, which is 20 M disparities/s. With P = 32 this design needs
a clock of about 160 MHz to do the same (n_i = 8). The source gives no clock
frequency.

Frame rates from the original system's table, and what this design needs for
them:

| image | range | n_i | cycles/frame | needs (fps) |
|---|---|---|---|---|
| 640 x 480 | 128 | 4 | 1.35 M | 135 MHz (100) |
| 640 x 480 | 256 | 8 | 2.58 M | 181 MHz (70) |
| 1280 x 960 | 128 | 4 | 5.16 M | 124 MHz (24) |
| 1600 x 1200 | 256 | 8 | 15.67 M | 157 MHz (10) |

Every configuration in that table fits the default parameters: lines up to
1856 pixels, DMAX = 256, n_iter up to 8. The default parameters are the
source's own sizes where it gives them. Storage grows with them: the SGM row
memories hold 3 x MAXW x (DMAX + 1) x 10 bits, about 14.3 Mbit at the
defaults, which on an FPGA would be block RAM. The consistency arrays are
2 x DMAX entries of flip-flops.

## Departures and own choices

The source describes what most stages do, not how. These points are this
design's own:

* **Interfaces.** All interfaces are valid/ready streams. The camera links
  (USB3 Vision or a dedicated stereo camera), the external memory holding the
  rectification map, the map decompressor and the gigabit-ethernet output are
  not included: their streams are the top-level ports.
* **Pre-processing and cost.** The source does not name its pre-processing
  method. This design uses a 5 x 5 census transform and the Hamming-distance
  cost.
* **SGM variant.** The source uses "a variation" of SGM without saying what
  changes. Here it is plain SGM over four single-pass paths.
* **Disparity selection.** Winner-takes-all, with ties going to the smaller
  disparity.
* **Sub-pixel curve.** A parabola; the source says only that a curve is
  fitted.
* **Texture score.** The sum of horizontal gradients. The texture test is
  applied where the disparity is formed, not in a separate stage after the
  cost-volume checks. The result is the same, because the test can only make
  pixels invalid.
* **Consistency check.** The delay-line structure and the per-row flush.
* **Disparity filters.** The speckle test (window-limited region growing),
  the gap search and linear fill, and the masked-mean noise filter.
* **Sizes and thresholds.** The window sizes of the filters, the similarity
  thresholds and all field widths.

## Simulation

Each block has a self-checking testbench in `tb/`. A testbench compares the
block's outputs with a reference written independently inside the
testbench. It ends by printing `TB_RESULT checks=N failures=M`. Streaming
testbenches insert random input gaps and output stalls.

* `tb_sgm_stereo` recomputes the four path recurrences. It also checks that a
  pixel takes exactly n_iter cycles when nothing stalls.
* `tb_cost_volume_pp` and `tb_consistency_check` recompute winner-takes-all,
  the sub-pixel offset, the uniqueness test and the inferred right disparity
  map.
* `tb_rectify` runs the full 79 x 79 window.
* `tb_scenescan_top` runs the whole pipeline at reduced sizes (P = 8,
  DMAX = 32) on a synthetic scene. The right image is the left one shifted by
  9 pixels. In the second frame the rectification map adds 2 more pixels.
  The test checks the disparities of the clean area. It also checks that
  every mechanism happens at least once: input stalls, output stalls,
  uniqueness, texture and consistency rejects, sub-pixel offsets, speckles,
  gap fills and smoothing.
* `tb_scenescan_full` runs the same scene with every parameter at its
  default, on two 640 x 480 frames with a 128-pixel range.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/ss_pkg.sv tb/tb_sgm_stereo.sv --top-module tb_sgm_stereo
./obj_dir/Vtb_sgm_stereo
```

Replace the name for any other block. `-y rtl` lets Verilator find the
submodules.

With `-Wall`, Verilator reports only width-extension, unused-signal and
unused-parameter warnings. It also reports that `rst_n` is used both
synchronously and asynchronously. That synchronous use is only the
assertions' `disable iff`, so it makes no hardware.

## Limits

* **Large hardware at the defaults.** The combinational group logic of SGM
  and the P-wide update of the consistency array are written plainly as
  loops. At the default sizes this is a large amount of logic. Timing closure
  at 160 MHz would need pipelining that is not present here.
* **Speckle filter.** It judges components only inside its window.
* **Rectification map.** It is taken uncompressed.
* **Configuration timing.** Nothing stops a configuration change in the
  middle of a frame.
