# Streaming SGM stereo disparity for on-board obstacle avoidance

A small UAV that avoids obstacles with a forward-looking stereo camera needs a
dense disparity map of every frame, computed on board at low power. This RTL
computes that map on an FPGA-style pixel stream. The two camera images pass
through five stages, each taking one pixel per clock from the stage before:

```
 I_left  --> rectify --\
                        >-- cost_match --> sgm_aggregate --> lr_check --> median_filter --> D
 I_right --> rectify --/        C(p,d)         C_aggr(p,d)     D_left,D_right
             (maps M_x, M_y)
```

1. **Rectification** remaps each raw image through precomputed maps. After
   this stage, matching pixels lie in the same image row.
2. **Matching** computes, for every left pixel p and every disparity d in
   [0, 60), a cost C(p,d) comparing p with right pixel (p_x - d, p_y). The
   cost is either a 5x5 SAD or the Hamming distance of 5x5 census transforms.
3. **Semi-global matching (SGM)** smooths the cost volume along four image
   paths. It charges a small penalty P1 for a disparity step of one and a
   large penalty P2 for larger jumps.
4. **Left-right check**: the stage takes the winner-takes-all disparity per
   pixel. It then rejects pixels whose left and right disparities disagree,
   which are mostly occlusions and mismatches.
5. **5x5 median filter** removes the outliers that are left.

The output D is handed to software, outside this RTL. The software builds
U-/V-maps (per-column and per-row histograms of disparity), finds obstacles
in them and plans an evasion manoeuvre. The default configuration is 640 x 360
pixels, disparities 0..59, 5x5 windows and penalties P1/P2 = 8/32 for the
census cost or 200/800 for SAD.

The design follows the system described in "Real-time on-board obstacle
avoidance for UAVs based on embedded stereo vision" (Ruf, Monka, Kollmann,
Grinberg). That system was written in C/C++ and compiled with high-level
synthesis. This is an independent register-transfer description of the same
pipeline. Where the publication gives no detail, this design makes its own
choices. Those choices are marked below and in each file's header.

## The pixel stream and frame timing

Every stage boundary uses the same simple protocol: a `valid` strobe with the
data, at most one pixel per clock, raster order, and no back-pressure. Each
stage counts its own x/y position, so frames must be exactly W x H pixels
long. Each stage keeps pace with its input, so no FIFOs sit between stages.

The window stages (rectify, cost_match, median_filter) cannot finish a frame
on its last input pixel. A window centred near the bottom edge still needs
rows that have not arrived yet. Each of these stages therefore *drains* after
the last input pixel: for a fixed number of clocks it advances by itself,
one step per clock, with padding in place of input. Drain lengths:

| stage | output lag / drain |
|---|---|
| rectify | (N+1)·W pixels (N = maximum vertical map displacement, 7) |
| cost_match | 2W+2 |
| lr_check | one row: each row is checked in a W-clock burst after it completes |
| median_filter | 2W+2 |

The last disparity of a frame appears at most (N+1)·W + 2(2W+2) + W + 12
clocks after the last input pixel. This is 8,336 clocks at the default size.
A source that waits that long before starting the next frame is always safe.
A camera's vertical blanking normally covers it. An assertion in each
draining stage fires if input arrives during a drain. Within a frame, input
may arrive every clock or with any gaps.

## Rectification (`rectify`)

For each rectified pixel p = (x,y) the maps hold the raw-image source
coordinates: I_rect(p) = I(M_x(p), M_y(p)). The maps have W x H entries per
camera, which is too large for on-chip memory. So the stage asks for them
through a read port. `map_req` with (`map_qx`,`map_qy`) goes out, and
`map_x`/`map_y` must come back one clock later, as from a registered RAM.

Raw rows go into a ring of 2N+3 line buffers. Rectified row y is produced
while raw row y+N+1 arrives, so raw rows y-N .. y+N are complete in the
buffer. The ring has two more rows than this band. These rows are the one
being written and the one that may start on the next clock. A map entry
that points outside the image, or more than N rows away from y, yields 0.
`cfg.rect_bypass` applies the identity map instead, for input that is
already rectified (for example pre-recorded benchmark frames).

The publication describes the buffer depth as n = absmax(M_y). It also
defines M_y as absolute coordinates. Here N is the largest allowed
|M_y(p) - y|, and the default of 7 is this design's choice. For real
calibration data N must cover the maps' largest vertical displacement.

## Matching cost (`cost_match`)

Both cost functions are built. `cfg.cost_sel` picks one per frame:

* **SAD**: sum over the 5x5 windows of |I_L - I_R|. Window pixels outside
  the image count 0. The maximum is 25·255 = 6375, which fits in 13 bits.
* **Census** (CT): each pixel becomes 24 bits, one per neighbour in its 5x5
  window. A bit is 1 when that neighbour is darker than the centre; a
  neighbour outside the image gives 0. The cost is the Hamming distance
  between the two pixels' 24-bit words, 0..24.

A disparity with x - d < 0 has no partner pixel and gets cost 6375. The left
image keeps a 5x5 window in 4 line buffers. The right image keeps
DMAX+4 = 64 columns of 5 pixels, which reach the window of every candidate
disparity. It also keeps the census words of the last DMAX right pixels. At
DMAX = 60 the stage works out 60 SADs of 25 differences and 60 Hamming
distances every clock.

## Four-path SGM in a single pass (`sgm_aggregate`, `sgm_path_step`)

This is the core of the design. SGM approximates a 2-D smoothness
optimisation by 1-D dynamic programming along several paths that end in each
pixel. On path r with predecessor q = p - r:

```
L_r(p,d) = C(p,d) + min( L_r(q,d),
                         L_r(q,d-1) + P1,
                         L_r(q,d+1) + P1,
                         min_k L_r(q,k) + P2 )  -  min_k L_r(q,k)
C_aggr(p,d) = L_0 + L_45 + L_90 + L_135
```

Subtracting the previous minimum keeps every path value at or below
C + P2. Path values therefore need only 14 bits (6375 + 2047 < 2^14), and the
four-path sum needs only 16 bits.

The image arrives in raster order. The only paths that can be followed in one
pass are those whose predecessor has already arrived. These are the left
neighbour (L0) and the three neighbours in the row above: upper-left (L45),
above (L90) and upper-right (L135). The eight-path variant would need a
second, backward pass over the whole image. The four paths cost:

* **L0**: the DMAX values of the previous pixel, kept in registers. The
  recurrence closes within one clock, so back-to-back pixels work.
* **L45, L90, L135**: one line memory of W words. Each word holds, for one
  column, the three path vectors of the previous row (3 x 60 x 14 bits) and
  their three minima (so the next row need not search 60 values for them).
  That is 2,562 bits per column.

At column x the stage reads columns x (for L90) and x+1 (for L135) of the
previous row. The upper-left column x-1 (for L45) is kept in a register from
the step before, because its memory word has already been overwritten with
the current row. The stage then writes its own three vectors to column x.
Paths start afresh at the image border, where L = C. `sgm_path_step` is the
combinational recurrence for one path; it is instantiated four times.

The line memory is read at two addresses at once, combinationally. This is
simple and exact, but a block-RAM mapping would need the x+1 word prefetched
one clock ahead.

## Left-right check without a second matching pass (`lr_check`)

The left disparity is the winner-takes-all choice, D_left(x) =
argmin_d C_aggr(x,d), with ties going to the smaller d. A full right-image
disparity map would need a second SGM pass with the right image as
reference. Instead the right map is read off the same aggregated volume,
along its diagonal:

```
D_right(xr) = argmin_d C_aggr(xr + d, d)
```

D_right(xr) needs contributions from the left pixels xr .. xr+59. It is
therefore built in a shift register of 59 running minima (value and index).
When the cost vector of pixel x arrives, entry d gets candidate
C_aggr(x,d) for right pixel x-d. The entry that received its 60th candidate
is final and is written to the row buffer. At the end of a row every
remaining entry is final and is written at once.

D_left and D_right of a row are written into one bank of ping-pong row
buffers. When the row is complete, a checker reads that bank back one pixel
per clock. Meanwhile the next row fills the other bank. A pixel is kept if
|D_left(x) - D_right(x - D_left(x))| <= 1. Otherwise it becomes the invalid
code, all ones (63). A row is checked in W clocks and a row takes at least W
clocks to arrive, so the checker always finishes in time (an assertion
checks this). The cost is one row of latency. `lr_rejected` pulses for every
rejected pixel.

The publication prints this test with the right pixel at x + d_left and
with the inequality reversed. With the cost convention above (left x matches
right x - d), the form used here is the geometrically consistent one.

## Median filter (`median_filter`)

A 5x5 window over 4 line buffers. The median is the element of rank 12. It
is found by counting, for each of the 25 values, how many others are smaller
(or equal and earlier), so no sorting network is needed. The invalid code
takes part as the largest value. A pixel therefore comes out invalid only
when at least 13 of its 25 neighbours are invalid. Pixels within two of the
border pass through unchanged.

## Configuration and interface of the top (`sgm_disparity_top`)

| parameter | default | meaning |
|---|---|---|
| W, H | 640, 360 | image size |
| DMAX | 60 | disparities 0..DMAX-1 |
| N | 7 | largest vertical map displacement (own choice) |

`cfg` (type `disp_cfg_t` in `disp_pkg`) is sampled every clock and should
only change between frames. Its fields are `cost_sel` (COST_CENSUS or
COST_SAD), `p1` and `p2` (11 bits each; the package has the published
pairs `P1_CT/P2_CT` = 8/32 and `P1_SAD/P2_SAD` = 200/800) and
`rect_bypass`. The ports are the two camera pixels with `in_valid`, the two
map read ports, and `out_valid`/`out_disp`. The output disparity width is
clog2(DMAX+1) bits, and all ones means invalid. Reset `rst_n` is synchronous
and active low.

Storage at the default size: SGM line memory 640 x 2,562 bits (1.64 Mbit),
rectifier rings 2 x 17 x 640 x 8 bits, matching line buffers 8 x 640 x 8
bits, median 4 x 640 x 6 bits, and LR row buffers 4 x 640 x 6 bits. The SGM
memory dominates. The published implementation reports 132 BRAM_18K
(2.4 Mbit) in total, which is of the same order.

## How far it follows the published design

Taken from the publication: the stage order and what each stage computes;
the four paths and their buffer sizes (d_max values for the horizontal path,
3·d_max per column for the others); the minimum subtraction; the diagonal
approximation of D_right; the 5x5 windows; d = [0,60); the 640 x 360 frame;
the penalty pairs; and the two cost functions.

This design's own choices: the stream protocol and drains; the band N and
the map read port; all border rules; the census bit definition; the invalid
code and how the median treats it; rank-based median selection; the
ping-pong row check; and all bit widths.

Deliberate departures:

* The publication's SGM equation is written loosely, as a sum of neighbour
  costs plus penalties. The standard recurrence above is used instead, which
  is the one the publication cites.
* The left-right test uses x - d_left and "> 1 means reject" (see above).
* The published pipeline runs at 29 Hz with 28.5 ms latency at 200 MHz, with
  FIFOs between its HLS stages. This RTL accepts one pixel per clock, so a
  640 x 360 frame takes about 239,000 clocks including the drains. Its
  latency is about one row plus (N+1) rows plus a few clocks. Whether it
  meets 200 MHz has not been checked. The single-clock L0 loop over 60
  disparities and the combinational 60-way minimum searches would likely
  need pipelining for that.

Not included: the cameras and their CameraLink link, the storage of the
rectification maps, and the obstacle-avoidance software with its serial
MAVLink connection to the flight controller.

## Verification

Every stage has a self-checking testbench in `tb/`. Each one compares the
stage bit-exactly against a frame-level reference model in `tb/ref_pkg.sv`,
which is written as plain loops over the whole image. Each ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_rectify` | warped maps with entries outside the band, bypass, read latency |
| `tb_cost_match` | census and SAD frames, borders, x<d entries, drain timing |
| `tb_sgm_aggregate` | all four paths, both penalty pairs, costs up to 6375 |
| `tb_lr_check` | ties, rejections, back-to-back rows, burst timing |
| `tb_median_filter` | outliers, invalid pixels, borders |
| `tb_sgm_disparity_top` | 32x12, 8 disparities, three frames: census with warped maps, SAD with bypass, census at full input rate. It counts out-of-band map entries, bypass frames, each cost function, LR rejections and median changes, and fails if any never happens. It also checks that the obstacle is found at its disparity. |
| `tb_sgm_disparity_top_full` | one 640x360 frame, 60 disparities, at the top's default parameters, with maps and a synthetic obstacle at disparity 24 |
| `tb_kitti_roi_workload` | the benchmark setting: pre-rectified 640x360 frames (bypass), one with census and 8/32, one with SAD and 200/800. It prints density (pixels kept by the LR check) and correctness (within 3 of the ground truth) for each. On the synthetic scene both reach about 98 % density and over 99 % correctness. Real benchmark images are harder, so these figures say nothing about real accuracy. |

Test images are synthetic, made in the testbench from an integer hash: a
textured background at one disparity and a rectangular obstacle at another.
No data files are needed.

To run a testbench with Verilator 5, name the packages first and let
Verilator find the modules in `rtl/` by file name:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
  --top-module tb_sgm_disparity_top \
  rtl/disp_pkg.sv tb/ref_pkg.sv tb/tb_sgm_disparity_top.sv
./obj_dir/Vtb_sgm_disparity_top +verilator+rand+reset+2
```

The full-size test needs about a minute and 1 GB of memory. The two-frame
workload test needs about 2.5 minutes and 2 GB. The small tests finish in
well under a second.
