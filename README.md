# AutonomROS hardware nodes in SystemVerilog

A small autonomous model car has to see two things in every camera frame:
whether something is in its way, and where the lane goes. In AutonomROS
both jobs are taken off the CPU and run as hardware nodes on the programmable
logic of a Zynq UltraScale+ MPSoC. The nodes talk ROS 2 to the software
around them: navigation, localization, cruise control and vehicle-to-traffic-
light communication all stay in software. This RTL implements the three
compute-heavy nodes as streaming pipelines that take one pixel per clock
cycle:

* **Point Cloud Generation**: depth image + colour to 3D points, using the
  camera's projection matrix.
* **Obstacle Detection**: point cloud to a 234-byte grid of obstacle counts
  in front of the car.
* **Lane Detection**: colour image to the followed lane colour, a
  second-order lane polynomial and a third-order trajectory polynomial in
  the car's frame.

The algorithms are the ones AutonomROS describes. The microarchitecture,
number formats, handshakes and all numeric settings the description leaves
open are choices made for this RTL. Each is listed below and at the top of
the source file it concerns.

```
                         cam_cfg (P matrix, loaded once)
                                   |
 depth+colour  --->  pcg_core  ----+---> pc_valid/pc_pt   (point cloud out)
 (1 px/cycle)        (X,Y,Z)       |
                                   v
                tmat --->  obstacle_grid  ---> grid_valid/idx/data/last
                           (transform, box,      (234 bytes per frame)
                            project, count)

 colour      ---> rgb2hsv -> color_threshold -> warp_fwd -+-> lsq_moments (white) -+
 (1 px/cycle)                (white|yellow)   (bird's eye) +-> lsq_moments (yellow)-+
                                                                                    |
                           lane_coef <- lsq_solver (order 2) <- pick colour with <--+
                                              |                 more pixels
                                              v
                           traj_coef <- lane_traj (30 points, shift, car frame,
                                                   lsq_moments + lsq_solver order 3)
```

`autonomros_hw` is the top. It contains both paths.

## Conventions that hold everywhere

* **Streams.** Every pixel or point comes with a `valid` flag and a `last`
  flag that marks the final item of a frame. Pixels carry their own
  coordinates (`x` = column, `y` = row), so a frame may be any subset of the
  640x480 image, in any order. Nothing in the image pipelines stops the
  stream; only `obstacle_grid` has an `in_ready`, see below.
* **Reset.** Active-low `rst_n`, asynchronous. Every control register and
  every accumulator is reset.
* **Matrices.** Camera matrix, camera-to-car transform and warp homography
  use signed Q16.16 coefficients (`autonomros_pkg::MAT_FRAC`).
* **3D points.** Signed 32-bit millimetres with 8 fractional bits
  (`COORD_FRAC`). The depth input is an unsigned 16-bit value in mm.
* **Lane geometry.** Coordinates are normalised so that 512 pixels = 1.0.
  Polynomial coefficients are signed 64-bit with 32 fractional bits
  (Q32.32). `y` is the image column and `x` the image row, so a lane is
  `column = f(row)`, matching the fact that the 30 trajectory samples are
  spread over the image *height*.

## Point Cloud Generation (`pcg_core`)

The camera projection matrix P has focal lengths `fx, fy`, principal point
`cx, cy` and stereo offsets `Tx, Ty`. It is loaded once through
`cfg_valid` and held. For each pixel `(x, y)` with depth `w`:

```
u = x*w,  v = y*w
X = (u - cx*w - Tx) / fx
Y = (v - cy*w - Ty) / fy
Z = w
```

The first stage forms both numerators in Q16.16 (49 bits signed). The
divisions are done on magnitudes by two fully pipelined restoring dividers
(`div_pipe`, one quotient bit per stage, 56 stages). The sign is put back
afterwards, so X and Y are rounded toward zero. The pixel's colour and
`last` flag travel with the division as a tag. That merges the colour image
into the point. Latency is 58 cycles; throughput is one point per cycle.
`fx` and `fy` must be positive.

## Obstacle Detection (`obstacle_grid`)

Three pipeline stages, one point per cycle:

1. **Transform.** `p_car = R * p_cam + t` with a fixed 3x4 matrix `tmat`
   (R in Q16.16, t in point units). The car frame is x forward, y left,
   z up.
2. **Obstacle box and projection.** A point is kept only if
   `X0_MM <= x < X0_MM + GX*cell`, `|y| < GY*cell/2` and
   `Z_MIN_MM <= z <= Z_MAX_MM`. The defaults are 100..1252 mm forward,
   ±416 mm across and 20..300 mm high, so the floor and anything above the
   car are ignored. Dropping z projects the point onto the ground.
3. **Count.** The cell index is `ix*GY + iy`, with `ix` counted forward and
   `iy` from the right edge. The cell's count is incremented and saturates
   at 255.

With `GX = 18`, `GY = 13` and 64 mm cells the grid has 234 one-byte cells.
That is the 234-byte grid of the original design. How the 234 cells split
into rows and columns is a choice made here, and so are the cell size and
the box limits.

**Frame hand-over.** There are two grid banks. When the frame's last point
has been counted, the banks swap. The finished bank is then published, one
cell per cycle (`grid_valid/idx/data`, with `grid_last` on cell 233), and
each cell is cleared as it is read. Meanwhile the other bank already counts
the next frame, so frames can follow back to back. `box_count` gives the
number of in-box points of the published frame.

Only a frame shorter than 237 points can end before the previous readout
is done. For that case `in_ready` drops while that frame's `last` point is
waiting. In the top, the point-cloud node cannot wait, so such a point is
lost and counted in `points_dropped`. Real frames (307,200 points) never
come close to this limit.

## Lane Detection (`lane_detect`)

### Pixel pipeline

* `rgb2hsv`: 8-bit HSV with hue 0..179 (degrees/2), the usual image-library
  convention. `S = 255*(V-min)/V`, and the hue is computed from the dominant
  channel. Both divisions use `div_pipe`, so one pixel per cycle.
* `color_threshold`: the white range and the yellow range (inclusive
  lo/hi for H, S and V, given as inputs) are tested in parallel. The result
  is one class per pixel: none, white or yellow. Yellow wins when both
  match. Keeping the class, rather than a single grey level, lets the later
  decision count the two colours separately.
* `warp_fwd`: bird's-eye warp with a 3x3 homography, applied **forward**.
  Each marked pixel is moved to
  `((h0 u + h1 v + h2)/(h6 u + h7 v + h8), (h3 u + h4 v + h5)/(...))`.
  Targets outside the 640x480 image are dropped. This is the largest
  departure from a library warp, which resamples a full output image by
  inverse mapping and therefore needs a frame buffer. Everything after the
  warp only uses the coordinates of lane pixels, so moving those pixels is
  enough. In stretched regions the forward map leaves gaps between pixels;
  this changes only how much weight the fit gives to those rows.

### Fitting without storing the image

A least-squares polynomial fit of order K needs only the sums

```
S_k = sum x^k   (k = 0..2K)        T_k = sum y*x^k   (k = 0..K)
```

Its coefficients solve `A a = b` with `A[r][c] = S_{r+c}` and `b[r] = T_r`.
`lsq_moments` adds each pixel's powers into exact integer accumulators
while the frame streams past. There is one accumulator set for the white
pixels and one for the yellow pixels. The decision about which marking to
follow comes *after* the warp. Because both sets are complete at frame end,
the decision can simply compare `S_0` (the pixel counts) without keeping
the image. The colour with more pixels is followed; white wins a tie.
Frame end takes a snapshot of the sums and restarts the accumulators with
the next pixel.

### The solver (`lsq_solver`)

The solver converts the integer sums into Q32.32 in normalised units. This
keeps all matrix entries within a few powers of two of each other: for
example, `S_4` of 300,000 pixels at x≈479 would otherwise need 2^59. The
solver then runs Gaussian elimination without pivoting, followed by back
substitution. Pivoting is not needed because the normal matrix is symmetric
positive definite whenever the points determine the polynomial. A zero
pivot (no pixels, or all pixels on one row) ends the solve with `err`.

One multiplier bank updates a whole row in one cycle. A single sequential
signed divider (`seq_div`, 97 cycles) does the K(K+1)/2 + K+1 divisions.
The order-2 lane fit takes about 650 cycles.

### Trajectory (`lane_traj`)

Following the source design, the lane polynomial `f_l` is evaluated at 30
rows, `x_i = i*480/30` (i = 0..29). For each sample:

* the lateral offset `shift` is added to move from the marking to the
  middle of the lane;
* the point is moved into the car frame:
  `x_car = scale*(480 - x)/512` and `y_car = scale*(320 - y)/512`. The
  origin is the bottom centre of the bird's-eye image, x points forward and
  y to the left.

An order-3 fit (`lsq_moments` + `lsq_solver`) through the 30 points gives
`traj_coef`, so that `y_car = a0 + a1 x_car + a2 x_car^2 + a3 x_car^3`. The
points enter that fit with 12 fractional bits. `err` is raised if a point
does not fit (|x_car| < 8, |y_car| < 128) or if the fit is singular. How the
shift and the car transform are expressed (an added offset, an axis swap and
a uniform scale, no rotation) is a choice made here. `shift` and `scale`
are inputs.

### Per-frame result

`res_valid` pulses about 1.7k cycles after the last pixel. It comes with
`res_cls`, `n_white`, `n_yellow`, `lane_coef[0..2]`, `traj_coef[0..3]` and
`res_err`. A frame that ends while the previous one is still being solved
is not fitted; `frames_skipped` counts those frames. Full frames are about
180 times longer than a solve, so this does not happen at camera rates.

## Top level (`autonomros_hw`)

The top has plain ports only. The inputs are the depth and colour pixel
streams and the configuration: `cam_cfg`, `tmat`, `hmat`, the colour
ranges, `lane_shift` and `lane_scale`. The outputs are the point cloud, the
grid stream and the lane results. `GX`, `GY` and `CELL_SHIFT` are top-level
parameters. Everything else is a parameter of the submodules, with
defaults set to the sizes above.

In the original system each node sits in its own reconfigurable slot. The
node reaches the operating system through an OS interface (OSIF), served
by a software delegate thread, and reaches shared memory through a memory
interface (MEMIF). Messages travel zero-copy through loaned Iceoryx chunks
(borrow, publish-loaned, take-loaned, return-loaned). Those interfaces
belong to the framework underneath and are not part of this RTL. The
streams here are where a MEMIF-based reader and writer would attach. Also
unlike the original, Point Cloud Generation feeds Obstacle Detection
directly rather than through a published message. The point cloud is
still output on `pc_*`.

Coarse synthesis of the default configuration gives roughly 5k word-level
cells and 40k flip-flops. Most of the flip-flops are the pipelined dividers:
two of 56 stages, two of 46 and two of 16. The two grid banks are 3.7k
flip-flops.

## Sizes, speed and what can be trusted

* One pixel per cycle on both camera paths. A 640x480 frame takes 307,200
  cycles. At 100 MHz (no clock rate is given for the original) that is
  about 3 ms per frame, against the camera's 33 ms.
* All sizes are the defaults: 640x480 images, a 234-cell grid, 30
  trajectory points, orders 2 and 3.
* Every block has a self-checking testbench against models written
  independently in the testbench:
  * integer models for the bit-exact parts: projection, transform, grid,
    HSV, thresholds, warp and sums;
  * double-precision least-squares solutions for the fits, with a tolerance
    of 2e-4 (lane) and 3e-3 (trajectory) in normalised units.
* The end-to-end testbench `tb_autonomros_hw` runs the top at its defaults.
  It sends two full 640x480 depth frames (floor plus a box obstacle) and
  two full 640x480 lane frames, plus short frames that trigger the skip,
  drop and error paths. It checks every point, every grid byte and every
  lane result. It also counts that each mechanism happened: matrix load,
  points in and out of the box, saturated cells, grid swaps, the dropped
  point, the white and yellow decisions, the skipped frame and the fit
  error. It runs in a few seconds.

Not checked: timing closure at any clock rate, and numerical behaviour of
the fits on real camera images. Synthetic scenes are used throughout.

## Simulating

All files are plain SystemVerilog. The package comes first:

```
verilator --binary --timing --assert -y rtl +libext+.sv \
          rtl/autonomros_pkg.sv tb/tb_autonomros_hw.sv --top-module tb_autonomros_hw
./obj_dir/Vtb_autonomros_hw
```

`-y rtl` lets verilator find each module in `rtl/<name>.sv`. Only the
package has to be named, and it must come first. Each testbench ends with
`TB_RESULT checks=N failures=M`. The block testbenches are `tb_<module>`:
`tb_pcg_core`, `tb_obstacle_grid`, `tb_rgb2hsv`, `tb_color_threshold`,
`tb_warp_fwd`, `tb_lsq_moments`, `tb_lsq_solver`, `tb_lane_traj` and
`tb_lane_detect`.

## Changing it

* **Grid shape.** `GX`, `GY` and `CELL_SHIFT` on the top. `grid_idx` widens
  by itself. Keep `GX*GY` at 234 to keep the 234-byte message.
* **Box limits.** `X0_MM`, `Z_MIN_MM` and `Z_MAX_MM` on `obstacle_grid`.
* **Camera, transforms, colour ranges, lane shift and scale.** These are
  run-time inputs.
* **Image size.** `autonomros_pkg::IMG_W/IMG_H` together with
  `COL_W/ROW_W`. `lane_traj` has its own `W`, `H` and `STEP`
  (`STEP = H/NPTS`).
* **Precision of the fits.** `F` and `DW` on `lsq_solver` and `lane_traj`.
  The dividers then take `DW+F+1` cycles.
