# Streaming depth-map update for semi-dense SLAM

This design is a hardware depth estimator for direct semi-dense SLAM in the
style of LSD-SLAM. Every time a new camera frame arrives, the semi-dense map
attached to the current keyframe is updated. Each keyframe pixel has an
inverse depth, its variance and two confidence counters. For each pixel with
enough image gradient, the design searches along the epipolar line in the
new frame for the best match of a five-pixel intensity pattern. It turns the
match into an inverse-depth observation and fuses that into the pixel's
Gaussian estimate. The map is then regularised with two 3x3 filters and
written back.

The central idea is that the cost of a pixel varies a lot. A pixel with low
gradient needs no work. A pixel that is scanned needs anything from a few to
dozens of search steps. A pipeline sized for the worst case would stay idle
most of the time. Instead, the map streams through the design once, in
raster order. The per-pixel work is split between two parts that run at
different rates and are joined by FIFOs:

* a **slow-rate** part that handles one map point every 5 cycles. It does
  the gradient check, the epipolar geometry, the depth update and the
  filters;
* a **fast-rate** part that does one search step per cycle, whatever the
  step count of the point being scanned.

A pixel that is not scanned passes the fast part in one cycle. The FIFOs
even out the load across a row. All control information for a point (its
map data, its search interval, the scan result) travels with the point as a
metadata struct. No unit has to look anything up later.

## Dataflow

```
 host bus ─► ctrl_regs ──────────────────────────────────────────────┐
                │ (read jobs, parameters)                            │
 AXI read ◄── mem_rd_ctrl ─► 64-bit words ─┬─► keyframe cache (2 read ports)
                                           ├─► frame cache    (1 read port)
                                           └─► unpack_unit (3 words → 1 point + x,y)
                                                   │ FIFO
                                                   ▼
                        kp_grad_check (keyframe port 0, 1 point / 5 cycles)
                                                   ▼
                        epipolar_unit (keyframe port 1: 5-point pattern)
                                                   │ FIFO (64)
                   ┌───────────────────────────────┘
                   ▼            fast-rate part: one step per cycle
        gen_scan_points ─► cache_req_handler ─► subpixel_interp ─► lpu
            │ metadata (frame cache)                                ▲
            └──────────────────────────────────────────────────────┘
                                                   │ FIFO (64)
                                                   ▼
     new_depth_calc ─► subpixel_stereo ─► depth_integration
                  ─► fill_gaps_filter ─► regularize_filter ─► pack_output ─► AXI write
```

All links are valid/ready streams. A unit that is not ready stalls its
producer. The only places where data can pile up are the three
`stream_fifo` instances. They sit in front of the gradient check, in front
of the fast part and behind it. The FIFO between the slow and fast parts
absorbs runs of long scans.

### One map update

The host writes the parameter registers and the four buffer addresses, then
writes `CTRL`. The sequencer in `ctrl_regs` performs these steps:

1. If `CTRL.load_kf` is set, it burst-reads the keyframe image (one byte per
   pixel, 8 pixels per 64-bit word) into the keyframe cache.
2. If `CTRL.load_frame` is set, it does the same for the new camera frame
   into the frame cache.
3. It starts the output writer for `IMG_W*IMG_H` points. It then streams the
   keyframe map from memory, 3 words per point, into the pipeline.
4. When the writer's last write response arrives, it sets `STATUS.done`,
   pulses `irq`, and leaves the cycle count of the update in `CYCLES`.

The two caches hold the whole image on chip. The scan can therefore read any
pixel of the frame without going back to DRAM, and DRAM traffic stays
purely sequential.

## Data formats

| Quantity | Format |
|---|---|
| inverse depth, its variance, thresholds on them | signed Q8.24 (`fix_t`) |
| image coordinates, line start and increment, matrix M, vector t | signed Q16.16 |
| pixel | 8-bit unsigned |
| interpolated pixel | Q8.8 |
| match error (sum of squared differences of Q8.8 values) | 32-bit unsigned with 8 fraction bits after scaling |

A map point is 24 bytes, stored as three little-endian 64-bit words:

| word | bits 63..32 | bits 31..0 |
|---|---|---|
| 0 | `idepth_var` | `idepth` |
| 1 | `idepth_var_smoothed` | `idepth_smoothed` |
| 2 | `reserved[30:0]`, `is_valid` (bit 32) | `blacklisted[15:0]`, `validity[15:0]` |

At 640x480 this is 7.37 MB per map. `blacklisted` is a signed counter: 0 is
neutral, and it goes negative for points that fail repeatedly.

## The search, step by step

**Gradient check (`kp_grad_check`).** The unit reads one new keyframe column
(three 2x2 windows) for each point and keeps the gradient maxima of the
last three columns. The gradient of a pixel is |I(x+1,y)−I(x,y)| +
|I(x,y+1)−I(x,y)|. The point's fitness uses the maximum over its 3x3
neighbourhood:

* a valid point is scanned if that maximum is at least `grad_update`;
* an invalid point is scanned if it is at least `grad_create` and its
  blacklist counter is at least `bl_min`.

Every other point is marked as skipped. The 3 reads plus pipeline and
output give the design's one point per 5 cycles. The first point of a row
needs 6 reads.

**Epipolar line (`epipolar_unit`).** The inverse-depth interval is
[d−2σ, d+2σ] for a valid point and [`id_min`, `id_max`] otherwise, clamped
to that range. Both ends are projected into the frame with

    p(id) = M·[u v 1]ᵀ + t·id,   x = p0/p2,  y = p1/p2

where M = K R K⁻¹ and t = K t are written by the host. The far end is the
start of the scan. The number of steps is the max-norm length of the
segment, rounded up and limited to `MAX_STEPS` (64). The increment is the
segment divided by that count. Samples begin two increments before the far
end so that the five-sample window is centred on each candidate. There are
`nsteps+1` candidates and `nsteps+5` samples. A point fails as
out-of-frame in three cases:

* either end is behind the camera;
* either end is less than 3 pixels from the border;
* the 5-point pattern would leave the keyframe.

The pattern is five bilinearly interpolated keyframe samples at (u,v) + k·e
for k = −2..2. Here e is the keyframe epipolar direction, normalised to a
max-norm of 1:

    e ∝ (epi_x + epi_z·u, epi_y + epi_z·v)

This form covers both a finite and an infinite epipole. The host must orient
e so that it matches the far-to-near direction in the frame. The unit also
stores what the triangulation needs later. On the major axis m (x or y),
the projection is `m = (a_m + b_m·id) / (a_z + b_z·id)`.

**Fast part.**

1. `gen_scan_points` emits one sample coordinate per cycle.
2. `cache_req_handler` reads the 2x2 frame window around it.
3. `subpixel_interp` interpolates it.
4. `lpu` shifts the samples into a 5-entry window and computes the sum of
   squared differences against the pattern for every candidate.

The LPU keeps:

* the best error and its index;
* the errors just before and after the best (for the sub-pixel fit);
* the second-best error among candidates that are not neighbours of the
  best.

The metadata of skipped points goes along a side path and is merged back
in order by the LPU.

**Depth from the match (`new_depth_calc`, `subpixel_stereo`).** A match is
rejected in two cases:

* its error exceeds `max_err`;
* the second best is less than 1.5× the best (an ambiguous match).

Otherwise the matched coordinate `xm = start + (best+2)·inc` is inverted
through the projection:

    id = (a_m − xm·a_z) / (xm·b_z − b_m)

The variance of the observation is `(Δid per step)² · sigma2`. If the
errors before and after the best form a valley, a parabola through the
three errors moves the estimate by up to half a step.

**Fusion (`depth_integration`).**

* A new observation on an invalid point creates a hypothesis with validity 5.
* An observation on a valid point is fused as a product of Gaussians, and
  validity rises by 5, up to 50.
* A failed match costs a valid point 5 validity. Below zero the point is
  invalidated and blacklisted.
* A failed match on an invalid point decrements its blacklist counter.

**Filters (`fill_gaps_filter`, `regularize_filter`).** Both filters stream
one point per cycle through a 3x3 window built from a four-row ring buffer
(`win3x3_stream`). The output lags the input by one row and one pixel.

* The fill filter gives a value to an invalid, non-blacklisted point when
  the validity of its valid neighbours adds up to more than `fill_thresh`.
  The new value is their validity-weighted mean, with variance `var_init`
  and validity 0.
* The regularisation filter writes the (validity+1)-weighted mean depth and
  variance of the valid points in the window into the separate smoothed
  fields. It leaves the depth itself unchanged. Invalid points get −1
  there.

`pack_output` turns each point back into three words. It writes them in
bursts of 16 beats, issuing a burst only once all its data is buffered,
with one burst in flight at a time.

## Rates and timing

* **Slow units:** one point per 5 cycles (gradient check). The epipolar
  unit passes a skipped point in 1 cycle and takes 7 cycles for a scanned
  one (geometry, five pattern reads, output). So it keeps up with the
  gradient check while fewer than about two thirds of the points are
  scanned.
* **Fast part:** one scan step per cycle, plus about 6 cycles of overhead
  per scanned point.
* **Depth update and filters:** one point per cycle, one cycle of latency
  per stage.
* **Memory:** 64-bit data per cycle on both read and write. Reads use
  16-beat bursts with up to 64 beats in flight, limited by FIFO credit.

A full-size 640x480 update at a typical load (about a quarter of the points
scanned, about 11 steps each) is bounded by the 5-cycle input stage. It
takes about 307200·5 + 76800 ≈ 1.6 M cycles, which is 16 ms at 100 MHz. The
synthetic full-size test scans nearly every point and needs 11.5 cycles per
point.

## Register map

The host bus has a one-cycle write strobe. Read data is registered one cycle
after the read strobe. Addresses are 32-bit word indices.

| addr | name | |
|---|---|---|
| 0 | CTRL | bit0 start, bit1 load keyframe, bit2 load frame (write only) |
| 1 | STATUS | bit0 busy, bit1 done |
| 2 / 3 | KF / FRAME | byte address of the keyframe / frame image |
| 4 / 5 | MAP_IN / MAP_OUT | byte address of the input / output map |
| 6 | CYCLES | length of the last update (read only) |
| 16–24 | M | 3x3 matrix, row major, Q16.16 |
| 25–27 | t | Q16.16 (scaled so that t·id is in pixels for id in Q8.24) |
| 28–30 | epi_x, epi_y, epi_z | keyframe epipolar direction model, Q16.16 |
| 31, 32 | id_min, id_max | Q8.24 |
| 33, 34 | grad_create, grad_update | gradient thresholds |
| 35 | bl_min | signed blacklist limit |
| 36 | max_err | largest accepted match error |
| 37 | sigma2 | matching noise variance, in steps², Q8.24 |
| 38 | var_init | variance given to filled points, Q8.24 |
| 39 | fill_thresh | validity sum needed to fill a gap |

## Parameters

`depth_mapper_top` has two parameters: `IMG_W` = 640 and `IMG_H` = 480. The
two caches hold `IMG_W·IMG_H` bytes each, in four banks split by pixel
parity. The FIFO depths (8 in front of the gradient check, 64 around the
fast part), the 16-beat bursts, `MAX_STEPS` = 64 and the validity constants
are parameters of the submodules.

## Where this RTL departs from the reference architecture

* The memory interfaces are a reduced AXI4: addresses, lengths, data, last
  and handshakes only. The host interface is a simple register bus. The
  processor, DRAM and SoC interconnect are outside the design.
* The caches are banked by 2x2 parity, which is what a 2x2 window per cycle
  needs. The original was partitioned by a factor of 5 for tool reasons.
* The epipolar unit needs 7 cycles for scanned points instead of 5 (see
  above).
* The keyframe epipolar direction is a host-supplied affine function of the
  pixel position. The step length uses the max-norm instead of the
  Euclidean length. The search interval is ±2σ. The ambiguity test is 1.5×.
  The variance model, the validity constants, the window sizes and the
  filter weights are this design's own choices. The reference describes
  these units by function only.
* The tunable "design points" of the reference (other fast/slow rate ratios
  for smaller devices) are not provided. This RTL is the single
  5-to-1 configuration.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
  -Irtl -Itb rtl/slam_pkg.sv tb/tb_lpu.sv -o sim && ./obj_dir/sim
```

The end-to-end tests share `tb/tb_top_body.svh`:

* `tb_depth_mapper_top` runs a 64x24 image;
* `tb_depth_mapper_full` runs the top at its default 640x480 (about half a
  minute).

Both contain behavioural models of DRAM and the host. The synthetic scene is
a noise keyframe with a flat band of rows. The frame is the keyframe shifted
by 4 pixels, with a noise strip that spoils some matches. The initial map
mixes priors at two depths with empty rows. The tests:

* check that at least 90% of the points in clean texture end at the true
  inverse depth (±10%);
* check that every smoothed value lies within the range of its valid
  neighbours;
* count each mechanism and fail if one never occurs: scans, skips,
  out-of-frame rejects, error and ambiguity rejects, sub-pixel refinements,
  fusions, creations, gap fills, FIFO stalls, one-cycle skips in the fast
  part, read and write bursts.

The unit testbenches compare against reference computations written
independently in the testbench. They check the cycle rates where the
architecture fixes one: one point per 5 cycles in the gradient check, one
sample per cycle in the scan path, and one cycle for a skipped point.
