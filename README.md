# Monte-Carlo pose estimation accelerator

A robot that picks up objects needs each object's 6-DoF pose: position (x, y, z) and
orientation (roll, pitch, yaw). This design estimates it with a generative,
sample-based method. An object detector (not part of this RTL) first marks where the
object may be in the image, as bounding boxes with a confidence each. The accelerator
then keeps a population of pose hypotheses, or *samples*. On every iteration it:

1. renders the object's triangle model at each sample's pose;
2. counts how many rendered pixels agree with the measured depth image inside the
   sample's box;
3. turns those counts into a weight per sample;
4. draws a new population in proportion to the weights, and jitters it with Gaussian
   noise.

This repeats until the mean weight reaches a threshold. The answer is the heaviest
sample.

The hardware follows a published FPGA architecture for this algorithm:

- 620 samples scored by 20 parallel raster cores, i.e. 31 *sample iterations* per
  Monte-Carlo iteration;
- a 640 x 480 depth image;
- an index-only sorter;
- a resampler with a threshold table;
- a ping-pong sample memory.

All numbers below are this RTL's defaults unless marked otherwise.

## Dataflow and control

```
 detections ──► sample_initializer ──► sample_list_mem (bank A / bank B)
                                          │
        ┌─────────────── per sample iteration (20 samples) ───────────────┐
        │ tmat_distributor: pose -> R,t and box, one core at a time       │
        │ depth_distributor: union of boxes read once, broadcast to cores │
        │ vertex_distributor: triangle k to all cores (raster iteration)  │
        │ raster_core x20: cull, project, scan box, compare, count        │
        │ weight_merger: w = a*N/Nb + b*N/Nr + g*c -> index_sorter        │
        └──────────────────────────────────────────────────────────────────┘
                                          │ 31 times
             converged or max_iter? ──yes──► best sample (sorter rank 0)
                   │ no
             resampler (top K, CDF + thresholds) ──► diffuser ──► other bank, swap
```

`mc_top` sequences these steps. It has one state machine with these states:

| State | What happens |
|---|---|
| `INIT` | The sample initializer fills the sample list. |
| `ITER` | Starts a Monte-Carlo iteration. |
| `TMAT`, `DEPTH`, `RASTER`, `MERGE` | One sample iteration, run in this order. |
| `CHECK` | Tests convergence. |
| `RESAMPLE` / `FLUSH` | Builds the next list in the other bank, then swaps banks. |
| `BEST` | Reads the heaviest sample. |

**Partial last sample iteration.** When N is not a multiple of the core count, the last
sample iteration uses fewer cores (`n_active`). The distributors and the merger ignore
the idle cores.

**Convergence test.** The run stops when the weight sum reaches `tau * N`, which is the
same as the mean reaching `tau`. It also stops after `max_iter` iterations.

**External data.** The depth image stays outside the chip. It is read through
`depth_rd_req` / `depth_rd_addr` (= y*640 + x) / `depth_rd_data`. The port takes one
request per cycle and returns data exactly `RD_LAT` cycles later.

**Host loading.** The host loads two tables before `start`:

- the detections, through `box_we` (box corners in pixels, half-open, plus the detector
  confidence);
- the model, through `mdl_we` (triangles).

**Run-time inputs.** These are all inputs, because the source leaves them to tuning:

- camera intrinsics;
- the inlier threshold `eps`;
- the weight coefficients α, β, γ;
- the convergence threshold τ;
- the resampling depth `k_top`;
- the noise scales `delta_t` / `delta_r`;
- the initial depth guess;
- the seed.

## Number formats (`mc_pkg`)

The source only says that all arithmetic is fixed point. The formats are this design's
own:

| Quantity | Type | Format |
|---|---|---|
| Position / model vertex | `coord_t` | 20-bit signed, 1/16 mm (±32 m) |
| Angle | `angle_t` | 16-bit binary angle (65536 = 360°) |
| Rotation matrix entry | `rot_t` | Q2.14 |
| Screen coordinate | `pix_t` | 16-bit signed, 1/16 pixel |
| Depth | `depth_t` | 16-bit unsigned mm, 0 = no measurement |
| Weight, confidence, α β γ τ | `wgt_t` | Q0.16 |
| Pixel counts N, Nr, Nb | `cnt_t` | 18 bits |

## The raster core

Each core scores one sample at a time and holds no rendered image. The work is split
into three parts.

1. **Load.** The core latches the sample's transform and box. It then stores the
   depth pixels of its box that the depth distributor broadcasts into a private
   *region memory*. This memory is 256 x 192 x 16 bit, row stride 256. While storing,
   the core counts the non-zero pixels as **Nb**, the observed points in the box.
2. **Geometry** (`rc_geometry`, one triangle at a time, about 100 cycles):
   - **Transform.** Each vertex is moved into the camera frame: p' = R p + t.
   - **Backface cull.** The face normal n = (p1−p0)×(p2−p0) is dotted with the ray to
     p0, and the triangle is dropped when the result is ≥ 0. This assumes model
     triangles wound counter-clockwise when seen from outside. The check is made in
     the camera frame on exact integer products. It needs no division, so a culled
     triangle costs only a few cycles.
   - **Project.** Each vertex is projected as u = fx·X/Z + cx and v = fy·Y/Z + cy,
     using six sequential dividers in parallel.
   - **Set up.** The geometry stage computes the screen-space depth gradients dz/du
     and dz/dv. This takes two more dividers on the signed area.
   - **Clip.** The triangle's pixel rectangle is clipped to the sample box. Only
     pixels inside the box are ever visited. This is the *partial rasterization* that
     makes a core's cost independent of image size.
3. **Pixels** (`rc_pixel`, one pixel per cycle). The pixel stage walks the clipped
   rectangle.
   - **Coverage.** Three edge functions are evaluated at the pixel centre. The pixel
     is covered when they all have the sign of the triangle area; edges are included.
   - **Depth.** The depth is z0 + dz/du·Δu + dz/dv·Δv.
   - **Counting.** The observed depth is read from the region memory, with one cycle
     of latency. A covered pixel increments **Nr**, the rendered points. It also
     increments **N**, the inliers, when the observation is non-zero and
     |z_rendered − z_observed| < eps.

   The 3-D point-to-point distance of the original formulation is replaced by this 1-D
   depth difference along the ray.

Geometry and pixel stages work on consecutive triangles at the same time, through a
one-entry valid/ready hand-off. The whole model passes through once per sample, so the
core spends roughly max(~100 cycles, covered-rectangle area) per triangle. Triangles
outside the box or entirely culled cost little.

Things to know when trusting the counts:

- **No z-buffer.** Pixels where two front-facing triangles overlap are counted twice.
  This happens for concave models, and on shared edges because edges are inclusive.
  The weight merger clips each ratio at 1.
- **Screen-space depth interpolation.** Depth is interpolated linearly in screen space,
  not perspective-correctly. The error grows with a triangle's depth range divided by
  its distance, and is small for object-sized triangles at manipulation distances.
- **Clipping and near plane.** Boxes larger than 256 x 192 are clipped to their
  top-left 256 x 192 pixels. Triangles with a vertex closer than 1 mm are dropped, and
  so are triangles projecting beyond ±1024 px.

## Sharing the depth image between cores

The boxes of the 20 samples in a sample iteration overlap heavily, because many
hypotheses sit on the same detection. Loading each core's box separately would read
the overlapped pixels many times. `depth_distributor` instead scans the *union* of the
active boxes:

- It goes row by row, from the lowest top edge to the highest bottom edge.
- Within a row it reads one pixel per cycle while some box covers the column. Where no
  box does, it jumps to the next box's left edge in one cycle.
- Each read carries a mask of the cores whose box contains the pixel. When the data
  returns, pixel, coordinates and mask are broadcast, and every masked core stores the
  pixel.

So each pixel of the union is read exactly once, however many boxes contain it. In the
unit test, three overlapping boxes (and an empty one) total 27,200 pixels but need only 21,000 reads and
21,286 cycles. `stat_depth_reads` and `stat_shared_px` report this at run time.

## Weights, sorting and resampling

**Weights.** `weight_merger` visits the active cores in turn. For each it computes
N/Nb and N/Nr with two sequential dividers. Each ratio is clipped to [0, 1], and a
zero denominator gives 0. The weight is w = α·N/Nb + β·N/Nr + γ·c, where c is the
detector confidence of the sample's box. The weight is saturated to Q0.16 and emitted
as (sample index, weight).

**Sorting.** `index_sorter` sorts only (index, weight) pairs, never whole poses. It is
an insertion sorter in a register array: each arriving weight finds its rank in one
cycle, and the lighter entries shift down. The order is heaviest first. One figure
caption in the source says "ascending", but its own example is descending, and
descending is what makes "take the top K" a prefix.

**Resampling.** `resampler` draws N new samples from the K heaviest (`k_top`) in three
phases:

1. **Sum.** S = the sum of the top-K weights.
2. **Build.** Write the running sum Φ(k) into a CDF memory. In the same pass, fill a
   32-entry *threshold table*: entry j holds the first k with Φ(k) > j·S/32.
3. **Draw.** For each of N draws, a 32-bit random u gives r = u·S/2^32. Because the
   thresholds have a constant step, the top 5 bits of u select the threshold entry
   directly: a single read replaces the coarse search. A fine search then reads the
   CDF upward from that entry's start until r < Φ(k).

`resampler_full_tb` runs the full default size: 620 samples and 32 thresholds, with
weights that fall off slowly. It needs 11.0 memory reads per draw, against 204 for a
linear search from slot 0. The source reports about 10 instead of 410. Its linear
figure depends on how the weights are distributed. Resampling from the top 10% only
(`k_top` = 62) needs 3.1 reads per draw. `stat_resample_reads` counts these reads in
the full design.

**Diffusion.** `diffuser` takes each (destination slot, source sample) pair and reads
the source sample from the current bank. It adds noise to all six pose components and
writes the result into the *other* bank at the destination slot. The noise is the sum
of four 16-bit uniform numbers from xorshift64 generators (Irwin–Hall), scaled to
standard deviation `delta_t` for x, y, z and `delta_r` for the angles. Each sample
takes three cycles. After the last write the controller swaps banks. Two banks let
the new list be written while the old one is still being read, with no copy.

## Other blocks

**`tmat_distributor`.** For each active core it reads the sample and runs three
16-step CORDICs for sin/cos of roll, pitch and yaw. It builds R = Rz(yaw)·Ry(pitch)·
Rx(roll) in Q2.14, looks up and clips the box, and pulses that core's `load_en`. This
takes about 21 cycles per core.

**`vertex_distributor`.** It holds the model, up to 4096 triangles. It offers triangle
k to all active cores with a separate valid/ready pair per core. It moves on when every
core has taken it. The slowest core therefore paces a raster iteration, and
`stat_tri_waits` counts the cycles lost this way.

**`sample_initializer`.** Sample i is assigned detection i mod `num_box`. It is placed
at a random pixel of that box, back-projected at depth `init_z ± z_spread`, with
uniformly random angles. The source does not say how initial samples are placed; this
is the simplest rule that spreads them over every detection.

**`sample_list_mem`.** Two banks of N samples. A sample holds its pose and the index of
its detection.

**Helper modules.** `sdiv_seq` is a signed restoring divider giving one quotient bit
per cycle. `cordic_sincos` computes sine and cosine.

## Memory budget

At the defaults, the design holds about 16.6 Mbit of memory arrays. Almost all of it is
the 20 region memories, each 256 x 192 x 16 bit = 786 kbit, or 21.3 BRAM36 if mapped
one to one. That is 427 BRAM36 in total, inside the 480 the source gives for its 20
cores.

The other memories are:

| Memory | Size |
|---|---|
| Model memory | 4096 triangles x 180 bit = 737 kbit |
| Sample list | 2 x 620 x 114 bit |
| Resampler CDF and threshold memories | about 20 kbit |

The index sorter is a register array of 620 x (10 + 16) bits with one comparator per
entry, since it inserts one weight per cycle. It is the largest block of logic outside
the raster cores. A deeper but slower sorter built around a RAM would trade this logic
for cycles.

## Where this design departs from, or adds to, the source

- **Fixed-point formats, handshakes and latencies** are this design's own; the source
  gives none.
- **Geometry details** are also this design's own: winding convention, near plane,
  linear depth interpolation, no z-buffer, and the 256 x 192 region memory size. The
  region size is chosen to fit the 24 BRAM36 per core implied by the source's resource
  table, since 480 BRAM36 for 20 cores gives 24 per core.
- **Stage overlap.** The stages of a sample iteration run one after another. The
  source pipelines inside the raster core, as done here, but does not say whether
  depth distribution overlaps rasterization. Expect the cycle counts of this RTL to
  differ from the source's reported times of about 17–25 ms per iteration at 200 MHz.
- **Added blocks.** The detection table, the activity counters and the `max_iter`
  limit are additions.
- **Not included.** The object detector itself, and the board memory holding the image
  and detections. The top exposes ports for both.
- **Constants.** The sizes of the threshold table (32 entries), the model memory (4096
  triangles) and the detection table (64 boxes) are not given by the source.

## Verification

Each block has a self-checking testbench in `tb/` that compares the block with an
independent model:

| Testbench | What it checks |
|---|---|
| `raster_core_tb` | Exact counts against a reference rasterizer written with integer edge functions and real-valued depth. |
| `depth_distributor_tb` | Every core receives exactly its box, and reads equal the union. |
| `index_sorter_tb` | Order against a sorted reference. |
| `resampler_tb`, `resampler_full_tb` | Every draw, and the exact read count, against a direct CDF search using the same random numbers. |
| `diffuser_tb` | Mean and standard deviation of the noise. |
| `weight_merger_tb` | Weights against real-valued arithmetic. |
| `tmat_distributor_tb` | Matrices against `$sin`/`$cos`. |
| `sample_initializer_tb` | Re-projection into the box. |
| `sample_list_mem_tb` | Bank behaviour under random traffic. |
| `vertex_distributor_tb` | Each core receives every triangle once, in order. |

`mc_top_tb` runs the whole design at reduced size: 12 samples, 5 cores and 64 x 64
regions. The scene is a cube in front of a wall. The test counts culling, shared depth
pixels, triangle stalls, partial sample iterations, resampling reads, bank swaps, and
both ways a run can end. It checks that every sample gets one weight per iteration and
that the reported best is a top-weighted sample.

`mc_top_full_tb` runs the top with every parameter at its default: 620 samples, 20
cores, 256 x 192 regions. It does two full Monte-Carlo iterations and simulates in
under a minute with Verilator.

In that test, one Monte-Carlo iteration takes about 554,000 cycles, or 2.8 ms at
200 MHz. The scene is a 12-triangle model with boxes of about 60 x 60 pixels, so each
sample iteration takes about 17,900 cycles. About 4,800 of those cycles are depth
distribution, about 1,200 are matrix loading and weight merging, and the rest is
rasterization. Resampling and diffusion add about 29,000
cycles. Backface culling removes 54% of the triangles offered (8,091 of
14,880). A closed convex model shows at most half its faces, and the source reports
about 50% on its models. The source reports 17–25 ms per iteration on real object models, but it does
not give their triangle counts.

To run a test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    --top-module mc_top_tb tb/mc_top_tb.sv && ./obj_dir/Vmc_top_tb
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`.
