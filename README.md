# GCC: a Gaussian-wise 3D Gaussian Splatting renderer in SystemVerilog

A 3D Gaussian Splatting (3DGS) scene is a cloud of anisotropic 3D Gaussians. Each one
has a mean, a scale, a rotation, an opacity and a view-dependent colour given as
spherical-harmonic (SH) coefficients. To draw a view, every Gaussian is projected to a
2D elliptical splat. The splats are sorted by depth, and each pixel blends them front
to back until it is opaque.

GPU renderers, and most 3DGS accelerators, do this in two phases:
1. Preprocess every Gaussian: project it, colour it and bin it into screen tiles.
2. Render tile by tile.

The first phase pays for every Gaussian, including the many that end up hidden behind
others. The second phase evaluates every pixel of a tile against every splat
that touches the tile's bounding box.

This design works the other way round.

* **Gaussian-wise rendering.** Gaussians are handled one at a time, nearest first.
  Each one is projected, coloured and blended straight into an on-chip image buffer.
  The pixels it is blended into are found by walking outward from its centre, in 8 × 8
  pixel blocks, only as far as its alpha stays visible. There is no tile list and no
  bounding box.
* **Cross-stage conditional processing.** Blending keeps a one-bit-per-block
  *transmittance mask*, which says that every pixel of the block is already opaque.
  The mask feeds back into the earlier stages:
  * Masked blocks are never walked.
  * A Gaussian whose start block is masked is dropped before blending.
  * Once the whole view is masked, the remaining Gaussians are never coloured or
    blended, and later depth groups are not even fetched.

  Because Gaussians arrive in depth order, this early termination is exact.
* **Coarse depth grouping.** A full sort of millions of Gaussians is avoided. A cheap
  first pass puts each Gaussian into one of a few depth groups of at most 256, using a
  table of depth pivots. Only one group at a time is projected and sorted exactly.
* **Compatibility mode.** The image buffer holds one 128 × 128 sub-view. Larger images
  are rendered as a sequence of sub-views.

The RTL renders complete images. It has been checked end to end against a
floating-point reference renderer (see *Verification*).

## Block diagram

```
                 DRAM side (records, SH coefficients, group lists)
                   |             |                 |        ^
           Gaussian records   SH coeffs     group list rd   | group list wr
                   v             v                 v        |
   +-----------------------------+    +---------------+     |
   | projection_unit (Stage II)  |    | pingpong SH   |     |
   |  shared_mvm -> ppu -> ru -> |    | buffer        |     |
   |  scu      (cam_out: depth)--+--> rca (Stage I) --+-----+
   +-------------+---------------+    +-------+-------+
                 | projected Gaussians         |
                 v                             v
       pingpong shared buffer ------> sh_unit (Stage III colour)
                 |                             |
       sort_unit (Stage III order)             |
                 |                             v
                 +------> runtime_identifier --> alpha_array --> blending_unit
                               ^   (block walk)   (8x8 alpha,       |      ^
                               |                   exp_lut x64)     v      |
                               +------------ T mask -------- image_buffer -+
                                                                   |
                                                              image output
```

Everything except the DRAM is inside `gcc_top`. The DRAM is modelled in the end-to-end
testbench.

## How a frame is rendered

`gcc_top` is one controller state machine (`st`) driving the units above. For each
128 × 128 sub-view, in raster order:

1. **Clear.** The image buffer is set to colour 0 and transmittance 1. This takes 256
   cycles, one block per cycle. The transmittance mask and the RCA's group counters
   are cleared too.
2. **Stage I: depth grouping.** Every Gaussian record is streamed in, one per cycle.
   * The projection unit's first stage computes its camera-space position. The z
     component is the view depth; it is brought out as `cam_out`.
   * The Reconfigurable Comparator Array (`rca`) compares the depth with 15 ascending
     pivots at once. The number of pivots the depth is at or beyond is its group
     number, 0 to 15, with 0 the nearest.
   * Depths below 0.2 are culled.
   * Each group has a counter, which gives the Gaussian its slot in the group. The pair
     (id, depth) is written to DRAM at `grp * 256 + slot`.
   * A Gaussian arriving at a group that already has 256 members is dropped and
     counted. The paper subdivides such groups recursively; that is not built (see
     *Departures*).
3. **For each group, nearest first:**
   * **Stage II.** The group's list is read back, and each listed Gaussian's record is
     fetched and run through the full projection pipeline. Survivors of screen culling
     are written to the shared buffer. Their depths and buffer slots go to the sort
     unit.
   * **Stage III sort.** The sort unit orders the survivors by depth.
   * **Stage III colour and Stage IV render.** Gaussians are taken in sorted order.
     For each one, its record is read from the shared buffer and its 48 SH
     coefficients are fetched into the SH buffer. The SH unit turns them into an RGB
     colour for the current view direction. The coloured Gaussian is then handed to
     the runtime identifier, which walks its blocks through the alpha array into the
     blending unit.
   * **Overlap.** While the identifier walks one Gaussian, the controller already
     fetches and colours the next one. Consecutive Gaussians therefore overlap in the
     alpha and blending pipelines.
   * **Early termination.** If every block of the sub-view is masked, the controller
     skips the rest of the group before fetching anything more. It also skips all
     later groups.
4. **Write-out.** The 256 blocks are read out of the image buffer, one 8 × 8 block per
   beat, on `img_valid / img_x / img_y / img_rgb`.

Stage I is repeated for every sub-view, with the principal point shifted by the
sub-view origin, so each sub-view sees its own grouping. This is simpler than the 2D
spatial binning the paper uses to share one Stage I pass between sub-views, but it
reads the scene once per sub-view.

## The projection pipeline (`projection_unit`)

One Gaussian per cycle in; the result comes out 22 cycles later. The stages:

| unit | work | latency |
|---|---|---|
| `shared_mvm` | camera-space mean `W·μ + t`: nine multiply-add cells in three rows | 1 |
| `ppu` | 1/z from the divider pool, then `u = fx·x/z + cx`, `v = fy·y/z + cy` | 6 |
| `ru` | build R from the quaternion and M = R·S. Build the Jacobian J of the projection from 1/z. Form Σ' = (J W M)(J W M)ᵀ, the 2D covariance | 2 |
| `scu` | conic Σ'⁻¹ from 1/det; largest eigenvalue λ = mid + √(mid² − det); radius r = √(2·ln(255·w)·λ); cull | 13 |

`divsqrt_pool` holds four iterative units. Each produces 12 result bits per cycle by
restoring long division or digit-by-digit square root, so one 48-bit result takes 4
cycles plus a register. The units are issued
round-robin, one operation per cycle, so together they accept a new operation every
cycle.

The radius is the distance at which the Gaussian's alpha falls to 1/255, along its
longest axis. A dim Gaussian therefore gets a smaller radius than the usual 3σ. The
screen cull rejects a Gaussian whose radius is not positive: that covers a
non-positive determinant and opacity below 1/255. It also rejects a Gaussian whose
(μ ± r) box misses the 128 × 128 sub-view.

The SCU computes 1/det scaled up by 2¹² and shifts the product back down. Without the
scaling, the conic of a large Gaussian loses most of its precision.

## Sorting a group (`sort_unit`, `bitonic16`)

Up to 256 (depth, slot) pairs are loaded one per cycle. On `start`, the sort runs in two
phases:
* A 16-input bitonic network sorts consecutive runs of 16 in place, one run per cycle.
* Merge passes of length 16, 32, 64 and 128 stream pairs of sorted runs into one,
  one entry per cycle. Each pass alternates between the two banks of the sorted
  buffer.

A full group takes 16 + 4·256 cycles. Short groups use only as many runs and passes as
they need. Unused entries are padded with the largest key.

## Colour (`sh_unit`)

The view direction μ − camera centre is normalised with one square root and one
reciprocal from a divider pool. The 16 real SH basis functions of degree ≤ 3 are then
evaluated, and each channel is the dot product with its 16 coefficients, plus 0.5 and
clamped at 0. The latency is 14 cycles: direction, √, reciprocal, normalise, basis,
dot product.

## Finding a Gaussian's footprint: the block walk (`runtime_identifier`)

This is the part that replaces tile binning, and the one to understand first when
changing the design.

The sub-view is a 16 × 16 grid of 8 × 8-pixel blocks. For each Gaussian:

1. **Start block.** The walk starts at the block containing the projected centre.
   When the centre lies off the sub-view, it starts at the nearest in-bounds block:
   each block coordinate is clamped to 0…15.
2. **Status map and queue.** A status map S of 256 bits starts as a copy of the
   transmittance mask, so saturated blocks are treated as already visited. The
   start block is marked in S and handed out in the cycle of `start` itself.
3. **Evaluate.** Blocks are taken from a FIFO queue Q, which can hold all 256 blocks,
   and offered on `blk_valid/blk_ready` to the alpha array. Results come back on
   `res_valid/res_blk/res_pass`, in any order. `res_pass` means at least one pixel
   of the block has alpha ≥ 1/255.
4. **Grow.** Only when a block passes are its eight neighbours considered. That is the
   blocks at offsets −17, −16, −15, −1, +1, +15, +16 and +17, without wrapping
   across rows or past the grid edge. Neighbours not yet in S are marked and all
   pushed in the same cycle, up to 8 queue writes.
5. **Finish.** `done` pulses when Q is empty and no result is outstanding.

A Gaussian's footprint above the 1/255 threshold is an ellipse, which is convex. The
walk therefore visits every block of the footprint plus one ring of failing blocks
around it, and nothing else. One pixel can be missed in a rare case: a block that
touches the footprint only at a corner, next to neighbours none of which pass. The
testbench checks the walk against an independent model of exactly this closure rule,
not against the exact ellipse.

If the start block itself is masked, the controller skips the Gaussian without
walking. A Gaussian centred in a saturated block can still touch unsaturated blocks
nearby, so this costs a little accuracy in exchange for not walking a Gaussian that
would contribute almost nothing.

Only one Gaussian is walked at a time. The alpha array and the blending unit are
pipelined, so the blocks of consecutive Gaussians overlap there. The identifier
itself waits for `done` before taking the next Gaussian.

## Alpha and blending

**`alpha_array`.** This has 64 pixel engines, one per pixel of a block. Each computes
the exponent `ln w − ½ dᵀ Σ'⁻¹ d` at its pixel centre, where d is the offset from the
projected mean. It then looks up `exp_lut` and flags the pixel if alpha ≥ 1/255. The
block leaves one cycle later through a valid/ready register, together with its pass
bits and the Gaussian's colour.

**`exp_lut`.** This is e^x over [−5.54, 0) as 16 straight-line segments of equal width.
Each line is the chord of e^x over its segment, lowered by half its largest gap to the
curve, so the error is split evenly above and below. Inputs below −5.54 give 0. The
output is capped at 0.99. The coefficients are computed while elaborating, from the
chord formula.

**`blending_unit`.** This updates one block per cycle, front to back. For each pixel
with alpha ≥ 1/255 and T > 0:

```
T' = T · (1 − α)
if T' < 0.0001:  the pixel stops (T := 0, colour unchanged)
else:            C += c · α · T ;  T := T'
```

This is a two-stage pipeline. In the accept cycle, the block's C and T are requested
from the image buffer. Stage 1 receives them and computes T' and α·T. Stage 2
accumulates the colour and writes the block back two cycles after acceptance. When
every pixel of a written block has stopped, the block's bit in the 256-bit
transmittance mask is set.

**The ordering stall.** Blending must happen in depth order per pixel, and the next
Gaussian's walk can start while the previous Gaussian's last blocks are still in the
pipeline. So an incoming block equal to a block in stage 1 or stage 2 is held, with
`in_ready` low, until the earlier update has been written. Every held cycle is counted
in `stalls`. Different blocks never wait for each other.

**`image_buffer`.** This has four banks, R, G, B and T. Each bank is 256 words of
64 × 16 bits, which is 32 KB. One whole block is read and one written per cycle, and
the read data arrives one cycle after the request. The clear sweeps all 256 words
in 256 cycles while `busy` is high.

## Buffers between the stages

`pingpong_buffer` is a generic two-bank memory: one bank is written while the other is
read, and the banks are swapped by the controller. The read data arrives one cycle
after the request.
* The **shared buffer** holds the projected Gaussians of the current group, 256 entries
  of (id, 3D mean, projected Gaussian).
* The **SH buffer** holds one Gaussian's 48 coefficients per bank.

## Number formats

* **Geometry, covariances, SH coefficients:** signed fixed point `fx_t`, 48 bits with
  20 fraction bits. The range is about ±1.3·10⁸ and the resolution about 10⁻⁶. Every
  multiply and add saturates. The helpers are in `gcc_pkg`: `fx_mul`, `fx_fma` and
  `fx_c` for constants.
* **Colour, transmittance, alpha:** unsigned Q0.16. The constants are:
  * 1/255 → 257
  * 0.99 → 64880
  * 0.0001 → 7
* **Range limit.** The SCU forms det(Σ') ≈ σ⁴ in pixels. This overflows for Gaussians
  with σ above roughly 107 pixels, which is a few times wider than most splats at this
  sub-view size. Such Gaussians come out with a saturated, wrong conic.

## Top-level interface (`gcc_top`)

| port group | meaning |
|---|---|
| `start`, `busy`, `done` | render one view. `cam` (rotation, translation, focal lengths, principal point, camera centre), `img_w`, `img_h`, `num_gauss` and the 15 `pivots` must stay stable while busy |
| `g_req_valid/g_req_id` → `g_rsp_valid/g_rsp_data` | Gaussian record fetch: mean, scale, quaternion (w, x, y, z) and ln(opacity) |
| `sh_req_valid/sh_req_id` → `sh_rsp_valid/sh_rsp_data` | SH coefficient fetch: 16 × 3 values |
| `gl_wr_*` | Stage I writes (id, depth) to group list address `grp*256+slot` |
| `gl_rd_*` → `gl_rsp_*` | group list read-back |
| `img_valid/img_x/img_y/img_rgb` | one 8 × 8 block of RGB per beat, at pixel (img_x, img_y) |
| `n_*` counters | Stage I culls, group overflow drops, screen culls, rendered Gaussians, alpha blocks, blended blocks, skipped Gaussians, skipped groups, ordering stalls, sub-views |

**Memory protocol.** Requests are single-cycle pulses and are always accepted. Responses
must come back in request order, with any latency. There is no backpressure.

**Opacity input.** Opacity is supplied as ln(w), so the alpha exponent needs no
multiply.

**Parameters.** `NPIV` (15) is the number of depth pivots, so there are NPIV+1 groups.
`GROUP_N` (256) is the group capacity.

## Module list

| file | what it is | latency / rate |
|---|---|---|
| `gcc_pkg.sv` | types, constants, fixed-point helpers | |
| `shared_mvm.sv` | 3 × 3 matrix-vector multiply-add | 1 cycle, 1/cycle |
| `divsqrt_iter.sv`, `divsqrt_pool.sv` | 4-cycle divide/sqrt units, pool of 4, round-robin | 5 cycles, 1/cycle |
| `ppu.sv`, `ru.sv`, `scu.sv` | projection stages | 6, 2, 13 |
| `projection_unit.sv` | the whole Stage II pipeline | 22, 1/cycle |
| `rca.sv` | depth grouping and Stage I cull | 1, 1/cycle |
| `bitonic16.sv`, `sort_unit.sv` | group sort | 16 + passes·n cycles |
| `sh_unit.sv` | SH colour | 14, 1/cycle |
| `exp_lut.sv` | piecewise-linear exponential | combinational |
| `alpha_array.sv` | 8 × 8 alpha engines | 1 |
| `runtime_identifier.sv` | block walk | start block in 0 cycles |
| `blending_unit.sv` | blending, T mask, ordering stall | write-back 2 cycles after accept |
| `image_buffer.sv`, `pingpong_buffer.sv` | memories | read 1 |
| `delay_line.sv` | register delay used to align side data with a pipeline | D |
| `gcc_top.sv` | controller and top | |

## Departures from the paper

* **Number format.** The paper's arithmetic units are floating-point multiply-add
  cells, and its figure of the alpha unit labels the exponential as FP16. Here
  everything is fixed point. The exponential is fixed point in both.
* **Depth groups.** There are 15 pivots (16 groups), loaded from outside. The paper's
  coarse binning uses far more bins and subdivides overfull groups recursively. Here an
  overfull group keeps its first 256 members and drops the rest, and counts them.
* **Stage I.** Stage I uses the projection unit's single MVM, where the paper uses four
  in parallel. It is repeated for every sub-view instead of binning once.
* **One projection unit.** There is one projection unit, where the paper has two.
  Groups are processed one after another; the next group is not loaded while the
  current one renders.
* **The block walk.** The walk handles one Gaussian at a time. The paper keeps status
  maps and queues for up to 16 Gaussians, and marks whole regions up to the image edge
  as pruned. Neither is built.
* **Start block conflict.** The paper describes the start block of an off-view
  Gaussian both as the nearest valid pixel and as the nearest image corner. The
  nearest in-bounds block is used.
* **Buffer sizes.**
  * The shared buffer holds a full group of projected Gaussians, larger than the
    paper's 2 × 6 KB.
  * The SH buffer holds one Gaussian per bank, smaller than the paper's 2 × 24 KB.
* **Reciprocal depth.** The reconstruction unit takes 1/z from the position unit
  instead of using its own dividers.
* **Not built.**
  * No 0.3-pixel low-pass is added to the 2D covariance.
  * The quaternion is assumed to be normalised.
  * The SH basis constants and the +0.5 offset follow the usual 3DGS convention.

## Verification

Every unit has a self-checking testbench in `tb/`. Each compares against values computed
independently in the testbench, mostly in floating point or wide integers. Each checks
the stated latency, has a watchdog, and ends with a `TB_RESULT checks=… failures=…`
line.

| testbench | what it checks |
|---|---|
| `tb_shared_mvm`, `tb_divsqrt_pool`, `tb_ppu`, `tb_ru`, `tb_scu`, `tb_sh_unit`, `tb_projection_unit` | arithmetic against real-valued models, exact latency, every cull reason. Divide and sqrt are checked bit-exact (truncated quotient, floor root) |
| `tb_rca` | grouping, cull, slot numbering, overflow and drop at reduced `GROUP_N` |
| `tb_sort_unit` | random group sizes up to 64 (reduced from 256) including 1, 16, 17 and the maximum; cycle count |
| `tb_exp_lut` | the whole input range against e^x, the clamp and the cap |
| `tb_alpha_array` | every pixel's alpha and pass bit, under random back-pressure |
| `tb_runtime_identifier` | the visited block set against a model of the closure rule, random masks, random result delay and reordering |
| `tb_blending_unit` | blended image against a wide-integer model, the stall count, the mask, clear |
| `tb_image_buffer`, `tb_pingpong_buffer` | read/write/clear/swap behaviour |
| `tb_gcc_top` | end to end at the default parameters |

### `tb_gcc_top`

This renders a 256 × 128 image, two sub-views, of a 527-Gaussian generated scene. The
scene is built so that every mechanism acts at least once:
* faint wide Gaussians in opposite corner blocks, for the ordering stall;
* dense opaque "walls" that saturate every block;
* a crowded group behind the walls, which overflows and is then skipped;
* Gaussians behind the camera and off screen.

The result is compared with a floating-point renderer in the testbench. The mean
channel error is about 6·10⁻⁴, and fewer than 0.1 % of values are off by more than 0.03.

The test fails if any of these counters stays at zero: Stage I cull, group overflow,
screen cull, rejected blocks, Gaussian skip, group skip, ordering stall, multiple
sub-views. It takes about 24,000 cycles, a few seconds in Verilator.

### Running

```
verilator --binary --timing --assert -y rtl -y tb rtl/gcc_pkg.sv tb/tb_gcc_top.sv --top-module tb_gcc_top
./obj_dir/Vtb_gcc_top
```

Replace `tb_gcc_top` with any other testbench name. Modules are found by file name
through `-y`.

## Real scenes

The evaluated scenes are Synthetic-NeRF Lego and Palace, Tanks & Temples Train and
Truck, and Deep Blending Playroom and Drjohnson. They have roughly 0.3 to 3 million
Gaussians and images up to about 1332 × 876, so 40 to 77 sub-views.

**What does not fit.** At the default 16 groups × 256, a sub-view can hold at most 4096
Gaussians after depth culling. Real scenes put far more than that in front of the
camera, so whole groups would overflow. These scenes need the recursive group
subdivision (or a much larger pivot table and DRAM list space), which this RTL does not
have. The image side fits: 128 KB of image buffer per sub-view.
