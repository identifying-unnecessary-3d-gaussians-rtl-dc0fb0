# Cluster pre-identification accelerator for 3D Gaussian splatting

A 3D Gaussian splatting (3D-GS) scene holds millions of Gaussians. For any
one view, most of them lie behind the camera or outside the field of view.
A conventional renderer finds this out only after step 1: it projects every
Gaussian, builds its 2D covariance and footprint, and only then discards
the ones that miss the image. This design avoids most of that work.

Offline, Gaussians that lie close together are grouped into clusters. Each
cluster is described by one bounding sphere: its centroid C and a radius R
that covers every member's mean plus three standard deviations of its
extent. At render time, a small engine projects each sphere onto the image
as a circle. A cluster whose circle misses the image, or whose sphere lies
wholly behind the camera, is dropped together with all of its Gaussians.
Step 1 then runs only on the Gaussians of the clusters that survive.

The RTL implements the whole rendering pipeline around this idea:

- a cluster ordering unit;
- the Cluster Identification Engine (CIE);
- a step-1 engine and a step-2 engine, each behind a ping-pong buffer;
- two on-chip global buffers.

It is written in synthesizable SystemVerilog-2017. It renders a complete
frame and streams the pixels out.

## The keep test for a cluster sphere

The CIE receives the camera as a 4x4 world-to-camera matrix, the image width
W and height H, tan(θ/2) of the horizontal field of view, and the near-plane
distance. For each cluster it computes the following.

1. `(xc, yc, D, 1) = M · (Cx, Cy, Cz, 1)`, on a 4x4 array of
   multiply-accumulate PEs. D is the camera-space depth of the centroid.
2. The focal distance `d = W / (2 tan(θ/2))`. From similar triangles, the
   projected radius is `r = R · d / D = R·W / (2 tan(θ/2) · D)`. The circle's
   centre is `u = d·xc/D + W/2` and `v = d·yc/D + H/2`.
3. The decision:
   - `D + R ≤ znear`: the sphere is entirely behind the near plane. Drop.
   - `D − R ≤ znear`: the sphere straddles the camera plane, and the
     projection is meaningless there. Keep, to be safe.
   - Otherwise, keep if the circle's bounding square `u ± r, v ± r`
     overlaps `[0,W) × [0,H)`. This is four comparisons. Near the corners
     it keeps slightly more than an exact circle test would.

Both axes use the same focal distance, so pixels are assumed square. The
test is conservative: a cluster is dropped only if none of its members can
reach the image. Every Gaussian of a kept cluster still goes through the
exact per-Gaussian test of step 1.

Computing R, and the k-means clustering itself, happen offline and are not
part of the hardware. The chip receives a cluster table. Each record holds
the id, centroid, radius, and the range `first .. first+count−1` of the
cluster's Gaussians in the global buffers. A cluster's Gaussians are stored
contiguously.

## Dataflow

```
 cluster table ─► cluster_order ─► cie ─────────► step1_engine ─────────► step2_engine ─► pixels
   (fill port)     usage counts ◄─ hit_id           │  ping-pong bank x2    │  ping-pong bank x2
                                   FIFO, 4x4 PE,    │  step1_preprocess     │  gaussian_distribute
                                   radii, decision  ▼                       │  depth_sorter
                                              geometry global buffer        │  sh_color, alpha_blend
                                              (mean, scale, quaternion)     ▼  frame accumulator
                                                                     appearance global buffer
                                                                     (opacity, 48 SH coefficients)
```

All stages run at the same time.

- The CIE takes one cluster per cycle.
- The step-1 loader starts fetching a kept cluster's Gaussians while the CIE
  is still working on later clusters.
- Step 1 starts as soon as one of its banks is full.
- Step 2 likewise starts on its first full bank of survivors.

So the time spent identifying clusters is hidden behind the rendering
itself. That is the purpose of the ping-pong buffers.

Every link is a valid/ready stream. Back-pressure travels all the way back:

- A busy step 2 stalls step 1's output register.
- That stalls the step-1 banks, then the loader.
- The loader stops accepting clusters, which stalls the CIE pipeline and
  then its FIFO.
- The full FIFO stops the cluster ordering unit.

## Ping-pong banks, flush and the end of a frame

`pingpong_buffer` has two banks of `DEPTH` records, and at any time one
bank is filling.

When the fill bank reaches DEPTH records, it *swaps*:

- The bank is handed to the process side.
- If the other bank is free, filling continues there.

If the other bank is still being processed, `wr_ready` drops. This is the
stall counted by `cnt_stalls`.

The process side reads the full bank at random (an asynchronous read port)
and frees it with `rd_release`.

A frame rarely ends on a bank boundary. Each engine therefore takes an
`upstream_done` signal:

- For step 1, this is "the ordering unit has issued every cluster and the
  CIE is empty".
- For step 2, it is "step 1 is done".

Once all input has been loaded, the engine raises `flush` once. This closes
the partly filled bank, which is then processed like a full one. An
engine's `done` rises when its last bank has been processed and its output
has drained. Step 2 then streams out the frame.

## Step 1: from Gaussian to splat

`step1_preprocess` is a single registered stage that computes the following
for one Gaussian per cycle. Wide products are kept in 64 bits.

- The camera-space mean `t = M·μ`. It is visible only if `tz > znear`.
- The 3D covariance `Σ = R S Sᵀ Rᵀ`, from the unit quaternion and the
  linear scales.
- The 2D covariance `Σ' = J W Σ Wᵀ Jᵀ`. J is the Jacobian of the perspective
  projection at t. As in the reference 3D-GS rasterizer:
  - `tx/tz` and `ty/tz` are clamped to ±1.3·tan(θ/2);
  - 0.3 is added to the diagonal as a low-pass filter.
- The conic, which is the inverse of Σ'. The Gaussian is dropped when
  det Σ' ≤ 0.
- The radius `ceil(3·sqrt(λmax))`, where λmax is the larger eigenvalue of
  Σ', and the projected centre (u, v).
- Visibility: the radius is positive and the square `u ± r, v ± r` overlaps
  the image.

Only visible Gaussians leave the step-1 engine. The engine counts the
others as culled.

## Step 2: batches, tiles, depth order

This is the part that differs most from a software rasterizer, and it has
the most consequences.

Step 2 never holds a frame's full list of Gaussians. It sees them one bank
at a time, as batches of up to `PP2_DEPTH` records. A record is a splat plus
its opacity and SH coefficients, fetched from the appearance buffer by
Gaussian id.

For each full bank, `step2_engine` does the following.

1. **Distribute.** `gaussian_distribute` turns each Gaussian's 3σ square
   into a clipped rectangle of TILE×TILE tiles. It emits one
   (tile, Gaussian) pair per cycle into per-tile lists.
2. **Sort.** For each non-empty tile, `depth_sorter` takes the tile's list
   in, one insertion per cycle, ordered by camera depth. It is an insertion
   sort in a register array, and it keeps arrival order for equal depths.
3. **Blend.** For every pixel of the tile, the Gaussians are blended
   nearest first, one pixel-Gaussian pair per cycle:
   - `sh_color` evaluates the view-dependent degree-3 SH colour, with the
     view direction from the camera centre to the mean.
   - `alpha_blend` computes `α = min(0.99, o·exp(−½ dᵀ Σ'⁻¹ d))`. The pair
     is skipped when α < 1/255, or when the transmittance would fall below
     about 10⁻⁴.
   - It then updates `C += T·α·c` and `T *= (1−α)`.

Per-pixel colour and transmittance are kept in a frame accumulator of
`IMG_W × IMG_H` entries. The accumulator carries over from batch to batch.
`frame_start` clears it, which takes one pixel per cycle. After the last
batch, the image is read out in raster order with 8 bits per channel.

**Ordering caveat.** Depth order is exact *within* a batch. Across batches,
Gaussians are blended in arrival order, and that order is set by cluster
order and step-1 survival, not by depth. The image therefore equals a
fully sorted render only when later batches lie behind earlier ones, or
when overlapping Gaussians share a batch. Scenes where distant clusters
arrive first show ordering errors where the batches overlap. A global sort
across batches would need the whole frame's survivors on chip, so it is not
built. The testbenches compare against a reference renderer that uses the
same batch order.

## Cluster ordering

The CIE sees one cluster per cycle. If the clusters that matter arrive
late, the engines downstream sit idle. `cluster_order` holds:

- the cluster table;
- an order table, which is a permutation of the cluster ids;
- a usage counter per cluster, incremented on every CIE `hit`.

After each frame it makes one reverse bubble pass over the order table.
The pass walks from back to front and carries the highest-usage cluster it
has seen. The most used cluster therefore reaches the front, and other
frequently kept clusters move up one place. Over several frames the issue
order tends towards descending usage. A pass costs `n_clusters` cycles
between frames, and `cnt_reorder_moves` counts its exchanges.

## Number format and arithmetic

Every real value is Q16.16: 32-bit two's complement with 16 fraction bits.
The shared helpers are in `gs_pkg`:

- `fx_mul`: truncating.
- `fx_div`: saturating, and returns ± max on divide by zero.
- `fx_sqrt`: bit-serial, unrolled.
- `fx_exp_neg`: exp(−x) computed as 2^−(x·log₂e). The integer part becomes
  a shift, and the fraction goes through a cubic polynomial, with a
  relative error below 0.1%.

Step 1 and the blend quadratic form use 64-bit Q48.16 intermediates,
because covariances of distant, small Gaussians underflow in Q16.16.

The testbenches check every arithmetic unit against `real` models:

- most results within about 1%;
- the conic within 6%, because it inverts a nearly singular matrix for
  thin Gaussians.

The end-to-end tests compare the rendered 8-bit image with the reference
render. At most 2% of the channel values may differ by more than 4 LSB;
in the runs so far none did.

## Parameters

| Module / parameter | Default | Meaning |
|---|---|---|
| `gs_accel_top.N_CLUSTERS` | 4096 | cluster table and order table entries |
| `gs_accel_top.GB_DEPTH` | 2048 | Gaussians in each global buffer: 2048 × 40 B geometry + 2048 × 196 B appearance = 483 KB |
| `gs_accel_top.CFIFO_DEPTH` | 16 | CIE input FIFO |
| `gs_accel_top.PP1_DEPTH`, `PP2_DEPTH` | 64 | records per ping-pong bank |
| `gs_accel_top.IMG_W`, `IMG_H` | 128 | frame size and accumulator size |
| `gs_accel_top.TILE` | 16 | tile edge in pixels |

The target clock is 500 MHz in 28 nm, with about 1 MB of SRAM. Timing has
not been closed. `step1_preprocess`, `sh_color` and `alpha_blend` are
single-cycle combinational datapaths. At that frequency they would need
pipelining, and their interfaces already have the valid signals to add it.

Real scenes of 1–6 million Gaussians at about 1000×800 pixels do not fit
these on-chip sizes. The design has no DRAM streaming engine. The scene
must sit in the global buffers, which are filled through the top's
`geom_*`, `attr_*` and `ctbl_*` write ports.

## Using the top

1. Write the cluster table (`ctbl_*`) and both global buffers (`geom_*`,
   `attr_*`).
2. Wait for `cluster_ready`. After reset, the order table initialises over
   N_CLUSTERS cycles.
3. Drive `view`, setting `img_w`/`img_h` equal to IMG_W/IMG_H, and
   `n_clusters`.
4. Pulse `frame_start`.
5. Collect `pix_valid / pix_x / pix_y / pix_rgb`. Each pixel appears
   exactly once, in raster order, just before `frame_done` pulses.

The `st_*` counters run freely. They give the clusters examined and kept,
the Gaussians loaded, culled and passed to step 2, the tile pairs and
blends, the bank swaps and stalls, the batches, and the reordering moves.

## Simulation

Each module has a testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
shared packages are:

- `tb_ref_pkg`: real-number reference models;
- `tb_render_pkg`: the reference batch-ordered renderer;
- `tb_scene_pkg`: a random scene generator. It places clusters in front of
  and behind the camera and derives their radii as the offline step would.

With plain Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/gs_pkg.sv tb/tb_ref_pkg.sv tb/tb_render_pkg.sv tb/tb_scene_pkg.sv \
    tb/tb_gs_accel_top.sv --top-module tb_gs_accel_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_gs_accel_top` with any other testbench name.

- `tb_gs_accel_top` runs two frames on a reduced chip: 16 clusters,
  32×32 image, banks of 8. It checks the image, every counter, and that
  each of the following happened at least once:
  - a cluster cull and a Gaussian cull;
  - bank swaps in both engines;
  - a flush;
  - stalls in both engines;
  - a reordering move.
- `tb_gs_accel_full` runs one frame with every parameter at its default
  (128×128, 2048-entry buffers, 4096-entry cluster table) on a
  scene of 160 clusters and about 750 Gaussians. About 110 clusters are
  kept, and about 620 Gaussians reach step 2. The same mechanisms are
  checked as in `tb_gs_accel_top`. Building and running it takes about
  half a minute.

## Departures from the original design and open points

- **Blend order across batches** is arrival order, not global depth order
  (see above).
- **No DRAM interface.** The global buffers and the cluster table are
  loaded through write ports. The original fetches from 25.6 GB/s DRAM in
  cluster-priority order.
- **Offline clustering** (k-means and the radius with its 3σ term) is not
  hardware and is not included. The scene generator in `tb_scene_pkg`
  computes the radius the same way for test scenes.
- **Unspecified internals were chosen here:**
  - bank depths and FIFO depth;
  - tile size and image size;
  - the number format and the exp approximation;
  - the CIE keep rule at the camera plane;
  - usage counting with a bubble pass for cluster ordering;
  - one blend per cycle;
  - the frame accumulator.
- **One lane per stage.** The original engines process many Gaussians (step
  1, SH colour, distribution) and many tiles (sort, blend) in parallel. The
  number of lanes is not given, so every stage here is a single lane: one
  cluster, one Gaussian, one tile pair, or one pixel-Gaussian blend per
  cycle. Tiles are rendered one after another. Adding lanes means
  replicating `step1_preprocess` behind the bank's random-read port, and
  the sorter/blender per tile. The ping-pong protocol stays the same.
- **SH colour** is evaluated combinationally from the record being blended,
  not in a separate per-Gaussian stage. The result is the same colour.
- **Step-1 and step-2 mathematics** follow the standard 3D-GS rasterizer:
  the 0.3 dilation, the 1.3·tan clamp, the α thresholds, and the SH
  constants with +0.5 offset.
