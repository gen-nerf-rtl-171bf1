# Gen-NeRF accelerator in SystemVerilog

Generalizable neural radiance fields render a new view of a scene from a
handful of nearby photographs ("source views"). They do not train one network
per scene. Each source view is turned into a feature map once. To colour one
pixel of the new view, points are sampled along the pixel's camera ray. Each
point is projected into every source view and the feature at that spot is
fetched. A small network turns the features into a density and a colour, and
volume rendering composites the points along the ray.

Two costs dominate:

* **Many points per ray.** Most of them lie in empty space.
* **Scattered feature reads.** Every point reads from every source view at
  places that are hard to predict.

This RTL implements an accelerator for that workload. It attacks the two
costs with three ideas:

1. **Coarse-then-focus sampling.** A cheap coarse pass uses few points and
   only 4 views. It finds where along each ray the surface is. A second,
   focused pass puts its points only there. Rays that cross more "critical"
   points get a larger share of them.
2. **3-D point patches.** Pixels and depth ranges are grouped into patches.
   All points of a patch project into a small rectangle ("window") of each
   source view's feature map. The window is copied once from DRAM into an
   on-chip SRAM. All points of the patch then read their features from
   there. A scheduler picks the patch shape greedily: among a few candidate
   shapes it takes the one that needs the least feature data per pixel and
   still fits the SRAM.
3. **Double-buffered, interleaved feature SRAM.** Two SRAMs work as a
   ping-pong pair. One is filled with the next patch's windows while the
   engine renders from the other. Each SRAM has 4 banks, and feature (x,y)
   lives in bank (y mod 2, x mod 2). So the 2x2 neighbourhood that a bilinear
   lookup needs is always one word from each bank, read in a single cycle.

## Block diagram and data flow

```
           +--------------------+   patch_t   +-------------------+   DRAM read port
 camera -->| workload_scheduler |--> queue -->| memory_controller |<-----------------> DRAM
 matrices  |  bitmap, sequencer,|             +---------+---------+
           |  projector, area,  |                       | fill (4 banks) / weights
           |  comparator        |           +-----------v------------+
           +--------------------+           | prefetch_double_buffer |  2 x 4 banks
                                            +-----------+------------+
                                                        | 4 words / cycle
          +---------------------------------------------v--------------------+
          | rendering_engine                                                 |
          |  preprocessing_unit: coarse points | pdf_cdf_unit -> inverse_    |
          |     point_projector -> bank addresses -> bilinear_interpolator   |
          |     -> mean over views                                           |
          |  pe_pool (40 x 16x16 INT8 systolic arrays) <- weight_buffer      |
          |  local_buffer (per-point sigma, rgb, t)                          |
          |  special_function_unit: exp, transmittance, colour               |
          +------------------------------------+-----------------------------+
                                               v
                                      pixel stream (h, w, rgb)
```

The blocks have these roles:

* **`gen_nerf_top`** wires the four large blocks together.
* **Workload scheduler.** It produces patches into an 8-deep queue and never
  waits for the rest of the machine unless the queue is full.
* **Memory controller.** At frame start it first loads the network weights.
  After that it takes one patch at a time from the queue. It fetches the
  patch's windows into the free half of the prefetch buffer, then hands that
  half over.
* **Rendering engine.** It works patch by patch on the other half.

The top-level testbench measures the overlap of fetching and rendering.

## Patch partitioning (`workload_scheduler`)

The novel view is a cube of H x W pixels by D = 8 depth segments. A patch
has a shape (dh, dw, dd). Every shape is cut from the cube across all depths
in slices of dd segments, so each pixel block keeps its (h,w) footprint at
every depth.

The scheduler loops over three phases:

1. **Sequencer.** It scans a one-bit-per-pixel bitmap in raster order. The
   first pixel not yet assigned is the top-left corner of the next patch.
2. **Evaluation.** For each candidate shape, the vertex projector projects
   the 8 corners of each depth slice's frustum into each source view. The
   area calculator takes their bounding box, grows it by one pixel for the
   bilinear neighbour, and clamps it to the feature map. This gives the
   slice's window and its size in bank words. A shape is rejected if the
   windows of one slice exceed one bank. The cost is the summed window area
   per pixel of the shape.
3. **Commit.** The cheapest accepted shape is chosen. Its slices are
   re-projected, one patch record per slice, and pushed in depth order. Its
   pixels are then marked in the bitmap.

The default candidates are 2x8x8, 4x4x8, 8x4x4 and 8x8x2 (each 128
pixel-segments). A small 2x4x8 shape is the fallback. It is used only if
none of the others fits. If even its window for some view does not fit,
that view is dropped from the patch: the window is marked invalid and that
view contributes zeros.

The candidate set, the bounding-box windows (the method itself works with
the projected quadrilaterals) and the drop rule are this design's choices.

Windows are stored at half resolution per bank. The vector at feature pixel
(x,y) of view s sits in:

* bank `{y[0], x[0]}`;
* word `base_s + ((y>>1) - (y_lo>>1)) * wb_s + ((x>>1) - (x_lo>>1))`.

DRAM uses the same interleaving. The address of vector (s,y,x) is
`((s*FH/2 + y/2)*FW/2 + x/2)*4 + {y[0],x[0]}`. Weights follow the feature
maps, starting at `S_MAX*FH*FW`.

## Rendering a patch (`rendering_engine`)

The engine renders one patch in two stages.

**Coarse stage.** For every ray of the patch:

* 4 points are placed per depth segment, at bin centres. Each point's
  feature is the mean over at most 4 views.
* Points go to the network in batches of 16. One systolic array computes the
  16 x 4 output block: density sigma and r, g, b. Arrays are used round
  robin.
* Results go to the local buffer.
* The special function unit walks each ray in depth order. It computes
  `alpha = 1 - exp(-sigma*delta)`, the hitting probability `w = T*alpha`,
  and the new transmittance `T*exp(-sigma*delta)`.
* Every w goes to the PDF unit.

**Focused stage.**

* The PDF unit counts the critical points (w >= tau) of each ray, N_j.
* It builds the unnormalised distribution `q(j,k) = N_j * w(j,k) / sum_k w(j,k)`
  and its running sum. The result goes into one half of a ping-pong store.
* The inverse sampler draws 8 x dd x rays stratified samples from it. The
  draws come from a 16-bit LFSR. A comparator array finds the bin of each
  draw, and the offset within the bin is interpolated linearly.
* The samples come out grouped by ray and sorted in depth.
* Rays without critical points get no focused samples. A patch with no
  critical point at all samples uniformly.
* Focused points use all views. They go through the same feature gather,
  network and compositing steps. Each ray's transmittance and colour are
  carried over from one depth slice to the next.
* When the last slice of a pixel block is done, its pixels are emitted.

The step length delta of a focused point is its distance to the previous
focused point of the same ray. For the first point of a ray it is the
distance to the start of the slice.

**The network.** The method's real network is an MLP plus a "Ray-Mixer",
which mixes the features of all points of a ray. Its sizes and weights are
not part of this design. In their place the engine runs one INT8 fully
connected layer. It maps the 32 feature channels to (sigma, r, g, b) and
reads its weights from the weight buffer, so the PE pool's dataflow,
batching and buffering are real, but the function is a stand-in. Outputs
are rescaled by fixed shifts (`SIG_SHIFT`, `RGB_SHIFT`).

## Number formats

| quantity | format |
|---|---|
| geometry (positions, depths, projection matrices, u, v) | signed Q16.16 |
| features, weights | INT8 |
| systolic-array accumulators | int32 |
| density sigma | unsigned Q8.8 |
| w, transmittance T | unsigned Q0.16 (65536 = 1.0), 17-bit to hold 1.0 |
| colour accumulator | Q16.8 (pixel value = acc >> 8, saturated to 255) |
| bilinear fractions | Q0.8 |

`exp(-x)` is computed as `2^(-x*log2 e)`. The fractional part comes from a
17-entry table of `2^(-i/16)` with linear interpolation between entries. The
integer part is a shift. The error is below 0.2 % of full scale.

## Parameters

| parameter | default | where |
|---|---|---|
| image H x W | 800 x 800 | `gen_nerf_top` |
| systolic arrays | 40 of 16 x 16 INT8 | `pe_pool` |
| local buffer | 256 KB | `local_buffer` |
| weight buffer | 8 KB | `weight_buffer` |
| prefetch buffer | 2 x 256 KB, 4 banks of 2048 vectors of 32 x INT8 | `prefetch_double_buffer` |
| source views | up to 10 (4 for the coarse pass) | `gen_nerf_pkg` |
| focused points | 64 per ray (8 per depth segment x 8 segments) | `gen_nerf_pkg` |
| coarse points | 32 per ray (4 per segment) | `gen_nerf_pkg` |
| feature maps | 200 x 200 x 32 per view | `gen_nerf_pkg` |
| depth segments | 8 | `gen_nerf_pkg` |
| patch shape candidates | see above | `gen_nerf_top` / `workload_scheduler` |

The method's description gives:

* the array count and size;
* the buffer sizes;
* the image size;
* the view counts;
* the 64 focused points per ray.

The feature-map size and channel count, the depth segmentation, the
candidate shapes, the queue depth and all number formats are this design's
own choices.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_systolic_array` | random INT8 products against a reference; done latency 2N-1 |
| `tb_pe_pool` | interleaved loading of 3 of 5 arrays; unused arrays stay clear |
| `tb_sync_fifo` | random traffic against a queue model, flags and count |
| `tb_local_buffer`, `tb_weight_buffer` | random write/read against a model |
| `tb_special_function_unit` | w and T against real `exp`; colour update exact |
| `tb_point_projector` | projection against real arithmetic; behind-camera flag |
| `tb_bilinear_interpolator` | bit-exact against an integer model, with masks and saturation |
| `tb_prefetch_double_buffer` | concurrent writer and reader; ordering, data, overlap and both-full stall |
| `tb_pdf_cdf_unit` | q, CDF, total and critical count bit-exact; ping-pong stability; no-critical case |
| `tb_inverse_sampler` | sample count, bins, per-ray depth order, per-ray share within 2 samples; uniform case |
| `tb_workload_scheduler` | exact coverage of every (pixel, depth segment); slice order; windows fit and contain every projected point; fallback, dropped views and multi-slice shapes |
| `tb_gen_nerf_top` | end-to-end run (below) |

`tb_gen_nerf_top` renders three 8x8 frames. It uses a 1024-vector prefetch
SRAM and a behavioural DRAM with latency and random back-pressure.

The scene is built so that the result is known in advance:

* All source views share a projection.
* The feature maps are constant (value 64) left of feature column 108 and
  zero right of it.
* The FC layer has one non-zero weight row.

The checks are:

* Every pixel is emitted exactly once.
* Pixel columns that see only the textured part come out within 90-100 % of
  the opaque colour computed in the testbench. Focused samples cover only
  the critical depth range, so a few percent of transmittance can remain.
* Columns that see only the empty part are black, and their rays receive no
  focused samples.

The three frames (6, 2 and 10 views) exercise:

* patches split in depth;
* full-depth patches;
* the fallback shape with dropped views.

The testbench counts every mechanism and fails if any of them never occurs:

* fallback patches;
* regular patches;
* multi-slice patches;
* fetching while rendering;
* the engine waiting for data;
* DRAM stalls;
* rays without focused samples;
* coarse and focused points.

**Largest size simulated.** The full-size configuration (800x800, 256 KB
SRAMs) compiles, but it has not been simulated through a whole frame. At
roughly 10k cycles per second in a software simulator, a frame is out of
reach. The largest simulated sizes are:

* 8x8 pixels end to end, with every other parameter at its default except
  the prefetch SRAM size;
* 16x16 pixels for the scheduler alone.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/gen_nerf_pkg.sv \
          tb/tb_gen_nerf_top.sv --top-module tb_gen_nerf_top -Mdir obj -o sim
obj/sim
```

The same command with another `tb_*` name runs a block test.
`tb/dram_model.sv` is a behavioural DRAM used only by the system test.

## Departures and limits

* **The network is a stand-in.** See "The network" above. The view features
  are averaged before the network. The method instead aggregates the views
  inside its network.
* **Windows are bounding boxes.** They are not the exact projected
  quadrilaterals, so some fetched data is never used.
* **Dropped views.** If even the fallback shape's windows do not fit, views
  are dropped. The method does not say what to do in that case.
* **Gather throughput.** The feature gather handles one (point, view) pair
  per cycle. Throughput matching between gather, array and compositing was
  not tuned to the original's 1 GHz, 40-array balance.
* **Buses and DRAM.** There is no on-chip bus model. Blocks are connected
  point to point. The DRAM is outside the design, behind a simple valid/ready
  read port with in-order responses.
* **Combinational dividers.** The projector and the PDF and sampler units
  use single-cycle dividers. These are simple, but long paths for a 1 GHz
  target; pipelining them is the obvious next step.
* **Full-size simulation.** The default 800x800 configuration has been
  compiled but not simulated through a frame (see Verification).
