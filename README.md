# Gleanmer GMMap accelerator: SystemVerilog model

Gleanmer is a low-power SoC that builds and queries a 3D occupancy map for robots. The map is a
GMMap: a mixture of 3D Gaussians. Occupied Gaussians describe obstacle surfaces. Free Gaussians
describe space that sensor rays have passed through. A query for the probability that a point is
occupied is answered by Gaussian regression over the Gaussians near that point. The Gaussians of
the global map are indexed by an R-tree of their bounding boxes.

This RTL implements the chip's GMMap accelerator together with its 512 KB global buffer and its
shared AXI-4 bus. It has two paths:

* **Construction** turns each depth image into local occupied Gaussians and free Gaussian bases.
  The stages are Depth Decoder, then Scanline Segmentation, then Segment Fusion, then Free
  Gaussian Bases Generation.
* **Query** takes coordinates along a trajectory in batches of 16. It retrieves the Gaussians that
  overlap the batch's enclosing box with a single R-tree search, through a 44 KB cache, and
  returns one occupancy probability per coordinate.

Two pieces are not built:

* The RISC-V host CPU. Its AXI manager port is a port of the top.
* The two fusion units that merge the new Gaussians into the global map. They are named by the
  design but never specified. Their inputs and their map-side resources are ports of the top:
  occupied Gaussians, the free-basis memory, a map read/write port into the cache, and the line
  allocator.

## Number formats and records (`gleanmer_pkg`)

| Quantity | Format |
|---|---|
| Coordinate, mean | 19-bit signed, Q10.8 metres (about ±1 km, 4 mm resolution) |
| Covariance / precision entry | 32-bit signed, Q15.16; symmetric 3x3 stored as 6 entries `xx xy xz yy yz zz` |
| Depth pixel | raw 16-bit; metric depth = raw × `depth_scale` (Q8.8); raw 0 = no return |
| Probability | Q0.16 (0x8000 = 0.5) |
| Map line | 512 bits = 64 bytes = one bus beat = one cache line; pointers are 13-bit line numbers |

The reduced 19-bit mean with 32-bit covariances follows the published design. The covariances
stay 32-bit so that thin Gaussians do not degenerate.

Segments and local occupied Gaussians are carried as sufficient statistics (`pstats_t`):

* point count;
* sums of x, y and z;
* the six sums of products;
* the bounding box;
* the first and last image column.

With these, merging two segments or Gaussians is an exact addition (`gaussian_merge`), and the
mean and covariance can be recovered afterwards as `sum/n` and `sumsq/n - mean*mean^T`.

A global-map Gaussian (`gaussian_t`) holds:

* a label: occupied or free;
* a 16-bit weight;
* the mean;
* the precision (inverse covariance).

It fills one map line. An R-tree node also fills one line and holds four entries. Each entry has
a box, a leaf flag and a pointer; pointer 0 marks an empty entry and line 0 is never allocated.

## Construction path

### Depth Decoder
The decoder is a 5 KB FIFO: 2560 pixels, which is four 640-pixel rows. It absorbs bursts from the
external interface. Each pixel's depth is scaled and tagged with its column and row and with
end-of-row and end-of-frame flags. A depth that overflows the coordinate range is marked invalid.
When the FIFO is full, `pix_ready` drops.

### Scanline Segmentation (`scanline_seg`): the single-cycle slope trick
Each image row is cut into line segments, pixel by pixel, at one pixel per cycle. There are four
stages:

1. **Back-project** the pixel: `x = (u-cx)·d/fx`, `y = (v-cy)·d/fy`, `z = d`. The reciprocal focal
   lengths are configuration values.
2. **Proximity test.** Predict the new pixel's depth by extending the open segment from its last
   point along the segment's slope dz/dx, and compare that prediction with the measured depth.
3. **Update.** A point that passes the test is added to the segment. Otherwise the segment is
   closed, and emitted if it holds at least `seg_min_pts` points. An invalid pixel also closes the
   segment.
4. **Slope.** A new slope is computed as (z_last - z_first) / (x_last - x_first) by a divider
   pipelined over four cycles.

The point of the design is that stage 2 needs a slope every cycle, while stage 4 takes four cycles
to produce one. A straightforward design would interleave four rows to hide the latency, and would
then need four rows of segment storage. Here stage 2 instead uses the slope that is leaving the
divider in the current cycle. That is the slope of the same segment as it stood four pixels
earlier, and neighbouring pixels of one surface hardly change it. Only one row of segments then
has to be stored.

The divider results are tagged with a segment id. A slope is used only if it belongs to the
segment that is still open. A segment younger than the divider latency has no slope yet. For it,
the test assumes a slope of 0 and allows four times the threshold. That rule is this design's own
choice: without it, a surface seen at a grazing angle could never start a segment.

Throughput: after each row there is one flush cycle, which emits the last segment and a
row-end marker. A row therefore takes `IMG_W + 1` cycles. The unit stalls as a whole when its
output is not accepted.

### Segment Fusion (`segment_fusion`) and the Line Segment Buffer
The 10 KB buffer holds 124 segment records. It is split into two halves of 62 records: the
previous row's Gaussians under construction, and the current row's. The halves swap at every row
end.

For each new segment, the unit walks the previous row's entries in column order:

* An entry that ends left of the new segment can no longer be continued. It is output as a
  finished local occupied Gaussian.
* An entry whose columns overlap the new segment, and whose depth range is within `fuse_thr` of
  it, is merged into the segment.

The result is written into the current half. At the end of a row, the remaining previous-row
entries are output. At the end of a frame, everything is flushed.

A segment that finds the current half full is output immediately as a Gaussian of its own. This
loses fusion but no points, and `status.sf_overflow` counts it. Each pass costs about three
cycles per buffer access, so a row with many segments back-pressures segmentation.

### Free Gaussian Bases Generation (`fgbg_unit`)
Free space is modelled by free Gaussian bases. The classic way derives one basis per line segment
from its sensor rays. That requires keeping the rays, and it scales with the number of segments.

This unit instead derives the bases from each finished occupied Gaussian. A small table of
representative rays, the 1 KB sample memory (256 entries loaded by software), gives for each
sample three Q0.8 fractions. Each fraction picks an end point `e` inside the Gaussian's bounding
box. The ray from the sensor origin `o` to `e` is modelled as a uniform distribution:

* the basis mean is `(o+e)/2`;
* the basis covariance is `v·v^T/12`, with `v = e-o`.

`n_samples` bases are written per Gaussian into the 17 KB free-bases memory, which holds 559
bases of 249 bits each. When that memory is full, further bases are counted in
`status.fb_dropped`. The unit takes `n_samples + 2` cycles per Gaussian. It forwards every
occupied Gaussian on `occ_*`.

## Query path

### Batch querying (`map_query_unit`)
Coordinates along a trajectory lie close together, so separate R-tree searches for them retrace
nearly the same paths. The unit therefore collects up to 16 coordinates; `q_last` ends a batch
early. It builds their enclosing box with the Bounding Box Unit and runs one search with that box.

Each Gaussian pointer the search returns is fetched once through the cache. It is then presented
to the regression unit 16 times, once per coordinate, one per cycle. This time-interleaving lets
a single regression datapath serve the whole batch.

After the search has ended and the last Gaussian has been fed, the unit asks for the
probabilities. It waits until all of them have left before accepting the next batch.

### R-tree search (`rtree_engine`)
The search is depth-first with a 32-entry pointer stack:

1. Pop a node and read its line through the cache.
2. Test the four entries one per cycle for overlap with the query box.
3. Push overlapping inner entries, and output overlapping leaf entries.

`status.rt_nodes_visited` reports the number of nodes read by the last search. This is the path
length that batch querying reduces. A push onto a full stack is dropped and counted. Insertion
and removal are not built; see below.

### Gaussian regression (`gaussian_regression`, `gaussian_distance`)
For every (Gaussian, coordinate) pair, the distance unit computes the Mahalanobis distance
`q = (x-µ)^T P (x-µ)`. It has 32 fractional bits and is clamped at 0. The weight is then
`w·exp(-q/2)`, where `w` is the Gaussian's 16-bit weight. The exponential is evaluated as
`2^-(q·log2(e)/2)`:

* the integer part of the exponent becomes a right shift;
* the fraction is approximated linearly, `2^-f ≈ 1 - f/2`, with an error below 9%.

Per coordinate slot, two 48-bit sums are kept: `num`, the weights of occupied Gaussians, and
`den`, all weights. At the end of the batch each slot is finished by a 17-step restoring divide:

    p = (num + prior/2) / (den + prior)

A coordinate that no Gaussian covers therefore gets the prior, 0.5. A coordinate covered only by
occupied Gaussians approaches 1, and one covered only by free Gaussians approaches 0. The finish
takes about 19 cycles per coordinate.

The regression rule itself (weighted vote of the labels, with a prior) is this design's own
choice. The design it follows only names the regression unit.

## Memory system

* **Cache (`gm_cache`).** 44 KB as 11 ways × 64 sets × 64-byte lines, with round-robin
  replacement. Writes go through to memory and do not allocate a line. A hit answers two cycles
  after the request. A miss costs one bus read.
  * `cache_inv` drops all lines. Use it after the CPU has changed the map behind the cache.
  * The cache port is shared by the R-tree engine, the query unit and the map-update port, with
    fixed priority in that order (`mem_arb`).
* **Bus (`axi_bus`).** A shared AXI-4 bus with two managers (the CPU and the cache) and one
  subordinate (the global buffer at address 0, 512 KB window). It carries one transaction at a
  time and arbitrates round-robin. Only single 512-bit beats are supported: AxLEN = 0, one ID.
  An address outside every window is answered by the bus itself with DECERR.
* **Global buffer (`global_buffer`).** 8192 lines of 512 bits.
  * A read answers one cycle after the address.
  * A write needs both AW and W. It honours the byte strobes and answers on B one cycle later.
* **Allocator (`mem_allocator`).** Hands out free map lines. Freed lines go onto a 1024-entry
  stack and are reused first. After that, a fresh-line counter runs from line 1 to 8191. A free
  and an allocation in the same cycle bypass the stack. A free into a full stack is counted as
  leaked.

## Top level (`gleanmer_top`)

There is one clock and an asynchronous active-low reset. The chip's two operating points (125 MHz
for construction, 250 MHz for query) are a matter of clock and supply only. The ports are:

* `cfg`: intrinsics, depth scale, thresholds, sensor origin, sample count, R-tree root and the
  regression prior. All are static while a frame or batch is processed.
* `pix_*`: raw depth pixels in row-major order. `smp_*`: loads the sample memory.
* `occ_*`: the finished local occupied Gaussians. `fb_*`: the free-bases memory (read, count,
  clear).
* `q_*` / `res_*`: query coordinates in, probabilities out, tagged with their slot in the batch.
* `cpu_axi_*`: the host's manager port onto the shared bus.
* `mu_*`: a map-line read/write port into the cache, for the map fusion stage. `alloc_*` /
  `free_*`: the line allocator.
* `status`: counters for cache hits and misses, batches, fetched Gaussians, R-tree nodes visited
  and stack overflows, segment merges and buffer overflows, dropped bases, allocator lines in use
  and leaked lines.

## How far this follows the published design

**Taken from the design:**

* the block structure and the memory sizes: 512 KB global buffer, 44 KB cache, 10 KB line
  segment buffer, 17 KB free-bases memory, 5 KB depth decoder, 1 KB sample memory;
* the shared AXI-4 bus;
* the four-stage segmentation pipeline with its four-cycle slope that is used one cycle after it
  leaves the divider;
* segment storage for a single row;
* free bases generated from occupied Gaussians through representative rays;
* batch querying of 16 coordinates with one R-tree search over the enclosing box;
* 19-bit means with 32-bit covariances;
* the 640×480 image size.

**This design's own choices:** all arithmetic details, and everything listed below.

* All encodings, record layouts, handshakes and latencies.
* The segment-fusion merge rule.
* The uniform-ray model of a free basis.
* The regression formula and its exponential approximation.
* The cache organisation.
* The allocator structure.
* The R-tree node format.

**Missing or different:**

* The R-tree engine only searches. The published engine also inserts and removes in logarithmic
  time, but its split and condense policies are not described. In this RTL those operations are
  left to the host or the fusion stage, which use the map-update and allocator ports.
* The free-bases fusion and map fusion units are not built, because their rules are not given.
* In the chip, the depth decoder, the sample memory and the query unit hang on the AXI-4 bus. Here
  they have plain stream and write ports instead (`pix_*`, `smp_*`, `q_*`/`res_*`). Only the
  CPU and the cache are bus managers.
* A Gaussian record takes a full 64-byte line. That is roughly twice the size of a packed record,
  so the 512 KB buffer holds about 8K Gaussians and nodes together. The published map sizes are
  66 KB (indoor room), 203 KB (forest) and 356 KB (city). In this layout only the room map fits
  comfortably; the forest map is marginal and the city map does not fit. Packing two records per
  line would fix this.
* Construction speed is bounded by segmentation at 641 cycles per row: 406 frames/s at 125 MHz,
  against a published 88 to 331 frames/s. FGBG at `n_samples + 2` cycles per occupied Gaussian
  becomes the limit in cluttered scenes.
* A query batch costs roughly (nodes × 8) + (Gaussians × 20) + 320 cycles, so the published
  540K to 1320K coordinates/s at 250 MHz are within reach whenever the cache hits.

## Simulation

All testbenches are self-checking. Each one prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog. They need only the package
and the module files, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/gleanmer_pkg.sv tb/tb_gleanmer_top.sv \
              --top-module tb_gleanmer_top -o sim && obj_dir/sim

Unit tests:

* `tb_gm_sram`, `tb_bbox_unit`, `tb_gaussian_merge`, `tb_gaussian_distance`: random operands
  against reference arithmetic.
* `tb_depth_decoder`: scaling, flags, the 2560-pixel capacity and one-pixel-per-cycle throughput.
* `tb_scanline_seg`: a synthetic row with two walls, a hole and a steeply inclined plane.
  Checks the segment statistics and the 65-cycle row period at 64 pixels.
* `tb_segment_fusion`: merge, depth-separated and non-overlapping cases, and buffer overflow.
* `tb_fgbg_unit`: bit-exact bases, cycles per Gaussian, and a full free-bases memory.
* `tb_gaussian_regression`: bit-exact reference model, plus a bound on the exponential error.
* `tb_rtree_engine`: a two-level tree searched with random query boxes, compared with a
  brute-force overlap test.
* `tb_map_query_unit`: the unit's neighbours are modelled by the testbench; every Gaussian must
  reach every slot once.
* `tb_gm_cache`, `tb_global_buffer`, `tb_axi_bus`, `tb_mem_allocator`.

End-to-end tests:

* `tb_gleanmer_top` runs the whole accelerator on a 64×96 image. It first writes a 16-Gaussian
  map with a two-level R-tree through the CPU port. It then streams a frame whose rows include
  one-pixel segments, so that the line segment buffer overflows and the free-bases memory fills.
  Finally it runs four query batches and exercises the map-update port and the allocator.
* Checks:
  * every valid pixel ends up in exactly one occupied Gaussian;
  * each occupied Gaussian yields `n_samples` bases, stored or dropped;
  * probabilities near occupied Gaussians, near free Gaussians and far from the map;
  * R-tree node counts and cache behaviour.
* The test also requires that each of these happened at least once: input back-pressure, a
  segmentation stall, a merge, a buffer overflow, a dropped basis, cache hits and misses, bus
  contention, DECERR, an early batch end, allocator reuse and the allocator bypass.
* Both end-to-end tests then stream a smooth frame (one flat wall). It must pass at the
  segmentation rate of `IMG_W + 1` cycles per row. At 640×480 that is 307,680 cycles, or
  406 frames/s at 125 MHz. The full-size run measures 307,691 cycles.
* `tb_gleanmer_full` runs the same sequence on the top at its default parameters, with full
  640×480 frames. It takes a few seconds of simulation.
