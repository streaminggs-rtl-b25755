# Voxel-streaming 3D Gaussian splatting accelerator

A 3D Gaussian splatting renderer normally works tile by tile: every Gaussian
of the scene is projected, the list of Gaussians touching each tile is built
and sorted, and then each tile blends its list. All those per-tile lists
are intermediate data. They are too large for on-chip memory, so a
conventional accelerator keeps moving them to and from DRAM.

This design turns the order around. The scene is cut offline into a regular
grid of voxels, and the Gaussians are stored in DRAM grouped by voxel. To
render a tile, the hardware works out which voxels the tile's pixel rays
cross and puts them in one front-to-back order. It then streams those voxels
from DRAM one after another. Each voxel's Gaussians are filtered against the
tile, sorted by depth, and blended into the tile's pixels straight away.

Each Gaussian is read from DRAM once per tile, in address order. Nothing
computed for the frame goes back to DRAM. Only two things need sorting: the
voxels, through a small graph sort, and the Gaussians inside one voxel.

Two further measures cut DRAM traffic:

* **Split storage.** The four numbers the first filter needs (centre x, y, z
  and largest scale) are stored plainly. The rest of each Gaussian is stored
  only as indices into on-chip codebooks.
* **Two-stage filtering.** A cheap, conservative test runs first. Only a
  Gaussian that passes it has its indices fetched and decoded, and then goes
  through the exact projection.

```
 rays ──► VSU ──voxel order──► voxel queue ──► voxel streamer ──► input buffer (2 banks)
                                                    │ DRAM first halves      │ 16 records / cycle
                                                    ▼                        ▼
                                DRAM ◄── arbiter ◄── 4 × HFU [4 CFU ─► index fetch ─► codebook ─► FIFO ─► FFU]
                                                                              │ splats
                                              2 × bitonic sorting unit ◄──────┘ (ping-pong)
                                                          │ depth order, voxel by voxel
                                                 render queue ─► 64 rendering units ─► pixels
```

All RTL is in `rtl/`. The testbenches and the floating-point reference model
are in `tb/`.

## Voxel order: the voxel sorting unit (VSU)

The voxel sorting unit is split into four modules:

* `vsu_ray_sampler`
* `vsu_rename_table`
* `vsu_adjacent_table`
* `vsu_topo_sort`

These are wired together in `vsu`.

**Ray sampling.** The host supplies each pixel ray as an origin and a
direction, in units of voxel edges. The sampler takes 64 samples half a voxel
apart, one per cycle, by adding a fixed step vector. The integer part of a
sample is its voxel ID (VID), packed as `{z,y,x}` on a 16³ grid. A sample
that repeats the previous VID is dropped.

**Renaming.** The renaming table maps each VID to a compact renamed index
(VIDr). Its entries mark voxels that hold no Gaussians as invalid, so those
samples disappear.

**Building the graph.** Within one ray, the remaining VIDrs are in
front-to-back order. Every pair of consecutive VIDrs on a ray is therefore a
"must render before" edge. The adjacent table stores these edges:

* Each entry has a tag (the source VIDr) and up to `DST_SLOTS` destinations.
* Every voxel that appears gets an entry, even one with no successor.
* A repeated edge is stored once.

**Sorting the graph.** Once all rays of the tile have been inserted, the
topological sort runs Kahn's algorithm:

1. It counts each entry's incoming edges, one adjacent-table entry per cycle.
2. Each cycle, it emits the lowest-numbered live entry whose count is zero,
   and decrements the counts of that entry's destinations.
3. Rays can disagree, for example near a grazing view or with a reversed ray,
   and then the graph has a cycle. When no count is zero, the lowest live
   entry is emitted anyway and `cycle_break` is flagged. The order is then
   approximate but complete.

**Table sizes and overflow.** Both tables are 64 entries with 8 destination
slots by default. When a table fills:

* A node that does not fit is lost, and so are its Gaussians for that tile.
* An edge that does not fit only relaxes the order.

Both cases are counted in `stats.adj_overflow`.

**Timing.** For a tile of 64 rays, sampling takes 65 cycles per ray. Sorting
then takes `ADJ_ENTRIES` cycles to initialise plus one cycle per voxel.

## Streaming voxels: the voxel streamer and input buffer

Each voxel's first-half records are one contiguous run in DRAM. A record is
one 128-bit word: x, y, z and the largest scale, each in Q16.16. Record `gid`
sits at `fh_base + gid`. A voxel directory, indexed by VIDr and loaded by the
host, gives each voxel's first gid and count.

**Loading.** The streamer takes VIDrs from the voxel queue. It loads each
voxel into the free bank of the double-buffered input buffer, which holds
2 × 512 records = 16 KB. A voxel larger than a bank is loaded in chunks of
one bank.

**Processing.** The other bank is handed to the HFUs 16 records per cycle,
one record per coarse filter. Loading one bank while the other is processed
is what hides DRAM latency (`stats.overlap_loads` counts those cycles).

**Batch end.** After the last row of a chunk, the streamer waits until every
HFU is empty and then signals `batch_end`. That tells the sorting logic the
chunk's survivors are complete.

## Filtering: the hierarchical filtering unit (HFU)

There are four HFUs. Each has four coarse filter units (`cfu`) and one fine
filter unit (`ffu`).

### Coarse filter

The coarse filter sees only the first half of a Gaussian. It projects the
centre (u, v) and uses a bounding radius instead of the true footprint:

    r = 3 · ( s_max · f / z · (1 + |x/z| + |y/z|) + 0.8 )

Here s_max is the largest scale, f the focal length, and (x, y, z) the
camera-space centre. The bracket bounds the largest standard deviation of the
projected 2D Gaussian:

* The factor `1 + |x/z| + |y/z|` covers the stretch of the perspective
  Jacobian away from the image centre.
* The 0.8 covers the 0.3-pixel dilation, because √(σ²+0.3) ≤ σ + 0.8 holds
  together with the eigenvalue floor of the exact test.

Because r is never smaller than the exact radius, the coarse test never
rejects a Gaussian the exact test would keep. The testbenches check this on
thousands of random Gaussians. The test itself compares the square of
half-width r against the tile's pixel centres.

### Index fetch and decode

For each Gaussian that passes the coarse test:

1. The HFU reads the second-half word at `idx_base + gid`. It holds:
   * scale index `[11:0]`
   * rotation index `[23:12]`
   * DC-colour index `[35:24]`
   * SH index `[44:36]`
   * opacity, uncompressed, `[95:64]`
2. The shared codebook (`codebook`) decodes the indices in one cycle.
   * The scale, rotation and DC tables have 4096 entries.
   * The spherical-harmonics (SH) table has 512 entries of 45 values.
   * With 32-bit values this is exactly 250 KB.
3. The decoded Gaussian enters an 8-deep FIFO.

A credit count stops index fetches before the FIFO could overflow. DRAM reads
from the streamer and the four HFUs share one in-order port through a
round-robin arbiter (`dram_arbiter`).

### Fine filter

The fine filter does the full 3D Gaussian splatting projection:

1. Builds the covariance from the quaternion and the scales, Σ = R S² Rᵀ.
2. Applies the Jacobian of the perspective projection and adds 0.3 pixels of
   dilation.
3. Computes the conic (the inverse 2D covariance) and the radius
   3·√λ_max, where λ_max = mid + √max(0.1, mid² − det).
4. Computes the view-dependent colour from degree-3 SH.
5. Runs the exact tile test.

Survivors leave as splats: depth, centre, conic, opacity and RGB.

## Ordering within a voxel: the sorting units

Two bitonic sorting units (`bitonic_sorter`, 256 entries, one compare stage
per cycle) take turns:

* **Filling.** The HFU outputs go to the current target unit.
* **Hand-off.** When the chunk's batch ends, the target is started and the
  other unit becomes the target. The same happens when the target is full
  while splats are still waiting.
* **Draining.** The units drain strictly in the order they were started, so
  the render queue sees voxels front to back and, within each batch, depth
  order.

A voxel with more than 256 survivors is therefore sorted in several batches.
The order across such a cut is approximate (`stats.sort_splits`). While the
target unit is sorting or full, the HFUs are held (`stats.hfu_stalls`).

## Blending: the render queue and rendering units

`render_array` holds a 16-entry render queue and 64 rendering units
(`render_unit`), one per pixel of the 8×8 tile. Every cycle the head splat is
broadcast to all 64 units, and each unit blends it into its own pixel:

    alpha = min(0.99, o · exp(power))    skipped when alpha < 1/255
    C += rgb · alpha · T,  T *= (1 − alpha)   stop when T would fall below 1e-4

* exp is computed as 2^(−y·log2 e). The integer part of the exponent becomes
  a shift, and the fraction comes from a 17-point table with linear
  interpolation, accurate to about 1e-3.
* Colour and transmittance accumulate over all voxels of the tile.
* When the pipeline has drained, the tile is read out one pixel per cycle on
  `pix_*`, and `tile_done` pulses.

## Number formats

* Storage and interfaces use signed Q16.16 (`q16_t`).
* Arithmetic uses Q40.24 in 64 bits (`fx_t`), with multiply, divide and
  square root in `sgs_pkg`.

The projection and blending results agree with a double-precision model to
about 1e-3 in colour and transmittance.

## Using the top level (`sgs_top`)

**Once per scene**, the host writes:

1. every entry of the renaming table (`rn_wr_*`), because the table has no
   reset;
2. the voxel directory (`dir_wr_*`);
3. the codebooks (`cb_wr_*`): one 32-bit value per cycle, with `sel` 0/1/2/3
   = scale/rotation/DC/SH, and `elem` the component within the entry;
4. the DRAM contents: first halves at `fh_base`, second halves at
   `idx_base`.

**For each tile**, the host:

1. sets `cam` and the tile origin (`tile_x0`, `tile_y0`) and holds them for
   the whole tile;
2. pulses `tile_start`;
3. sends the rays with valid/ready (`ray_valid`, `ray_ready`), setting
   `ray_last` on the last ray;
4. waits for `tile_done`, collecting the pixels from `pix_*` as they come out.

The DRAM port is a 128-bit, in-order, request/response read port.
`stats` holds 14 running event counters.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`, which prints
`TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing --assert -Irtl -Itb rtl/sgs_pkg.sv tb/sgs_ref_pkg.sv \
        tb/tb_sgs_env.sv tb/dram_model.sv tb/tb_sgs_top.sv --top-module tb_sgs_top -o sim
    obj_dir/sim +verilator+rand+reset+2

Support files:

* `tb/sgs_ref_pkg.sv` is the double-precision reference: coarse test, full
  projection with SH colour, and blending.
* `tb/dram_model.sv` is a fixed-latency memory with random back-pressure.

**End-to-end testbenches.** `tb_sgs_top` and `tb_sgs_top_full` use the same
environment, `tb_sgs_env`, and render two tiles of a small synthetic scene.

* `tb_sgs_top` runs with reduced sizes: 2 destination slots, 32-record banks
  and 16-entry sorting buffers. This makes every overflow and split path
  happen, and takes about 30 s.
* `tb_sgs_top_full` runs with every default, about 2 minutes.

Both compare each pixel with the reference blend of the splats in the order
the hardware rendered them. They also check the splat set, the in-batch depth
order and the event counters. They count a failure for any mechanism that
never happened: duplicate samples, empty voxels, adjacency overflow (reduced
run only), cycle breaks, chunking, load/process overlap, coarse and fine
culls, sort splits, HFU stalls and early termination.

## Where this RTL departs from, or adds to, the published design

* **In-degree table organisation.** The description calls the in-degree table
  directly indexed by VIDr. The block diagram draws it beside the adjacent
  table. Here there is one counter per adjacent-table entry, found by tag,
  which needs 64 counters instead of one per VIDr.
* **Adjacent table size and overflow.** The 64 × 8 table size, the ray
  sampling (64 samples, half-voxel step) and the overflow and cycle-break
  policies are this design's own choices.
* **Grid size.** The voxel grid is 16³ (`GRID_BITS = 4`, 12-bit VIDs).
  Synthetic scenes at voxel size 0.4 fit. Large real scenes at voxel size 2
  may need a wider VID (renaming table of 2^VID_W entries).
* **Coarse radius formula.** This formula, and the rule that the coarse test
  must be a superset of the exact one, are this design's own. Only the
  inputs (centre and largest scale) and the purpose are given.
* **Sorting and rendering units.** The published design reuses these units
  from an earlier accelerator without describing their insides. Here they are
  a plain bitonic network (256 entries, 36 stages of one cycle) and a direct
  3DGS blending unit. The ping-pong hand-off and batch splitting for full
  buffers are this design's own.
* **Supporting structures.** The voxel directory, the DRAM word layout, the
  arbiter, the FIFO depths and all handshakes are this design's own. Opacity
  is kept uncompressed beside the indices. The published design does not say
  how opacity is stored.
* **Not modelled:**
  * the DRAM device and its controller;
  * the 1 GHz timing target;
  * the area;
  * SRAM macros: the memories are plain arrays;
  * the unspecified 89 KB of buffers between stages, beyond the queues listed
    above.
* **Not verified:** the hierarchical filter's effect on whole-frame
  performance and full scenes. The largest simulation is the two-tile
  full-size test above.
