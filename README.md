# KHEPRI tile scheduling: sending each screen tile to the core type that suits it

A tile-based GPU cuts the screen into small tiles and renders them one by one
in on-chip buffers. Some tiles are dominated by arithmetic, others by
texture fetches that miss in the caches. This design has two Raster Units:

* **RU0** is built from compute-specialized shader cores (wide issue, many ALUs).
* **RU1** is built from memory-specialized shader cores (more warps, bigger
  texture cache, many outstanding misses).

The hardware here decides which tile goes to which Raster Unit and in what
order. The decision for a frame is made from what each tile did in the frame
before, since consecutive frames look almost alike. It has to meet three
goals at once:

1. **Affinity.** Memory-intensive tiles go to RU1 and compute-intensive tiles
   go to RU0.
2. **Balance.** Both units finish at about the same time.
3. **Locality.** Neighbouring tiles share textures and primitives. Each unit
   therefore works through connected *regions* of tiles, not scattered
   single tiles.

The RTL contains:

* the statistics collection;
* the complete scheduler: sort, split, clean-up, region detection;
* the Tile Fetcher;
* each Raster Unit's back end: Early Z-test with the tile's Z-Buffer, the
  Late Z-test for shaders that write depth, blending into the tile's Color
  Buffer, and the flush of the finished tile to the frame buffer.

The shader cores, rasterizers, caches and DRAM are not included. Their
signals are ports of the top module `khepri_gpu`.

Default size: 1920x1080 screen, 32x32-pixel tiles, so a 60x34 grid of
N = 2040 tiles, with 11-bit tile IDs.

## Data flow of one frame

```
                 frame k renders                           between frames
 RU0 ──► tile_stats_counter ─┐                    ┌─────────────── tile_scheduler ───────────────┐
 RU1 ──► tile_stats_counter ─┴─► record table A ─►│ sort ► split ► isolation ► merge ► label     │
                                  (per tile)       └───────────────┬────────────────────────────┘
                                                                   ▼
                                               label map + region list (tile_ram x2)
                                                                   ▼
 frame k+1:      tile_fetcher ── region by region, S-order ──► RU0 / RU1
                 RU back end:  Early Z ─► (shader cores) ─► Blending ─► Flushing ─► frame buffer
```

1. **Measuring (`tile_stats_counter`, one per RU).** The unit watches every
   tile its RU renders. It counts:
   * the cycles in which the Fragment Stage was busy;
   * the retired instructions;
   * the L1 texture-cache misses.

   At the end of the tile a 42-cycle restoring divider computes
   MPKI = misses·1000 / instructions. It then emits the 44-bit record
   `{cycles:16, mpki:16, core type:1, tile id:11}`. Cycles and MPKI
   saturate at 16 bits. The two RUs share one write port into the record
   table. RU0 wins a collision and RU1's record waits one cycle.

2. **Scheduling (`tile_scheduler`).** It runs after `sched_start`, normally
   while the geometry stages of the next frame are busy. It chains five
   steps over the record table (see below) and produces two tables:
   * an *affinity map*: one bit per tile, 0 = compute, 1 = memory;
   * a *region-number map*, with a *region list* holding
     `{core type, first tile}` per region.

3. **Dispatch (`tile_fetcher`).** There is one channel per RU. Each channel
   walks the region list in order and takes only the regions of its own core
   type. It hands over one whole region before starting the next, and issues
   the tiles inside a region in S-order.

4. **Rendering back end (per RU, in `khepri_gpu`).**
   * Handing a tile over clears the Z-Buffer and the Color Buffer
     (256 cycles each, in parallel).
   * Quads from the rasterizer pass the early depth test. The survivors go to
     the shader cores, and the shaded quads are blended.
   * When the RU signals the end of the tile, the Color Buffer is written out
     as 64-byte frame buffer lines.
   * The next tile for that RU is held back until the flush has finished.

## The scheduler, step by step

The five steps run one after another on the same storage:

* **Buffer A.** The record table, indexed by tile ID, 2040 × 44 bits.
* **Buffer B.** Scratch space for the sort.
* **Affinity map.** 2040 flip-flops, so that every neighbour test reads all
  four neighbours in one cycle.

Cycle counts are for the full 2040-tile frame as simulated.

### 1. Rank by memory intensity: `mpki_merge_sorter`

A bottom-up merge sort, highest MPKI first, that moves records back and forth
between A and B.

* In pass p, runs of 2^p records are merged into runs of 2^(p+1).
* The source buffer's two read ports follow the left and right runs. The
  heads of both runs stay on the port outputs.
* Each cycle compares the heads, writes the larger one and fetches the
  successor of the one taken. That is one record per cycle, plus one set-up
  cycle per pair of runs.
* The sort is stable: equal MPKIs keep their order.
* There are ceil(log2 2040) = 11 passes. An odd pass count leaves the result
  in B (`result_in_b`).
* Measured: 24,481 cycles. A budget of three cycles per record and pass
  (3·n·log n, about 67,300) would allow far more.

### 2. Split into two balanced halves: `affinity_partitioner`

The sorted list is consumed from both ends.

* Each step gives one tile to the RU whose running total of last-frame cycles
  is smaller. RU1 takes the next most memory-intensive tile from the top and
  RU0 the next least memory-intensive tile from the bottom.
* On a tie, the RU with fewer tiles goes first. If that also ties, RU1 goes
  first.
* Each tile costs two cycles: read both ends, then accumulate and decide.
  That gives 2n = 4,080 cycles.
* The result is that RU1 gets a prefix of the ranking and RU0 the remaining
  suffix.

### 3. Remove isolated tiles, keeping the balance: `isolation_reclassifier`

A tile that is surrounded by the other core type would make its RU jump to a
distant tile and back. This step runs two scans in scanline order, one tile
per cycle:

* **Scan 1** finds *highly isolated* tiles: at least 75% of the in-frame
  edge neighbours are of the other type. That means 3 of 4 inside the frame,
  3 of 3 on an edge, or 2 of 2 in a corner.
* **Scan 2** finds *totally isolated* tiles: all neighbours are of the other
  type. Scan 1 can create such tiles.

A candidate is flipped only together with a candidate going the other way, so
the two RUs keep their tile counts:

* A candidate that finds no partner waits in a FIFO for its direction.
* The next candidate of the opposite direction takes the oldest waiting
  candidate, and both flip in the same cycle.
* Candidates left unpaired at the end of a scan stay as they are.
* Later tiles in a scan see the map as already updated by earlier flips.

Cost: 2n = 4,080 cycles.

### 4 and 5. Regions: `region_flood_fill`, run twice

A region is a set of edge-connected tiles of one type. Regions are found by
breadth-first flood fill:

* A scan pointer visits the tiles in scanline order. Every tile not yet
  visited seeds a region.
* The region grows through a queue of 11-bit tile IDs. One cycle dequeues a
  tile. The next four cycles examine its up, down, left and right
  neighbours, marking and enqueueing matching neighbours in the same cycle.
* The queue is not rewound within a run, so a finished region is exactly the
  queue segment from its seed to the tail.

The first run (**merge mode**) finds regions of fewer than 8 tiles. It
absorbs each one into its surroundings by flipping its tiles' type, one tile
per cycle. The second run (**label mode**) numbers the regions in scanline
order of their first tile. It writes the region-number map and the region
list.

A run costs at most 7n cycles: about 12,300 for labelling a typical frame.

### Total

A full schedule takes about 57,300 cycles at 2040 tiles. Frames in the
target applications spend on the order of 270,000 cycles in the geometry
stages, so this time is hidden when the scheduler runs alongside them. After
reset the scheduler fills the record table with zero records (2040 cycles).
The first frame is therefore split evenly by tile count, and the split
improves from the second frame on.

## Dispatch order: `tile_fetcher`

Channel c serves RU c. It reads the region list in order and skips regions of
the other type. For a region of its type:

1. It starts at the seed tile's row.
2. It probes the region-number map along the whole row, two cycles per probe
   (request, compare).
3. It issues the member tiles left to right in the first row, then
   alternates direction from row to row (S-order).

Regions are edge-connected, so their rows are contiguous. The first row
without a member ends the region. A tile is offered on `tile_valid/tile_id`
and held until `tile_ready`. The two channels run independently and share
the two read ports of each map, one port per channel.

## Raster Unit back end

These blocks are conventional parts of a tile-based GPU. The format choices
in them are this design's.

**Early Z (`early_z_unit`).**
* Quads are 2x2 fragments: `zquad_t` holds the quad position, a 4-bit lane
  mask, four 24-bit depths and a bypass bit.
* A lane survives if it is closer than the stored depth (LESS). The stored
  depth is then updated in the same cycle.
* A quad with no survivors is dropped and counted.
* A quad flagged *bypass*, because its shader writes depth, passes untouched
  and leaves the buffer alone. Its visibility is decided after shading by
  the Late Z-test.
* Throughput is one quad per cycle, with a registered valid/ready output.

**Late Z (`late_z_unit`).**
* After shading, the core sends a depth-writing quad again, now carrying its
  final depths.
* The unit reads the quad's word of the same Z-Buffer through a side port of
  `early_z_unit` (one-cycle read). It keeps the lanes that are closer (LESS),
  writes their depths back, and returns the quad with only the surviving
  lanes in its mask. The core then blends just those lanes. A fully hidden
  quad comes back with an empty mask and is counted.
* One quad is in flight at a time, at two cycles per quad. While the Late
  Z-test holds the buffer (`zb_hold`), Early Z accepts nothing, so the two
  tests never race on a buffer word.

**Blending (`blending_unit`).**
* The Color Buffer holds RGBA8, one 4-pixel word per quad position.
* Each lane either replaces the stored pixel or blends with it, selected per
  lane by `cquad_t.blend`.
* The blend is source-over with rounding:
  `c = (s·a + d·(255−a) + 127) / 255` per colour channel, and
  `alpha = a + (d_a·(255−a) + 127) / 255`.
* A one-cycle read port serves the flush.

**Flushing (`flushing_unit`).**
* The frame buffer is row-major RGBA8 with 1920 pixels per row, at address
  `FB_BASE + (row·1920 + col)·4`.
* Each 16-pixel half-row of the tile is gathered from 8 quad-word reads and
  written as one 64-byte line (valid/ready, 512-bit data).
* The bottom tile row covers pixel rows 1056..1087. Rows from 1080 on are
  skipped, so those tiles write 48 lines instead of 64.
* A full tile takes about 730 cycles without memory back-pressure.

## Top-level interface (`khepri_gpu`)

Ports that come in pairs are arrays of two, indexed by RU.

| group | ports | protocol |
|---|---|---|
| frame | `sched_start`, `sched_busy`, `sched_done`, `frame_done` | pulse start; `frame_done` once all N records are in and the last flushes are done |
| tiles | `ru_tile_valid/ready/id[2]` | valid/ready; the offer appears only when that RU's back end is free |
| statistics | `ru_frag_active`, `ru_instr_cnt` (6 b), `ru_miss_cnt` (4 b), `ru_tile_end` | per cycle from the RU; `ru_tile_end` after the tile's last quad has been blended |
| raster | `rz_*` (rasterizer → Early Z), `ez_*` (Early Z → cores), `lz_*` (cores → Late Z), `lzr_*` (Late Z → cores), `sh_*` (cores → Blending) | valid/ready, `zquad_t` / `cquad_t` from `khepri_pkg` |
| memory | `fb_valid/ready/addr/data[2]` | valid/ready, 64-byte lines |
| status | `num_regions`, `sched_cycles`, `pairs_flipped`, `small_regions`, `tiles_issued[2]`, `mem_cycles`, `cmp_cycles`, `quads_killed[2]`, `late_killed[2]`, `frags_blended[2]`, `lines_written[2]`, `clear_color` (input) | |

Reset is asynchronous and active low. Handshake rules are checked by
concurrent assertions: a record is not written while the scheduler runs,
dispatched tiles match the RU's type, a flush line is stable while it waits,
and so on. Compile with `--assert` to enable them.

## Where this design departs from the published description

* **Storage.** The published overhead is 16.4 KB: the 44-bit record table
  plus two 11-bit queues. This RTL uses about 36 KB of RAM bits:
  * a second 44-bit buffer (B), because the merge sort is not in place;
  * a separate 11-bit region-number map and a 12-bit region list for the
    Tile Fetcher;
  * two 11-bit pairing queues in the reclassifier and one 11-bit BFS queue;
  * the affinity map and the visited flags, 2040 flip-flops each.

  An in-place sort or sharing buffers between phases would bring this
  closer.
* **Balancing during reclassification.** The description asks that
  reclassification keep the cycle totals of both units balanced. Here flips
  are paired one for one, which keeps tile counts equal but cycle totals
  only approximately so.
* **Small regions.** They are merged "into the surrounding region" by
  flipping their type in a separate flood-fill pass, before a second pass
  labels the regions. The published cost counts a single 7n pass.
* **Sort time.** About 24,500 cycles, well inside the published
  3·n·log n bound.
* **Region walk.** The Tile Fetcher finds a region's tiles by probing whole
  rows of the region-number map. That is simple but costs up to 2·60 cycles
  per row of a region. It is hidden behind rendering, since a tile renders
  for far longer.
* **Back-end formats.** The depth format, colour format, blend equation,
  frame buffer layout and flush bandwidth are not given by the published
  description. The flush is slow (about 10 cycles per line) because the
  Color Buffer has one read port, and the buffers are single, so a unit
  waits for its flush before the next tile. Double-buffering, or a wider
  read port, would hide that.
* **One Z-Buffer.** The pipeline drawing shows a separate Z-Buffer box at
  the late depth test. The text describes one tile-sized Z-Buffer, and here
  both tests share it.
* **Not built:** the shader cores, rasterizer, geometry
  pipeline, polygon list builder, vertex/tile/L2 caches and DRAM. Only their
  parameters or names are available, so the design ends at their ports.

## Verification

Every block has a self-checking testbench in `tb/` that compares the block
with a model written independently in the testbench and prints
`TB_RESULT checks=<n> failures=<m>`.

| testbench | what it establishes |
|---|---|
| `tb_tile_ram` | 20,000 random reads and writes on both ports |
| `tb_mpki_merge_sorter` | full-size sort: order, permutation, stability, cycle bound |
| `tb_affinity_partitioner` | reference two-ended walk; prefix property; 2n cycles |
| `tb_isolation_reclassifier` | reference model of both scans, including pairing; balance kept |
| `tb_region_flood_fill` | reference BFS for the merged map, region count and list; label properties; 7n bound |
| `tb_tile_fetcher` | reference S-order sequence per RU under random back-pressure |
| `tb_tile_stats_counter` | cycle, MPKI and saturation arithmetic |
| `tb_tile_scheduler` | whole chain against a reference on a 16x10 grid |
| `tb_early_z_unit` | Z-Buffer model, kills, bypass, 256-cycle clear |
| `tb_late_z_unit` | Z-Buffer model, returned masks, final depths, 2-cycle rate, hold covering every access |
| `tb_blending_unit` | blend model with an independent divider; clear; flush read port |
| `tb_flushing_unit` | line addresses and contents, bottom-row clipping |
| `tb_khepri_gpu` | end to end at full size, below |

The end-to-end test `tb_khepri_gpu` runs at the default size, three frames
of 2040 tiles. Its behavioural Raster Units render a synthetic scene of
memory-bound rectangles and scattered tiles on a compute-bound background,
and also push quads through Early Z, Late Z and Blending. It checks:

* each tile is dispatched exactly once, to the RU of its assigned type;
* the statistics records;
* the scheduler cycle budget;
* every frame buffer line is written exactly once per frame;
* each tile's tag pixel and the clear colour.

It also checks that each of these mechanisms happens at least once:
reclassified pairs, merged small regions, dispatch stalls, record
collisions, reversed S-order rows, quads hidden by Early Z, bypass quads,
quads hidden by Late Z, blended lanes and tiles held back by a flush.

From the second frame on, about 94% of the memory-bound tiles run on RU1 and
about 85% of the compute-bound tiles on RU0.

### Running a test with Verilator

```
verilator --binary --timing --assert -Irtl rtl/khepri_pkg.sv rtl/*.sv \
          tb/tb_khepri_gpu.sv --top-module tb_khepri_gpu -o sim
./obj_dir/sim
```

Use the same command with another `tb_<block>` for a single block. The
package must come first. The full-size end-to-end run takes about ten
seconds. The testbenches use only `$urandom`, so they run on two-state
simulators. The grid size (`TILES_X`, `TILES_Y`), the minimum region size
(`REGION_MIN`) and the frame buffer base are parameters. The widths are in
`khepri_pkg`.

### Workloads

The intended workloads are 32 mobile games rendered at 1920x1080. The
scheduler is sized for exactly that: 2040 tiles. Their per-frame memory
footprints, 0.7 to 27.5 MB, live in external memory, which is not part of
this RTL. Real traces of these games are not available here, so they are
not simulated. The synthetic scene of the end-to-end test stands in for
them.
