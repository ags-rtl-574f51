# AGS accelerator: 3DGS-SLAM with codec-assisted frame covisibility

## The idea

A SLAM system based on 3D Gaussian splatting spends almost all of its time training.
It trains the camera pose against the Gaussians to track each frame, and it trains
the Gaussians against the frame to map it. However, consecutive camera frames usually
show nearly the same scene. When little has changed, most of that training repeats
work already done.

The question is how to measure "little has changed" cheaply. A video encoder already
does this. For every 8×8 macro-block (MB) of a frame, its motion estimation finds the
best-matching block in a reference frame. It keeps the minimum sum of absolute
differences (SAD) of that match. Adding these minimum SADs over a frame gives a number
that grows as the frames share less content, so the accelerator takes it for free as a
*frame covisibility* (FC) measure. Two decisions follow from it:

* **Movement-adaptive tracking.** Every frame gets a cheap coarse pose estimate from
  a small neural network that runs on systolic arrays. Rendering-based pose refinement
  runs for a fixed number of iterations (Iter_T = 20) only if covisibility with the
  *previous* frame is at or below Thresh_T (90 %).
* **Contribution-aware mapping.** A frame whose covisibility with the last *key frame*
  is at or below Thresh_M (50 %) becomes a new key frame. It is mapped in full. While
  it is rendered, the hardware counts, for every Gaussian, how many pixels it barely
  touched: pixels where its alpha was below Thresh_α = 1/255. These counts go to
  DRAM. Later, non-key frames skip every Gaussian whose count is above Thresh_N (450),
  and render only the rest.

The hardware therefore has three engines (FC detection, pose tracking and mapping) and
a frame queue between tracking and mapping. Because tracking no longer waits for the
map to be updated, tracking of frame t+1 overlaps mapping of frame t.

```
 CODEC min-SADs ──► fc_detect ──refine──► pose_engine ──► 2-entry queue ──key──► mapping_engine
   (via DRAM)          │                  ├ 2× 32×32 systolic_array          ├ gs_array 16×(4×4 gpe_array)
                       └──key_frame───────┤ nn_buffer (4 banks)              ├ gs_logging_table + update_unit  (key frames)
                                          └ gs_array 8×(4×4)  (light)        └ gs_skipping_table + comparison_unit (non-key)
```

All of the RTL is in `rtl/`, with shared types in `ags_pkg`. The defaults are the
edge configuration: 500 MHz target, 2×(32×32) systolic arrays, a 32 KB NN buffer, a
light GS array of 8×(4×4) GPEs with a 32 KB Gauss buffer, and a mapping GS array of
16×(4×4) GPEs with a 64 KB Gauss buffer. The logging and skipping tables are 4 KB each,
and there are 16 update units and 16 comparison lanes. The server configuration
doubles each of these and is reached through parameters of `ags_top`.

## Covisibility arithmetic (`fc_detect`)

The minimum SADs arrive from DRAM, `LANES` (8) per cycle, with a lane mask and a
`last` flag. They go into an adder tree and an accumulator. This design normalises the
sum against the worst case. An 8×8 block of 8-bit pixels can differ by at most
64·255 = 16320, so

    covisibility = 1 − Σ SADmin / (MBs · 16320)

No division is needed. The frame is *not* covisible at threshold P % exactly when

    Σ · 100 ≥ (100 − P) · MBs · 16320

Both sides are formed with shifts and adds, and two comparators evaluate this for P =
Thresh_T and P = Thresh_M. A value exactly at the threshold counts as "not covisible":
it triggers refinement, or a new key frame.

Each frame is streamed twice, one beat per cycle. The first pass is against the
previous frame (`sad_ref_key` = 0) and drives `refine`. The second is against the
latest key frame (`sad_ref_key` = 1) and drives `key_frame`. `dec_valid` pulses 2
cycles after the `last` beat of the second pass, with both sums. The host streams the
SADs it has; for the very first frame it can send worst-case SADs to force a key
frame.

## Rendering datapath

### One GPE (`gpe`)

A GPE owns one pixel and blends the tile's depth-ordered Gaussians into it front to
back. It has two stages:

1. **Alpha (4 cycles, pipelined).** From the 2D mean, the conic and the opacity it
   computes alpha = opacity · exp(−½ dᵀ Σ⁻¹ d). alpha is clamped to 0.99. The
   exponential is a piecewise-linear 2^x. Stage 1 depends only on the Gaussian and the
   pixel, not on earlier results.
2. **Blend (1 cycle).** If alpha < Thresh_α, the Gaussian is skipped and flagged
   *non-contributory* for this pixel. Otherwise the colour accumulates
   C += c · alpha · T and T ← T · (1 − alpha). When T would fall below 1e-4, the pixel
   terminates early.

Number formats (Q = integer.fraction bits):

| Quantity | Format |
|---|---|
| positions, means | Q12.4, signed |
| conic entries | Q4.12, signed |
| opacity, alpha, T, colour | Q0.16, unsigned |
| Thresh_α | 257 (= 1/255) |
| alpha clamp | 64880 (= 0.99) |
| T floor | 7 (= 1e-4) |
| Gaussian ID | 20 bits |
| non-contributory count | 12 bits, saturating |

A Gaussian's features take 160 bits (20 bytes). Hence a 4 KB Gauss-buffer slice per
array holds `DEPTH` = 204 Gaussians.

### The 4×4 array and its scheduler (`gpe_array`, `alpha_buffer`)

This is the least obvious part of the design. All 16 GPEs walk the same list, but
early termination, and skipping on non-key frames, make them finish at very different
times. An idle GPE cannot simply take over another pixel's blending, because stage 2
is a chain through T. Stage 1 has no such chain, so it can be given away:

* The **workload table** holds each GPE's state (AUTO, ASST or IDLE), its current list
  position and, for an assistant, its target.
* Each cycle the **GPE scheduler** may pair one finished GPE with the first
  unfinished, unassisted GPE in table order.
* The **assistant** computes stage 1 for the *target's* pixel at positions
  `LOOKAHEAD` = 2 ahead of where the target is. It writes each alpha to the alpha
  buffer, tagged with the target's index and the list position.
* The **target**, before starting stage 1 for its next Gaussian, looks up the alpha
  buffer. On a hit it goes straight to the 1-cycle stage 2 and frees the entry. On a
  miss it runs stage 1 itself.
* When the target finishes, the assistant returns to IDLE and can be given another
  target.

The alpha buffer (16 entries) is a small tagged store with an associative lookup on
(tag, position). A write that finds no free slot is dropped; the owner then computes
that alpha itself, so only time is lost. Every cycle, entries that can no longer be
used are freed: those whose owner has terminated or has moved past the position. Assistance
changes only timing. The testbench renders every tile with assistance off and on, and
requires bit-identical pixels.

The array also produces the tile's **contribution record**. For each list position it
counts how many of the 16 pixels judged that Gaussian non-contributory. After the tile
it can stream the (Gaussian ID, count) pairs out, one per cycle.

`gs_array` instantiates `NARR` such arrays, each rendering its own tile. Their
contribution streams share one output through a fixed-priority arbiter, lowest array
first.

## Recording contributions on key frames (`gs_logging_table`, `update_unit`)

One Gaussian usually covers many tiles. Adding its count to DRAM after every tile
would repeat a read-modify-write per tile. The logging table avoids this as follows:

* **Profiling.** Before a batch of tiles is rendered, every ID in the batch's Gaussian
  tables passes through `prof_*`. A direct-mapped *logging buffer* counts how often
  each ID appears.
* **Hot Gaussians.** An ID seen in two or more tables of the batch is *hot*. Its count
  accumulates in the buffer and goes to DRAM once, at the batch end.
* **Cold Gaussians.** All other IDs accumulate in a direct-mapped *logging cache*. The
  cache is flushed after every tile, and an entry is evicted when another ID needs its
  slot.
* **Batches.** A batch is the set of tiles rendered in parallel, one per GPE array.
* **Size.** The 4 KB table is 512 buffer entries plus 512 cache entries of 32 bits.
  Each flush costs one cycle per *used* slot.

The **update unit** performs the DRAM read-modify-write. Up to `UNITS` (16) operations
are in flight, with tagged reads whose responses may return out of order. A record for
an ID that is already in flight is merged into that operation.

Each DRAM word is `{epoch[3:0], count[11:0]}`. The mapping engine advances a 4-bit
*key-frame epoch* at every key frame. A word from an older epoch reads as 0, so the
counts restart at every key frame without clearing DRAM.

## Skipping on non-key frames (`gs_skipping_table`, `comparison_unit`)

For every ID of a tile's table, the skipping table finds the count recorded on the last
key frame. It looks in this order:

1. the on-chip skipping buffer;
2. the on-chip skipping cache;
3. DRAM, with one read outstanding.

A fetched count enters the cache. A cache entry that has been hit again is promoted to
the buffer when it is evicted, so that the buffer holds Gaussians shared by many tiles.
A new key frame invalidates both.

The list entries are (ID, count, valid = 1). The comparison unit checks 16 entries per
cycle and clears `valid` where count > Thresh_N. The surviving IDs then stream out in
their original order. Only those have their features fetched and are rendered. A tile
with no survivor produces an `out_empty` pulse.

## Engines and frame flow

`pose_engine` handles one frame as follows:

1. It streams `run_k` operand pairs from the NN buffer through both systolic arrays.
   The arrays are output-stationary, with 16-bit signed operands and 32-bit
   accumulators. Results are complete 2N cycles after the last operand and are read
   out by row.
2. If `refine` is set, it runs `ITER_T` rendering passes of the light GS array over
   the tiles loaded into it.

`mapping_engine` takes Gaussian tables tile by tile and renders them in batches of 16.

* **Key frame.** IDs go to profiling and straight to feature fetch. After rendering,
  the contribution records go through the logging table and the update unit.
* **Non-key frame.** Tables go through the skipping table first.
* While the logging table flushes, new tables are held back, so that profiling misses
  no ID.

`ags_top` connects the three engines:

1. A decision from `fc_detect` is held, and `sad_ready` stays low, until the pose
   engine takes it.
2. A tracked frame's key flag waits for a slot in the 2-entry queue. Counters record
   the queue-full cycles.
3. The mapping engine pops the queue.

`stat_overlap` counts the cycles in which tracking and mapping are both busy. The CODEC,
DRAM and host are outside the chip: their channels are valid/ready ports. The host
supplies the Gaussian tables (IDs sorted by depth per 4×4 tile), the features and the
network operands.

## What is not built, and where the design departs from the paper

* **Gradients and updates.** There is no gradient computation, no per-array adder
  tree, no pose loss or pose update, and no Gaussian update. The description gives no
  datapath for them. Refinement passes and mapping re-render the loaded tiles; they do
  not train.
* **Coarse pose network.** Its layer sequence (CNN feature extraction and ConvGRU) is
  not given. The systolic arrays run a single host-configured GEMM pass per frame in
  its place.
* **Preprocessing.** Projection of 3D Gaussians and depth sorting are not built; the
  host delivers sorted per-tile tables and projected 2D features.
* **The threshold for skipping.** The algorithm section calls it Thresh_N ("more than
  Thresh_N pixels"). The hardware section calls it Thresh_M ("larger than Thresh_M"),
  a name used elsewhere for the key-frame threshold. This design follows the first:
  the `thresh_n` input, a strict ">", default 450. The key-frame threshold is
  `thresh_m_pct`.
* **The covisibility scale.** The normalisation of the SAD sum to a percentage is this
  design's own. The paper only states that a larger sum means less covisibility.
* **This design's own choices.** The following are not specified in the paper:
  * table organisations, which are all direct-mapped;
  * the hot threshold of two tables;
  * the epoch tag in DRAM words;
  * the batch size of one tile per array;
  * queue depth, latencies and handshakes;
  * number formats.
* **Long tile lists.** A tile with more than 204 Gaussians is truncated to 204 and
  counted (`stat_truncated`, `stat_overflow`).
* **Size limits.** Up to 2^20 tiles per frame and 2^20 Gaussian IDs are supported.
  4×4 render tiles: TUM-RGBD (640×480) has 19 200, Replica (1200×680) 51 000, and
  ScanNet++ (about 1752×1168) about 128 000. The SAD accumulator is 32 bits, enough
  for about 260 000 MBs.

## Verification

Each block has a self-checking testbench in `tb/`. It compares the block against an
independent model and prints `TB_RESULT checks=… failures=…`. The rendering
testbenches use a real-valued reference renderer (`tb_ref_pkg`), with a tolerance of
0.004 + 1 % on colours.

| Testbench | What it checks |
|---|---|
| tb_fc_detect | sums, both decisions against reals, 2-cycle latency |
| tb_systolic_array | signed GEMM results, drain within 2N cycles |
| tb_gpe | alpha, blending and termination against the reference |
| tb_alpha_buffer | a cycle-accurate model over random traffic |
| tb_gpe_array | pixels against the reference; assistance off vs on is bit-identical; contribution counts |
| tb_gs_logging_table, tb_update_unit | the DRAM totals of a model memory, with out-of-order responses, merges and epoch changes |
| tb_gs_skipping_table | kept IDs and order, cache and buffer hits, DRAM reads, overflow |
| tb_mapping_engine | a key / non-key frame sequence with reference pixels and DRAM counts |
| tb_ags_top | 10 frames end to end, at reduced sizes, with every mechanism counted |
| tb_ags_top_full | one complete frame with every parameter at its default |

The mechanisms counted by `tb_ags_top` are:

* refinement on and off;
* key and non-key frames;
* SAD back-pressure;
* queue-full stalls;
* tracking/mapping overlap;
* alpha-buffer hits and assists;
* skipped Gaussians;
* truncation.

`tb_ags_top_full` uses all defaults. It runs 2 systolic arrays of 32×32, 8 light
arrays with 20 refinement passes, and 16 mapping arrays on 16 tiles of 24 Gaussians. It
checks the GEMM rows, the pixels, the DRAM counts and the iteration count. It finishes
in about a minute of simulation time, build included.

To simulate with Verilator 5, for example the GPE array:

```
verilator --binary --timing -Irtl -Itb -y rtl \
  rtl/ags_pkg.sv tb/tb_ref_pkg.sv tb/tb_gpe_array.sv --top-module tb_gpe_array
./obj_dir/Vtb_gpe_array
```

Every testbench has a watchdog and ends with `$finish`. Testbenches override only size
parameters, through their own `localparam`s near the top. To try another
configuration, change those or the defaults of `ags_top`.
