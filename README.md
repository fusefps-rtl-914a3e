# FuseFPS: farthest point sampling that builds its KD-tree as it goes

Farthest point sampling (FPS) picks a subset of a point cloud one point at a
time. Each new sample is the point whose distance to the nearest of the
samples taken so far is largest. Done naively, every iteration touches every
point. Bucket-based FPS cuts this down by cutting the cloud into buckets, the
leaves of a KD-tree. Each bucket knows its bounding box and its own farthest
point. Most buckets can then be shown to be unaffected by a new sample without
reading a single one of their points.

The KD-tree normally has to be built before sampling starts, which costs a
full sort-like pass over the cloud. This accelerator does not build it
first. A bucket is split only when sampling has to read the bucket anyway,
and only while it is still shallower than a height threshold. The split is
taken at the mean coordinate, not the median, so it needs an accumulator and
one divider instead of a sorter. The same pass over the bucket's points that
updates their distances also sends each point to its child and collects the
children's statistics.

This repository holds synthesizable SystemVerilog for the accelerator core.
It also holds self-checking testbenches for every block and for the whole
accelerator running against a behavioural memory.

## The sampling loop

The state of the algorithm is a table of buckets, held in the **bucket
buffer** (512 entries). Each entry records the following for one leaf:

| field | meaning |
|---|---|
| `lo`, `hi` | bounding box of the leaf's points |
| `ptr`, `size` | first memory row and number of points |
| `far_pt`, `far_dist` | the leaf's point farthest from the sampled set, and that distance (squared) |
| `refs[4]`, `nref` | sampled points not yet applied to the leaf's points |
| `sum[3]` | per-axis coordinate sums, used for the split value |
| `height` | depth of the leaf in the tree |
| `stats_valid` | box, sums and farthest point are known (false only for the root at start) |

Each iteration starts with a new sample `s`. The **bucket traverser** reads
every leaf once and puts it into one of three classes:

1. **Implicit.** The squared distance from `s` to the leaf's bounding box is
   at least `far_dist`. No point of the leaf can get closer to `s` than to
   its current nearest sample in a way that changes the leaf's maximum, so
   nothing changes.
2. **Merged.** `s` is inside or near the box, but `|s − far_pt|² ≥
   far_dist`. Some points of the leaf may now be nearer to `s`, but the
   leaf's farthest point and its distance are still exact. Rather than read
   the points now, `s` is appended to the leaf's reference buffer. The
   traverser only takes this shortcut while the buffer stays below 4
   entries, so one slot is left for the sample that forces processing.
3. **Processed.** Anything else, or a leaf whose statistics are not yet
   known. The traverser sends a request holding the leaf's pending
   references plus `s` down the datapath. Every point of the leaf is read,
   its distance is lowered by up to four references, and the leaf's new
   farthest point is found.

In all three cases the leaf's (possibly new) farthest point goes to the
**farthest point selector**. When the traverser has visited every leaf, the
selector's maximum becomes the next sample. In classes 1 and 2 the leaf's
`far_dist` stays exact. That is why the selector's maximum is exactly the
FPS answer, even though most points are never read.

The **bucket manager** drives the loop:
- It writes the root leaf, which is the whole cloud.
- It emits each sample into the result buffer.
- It starts the traverser.
- It writes the responses for processed leaves back into the bucket buffer.

The first sample is the seed point supplied by the host. The root starts
with `stats_valid = 0`, so the first iteration processes it without a split
and fills in its box, sums and farthest point.

## Splitting a leaf while measuring it

When a processed leaf has `height < max_height`, the traverser also asks for
a split. The leaf must also have at least two points and a box of non-zero
extent, and a bucket buffer entry must be free. The split parameters are:

- **dimension:** the widest side of the bounding box; on a tie, the lowest
  axis wins.
- **value:** `ceil(sum[dim] / size)`, the mean coordinate. It is computed by
  a restoring divider with one quotient bit per clock (41 clocks).

  Rounding up matters with integer coordinates. The rule is `p[dim] <
  value → left`. Rounding up keeps the minimum on the left, and the maximum
  is never below the rounded mean. So both children are non-empty whenever
  the box has extent.

The **KD-tree constructor** sits after the distance engine. For each row of
up to four points, it sends each point left or right and packs the two sides
toward lane 0. It also updates each child's statistics as every point goes
by:
- count
- coordinate sums
- box
- farthest point (ties keep the earlier point)

A leaf processed without a split sends everything "left". Its statistics are
then the leaf's own, recomputed.

The response carries both children's statistics and memory pointers. The
manager handles it as follows:
- The left child (or the unsplit leaf) overwrites the parent's entry.
- The right child goes to a fresh entry from the **bucket allocator**.
- Both children start with empty reference buffers and `height + 1`.
- Both farthest points go to the selector.

Children made during an iteration are not visited again in that iteration:
their distances already include `s`.

The allocator is a bump pointer, because leaves are never freed within one
run. With a height threshold of 9 the tree has at most 2⁹ = 512 leaves,
exactly the bucket buffer's size.

## Moving points: banks, chunks and the memory layout

This part has the most moving pieces.

### Off-chip memory

One memory word is a **row**: four point records `{x, y, z, dmin}` of 84
bits each, 336 bits in all.

The host places the cloud at rows `0 .. ceil(N/4)−1` with `dmin` set to all
ones. Rows from `ceil(N/4)` upward are scratch space for right children: a
**free-row pointer** in the DMA starts there and only grows.

A leaf is always a contiguous run of rows from `ptr`. Its last row may be
partly padding.

### Point buffer

The on-chip point buffer is two banks of 128 rows (512 points each). Each
bank has one read port and one write port.

A leaf larger than one bank is handled in **chunks** of at most 128 rows. For
each chunk, the DMA runs these phases:

1. **LOAD.** Read the chunk's rows from memory into bank 0.
2. **PROC.** The point reader streams bank 0 through the distance engine
   (one row per clock), then the constructor, then the two align FIFOs.
   - The left align FIFO writes complete rows back into **bank 0**, from
     row 0 upward. The left writer can never pass the reader: it has written
     no more points than have been read.
   - The right align FIFO writes complete rows into **bank 1**.
3. **FLUSH** (last chunk only). Each align FIFO emits its last partial row.
   An align FIFO holds fewer than four points between rows, so points carry
   over from one chunk into the next. Only the end of the leaf produces a
   partial row.
4. **STORE.**
   - Left rows go back to memory **in place**, continuing from the parent's
     `ptr`. The left child has never written more points than the parent has
     supplied, so these rows never overwrite parent rows that have not yet
     been loaded.
   - Right rows go to the free-row pointer.

After a split:
- the left child is `{ptr, left_size}`;
- the right child is `{free_ptr_at_start, right_size}`;
- the free-row pointer advances by `ceil(right_size/4)`.

An unsplit leaf is simply rewritten in place with its new distances.

### Memory needed

Each tree level moves about half of the points to a new region. The memory
must therefore hold about `N/4 + H·N/8 + 2^H` rows for a cloud of `N` points
and height threshold `H`. For 120 000 points and `H = 9`, that is 165 512
rows, about 7 MB.

## Datapath and timing

- **Distance engine.** Four lanes. Each lane is a chain of four distance
  units.
  - Unit `j` computes `min(|p − ref_j|², p.dmin)` for its lane's point. It
    is enabled only if `j < nref`.
  - References are held for the whole leaf.
  - Points move one unit per clock, so the latency is 4 clocks. One row of
    four points enters every clock.
- **Squared distances** are exact: 36-bit unsigned from 16-bit signed
  coordinates.
- **DMA per-chunk cost** (no memory stalls):
  - LOAD: one row per clock plus the memory latency.
  - PROC: one row per clock plus an 8-clock drain.
  - STORE: one row per clock, plus one clock per bank to start reading.
- **Traverser.** Two clocks for an implicit or merged leaf. A processed leaf
  costs its request's full DMA time plus a 2-clock write-back. A split adds
  41 clocks of division first.
- **Overlap.** The traverser waits for each processed leaf's response before
  it moves on, so at most one leaf is in the datapath.
- **Example run.** The end-to-end test samples 300 of 1200 points with
  height threshold 4, under random memory stalls. It takes about 59 000
  clocks:

  | outcome | count |
  |---|---|
  | implicit | 3 706 |
  | merged | 547 |
  | processed | 443 |
  | split | 15 |

## Top-level interface

`fusefps_top` parameters: `BANK_ROWS` = 128, `RESULT_DEPTH` = 64 and
`REQ_DEPTH` = `RESP_DEPTH` = 2. The sizes shared by all blocks are in
`fusefps_pkg`: coordinate width 16, 4 lanes, 4 references and 512 buckets.

| port | dir | meaning |
|---|---|---|
| `start` | in | one-clock pulse while `!busy`; latches the four inputs below |
| `num_points`, `num_samples` | in | cloud size, number of samples (≥ 1, seed included) |
| `max_height` | in | KD-tree height threshold |
| `seed` | in | first sample (must be a cloud point for meaningful output) |
| `busy`, `done` | out | running; `done` pulses when the last sample is queued |
| `sample_valid/sample_pt/sample_ready` | out/out/in | samples in order, seed first |
| `mem_rd_req/mem_rd_addr/mem_rd_gnt` | out/out/in | row read request, held until granted |
| `mem_rd_valid/mem_rd_data` | in | read data, in request order, any latency |
| `mem_wr_req/mem_wr_addr/mem_wr_data/mem_wr_gnt` | out/out/out/in | row write, held until granted |
| `ev_implicit/ev_merged/ev_process/ev_split` | out | one pulse per leaf outcome, for counting |

The reset `rst_n` is active low and asynchronous. The SRAM arrays are not
reset.

## Sizes

| item | here | original design |
|---|---|---|
| coordinates | 16-bit signed integers | float |
| point record | 84 bits | 16 bytes |
| point buffer | 2 × 128 rows × 4 points = 1024 points, 10.5 KB | 1024 points, 16 KB |
| bucket record | 568 bits (71 bytes) | about 116 bytes |
| bucket buffer | 512 entries, 35.5 KB | 512 entries, 58.25 KB |
| result buffer | 64-entry FIFO | a small SRAM |
| distance units | 4 × 4 | 4 × 4 |

The three workloads the design was evaluated on all fit the defaults:

| workload | points | samples (25 %) | height threshold |
|---|---|---|---|
| Small (indoor scan) | 4 000 | 1 000 | 6 |
| Medium (outdoor lidar) | 16 000 | 4 000 | 7 |
| Large (outdoor lidar) | 120 000 | 30 000 | 9 |

Why they fit:
- Leaves needed: at most 512.
- Coordinate sums: at most 120 000 × 2¹⁵ < 2³⁹, within the 40-bit sums.
- Counts and pointers: within 32 bits.
- Samples: streamed out, not stored.

Coordinates must be quantised to 16-bit integers by the host.

## Where this RTL departs from the original design

- **Integers instead of floats.** Coordinates are 16-bit integers and
  distances are exact integers. The split value is the mean rounded up.
- **Pruning tests.** The three outcomes and their names come from the
  original design. The exact tests above (box distance, farthest-point
  distance, "keep one reference slot free") are this implementation's
  reading of bucket-based FPS.
- **The root's first pass.** The original splits the root on its first
  load. Here the root has no statistics before it is first read, so its
  first pass only measures it, and splitting starts one iteration later.
  This costs one extra pass over the cloud.
- **One leaf at a time.** The traverser does not overlap processed leaves.
  The original's request and response FIFOs suggest it runs ahead.
- **DMA, chunking and memory layout** are this implementation's own. The
  original names a DMA block but does not describe it. The point reader
  always reads bank 0, because each chunk is loaded into bank 0; bank 1 is
  read only to store the right child.
- **Seed point.** It is an input; the original does not say how the first
  sample is chosen.
- **Handshakes.** The FIFO interfaces and the memory handshake are assumed.
- **SRAMs.** They are plain arrays, not compiled macros.
- **Off-chip DRAM.** Not part of the RTL; the testbenches model it
  behaviourally.

## Files

| file | block |
|---|---|
| `rtl/fusefps_pkg.sv` | sizes, types, `sqdist`, `boxdist`, per-point statistics update |
| `rtl/fusefps_top.sv` | the accelerator |
| `rtl/bucket_manager.sv` | loop controller; contains the bucket buffer, allocator, traverser and selector |
| `rtl/bucket_buffer.sv` | leaf table (1 read, 1 write port) |
| `rtl/bucket_allocator.sv` | bump allocator for leaf entries |
| `rtl/bucket_traverser.sv` | pruning decisions, split choice, request issue |
| `rtl/seq_divider.sv` | rounded-up restoring divider for the split value |
| `rtl/farthest_point_selector.sv` | running argmax over leaf farthest points |
| `rtl/sync_fifo.sv` | request FIFO, response FIFO and result buffer |
| `rtl/dma.sv` | chunked load / process / store of one leaf |
| `rtl/point_buffer.sv` | two banks of 128 rows |
| `rtl/distance_engine.sv`, `rtl/distance_unit.sv` | 4 × 4 systolic distance units |
| `rtl/kdtree_constructor.sv` | left/right routing and child statistics |
| `rtl/align_fifo.sv` | packs routed points into full rows |
| `tb/tb_fusefps_workloads.sv` | the accelerator on clouds of the evaluated sizes |

Each file begins with a description of the block, its interface and timing.
Each testbench `tb/tb_<block>.sv` drives random stimulus against a model and
prints `TB_RESULT checks=N failures=M`.

`tb_fusefps_top` runs the whole accelerator at its default sizes on a
1200-point random cloud. It does the following:
- It keeps a brute-force FPS model and accepts any sample whose distance to
  the earlier samples is the maximum.
- It counts every mechanism: implicit, merged, processed, split and unsplit
  leaves, chunked leaves, memory stalls and output back-pressure.
- It checks that the tree reaches `2^H − 1` splits.
- At the end, it reads the finished tree out of the bucket buffer and checks
  every leaf's points in memory against the cloud, the leaf's box and the
  reference distances.

`tb_fusefps_workloads` runs the accelerator at the evaluated sizes on
synthetic clouds: random clusters over a flat background. It applies the
same checks, except the split count: a leaf is split only when a sample
forces it to be read, so a dense region that no sample comes near can stay
shallower than the threshold. Results of one run (random memory stalls):

| job | points | samples | H | leaves | implicit | merged | processed | clocks |
|---|---|---|---|---|---|---|---|---|
| Small | 4 000 | 1 000 | 6 | 64 | 58 946 | 1 097 | 1 344 | 0.26 M |
| Medium | 16 000 | 4 000 | 7 | 128 | 497 501 | 3 346 | 4 976 | 1.79 M |
| Large | 120 000 | 3 000 (of 30 000) | 9 | 512 | 1 475 439 | 6 077 | 6 356 | 5.32 M |

The Large job stops at 3 000 samples to keep the brute-force model's run
time reasonable. The full height-9 tree is already built by then.

To simulate a testbench with Verilator (5.x), list the package first:

```
verilator --binary --timing --assert rtl/fusefps_pkg.sv \
  $(ls rtl/*.sv | grep -v fusefps_pkg) tb/tb_fusefps_top.sv \
  --top-module tb_fusefps_top -o sim
./obj_dir/sim
```
