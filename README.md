# FractalCloud accelerator in SystemVerilog

Point-cloud networks (PointNet++, PointNeXt, PointVector) spend most of their
time on *point operations*: farthest point sampling (FPS), ball-query
grouping, k-nearest-neighbour interpolation and the gathering of neighbour
features. Done over the whole cloud these are all-to-all, O(n²) operations,
and at hundreds of thousands of points they swamp the MLP work. The
FractalCloud idea is to cut the cloud once, cheaply, into a binary tree of
small blocks that follow its shape, and then run every point operation
*per block*: many blocks in parallel, each touching only its own points or
those of its parent. This RTL implements that pipeline: a partitioning
engine, a set of point units that exploit the blocks in two ways (one block
per unit for sampling, one shared block for neighbour search), block-wise
feature gathering from both ends of the block list, and a 16 × 16 systolic
array with max pooling for the feature layers. All arithmetic is IEEE
binary16 (FP16).

## Fractal partitioning (`fractal_engine`)

A block with more than `th` points is split in two at the midpoint
`(max + min) / 2` of one coordinate; the coordinate cycles x, y, z with the
depth of the tree. Splitting stops at `th` points per block (64 for
classification-sized clouds, 256 for segmentation-sized ones are the
intended settings). Leaves are laid out in depth-first order, so every leaf
is a contiguous address range, and so is every internal node: a leaf's
parent is simply a wider range around it.

The engine works level by level. Points live in two ping-pong buffers; one
pass over a buffer processes every block of the current tree level,
`LANES` (4) points per cycle. For each block being split, points at or below
the midpoint are written from the bottom of the block's range, points above
it from the top, and at the same time the min and max of the *next*
coordinate are accumulated for each child. So when the level ends, the
children's midpoints are known and the next pass can start at once; this is
the overlap of partitioning on one dimension with midpoint computation on
the next. Leaves are copied through unchanged. A split that would leave one
side empty keeps the block and pushes it one level deeper. The number of
passes (`traversals`) is the tree depth plus one: 3 for the classic 80-point,
`th` = 24 example (4 leaves of 19, 24, 17 and 20 points), 6 for 1024 random
points at `th` = 64.

Outputs: the block table (start, length, parent start, parent length and
depth per leaf, `blk_idx` → fields, combinational) and the partitioned
points with their original index (`rd_addr` → `rd_point`, `rd_orig`).
`overflow` flags a block table that would exceed `MAX_BLK`.

## The point unit (`rspu`) and its window check

Each reuse-and-skip point unit holds one block (up to 256 points) in a
local buffer and processes one candidate per cycle through three stages:
issue, distance (`distance_unit`, squared Euclidean distance, one register),
and update. Modes:

* **FPS.** Every point keeps its distance to the sampled set. A traversal
  updates these distances with the newest sample and tracks the farthest
  point (strict `>`, so the lowest address wins ties). At the end of the
  traversal that point is marked sampled and becomes the next centre. The
  first sample is local address 0.
* **Ball query.** Candidates with d² < r² are appended in arrival order, up
  to k. A short group is padded with its first hit.
* **KNN.** `topk_unit` keeps a sorted list of the k smallest distances by
  parallel insertion, stable on ties.

The window check removes sampled points from FPS traversals without reading
them. The unit keeps a mask bit per point (1 = still a candidate). The
`window_check` module takes the W = 8 mask bits after the current address
and returns the next address through a lowest-one priority encoder:
`next = addr + offset`, where offset is the position of the first 1 plus one,
or 8 if the window is empty. With the mask window `0000_1100` at address 0
the next address is 3. So sampled points cost neither a buffer read nor a
distance computation, and `fps_visits` counts what is actually computed. In
the end-to-end test that is 9084 candidate evaluations where a plain
traversal would do 10337.

For neighbour search a unit can take its candidates from an external stream
instead of its own buffer (`use_ext`). That is how several units share one
search space.

## Two kinds of block parallelism (`rspu_array`)

`rspu_array` drives `N_RSPU` = 4 point units from the engine's block table.

* **Sampling, inter-block.** Leaves are taken four at a time. Each unit loads
  one leaf and all four run FPS at the same time. Every leaf is sampled at
  the same rate, `n = max(1, len >> rate_shift)`. Samples go to a sample
  table leaf after leaf, with each leaf's slice in `soff_tab` / `scnt_tab`.
* **Neighbour search, intra-block.** Leaves are visited in depth-first
  order. A leaf's search space is the leaf itself when it sits at depth 0 or
  1, otherwise its parent. The search space is copied into a shared buffer
  unless the previous leaf used the same one: siblings share a parent, so
  the second sibling reuses it with no reads (`ss_loads`, `ss_reuses`). The
  leaf's centres are handed out four at a time, and the search space is
  streamed once to all four units, so one buffer read serves up to four
  distance computations (`bcast_reads`, `served`).
  * Ball query: the centres are the leaf's samples and the candidates are
    the points of the search space.
  * KNN: the centres are all points of the leaf and the candidates are the
    samples inside its search space.

  Results land in a neighbour table, k addresses per row.

A search space larger than 1024 points is cut to a 1024-point window around
the leaf, and a leaf larger than a unit's buffer is cut to 256 points. Both
cases are counted in `clamp_cnt` and do not occur when `th` ≤ 256 and
parents stay under 1024 points.

## Block-wise gathering (`gather_unit`, `gather_array`)

Neighbour features are fetched per leaf, not per reference.
1. A gather unit first copies the feature rows of the leaf's search space
   from the global buffer into a local buffer, one row per grant. If the
   leaf shares its search space with the previous leaf, it skips the copy.
2. It then walks the neighbour table of each centre and emits the
   referenced rows from its local buffer, with `last` on the k-th row.

Each global-buffer row is therefore read about once per parent instead of
once per neighbour reference: 1445 row reads for 3952 emitted rows in the
end-to-end test.

`gather_array` runs two units from opposite ends of the leaf list. Unit 0
goes from the first leaf upward, unit 1 from the last leaf downward, and
each takes the next leaf on its side whenever it is idle, until they meet.
The array also:
- arbitrates the neighbour-table port between the two units;
- merges their outputs round-robin into one stream tagged with the unit
  number;
- reports the meeting point and the leaves each unit served.

## Feature computation (`systolic_array`, `pooling_unit`, `mlp_ctrl`)

The 16 × 16 array is weight-stationary. Cell (i, j) holds weight W[i][j].
Activations move right and partial sums move down, both through registers
(`systolic_pe`). Input element i is delayed i cycles and output column j
N−1−j cycles. A 16-channel row therefore enters every cycle and leaves as a
16-channel row exactly 2N−1 = 31 cycles later, with its tag. Sums are formed
in input-channel order, so a reference that adds in the same order matches
bit for bit.

`mlp_ctrl` puts the gathered stream through the array, applies ReLU and
max-pools each group in `pooling_unit`. The pooling unit keeps one
accumulator per gather stream, so interleaved groups never mix. Each pooled
row is written to the global buffer at `out_base + centre`, 32 cycles after
the group's last row entered. The stream never stalls (`in_ready` is
constant 1).

## Buffer, DMA and control (`global_buffer`, `dma`, `config_module`)

**Global buffer.** It holds 8192 rows of 16 FP16 values (256 KB),
interleaved over 8 single-ported banks by the low address bits. There is
one write port and three read ports: the two gather units and the DMA. Per
bank and cycle the write wins, then the read ports in rotating order. A
refused read is held by its requester and counted in `bank_conflicts`. Read
data arrives the cycle after the grant.

**DMA.** It moves 128-bit beats, i.e. 16 B per cycle, close to a
DDR4-2133 channel at 1 GHz. Descriptor kinds:
- 0: points into the partitioning engine;
- 1: feature rows into the buffer;
- 2: weight rows into the array;
- 3: buffer rows back to DRAM.

Loads keep requests in flight while DRAM accepts them, so an unstalled load
moves one beat per cycle.

**Configuration module.** It sits between the control CPU and the engines.
The CPU writes 32-bit words. Bits [31:28] of an instruction's first word
name the target, and each target has a fixed length:

| target | words | fields |
|---|---|---|
| 0 partitioning | 1 | [27:14] points, [13:0] threshold |
| 1 point units | 2 | [27] op (0 FPS, 1 search), [26:25] mode (1 BQ, 2 KNN), [24:21] rate shift, [20:15] k; word 1 [15:0] r² (FP16) |
| 2 gather + MLP | 2 | [27] ReLU, [20:15] k, [13:0] feature base; word 1 [13:0] output base |
| 3 DMA | 3 | [27:26] kind, [13:0] on-chip address; word 1 DRAM beat address; word 2 [15:0] count |

The module buffers the words (16 deep), collects each instruction and
issues it to its target once the accelerator is idle. Instructions
therefore run one after another. `cfg_wait_cycles` counts the time
complete instructions spent waiting.

## Top level (`fractalcloud_top`)

The top connects the blocks as described above. Its ports are:
- the CPU word port (`cfg_*`, `idle`);
- the DRAM beat port (`dram_*`): request/grant, in-order read return with
  any latency;
- a read port for the partitioned points (`pt_rd_*`) and one for the sample
  list (`samp_rd`);
- the mechanism counters.

The host uses `pt_rd_*` to learn the block order and place first-layer
features in the same order. A typical layer is: load points, partition,
load features and weights, sample, ball query, gather + MLP, store.

## Number format

`fc_pkg` holds the FP16 type, the point struct (x in the top half-word) and
synthesizable FP16 add, subtract, multiply, halve, compare and
squared-distance functions.
- Results round toward zero.
- Subnormals flush to zero.
- Overflow saturates at ±65504, and no NaN or Inf is produced.
- Comparisons use a monotonic integer key.

For normalised coordinates these shortcuts do not change partitioning,
sampling or neighbour decisions. They do make the MLP results differ in
the last bit from round-to-nearest hardware.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. Each testbench compares against a model
written independently in the testbench. Test coordinates sit on grids
(multiples of 1/8 or 1/64) where FP16 is exact, so distances and midpoints
can be checked exactly with `real` arithmetic.
- `tb_fractal_engine` compares against a recursive software partition,
  including the 80-point example.
- `tb_rspu` and `tb_rspu_array` compare with software FPS, ball query and
  KNN on real engine output.
- `tb_systolic_array` and `tb_mlp_ctrl` compare with FP16 references and
  check the 31- and 32-cycle latencies.

`tb_fractalcloud_top` runs one full set-abstraction layer at the top's
default parameters: 1024 points, `th` = 64, sampling rate 1/4, ball query
with k = 16, then MLP, ReLU, max-pool and store. It uses a DRAM model with
3-cycle latency and periodic stalls.
- It checks leaf membership, all 247 samples and every pooled output value
  bit for bit.
- It counts and requires each mechanism to occur: window skipping, parallel
  FPS batches, search-space reuse, broadcast serving several units, two-ended
  gathering, gather-buffer reuse, DRAM stalls, configuration waits and bank
  conflicts.
- It checks that the point load runs at one beat per cycle.

`tb_fractalcloud_seg` runs the same layer at segmentation scale:
- 6144 points with `th` = 256, giving leaves of up to 256 points (the most a
  point unit holds);
- k = 32;
- 1524 samples.

6144 is the largest pass whose features and pooled results fit the buffer
together. The test applies the same checks and counts.

To run one testbench with Verilator, for example the top:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
  rtl/fc_pkg.sv tb/tb_util_pkg.sv tb/tb_fractalcloud_top.sv --top-module tb_fractalcloud_top
obj_dir/Vtb_fractalcloud_top
```

The same pattern works for every `tb/tb_<block>.sv`. `tb_util_pkg` provides
FP16↔real conversion for the testbenches.

## Departures and limits

* **Partitioning strategies.** Only Fractal partitioning is built. The
  uniform and KD-tree modes of the published engine, and the sorter the
  KD-tree mode needs, are comparison baselines and are left out.
* **Capacity.** One partitioning pass holds 8192 points. Clouds of 33K or
  289K points (large indoor scenes) must be cut by the host into passes.
  A pass can hold up to 8192 points for the point operations, and up to
  about 6.5K points when features and pooled results must share the
  buffer. The design does not reproduce the single-pass
  289K-point partition (11 traversals).
* **FPS start point.** FPS starts from the first point of each leaf rather
  than a random one.
* **Distances.** Squared distances are used throughout; no square root is
  taken.
* **Feature layers.** A pass applies one 16-in / 16-out layer. Tiling wider
  layers, chaining layers on chip, and overlapping point operations with
  feature computation are not built. Instructions run strictly one at a
  time.
* **Memory organisation.** The 274 KB unified buffer of the published
  design is replaced by separate stores:
  - a 256 KB feature buffer;
  - coordinate buffers inside the partitioning engine;
  - weights held in the array cells;
  - sample and neighbour tables inside the point-unit array.

  Bank count, port count and arbitration are choices of this design.
* **Outside the top.** The RV32IMAC control core, the network-on-chip, the
  DRAM, pads and clocking are not modelled in RTL. The core appears as the
  word port and the DRAM as the beat port.
* **Unstated details.** Unit counts (4 point units, 2 gather units), buffer
  depths, handshakes, the instruction encoding and the FP16 rounding are
  this design's choices where the published description gives none.
* **Synthesis.** The larger modules are slow to synthesise flattened (the
  top has 256 FP16 MAC cells and four 256-entry point buffers with
  per-entry logic). Size figures are only available for the smaller blocks.
