# Two-level kd-tree k-means accelerator: programmable-logic RTL

K-means clustering spends almost all of its time on one question, asked again
on every pass: which of the K centroids is each point closest to? This design
answers it with far fewer distance computations than the plain loop over all
points and centroids. It does this in two ways.

* **Kd-tree filtering.** The points live in the leaves of a kd-tree. Each
  internal node stores its bounding box, its point count and the sum of its
  points. One traversal decides, for whole boxes at once, that some centroids
  cannot be the nearest for any point inside. Once a box has a single
  candidate left, its stored sum and count go to that centroid in one step,
  and the subtree below is never visited.
* **Two levels.** The data set is split into four quarters, each with its own
  tree and its own hardware engine. First each quarter is clustered on its
  own until it converges. Then the quarters' clusters are joined by nearest
  centroid. Finally the joined centroids are refined over all four quarters
  together, which usually takes only a few more passes.

The RTL is the programmable-logic (FPGA fabric) part of a system-on-chip
accelerator. Processors build the trees and load the initial centroids. DDR3
holds the trees. A PCIe link brings the data in from a host. Those parts are
not in this RTL: their connections are ports of the top module,
`kmeans_pl_top`.

Distances are Manhattan (L1): the sum over dimensions of |x_d − c_d|. That
needs only adders, with no multipliers.

## Data flow at a glance

```
            AXI4-Lite                      128-bit AXI4-Stream   64-bit AXI4
 processor ──► cfg_status_regs            PCIe DMA ◄──► custom_pcie_dma ◄──► DDR3
                 │ start, K, roots, centroids
                 ▼
            two_level_ctrl ─────────────────────────────────┐
     ┌───────────┼──────────────┬──────────────┐            │
     ▼           ▼              ▼              ▼            ▼
 quarter 0   quarter 1      quarter 2      quarter 3    cluster_merger
 ┌────────────────────────────────────────┐
 │ node port ─► bram_fifo ─► kd_filter_engine            │
 │              (dist_calc_array, dist_compare inside)   │
 │           ─► wgtCent / count sums ─► centroid_update  │
 └────────────────────────────────────────┘
                 │ final centroids
                 ▼
            bram_fifo (results) ─► res_* port
```

Each quarter has a node-request port. The engine asks for a node by index.
A node record comes back and passes through a small FIFO into the engine. An
engine holds one node request at a time.

## The pruning test, and why it is exact for L1

For each node the engine has a set Z of candidate centroids. The set arrives
from the parent as a K-bit mask. The engine then does three things.

1. It computes the distance from every candidate to the midpoint of the
   node's box, and takes the closest one, z\*. Ties go to the lower index.
2. For every other candidate z, it builds one corner v of the box. In each
   dimension, v takes the box maximum if z lies above z\* there, and the box
   minimum otherwise. v is the point of the box that favours z most over z\*.
3. z is removed if d(z\*, v) ≤ d(z, v).

With L1 distance, the difference d(z\*, x) − d(z, x) splits into a sum of
one-dimensional terms. Each term is monotone in x_d in the direction of
sign(z_d − z\*_d), so the corner above maximises every term at once. If even
that corner is at least as close to z\*, no point of the box prefers z, and
removing z is exact. The same argument holds for the squared Euclidean
distance of the classic filtering algorithm. The ≤ means that when z and z\*
are equally close, the tie goes to z\*, which has the lower index. That is
the same rule the comparator uses, so hardware and software references agree
even on data with ties.

After the test:

* **One candidate left:** the node's weighted sum (`wgt`) and `count` are
  added to that centroid's accumulators, and the subtree is skipped.
* **A leaf:** it holds one point (box min = max = the point). It goes to z\*.
* **Otherwise:** both children are pushed on the traversal stack with the
  reduced mask. Right is pushed first, so left is visited first.

The same K distance cores serve all three distance steps. They get the
midpoint, then each candidate's own corner paired with that candidate, then
the same corners paired with z\*. This is why the array takes one point per
core rather than a shared one.

## Filtering engine (`kd_filter_engine`)

**Node record** (`node_width(DIM)` bits, packed, element 0 at the LSB end):

```
{ leaf(1), left(32), right(32), count(32), wgt[DIM](64 each),
  cmax[DIM](32 each), cmin[DIM](32 each) }
```

At DIM = 15 a record is 2017 bits. `left` and `right` are node indices. They
mean nothing in a leaf.

**States and timing**

* The states run in this order: `POP → REQ → WAIT → MID → ZSTAR → VTX_A → VTX_B → DECIDE`.
* An internal node costs 7 cycles plus the memory latency.
* A leaf, or a node whose mask arrives with a single candidate, costs
  4 cycles plus the latency.
* A pass ends one cycle after the stack runs empty.

**Traversal stack.** Frames are {node index, candidate mask}. The default
depth is 64. A balanced tree over a million points needs about 20 frames. If
a push would overflow, the children are dropped and the `overflow` flag goes
up. The flag appears in the STATUS register, and the result of that pass
should not be trusted.

**Outputs.** These are K sums of DIM 64-bit coordinates and K 32-bit counts,
cleared at the start of each pass. The engine also counts nodes visited,
candidates pruned, whole-node assignments and leaves.

## Two-level sequencing (`two_level_ctrl`, `cluster_merger`)

A run goes through five phases.

1. **Level 1.**
   * Each quarter runs a filtering pass with its own centroid set, then
     updates it: new centroid = sum / count, rounded down.
   * A quarter stops when no centroid moved, or after MAX_ITER passes.
   * Quarters that finish early wait for the others.
2. **Combine.**
   * Cluster k of quarter 0 is matched, by L1 distance between centroids,
     with the nearest cluster of each of quarters 1–3.
   * Their sums and counts are added.
   * This takes K·(GROUPS−1)+1 cycles.
   * A cluster of another quarter can be matched by two clusters of quarter
     0. The matching is greedy, not one-to-one.
3. **Update.** Quarter 0's update unit divides the joined sums. The result is
   the shared centroid set.
4. **Level 2.**
   * All four engines filter their own trees with the shared centroids.
   * Their sums are added over the quarters, and quarter 0's update unit
     recomputes the centroids.
   * This repeats until nothing moves, or MAX_ITER passes.
   * Filtering the four trees and adding their sums gives exactly the result
     of filtering one tree whose top four subtrees are the quarters.
5. **Output.** Each enabled cluster is written to the result FIFO as
   `{k[7:0], count, centroid[DIM]}`. Then `irq_done` is high for one cycle
   and STATUS.done is set until the next start.

**The update unit** (`centroid_update`):

* It has DIM restoring dividers in parallel (`seq_divider`, 64 by 32 bits).
* It handles one cluster at a time, ACC_W + 2 = 66 cycles per non-empty
  enabled cluster and 1 cycle per other cluster.
* An empty or disabled cluster keeps its centroid.
* Its `changed` output drives the convergence tests.

## Number formats

* Coordinates are unsigned 32-bit integers.
* Distances are 40 bits, enough for 256 dimensions.
* Sums are 64 bits.
* Counts and node indices are 32 bits.

This is a departure. The original design works in floating point. With
integers the new centroid is the floor of the mean, so results match a
floating-point k-means only up to rounding. Scale the input data so that one
unit of rounding does not matter. The widths are in `kmeans_pkg`.

## Register map (`cfg_status_regs`, AXI4-Lite, 32-bit)

| Address | Name | Access | Meaning |
|---|---|---|---|
| 0x000 | CTRL | W | bit 0: start a run |
| 0x004 | STATUS | R | busy, done (sticky), stack overflow, DMA busy |
| 0x008 | K_ACTIVE | RW | clusters in use, clamped to 1..K |
| 0x00C | MAX_ITER | RW | pass limit per level, default 64 |
| 0x010 + 4g | ROOT | RW | root node index of quarter g |
| 0x040 + 4g | L1_IT | R | level-1 passes of quarter g |
| 0x080 | L2_IT | R | level-2 passes |
| 0x084 | CYCLES | R | cycles of the last run |
| 0x088 / 0x08C | NODES / PRUNED | R | last pass, all quarters |
| 0x0C0 / 0x0C4 | DMA_WADDR / DMA_RADDR | RW | DDR3 byte addresses, 128-byte aligned |
| 0x0C8 | DMA_LEN | RW | length in 128-bit words |
| 0x0CC | DMA_CTRL | W | bit 0 host→card, bit 1 card→host |
| 0x4000 + 4·((g·K+k)·DIM+d) | centroid window | RW | coordinate d of centroid k, quarter g |

A run works like this:

1. Write the initial centroids of every quarter into the window, and write
   the ROOT registers and K_ACTIVE.
2. Set CTRL bit 0.
3. Wait for STATUS.done or `irq_done`.
4. Read the results from the result stream, or from quarter 0's centroids in
   the window.

A register write needs AW and W valid together.

## Host DMA (`custom_pcie_dma`)

**Host to card.** 128-bit stream words from the PCIe DMA are written to DDR3
as 64-bit AXI4 INCR bursts of up to 16 beats, low half first.

**Card to host.** The reverse. `tlast` marks the final word.

Both directions keep one burst in flight. A write transfer ends only after
the last write response. Responses other than OKAY are not checked.

## Parameters of `kmeans_pl_top`

| Parameter | Default | Notes |
|---|---|---|
| DIM | 15 | dimensions; the original evaluation uses 15 |
| K | 20 | parallel cluster modules per quarter; K_ACTIVE selects 1..K at run time |
| GROUPS | 4 | quarters, one engine each |
| STACK_DEPTH | 64 | traversal frames per engine |
| NODE_FIFO_DEPTH / RES_FIFO_DEPTH | 16 / 32 | FIFO words |
| DMA_BURST | 16 | 64-bit beats per burst |

The logic grows as GROUPS·K·DIM. At the defaults that means 80 distance
cores of 15 dimensions each, and 4 × 20 × 15 sums of 64 bits.

## What is not here, and where this RTL departs

* **More than K clusters.** With more clusters than parallel modules, the
  original shares the modules between clusters. That is not built, so
  K_ACTIVE ≤ K. For 30, 50, 100 or 128 clusters, raise K and accept the area.
* **Floating point.** Integer arithmetic is used throughout (see above).
* **The update step.** One description puts the update step on a real-time
  processor, and another puts all arithmetic in the logic. Here the division
  is done in logic, and software only starts runs and reads results.
* **Level-by-level buffering.** The original stores the tree so that each
  level's memory can be released and reused. That is not modelled: nodes are
  fetched one at a time by index.
* **Outside parts.** The processors, the DDR3 controller and memory, the AXI
  interconnects, the PCIe hard block and its multi-channel DMA, and the host
  driver are outside. The tree is built by software, and the node ports
  expect whole records, so the width conversion from the 128-bit memory bus
  belongs in the interconnect.
* **Choices the original leaves open.** The register map, the node record
  layout, the handshakes, the tie rule (lower index wins), the empty-cluster
  rule (keep the centroid), the pass limit and the greedy matching in the
  combine step are this design's own.
* **The pruning step.** One pseudo-code line can be read as removing z\*
  rather than z. The prose and the filtering algorithm remove z, and so does
  this design.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
values computed in the testbench and prints
`TB_RESULT checks=<n> failures=<m>`. The shared package `kmeans_tb_pkg`
holds the reference model:

* a generator of clustered random data;
* a kd-tree builder (median split on the widest dimension, one point per
  leaf);
* the node packer;
* a two-level reference that assigns every point to its nearest centroid by
  brute force (plain Lloyd iterations), with the same integer, tie and
  empty-cluster rules. The tree hardware must reproduce it exactly, so the
  check also shows that the pruning loses nothing.

The testbenches are:

| Testbench | What it checks |
|---|---|
| `tb_manhattan_dist`, `tb_dist_calc_array` | distances of random vectors, including extremes, and the one-cycle latency |
| `tb_dist_compare` | argmin and pruning decisions against a direct computation, with many equal values |
| `tb_kd_filter_engine` | per-centroid sums and counts against brute-force nearest-centroid assignment, with all and with a reduced candidate set, random memory latency and stalls; also that every point is counted once and that pruning occurs |
| `tb_centroid_update` | quotients, the empty and disabled rules, the changed flag and the cycle count |
| `tb_cluster_merger` | nearest matching and sums against a reference, and the cycle count |
| `tb_two_level_ctrl` | scripted engines: phase order (no combine before every quarter has converged), pass counters, the pass limit, the done pulse |
| `tb_bram_fifo` | ordering, full and empty behaviour, and the level output under random traffic |
| `tb_cfg_status_regs` | every register, the K clamp and centroid-window addressing |
| `tb_custom_pcie_dma` | a DDR3 model with random stalls; round trips of 24 and 5 words, burst lengths and addresses, last-beat framing and beat order |
| `tb_kmeans_pl_top` | the whole design at its default parameters; see below |

`tb_kmeans_pl_top` builds four trees over 96 points each, in 15 dimensions.
It serves the node ports from a memory model with random latency, and runs
three things:

1. K = 20 until convergence;
2. K_ACTIVE = 5 with MAX_ITER = 2, so the pass limit stops both levels;
3. a DMA round trip.

It compares the centroids, counts and pass numbers with the reference model.
It also checks that each mechanism happened: pruning, whole-node
assignment, leaf assignment, child pushes, level-1 convergence, the limit
stop, the combine step, level-2 passes, node-read stalls and both DMA
directions. The first run takes
about 31 000 cycles.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_kmeans_pl_top \
  rtl/kmeans_pkg.sv tb/kmeans_tb_pkg.sv tb/tb_kmeans_pl_top.sv \
  rtl/manhattan_dist.sv rtl/dist_calc_array.sv rtl/dist_compare.sv \
  rtl/seq_divider.sv rtl/kd_filter_engine.sv rtl/centroid_update.sv \
  rtl/cluster_merger.sv rtl/two_level_ctrl.sv rtl/bram_fifo.sv \
  rtl/cfg_status_regs.sv rtl/custom_pcie_dma.sv rtl/kmeans_pl_top.sv
./obj_dir/Vtb_kmeans_pl_top
```

For a single block, list the package files, its testbench and the modules it
uses. Each testbench has a watchdog that ends the run with a failure if it
hangs.

**How far to trust it.** The functions are checked against an independent
software model on random data. The timing of the memory and stream ports
is checked only against behavioural models, not real vendor IP. Synthesis
results, clock rate and resource use have not been measured.
