# L-PCN: a point-cloud network accelerator that reuses results between neighbouring subsets

A point-cloud network (PointNet++ style) picks central points, gathers the
K nearest points around each one into a *subset*, and runs every point of
every subset through a shared MLP. Subsets whose centres are close share many
points: the same point is pushed through the MLP many times. This design
groups nearby subsets into *islands*. Each island starts with a *hub* subset.
The results computed for the hub's points are cached and reused by the other
subsets of the island. Only the points that are new to the island are computed.

The RTL has three units that run one after the other for each frame:

| Unit | Modules | Job |
|---|---|---|
| Data Structuring Unit (DSU) | `point_buffer`, `sampling_module`, `neighbor_search_module` (with `bitonic_sorter`), `pruning_module` | farthest point sampling, K-nearest-neighbour subsets, sparse octree of the central points |
| Islandization Unit | `partitioning_module`, `overlap_detection_module` (both built on `octree_buffer`, `ose`, `octree_inserter`) | islands of subsets; per subset, which points are already cached |
| Feature Computing Unit (FCU) | `dataflow_controller` with `systolic_array`, `hub_cache`, `max_pool` | MLP on the new points, reuse of cached ones, max pooling |

`lpcn_top` wires them together. `lpcn_pkg` holds the sizes and the shared types.

## Default configuration

| Item | Value | Origin |
|---|---|---|
| input points N | 1024 | published ModelNet40 setting |
| central points / subsets M | 512 | published |
| points per subset K | 32 | published |
| MLP input / output features | 6 (xyz offset + 3 features) / 128 | published |
| subsets per island | 32, so H = 16 hubs | published |
| Hub Cache | 64 point entries (twice a subset) | published |
| systolic array | 16 x 16 | published |
| distance lanes, sorter | 16 lanes, 32-way bitonic sorter | published |
| coordinates | 10-bit unsigned per axis | this design |
| features and weights | 16-bit signed, 32-bit accumulation | this design |
| Sampled Octree | 3 levels below the root (8x8x8 voxels) | this design |
| Hub Octree | 10 levels, one leaf per distinct position | this design |

## Octrees in hardware

Both octrees use the same store, `octree_buffer`. Each tree level has its own
memory, so a search can read every level in the same cycle. An internal node
is eight child pointers, one per octant. Pointer 0 means "no child", and entry
0 of each level below the root is never handed out. The leaf level holds a
small payload whose meaning belongs to the user, with 0 meaning empty. Every
memory has two registered read ports, A and B, and one write port.

A key is a Morton code: the bits of x, y and z interleaved from the most
significant bit down. Level 1 uses the top bit of each axis, and the octant
number is {x, y, z}.

* `ose` (Octree-Search Engine) is a pipeline with one stage per level. In the
  stage for level l, the node read for the query arrives, and the child
  pointer for the key's octant becomes the read address of level l+1. The
  engine takes one query per cycle and gives its result DEPTH cycles later:
  hit or miss, the leaf payload, and a tag that travels with the query.
* `octree_inserter` walks from the root. Where a child is missing, it takes
  the next free entry of that level from a counter, writes the parent and the
  new empty node in the same cycle, and goes on. At the leaf it writes the new
  payload and returns the old one. `clear` empties a tree in one cycle by
  rewinding the counters.

## Islandization

**Sampled Octree.** As each central point leaves the sampler,
`pruning_module` inserts its voxel into the Sampled Octree. The leaf payload
is the head of a linked list of the central points in that voxel. The
inserter returns the previous head, which becomes the new point's link. The
resulting tree holds exactly the voxels that contain central points. That is
the same tree you get by pruning a full octree of the input, but no full
octree is needed.

**Hub picking.** `partitioning_module` draws central points from a 16-bit
LFSR (seed `16'hACE1`). A draw is rejected if the point is already a hub or
if its voxel already holds a hub. Picking stops after H hubs or 64·H draws.

**Gathering in rounds.** In round r, each hub searches the voxels at
Chebyshev distance r from its own voxel (round 0 is its own voxel). Two
engines run at once: engine 0 handles the even hubs on port A and engine 1
the odd hubs on port B, one voxel query per engine per cycle.

When a voxel is found for the first time, it is marked as gathered and its
central points are appended to that hub's Island List. A list walker does the
appending at one point per cycle, fed by a 16-entry FIFO. A voxel that is
found again, in a later round or later in the same round, is ignored and
counted as "regathered". So every central point lands in the island of the
hub nearest to it in rounds. Gathering stops as soon as every central point
is in a list.

The Island Lists then stream out island by island, hub first, then in
gathering order (inside to outside).

**Overlap detection.** For each subset, `overlap_detection_module` keeps a
full-depth Hub Octree over exact point positions. The leaf payload is the
point's Hub Cache slot + 1.

* A hub subset empties the tree and inserts its 32 points into slots 0..31.
* Any other subset first searches all 32 points, two per cycle with OSE 1 on
  port A and OSE 2 on port B. A hit is an *overlap point*, and the hit also
  gives its slot.
* The remaining points are then inserted one by one into the next free slots
  (tree updating). Once the 64 slots are used up, new points are still
  computed, but they are not cached. There is no replacement inside an island.

Positions inside a frame are assumed to be distinct. An assertion fires if
two points share a position.

## Feature computation and delta compensation

The MLP here is one linear layer followed by max pooling and ReLU:

    out = relu( max over the 32 points p of the subset  W · [p − c, f_p] )

Here c is the subset's central point and f_p the point's three extra
features. A cached result cannot simply be reused, because c differs from
subset to subset. This design stores every cached value relative to the
island's hub centre h:

    cached(p) = W · [p − h, f_p]

A non-hub subset then needs one correction vector, d = W_xyz · (h − c), where
W_xyz are the weight columns that multiply the xyz offset. Because
`W·[p − c, f] = W·[p − h, f] + W_xyz·(h − c)` exactly, reuse gives
bit-identical results.

The vector d is computed by the systolic array as an extra row
`[h − c, 0, 0, 0]` placed ahead of the new points. New points are written to
the cache as `y − d`, and cached points are read back as `cached + d`. ReLU
comes after the pooling, and max commutes with ReLU, so the cache holds
pre-activation values.

`dataflow_controller` runs each subset as follows:

1. Fetch the features of the points that must be computed, one per cycle.
2. For each of the 8 column tiles of 16 output channels, and for each tile
   of up to 16 rows:
   * clear the array;
   * stream the 6 input steps;
   * wait 31 cycles for the array to drain;
   * read the rows out one per cycle into the pool and the cache.
3. Still inside each column tile, read the overlap points back from the
   cache at one per cycle, and add d.

`systolic_array` is output-stationary, with the input skew done inside the
array. A product fed in cycle t reaches PE (r, c) in cycle t + r + c.

## Top-level sequence and measured timing

`lpcn_top` works through a frame in this order:

1. Load points (`p_we`/`p_addr`/`p_data`) and weights
   (`w_we`/`w_row`/`w_col`/`w_data`), then pulse `start`.
2. Sampling streams central points. Each point is accepted only when both
   the Neighbor Search Module and the Pruning Module can take it.
3. After all M subsets are stored, partitioning runs.
4. For each Island List entry:
   * read the subset;
   * gather its positions through the point buffer's 33-wide port;
   * run overlap detection;
   * run the FCU.
5. Each result leaves on `o_valid` with `o_seq` (the sampling order),
   `o_center` and `o_result[128]`. `done` pulses after the last subset.

The counters report each mechanism: hub subsets, overlap points, tree
insertions, cache-full events, delta rows, computed and reused points,
gathering rounds, regathered voxels and tree queries. There is also a cycle
count per phase.

One full-size frame with a random cloud gives these numbers:

| Quantity | Value |
|---|---|
| total cycles | 644,027 |
| data structuring | 82,949 (neighbour search: 5 cycles per 32 points per central point) |
| islandization (partitioning + overlap detection) | 50,843 |
| feature computation | 510,232 |
| points computed / reused | 9,593 / 6,791 (41 % of subset points reused) |
| gathering rounds | 5 |

Random clouds overlap less than real objects do, so the reuse fraction on
real scans would differ.

## Where this design departs from the published one

* **MLP depth.** The MLP is a single linear layer. The benchmark networks use
  several layers with non-linear activations in between, where delta
  compensation is only approximate. Here it is exact. The FCU is therefore
  marked partial.
* **No overlap between units.** Structuring, islandization and computing run
  one after another. Overlap detection also does not overlap with the FCU.
* **Input Octree.** The Sampled Octree is built by insertion, so the Input
  Octree (taken from prior work in the original) is not built.
* **Gathering rounds and engine split.** The rounds are Chebyshev shells of
  leaf voxels. The two search engines split the hubs by parity, where the
  published figure shows both engines loading the same hub.
* **Overlap detection order.** All points of a subset are searched before
  any is inserted.
* **Cache contents.** Cache entries hold values relative to the hub centre,
  so one correction row per subset is enough.
* **Memories and loading.** All memories are plain arrays. Features and
  weights sit on chip and are loaded through ports, with no DRAM model.
* **Frame size.** Only the 1024-point setting fits the default buffers.
  Larger clouds need N and M raised in `lpcn_pkg`; the sizes are parameters,
  but only the defaults and a 256-point variant have been simulated.

## Verification

Every module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog:

* **Search and sorting blocks.** The octree blocks, the sorter, sampling and
  neighbour search are compared with reference models written in the
  testbench, including the OSE latency and the KNN rate.
* **Partitioning.** `tb_partitioning_module` checks these properties
  independently of the design:
  * every central point is in exactly one island;
  * each point is with a hub that is nearest to it in rounds;
  * entries run inside-out;
  * the round count is right.
* **Overlap detection.** `tb_overlap_detection_module` predicts overlap,
  slot and store with a position-to-slot map, including the case where the
  cache is full.
* **FCU.** `tb_dataflow_controller` compares every pooled output with
  `relu(max W·[p − c, f])` and checks that reuse saves cycles.
* **Whole design.** `tb_lpcn_top` runs one complete frame at the default
  sizes, with no parameter overrides. It recomputes sampling, KNN and the
  MLP in the testbench and compares all 512 × 128 outputs. It also fails if
  any counted mechanism never happened.

To run a testbench with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal \
      rtl/lpcn_pkg.sv $(ls rtl/*.sv | grep -v lpcn_pkg) tb/tb_lpcn_top.sv \
      --top-module tb_lpcn_top -Mdir obj && ./obj/Vtb_lpcn_top

The package has to come first. The full-size frame simulates in a few
seconds. For a smaller frame, instantiate `lpcn_top` with other N, M and H;
K must stay twice the lane count (32 with 16 lanes).
