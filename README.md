# HgPCN accelerator: octree-indexed sampling and voxel-expanded gathering in RTL

Point-cloud networks such as PointNet++ start from a raw frame of 10^5 to
10^6 points. Before inference they need two steps that are expensive on
ordinary hardware:

- **Down-sample** the frame to a fixed number of points, usually by
  farthest-point sampling (FPS).
- **Gather**, for every central point, its K nearest neighbours (KNN) to
  form the "input feature map" of the next layer.

Both steps normally read every point many times. HgPCN is a CPU + FPGA design
that avoids this with one octree:

- The host CPU builds an octree of the frame. It stores the points in host
  memory in space-filling-curve order (Morton order) and loads a compact
  table of the octree nodes into on-chip memory.
- **Octree-Indexed Sampling (OIS).** The FPGA does farthest-point sampling by
  walking that table, never by reading points. Each sampled point costs one
  root-to-leaf walk, and the result is a list of host addresses.
- **Voxel-Expanded Gathering (VEG).** KNN uses the same table. It grows a cube
  of voxels around the central point until the cube holds K points. Only the
  outermost shell is ranked by distance.

This RTL implements the FPGA side:

- the Octree-Table;
- the down-sampling unit with its eight Sampling Modules and bitonic sorter;
- the seed update;
- the Sampled-Points-Table;
- the data structuring unit (VEG), with its octree lookup engine and sorter;
- the input buffer that hands point-subsets to a deep-learning accelerator;
- an MMIO register file.

The deep-learning accelerator itself is a commercial part. It is not
included; its side of the input buffer is brought out as ports.

## Data layout shared by both engines

**Morton codes.** Coordinates are 16-bit integers. A point's leaf voxel is
the top `DEPTH = 10` bits of each coordinate, so the leaf grid is 1024^3. Its
m-code interleaves these bits as x, y, z per level, most significant level
first. This gives 30 bits, left-aligned: the node at level `l` is named by
the top `3*l` bits (`hgpcn_pkg::morton_encode`, `level_mask`).

**Host memory.** Point records (`point_t`: x, y, z and one 32-bit feature
word) are stored in leaf m-code order. Every octree node therefore covers one
contiguous address range.

**Octree-Table.** `octree_table` has `NODES = 65536` entries of 147 bits.

- Static part, written by the host:
  - `mcode`;
  - `is_leaf`;
  - `child_num` (1..8);
  - `child_base` (index of the first child);
  - `pt_addr`, `pt_cnt` (the node's range of host addresses).
- Dynamic part, used by sampling:
  - `pts_left` (points of the subtree not yet sampled);
  - `lo_off` (points taken from the front of a leaf).

The children of a node lie at consecutive indices. The table is split into
eight banks by index mod 8, so all children of any node are read in one
cycle. The read is registered, so data arrives one cycle after the request.
Output lane `j` always holds entry `base + j`.

## Octree-Indexed Sampling (`downsampling_unit`)

FPS repeatedly picks the unpicked point farthest from the set already picked.
OIS approximates "farthest point" by "farthest voxel" and descends the tree.
One round works as follows:

1. Read the root.
2. At each level, read the (up to eight) children of the current node in one
   cycle. Eight `sampling_module`s each compute the Hamming distance between
   a child's m-code and the seed m-code: the XOR is masked to the current
   level and its ones are counted. An 8-input `bitonic_sorter` orders the
   children by the key {has unpicked points, distance, index}, and the walk
   descends into the winner. Every node passed has `pts_left` decremented, so
   exhausted subtrees drop out of later rounds and no point is sampled twice.
3. At the leaf, take the point that lies farthest from the seed along the
   curve:
   - if the leaf comes after the seed in Morton order, the last unpicked
     point;
   - otherwise the first, which increments `lo_off`.

   Its host address goes to `sampled_points_table`.
4. `seed_update` adds the leaf's voxel coordinates to running sums. It
   divides each sum by the number of picks with three serial restoring
   dividers, rounding to nearest. The centroid, re-encoded as an m-code, is
   the seed for the next round.

Round 0 differs. It walks towards the seed (the score is `30 - distance`),
so the first sample is the seed's own point, as in FPS.

A round takes `3 + DEPTH + SUM_W` cycles, with `SUM_W = DEPTH +
clog2(K+1) = 23`. That is 36 cycles at the defaults, or about 147k cycles for
4096 samples. Sampling stops early with `exhausted` if the tree runs out of
points.

Three things the paper leaves open are chosen here:

- **Seed.** The paper calls the new seed the "Euclidean norm" of the sampled
  set, a single summary point. This design uses the rounded centroid of the
  picked leaf voxels.
- **Point within a leaf.** The end-of-curve rule in step 3.
- **Ties** go to the higher child index.

## Voxel-Expanded Gathering (`data_structuring_unit`)

The unit runs the paper's six stages for one central point at a time:

| stage | work |
|---|---|
| FP | read the central point's host address from the Sampled-Points-Table, then its record from host memory |
| LV | `octree_lookup` finds the node of its voxel at level `ve_level` (root-to-level walk, `2 + level` cycles) |
| VE | visit ring r = 0, 1, ..., i.e. the voxels at Chebyshev distance r; look each one up, list the non-empty ones, and stop once the rings hold at least `knn_k` points or ring `R_MAX = 4` is done |
| GP | copy every point of rings 0..n-1 into the input buffer without computing a distance: any point in an inner ring is closer than the voxels not yet visited could be |
| ST | compute squared distances of the ring-n points and rank them in a 64-input bitonic sorter |
| BF | write the `knn_k - (N0+...+N(n-1))` nearest ring-n points and commit the subset |

The paper gives no size for the last ring, and it can hold more points than
the sorter has inputs. ST therefore works in chunks. The sorter's upper half
holds the best 32 so far and its lower half takes the next 32 candidates.
After each pass the best 32 survive. `knn_k <= 32` is therefore required,
matching the paper's K = 32.

If the rings still hold fewer than `knn_k` points after `R_MAX` rings, the
subset is committed short with everything found (`ob_short`).

Before GP the unit waits for the input buffer to be free. This is the stall
seen when the accelerator is slower than gathering.

Host-memory reads use a simple channel: `mem_req`/`mem_addr` are held until
`mem_gnt`, followed by one `mem_rvalid` beat carrying the `point_t` record.
One request is outstanding at a time.

**Departure from the paper.** The paper runs several octree neighbour
searches in parallel and calls the six stages a pipeline. Here a single
lookup engine serves VE, and the stages of different central points do not
overlap. Results are the same; only throughput is lower. The central points
are the first `n_central` sampled points. The voxel level of the expansion is
a host register, because the paper does not say how it is chosen.

## Input buffer and accelerator interface (`input_buffer`)

The buffer holds one subset: up to `KNN` point records plus its central
point. The data structuring unit writes it and then pulses `commit`. The
buffer raises `subset_valid` with the count and central point. The
accelerator reads any entry by index (one-cycle latency) and pulses
`dla_release` when done. Writes while the buffer is full are a protocol
error and are checked by an assertion.

## Host interface (`mmio_regs`)

64-bit word registers:

| addr | name | use |
|---|---|---|
| 0 | CTRL | bit0 start sampling, bit1 start gathering; clears the matching done bit |
| 1 | STATUS | bit0 OIS busy, bit1 OIS done, bit2 ran out of points, bit3 DSU busy, bit4 DSU done, [47:32] samples stored |
| 2 | K_TARGET | samples to take |
| 3 | SEED | seed m-code |
| 4 | N_CENTRAL | central points to gather for |
| 5 | VE_LEVEL | octree level of the expansion voxels |
| 6 | KNN_K | neighbours per subset (<= 32) |
| 7 | TBL_LO | {pt_addr[23:0], pt_cnt[23:0], child_base[15:0]} |
| 8 | TBL_HI | {mcode[29:0], is_leaf, child_num[3:0]} |
| 9 | TBL_IDX | writing an index stores TBL_HI/TBL_LO there, with pts_left = pt_cnt and lo_off = 0 |

Reads return data one cycle later with `mmio_rvalid`.

**Loading a frame:**

1. Write the table, three words per node.
2. Write K_TARGET and SEED, write CTRL = 1, and poll STATUS bit 1.
3. Write N_CENTRAL, VE_LEVEL and KNN_K, write CTRL = 2, and drain subsets
   until STATUS bit 4 is set.

In `hgpcn_top` the sampler owns the table ports while it runs; otherwise the
gatherer reads the table and MMIO writes it. Gathering does not start while
sampling runs, which an assertion checks. The table must be reloaded before
the next frame is sampled, because sampling consumes the `pts_left` counts.

## Parameters and capacity

| parameter | default | meaning |
|---|---|---|
| `K` | 4096 | most samples per frame (paper's example) |
| `NODES` | 65536 | Octree-Table entries (about 9.6 Mb) |
| `KNN` | 32 | neighbours per subset (paper's K = 32) |
| `SORT_N` | 64 | inputs of the gathering sorter |
| `R_MAX` | 4 | most expansion rings |
| `VL_MAX` | 1024 | entries of the voxel list, at least (2R_MAX+1)^3 |

`DEPTH`, widths and record formats are in `hgpcn_pkg`.

The defaults run the ShapeNet-sized case and 4096-point sampling with 32-NN
gathering. Full raw frames of ModelNet40 or S3DIS (~10^5 points) or KITTI
(~10^6 points) need more table entries than 65536. KITTI's 16384-point
sampling also needs `K = 16384`. The paper stores a 10^6-point octree in
about 10 Mb. This table spends 147 bits per node and would need about 170 Mb
for such a frame, so a denser entry format is the first thing to change for
large frames.

## Verification

Each `tb/tb_<module>.sv` is self-checking and ends with
`TB_RESULT checks=N failures=M`. The host-side models live in
`tb/tb_cloud_pkg.sv`:

- a random cloud generator that also builds the octree image;
- a golden OIS written from the algorithm;
- a brute-force VEG reference that buckets the points themselves and does not
  use the table.

`tb/host_mem_model.sv` serves point records with random grant delays.

What the testbenches cover:

- The sampling tests compare every sampled address with the golden model.
  They also check that picks are distinct and check the per-round cycle
  count.
- The gathering tests check, for each subset:
  - its size;
  - that every point of the inner rings is present;
  - that the multiset of squared distances equals the reference. Ties make
    the identity of equally distant last-ring points ambiguous, but not
    their distances.
- `tb_hgpcn_top` runs four frames end to end through MMIO. It counts
  sampling rounds, running out of points, subsets with and without ring
  expansion, chunked sorter merges, short subsets, input-buffer stalls and
  table writes, and fails if any of them never happens.
- `tb_hgpcn_full` instantiates the top with its defaults. It samples 4096
  points from a 7621-point cloud and gathers 32 neighbours for all 4096
  (about 1 minute in Verilator).
- `tb_hgpcn_workloads` also uses the defaults. It runs the two benchmark
  sample counts that fit:
  - 2048 samples from a cloud of under 4096 points, the part-segmentation
    size;
  - 1024 samples from an 18000-point cloud, the classification size.

  Both gather 32 neighbours for every sample.

To run any test with plain Verilator:

```
verilator --binary --timing --assert \
  rtl/hgpcn_pkg.sv $(ls rtl/*.sv | grep -v hgpcn_pkg) \
  tb/tb_cloud_pkg.sv tb/host_mem_model.sv tb/tb_hgpcn_top.sv \
  --top-module tb_hgpcn_top -Mdir obj -o sim && obj/sim
```

The package goes first. Every file builds without warnings at Verilator's
default settings. The simulator is two-state, so every register that is read
has a reset.

## What is not here

- **Octree construction.** This is host software in HgPCN; the testbench
  package models it.
- **Host memory and the CPU–FPGA platform link.** Replaced by plain MMIO and
  read-channel ports.
- **The deep-learning accelerator** and its weight and output buffers. The
  paper uses a commercial part and only names the buffers.
- **Parallel neighbour searches and overlapped stages** in the data
  structuring unit (see above).
