# Cluster Beamforming batch scheduler

Batch algorithms in transformer networks (batched softmax, batched matrix
multiply) run one small kernel on each of several hundred *patches*: the
slices of one large tensor. On a multi-cluster accelerator the device memory is split
into banks. Each compute cluster is close to one bank and far from the
others. A cluster that works on a patch held in a far bank pays extra
load/store latency on every access. Plain round-robin scheduling ignores this
and spreads the patches over all clusters.

This RTL implements a hardware scheduler that places patches by
*locality* first and by *load* second. It follows the scheme published as
"An optimal scheduling architecture for accelerating batch algorithms on
Neural Network processor architectures" (Nyshadham et al.):

1. **Cluster Beamforming.** Find the bank each patch lives in. A patch that
   straddles banks goes to the bank that holds most of it. Each patch is
   then scheduled round-robin onto the clusters near its bank.
2. **Load balancing.** When the patches are piled up on a few banks, part of
   an overloaded bank's patches is *virtually* handed to under-loaded banks.
   The data does not move: the far clusters fetch it. In the weighted
   variant, far clusters take fewer patches, in inverse proportion to their
   latency.

The result is a patch → cluster register file. Each cluster's queue reads
its own patches from this file and hands their geometry to the cluster's
kernel, which is the same templated code for every patch.

## Machine model

| symbol | meaning | default |
|---|---|---|
| M | memory banks (`NUM_BANKS`) | 4 |
| Q | compute clusters (`NUM_CLUSTERS`) | 24 |
| P | clusters per grid row (`GRID_COLS`) | 6 |
| N | patches per job, at most `MAX_PATCHES` | 384 |

The clusters form a P-column grid. Each quadrant of the grid is the *group*
of one bank:

```
             col 0 1 2 | 3 4 5
   row 0       0  1  2 |  3  4  5        group 0 = bank 0 (top-left)
   row 1       6  7  8 |  9 10 11        group 1 = bank 1 (top-right)
            -----------+-----------
   row 2      12 13 14 | 15 16 17        group 2 = bank 2 (bottom-left)
   row 3      18 19 20 | 21 22 23        group 3 = bank 3 (bottom-right)
```

`sched_pkg::group_of` and `sched_pkg::member_of` encode this map.

The address space is a flat 35-bit byte address. Bank b owns the contiguous
8 GiB range `[b·2^33, (b+1)·2^33)`.

Latency is not modelled physically. Software programs a table
`lat[b][g]`: the cost of running one patch held in bank b on a cluster of
group g. Usually `lat[b][b]` is the smallest entry, and the other entries grow with hop
count.

## One job, step by step

`batch_sched_top` takes a `sched_cfg_t` and a `start` pulse. The patches
come from one of two sources:

* the **tensor walker** (`cfg.src_ext = 0`): N equal patches stored back to
  back from `cfg.base_addr` onwards. This is the BERT layout, where
  384 slices of 512 × 512 make a 512·384 × 512 tensor.
* an **external descriptor stream** (`cfg.src_ext = 1`): one
  `patch_desc_t` per patch, for tensors whose patches are scattered.

The controller `cbmf_scheduler` then runs three phases.

### MAP: the patch ↔ bank table

One patch is taken per cycle. `bank_mapper` intersects the patch's byte
range with every bank and gives:

* the row's **H columns** (bit b set if bank b holds any of the patch),
* the **OVERLAP** flag (more than one bit set),
* the number of bytes in each bank.

`overlap_remap` picks the single bank:

* a patch in one bank keeps that bank;
* an overlapped patch goes to the bank that holds most of its bytes;
* when two banks hold exactly the same amount, one is drawn at random with
  equal probability. The draw uses a 16-bit LFSR taken modulo the number of
  tied banks.

`bank_table` stores the row. It also keeps two column sums per bank:

* **N** counts patches created on the bank. An overlapped patch counts on
  every bank it touches, so the four N values can add up to more than N.
* **L** counts patches assigned to the bank. The four L values always add
  up to N.

### LB: virtual reassignment between banks

`load_balancer` reads L. If `max(L) − min(L) ≤ cfg.thresh`, the load counts
as balanced and the mapping is left alone. Otherwise, in mode `LB_BANK`, it
builds a **quota matrix**: `quota[b][g]` is how many of bank b's patches run
on group g. It starts from the identity (`quota[b][b] = L[b]`).

Each group has an execution time:

```
T[g] = Σ_b quota[b][g] · cost(b, g)
cost(b, g) = weighted ? lat[b][g] : 1
```

Each cycle the balancer makes one greedy step:

1. Take the group b with the largest T. Ties go to the lower index.
2. Find the group g ≠ b that minimises `T[g] + cost(b, g)`.
3. If that value is below `T[b]`, and bank b still has patches of its own in
   group b, move one of them: `quota[b][b]−1`, `quota[b][g]+1`.
4. Otherwise stop.

The step never raises the largest T, and only a bank's own patches move, so
the loop ends after at most N moves. At the end, moving one more own-bank
patch out of the busiest group would not lower the largest group time. This is a greedy answer to the
min-max problem of finishing the slowest core as early as possible.

Weighting shows in a simple case. Take 384 patches all in bank 0, with
near cost 1 and far cost 3. The balancer stops at quota row
(192, 64, 64, 64): every group finishes at time 192, and each far group takes
a third of the near group's count. Without weights the same job ends at
(96, 96, 96, 96).

### SCHED: round-robin onto near clusters

For each bank b in turn, the controller scans the whole table in patch
order. Each patch assigned to b is placed as follows.

* **`LB_NONE` and `LB_BANK`.** The patch runs on a group g that still has
  quota left for bank b. The bank's own group comes first, then the others in
  index order. `rr_cluster_select` keeps one round-robin pointer per group and
  names the group's next cluster.
* **`LB_CLUSTER`.** This is the cluster-level variant of load balancing.
  `cluster_balancer` puts the patch on the cluster where the cluster's
  accumulated time plus `cost(b, group)` is smallest. Ties go to the nearer
  cluster, then to the lower index. The bank-level balancer does nothing in
  this mode.

Each placement is appended to **`map_regfile`**. This file holds one entry
per patch (cluster, geometry, link to the cluster's next patch), plus a head
and a count for each cluster. The lists are therefore in the order the
patches were scheduled.

### Cluster queues

When `done` pulses, each of the Q `cluster_patch_queue`s loads the head and
count of its list. It then follows the links. The register file has one
read port, and `rr_arbiter` shares it round-robin among the queues. Every
entry read is pushed into a 4-deep FIFO as `{patch id, geometry}`. The
cluster side pops the FIFO with `q_valid`/`q_ready`. A full FIFO stops its
reader, and the other queues keep the port busy meanwhile.

## Timing

The figures below count from the cycle `start` is taken to the cycle `done`
is high, with an input stream that never stalls:

```
cycles = N            (MAP, one patch per cycle)
       + 3            (balancer start, initialisation, hand-over)
       + moves + 1    (only when the balancer moves patches)
       + M·N          (SCHED, one table row per cycle per bank)
       + 2
```

The patch counts behind the examples:

* 384 patches with no moves take 1925 cycles.
* 384 patches all in bank 0, plain balancing, take 2214 cycles (288 moves).

Draining the queues takes at least N cycles, since the shared port delivers
one entry per cycle. With every cluster popping at full rate it takes N plus
a few cycles.

## Configuration (`sched_cfg_t`)

| field | use |
|---|---|
| `num_patches` | N, 1 … 384. A `start` with N = 0 or N > 384 is ignored |
| `src_ext` | 0: tensor walker, 1: external stream |
| `base_addr`, `patch_bytes`, `patch_rows` | tensor walker only |
| `lb_mode` | `LB_NONE`, `LB_BANK`, `LB_CLUSTER` |
| `weighted` | use `lat` as costs (otherwise every patch costs 1) |
| `thresh` | imbalance threshold on max(L) − min(L) |
| `lat[b][g]` | cost of a bank-b patch on group g, 8 bits |

The status outputs are:

* `n_cnt` and `l_cnt`, the N and L column sums,
* `quota`, the balancer's quota matrix,
* `unbalanced` and `moves`, what the balancer found and did,
* `n_overlap` and `n_tie`, the overlapped patches and equal-portion draws,
* `gtime` and `cload`, the group and cluster times,
* `cl_count`, the patches per cluster.

`tab_raddr` / `tab_rdata` read any row of the patch ↔ bank table.

## Files

| file | block |
|---|---|
| `rtl/sched_pkg.sv` | sizes, types, the cluster-group map |
| `rtl/patch_walker.sv` | whole tensor → patch descriptors |
| `rtl/bank_mapper.sv` | H columns, OVERLAP, per-bank portions |
| `rtl/overlap_remap.sv` | largest-portion bank, random tie-break |
| `rtl/bank_table.sv` | patch ↔ bank table with N and L sums |
| `rtl/load_balancer.sv` | bank-level (weighted) balancing, quota matrix |
| `rtl/rr_cluster_select.sv` | per-bank round-robin over near clusters |
| `rtl/cluster_balancer.sv` | cluster-level (weighted) balancing |
| `rtl/cbmf_scheduler.sv` | controller: MAP → LB → SCHED |
| `rtl/map_regfile.sv` | patch ↔ cluster register file (linked lists) |
| `rtl/cluster_patch_queue.sv` | per-cluster reader and FIFO |
| `rtl/rr_arbiter.sv`, `rtl/sync_fifo.sv` | helpers |
| `rtl/batch_sched_top.sv` | top level |

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=… failures=…`. `tb_batch_sched_top` runs five full
384-patch jobs at the default sizes:

1. a BERT tensor in one bank, with plain balancing,
2. the same tensor with weighted balancing,
3. scattered patches with overlaps and ties, using Cluster Beamforming only,
4. a tensor across a bank boundary, with cluster-level balancing,
5. an evenly spread job that the balancer must leave alone.

For every job it checks that each patch is delivered exactly once, on its
registered cluster, with its own geometry. It also counts how often each
mechanism occurred and fails if any never did: overlap, tie, moves, balanced
load left undisturbed, weighting, cluster-level balancing, both patch
sources, read-port contention, and a full queue.

`tb_bert_workloads` runs the three evaluated BERT shapes, batch 384, through
the top level. Each tensor is placed so that one patch straddles a bank
boundary exactly in half. Each shape runs twice: with weighted bank
balancing, and with Cluster Beamforming alone. With near cost 1 and far
cost 3, balancing lowers the largest group time from about 284 to 159.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/sched_pkg.sv tb/tb_batch_sched_top.sv --top-module tb_batch_sched_top
./obj_dir/Vtb_batch_sched_top
```

Replace the testbench name to run any other test. Every test ends in well
under a second.

## Changing sizes

All sizes are parameters in `sched_pkg`, and every module uses them.

* `NUM_CLUSTERS` must be a multiple of `NUM_BANKS`.
* With 4 banks the quadrant map needs an even number of grid rows and of
  columns.
* With any other bank count, groups are contiguous cluster ranges.
* `MAX_PATCHES` sets the depth of both tables and every counter width.
* `ADDR_W` and `BANK_SHIFT` set the address map.

## Fit of the evaluated workloads

The published evaluation runs the following BERT batch algorithms with
batch size 384:

* (512×64)×(64×512) matrix multiply,
* (512×512)×(512×64) matrix multiply,
* 512×512 softmax.

Each batch is one patch, so every job has 384 patches, and `MAX_PATCHES` is
384. Assuming bf16 (2 bytes per element), a softmax patch is 512 KiB. That
is far below the 4 GiB limit of a 32-bit patch size. The whole 192 MiB
tensor fits easily in the 32 GiB address space, and even in a single 8 GiB
bank. That single-bank case is where load balancing matters most.

The utilisation gains the evaluation reports come from the full
accelerator: 3.5× and 3.35× for the matrix multiplies, 1.08× for softmax,
each against round-robin. This RTL contains no compute clusters, so it
cannot reproduce those numbers.

## Where this departs from, or adds to, the published description

The description gives the steps, their order, the table contents and the
goals, but almost no mechanism. These parts are choices of this design:

* **Address map.** Flat address space, contiguous equal banks. Patch
  geometry is stored as address, first row and row count.
* **Imbalance test.** A threshold on max(L) − min(L).
* **Moving patches.** The greedy quota procedure above. The published
  text asks only for an "optimal number of patches" moved. The weighted
  variant asks for a split in inverse proportion of latency, and the
  greedy stop condition gives exactly that split.
* **Latencies.** The description derives them from hop distance. Here they
  are a programmed table.
* **Random tie-break.** The LFSR draw.
* **Cluster-level balancing.** The description lists it among "other
  variations" and gives no rule. Here it is greedy least-finish-time
  placement, offered as an extra mode.
* **Step order.** The first flowchart draws round-robin scheduling before
  load balancing. The text says the patches are scheduled round-robin on the
  newly assigned banks after balancing, and this design follows the text.
* **Register file and queues.** The linked-list register file and its
  shared read port are this design's. So are the hardware queues, which do
  the reading that the description leaves to each cluster's CPU.
* **Interleaved memory.** The description also mentions memory where every
  patch is spread over all banks, so that a first-portion rule would put
  every patch on one bank. The flat address map here does not model
  interleaving. Such a job shows up as overlapped patches resolved by
  largest portion, and any resulting pile-up is left to the balancer.
* **Other overlap rules.** The description allows choosing the bank of an
  overlapped patch from the load already assigned to each bank. That
  variation is not built: only the largest-portion rule with a random
  tie-break is.
* **External parts.** The compute clusters, their CPUs, the memory banks and
  the on-chip network are not part of this RTL.
