# Opportunistic computing for direct convolution on GPUs: RTL

A GPU running a direct convolution keeps coming back to the same pairs of
cache blocks: an input-row block and a weight block. Between two visits the
input block is usually evicted from the SM's L1, so the SM stalls again on
data it already had. The idea behind this hardware: compute **while** the data is
there, and compute **where** the data is.

* **When (intra-SM).** While the operands of a computation are in the L1, the
  SM also computes the products that the filter window will need after it has
  slid down one or more rows. The results wait in a small table. When the
  window gets there, the SM takes the result from the table and does not
  reload the block.
* **Where (inter-SM).** The SMs are grouped into clusters. A cluster-wide table
  records which SM holds a given block pair. An SM that misses on a pair held
  by a neighbour sends the computation to that neighbour instead of loading
  the data. The neighbour adds the product directly into memory.
* Both kinds of extra work are run by *assistant warps*. An assistant warp is
  a small hidden warp that runs only while the SM is stalled and no normal
  warp can issue.

This RTL follows the scheme in "Alleviating Bottlenecks for DNN Execution
on GPUs via Opportunistic Computing" (Cheng, Zhao, Kandemir, Mohanty,
Jiang). That paper evaluates the scheme in a GPU simulator and describes the
added hardware only at block level. Everything below that level is this
design's own choice, and each choice is stated in the file that makes it.
The rest of the GPU is not part of this RTL: the SM pipeline, the L1 and L2
caches, the memory controllers and the on-chip network. These parts connect
to the design through its ports.

## Block structure

```
oc_gpu                        8 clusters x 7 SMs = 56 SMs
└── oc_cluster  (x8)          one Assign Table per cluster
    ├── assign_table          (A-block, B-block) -> SM id, 512 entries
    ├── miss / replacement arbiters, forwarding into the SMs' inboxes
    └── oc_sm_unit (x7)       one per SM
        ├── precompute_table  256 entries
        ├── pred_gen          prediction logic
        ├── assistant_warp    one warp: 3 regs x 32 threads, 8 lanes
        └── oc_fifo (x3)      inbox, atomic-add queue, redo queue
oc_pkg                        shared types (addresses, keys, messages, events)
```

The addresses are 32-bit byte addresses. A cache block is 32 words of
32 bits (128 bytes), so a block address has 25 bits. A *computation* is
one dot product: an input row vector times a weight row vector, each
`cfg_vec_len` words long (the filter width). A computation is named by its
*key*, the pair of the two vectors' start addresses (64 bits).

## The Precompute Table (`precompute_table`)

This is the centre of the intra-SM scheme and the hardest part to follow,
because five things can happen to it in the same cycle. Each entry holds:

| field | bits | meaning |
|---|---|---|
| valid | 1 | entry in use |
| complete | 1 | the result has been computed |
| key | 64 | input vector address, weight vector address |
| result | 32 | the dot product |
| issued | 1 | an assistant warp is computing it now |
| assigned | 1 | the work came from another SM; its result goes to memory |
| out_addr | 32 | where an assigned result is atomically added |
| age | 2 | for periodic removal of old entries |

The first four fields are the ones the paper sizes. The other four are
additions that the inter-SM flow and the ageing need. The search is fully
associative. In every cycle:

1. **Decode lookup.** The SM presents the key of each vector computation it
   decodes. A hit on a *complete* local entry returns the result, and the SM
   skips the loads and the multiply. The entry is then freed, because each
   predicted product is used once. A hit on an *incomplete* entry means the
   prediction came too late. That entry is invalidated, and the SM computes
   normally. Assigned entries are never matched here.
2. **Insert.** A predicted key that is already in the table is ignored.
   Assigned work is handled in one of three ways:
   * if its key matches a complete local entry, the result is returned at once and sent as an atomic add;
   * if it matches a pending local entry, that entry becomes an assigned one;
   * otherwise it gets a new entry.

   New entries take the lowest free slot. When the table is full, they
   overwrite the slot under a circular pointer.
3. **Issue.** The lowest pending entry is offered to the assistant warp.
   Pending means valid, not complete and not issued.
4. **Completion.** The assistant warp writes back the entry it took:
   * a local entry becomes complete;
   * an assigned entry is freed and its product is queued as an atomic add;
   * if the operands were no longer in the L1, the entry is freed. Assigned work is then sent to the core on the *redo* port.
5. **Ageing.** Every `AGE_PERIOD` cycles, every valid entry ages by one. An entry
   already at `MAX_AGE` is removed, unless an assistant warp is working on it.
   Wrong predictions therefore cannot fill the table for long.

Three guards keep the ports from corrupting each other:
* an insert never merges into an entry that a lookup consumes or a completion writes in the same cycle;
* the replacement pointer never overwrites an issued entry;
* a completion is accepted only for an entry that is still valid and issued. So a late result for an entry that has been invalidated is discarded.

## Prediction (`pred_gen`)

The window slides along an input row. When it moves down one row, window
row *j+1* becomes row *j*. So an input vector that is multiplied by weight row
*j* now will later be multiplied by weight rows *j-1*, *j-2*, …, 0. For
each computation the core reports, with its weight row index `j`,
`pred_gen` emits *j* keys, one per cycle:

    (in_addr, w_addr - d * cfg_w_stride)   for d = 1 .. j

Over one K x K window this gives K(K-1)/2 predictions. The paper's 3x3
example has input rows [3,2,0], [3,0,1], [2,4,2] and weights [-1,0,1],
[2,-2,0], [0,1,2]. The three predictions are therefore [3,0,1]·[-1,0,1] = -2,
[2,4,2]·[2,-2,0] = -4 and [2,4,2]·[-1,0,1] = 0. One row further down, only the
last product of the window is still missing. `tb_oc_sm_unit` replays this example.

## The assistant warp (`assistant_warp`)

There is at most one assistant warp per SM. It starts only while `sm_stall` is high
and a pending entry exists. Once started, it runs to the end, and this takes:

* one L1 read for the input block. Thread *t* loads word *t* of the vector into R0;
* one L1 read for the weight block, loaded into R1;
* `ceil(len / 8)` cycles of R2 = R0 × R1 on 8 lanes;
* one cycle of reduction over the active threads;
* the write-back, held until it is accepted.

With an L1 latency of L cycles, the whole warp takes 2·(L+2) + ceil(len/8) + 2
cycles. For a 3x3 filter and L = 2 that is 11 cycles. An L2 miss stall lasts
tens of cycles, so several warps fit into one stall. The register context is
3 registers × 32 threads × 4 bytes = 384 bytes.

Rules and limits:
* The arithmetic is 32-bit integer; floating point is not built.
* A vector must lie inside one 128-byte block. A vector that does not, or a
  block the L1 no longer holds, ends the warp with `cmp_ok = 0`. An assistant
  warp never waits on a miss.

## Inter-SM scheme (`assign_table`, `oc_cluster`)

Each cluster's Assign Table maps a block pair (A = input block,
B = weight block) to the 3-bit id of the SM that holds both. It has 512
entries of 50 + 3 bits and a fully associative search.

The flow, in `oc_cluster`:

1. An SM whose computation stalls on a load miss sends it on `miss_*`. The
   message carries the key, the output address and the weight row. A
   round-robin arbiter serves one SM per cycle.
2. **Table hit on another SM.** The message goes into that SM's inbox in the
   same cycle, and the requester gets `miss_offloaded = 1`. The requester
   then skips the computation entirely, because it never needs the product:
   the holder adds it into the output location with an atomic add. If the
   target inbox is full, the request waits.
3. **Table miss.** A new entry is written, naming the requester. The requester
   gets `miss_offloaded = 0` and loads the data from L2 as usual. The same
   answer is given when the hit names the requester itself.
4. **L1 replacement.** When an SM's L1 replaces a block, the SM reports it on
   `evict_*`. Every Assign Table entry that holds that block, as A or as B, is
   removed in one cycle.
5. **Holder side** (`oc_sm_unit`). Assigned work from the inbox is inserted
   into the Precompute Table, as described above. It is also given to the
   predictor, so that it predicts further work just as local computations do.

There is a gap in the paper's scheme here. By the time the holder's
assistant warp reaches the work, the block may have left the holder's L1. The
requester has already dropped the computation, so it would be lost. This
design therefore hands such work to the holder's core on `redo_*`, and the
core must perform it the normal way.

## Interface of the top (`oc_gpu`)

Every per-SM port is an unpacked array of 56 entries. The index is
`cluster * 7 + SM id in the cluster`. All handshakes are valid/ready, and a
transfer happens in a cycle where both are high. The reset `rst_n` is
synchronous and active low.

| group | direction (from the SM's view) | protocol |
|---|---|---|
| `dec_valid, dec_key` → `dec_hit, dec_result` | SM → design → SM | same-cycle answer. With `dec_valid` high, a matching entry is consumed or dropped. |
| `pr_valid/pr_ready, pr_key, pr_w_row` | SM → design | a computation the SM performed, used for prediction |
| `miss_valid/miss_ready, miss_msg` → `miss_offloaded` | SM → cluster | `miss_offloaded` is valid in the cycle `miss_ready` is high |
| `evict_valid/evict_ready, evict_blk` | SM → cluster | a block left the L1 |
| `sm_stall` | SM → design | no normal warp can issue |
| `l1_req_valid/ready, l1_req_blk`, `l1_resp_valid, l1_resp_hit, l1_resp_data` | design → L1 → design | one outstanding block read; the response carries the 32 words of the block |
| `atom_valid/atom_ready, atom` | design → memory | atomic add of a product to an address |
| `redo_valid/redo_ready, redo_msg` | design → SM | assigned work that the SM must compute itself |
| `ev[]`, `ev_offload[]`, `ev_at_*[]` | design → counters | one-cycle strobes, one per mechanism |
| `cfg_intra_en`, `cfg_inter_en`, `cfg_vec_len`, `cfg_w_stride` | static | scheme enables, filter width, weight row stride in bytes |

With both `cfg_*_en` bits set the full scheme runs. Clearing one bit gives
the intra-SM-only or inter-SM-only configuration, which the paper also
evaluates.

## Parameters

| parameter | default | origin |
|---|---|---|
| `N_CLUSTERS`, `SMS_PER_CLUSTER` | 8, 7 | the evaluated GPU: 56 SMs in 8 clusters |
| `PT_ENTRIES` | 256 | the paper's C1 configuration; its C2 configuration uses 512 |
| `AT_ENTRIES` | 512 | the paper's C1 configuration; its C2 configuration uses 1024 |
| `THREADS`, `SIMT_WIDTH` | 32, 8 | the assistant warp's 384-byte context; the SM's SIMT width |
| `AGE_PERIOD`, `MAX_AGE` | 1024, 3 | this design's choice |
| FIFO depths in `oc_sm_unit` | 4 | this design's choice |

All defaults are the full sizes. Nothing is scaled down.

## What the design's own choices are

The paper gives the table contents and sizes, the lookup rules of both
tables, the workflow between SMs and the size of the assistant warp. This
design chose the following, and each file's opening comment says so again:

* the port protocols and the single-cycle associative searches;
* the replacement and ageing policies;
* the arbitration and FIFO depths;
* integer arithmetic and the fixed operation sequence of the assistant warp, which the paper runs as instructions on the SM's own lanes;
* a direct intra-cluster path for moved work, where the paper's GPU uses its mesh network;
* the redo path;
* the rule that a consumed result leaves the table.

Storage differs from the paper's count. There, a Precompute Table entry has
98 bits, about 3.1 KB per SM. Here an entry has 134 bits, about 4.2 KB per
SM, because of the issued bit, the assigned bit, the output address and the
age. The Assign Table matches the paper: 512 × 53 bits, about 3.4 KB per
cluster.

The paper's Algorithm 1 is cited but not printed. The prediction rule above
is read from its text and its example.

## Workload fit

These layer sizes are standard knowledge about the networks; the paper does
not print them.

| layer | filter | vector length | predictions per window |
|---|---|---|---|
| LeNet-5 convolutions | 5x5 | 5 | 10 |
| AlexNet conv1 | 11x11 | 11 | 55 |
| AlexNet conv2 | 5x5 | 5 | 10 |
| AlexNet conv3, conv4 | 3x3 | 3 | 3 |

All of these fit within the 32-word vector limit and the 256-entry table.
A vector that crosses a 128-byte block boundary is not precomputed. When
rows are packed contiguously, this affects a share of the positions: for
AlexNet conv1 it is 10 of every 32 start positions. Those positions run
normally.

## Simulation

Each block has a self-checking testbench in `tb/`. Every testbench prints a
`TB_RESULT checks=N failures=M` line and ends with `$finish`.

| testbench | what it checks |
|---|---|
| `tb_precompute_table` | every table port, replacement and ageing |
| `tb_pred_gen` | the 3x3 example and random requests under back-pressure |
| `tb_assistant_warp` | the example products, random dot products of length 1–32, exact cycle counts and the refusal cases |
| `tb_assign_table` | a reference model under random traffic |
| `tb_oc_sm_unit` | the paper's 3x3 example end to end, plus assigned work |
| `tb_oc_cluster` | the inter-SM flow, the replacement cleanup, the redo path and the scheme switch |
| `tb_oc_gpu` | the whole 56-SM design at default size (see below) |
| `tb_conv_workloads` | one full-size cluster running the evaluated filter shapes (5x5, 11x11, 3x3); it checks every product and prints how many came from the Precompute Table |

`tb_oc_gpu` runs a 3x3 convolution sweep on all 56 SMs. It then overfills a
Precompute Table and an Assign Table, switches each scheme off and on, and
idles until old entries age out. It counts every mechanism and fails if any
of them never happened. It also checks that every moved computation comes back
exactly once, as an atomic add or as a redo.

Helpers used only by the testbenches:
* `tb/l1_model.sv` is a behavioural L1 read port;
* `tb/tb_pkg.sv` defines memory contents as a fixed function of the address.

Every simulation uses plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_oc_gpu \
  rtl/oc_pkg.sv tb/tb_pkg.sv rtl/oc_fifo.sv rtl/pred_gen.sv \
  rtl/precompute_table.sv rtl/assistant_warp.sv rtl/oc_sm_unit.sv \
  rtl/assign_table.sv rtl/oc_cluster.sv rtl/oc_gpu.sv \
  tb/l1_model.sv tb/tb_oc_gpu.sv -o sim -j 4
./obj_dir/sim
```

A block-level test needs only the package, its module and the modules below
it. For example:

```
verilator --binary --timing --assert -Irtl --top-module tb_pred_gen \
  rtl/oc_pkg.sv rtl/pred_gen.sv tb/tb_pred_gen.sv -o sim && ./obj_dir/sim
```

The full-size test takes about a minute to build and a few seconds to run.
Every state element that is read before it is written is reset, so the two-state simulation needs no X values.

## Limits

* Performance, energy and prediction accuracy of the scheme depend on the
  GPU around it. None of them can be measured without an SM model, so none
  are reproduced here.
* There is no floating-point datapath.
* A vector that crosses a cache-block boundary is not precomputed.
* Redone work relies on the SM core to execute it.
