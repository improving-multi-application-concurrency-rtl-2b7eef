# MASK: a translation-aware memory hierarchy for GPUs shared by several address spaces

When several applications run at once on one GPU, each in its own virtual
address space, they share the translation hardware: the shared L2 TLB, the
page table walker, the L2 data cache and DRAM. Address translation then
becomes the bottleneck. A single L2 TLB miss stalls every warp waiting on that
page, often dozens of them. Applications also evict each other's TLB entries.
Page table walk reads then queue in the L2 and in DRAM behind a flood of data
traffic, although each one blocks far more work than a data read does.

This RTL implements a memory hierarchy that treats translation traffic as a
first-class citizen. It has three cooperating mechanisms:

1. **TLB-fill tokens** limit which warps may insert entries into the shared L2
   TLB. The others put their translations into a small bypass cache. This
   reduces thrashing between address spaces.
2. **TLB-request-aware L2 bypass** sends page walk reads of a given
   page-table level straight to DRAM when that level hits the L2 cache less
   often than ordinary data does.
3. **An address-space-aware DRAM scheduler** serves page walk reads first. It
   then gives one application at a time a share of priority, sized by how
   badly its walks stall its warps.

Memory protection between the address spaces comes from three things:
- ASID-tagged shared TLB entries;
- a per-core page table root register (CR3);
- a page-table-root cache next to the walker, kept coherent by draining a core
  before its root changes.

## Structure

```
 core c (x NUM_CORES):  tr_req ─► l1_tlb ─ hit ─► tr_hit
                        cr3_set ─► pt_root_cache      │ miss
                                                      ▼
                 round-robin over cores ─► shared_l2_tlb ◄─ token_ctrl (has token?)
                                           (l2_tlb_array ‖ tlb_bypass_cache, 10 cycles)
                                              │ miss            ▲ fill (token → TLB,
                                              ▼                 │       no token → bypass cache)
                       pt_root_cache ─root─► pt_walker (64 threads, 4 levels, merging)
                                              │ PTE reads, depth tag 1..4
                              l2_bypass_ctrl ─┤ bypass?
                                              ▼
          mem_partition (x 8): ┌─ l2_cache_bank x 2 (16-way, 10 cycles) ─┐
                               │        misses      bypassed walk reads  │
                               └──► dram_sched: Golden │ Silver │ Normal ◄─ silver_thres
                                              ▼
                                        DRAM channel (outside)
```

| File | Role |
|---|---|
| `mask_pkg.sv` | Widths, request structs, address field helpers, page-table index and entry functions |
| `l1_tlb.sv` | Private fully associative L1 TLB (64 entries, LRU, one cycle) |
| `l2_tlb_array.sv` | Shared L2 TLB storage: 512 entries, 16-way, ASID+VPN tags, LRU, ASID flush |
| `tlb_bypass_cache.sv` | 32-entry fully associative bypass cache, ASID-tagged, LRU |
| `shared_l2_tlb.sv` | Probes both arrays in parallel, 10-cycle result pipeline, steers fills by token |
| `token_ctrl.sv` | Hit/miss counters, per-application token count and direction, token test per warp |
| `pt_root_cache.sv` | Per-core CR3 registers and the walker-side root cache; drains before a root change |
| `pt_walker.sv` | 64-thread page table walker that merges misses and keeps the stall statistics |
| `l2_bypass_ctrl.sv` | Per-level and data hit/access counters; the bypass decision |
| `l2_cache_bank.sv` | One L2 bank: request buffer, 16-way LRU array, 10-cycle hit pipeline, refill |
| `frfcfs_queue.sv` | Collapsing queue that picks the oldest row-buffer hit, else the oldest entry |
| `dram_sched.sv` | Golden FIFO, Silver and Normal FR-FCFS queues, strict priority, Silver turns |
| `silver_thres.sv` | Silver quota of each application at every epoch end |
| `mem_partition.sv` | Two L2 banks, the bypass path and one DRAM scheduler |
| `mask_top.sv` | Everything above, plus the epoch timer and L1-miss and flush arbitration |
| `sync_fifo.sv`, `rr_arb.sv` | Generic FIFO and round-robin arbiter |

## TLB-fill tokens

Each application gets a number of tokens, and only warps holding a token may
fill the shared L2 TLB. A walk started by a tokenless warp puts its result into
the 32-entry bypass cache instead. Both structures are looked up in parallel
on every L2 TLB probe, so a hit in either one counts. Hot translations of
token holders stay in the big TLB. The rest cannot evict them.

Token counts are set once per epoch (100 000 cycles by default) by a small
hill climber (`token_ctrl`):

- During the epoch, every probe of the shared L2 TLB increments a 16-bit
  saturating hit or miss counter of the probing core.
- At the epoch end, the controller snapshots the counters. It then visits one
  application per cycle.
- For each application it sums the counters of that application's cores. It
  forms the ratio `hits*256 / max(misses,1)` and compares it with the
  previous epoch's ratio.
- If the ratio improved, the token count moves another 10 % in the same
  direction as last time. If it got worse, the count moves 10 % the other
  way.
- The step is at least one token. The count stays between 0 and the
  application's warp count.

During the first epoch nobody is restricted. At the first epoch end every
application starts from 80 % of its warps, with "decrease" as the remembered
direction.

Tokens go to warps in warp-ID order, spread over the application's cores.
Warp `w` on the `k`-th of the `n` cores running the application holds a token
iff `w*n + k < tokens`. The application of a core is its ASID.

## Page walks, depth tags and the L2 bypass

The walker keeps up to 64 walks in flight. It doubles as the MSHR file of the
L2 TLB:

- A miss whose ASID and VPN match a walk already in flight joins that walk. It
  adds its core to the walk's core mask and increments the walk's stalled-warp
  count.
- A new walk takes the page table root from the root cache.
- The walk then issues one dependent 8-byte read per level, four levels with 9
  VPN bits each. Every read carries a 3-bit depth tag: the level number
  1..4. Data requests carry 0.
- When the last level returns, the translation fills the L2 TLB or the bypass
  cache (by the token of the warp that opened the walk). It also fills the L1
  TLB of every core in the mask.

`l2_bypass_ctrl` counts, separately for data and for each walk level, the L2
lookups and L2 hits reported by all 16 banks. These are ten 64-bit counters.
A walk read of level `d` bypasses the L2 when its hit rate is strictly lower
than the data hit rate. The test is cross-multiplied, so no divider is needed:
`hits_d * acc_data < hits_data * acc_d`. Bypassed reads never look up the L2,
so a bypassed level keeps the rate it had when bypassing began. They go
straight into the DRAM scheduler. Their returns go straight back to the walker
and are not installed in the L2.

The walker also keeps two 6-bit maxima per application and clears them at
every epoch end:
- `concurrent`: the largest number of walks in flight at once;
- `stalled`: the largest number of warps waiting on one walk.

## DRAM scheduling

Each channel's request buffer is split into three queues, searched in strict
priority order:

| Queue | Size | Contents | Order inside |
|---|---|---|---|
| Golden | 16 | every page walk read (depth tag ≠ 0), cached or bypassed | FIFO |
| Silver | 64 | data reads of the application whose turn it is | FR-FCFS |
| Normal | 192 | all other data requests | FR-FCFS |

FR-FCFS (first-ready, first-come first-served) picks the oldest request that
hits the open row of its DRAM bank, otherwise the oldest request. The
scheduler tracks the open row of each of the 8 banks, with an open-row policy.

The application whose turn it is may place `thres_i` requests into Silver. The
turn then passes to the next application with a non-zero quota. At each epoch
end `silver_thres` recomputes the quotas from the walker's statistics, one
application per cycle:

    thres_i = 500 * C_i * W_i / sum_j (C_j * W_j)      (integer division)

Here `C_i` is the application's `concurrent` maximum and `W_i` its `stalled`
maximum. Applications whose walks stall many warps therefore get long turns.
If nobody stalled, all quotas are zero and the Silver queue is unused.

## Memory protection

`pt_root_cache` holds every core's CR3: its page table root and its ASID. It
also holds a copy in the root cache that the walker reads. An assertion checks
that the two agree.

A core's root can be written only while the core has nothing in flight:
- no L1 miss waiting;
- nothing in the L2 TLB pipeline;
- no walk that will deliver to it.

`cr3_set_ready` stays low until then. A TLB flush request (`flush_*`) clears
the core's L1 TLB and every L2 TLB and bypass cache entry of the core's
ASID.

## Timing

| Path | Cycles |
|---|---|
| L1 TLB hit: request accepted → `tr_hit_valid` | 1 |
| L1 miss, shared L2 TLB hit: request → `tr_fill_valid` | `L2TLB_LATENCY` + 1 = 11 |
| L2 cache hit: lookup → response | `LATENCY` = 10. The request spends one more cycle in the bank's request buffer. |
| Token and quota update after an epoch end | `NUM_APPS` cycles each, in parallel |

All interfaces are valid/ready. Reset is asynchronous and active low. The
walker's memory responses (`N_RSP` of them, one per bank plus one bypass
return per partition) and the hit responses are never back-pressured. A DRAM
return waits while its bank is delivering a hit.

## Address map (this design's choice)

The physical address is 40 bits with 4 KB pages, and the virtual page number
is 36 bits. A page table entry keeps the next physical page number in bits
[39:12]. Cache lines are 128 bytes. Physical address fields:

| Field | Address bits |
|---|---|
| memory partition | [9:7] |
| L2 bank | [10] |
| L2 set | [11 +: log2(L2_SETS)] |
| DRAM bank | [13:11] |
| DRAM row | [39:17] |

Because partition and bank come from fixed bits, the top asserts
`NUM_PARTS == 8` and `BANKS == 2`.

## Parameters

Defaults are the main configuration evaluated for the design:
- 30 cores, 30 applications, 64 warps per core;
- 64-entry L1 TLBs;
- 512-entry 16-way L2 TLB, 10 cycles;
- 32-entry bypass cache;
- 64 walker threads;
- 2 MB 16-way L2 in 8 × 2 banks of 64 sets of 128-byte lines, 10 cycles;
- queues of 16 / 64 / 192 entries;
- quota total 500;
- 100 000-cycle epoch.

All of these are parameters of `mask_top`.

## Where this RTL departs from, or goes beyond, the published design

- **One L2 TLB port.** The shared L2 TLB takes one probe per cycle, with L1
  misses arbitrated round-robin. The evaluated configuration has two ports per
  memory partition (16 in all).
- **No MSHRs in the L1 TLB.** A core may send repeated misses for the same page
  to the L2 TLB; they are merged only in the walker.
- **Own choices for the L2 cache.** Line size, write-through without
  allocation, no miss merging and the 8-entry request buffer are this
  design's own choices.
- **Overflow of the Silver queue.** A request of the Silver application that
  finds Silver full goes to the Normal queue.
- **First epoch.** Tokens are not enforced in the first epoch. The starting
  direction ("decrease") is a choice.
- **Hit ratio format.** The epoch test uses hits/misses in 8.8 fixed point.
- **Walk-to-application attribution.** Walk statistics are attributed to the
  application (ASID) of the walk.
- **Where the walk statistics live.** The `concurrent` and `stalled` counters
  sit in the walker, which serves as the L2 TLB's MSHR file. The original
  description puts the concurrency counter at the shared TLB.
- **Epoch reset of the statistics.** The walker clears these counters at each
  epoch end, on the same cycle the quotas latch them.
- **Not modelled.** Page faults, the shader cores, the L1 data caches, the
  interconnect and the DRAM devices are not part of the RTL. Their signals are
  ports of `mask_top`, and testbenches use a behavioural DRAM channel
  (`tb/dram_model.sv`).
- **Layouts and widths.** Page table layout and address map are this design's
  own (see above), as are counter widths not fixed by the design: quotas are
  10 bits, token counts 15 bits, hit/miss counters 16 bits, the bypass
  controller's counters 64 bits, and the walker statistics 6 bits.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The reference memory
(`tb/mask_tb_pkg.sv`) defines every 64-bit word as a hash of its address. Any
address therefore holds a valid page table entry, so a testbench can compute
the expected translation of any VPN under any root without storing tables.

| Testbench | What it checks |
|---|---|
| `tb_l1_tlb` | one-cycle hits, LRU eviction, miss handshake, flush |
| `tb_l2_tlb_array`, `tb_tlb_bypass_cache` | ASID isolation, LRU, ASID flush |
| `tb_shared_l2_tlb` | 10-cycle hit and miss latency, token steering, stall, flush |
| `tb_token_ctrl` | first-epoch 80 %, the ±10 % decision sequence over several epochs, warp token test |
| `tb_pt_root_cache` | drain before a root change, root cache contents |
| `tb_pt_walker` | four dependent reads with depth tags, merging, results against a reference walk, the `stalled` and `concurrent` maxima |
| `tb_l2_bypass_ctrl` | bypass only for levels strictly below the data hit rate |
| `tb_l2_cache_bank` | hit latency, miss and refill, LRU, write-through, back-pressure |
| `tb_dram_sched` | Golden > Silver > Normal, FR-FCFS row-hit reordering, Silver turns and quota skipping, Golden back-pressure |
| `tb_silver_thres` | the quota formula on hand-computed and random epochs |
| `tb_mem_partition` | cached and bypassed walk reads, data, random traffic under DRAM stalls |
| `tb_mask_top` | end to end at reduced size (see below) |
| `tb_mask_top_full` | end to end at full size (see below) |

**`tb_mask_top`** runs at reduced size: 4 cores, small TLBs and L2, and
2000-cycle epochs. It checks:
- every translation against a reference walk;
- every data word and every request answered;
- the L1 and L2 TLB hit latencies.

It also counts each mechanism and fails if any of them never happened:
- L1 hits, L2 TLB hits and bypass cache hits;
- token fills and tokenless fills;
- walk merges and token changes;
- cached and bypassed walk reads;
- Golden, Silver and Normal issue, and non-zero quotas;
- the root-change drain stall, the flush and the epoch end.

**`tb_mask_top_full`** runs the same test with every parameter of `mask_top`
at its default, for 6000 cycles of random traffic. That is shorter than one
100 000-cycle epoch, so it does not require the epoch-driven mechanisms
(tokens, quotas, Silver issue). The reduced-size test covers them.

To simulate with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
        rtl/mask_pkg.sv tb/mask_tb_pkg.sv tb/dram_model.sv tb/tb_mask_top.sv \
        --top-module tb_mask_top
    ./obj_dir/Vtb_mask_top

`-y rtl` lets Verilator find every module by its file name. For a block
testbench, name that testbench instead. The reduced end-to-end run takes about a minute. The
full-size run takes about two minutes, most of it compilation.
