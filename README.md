# Pickle: a programmable last-level-cache prefetcher for irregular accesses

Graph analytics and sparse solvers walk chains of pointers:
`visited[neighbors[neighbor_ptrs[work_queue[i]]]]`. A hardware prefetcher cannot guess the
addresses in such a chain. A helper thread on a core can compute them, but it takes up a
core and its private caches, and its prefetches only land in that one core's caches.

Pickle is a prefetch engine that sits next to the shared last-level cache (LLC) of a
multicore. It splits the work between software and hardware:

* **Software decides what to fetch.**
  * The application's cores send *hints*. A hint is one uncacheable store that says "I am at
    work-queue position p".
  * Small *prefetch kernels* run on tiny RISC-V cores inside Pickle. They turn each hint into
    the whole chain of addresses that lie ahead.
* **Hardware decides how and when.**
  * Pickle translates addresses itself, with its own TLBs and page walker.
  * It merges duplicate requests and serves the oldest hint first.
  * It fetches the intermediate levels of a chain into a private cache (PickleCache).
  * It hands the last level to the LLC controllers as a `FETCH_IF_NOT_PRESENT` command. The
    prefetched line then lands in the shared LLC, where any core can use it.

This RTL covers the prefetcher tile and the command unit added to each LLC slice. Not
included are the host cores, their caches, the LLC arrays, the network-on-chip and the memory
controller. They connect through the top module's ports.

```
 host cores ──hint stores──► hint queue ──► generator slots (64 × RV64E + 1 KiB imem)
                               │ latest hint    │  ▲ load/store            │ prefetch requests
                               ▼                ▼  │                      ▼
                        prefetch context scratchpad (256 KiB)      request manager (1024)
                                                                     │        │       │
                                     fills (line + slot bitmap) ◄────┘   PickleMMU    │ last level
                                                                     │   L1/L2 TLB    │
                                                     PickleCache ◄───┴───walker       ▼
                                                     256 KiB 16-way           FETCH_IF_NOT_PRESENT
                                                     64 MSHRs                 unit per LLC slice
                                                        │ read / victim          │ MRU touch,
                                                        ▼                        ▼ memory fill
                                                      network port         LLC slice ports
```

## Files

| File | Contents |
|---|---|
| `rtl/pickle_pkg.sv` | Entry formats, memory map of a slot, statistics struct |
| `rtl/pickle_hint_queue.sv` | Hint decode and the 256-entry hint FIFO |
| `rtl/pickle_prefetch_context.sv` | Context scratchpad and latest-hint table |
| `rtl/pickle_rv64e_core.sv` | One-stage RV64E core |
| `rtl/pickle_slot.sv` | Core + instruction memory + slot registers + fill table |
| `rtl/pickle_prefetch_generator.sv` | The slots, dispatch and request arbitration |
| `rtl/pickle_request_manager.sv` | Request table: coalescing, ordering, issue |
| `rtl/pickle_tlb.sv` | Set-associative TLB (used for L1 and L2) |
| `rtl/pickle_mmu.sv` | PickleMMU: two TLB levels and the page walker |
| `rtl/pickle_cache.sv` | PickleCache with MSHRs and victim write-out |
| `rtl/pickle_llc_delegate.sv` | FETCH_IF_NOT_PRESENT unit of one LLC slice |
| `rtl/pickle_top.sv` | The whole tile plus one delegation unit per LLC slice |

Every file starts with a comment that gives its protocol and timing, and says which parts
follow the published design and which are choices made here.

## Hints and the hint queue

A hint is a 64-bit store to the hint window, which starts at `HINT_BASE` (default `0x1000`).
The store address picks the kernel: address `HINT_BASE + 8*k` starts kernel `k`, for k = 0…7.
The stored value, `hint_data`, is the kernel's only argument. In the BFS example it is the
address of the work-queue entry that the core is about to process.

Each accepted hint becomes a 134-bit queue entry with this layout:

| Bits | Field |
|---|---|
| 133:131 | `kernel_id` |
| 130:128 | `core_id` |
| 127:64 | `hint_data` |
| 63:0 | `hint_arrival_order` |

`hint_arrival_order` is a free-running counter. It serves as the priority of every request
the hint later produces: a smaller value is older and is served first.

The queue holds 256 entries. `st_ready` drops only when the queue is full. A store that falls
outside the window is accepted, dropped and counted.

In the same cycle a hint is accepted, the hint value is also written into a *latest-hint*
register for that (core, kernel) pair. This register is what makes stale hints detectable.
Suppose a core has already moved past the point a queued hint refers to. The kernel serving
that hint compares the hint with the latest one and gives up. Its prefetch would arrive too
late to help, and it would pollute the LLC.

## Generator slots and the kernel interface

This is the part of the design that needs the most care. The hardware is simple, but the
contract between hardware and kernel software is easy to get wrong.

### A slot

There are `NUM_SLOTS` slots (64 by default). Each slot has:

* a one-stage, in-order RV64E core (RV64I with 16 registers, no M/A/F/C, no CSRs);
* a 1 KiB instruction memory;
* a few memory-mapped registers;
* a small fill table.

The head of the hint queue goes to the lowest-numbered free slot, at one hint per cycle. The
slot starts its core at `kernel_id * 4`. The first eight words of instruction memory are
therefore a jump table with one `jal` per kernel. A kernel ends with `ECALL` or `EBREAK`.
An illegal instruction also ends it and is counted. A slot becomes free again once its core
has halted *and* no fetch of the slot is still outstanding.

All slots load the same image. It is broadcast through `cfg_imem_we/addr/data` as 32-bit
words at byte addresses.

### Address space seen by a kernel

| Address | Access | Meaning |
|---|---|---|
| `0x000000` – `CTX_BYTES-1` | R/W | Context scratchpad, shared by all slots |
| `0x100000` `HINT_DATA` | R | The hint value |
| `0x100008` `HINT_META` | R | `{slot_id, core_id[2:0], kernel_id[2:0]}` (slot id from bit 6) |
| `0x100010` `LATEST_HINT` | R | Latest hint of this hint's core and kernel |
| `0x100018` `PF_DEST` | W | Context byte address that receives the next fetched word |
| `0x100020` `PF_ISSUE` | W | Fetch the 64-bit word at this virtual address, then write it to `PF_DEST` |
| `0x100028` `PF_LAST` | W | Last-level prefetch of this virtual address; no data comes back |
| `0x100030` `PENDING` | R | Number of `PF_ISSUE` fetches of this slot still outstanding |
| `0x100038` `ARRIVAL` | R | The hint's `hint_arrival_order` |

### How a kernel works

A kernel follows one chain of indirection, one level at a time:

1. Write a context address to `PF_DEST`.
2. Write a virtual address to `PF_ISSUE`. Repeat steps 1 and 2 for every word this level
   needs. `PF_DEST` is sampled at each `PF_ISSUE` store, so each fetch can target a
   different context word.
3. Poll `PENDING` until it reads 0. The words are now in the context.
4. Load them, compute the next level's addresses, and go back to step 1.
5. At the last level, write each address to `PF_LAST` and end.

Each `PF_ISSUE` or `PF_LAST` store becomes a request to the request manager with the fields
{arrival order, 64-byte-aligned virtual address, slot id, last-level flag}.

The store stalls while the request manager is full. It also stalls while `PF_ISSUE` finds the
slot's fill table full (`FILL_ENTRIES`, default 8). The core keeps repeating the store until
it is granted, so a kernel needs no retry loop.

When a line comes back, every waiting fill-table entry of the slot on that line is served.
The word at `vaddr[5:3]` is written to that entry's destination. A request dropped on a page
fault frees its entries without writing anything. A kernel can detect a fault by writing a
sentinel to the destination beforehand.

### The drop test

The example kernel in `tb/tb_rv_asm_pkg.sv` prefetches `dist` work-queue entries ahead of the
hint. It first checks:

```
target = hint + dist*8
drop if target <= latest_hint(core, kernel) + drop*8
```

The test is written in software, from `LATEST_HINT` and two context words. A different
kernel can use a different rule.

### Example: the BFS kernel

The kernel is 71 words long and goes through these steps:

1. Run the drop test above.
2. Fetch `work_queue[target]` into the slot's context area and wait.
3. Fetch `neighbor_ptrs[u]` and `neighbor_ptrs[u+1]` and wait.
4. Fetch `neighbors[start..end-1]` and wait.
5. Issue `PF_LAST` for `&visited[v]` for each neighbour `v`.

It uses this context layout:

* `0x00`: dist
* `0x08`: drop distance
* `0x18`, `0x20`, `0x28`: array bases
* from `0x1000 + slot*1024`: a 1 KiB area per slot

## Prefetch context

The context is a word-addressed scratchpad of `CTX_BYTES` (default 256 KiB). Software
decides its layout: global, per-core, per-kernel and per-slot state.

All slots share it, and so does a configuration port (`cfg_ctx_*`, the highest port). Access
goes through a round-robin arbiter with one access per cycle. Read data arrives the cycle
after the grant. Fill writes from a slot's fill table take that slot's port ahead of its core.

The 8×8 latest-hint words are held in registers next to the array. They are updated on hint
arrival and can be read by every slot at once.

## Request manager

The request manager is a table of `RM_ENTRIES` (default 1024) entries, 260 bits each:

| Bits | Field |
|---|---|
| 259:257 | `status` |
| 256 | `llc` |
| 255:192 | `slot_bitmap` |
| 191:128 | physical line address |
| 127:64 | virtual line address |
| 63:0 | `hint_arrival_order` |

The status values are FREE, NEW, XLATE, READY and ISSUED.

* **Coalescing.** A request whose line matches a live entry is merged into that entry. The
  merge sets the slot's bit, keeps the older arrival order, and keeps `llc` only if both
  requests were last-level. A request that needs data therefore never gets turned into a
  data-less LLC command. An entry that leaves in the same cycle is not merged into.
* **Ordering.** The oldest NEW entry goes to PickleMMU. The oldest READY entry is issued.
  Ties go to the lower index. Both searches are full scans of the table.
* **Issue.**
  * When `llc` is set and delegation is enabled, the entry goes to the LLC command path and
    is freed at once.
  * Otherwise it goes to PickleCache, tagged with its index. When the line returns, it is
    broadcast with the entry's `slot_bitmap` and the entry is freed.
* **Faults.** A translation fault frees the entry and broadcasts a "dropped" fill to its
  slots.

## PickleMMU

PickleMMU translates addresses on its own, using the application's page table.
`cfg_root` is the physical address of the table root. Translation goes through up to three
stages:

| Stage | Structure | Latency |
|---|---|---|
| L1 TLB | 64 entries, fully associative | 2 cycles from request to response on a hit |
| L2 TLB | 1024 entries, 8-way | 3 cycles on a hit; refills L1 |
| Walk | 4 levels | see below |

The walk uses 9 VA bits per level and 4 KiB pages. Each level reads the 64-byte line that
holds the PTE through PickleCache port 0, so page-table lines are cached too. A walk costs
about 28 cycles when all four lines hit in PickleCache.

The PTE format is this design's own:

* bit 0: valid;
* bits 47:12: the next table or the frame.

An invalid PTE faults.

`inv_valid` with `inv_all` or `inv_vaddr` invalidates both TLBs. This is Pickle's part in a
TLB shootdown. Only one translation is in flight at a time.

## PickleCache

PickleCache is a 256 KiB, 16-way cache of 64-byte lines with 64 MSHRs. It has two read
ports: port 0 is the walker and port 1 is the request manager. At most one access is
accepted per cycle.

* A hit answers in the next cycle.
* A miss takes an MSHR and sends a READ on the network port, tagged with the MSHR index.
* A request to a line that already has a pending miss waits. Secondary misses are not
  merged.

A fill goes to an invalid way if there is one, and otherwise to the set's round-robin
victim. A valid victim is written out as a VICTIM request, because the LLC acts as a victim
cache for it.

## LLC delegation (FETCH_IF_NOT_PRESENT)

A last-level request goes to one of `NUM_LLC_SLICES` units (default 8), chosen by physical
line address bits `[6 +: log2 N]`. Each unit does the following:

1. It queues the command with its arrival cycle.
2. It asks the slice, through `llc_lk_*`, whether the line is in the LLC and whether any
   other cache holds it. This combines the directory check and the tag lookup.
3. It acts on the answer:
   * In the LLC: it pulses `llc_touch_*`, which makes the line most recently used.
   * In another cache only: it does nothing.
   * Nowhere: it sends a fill request to the memory controller through `llc_mem_*`.
4. It drops the command if the memory controller has not accepted the fill by
   `timeout` cycles after arrival.

The timeout defaults to 10,000 cycles. `cfg_timeout_we` changes it.

## Top-level integration

`pickle_top` has only plain ports:

* hint stores: `st_*`;
* configuration: `cfg_*`;
* shootdown: `inv_*`;
* PickleCache's network port: `noc_*`;
* per-slice arrays for the LLC side: `llc_*`;
* status: `slot_busy`, `hq_count`, `rm_occupancy`;
* a `stats` struct of event counters.

Bring-up takes three steps:

1. Reset.
2. Load the kernel image and write the context constants.
3. Set `cfg_root` and `cfg_delegate_en`.

Hints can then be sent.

All defaults are the published configuration:

* 64 slots, 1 KiB instruction memory each;
* 256-entry hint queue;
* 256 KiB context;
* 1024-entry request manager;
* 64 / 1024×8 TLBs;
* 256 KiB 16-way PickleCache with 64 MSHRs;
* 8 LLC slices;
* 10,000-cycle timeout.

## Verification and how far to trust it

Every block has a self-checking testbench in `tb/`. Each compares the block against a model
written independently in the testbench, and ends by printing
`TB_RESULT checks=… failures=…`. Each testbench was also run against a copy of its block with
one deliberate bug, and each reported failures.

| Testbench | What it checks |
|---|---|
| `tb_pickle_hint_queue` | FIFO order, arrival stamps, back-pressure, window decode |
| `tb_pickle_prefetch_context` | Random multi-port traffic against a memory model; byte enables; latest-hint table |
| `tb_pickle_rv64e_core` | Instruction programs; one instruction per cycle |
| `tb_pickle_slot` | BFS kernel against the graph model; stale-hint drop; fault sentinel |
| `tb_pickle_prefetch_generator` | Dispatch to free slots; arbitration; fills to the right slots |
| `tb_pickle_request_manager` | Coalescing, oldest-first order, fault drop and LLC/cache split, against a reference |
| `tb_pickle_tlb` | Random lookups, fills and invalidations against a reference TLB |
| `tb_pickle_mmu` | TLB hit latencies, walk addresses, faults, shootdown |
| `tb_pickle_cache` | Random traffic with a random network; hits, MSHR limits, victims |
| `tb_pickle_llc_delegate` | The three outcomes, the timeout, queue full |
| `tb_pickle_top` | End-to-end BFS prefetching (below) |
| `tb_pickle_top_full` | The same flow at every default parameter, 64 slots |
| `tb_pickle_workload_csr` | Sparse-row kernel with conditional prefetching, on the whole tile |

### End-to-end tests

`tb_pickle_top` and `tb_pickle_top_full` share `tb_pickle_e2e_body.svh`. This body models the
network, memory and LLC slices. It builds a CSR graph and its page table from formulas in
`tb_graph_pkg.sv`, so no data files are needed.

It sends hints in six phases:

1. single hints;
2. bursts from four cores;
3. a core overtaking its own hint;
4. a page fault;
5. a shootdown;
6. memory blocked past a shortened timeout.

It then checks that the set of last-level prefetches that reached the LLC is exactly the set
computed from the graph. It also checks that every mechanism happened at least once:

* coalescing;
* request-manager-full retries;
* fault drops;
* L1 and L2 TLB hits;
* walks;
* PickleCache hits and victims;
* LLC fills, MRU refreshes and "elsewhere" outcomes;
* timeouts;
* stale-hint drops.

The reduced build runs in under a minute. The full-size build at the default parameters
runs a shorter phase-1 flow.

### Sparse-row workload test

`tb_pickle_workload_csr` runs a second kernel image, `csr_kernel` in `tb_rv_asm_pkg.sv`. It
covers the access chain `x[col[row_ptr[r] .. row_ptr[r+1]-1]]` over consecutive rows. That
chain is the irregular part of pull-style PageRank, connected components and the sparse
matrix-vector product in CG.

The image holds two kernels:

* Kernel 1 takes a row number as its hint. It prefetches `dist` rows ahead of that row.
* Kernel 2 stores its hint as a per-core threshold in the context. Kernel 1 then skips every
  row below that core's threshold.

Kernel 2 is how an application passes algorithm state to the prefetcher. The delta-stepping
threshold of SSSP is one example of such conditional prefetching.

The test checks two things:

* The set of last-level prefetches is exactly the computed one.
* The skipped rows produce no request at all.

### Limits of that evidence

The tests use two kernels, BFS and the sparse-row kernel, on small computed graphs, not the published datasets. They use simple models of the network and LLC with
fixed latencies. No test covers coherence interactions or performance claims.
`pc_mshr_waits` (a request stalled behind a pending miss) is covered by the cache testbench
but does not occur in the end-to-end test. Synthesis was only checked for being accepted by
the tools; there is no timing closure. In particular, the request manager's oldest-entry
search scans all 1024 entries in one cycle. That is correct, but in silicon it would need to
be pipelined or replaced by an age matrix.

## Where this RTL departs from the published design

* **No coherence on PickleCache.** The published design makes PickleCache a coherent
  participant in the on-chip protocol. Here it is a plain cache with a read/victim network
  port and no snoop handling. Prefetched data is read-only, so this is functionally safe in
  the tests. A real integration would still need snoop responses.
* **Static context layout.** The published design hands out context space elastically in
  1 KiB pieces. Here the scratchpad is a flat array whose layout the kernel software fixes.
* **The example kernel has a per-node limit.** Its 1 KiB slot area holds at most 125
  neighbours per node. Higher-degree vertices would need chunking in the kernel.
* **Stall instead of overflow.** The hint queue and request manager apply back-pressure when
  full. The published design sizes them so that they do not fill.
* **One of each, where the published design gives no number.** There is one translation in
  flight in PickleMMU, one issue per cycle from the request manager, and one command at a
  time per LLC unit.
* **One clock.** The published configuration runs the generator cores at 1 GHz beside
  4 GHz host cores. Here the whole tile runs on one clock, `clk`. An integration with
  separate clocks would need synchronising FIFOs at the hint and network ports.
* **Own formats and choices.** These are not given in the published design:
  * the slot memory map and the PENDING/PF_DEST mechanism;
  * the request status encoding;
  * the PTE format;
  * the slice interleaving;
  * the network port format.

## Simulating with Verilator

Packages must come before their users on the command line. For the reduced end-to-end test:

```sh
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_pickle_top \
    rtl/pickle_pkg.sv tb/tb_rv_asm_pkg.sv tb/tb_graph_pkg.sv \
    rtl/pickle_*.sv tb/tb_pickle_top.sv -o sim
./obj_dir/sim
```

`rtl/pickle_pkg.sv` also matches `rtl/pickle_*.sv`. Verilator ignores the repeated file.

For a single block, list the package, the block's module and its submodules, and the
testbench. For example:

```sh
verilator --binary --timing -Wno-fatal --top-module tb_pickle_mmu \
    rtl/pickle_pkg.sv rtl/pickle_tlb.sv rtl/pickle_mmu.sv tb/tb_pickle_mmu.sv
./obj_dir/Vtb_pickle_mmu
```

Testbenches that run kernels also need `tb/tb_rv_asm_pkg.sv`, and most need
`tb/tb_graph_pkg.sv`.

The simulation is two-state. Every testbench drives or resets everything it reads. A
watchdog in each testbench ends a hung run with a failure.
