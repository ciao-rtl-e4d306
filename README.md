# CIAO in RTL: interference-aware caching and warp throttling for one GPU SM

A GPU streaming multiprocessor (SM) runs dozens of warps that share a small L1
data cache. For memory-intensive kernels, a few warps can keep evicting the lines
that other warps are about to reuse. The victims then miss over and over, and the
whole SM waits on L2. Throttling the number of running warps helps, but it also
throws away parallelism.

CIAO instead looks for the specific warp that causes the damage and acts on that
warp alone. It does this in two steps:

1. **Isolate.** The interfering warp's memory requests are sent to the part of
   shared memory that no CTA has claimed. That part is used as a second,
   direct-mapped cache. The interferer keeps running but no longer touches the
   L1D.
2. **Stall.** If the victim still suffers after the interferer is isolated, the
   interferer is stopped. It is woken up once the victim's interference has
   dropped.

This repository holds synthesizable SystemVerilog for everything CIAO adds to
one SM:

- the interference detector;
- the scheduling state and its controller;
- the shared-memory management table;
- the cache datapath that runs the L1D and the shared-memory cache side by side.

The surrounding SM front end (fetch, decode, scoreboard, ALUs, coalescer) and the
memory below L1 are not part of the design. The top module brings their
interfaces out as plain ports.

Default sizes follow the evaluated GTX480-like SM:

| Item | Default |
|---|---|
| Warps per SM | 48, with 6-bit warp IDs (WIDs); the lists have 64 entries |
| L1D | 16 KB, 128-byte lines, 4 ways, LRU |
| Shared memory | 48 KB in 32 banks |
| Victim tag array | 48 sets of 8 tags, FIFO |
| Epochs | 5000 instructions (high) and 100 instructions (low) |
| IRS cutoffs | 0.01 (high) and 0.005 (low) |

## 1. Detecting interference

**Victim tag array (`vta`).** There is one set per warp, 8 tags per set, with
FIFO replacement. The L1D or the shared-memory cache may evict a line owned by
warp W (every tag stores the owner WID). When that happens, the line's block
address and the WID of the warp that caused the eviction go into set W. Later,
warp W may miss on a block that is still in its set. The line was then thrown
out by someone else before W could reuse it: this is a *VTA hit*, and the stored
WID names the interferer.

**Per-warp hit counters and the instruction counter (`global_counter`).** These
count VTA hits per warp and instructions per SM. All counters are 32 bits,
saturate, and are cleared when a kernel starts.

**Interference list (`interference_list`).** Each warp has a 6-bit WID and a
2-bit saturating counter, updated on each of its VTA hits:

- The same interferer as stored increments the counter.
- A different interferer decrements it.
- The stored WID is replaced only when the counter is already 0.

The entry therefore tracks the most frequent recent interferer rather than just
the latest one. An entry that holds its own warp's WID means "no interferer yet".

**IRS and the cutoff test (`cutoff_test`).** The Individual Re-reference Score of
warp *i* is

    IRS_i = VTAhits_i / (Inst_total / ActiveWarps)

That is, VTA hits per instruction of an average active warp. The hardware avoids
the division by cross-multiplying with the reciprocal of each cutoff:

    IRS_i > 1/R   <=>   hits_i * active * R > Inst_total,   R = 100 (high) or 200 (low)

This is exact, including at equality: IRS exactly 0.01 is *not* above the high
cutoff. The block is combinational.

## 2. Scheduling state and the CIAO algorithm

**Warp list (`warp_list`).** Each warp has two flags:

| V | I | state | memory requests go to |
|---|---|-------|-----------------------|
| 1 | 0 | active | L1D |
| 1 | 1 | isolated | shared-memory cache |
| 0 | x | stalled | (does not issue) |

The issue logic is greedy-then-oldest (GTO):

- The last warp that issued keeps issuing while it is eligible.
- Otherwise the oldest eligible warp issues.
- Eligible means live, ready (both reported by the front end) and V = 1.
- Warp age is taken as WID order.

The list also reports the number of active warps (live and V), which feeds the
IRS.

**Pair list (`pair_list`).** Each warp has two 6-bit fields:

- field 0 records the victim whose IRS caused this warp's isolation;
- field 1 records the victim whose IRS caused this warp's stall.

A cleared field holds the warp's own WID.

**Epochs (`epoch_sampler`).** The sampler pulses `high_end` every 5000 issued
instructions and `low_end` every 100. Each pulse comes in the cycle after the
instruction that completes the epoch.

**Controller (`ciao_controller`).** At an epoch end it scans all warps in WID
order. Each warp takes two cycles, so a full scan is 96 cycles at 48 warps.

- *Low step (cycle 1, only after a low-epoch end).* Take warp *i* that is
  stalled or isolated. Let *k* be the victim recorded for it in field 1 (if
  stalled) or field 0 (if isolated). If *k* is no longer live and active, or
  IRS_k is no longer above the low cutoff, undo the action:
  - a stalled warp gets V = 1 (reactivate);
  - an isolated warp gets I = 0 (redirect back to the L1D).

  The matching pair-list field is cleared.
- *High step (cycle 2, only after a high-epoch end).* Take an active warp *i*
  with IRS_i above the high cutoff. Let *j* be its interferer from the
  interference list. If *j* is another live warp:
  - if *j* is already isolated, stall it (V = 0, field 1 = *i*);
  - otherwise, isolate it (I = 1, field 0 = *i*).

The ordering matters. Undoing isolation and stalls first lets the same scan
immediately re-isolate a warp that still interferes. Counter, list and flag
reads are combinational. Writes land at the end of each cycle, so later warps in
the same scan see earlier decisions, just like a sequential software loop over
the warps. An epoch end that arrives mid-scan waits for the next scan.

One addition of this design: if every live warp is stalled, no instruction
issues and no epoch would ever end. The top then forces a low step so that
stalled warps can be reactivated.

## 3. Shared memory as a cache

### Layout

Shared memory is 32 banks of 64-bit words, 192 rows deep. Banks 0–15 form bank
group 0 and banks 16–31 group 1.

A 128-byte block is striped across the 16 banks of one group in one row. Its
tag sits in the *other* group, so the tag and the data can be read in the same
cycle without a bank conflict. A tag is 32 bits: {valid, owner WID, 25-bit block
address}. One 64-bit bank word holds two tags, and one row of a group holds 32.

**SMMT (`smmt`).** CTAs are placed contiguously from row 0 upwards, at the
current end of the used space. Whatever is left above becomes the cache:

- D data rows, where D is the largest power of two ≤ 128 that still fits;
- plus max(1, D/32) tag rows.

Each data row holds two blocks, one per group.

The table gives the translation unit:

- an 8-bit mask, D−1;
- the data offset (the first free row);
- the tag offset (data offset + D).

Whenever the region changes, the table pulses `region_change` and the controller
clears the tag rows. A CTA allocation waits until the cache controller has no
shared-memory fill outstanding.

### Address translation (`shm_xlate`)

| global address bits | meaning |
|---|---|
| [2:0] | byte within a 64-bit bank word (F) |
| [6:3] | bank within the group (B) |
| [7] | bank group G of the data |
| [15:8] | row index; masked: Rm = R & mask |

The locations follow from these fields:

- data row = Rm + data offset, in group G;
- tag row = (Rm >> 5) + tag offset, in group ~G, bank Rm[4:1], 32-bit half Rm[0].

Two blocks that share Rm and G are the same cache line: the cache is direct
mapped. The stored tag keeps the full block address, so a hit compares the whole
address.

With 4 KB given to CTAs there are 176 free rows. The cache is then 128 data rows
plus 4 tag rows, that is 32 KB of data (256 lines).

## 4. The request path (`ciao_mem_ctrl`)

The controller owns the L1D arrays (`l1d_cache`), the banks (`shm_banks`), the
translation unit, the MSHR (`mshr`) and three queues to L2 (`sync_fifo`):

- ReqQ carries block misses;
- WQ carries write-through stores;
- RespQ carries fills.

**Request timing.** A request from the LD/ST unit is accepted in one cycle (the
tag and data arrays are read at the clock edge). It is resolved in the next
cycle. A load hit answers in that second cycle, one cycle after acceptance.

Only one request is in flight. The controller does not accept a request when any
of these holds:

- a fill is waiting;
- the MSHR is full;
- a queue could overflow;
- the block already has a miss outstanding.

**Routing by I flag.**

| warp | hit where | action |
|---|---|---|
| not isolated | L1D | load answers from the L1D; store updates the L1D word and goes to WQ |
| isolated | shared-memory cache | load answers from shared memory; store updates the shared-memory word and goes to WQ |
| not isolated | shared-memory cache | load: line *migrates* to the L1D; store: updates the shared-memory copy and goes to WQ |
| isolated | L1D | load: line *migrates* to shared memory; store: updates the L1D copy and goes to WQ |
| either | neither (load) | miss: VTA lookup and counter update for the requesting warp, MSHR entry, ReqQ |
| either | neither (store) | WQ only (no write allocate) |

**Migration.** The line moves through RespQ instead of through L2:

1. The old copy is read and invalidated: the L1D line, or the shared-memory tag.
2. The line is pushed into RespQ as though it were an L2 response.
3. An MSHR entry for the new destination is allocated.
4. The normal fill path writes the line into its new home and answers the load.

At most one copy of a block therefore exists in the L1D and the shared-memory
cache together. An assertion in the controller checks this on every fill.

**Fills.**

- An L1D fill picks an invalid way or the LRU way.
- A shared-memory fill takes one cycle: it writes the 16 data words of the row
  and the tag word.
- The line that either fill overwrites goes into the victim's VTA set, together
  with the WID of the warp that asked for the fill.

**Scratchpad.** CTAs still use shared memory as a scratchpad through a simple
one-word port. It is served when no fill waits and no request is in progress.

## 5. Top level (`ciao_sm`)

`ciao_sm` wires the blocks together.

- `ev` is a 15-bit struct of one-cycle event pulses, for performance counters
  and tests: VTA hit, isolate, stall, reactivate, redirect back, L1D hit,
  shared-memory hit, miss, both migrations, both kinds of eviction, tag clear,
  high epoch and low epoch.
- Every issued instruction counts toward the epochs. Every load miss does a VTA
  lookup, and each VTA hit updates the counters and the interference list.

| group | ports |
|---|---|
| front end | `live`, `ready` per warp; `issue_valid`, `issue_wid`; `v_flags`, `i_flags`; `kernel_start` |
| LD/ST | `req_valid/req/req_ready` (`mem_req_t`: WID, store, 32-bit address, 32-bit data); `rsp_valid/rsp_wid/rsp_data` |
| CTAs | `cta_alloc_*` (slot, id, size in bytes, `cta_alloc_ok`, start), `cta_free_*` |
| scratchpad | `sreq_*` (bank, row, 64-bit data, write), `srsp_*` |
| L2 | `l2_req_*` (block reads), `l2_wr_*` (word writes), `l2_rsp_*` (block, 1024-bit line) |
| status | `cache_en`, `cache_size`, `ev` |

Coarse synthesis of the top at its defaults (yosys, flattened) gives about 5300
cells and 20 k flip-flop bits. The memories take 535 k bits, which are the
shared memory, the L1D data, the MSHR and queue storage.

## 6. Where this design departs from, or fills in, the paper

Choices of this design, where the source description is silent:

- Widths: 32-bit addresses, so 25-bit block addresses.
- Timing: the two-cycle request, the one-cycle hit answer, one request in
  flight, and the 96-cycle controller scan.
- MSHR: 32 entries, one outstanding miss per block.
- Queues: ReqQ, WQ and RespQ have 8 entries each.
- SMMT: 8 CTA slots and contiguous CTA allocation.
- The rule for sizing the cache in the free rows.
- Tags hold the full block address.
- Warp age for GTO is WID order.
- The counters are never cleared at epoch ends.
- The forced low step when all warps are stalled.
- Migration from shared memory back to the L1D follows the same path as the
  forward migration. Only the forward path is described in the source.
- The interference list keeps its counter at 0 after it replaces a WID.

Other points:

- **Rows.** The translation figure allows "256 rows at most" in the 8-bit row
  field, but 48 KB over 32 banks of 8 bytes is 192 rows. The arrays have 192
  rows, and the cache uses at most 128 + 4 of them.
- **IRS arithmetic.** The source builds IRS with adders, a shifter and a
  comparator. Here it is two multiplications and a compare, which gives exactly
  the same decisions.
- **Local memory.** Write-back of local memory is not modelled. The L1D handles
  only global loads and stores, written through.
- **Not included:** the SM pipeline, the coalescer, L2, the interconnect and
  DRAM.

## 7. Verification

Every block has a self-checking testbench in `tb/`. Each one compares against an
independent reference written in the testbench, has a watchdog, and ends by
printing `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_vta` | FIFO replacement and interferer report, against a queue model |
| `tb_interference_list` | the saturating-counter example (W32/W42 against W34), then random updates |
| `tb_global_counter` | random hit and instruction counts; clear at kernel start |
| `tb_epoch_sampler` | pulse position after every 100th and 5000th instruction |
| `tb_cutoff_test` | decisions against IRS in real arithmetic, with both cutoffs at equality |
| `tb_pair_list`, `tb_warp_list` | reference copies; GTO order; active count |
| `tb_ciao_controller` | random warp states against a sequential model of the algorithm; all four actions seen |
| `tb_smmt` | allocation, start addresses, cache sizing and `region_change` |
| `tb_shm_xlate` | field extraction; no two blocks of a region collide; rows stay in the region |
| `tb_shm_banks`, `tb_l1d_cache`, `tb_mshr` | array reference models, LRU victim choice, lowest-free allocation |
| `tb_ciao_mem_ctrl` | the controller with a 20-cycle L2 model; random traffic from 16 warps with flipping I flags; data, hit latency, hold, scratchpad, tag clearing, every event |
| `tb_ciao_sm` | the full SM at default parameters (details below) |

`tb_ciao_sm` runs a synthetic kernel on all 48 warps:

- Most warps loop over 6 private blocks and store now and then. Together these
  overflow the L1D.
- Every eighth warp streams through 100 blocks and keeps evicting the other
  warps' lines.
- Two CTAs claim 4 KB and later 8 KB of shared memory, then free it.

It checks:

- every load value against a reference memory;
- the one-cycle hit latency;
- that only eligible warps issue;
- the scratchpad contents;
- that the cache grows back to 48 KB;
- that every mechanism happened at least once.

A typical run is about 164 k cycles and 161 k instructions. It shows about 960
VTA hits, a few isolations, stalls, reactivations and redirects back, about 570
shared-memory hits, and migrations in both directions.

`tb/l2_model.sv` is a behavioural L2 for the testbenches only. It uses a fixed
latency and returns data from a hash of the address unless the address was
written.

To run one testbench with Verilator:

    verilator --binary --timing --assert -Irtl rtl/ciao_pkg.sv rtl/*.sv \
        tb/l2_model.sv tb/tb_ciao_sm.sv --top-module tb_ciao_sm -o sim
    obj_dir/sim

(`ciao_pkg.sv` must be read first. `l2_model.sv` is needed only by
`tb_ciao_mem_ctrl` and `tb_ciao_sm`.) Simulation inputs use `$urandom`, with no
constraints, and every state element read before it is written is reset.

## 8. Fit of the evaluated workloads

The 21 benchmarks of the evaluation use at most 48 warps per SM, which is the
size of the warp list, the VTA and the counters. The shared memory the baseline
uses ranges from 0 % to 50 % of 48 KB. The CIAO cache gets what is left:

| benchmarks' shared-memory use | rows left | CIAO cache data |
|---|---|---|
| 0 % (most) | 192 | 32 KB |
| 1 % | 190 | 32 KB |
| 13 % | 167 | 32 KB |
| 19 % | 155 | 32 KB |
| 33–35 % | 128 or 124 | 16 KB |
| 50 % | 96 | 16 KB |

The power-of-two sizing is the reason at most 32 KB is ever used: 128 data rows
is the largest power of two that fits. Benchmark data sets (25 KB to 128 MB) sit
in DRAM and need no on-chip room.
