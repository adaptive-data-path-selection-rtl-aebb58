# AGPM: adaptive data-path selection for undo logging on a GPU with persistent memory

A GPU kernel that keeps its data structures in persistent memory (PM) makes
its updates failure-atomic with undo logging: before a thread block (CTA)
overwrites an output element it persists a copy of the old value (the log
update), and only then updates the data. A log update can reach the
persistent domain (the non-volatile memory controller, NVMC, which is
assumed to have ADR) along two paths:

* **temporal**: `store` + `clwb`, through the L1D and L2 caches;
* **non-temporal**: `nt-store`, bypassing the caches straight into the
  NVMC write-pending queue.

The common assumption is that the non-temporal path always suits logs,
since logs are never read in failure-free runs. Measured over 22 GPU
kernels, that is wrong for nine of them. Which path wins depends on
how the log updates and the data updates that follow them share cache
blocks. Some locality favours the caches. Too much log locality in L1
thrashes between L1 and L2. A kernel that uses shared memory gains nothing
from the caches.

AGPM measures that locality while the kernel runs and switches the path of
the log updates once per *period*. A period is a number of log updates, and
its length is re-tuned as the kernel runs. This repository holds
synthesizable SystemVerilog for the AGPM additions to the GPU:

| file | block |
|---|---|
| `rtl/agpm_pkg.sv` | shared types: buffer entry, statistics, reasons, requests |
| `rtl/agpm_buffer.sv` | locality buffer (used at the L1 level and at the L2 level) |
| `rtl/agpm_reservation_buffer.sv` | store for entries of blocks written back to memory |
| `rtl/agpm_reason_classifier.sv` | the eight locality patterns (reasons a-h) and the path each implies |
| `rtl/agpm_path_selector.sv` | per-SM selector that steers log updates |
| `rtl/agpm_period_ctrl.sv` | period length, CWPPR measurement and threshold tuning |
| `rtl/agpm_rr_arbiter.sv` | round-robin arbiter (helper) |
| `rtl/agpm_top.sv` | everything wired together |

The GPU itself is not part of this RTL: SMs, caches, interconnect,
page-table walkers, memory controllers, NVMC and memories. Its events enter
`agpm_top` as ports.

## Where the pieces sit

```
   SM 0..N_SM-1                         one per GPU
  +-----------------------+
  | SIMD core / LD-ST     |
  |   | coalesced request |
  |  <sel>  agpm_path_selector ----+        statistics, period_end
  |   |                   |         \      +-------------------------+
  |  L1D $ ------------------------> agpm_buffer (L1 level, shared) |
  +-----------------------+         |       |  spills on L1 eviction |
                                    |       v                        |
   L2 $ partitions ---------------> agpm_buffer (L2 level, shared)   |
                                    |       |  spills on write-back  |
   NVM -----------------------------> agpm_reservation_buffer        |
                                    |       ^  re-fill on L2 fetch   |
                                    +-- agpm_period_ctrl ------------+
```

Each SM has a selector, because the selector sits between the LD/ST unit
and L1D. There is only one L1-level locality buffer for all SMs. The
published design argues that the SMs' access patterns are alike enough for
one buffer to do. A second buffer is shared by the L2 partitions. The
reservation buffer sits with the NVM.

## The locality buffer (`agpm_buffer`)

This is the part that takes the most care to follow.

### Layout

The buffer has `SETS` = 512 sets, and each set has two *ways*. Both ways
of a set describe the same 128-byte block:

| field | bits | meaning |
|---|---|---|
| tag | 57 | block address (64-bit byte address >> 7) |
| byte counters | 128 x 5 | references to each byte of the block |
| block counter | 5 | re-references to the block |
| mark | 5 | path changes not yet resolved (see below) |

That is 707 bits per way. The *all way* counts every request. The *log
way* counts only PM log updates. Two ways x 512 sets = 1024 entries. All
counters saturate at 31.

### Counting rules

| request | buffer miss | buffer hit |
|---|---|---|
| PM log update | allocate the block in both ways; counters of the touched bytes = 1, block counter 0 | update both ways |
| any other request (an L1/L2 hit) | ignored | update the all way only |

"Update" means: the block counter goes up by one, and each touched byte
whose counter is already non-zero goes up by one. Touched bytes still at
zero are left alone. So a data update that touches a logged *byte* counts
as temporal locality, and one that touches only other bytes of a logged
*block* counts as spatial locality only.

### Statistics

For each way the buffer reports:

* `t` = sum of all byte counters larger than 1;
* `s` = `t` + sum of all block counters.

The L1-level buffer gives `l1d_t_all`, `l1d_s_all`, `l1d_t_log` and
`l1d_s_log`; the L2-level buffer gives the four `l2_*` values. Summing 1024
x 128 counters on demand would be costly. So each buffer keeps the four sums
in running registers that change with each counter increment: a counter
going 1 -> 2 adds 2 to `t`, a counter going n -> n+1 with n > 1 adds 1, and
a block-counter increment adds 1 to `s`. The sums therefore cover every
access of the period. That includes blocks whose entries have since moved
to another buffer, because their record still exists, only elsewhere.

Worked example (it is the start of the buffer testbench). Log bytes 0-3 of
a block, then data-update bytes 0-7, then log bytes 0-1:

| after | t_all | s_all | t_log | s_log |
|---|---|---|---|---|
| log 0-3 (allocate, counters 1) | 0 | 0 | 0 | 0 |
| data 0-7 (bytes 0-3: 1->2) | 8 | 9 | 0 | 0 |
| log 0-1 (all: 2->3, log: 1->2) | 10 | 12 | 4 | 5 |

### Moving entries between levels

| event | operation | effect |
|---|---|---|
| block leaves L1D | `OP_EVICT` at L1 | entry removed, spilled, installed in the L2-level buffer |
| L2 writes the block back to NVM | `OP_EVICT` at L2 | entry spilled into the reservation buffer |
| L2 fetches the block again in the same period | reservation lookup | entry removed there, installed in the L2-level buffer |
| allocation or install meets another block in the set | - | that block is spilled first, as if evicted |
| install of a block already present | `OP_INSTALL` | counters added, saturating |
| period end | `clear` | all sets invalid, sums zero; the reservation buffer is emptied too |

### The mark and clwb

A temporal log update is a `store` followed later by a `clwb`. Suppose the
selector sends that store non-temporally. Then its `clwb` has nothing to
flush and must be dropped. The request carries `mark_inc`, and the buffer
adds one to the log-way mark of the block. When a `clwb` of the block
arrives (`OP_CLWB`) and the mark is non-zero, the buffer decrements the
mark and answers `drop_clwb`. The other direction needs no memory. A
non-temporal log update sent temporally is answered at once with
`add_clwb`, so that a clwb-like operation follows the store.

### Timing

Each buffer takes one operation every two cycles. In the accept cycle it
reads the set from the array. In the next cycle it computes the update and
writes it back, and `resp_valid` follows in the cycle after that. A spill
is held on `spill_valid`/`spill_entry` until `spill_ready`, and no new
request is accepted meanwhile.

## Reasons and the path decision (`agpm_reason_classifier`)

| reason | condition (L1 unless stated) | path |
|---|---|---|
| h | the kernel uses shared memory | non-temporal |
| e | 100 or fewer log updates in the period | non-temporal |
| a | t_all, s_all != 0; t_log = s_log = 0 | temporal |
| b | all four != 0; t_log/t_all > 0.25 and s_log/s_all > 0.25 | non-temporal |
| d | all four != 0; both ratios <= 0.25 | temporal |
| c | all four L1 = 0; all four L2 != 0 | temporal |
| f | all eight = 0 | non-temporal |
| g | t_all = 0, s_all != 0, t_log = 0, s_log != 0 | temporal |
| none | anything else | non-temporal |

The rows are checked top to bottom. h and e come first because the
published per-kernel statistics call for it. BFS matches a as well as e,
and SSSP1 matches f as well as e; both kernels were assigned e. SGEMM
matches f and was assigned h. The ratios are computed without division,
as `4*log > all`. With the 22 published per-kernel statistics, the
classifier gives the published reason for every kernel.

## Periods and threshold tuning (`agpm_period_ctrl`)

A period ends with the log update that takes the period's count past the
threshold (the 10001st, for the initial 10000), or when the kernel ends.
At that cycle every selector classifies the statistics, and all three
stores are flushed.

The threshold is then re-tuned from CWPPR, the average number of cycles a
PM request waits until it is serviced. It is measured as the number of PM
requests in flight, summed over the cycles of the period, divided by the
number completed (`pm_issue`/`pm_done` events). Two periods are compared by
cross-multiplication, so no divider is needed. If the period just ended
waited longer per request than the one before, the threshold grows by a
tenth of itself (10000 -> 11000). Otherwise it shrinks by a tenth
(10000 -> 9000). The first period of a kernel has no predecessor and leaves
the threshold alone. A kernel with fewer than 10000 log updates should
start from a smaller threshold; software supplies it on `init_threshold` at
`kernel_start`.

## Steering (`agpm_path_selector`)

Between period ends the decision is constant. A log update takes the path
of the decision, and every other request keeps its own path:

| instruction path | decision | result |
|---|---|---|
| temporal | non-temporal | sent non-temporal, `mark_inc` (its clwb will be dropped) |
| non-temporal | temporal | sent temporal, `add_clwb` |
| same | same | unchanged |

Until the first period of a kernel has ended there is no decision, and log
updates keep the path their instruction encodes. `kernel_start` clears the
decision.

## Top-level interface (`agpm_top`)

All request ports are valid/ready.

* `sm_req[i]` (`sm_req_t`): `kind` is `SM_LOG_STORE`, `SM_DATA` (a request
  that hit in L1D) or `SM_CLWB`, followed by `instr_path`, `blk` (byte
  address >> 7) and a 128-bit byte mask. The L1-level buffer serves one
  request at a time: L1 evictions first, then the SMs in round-robin order.
  The answer `sm_resp[i]` (`path`, `add_clwb`, `drop_clwb`, `hit`) comes two
  cycles after acceptance.
* `l1_evict_*`: a block leaves L1D.
* `l2_acc_*`: a request (log or not) hit in L2.
* `l2_wb_*`: L2 writes a block back to NVM.
* `l2_fill_*`: L2 fetches a block from NVM.
* `pm_issue`, `pm_done`: PM requests entering and leaving service, at most
  one of each per cycle.
* `kernel_start`, `kernel_end`, `init_threshold`, `shmem_used`: per-kernel
  control.
* Observation outputs: `period_end`, `threshold`, `periods`, `thr_up`,
  `thr_down`, the decision (`reason`, `decided`), both levels' statistics,
  and `res_overwrites`.

The L2-level buffer serves, in priority order: L1 spills, re-fills from the
reservation buffer, write-backs, and L2 hits.

Default parameters: `N_SM` = 20, `SETS` = 512, `RES_SETS` = 1024,
`INIT_THRESHOLD` = 10000. The two buffers hold 2 x 512 x 1414 bits, about
177 KB. The reservation buffer holds 1024 x 1414 bits; in the real system it
lives in GPU memory, not in flip-flops.

## What follows the published design and what does not

Taken from the published design: the two-way entry layout and its widths;
512 x 2 entries; the counting rules; the definitions of t and s; the eight
reasons with their 0.25 and 100 limits, and the path each implies; one
L1-level and one L2-level buffer; a selector per SM; entries moving down a
level on eviction, into a reservation store on write-back, and back on
re-fetch; the flush at period and kernel end; the initial threshold of
10000 and the +/-10 % CWPPR rule; the mark for temporal-to-non-temporal
changes and the clwb-like insertion for the reverse.

Choices made here, where the description is silent or ambiguous:

* Set index: the low bits of the block address. The tag still keeps the
  full block address.
* Set conflicts spill the old block. An install of a present block adds
  the counters.
* The statistics are running sums, not a scan on enquiry.
* The block counter goes up once per request.
* The decision is taken per period from the buffer-wide statistics. It is
  not looked up per address.
* The text lists reason g under both paths. Here it is temporal, as the
  reason table makes it.
* The reason table says "log <= 100" and the text says "< 100". The
  classifier uses <= 100.
* A state that matches no reason gets the non-temporal path.
* The two ratio tests of reasons b and d must both hold.
* The log way counts PM *log* updates. One sentence says "PM instruction";
  the way's definition says log updates.
* The reservation buffer is direct-mapped, 1024 entries. A conflicting
  write loses the old entry, counted in `res_overwrites`.
* Re-fills go to the L2-level buffer only. A block fetched from L2 into L1
  does not take its entry back up.
* CWPPR is measured from issue/done events. The first period leaves the
  threshold unchanged. There is no lower bound on the threshold.
* The first period of a kernel uses the instruction's own path.
* Handshakes, priorities, two-cycle buffer timing and asynchronous
  active-low reset are this design's own.

## Simulating

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`:

| testbench | what it shows |
|---|---|
| `agpm_buffer_tb` | the worked example and saturation; the 2-cycle latency; 3000 random operations against a reference model (8 sets, spill back-pressure); clear |
| `agpm_reservation_buffer_tb` | store, take-on-hit, overwrite counting, write-vs-take ordering, clear; random run against a model |
| `agpm_reason_classifier_tb` | all 22 published kernels map to their published reason; edge cases (100/101 logs, ratio exactly 0.25, mixed ratios) |
| `agpm_path_selector_tb` | steering of every request kind and path, before and after decisions; kernel_start |
| `agpm_period_ctrl_tb` | period ends at threshold+1; 10000 -> 11000 -> 9900 -> 8910 from measured CWPPR; kernel end; small initial threshold |
| `agpm_top_tb` | 4 SMs, 16 sets, threshold 200: reasons b, a, h, e in turn; clwb drop; L1 -> L2 spills; write-back and re-fill through the reservation buffer; arbitration stalls; threshold up and down. Each mechanism is counted and must occur. |
| `agpm_reason_workload_tb` | one synthetic access stream per pattern a-h through the whole datapath (buffers, statistics, classifier, selector); each period must end on that pattern's reason and steer the next log update accordingly |
| `agpm_top_full_tb` | default sizes (20 SMs, 512 sets, threshold 10000): a reason-d period ending exactly at log update 10001, then a reason-b period with longer PM service that raises the threshold to 11000 |

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/agpm_pkg.sv tb/agpm_top_tb.sv --top-module agpm_top_tb -Mdir obj_top
./obj_top/Vagpm_top_tb
```

Replace the testbench name to run another. `-y rtl` finds the modules
under `rtl/` by name. Every testbench finishes in well under a second of
simulation.

## Limits

The blocks follow a description written for a cycle-level GPU simulator,
not for silicon. The published results come from that simulator, and this
RTL has not been timed or placed. Its cycle behaviour (two cycles per
buffer operation, one shared L1-level buffer for all SMs) is a plausible
reading, not a measured one. A buffer that serves 20 SMs at one operation
per two cycles would be a bottleneck in a real GPU. The single shared
buffer is the published design's own simplification.
