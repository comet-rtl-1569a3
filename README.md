# CoMeT: a Count-Min-Sketch RowHammer tracker in SystemVerilog

Repeatedly activating a DRAM row disturbs its neighbours. Once a row has been
activated N_RH times (the RowHammer threshold) within one refresh window, bits in
the adjacent rows can flip. A memory controller can prevent this by counting the
activations of each row and refreshing a row's two neighbours before the count
gets dangerous. Exact per-row counting is expensive: a DDR4 bank has 128K rows.
Tag-based trackers (Misra-Gries style CAM tables) grow large as N_RH falls to a
few hundred.

CoMeT counts activations in a **Count-Min Sketch**. Each bank has a small table
of counters, k rows of m counters each. Row i is indexed by a cheap hash H_i of
the DRAM row ID. The counters a row maps to (one per hash) form its *counter
group*. The row's estimated activation count is the minimum counter of that
group. Many DRAM rows share counters, so the estimate can be too high, but it is
never too low. That one-sided error is what makes the tracker safe.

The hash-based counters are never decremented, so a counter that reached the
refresh threshold stays there. Every row that maps onto it would then trigger
needless refreshes. A small tagged **Recent Aggressor Table (RAT)** fixes this:
rows that have just been refreshed get an exact counter of their own. A
**miss-history vector** spots when the RAT is too small for the workload. In
that case the whole rank is refreshed early and every counter starts again.

This repository holds synthesizable RTL for the tracker of one DDR4 channel
(2 ranks x 16 banks) in its main configuration: N_RH = 125, 4 hashes x 512
counters, a 128-entry RAT, a 256-entry miss history and an early-refresh
threshold of 25 %. It includes self-checking testbenches for every block.

## The threshold N_PR and the reset period

The tracker does not know when the controller's regular refresh reaches each
row. So it resets all its counters every reset period tREFW/k. Here tREFW = 64 ms
is the DDR4 refresh window and k = 3. Between two regular refreshes of a row, the
counters are reset at most k times. An aggressor can therefore collect up to
(k+1)(N_PR - 1) activations without its victims being refreshed. Choosing

    N_PR = N_RH / (k + 1)        (125 / 4 = 31 with integer division)

keeps that below N_RH. In the RTL, `comet_top` derives N_PR from its
parameters N_RH and K_RESET. Every counter is ceil(log2(N_PR + 1)) bits wide,
which is 5 bits at N_RH = 125.

## What happens on one activation

`bank_tracker` carries out the algorithm for one bank. An ACT to row X takes
two clock cycles, or more when it causes a refresh.

**Cycle 1 (lookup).** The ACT is accepted (`act_valid && act_ready`).
- The counter table (`counter_table`) computes the N_HASH hash indices of X
  and reads one counter from each of its N_HASH SRAM rows.
- At the same time, the RAT (`recent_aggressor_table`) compares X with all
  of its tags.

**Cycle 2 (evaluate and update).**
- `min_comparator` reduces the counter group to Min_Ctr.
- The estimate Num_ACT is the RAT counter if X hit in the RAT, and Min_Ctr
  otherwise.
- If Num_ACT + 1 >= N_PR, the row has reached the threshold:
  - every counter of X's group is set to N_PR (saturated);
  - on a RAT hit, that RAT counter is zeroed;
  - on a RAT miss, a RAT entry is allocated for X with count 0. A free entry
    is used if there is one; otherwise a pseudo-random entry is evicted. The
    miss is also pushed into the miss history: as a *capacity miss* if
    Min_Ctr was already N_PR before this ACT (X was an aggressor that had
    been evicted from the RAT), and as a *compulsory miss* otherwise;
  - the tracker then offers X-1 and X+1, one at a time, on the `pr_*`
    handshake. The scheduler refreshes each victim with an ACT and a PRE.
    The bank accepts no new ACT until both victims have been taken.
- Otherwise only counting happens. On a RAT hit the RAT counter is
  incremented. On a miss, only the counters equal to Min_Ctr are incremented.
  This is the *conservative update* of the sketch: it never lowers the
  minimum's guarantee and leaves the larger counters alone.

**Early refresh.** When the history holds more than EPRT capacity misses (64 of
256), the bank raises `epr_req`. The rank's `early_refresh_ctrl` then does the
following:
- pulses a clear to all 16 trackers of that rank;
- holds the rank (ACTs to it are refused);
- issues 8192 REF commands on `ref_*`, which refresh every row of the rank;
- releases the rank once no bank still requests an early refresh.

**Periodic reset.** Every RESET_PERIOD cycles, `reset_timer` clears every
tracker of the channel.

**Clearing.** A clear zeroes the counter table one column per cycle (512
cycles, all SRAM rows in parallel). It invalidates the RAT and empties the
history. A bank is unavailable for N_COUNTERS + 2 = 514 cycles from the clear
request. The same clear runs after reset, so all counters start at zero.

### Why evicting from the RAT is safe

A row leaves the RAT only after its counter group was saturated at N_PR. The
sketch never lowers a counter. So when an evicted row comes back, its estimate
is N_PR and it is refreshed immediately. Such a refresh may be unnecessary, but
it is never late. The capacity-miss count measures exactly these unnecessary
refreshes, and the early refresh clears them in bulk.

## Organisation and storage

```
comet_top                          one DDR4 channel
├── reset_timer                    periodic counter reset, tREFW/k
└── per rank (2)
    ├── early_refresh_ctrl         early refresh: clear, hold, 8192 REFs
    └── per bank (16): bank_tracker
        ├── counter_table          N_HASH x N_COUNTERS saturating counters,
        │   │                      shift-and-mask hashes
        │   ├── min_comparator     Min_Ctr and minimum mask
        │   └── scratchpad_sram    one per hash row, 512 x 5 bit
        ├── recent_aggressor_table 128 x (17-bit tag CAM + 5-bit counter)
        │   └── lfsr               random eviction choice
        └── miss_history           256-bit circular history + count
```

| per bank | bits | channel (32 banks) |
|---|---|---|
| counter table, 4 x 512 x 5 | 10,240 | 40.0 KB |
| RAT, 128 x (17 + 5) + 128 valid | 2,944 | 11.0 KB + valid bits |
| miss history | 256 | 1 KB |

At N_RH = 125, these counter-table and RAT sizes agree with the storage the
CoMeT authors report for a dual-rank channel (40 KB and 11 KB).

## Interface of `comet_top`

All signals are synchronous to `clk`. `rst_n` is an active-low asynchronous
reset. Bank b of rank r is index `r*N_BANKS + b` in the per-bank arrays.

| port | dir | meaning |
|---|---|---|
| `act_valid, act_rank, act_bank, act_row` | in | an ACT the scheduler wants to issue |
| `act_ready` | out | the addressed bank can take it this cycle; the ACT counts when both are high |
| `pr_valid[i], pr_row[i]` | out | bank i asks for row `pr_row[i]` to be refreshed (ACT + PRE); held until taken |
| `pr_ready[i]` | in | the scheduler takes the victim |
| `ref_valid[r]` / `ref_ready[r]` | out / in | one REF command of an early refresh of rank r |
| `early_refresh_active[r]` | out | rank r is being early-refreshed |
| `periodic_reset` | out | one-cycle pulse when all counters are reset |
| `events[i]` | out | one-cycle event flags of bank i (see `comet_pkg::tracker_events_t`) |

Throughput and latency:
- One ACT per cycle can be presented to the channel.
- Each bank takes one ACT per two cycles.
- The first victim is offered two cycles after the ACT that triggered it.
- The scheduler must give victims priority. Bank i's `act_ready` stays low
  until they are taken.

The 2-cycle lookup fits well within DDR4's ACT-to-ACT spacing. At the assumed
1.2 GHz clock, tRRD = 2.5 ns is 3 cycles and tRC is about 55 cycles.

## Parameters

The defaults live in `comet_pkg`. `comet_top` exposes:

| parameter | default | note |
|---|---|---|
| `N_RANKS`, `N_BANKS` | 2, 16 | DDR4, 4 bank groups x 4 banks |
| `ROW_W` | 17 | 128K rows per bank |
| `N_RH` | 125 | RowHammer threshold; N_PR = N_RH/(K_RESET+1) |
| `K_RESET` | 3 | reset period tREFW/K_RESET |
| `N_HASH`, `N_COUNTERS` | 4, 512 | counter table shape; `N_COUNTERS` must be a power of two |
| `N_RAT` | 128 | RAT entries |
| `HIST_LEN`, `EPRT_PCT` | 256, 25 | miss history length; early refresh when capacity misses > EPRT_PCT % of it |
| `N_REF` | 8192 | REF commands per early refresh (tREFW/tREFI) |
| `RESET_PERIOD` | 25,610,244 | cycles; 64 ms / K_RESET at 833 ps, follows K_RESET unless set |

Other evaluated thresholds need only `N_RH`. The counter width follows from it:

| N_RH | N_PR | counter bits |
|---|---|---|
| 1000 | 250 | 8 |
| 500 | 125 | 7 |
| 250 | 62 | 6 |

## Choices made in this RTL

These points are not fixed by the published description of CoMeT and were
chosen here.

- **Hash functions.** CoMeT asks only for shift-and-mask hashes. Here
  H_i(X) = (X >> S_i) mod N_COUNTERS. The shifts S_i are spread evenly from 0
  to ROW_W - log2(N_COUNTERS), giving 0, 2, 5 and 8 for the default. Different
  shifts change how often rows collide, which changes the number of needless
  refreshes, but not safety.
- **Threshold test.** The refresh is triggered when the count *including*
  the current activation reaches N_PR (Num_ACT + 1 >= N_PR). So the N_PR-th
  activation of a row is the one that triggers.
- **Miss history.** Only misses that allocate a RAT entry are recorded. The
  history is emptied by every clear. The trigger is "count > EPRT", so a
  threshold of 0 % means "on the first capacity miss", and one of 100 % never
  triggers.
- **RAT replacement.** Free entries are used first. When the table is full,
  the victim entry comes from a 16-bit LFSR.
- **Neighbours.** Victims are X-1 and X+1 as row IDs. A victim outside the bank
  (for row 0 or the last row) is skipped. Any remapping of logical to physical
  rows inside the DRAM is ignored.
- **Counting.** The refresh ACTs themselves are not counted.
- **Clock and refresh.** A 1.2 GHz controller clock turns tREFW/3 into cycles.
  8192 REFs stand for tREFW/tREFI.
- **Clearing.** The counter table is cleared by a sweep of its SRAMs. An early
  refresh clears the counters when it starts and holds the rank until its last
  REF has been accepted.
- **Timing.** The two-cycle read-modify-write and the handshakes are this
  design's own.
- **Memories.** The counter-table rows are written as plain arrays with a
  registered read, in place of an SRAM macro. CoMeT places the RAT counters and
  the 256-bit miss history in scratchpad SRAM too. Here they are register
  arrays of the same size. The RAT counter is read in the cycle after the tag
  match from a plain array. The history must hand back its oldest bit at every
  push, and a circular buffer in registers does that simply. A synthesis flow
  can map either array to SRAM without changing the behaviour.

Not included: the memory controller and its FR-FCFS scheduler, which issue the
ACT, PRE and REF commands, and the DRAM itself. They appear in the testbenches
only as a behavioural scheduler.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it checks |
|---|---|
| `tb_min_comparator` | minimum and tie mask on random groups |
| `tb_scratchpad_sram` | read latency, read data hold, random traffic |
| `tb_lfsr` | seed, step function, full 65535 period |
| `tb_miss_history` | capacity count over a sliding window, trigger, clear (16- and 256-entry) |
| `tb_counter_table` | sketch model with colliding rows and its own hash reference: group values, Min_Ctr, conservative update, saturation, 512-cycle clear |
| `tb_recent_aggressor_table` | tag search, counters, free-first allocation, eviction flag, spread of random evictions |
| `tb_bank_tracker` | full reference model of one bank (small RAT and history); see below |
| `tb_early_refresh_ctrl` | clear pulse, hold, exact REF count under back-pressure, re-arming |
| `tb_reset_timer` | period and pulse width |
| `tb_comet_top` | reduced channel under mixed hammering, with each mechanism counted |
| `tb_comet_full` | the channel at its default size |
| `tb_comet_attacks` | traditional and targeted attacks at the default size, with a security monitor |
| `tb_comet_nrh` | the other thresholds, N_RH = 250 to 4000, with counter widths derived from N_RH |
| `tb_comet_sweep` | corners of the design space: hash count, counters per hash, RAT size, history length and threshold, reset period |
| `tb_comet_fp` | false positives of the sketch against the number of distinct rows, at the default size |

`tb_bank_tracker` compares every step with a reference model. It checks:
- every refresh decision;
- the victims requested, including the edge rows;
- RAT allocation, eviction and capacity-miss classification;
- the early-refresh request;
- the 2-cycle turnaround and the 514-cycle clear.

`tb_comet_top` checks CoMeT's safety property independently of the design: no
row is ever activated more than N_PR times since its neighbours were refreshed,
its rank was early-refreshed or the counters were reset. It also requires each
of these to happen at least once:
- conservative update, RAT hit and RAT increment;
- preventive refresh;
- RAT allocation, eviction and capacity miss;
- early refresh and periodic reset;
- ACT stall, rank hold and edge-row refresh.

`tb_comet_full` runs the default configuration through these steps:
1. A single row must trigger its refresh on exactly its 31st activation.
2. 200 aggressors in one bank overflow the 128-entry RAT. This must lead to an
   early refresh of exactly 8192 REFs in that rank only.
3. After the early refresh, a row again needs 31 activations before it is
   refreshed.

`tb_comet_attacks` drives the channel at one ACT every 24 cycles, which is 20 ns
at the assumed clock. A monitor counts, for each row, the ACTs since its
neighbours were last refreshed. That count may never exceed 31. The test has two
phases:
1. A traditional double-sided attack hammers both neighbours of one victim row
   in every one of the 32 banks, 100 ACTs per aggressor. Each bank must see at
   least 12 victim refreshes, and no early refresh may occur.
2. A targeted attack hammers 160 rows in each of four banks of rank 1,
   round-robin. That is more rows than the RAT holds, so evicted rows keep
   returning as capacity misses. Rank 1 must receive an early refresh of exactly
   8192 REFs. Benign random ACTs to rank 0 must go on being served meanwhile,
   and rank 0 must get no early refresh. In the reference run the early
   refresh arrives after 33 rounds.

`tb_comet_fp` spreads 10,000 ACTs at random over U distinct rows of one bank,
for U = 10, 100, 250, 1,000 and 10,000. It counts a refresh as a false positive
when its row has had fewer than 31 ACTs since its last refresh. With 10 or 100
rows there are none, and no row ever reaches 31 ACTs unrefreshed. The sketch
alone overestimates so little that 1,000 and 10,000 rows trigger no refresh.
The 250-row case is the interesting one. About 250 rows reach the threshold,
which overflows the 128-entry RAT. An evicted row is then refreshed again on its
next ACT, because its CT counters are saturated. That conservative refresh is
what the test reports as a false positive, and it also leads to an early refresh
of the rank.

`tb_comet_nrh` builds five channels with N_RH = 250, 500, 1000, 2000 and 4000.
Each is cut to one rank of two banks, and the tables keep their default sizes.
In each channel, a hammered row must be refreshed on exactly its N_PR-th ACT
(62, 125, 250, 500 or 1000) and again on exactly its 2 N_PR-th. The first count
comes from the counter table and the second from the RAT. Each channel then runs
a double-sided attack, one ACT every 24 cycles, with 3 N_PR ACTs on each of the
two aggressors. Every channel must request exactly 12 victim refreshes.

`tb_comet_sweep` builds eight channels, each with one parameter moved to the
edge of its evaluated range:
- 1 x 128 and 16 x 2048 counter tables;
- 32- and 512-entry RATs;
- a 64-entry history with a 0 % threshold, and a 512-entry history with 100 %;
- k = 1 and k = 5.

Each channel checks the exact refresh points of a single row. It then overflows
its RAT with N_RAT + N_RAT/4 + 8 aggressors. The early refresh has to come after
exactly one capacity miss at 0 %, and never at 100 %, since the count cannot
exceed the whole history. In every other channel it comes after EPRT + 1 = 65
capacity misses.

The periodic reset at the default period (25.6 M cycles) is checked only in
the reduced tests.

Simulating with Verilator 5 (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl rtl/comet_pkg.sv tb/tb_comet_top.sv \
          --top-module tb_comet_top -o sim && ./obj_dir/sim
```

Replace `tb_comet_top` with any testbench name. `tb_comet_full` and
`tb_comet_fp` each build and run in well under a minute; `tb_comet_attacks`
runs for about a minute.

Lint with `verilator --lint-only -Wall -Irtl rtl/comet_pkg.sv rtl/comet_top.sv`.
The warnings left are:
- unused outputs of the counter table and the history counter, which the
  tracker does not need;
- a note that `rst_n` is used both as an asynchronous reset and in the
  `disable iff` of assertions.
