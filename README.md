# SQUASH memory scheduler: RTL for a QoS-aware DRAM controller shared by CPUs and accelerators

A system-on-chip often has general-purpose CPU cores and fixed-function
hardware accelerators (HWAs) sharing one DRAM system. Examples of HWAs are
image filters, feature detectors and matchers. The two kinds of requestor
want different things from the memory controller:

- **CPU applications** want low latency all the time. Every cycle a core waits
  for memory is lost performance.
- **An accelerator** only needs its requests served *by a deadline*. It has to
  move a known number of 64-byte lines in every fixed-length period (one video
  frame, one tile row). Serving it earlier than needed gains nothing.

A controller that always puts accelerators first meets their deadlines but
starves the CPUs. One that always puts CPUs first misses deadlines. SQUASH
sits between the two:

- It tracks each accelerator's progress against the clock and ranks the
  accelerator high only while it is behind.
- It ranks the CPUs by how memory-intensive they are, so light, latency-bound
  applications go first.
- It handles accelerators with very short periods (microseconds) with a
  precomputed worst-case "urgent window" at the end of each period.

This repository holds synthesizable SystemVerilog for the scheduling side of
such a controller, plus self-checking testbenches:

- the centralized meta-controller that computes the priorities;
- the per-channel request buffers and schedulers;
- the request router;
- the software-visible configuration registers;
- a hardware calculator for the short-period urgent windows.

The DRAM devices and PHY are not modelled as hardware. Each channel keeps the
bank state and DDR3 timing itself and reports every request it issues, with
its ACTIVATE, column-command and data-done times, on an output port.

## Block structure

```
                 cfg_we/addr/wdata ──► squash_cfg_regs ──start──► upl_calculator
                                          │   ▲ Priority-Cyc results   │
                                          │   └────────────────────────┘
                   Total-Req, Total-Cyc, Priority-Cyc, SDP bit, ET%, CF%
                                          ▼
 cpu_instr_ret ─────────────────► squash_meta_controller
                                   ├─ SchedulingUnit / SwitchingUnit timers
                                   ├─ hwa_qos_tracker × N_HWA ─ pb_controller
                                   └─ tcm_classifier (MPKI, clusters, shuffle)
                                          │ key[N_SRC] (registered, broadcast)
                                          ▼
 src_valid/req ─► request_router ─► channel_scheduler × N_CH ─► cmd_* (to DRAM PHY)
 src_ready   ◄─   (addr decode,       (CPU half + HWA half     ─► cpl_* (completions,
                   RR per half)        of the request buffer)        also counted by
                                                                      the meta-controller)
```

All blocks run on one clock, taken to be the 2.66 GHz CPU clock. DDR3-1333
timing is expressed in that clock: one DRAM tCK of 1.5 ns is 4 cycles.

| File | Role |
|------|------|
| `rtl/squash_pkg.sv` | Key type, groups, request/command/completion structs, DDR3 timing constants |
| `rtl/squash_top.sv` | Whole subsystem |
| `rtl/squash_meta_controller.sv` | Timers, trackers, classifier, key broadcast |
| `rtl/hwa_qos_tracker.sv` | Per-accelerator progress counters, urgency, group choice |
| `rtl/pb_controller.sv` | Per-accelerator switching probability Pb and its random draw |
| `rtl/upl_calculator.sv` | Urgent-window start (Priority-Cyc) for short-period accelerators |
| `rtl/seq_divider.sv` | Sequential restoring divider (helper) |
| `rtl/tcm_classifier.sv` | CPU intensity ranking and clustering |
| `rtl/squash_cfg_regs.sv` | Register file |
| `rtl/request_router.sv` | Address decode, per-channel arbitration |
| `rtl/rr_arbiter.sv` | Round-robin arbiter (helper) |
| `rtl/channel_scheduler.sv` | Request buffer, selection, bank timing, completions of one channel |

## The priority key

Everything the meta-controller decides reaches the channels as one **priority
key per requestor**. Requestors are numbered with CPU cores first
(0..N_CPU-1), then accelerators. A key (`prio_key_t`) is a 3-bit group
followed by a 32-bit tie-break, and the numerically smaller key wins. The six
groups, from highest to lowest priority:

| Group | Who | Tie-break (smaller first) |
|-------|-----|---------------------------|
| 1 `GRP_SDP_URGENT` | short-deadline-period (SDP) accelerators inside their urgent window | period length: shorter period first |
| 2 `GRP_LDP_URGENT` | long-deadline-period (LDP) accelerators that are behind | cycles left in the period: earliest deadline first |
| 3 `GRP_CPU_NONINT` | CPU cores in the memory-non-intensive cluster | intensity rank: least intensive first |
| 4 `GRP_LDP_NONURGENT` | LDP accelerators on track, second or later on-track spell of the period | cycles left in the period |
| 5 `GRP_CPU_INT` | CPU cores in the memory-intensive cluster | shuffled rank |
| 6 `GRP_HWA_LOW` | SDP accelerators outside their window; LDP accelerators on their first on-track spell; LDP accelerators whose Pb draw put them below group 5 | cycles left in the period |

A disabled accelerator slot (Total-Cyc = 0) reports the lowest possible key.

The six-group order and the rule for what goes in each group come from the
SQUASH proposal. Encoding the within-group order as numbers is this design's
own choice.

## Accelerator progress: when is an LDP accelerator urgent?

Each accelerator slot has an `hwa_qos_tracker` with four counters:

- **Total-Req**: requests per period, set by software.
- **Total-Cyc**: period length in cycles, set by software.
- **Curr-Req**: requests completed so far in this period.
- **Curr-Cyc**: cycles elapsed in this period.

Curr-Cyc counts every cycle. When it reaches Total-Cyc a new period starts and
both counters clear. On the last cycle of a period the tracker pulses
`period_end`, with `deadline_met` showing whether Curr-Req reached Total-Req.
Counting these pulses gives the deadline-met ratio per accelerator.
Completions carry no period number. A request of a late period that completes
after the boundary therefore counts toward the next period. A dropped frame's
leftovers are the requestor's business.

For a long-period accelerator, urgency is re-evaluated at every
**SchedulingUnit** tick (1000 cycles). With

    CurrentProgress  = Curr-Req / Total-Req
    ExpectedProgress = Curr-Cyc / Total-Cyc

the accelerator is **urgent** if either of these holds:

- CurrentProgress ≤ ExpectedProgress (it is not ahead of a uniform schedule);
- ExpectedProgress > EmergentThreshold (late in the period, default 80 %).

It is non-urgent otherwise. The fractions are never divided out. The tracker
compares `Curr-Req·Total-Cyc` against `Curr-Cyc·Total-Req` as 64-bit products,
and the threshold test is `100·Curr-Cyc > ET%·Total-Cyc`.

Every period starts urgent, because at cycle 0 both progress values are 0 and
therefore equal. The result is that the accelerator gets bandwidth in bursts
just large enough to stay ahead, and hands the rest to the CPUs.

**Group 4 versus group 6.** A non-urgent LDP accelerator is put at the very
bottom (group 6) the *first* time in a period it becomes non-urgent. Only if it
falls behind again and recovers does it sit in group 4, above the intensive
CPUs. The reasoning: an accelerator that got ahead once and never fell back
does not need to beat anyone.

A worked example with T = 4 cycles, a 16T period and 8 requests is replayed
cycle by cycle in `tb_hwa_qos_tracker`:

- The accelerator is urgent for the first 4T and gets 4 requests done.
- At the 4T evaluation its progress is 0.5 against an expected 0.25, so it
  drops to group 6.
- At 8T progress equals expectation, so it is urgent again.

**Short-period accelerators** do not use progress. An SDP tracker is in group 1
from `Curr-Cyc ≥ Priority-Cyc` to the end of the period, and in group 6 before
that.

## Probabilistic switching (Pb)

Group 4 could still let a steady accelerator push memory-intensive CPUs back
all period. To prevent this, every LDP accelerator has a probability `Pb`,
held by `pb_controller` in whole percent. Pb starts at 0 and is updated at
every **SwitchingUnit** tick (500 cycles):

- +1 % if CurrentProgress > ExpectedProgress;
- −5 % if CurrentProgress < ExpectedProgress;
- unchanged if they are equal.

Pb saturates at 0 and 100. The asymmetry backs off quickly when the
accelerator starts to lag.

On the same tick a random number in 0..99 is drawn. It comes from a 16-bit
Fibonacci LFSR (x¹⁶+x¹⁴+x¹³+x¹¹+1, stepping every cycle) scaled as
`(lfsr·100)>>16`. If the number is below the new Pb, `swap` is set until the
next tick. While `swap` is set, a group-4 accelerator is placed in group 6,
below the intensive CPUs. The probability rule itself is from the proposal.
Drawing once per SwitchingUnit, and using an LFSR, are choices of this design.

## Short-period accelerators: the urgent window

For an accelerator whose period is only microseconds long, 1000-cycle progress
sampling is too coarse. SQUASH instead assumes the worst case: every request
is a row conflict in the same bank, so each costs one tRC. The accelerator is
then given top priority for the last part of each period:

    UPL(x)         = tRC · Total-Req(x)                    urgent period length
    N_i            = ceil(UPL(x) / Period(i))              for each SDP i with a shorter period
    UPL'(x)        = UPL(x) + Σ_i N_i · UPL(i)             room for higher-priority windows
    Priority-Cyc(x) = Period(x) − (UPL'(x) + alpha)        floored at 0

- `alpha` is a margin for requests already in flight.
- Among SDP accelerators a shorter period wins, with equal periods broken by
  lower index.
- Both `N_i` and the added length use the *base* UPL of the other
  accelerator. The formula does not say whether the extended value is meant;
  using the base value is this design's reading.

`upl_calculator` does this in hardware, one (x, i) pair at a time, with a
sequential ceiling divider. Software starts it by writing register 0x84.
Alternatively, software can write Priority-Cyc directly.

**Example** (used by the end-to-end test): a HES-style detector with 15
requests per 5,320-cycle period (2 µs at 2.66 GHz), with tRC = 132 and
alpha = 200. Then UPL = 1,980 and Priority-Cyc = 5,320 − 2,180 = 3,140.

## CPU clustering

`tcm_classifier` sorts the cores the way thread-cluster memory scheduling
does. Over each **quantum** (1,000,000 cycles) it counts, per core:

- requests sent (treated as last-level-cache misses);
- instructions retired (`cpu_instr_ret`, up to 3 per cycle);
- requests completed (bandwidth used).

At the end of a quantum it does the following:

1. Compute `MPKI = misses·1000 / instructions` with one 48-bit sequential
   division per core.
2. Sort the cores by MPKI, breaking ties by index.
3. Walk the sorted list and keep cores in the **non-intensive** cluster while
   their cumulative bandwidth is within **ClusterFactor** (default 20 %) of the
   total. The rest are **intensive**.

Non-intensive cores are keyed by their rank. Intensive cores are keyed by a
rank that is *rotated* by one place every **shuffle interval** (800 cycles), so
no intensive core is always last. TCM's own shuffle is more elaborate; the
rotation is this design's simplification.

Until the first quantum ends, all cores are non-intensive and ranked by index.
The new classification appears a few hundred cycles after the quantum
boundary, once the divisions finish.

## The channel scheduler

Each channel has a `channel_scheduler`. Its request buffer is split:

- **CPU part**: `CPU_ENTRIES` = 75;
- **accelerator part**: `HWA_ENTRIES` = 75.

This is 300 entries over two channels, half for each kind of requestor, so
neither kind can fill the buffer. Each part has its own enqueue port, which is
ready while the part has a free entry. A new request takes the lowest free
entry.

**Selection.** Every cycle the scheduler may issue one request whose bank is
ready (`time_reached(now, b_ready[bank])`), provided the completion queue has
room. Among all such entries it picks:

1. the smallest key of the entry's requestor, using the keys of that cycle;
2. then a row-buffer hit over a miss;
3. then the oldest entry.

The priority-then-row-hit-then-age order is the usual way application-aware
schedulers apply a ranking. The source only says the controllers schedule by
the broadcast priority.

**Timing model.** Each bank keeps its open row, the time of its last ACTIVATE
and column command, and when it can take the next request. At issue the
scheduler computes the command times:

- **row hit**: column command now;
- **row closed**: ACTIVATE at max(now, last ACT + tRC), column after tRCD;
- **row conflict**: precharge at max(now, ACT + tRAS, column + tRTP), then
  ACTIVATE after tRP (and at least tRC after the last ACT), then column after
  tRCD.

Data arrives tCL after the column command, on a single shared data bus that
carries one 16-cycle burst at a time. Bursts and completions are therefore in
issue order. The defaults in cycles are tRCD = tRP = tCL = 36, burst = 16,
tRAS = 96, tRC = 132 and tRTP = 20.

The policy is open-page. There is no refresh, and writes are timed like reads.

The issued request and its times leave on `cmd_valid/cmd/cmd_src`. A
completion (`cpl_valid/cpl`, one per channel per cycle) is released when its
data burst ends, through a 16-entry queue. Assertions check three things:

- an issued burst never starts before the data bus is free;
- the completion queue is never pushed when full;
- every enqueued request names a valid requestor.

## Router and address map

`request_router` decodes each address from the least significant bit as:

| Field | Width |
|-------|-------|
| line offset | 6 bits (64 B) |
| channel | log2(N_CH) bits |
| bank | 3 bits |
| column | 7 bits |
| row | 15 bits |

Per channel there is one round-robin arbiter among the CPUs and one among the
accelerators that target it, feeding the two enqueue ports. `src_ready` is
combinational. A requestor holds `src_valid` and `src_req` until it sees
`src_ready`. Completions carry the requestor number and the request's 8-bit
tag.

This address map and the handshake are this design's choices.

## Software interface

Registers are 32 bits. Writes take effect on the next cycle, and reads are
combinational.

| Address | Register | Reset |
|---------|----------|-------|
| h·8 + 0 | Total-Req of accelerator h | 0 |
| h·8 + 1 | Total-Cyc of accelerator h (0 = slot disabled) | 0 |
| h·8 + 2 | Priority-Cyc of accelerator h | 0 |
| h·8 + 3 | bit 0: accelerator h is short-deadline-period | 0 |
| 0x80 | EmergentThreshold, percent (clamped to 100) | 80 |
| 0x81 | ClusterFactor, percent (clamped to 100) | 20 |
| 0x82 | tRC used by the UPL calculation | 132 |
| 0x83 | alpha | 0 |
| 0x84 | write: start the UPL calculation (`upl_busy` while running) | – |

To program the unit:

1. Write Total-Req, Total-Cyc and the SDP bit of every accelerator.
2. Write 0x84.
3. Wait for `upl_busy` to fall, plus one cycle. The calculator's results are
   then loaded into the Priority-Cyc of the SDP slots.

Which accelerators count as short-deadline-period is software's decision,
made once per accelerator from its period. The scheme classifies them
statically by period length but gives no threshold. In the evaluated
configurations the 2 µs and 0.8–9.6 µs accelerators are SDP, and those with
periods of 23.6 µs and up are LDP.

An accelerator whose period or size changes from period to period has its
registers rewritten by software at each period start. A tracker's period
counter runs freely from reset. Software has to align its rewrites to the
tracker's `hwa_period_end`, or hold the accelerator until it is aligned.

## Parameters

Top-level defaults follow the evaluated system:

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `N_CPU` | 8 | CPU cores |
| `N_HWA` | 4 | Accelerator slots |
| `N_CH` | 2 | DRAM channels (power of two) |
| `BUF_ENTRIES` | 300 | Request-buffer entries in total, split evenly by channel and by CPU/HWA |
| `N_BANK` | 8 | Banks per channel (1 rank) |
| `SCHED_UNIT` | 1000 | Cycles between LDP urgency evaluations |
| `SWITCH_UNIT` | 500 | Cycles between Pb updates |
| `QUANTUM` | 1,000,000 | CPU classification interval |
| `SHUFFLE` | 800 | Intensive-cluster shuffle interval |
| `INSTR_W` | 2 | Width of the per-core retired-instruction count |

Requestor numbers are 5 bits wide (`SRC_W`), which allows up to 32 requestors.
All counters are 32 bits wide. At 2.66 GHz that covers periods of up to 1.6 s,
far beyond a 33 ms video frame of 88 M cycles.

## What follows the source and what does not

**Taken from the SQUASH scheme:**

- the six groups and their order;
- Dist-Prio urgency with EmergentThreshold 0.8, evaluated every 1000 cycles;
- every period starting urgent;
- group 6 for the first on-track spell;
- Pb with +1 %/−5 % steps every 500 cycles, and the rule that a Pb draw lets
  intensive CPUs outrank an LDP accelerator;
- UPL = tRC·requests and its extension by higher-priority SDP accelerators;
- Priority-Cyc placement at the end of the period;
- clustering with ClusterFactor 0.2, a 1 M-cycle quantum and an 800-cycle
  shuffle;
- 300 buffer entries split evenly between CPUs and accelerators;
- 2 channels, 8 banks, DDR3-1333 9-9-9, 64-byte requests;
- 8 cores and 4 accelerators;
- 4-byte counters.

**Choices of this design** (the source is silent or leaves room):

- **Order of the first non-urgent spell.** The source's two-CPU example shows
  the accelerator still served ahead of the intensive core in its first
  on-track spell. Its policy text puts that spell in group 6 instead. This
  design follows the policy text.
- **Completion reporting.** Completions reach the meta-controller directly from
  each channel every cycle. The source has the controllers send counter values
  every SchedulingUnit. Urgency is still only evaluated at SchedulingUnit
  ticks, so the decisions see the same counts.
- **UPL computed in hardware.** The source has software supply Priority-Cyc.
  Here the calculation is done in hardware, with software able to override it.
- **Details of the policies:**
  - base rather than extended UPL inside the extension sum;
  - a random draw once per SwitchingUnit;
  - LFSR randomness;
  - shuffle by rotation;
  - intensity measured as requests sent per kilo-instruction.
- **The memory-controller plumbing:**
  - address map;
  - handshakes;
  - register map;
  - priority, then row hit, then age selection;
  - open-page, refresh-free timing;
  - one command per cycle per channel;
  - in-order data bus;
  - keys registered once, so one cycle old at the channels.
- **DDR3 timing values beyond the 9-9-9 triple:** tRAS = 36 ns, tRC = 49.5 ns,
  tRTP = 7.5 ns and a burst of 8 are standard DDR3-1333 figures, not from the
  source.
- **The accelerators' limit of 16 outstanding requests** is enforced by the
  traffic models in the testbenches, not by the controller.

**Not built:** a completion-count input from a shared cache, for accelerators
whose requests hit in it, and the CPU cores, caches, the accelerators and the GPU themselves,
and the DRAM devices and PHY. Configurations with 4 channels, more than 8 cores
or more than 4 deadline-driven requestors (the GPU systems, the 24-core sweep)
need the parameters raised. Both the 4-channel, 5-requestor case and the
24-core, 8-accelerator case are simulated (see Verification).

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against an independent reference, runs a watchdog, and ends by printing
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|-----------|----------------|
| `tb_pb_controller` | Pb steps and saturation against a model; never swaps at Pb = 0, always at 100, about half the time at 50 |
| `tb_hwa_qos_tracker` | Key every cycle against a cycle-level reference model with random completions (LDP and SDP); replay of the 16T example; Pb = 100 moves group 4 to group 6 |
| `tb_upl_calculator` | The 16-request, 2000 ns-period example (urgent from 2000 − 800 − alpha ns); random SDP/LDP mixes against the extension formula in 64-bit arithmetic |
| `tb_tcm_classifier` | Clusters and ranks against an independently sorted model; shuffle rotation |
| `tb_squash_cfg_regs` | Register map, reset values, clamping, start pulse, UPL load |
| `tb_request_router` | Every accepted request reaches the right channel and half exactly once, with the right address fields; round-robin bounds the wait to N−1 grants |
| `tb_channel_scheduler` | With an 8 + 8-entry buffer: selection against a reference (key, row hit, age), DDR3 timing and row-buffer outcome of every command, completion at the exact done time, CPU half filling without blocking accelerators, first-request latency |
| `tb_squash_meta_controller` | Timers, group transitions, CPU clustering and key broadcast with small timer values |
| `tb_squash_top` | End-to-end run at full default size (see below) |
| `tb_squash_config_b` | Second full-size workload with two short-period and two variable-period accelerators (see below) |
| `tb_squash_gpu_system` | Four channels and five deadline-driven requestors (Config-A-like accelerators plus a GPU), parameters overridden |
| `tb_squash_core_sweep` | 24 cores and eight accelerators (32 requestors, three of them short-period), parameters overridden |

**The end-to-end run.** `tb_squash_top` runs the top module with every
parameter at its default. Its traffic is:

- 8 CPU models: cores 0–3 heavy, 4–7 light;
- 4 accelerator models with at most 16 requests outstanding:
  - two image-filter-like LDP accelerators (211 requests per 100,000 cycles);
  - one matcher-like LDP accelerator (3,068 requests per 62,776 cycles);
  - one HES-like SDP accelerator (15 requests per 5,320 cycles, Priority-Cyc
    computed by the UPL calculator).

It runs for 1,060,000 cycles, which covers one full classification quantum, in
about one minute. It counts every mechanism and fails any that never happened:

- SchedulingUnit and SwitchingUnit ticks;
- urgent LDP accelerators, group 6 first spells, group 4, Pb swaps;
- SDP windows;
- intensive and non-intensive CPUs;
- row hits, closed rows and row conflicts;
- buffer back-pressure;
- two completions in one cycle;
- deadlines met.

It also checks that the light cores end up in the non-intensive cluster.
In this run:

- the two image-filter accelerators meet all their deadlines;
- the SDP accelerator misses 3 of 203 periods;
- the matcher misses 1 of 17 periods.

The misses fall at the end, where the traffic models stop issuing.

**The variable-period run.** `tb_squash_config_b` is a second full-size
workload. It runs 800,000 cycles in about 10 seconds, with these accelerators:

- a matcher (LDP, 3,070 requests per 94,164 cycles);
- the HES-like detector (SDP, 15 per 5,320);
- a resizer (LDP) whose period alternates between 123,690 and 247,380 cycles
  (1,504 and 4,839 requests);
- a face detector (SDP) alternating between 2,128 and 25,536 cycles (20 and
  279 requests).

Acting as system software, the testbench rewrites Total-Req and Total-Cyc at
each period end of the variable accelerators. After each change of the face
detector it reruns the UPL calculation. This flips which short-period
accelerator ranks first, and the two Priority-Cyc values change with it:

| Face-detector period | HES Priority-Cyc | Face-detector Priority-Cyc |
|----------------------|------------------|----------------------------|
| 2,128 | 500 | 0 |
| 25,536 | 3,140 | 0 (its worst-case window is longer than its period) |

The testbench checks every result against the formula. It also checks that,
whenever both short-period accelerators are urgent, the one with the shorter
current period holds the smaller key. Every deadline is met while traffic
runs.

**The GPU system.** `tb_squash_gpu_system` overrides `N_CH = 4` and
`N_HWA = 5`. The extra slot is a GPU treated as a long-period requestor, with
its 33 ms frame shortened to 200,000 cycles and 4,000 requests. The run
checks the same things as `tb_squash_top`, and also that all four channels
issue commands. All deadlines are met while traffic runs.

**The largest system.** `tb_squash_core_sweep` overrides `N_CPU = 24` and
`N_HWA = 8`, which uses all 32 requestor numbers. The eight accelerators are:

- two image filters;
- matchers of two sizes;
- Hessian detectors of 2 µs and 8 µs;
- the resizer;
- the face detector.

So the UPL calculator orders three short-period accelerators at once. The
resulting Priority-Cyc values are 3,140, 15,404 and 0 cycles. With 24 cores
the classification takes about 1,250 cycles after the quantum boundary.

The full image-filter period (33 ms, 88 M cycles) is too long to simulate
here. Both runs use accelerators at the source's bandwidths, but with periods
shortened where needed.

Each testbench was also run against a deliberately broken copy of its block,
and each one failed.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/squash_pkg.sv tb/tb_squash_top.sv -y rtl -y tb \
    --top-module tb_squash_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Swap `tb_squash_top` for any other testbench name. The package file is passed
first because every module imports it.
