# DPQ: a Dynamic Priority Queue arbiter for a shared DDR2 SDRAM

Several cores share one off-chip SDRAM. Each core runs a hard real-time task,
and its worst-case execution time (WCET) has to be bounded without knowing what
the other cores do. Two things make this hard. An SDRAM access takes very
different times depending on open rows and refresh. On top of that, the arbiter
may make a core wait behind others for a long time. With fixed priorities
(priority-based budget scheduling), the lowest-priority core can wait behind
every other core over and over. Its bound then grows with its rank.

The Dynamic Priority Queue (DPQ) gives every master the same kind of guarantee,
whatever its bandwidth:

* **Budgets.** Each master owns a fixed number of accesses (its *budget*) per
  *replenishment period* Rp. The budget is set at design time. When the budget
  is spent, the master waits for the next period, even if the memory is idle.
  At each period boundary every budget is restored, and what is left over is
  thrown away.
* **A queue instead of priorities.** The masters stand in a queue, and a master's
  priority is its place in it. The arbiter takes the first master, counting from
  the head, that both requests and has budget left. That master moves to the
  tail. Everyone behind it moves up one place, and everyone ahead of it stays
  put.

Because a served master goes behind everyone who is waiting, a master that
requests and has budget can be passed **at most once by each other master**.
Its wait is at most n-1 accesses, where n is the number of masters. No master
can be starved by a higher-ranked one, since nobody keeps a high rank.

This repository holds synthesizable SystemVerilog for the arbiter and for the
memory path around it, as it was evaluated: six traffic generators stand in for
the cores. Bank-interleaved access splitting and a refresh circuit sit in front
of a DDR2 controller, which is vendor IP and is not included. The
fixed-priority budget scheduler that DPQ is measured against is included as a
drop-in alternative arbiter, so the comparison can be rerun. Self-checking
testbenches cover every block and run the two evaluation workloads end to end,
with both arbiters. They also apply the worst-case timing analysis that goes
with DPQ to every run.

## How the queue moves: a worked example

Three masters, budgets m1 = 5, m2 = 3, m3 = 2. Suppose the queue (head first) is
`m3 m2 m1` and m3 has used up its budget.

| step | requesting | queue before | budget left (m1,m2,m3) | granted | queue after |
|---|---|---|---|---|---|
| A | m3, m2, m1 | m3 m2 m1 | 4, 1, 0 | m2 (m3 has no budget) | m3 m1 m2 |
| B | m3, m1 | m3 m1 m2 | 3, 0, 0 | m1 (the only one eligible) | m3 m2 m1 |
| new period | | m3 m2 m1 | 5, 3, 2 | | |
| D | all | m3 m2 m1 | 5, 3, 2 | m3 (head) | m2 m1 m3 |

m3 was skipped while it had no budget. It kept its place at the head, so it won
first when the budgets came back. A master that is blocked, or simply idle, rises
in the queue whenever a master behind it is served. `tb_dpq_queue` replays this
sequence.

## Sizing the replenishment period

The period is long enough for every master to spend its whole budget under
worst-case alternating read/write traffic:

    Rp = ceil((WcRdCmdWd + WcWrCmdWd) / 2) * sum(Budget)      [cycles]

`WcRdCmdWd` and `WcWrCmdWd` are the worst-case times for which a read and a
write occupy the command path. If the period is shorter, some master cannot use
its budget under full load. If it is longer, the memory idles and every master
waits longer for its budget to be restored.

**Worst-case interference per access.** Put the master under analysis at the
tail at the start of a period, with everyone else requesting. Its first access
waits for one access of every other master that still has budget. So does its
second, and so on, until the others run out. For budgets (5,3,2), master m1 sees
(2, 2, 1, 0, 0) interfering accesses on its five accesses, m2 sees (2, 2, 1) and
m3 sees (2, 2). `tb_dpq_arbiter` builds exactly this situation for each master
and compares the count of interfering grants with this greedy computation.

## The memory path

```
 traffic_gen x6 --req--> dpq_interconnect --line--> bi_access_splitter --local_*--> DDR2 controller
        ^                  |        ^                   |      ^                    (outside)
        |  done/read line  |        | gnt               |      | idle / hold
        +------------------+   dpq_arbiter         refresh_ctrl --local_refresh_req-->
```

* **Access unit.** A master moves one 32-byte cache line per access, with one
  access outstanding. It waits for completion before its on-chip work goes on
  (an in-order core).
* **Bank interleaving (`bi_access_splitter`).** The controller does not
  interleave banks by itself. So each line is cut into four 64-bit chunks, one
  per bank. They are issued as four single-word requests with auto-precharge,
  bank 0 first, at local address `{line, bank}`. Every access therefore finds
  its banks closed. Its cost no longer depends on which rows earlier accesses
  left open. A write is *complete* when its last chunk has been taken by the
  controller. A read is complete when its four words are back. Reads return in
  order, so a small FIFO of master IDs tells whose line is arriving.
* **Grant handshake.** The arbiter's winner is combinational. A grant is
  committed (queue moved, budget charged) only on a cycle where the splitter is
  free and the refresh circuit is not holding the channel. One line is split at
  a time. Up to eight reads may still owe data.
* **Refresh at exact intervals (`refresh_ctrl`).** A controller that schedules
  refresh itself does so at tREFI plus or minus some cycles, depending on the
  traffic, which analysis cannot predict. Here a free-running timer counts
  tREFI. GUARD cycles before it expires, `hold` closes the channel so the
  controller drains. At expiry a refresh is requested as soon as the path is
  idle, and the channel stays closed until the controller acknowledges. The
  timer never stops, so refreshes are exactly tREFI apart. `late` reports an
  expiry that found the path busy (a too-short guard).

## Module map

| file | what it is |
|---|---|
| `rtl/dpq_pkg.sv` | line geometry (32 B line, 4 banks, 64-bit word, 24-bit word address), `line_req_t`, Eq. (1) as `rp_cycles`, the address-derived data pattern |
| `rtl/dpq_budget_counter.sv` | one master's budget counter and its non-zero comparator |
| `rtl/dpq_replenish_timer.sv` | free-running period counter, pulse on the last cycle of each period |
| `rtl/dpq_queue.sv` | the queue: N ID registers, priority search from the head, move-to-tail update |
| `rtl/dpq_arbiter.sv` | queue + N budget counters + timer; Rp computed from the parameters |
| `rtl/pbs_arbiter.sv` | the fixed-priority budget scheduler (PBS) baseline: same budgets, counters, timer and interface, but the winner is the requesting master with budget and the best fixed rank |
| `rtl/dpq_interconnect.sv` | request mux to the splitter, completion demux back to the masters |
| `rtl/bi_access_splitter.sv` | bank-interleaving splitter and read reassembly |
| `rtl/sync_fifo.sv` | helper FIFO (read IDs) |
| `rtl/refresh_ctrl.sv` | tREFI timer, channel hold, refresh request/acknowledge |
| `rtl/traffic_gen.sv` | one master: alternating random accesses with random on-chip time, latency and execution-time counters, read-data check |
| `rtl/dpq_platform.sv` | top: all of the above for six masters, with DPQ or (`USE_PBS = 1`) PBS as the arbiter; controller local interface as ports |

Reset is synchronous and active low everywhere. All module headers describe
ports and cycle timing.

## Parameters and where the numbers come from

| parameter (module) | default | origin |
|---|---|---|
| `N` | 6 | the evaluated system has six masters |
| `BUDGET` | 4 each | equal-density evaluation workload |
| `N_ACC`, `AVG_OCPT` (traffic) | 2048 accesses, mean 8 cycles | equal-density workload |
| line size, banks | 32 B, 4 | as in the evaluated system |
| `WC_RD_CMD_WD`, `WC_WR_CMD_WD` | 20, 20 | **chosen**: the original values were measured on an FPGA and are not published. 20 cycles is about the longest command time the system testbenches observe with their controller model under alternating traffic (19 to 21 cycles, since the model stalls at random; if a command runs a cycle longer, the period is slightly too short when every master spends its whole budget). This gives Rp = 20 * 24 = 480 cycles. |
| `TREFI` | 975 cycles | **chosen**: DDR2 tREFI of 7.8 us at 125 MHz |
| `REF_GUARD` | 24 cycles | **chosen** |
| local word 64 bit, address 24 bit, read FIFO 8 | | **chosen** (x16 DDR2, burst of 4) |
| `CNT_W` | 6 bits | **chosen**; holds budgets up to 63 |
| `USE_PBS` (platform) | 0 | **chosen**: DPQ unless the baseline is wanted |
| `PRIO` (PBS ranks) | 6, 5, 4, 3, 2, 1 for m1..m6 | the ranks of the evaluation: m6 highest, m1 lowest (1 = highest) |

The second evaluation workload, *incremental density*, is a different set of
parameter values for the same top. Budgets are 32, 16, 8, 4, 2, 1. Accesses
per master are 3200, 1600, 800, 400, 200, 100. Mean on-chip times are 8, 16, 32,
64, 128, 256 cycles. It gives Rp = 20 * 63 = 1260 cycles.

## Where this RTL departs from, or goes beyond, the original description

* **Taken as described:** the selection and move-to-tail rule, per-master
  counter plus comparator, budgets restored and leftovers discarded at each
  period, a non-work-conserving wait for ineligible masters, Eq. (1) for Rp, bank
  interleaving by splitting with auto-precharge, refresh with the channels
  closed shortly before tREFI, no access reordering (no read/write bundling),
  and alternating random traffic with the given means.
* **Own choices** (the description gives the function, not the circuit):
  * the grant handshake, the interconnect protocol and completion routing by ID;
  * chunk order and bank mapping, and the local-interface signal names (modelled
    on the vendor controller's local side);
  * the refresh FSM and guard length, and the uniform 0..2*mean distribution of
    on-chip time;
  * the initial queue order m1..m6, and charging a grant that coincides with
    replenishment to the ending period.
* **Not included:** the DDR2 controller and the DDR2 device (vendor parts). The
  latency-analysis software (worst-case access sequence length and per-access
  latency for WCET tools) is analysis, not hardware. Its two algorithms do run
  in the system testbench, to check the bounds (see below). The `MaxMissCnt`
  hook for path merging in a WCET tool has no counterpart here. The FPGA's logic analyser is a debug
  tool.
* **Timing numbers:** none of the latency results below are comparable with
  silicon. They come from a behavioural controller with guessed timings.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it establishes |
|---|---|
| `tb_dpq_budget_counter` | count and eligibility against a model, under random grants and periodic reloads |
| `tb_dpq_replenish_timer` | pulses exactly every Rp = ceil(15/2) * 10 = 80 cycles |
| `tb_dpq_queue` | winner and full queue order against a reference queue for 5000 random cycles; the worked example above |
| `tb_dpq_arbiter` | cycle-by-cycle against a reference of queue, budgets and period; worst-case interference (2,2,1,0,0) etc. for every master; exactly one budget's worth of grants per master per period under full load; no master passed more than n-1 times; no timing anomaly: with the same replayed traffic, a request that arrives a cycle earlier is never granted later |
| `tb_dpq_interconnect` | mux, gating by hold and ready, completion routing |
| `tb_bi_access_splitter` | four requests per line in bank order with auto-precharge; data lands at the right addresses; completions and read lines carry the right ID and data, under random controller stalls and read delays |
| `tb_refresh_ctrl` | hold across the guard window and until acknowledge, requests only on an idle path, exactly tREFI spacing, late refresh when forced |
| `tb_traffic_gen` | alternation, write data, gap range and mean, reported counts, latencies and execution time, detection of corrupted reads |
| `tb_dpq_platform` | the full system at its default parameters (the equal-density workload), with the monitor and the WCET analysis |
| `tb_pbs_arbiter` | a fully loaded period grants in rank order, each master exactly its budget; winner, rank, budgets and period against a reference model under random traffic |
| `tb_dpq_workloads` | both evaluation workloads, each with DPQ and with PBS: four independent systems (`tb/platform_bench.sv`) with the workloads' budgets, access counts and on-chip times; the WCET analysis for the DPQ runs; the DPQ/PBS fairness comparison |

The system tests use `tb/hp2_ctrl_model.sv`, a behavioural controller plus
memory. It has a 4-deep command FIFO, a burst every 2 cycles, 2 cycles of
read/write turnaround, 10-cycle read latency, 14-cycle refresh and 10 % random
back-pressure. `tb/platform_monitor.sv` checks four things throughout. No
requesting master with budget is passed more than n-1 times (DPQ only). No master exceeds
its budget within a period. Refreshes are exactly tREFI apart. There is exactly
one grant per access. At the end it checks every master's access count and read
data. It also requires that each mechanism actually happened: grants away from
the queue head, requests blocked by an empty budget, replenishment, held
channel, refresh and controller stalls.

Results of the DPQ systems in `tb_dpq_workloads` (cycles at 125 MHz,
behavioural controller):

| workload | master | accesses | execution cycles | max latency | mean latency |
|---|---|---|---|---|---|
| equal density | m1..m6 | 2048 each | 245 374 .. 245 403 | 408 .. 411 | 111 |
| incremental | m1 | 3200 | 125 480 | 619 | 30 |
| incremental | m2 | 1600 | 125 195 | 878 | 61 |
| incremental | m3 | 800 | 125 093 | 1008 | 123 |
| incremental | m4 | 400 | 124 885 | 1102 | 246 |
| incremental | m5 | 200 | 124 916 | 1181 | 498 |
| incremental | m6 | 100 | 124 736 | 1262 | 1008 |

The random back-pressure of the model differs between runs, so the figures
move by a few cycles from one testbench to the other. The measured command
widths move as well (19 to 21 cycles), and with them the WCET bounds below.

Under equal density all six masters finish within 30 cycles of each other, with
nearly the same worst latency. This is the fairness the scheme promises. The run is
limited by budget: 4 accesses per 480-cycle period. In the incremental run
every master needs about the same time, because each master's traffic was made
proportional to its budget. m6 has a budget of one, so it waits up to a full
period for each access.

### Checking the WCET bound

The point of DPQ is that a timing analysis can bound each master's execution
time tightly. `tb/wcet_analyzer.sv` runs that analysis on every DPQ run in
`tb_dpq_workloads` and in `tb_dpq_platform`. While the system runs, it records each master's accesses:
the kind of each one and the on-chip time before it. It also measures the
latency parameters at the arbiter output, where the original work measured
them with a logic analyser:

* the longest read and write command widths,
* the read delay from the last chunk to completion,
* the write tail, and
* the longest channel closure for a refresh, which is used as tRFC.

At the end it runs the two algorithms over each master's recorded sequence:

* Algorithm 1 gives the worst-case access sequence lengths.
* Algorithm 2 tags each access as first, second, ... in its period and adds
  up the worst-case latencies.

`WrTime`/`RdTime` are not spelled out in the original description, so they are this
testbench's choice. Each one adds up a sequence of alternating accesses that
ends with the current one, with every interfering access at its worst command
width. The testbench fails if any master's bound is below its observed
execution time.

| workload | master | BCET | observed | WCET bound | bound / observed | WCET / WCET without refresh |
|---|---|---|---|---|---|---|
| equal density | m1..m6 | 43 570 .. 43 926 | 245 374 .. 245 403 | 284 710 .. 285 066 | 1.16 | 1.028 |
| incremental | m1 | 68 567 | 125 480 | 243 054 | 1.94 | 1.028 |
| incremental | m2 | 47 044 | 125 195 | 141 140 | 1.13 | 1.028 |
| incremental | m3 | 36 754 | 125 093 | 129 123 | 1.03 | 1.028 |
| incremental | m6 | 25 230 | 124 736 | 127 548 | 1.02 | 1.021 |

BCET here is a simple lower bound: each access runs alone at the shortest
command width and tail seen, with no wait for a budget. The testbench also
checks that no master beats it. It is far below the observed time because
budget waits dominate these runs.

The pattern is the one the original evaluation reports. Under equal density
all six bounds are practically the same, because in the analysis every master
waits behind all the others. Under incremental density the bounds of m1 and m2
are loose. These masters make many accesses per period, so their late accesses
often cross a period boundary. The analysis then treats them as early accesses
of the next period, which see the most interference. The refresh share of the
pessimism is about 3 %. `tb_dpq_workloads` checks both patterns: the
equal-density bounds must lie within 1 % of each other, and under incremental
density m1 and m2 must have the loosest bounds.

### DPQ against fixed priorities

With `USE_PBS = 1` the same system runs the PBS baseline with ranks m6 (highest)
to m1 (lowest). Under equal density the observed worst latencies are:

| arbiter | m1 | m2 | m3 | m4 | m5 | m6 |
|---|---|---|---|---|---|---|
| DPQ | 409 | 411 | 409 | 408 | 408 | 409 |
| PBS | 482 | 469 | 456 | 449 | 456 | 444 |

`tb_dpq_workloads` checks both effects. PBS spreads the worst latencies more
widely than DPQ. Its lowest-ranked master does worse than every DPQ master. The
observed gap is modest because these runs are dominated by budget waits. The
large gap in the original comparison is between analytical bounds, and the
bound analysis for PBS is not reproduced here.

### Running with Verilator

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/dpq_pkg.sv tb/tb_dpq_platform.sv --top-module tb_dpq_platform -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. `-y rtl -y tb` lets Verilator
find each module in the file of the same name. Each run takes well under a
second.

### Changing the design

* To change the masters' bandwidth shares, override `BUDGET` on
  `dpq_platform` (or `dpq_arbiter`). Rp follows from Eq. (1) automatically.
  Keep `CNT_W` wide enough for the largest budget and `POS_W` wide enough for
  Rp.
* When the design is attached to a real controller, measure the worst-case
  read and write command widths under alternating traffic. Set
  `WC_RD_CMD_WD`/`WC_WR_CMD_WD` to them, and `TREFI`/`REF_GUARD` to the
  device's refresh interval and the time the controller needs to drain. Watch
  `refresh_late`.
* For more masters, raise `N` and give array parameters of that length. Area
  grows linearly: one counter, comparator and queue register per master.
  A generic synthesis of the six-master defaults gives 114 cells and 70
  flip-flops for `dpq_arbiter`, against 54 cells and 52 flip-flops for
  `pbs_arbiter`. The queue is the price of the fairness.
