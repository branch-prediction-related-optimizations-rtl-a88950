# Branch-misprediction feedback for a multithreaded fetch picker

A multithreaded processor shares its fetch bandwidth, queues and execution
units among several hardware threads. A thread that is going through a phase
of expensive branch mispredictions keeps filling those shared resources with
wrong-path instructions, which costs throughput for the other threads and
burns power for nothing. The remedy described here watches each thread's
branch behaviour in hardware and feeds it back to the thread picker, the
arbiter that decides every cycle which thread fetches next: a thread whose
mispredictions cost too much has its fetch priority lowered for as long as
that phase lasts, and gets it back once the phase is over. No software is
involved.

The RTL implements the mechanism proposed in M. Durbhakula, *Branch
prediction related Optimizations for Multithreaded Processors*: per-thread
misprediction and stall counters over a fixed time window, the average stall
per misprediction compared with a threshold at the end of each window, the
optional two-window hysteresis, and a fetch picker that honours the result.
The proposal gives the mechanism but no numbers and no circuit; every size,
encoding and timing detail below is this design's own choice, and each is
named as such.

## The metric

For every hardware thread two counters run over a window of `WINDOW_T`
cycles:

* the misprediction count `M`: cycles in which one of the thread's branches
  resolved as mispredicted (`br_mispredict[t]`);
* the stall count `S`: cycles the thread spent stalled because of a
  misprediction (`br_stall[t]`).

At the end of the window the average stall per misprediction, `S / M`, is
compared with the threshold `THRESH_H`. An average above the threshold asks
for the thread's priority to be lowered; an average below it asks for it to
be restored. Then both counters start again from zero.

Three points of this comparison are decisions of this design:

* **No divider.** `S / M > H` is tested as `S > H * M`. For `M > 0` this is
  exactly the comparison of the real-valued quotient with `H`, with no
  rounding, and `H` is a constant, so the block needs a small constant
  multiplier and a comparator instead of a divider
  (`rtl/avg_stall_compare.sv`).
* **Exactly at H.** The proposal lowers priority when the average is *above*
  H and restores it when it is *below* H. An average equal to H therefore
  does neither: the thread keeps its current priority.
* **No mispredictions.** A window with `M = 0` has no defined average; it is
  treated as below the threshold, since the thread lost nothing to
  mispredictions.

What counts as a "misprediction stall cycle" is left to the pipeline that
drives `br_stall`; a natural choice is the cycles between the redirect of a
mispredicted branch and the arrival of the first correct-path instruction.
The counters are `$clog2(WINDOW_T+1)` bits wide: with at most one event of
each kind per thread and cycle they cannot overflow within a window.

## The priority state and its hysteresis

The proposal offers a 2-bit hysteresis: the priority is lowered only after
the average has been above H in two consecutive windows, and restored only
after it has been below H in two consecutive windows. A single unusual
window then changes nothing. `HYSTERESIS=1` (the default) builds it;
`HYSTERESIS=0` lets every window decide alone.

The two state bits (`bp_pkg::prio_state_e`) are encoded so that the upper
bit is the feedback itself:

| state              | bits | low_prio | verdict of the closing window → next state      |
|--------------------|------|----------|--------------------------------------------------|
| `PRIO_NORMAL`      | 00   | 0        | above → `PRIO_NORMAL_HIGH`; else stay            |
| `PRIO_NORMAL_HIGH` | 01   | 0        | above → `PRIO_LOWERED`; below or equal → `PRIO_NORMAL` |
| `PRIO_LOWERED`     | 10   | 1        | below → `PRIO_LOWERED_LOW`; else stay            |
| `PRIO_LOWERED_LOW` | 11   | 1        | below → `PRIO_NORMAL`; above or equal → `PRIO_LOWERED` |

A window exactly at H breaks a pending run: "twice in consecutive
windows" is read strictly. Reset puts every thread in `PRIO_NORMAL`.

## The thread picker

`rtl/thread_picker.sv` picks one thread per cycle among those that request
fetch. The proposal only says that the picker lowers a flagged thread's
priority, so the base policy is chosen here as the simplest fair one:

* threads that are not lowered always win over lowered threads; a lowered
  thread fetches only in a cycle when no normal-priority thread requests;
* within each of the two levels the pick is round-robin, starting after the
  thread picked last (one pointer shared by both levels).

This strict rule means a lowered thread can be starved while the other
threads keep the fetch stage busy. That is intended as "temporarily reduce
the priority"; the lowering lasts at most until two cheap windows have been
seen. A thread that is not fetched gets no new branches, so once its
branches in flight have resolved its windows have `M = 0`, count as below
the threshold, and restore it after two windows (one without hysteresis).
The design therefore does not lock a thread out for good.

## Structure and timing

```
                 br_mispredict[t], br_stall[t]
                           |
  window_timer --window_end--> thread_monitor[t] (t = 0 .. NUM_THREADS-1)
                                 mispredict_counters -> avg_stall_compare -> hysteresis_fsm
                                                                                 |
                                                                           low_prio[t]
                                                                                 |
  fetch_req ------------------------------------------------------------> thread_picker --> fetch_grant / fetch_tid
```

| file | contents |
|------|----------|
| `rtl/bp_pkg.sv` | default sizes, the comparison verdict `cmp_e`, the state `prio_state_e` |
| `rtl/window_timer.sv` | modulo-`WINDOW_T` counter, `window_end` on the last cycle of a window |
| `rtl/mispredict_counters.sv` | the two per-thread window counters |
| `rtl/avg_stall_compare.sv` | `S > H*M`, `S == H*M`, else below |
| `rtl/hysteresis_fsm.sv` | the 2-bit priority state |
| `rtl/thread_monitor.sv` | one thread: counters, comparison, state |
| `rtl/thread_picker.sv` | two-level round-robin fetch picker |
| `rtl/bp_feedback_top.sv` | the whole scheduler |

Timing, all synchronous to `clk` with an active-low synchronous `rst_n`:

* The first window is cycles 0 to `WINDOW_T-1` after reset is released;
  `window_end` is high on the last one.
* Events on the `window_end` cycle belong to the closing window. Its totals
  are compared combinationally in that cycle, the state register updates on
  the following edge, and `low_prio` shows the new state from the next cycle
  on. Counters are zero in the first cycle of the new window.
* The pick is combinational: `fetch_grant`, `fetch_valid` and `fetch_tid`
  answer the same cycle's `fetch_req` and the current `low_prio`. The
  round-robin pointer moves on the edge after a grant.

Top-level ports (`bp_feedback_top`):

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `fetch_req` | in | NUM_THREADS | threads that can fetch this cycle |
| `br_mispredict` | in | NUM_THREADS | a branch of the thread resolved mispredicted this cycle |
| `br_stall` | in | NUM_THREADS | the thread is in a misprediction stall this cycle |
| `fetch_grant` | out | NUM_THREADS | one-hot thread to fetch from |
| `fetch_valid` | out | 1 | some thread was picked |
| `fetch_tid` | out | $clog2(NUM_THREADS) | index of the picked thread |
| `low_prio` | out | NUM_THREADS | per-thread lowered priority, for observation |
| `window_end` | out | 1 | last cycle of each window |

The pipeline, fetch unit and branch predictor around it are not part of
this RTL; they connect through these ports.

## Parameters

| parameter | default | meaning | origin |
|-----------|---------|---------|--------|
| `NUM_THREADS` | 8 | hardware threads | chosen here; the proposal gives no count |
| `WINDOW_T` | 1024 | window length in cycles | chosen here; the proposal names T only |
| `THRESH_H` | 8 | threshold on the average stall per misprediction, cycles | chosen here; the proposal names H only |
| `HYSTERESIS` | 1 | two-window hysteresis on | the proposal's optional refinement, on by default here |

T and H are elaboration-time parameters, not software-visible registers.
This follows the proposal's own assessment that the scheme is fixed in
hardware and not configurable afterwards. Any `WINDOW_T >= 2` and
`NUM_THREADS >= 1` work; the counter, product and index widths follow from
them. `THRESH_H` should sit above the pipeline's minimum misprediction
penalty, or every thread that mispredicts at all is flagged: with the
default 8 a thread is flagged when its mispredictions cost it, on average,
more than 8 stall cycles each.

Per thread the design holds 2 x 11 counter bits and 2 state bits at the
default T; the picker holds a 3-bit pointer. The whole default scheduler is
about 200 flip-flops.

## Where it departs from or adds to the proposal

* The abstract speaks of a thread "consistently mispredicting its branches"
  *and* of its average stall being above the threshold; the mechanism itself
  uses the average alone, and so does this RTL. The misprediction count
  enters only as the divisor.
* The average is never computed as a number; only its comparison with H is.
* The treatment of `M = 0` and of an average exactly equal to H, the state
  encoding, the round-robin base policy and the strict two-level priority
  are this design's choices (see above).
* No quantitative result is given in the proposal, so there is no
  performance figure to reproduce; the testbenches check function and
  timing only.

## Verification

Every module has a self-checking testbench in `tb/`. Each computes its
expected values independently (window averages by real division, the
hysteresis as a "two agreeing verdicts in a row" rule, the picker as a
search over the request vector) and prints
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it covers |
|-----------|----------------|
| `tb_window_timer` | pulse position for T=5 and the default T, restart after reset |
| `tb_mispredict_counters` | random streams, a window where every cycle counts, restart at window end |
| `tb_avg_stall_compare` | corner cases and 20 000 random pairs at H=8 and H=3 |
| `tb_hysteresis_fsm` | random verdict streams with and without hysteresis |
| `tb_thread_monitor` | scripted windows (costly, cheap, exactly H, single spike, none) and random ones |
| `tb_thread_picker` | rotation fairness, random requests and priorities |
| `tb_bp_feedback_top` | the whole scheduler at its default parameters over 10 windows |
| `tb_bp_feedback_top_plain` | the whole scheduler without hysteresis, 3 threads, T=100, H=5 |

The two end-to-end testbenches model each thread as a pipeline that stalls
for a scripted penalty after each misprediction and does not request fetch
while stalled. They check `low_prio` every cycle and every pick, and count
each mechanism: windows closed, threads lowered, threads restored, a single
costly window absorbed by the hysteresis (or, without it, a one-window
lowering), a window exactly at H, a lowered thread passed over and a lowered
thread picked. A mechanism that never occurs is a failure. The picker also
carries two concurrent assertions: a lowered thread never wins while a
normal one requests, and a pick happens exactly when some thread requests.

## Simulating and changing it

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert rtl/bp_pkg.sv rtl/*.sv tb/tb_bp_feedback_top.sv \
          --top-module tb_bp_feedback_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other one. The package must come
first on the command line. Every testbench finishes in well under a second.

To change the sizes, override the parameters of `bp_feedback_top`. To use a
different base policy in the picker (for example, giving lowered threads one
slot in every N cycles instead of strict priority), only
`rtl/thread_picker.sv` changes; its interface is just the request and
`low_prio` vectors. To make T or H software-programmable, turn the
parameters into inputs: `avg_stall_compare` then needs a general multiplier
of `$clog2(WINDOW_T+1)` by the width of H, and `window_timer` a comparator
against the input.
