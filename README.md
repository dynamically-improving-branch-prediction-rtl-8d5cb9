# Context-aware wiping of a Bi-Mode branch predictor

When an operating system switches from one process to another, the branch
predictor still holds the counters the previous process trained. If the two
processes alias in the predictor's tables, the incoming process starts its
time slice with counters pointing the wrong way and mispredicts until it has
retrained them. Wiping the whole predictor at every switch is worse: it throws
away state that is still useful, and the predictor must relearn from scratch.

This design sits next to a small Bi-Mode predictor and learns, for each
*transition* from one process to another, whether a partial wipe pays off. The
wipe is selective. At a switch to process P, it resets only the pattern
history table (PHT) entries whose direction (taken or not taken) changed since
P last ran. Those are the entries another process has turned against P. Whether
to wipe at all is decided by a 2-bit saturating counter kept per (from-PID,
to-PID) pair. The quality signal is simple: the number of PHT direction changes
during the time slice that follows a transition. If that number grows by at
least a threshold compared with the last time the same transition happened,
the action chosen last time is judged bad and the counter is inverted, so the
opposite action is tried next time.

The mechanism is the context switch accuracy framework (CSAF) of Auten, Dubey
and Mathur, "Dynamically Improving Branch Prediction Accuracy Between
Contexts". Its authors evaluated it in a software simulator. The RTL here is an
independent hardware rendering. The sections below say where it follows that
description and where it makes its own choices.

## What happens at a context switch

The operating system writes the next thread's ID into the ARM software thread
ID register. The core forwards that write (`tid_wr_en`, `tid_wr_data`). A write
of a new value is a context switch from `cur` to `next`. The framework then
runs a fixed four-cycle sequence. Call the cycle of the thread ID write *w*.

| cycle | block | action |
|---|---|---|
| w+1 | `tid_monitor` -> `csaf_controller`, `pht_change_tracker` | `cs_event`. The tracker closes `cur`'s time slice: its direction-change count is latched. It opens `next`'s slot and latches `next`'s changed-entry mask, then clears that mask. |
| w+2 | `transition_table` | The *previous* transition (`old -> cur`, the one that started the slice that just ended) gets the latched count. If its stored count is smaller than the new one by `THRESH` or more, its counter is inverted (`invert_event`). The new count is stored in either case. |
| w+3 | `transition_table` | The transition `cur -> next` is looked up. A miss allocates an entry in LRU order, with the counter strongly not taken and no stored count. |
| w+4 | `bimode_predictor` | If the counter's upper bit is set ("taken"), `wipe_en` resets every entry in `next`'s mask to its default state in one clock (`wipe_event`, `wipe_entries`). `cur -> next` becomes the previous transition. |

The predictor keeps predicting and training throughout. `busy` is high for
cycles w+2 to w+4. The next thread ID write must not come before w+4, so that its
switch event falls after the sequence; an assertion
in `csaf_controller` checks this. With the 1 ms time slices the framework is
meant for, this limit never matters.

There is a one-slice delay in the learning loop. A wipe decided at one switch
affects the slice that follows. That slice's change count is judged only at
the next switch, and only against the count stored for the same transition the
last time it occurred. A transition therefore needs two occurrences before its
counter can move. A new transition never wipes, because its counter starts
strongly not taken.

## Tracking what changed, per process

The wipe must cover "the entries that changed direction since the incoming
process last ran". `pht_change_tracker` keeps one changed bit per PHT entry for
each of `PID_SLOTS` recently seen processes. The process slots are replaced in
LRU order.

* The predictor reports in `flip_vec` every entry whose counter's upper bit
  changes at a clock edge. The cause can be training or a wipe.
* Each such entry is marked in every valid slot except the running process's.
  The running process's own retraining is not interference.
* At a switch to P, P's bits (plus any flips in that same clock) become the
  wipe mask, and P's bits are cleared.
* A process without a slot has nothing marked, so a wipe for it is empty.

The per-slice metric counts `upd_flip`: direction changes caused by training.
Changes caused by the wipe itself are not counted. The count saturates at
`CNT_W` bits.

This is the most expensive part of the design: `PID_SLOTS x 2 x DIR_ENTRIES`
flip-flops (4096 at the defaults). The flip-flops let the whole mask be read
and cleared in one cycle.

## The transition table

`transition_table` holds `ENTRIES` fully associative entries. Each entry
contains:

* a valid bit;
* the from-PID and the to-PID;
* a stored-count-valid bit and the stored count;
* a 2-bit counter.

The lookup compares all tags in parallel. Replacement is true LRU
(`lru_rank`: one rank per entry, touched on every lookup). The update does not
search. It uses the index handed out by the previous lookup. That entry was the
most recently used one, so no allocation can have evicted it in between.

"Inverting" the counter means taking its bitwise complement. Strongly not
taken becomes strongly taken, and weakly taken becomes weakly not taken. This
is the literal reading of "invert the counter, so that the opposite action is
taken". Incrementing and decrementing the counter instead is an alternative the
authors mention as future work. It is not implemented here.

## The predictor

`bimode_predictor` is a Bi-Mode predictor (Lee, Chen and Mudge) with three
tables of 2-bit counters:

* a choice table, indexed by PC[8:2];
* a not-taken bank and a taken bank, both indexed by PC[8:2] XOR a 7-bit
  global history.

The choice counter selects which bank gives the prediction. Training updates
only the selected bank. The choice counter is trained with the outcome, except
when it pointed away from the outcome while the selected bank still predicted
correctly. The history shifts in the outcome when training.

The prediction is combinational from `pred_pc`. The core must return the
history it received (`pred_ghr`) with the resolved branch (`upd_ghr`), so that
training uses the same entries. The two banks, 256 counters, are the PHT that
the framework tracks and wipes. They are numbered 0..127 (not-taken bank) and
128..255 (taken bank). A wiped entry returns to weakly not taken in the
not-taken bank and weakly taken in the taken bank. The choice table is never
wiped. A wipe and a training update to the same entry in the same clock: the
wipe wins.

## Top-level interface (`csaf_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `pred_pc` | in | 32 | branch to predict |
| `pred_taken`, `pred_ghr` | out | 1, 7 | prediction and the history it used (combinational) |
| `upd_valid`, `upd_pc`, `upd_ghr`, `upd_taken` | in | 1, 32, 7, 1 | resolved branch |
| `tid_wr_en`, `tid_wr_data` | in | 1, 32 | write to the software thread ID register |
| `busy` | out | 1 | switch sequence in progress |
| `cs_event`, `invert_event`, `wipe_event` | out | 1 | one-cycle pulses, at cycles w+1, w+2 and w+4 |
| `wipe_entries` | out | 9 | number of entries in the applied mask |
| `tt_evict_event`, `slot_evict_event` | out | 1 | a transition entry or process slot was replaced |

## Parameters

| parameter | default | origin |
|---|---|---|
| `DIR_ENTRIES` | 128 | the evaluated predictor is "128-entry Bi-Mode". Using 128 for each bank is this design's reading. |
| `CHOICE_ENTRIES` | 128 | own choice |
| `PID_SLOTS` | 16 | own choice |
| `TT_ENTRIES` | 32 | own choice. The source gives a fixed-size table with LRU replacement, but no size. |
| `CNT_W` | 16 | own choice |
| `THRESH` | 8 | own choice. The source says only "a certain threshold". |

The PC and PID widths (32 bits) are in `csaf_pkg`. The direction banks must be
a power of two in size. At the defaults the top level holds about 8.8k
flip-flops. Most of them are the tracker's changed bits.

## Departures and own choices

* The source gives two wordings for what is wiped. One is "entries changed
  since the incoming program last ran"; the other is "entries modified since
  the last time slice". This design follows the first. That requires the
  per-process slot table, which the source does not describe.
* The thread ID value itself is the process ID. A write of the value already
  held is not a switch.
* Sizes, the threshold, counter widths, reset states, the bank split of
  "128 entries", the history length and all timing are own choices.
* The framework's decisions take four cycles after the thread ID write. The
  source describes an untimed software model.
* Nothing is built of the comparison points the source evaluates: the
  always-reset policy and the tournament predictors of its worst-case study.
  The CPU core is not built either; it is represented by the top-level ports.

## Sizing against the evaluated workloads

The framework was evaluated with 8 to 11 benchmark processes switched every
millisecond. At most 16 processes plus kernel threads fit the process slots,
and more only cost wipe information through replacement. A round-robin
schedule of 11 processes needs 11 transition entries. Any schedule over 11
processes has at most 110 transitions, which the 32 entries serve in LRU
order. A 16-bit change counter does not saturate unless a slice has more than
65,535 direction changes, and each resolved branch causes at most one.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The expected values come from untimed models
in `tb/csaf_ref_pkg.sv` or in the testbench itself. These models are written
from the behaviour described above, not from the RTL's structure: per-PID
associative arrays, and time stamps in place of LRU ranks.

| testbench | what it exercises |
|---|---|
| `tb_bimode_predictor` | 40k random branches with random wipes, some in the same clock as training. It checks every prediction, history, `flip_vec` and `upd_flip`. |
| `tb_tid_monitor` | random thread ID writes with frequent rewrites of the running ID |
| `tb_pht_change_tracker` | 4 slots, 7 PIDs, 4-bit counter. It checks masks, slice counts, saturation, hits and replacements. |
| `tb_transition_table` | 4 entries, 12 transitions. It checks the threshold rule at and around equality, the inversions, hits, replacements and the stability of the index. |
| `tb_csaf_controller` | cycle-by-cycle check of the four-cycle sequence |
| `tb_csaf_top` | The full design at its default parameters. It plays 500 switches among 9 and then 20 processes that alias on the same 32 branch addresses. Every prediction is compared with the full reference model, and so is every inversion, wipe (with its size and latency) and replacement. Each mechanism must occur. |

`tb_csaf_workload` runs two round-robin workloads on the full design: 8
programs and then 11 programs, six rounds each. The programs are synthetic
branch streams. Each has its own loop branches and biased branches, and changes
behaviour between rounds. Slices are 20,000 branches long, much shorter than a
real 1 ms slice. The testbench checks every prediction and decision against the
model. It prints each program's misprediction rate and takes about half a
minute.

To run one with Verilator, for example the top level:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/csaf_pkg.sv tb/csaf_ref_pkg.sv tb/tb_csaf_top.sv --top-module tb_csaf_top
./obj_dir/Vtb_csaf_top
```

The other testbenches are built the same way. `csaf_ref_pkg.sv` is needed only
by `tb_bimode_predictor` and `tb_csaf_top`. The block testbenches run in a few
seconds. The simulator has two states, so every register that is read is
reset.

## Files

* `rtl/csaf_pkg.sv`: shared types, counter encoding and reset states
* `rtl/bimode_predictor.sv`: the predictor with its wipe port and flip report
* `rtl/tid_monitor.sv`: context switch detection from thread ID register writes
* `rtl/pht_change_tracker.sv`: per-process changed-entry masks and the per-slice change count
* `rtl/transition_table.sv`: the PID-to-PID table with counters and LRU replacement
* `rtl/csaf_controller.sv`: the four-cycle switch sequence
* `rtl/lru_rank.sv`: LRU order helper
* `rtl/csaf_top.sv`: the top level
* `tb/`: testbenches and `csaf_ref_pkg.sv`, the reference models
