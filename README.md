# Ensemble in-situ dynamic power monitor for FPGA applications

This is a small piece of hardware that sits next to an FPGA application and estimates that
application's average dynamic power for each run. A run is one *invocation*, meaning one
hardware function call. The monitor measures nothing electrical. It watches a few dozen internal
signals, counts how often each one toggles, and feeds the counts into regression trees trained
offline against a power simulator. The estimate arrives a few tens of cycles after the invocation
ends, so it can drive fine-grained power management such as DVFS or scheduling.

The main idea is to split the model by **FSM state**. HLS tools generate applications as an FSM
with a datapath (FSMD). Different controller states exercise very different parts of the
datapath, so one tree for the whole run does poorly. This design therefore does three things:

* It cuts each invocation into *segments*. A segment is one uninterrupted stay in one controller
  state.
* It groups the states offline into K clusters of similar activity (k-means). Each cluster gets
  its own *base learner*, a decision tree trained only on that cluster's segments.
* It weights each segment's tree output by the segment's length and adds everything up. It then
  divides by the invocation length T:

      P = (1/T) * sum over clusters i of  sum over segments j of cluster i  of  t_j * y_i(x_j)

Here `t_j` is the segment's length in cycles, `x_j` holds the per-signal edge counts during the
segment, and `y_i` is tree i's power estimate for that activity. P is the cycle-weighted mean of
the per-segment estimates, in the same unit as the tree leaves.

The RTL is SystemVerilog-2017 and synthesizable. There is one module per file in `rtl/` and one
self-checking testbench per module in `tb/`.

## Data path

```
 mon_sig[NUM_FEAT] --> activity counters --+
                                           v
 state ------------------------------> feature generator --seg_*--+-------------------+
 inv_done ---------------------------------^                      |                   |
                                                                  v                   v
                             cluster lookup table --learner_en--> ensemble control unit
                                                                   |  K x base learner:
                                                                   |   feature FIFO -> tree engine
                                                                   |   -> weighted aggregation
                                                                   |   -> result FIFO
                                                                   |  T FIFO
                                                                   v
                                                       summing & scaling --> power, power_valid
```

| Module | Role |
|---|---|
| `activity_counter` | Two-flop rising-edge detector that enables a free-running 20-bit counter. There is one per monitored signal. |
| `feature_generator` | Detects segment boundaries. At each boundary it subtracts the counter snapshot taken at the segment's start, which gives the features and the segment length. It also counts T. |
| `cluster_lut` | Table from state to cluster, loaded at configuration time. It turns a closed segment into a one-hot write enable. |
| `ensemble_control_unit` | K `base_learner`s, the T FIFO, `summing_scaling` and the sticky overflow flag. |
| `base_learner` | Feature FIFO, `dt_engine`, `weighted_aggregation` and result FIFO. |
| `dt_engine` | Memory-based regression tree. It is built from `dt_feature_controller`, `dt_fsm` and `dt_structure_memory`. |
| `summing_scaling` | Adder tree over the K learner sums, followed by a bit-serial restoring divider by T. |
| `sync_fifo` | First-word-fall-through FIFO. All FIFOs use it. |
| `state_index_encoder` | Converts a one-hot state register to a state number. It is used only when the top has `STATE_ONEHOT = 1`. |
| `pm_pkg` | Shared widths and the tree FSM state type. |
| `power_monitor_top` | Wires the blocks above together. |

The first three modules in the table make up the preprocessing stage that all learners share. `summing_scaling` is the averaging stage. `base_learner` and everything inside it are repeated K times.

## Segments: how an invocation is cut up

`feature_generator` samples `state` every cycle. A segment closes for one of three reasons:

1. **The state changes.** This is the normal case.
2. **`inv_done` is high.** The application raises it in the last cycle of an invocation. The
   segment closes even if the state stays the same, and it is marked `seg_inv_end`. It also
   carries `seg_total` = T, the number of cycles since the previous invocation ended (or since
   reset).
3. **The segment reaches 2^20 - 1 cycles.** It is cut (`seg_split`) so that neither the cycle
   count nor the wrapping counter differences can overflow. The pieces are estimated one by one
   and added. This is exact for the formula above, because it is linear in `t`, but a tree sees
   each piece as a separate visit.

The counters are never cleared. Features are differences modulo 2^20, so wrap-around is harmless.
The outputs are registered: `seg_valid` pulses one cycle after the first cycle of the next
segment. At that moment the closed segment's state, length, 30 feature values and flags are
stable for one cycle.

By default the state register is taken as a **binary state number** of `STATE_W` = 8 bits. HLS
tools often generate one-hot state registers. For those, build the top with `STATE_ONEHOT = 1`:
the `state` port is then 2^STATE_W bits wide, and an OR-tree encoder turns it into the number.
An assertion flags an all-zero register after reset. The cluster table is always written with
state *numbers*.

## Routing, alignment and back-pressure

This is the part that needs the most care. Learners finish at different times. A learner may see
many segments of an invocation, or none. Its feature FIFO may still hold work from the previous
invocation. Yet summing & scaling must add up results that belong to **the same invocation**.

**Entries.** Each feature FIFO entry is `{has_feat, inv_end, cycles, features}`. For a closed
segment, `cluster_lut` enables exactly one learner, the one for the segment's state. That learner
receives the full entry with `has_feat = 1`.

**End markers.** When the segment ends an invocation, *every other* learner also receives an
entry, with `has_feat = 0` and `inv_end = 1`. This entry is an end marker. It runs no tree and
only closes that learner's sum. As a result:

* Every learner pushes exactly one sum p(c_i) into its result FIFO per invocation. A learner that
  saw nothing pushes 0.
* The sums leave the result FIFOs in invocation order, whatever the order in which the learners
  finish.
* T is queued in its own FIFO at the same moment.
* Summing & scaling pops all K result FIFOs and the T FIFO together, once all of them are
  non-empty. The K values it adds always belong to one invocation, and T is that invocation's
  length.

**Inside a learner.** The head of the feature FIFO is handled as follows:

* An entry with `has_feat` starts the tree. When the tree finishes, the head is popped and
  `t * y` goes to the aggregation.
* A marker is consumed directly, but only once the engine is idle, so it cannot overtake a tree
  still running on an earlier segment.
* If the entry closes the invocation, the aggregation writes `acc + term` to the result FIFO and
  clears its accumulator.

**Back-pressure and loss.** The monitor never stalls the application.

* If a result FIFO is full, the learner holds the invocation-closing entry at its FIFO head. It
  raises `stall` until summing & scaling frees a slot. Results are never lost this way.
* Holding that entry can in turn fill the feature FIFO. A segment that arrives at a full feature
  FIFO, or an invocation length that arrives at a full T FIFO, is dropped. The sticky `overflow`
  output then rises and stays high until reset. After that the sums no longer match the
  invocations, and the estimates cannot be trusted.

Sizing rules at the defaults:

* A learner handles one segment every `2n+2` cycles, where n is the number of nodes on the tree
  path. That is at most 20 cycles for trees of depth 8.
* The feature FIFO (16 entries) absorbs bursts of short segments in one cluster.
* Summing & scaling takes one invocation every 18 cycles. The result FIFOs (4 entries) and the
  T FIFO (32 entries) absorb runs of short invocations.

The applications this monitor targets have segments and invocations of hundreds of cycles or
more, far above these limits.

## Decision tree engine

Each learner's tree is kept in its own block memory, `dt_structure_memory`. The memory has 512
words, read synchronously, enough for a full binary tree of depth 8. There is one word per node:

| Field (MSB first) | Bits at default | Decision node | Leaf |
|---|---|---|---|
| `is_leaf` | [43] | 0 | 1 |
| coefficient | [42:23] (20 bits) | threshold, unsigned integer | don't care |
| left child address | [22:14] (9 bits) | next node if feature <= threshold | don't care |
| right child address | [13:5] (9 bits) | next node otherwise | don't care |
| feature address | [4:0] (5 bits) | which of the 30 features to test | don't care |
| result | [15:0] (16 bits) | (overlaps the fields above) | leaf value |

In general `NODE_W = 1 + CNT_W + 2*NODE_AW + clog2(NUM_FEAT)`. The leaf value takes the low
`RES_W` bits of the word. The root must be at address 0. Features are edge counts, so
non-negative integers, and the thresholds are integers as well. A trained floating-point
threshold `c` converts exactly to `floor(c)`, because `x <= c` is the same test as
`x <= floor(c)` for integer x. No floating point is needed anywhere.

The walk is done by `dt_fsm`, a four-state machine:

* **I (idle).** A feature vector is waiting at the FIFO head (`cal_start`), so the FSM goes to N
  and reads address 0.
* **N (node read).** The FSM presents the node address to the memory. For every node except the
  root, the address is chosen here. It compares the feature registered in the previous cycle
  with the stored threshold, then picks the left or right child.
* **S (stall).** The memory returns the word. The FSM latches the threshold and both child
  addresses. The feature address goes to `dt_feature_controller`, which registers that feature
  (`act_sel` → `act_value`) for the next N. A decision node leads back to N. A leaf latches its
  value and leads to R.
* **R (result).** `done` is high for one cycle with `result`. The feature vector is popped, and
  the FSM returns to I.

For a path of n nodes, leaf included, `done` comes **2n+1 cycles** after the start. That is 3 to
19 cycles for paths of 1 to 9 nodes (a tree of depth 8 has up to 9 nodes on a path). The unit-level testbenches check this exactly.

## Weighting and final scaling

`weighted_aggregation` multiplies the 16-bit leaf value by the 20-bit segment length and
accumulates the products in 48 bits. That allows 4096 full-scale terms per invocation.
`summing_scaling` adds the K sums into 54 bits and divides the total by the 32-bit T. T is the
sum of the segment lengths, so the quotient is a length-weighted mean of 16-bit leaf values. It
can never exceed the largest leaf, so it always fits in 16 bits. The divider makes use of this:

* It is a restoring divider that computes only the 16 quotient bits, one per cycle.
* Its partial remainder starts as the top 38 bits of the sum (`sum >> 16`). These bits are below
  T exactly when the quotient fits in 16 bits. If they are not, the output saturates to
  `0xFFFF`. That happens only if T does not match the segments, for example after an
  overflow.
* T = 0 gives 0.
* The quotient is truncated, not rounded.

From the pop of the result FIFOs to `power_valid` is `RES_W + 1` = 17 cycles.

The unit of `power` is the unit chosen for the leaves at training, for example mW scaled by a
power of two. The hardware does not care. Correcting an estimate for a different clock frequency
(dynamic power is proportional to f) is left to whoever reads `power`.

## Loading a trained model

The monitor holds no model after power-up. Load it as follows:

1. **Trees.** For each learner k, write every node word with `cfg_tree_we`,
   `cfg_tree_learner = k`, `cfg_tree_addr` and `cfg_tree_data`. Reset does not clear tree
   memories, so they can be written before or after reset.
2. **Reset.** Pulse `rst_n`. This clears the counters, the FIFOs and the cluster table, whose
   entries all point to learner 0.
3. **Cluster table.** For each state s, write `cfg_lut_state = s` and `cfg_lut_cluster = k`
   with `cfg_lut_we`.
4. **Run.** Start the application. Every cycle from the reset to the first `inv_done` counts
   towards the first invocation, table loading included. So the first estimate is only
   representative if the application starts right after the table is written. Otherwise,
   discard that estimate.

If the model has fewer than K clusters, leave the spare learners without states. They receive
only end markers and add 0.

## Parameters

| Parameter (top) | Default | Meaning |
|---|---|---|
| `NUM_FEAT` | 30 | Monitored signals, which is also the number of features. Trained models need 10 to 30. |
| `NUM_LEARNERS` | 64 | Base learners K. Trained ensembles use 18 to 64. |
| `CNT_W` | 20 | Width of counters, features, segment lengths and thresholds. |
| `STATE_W` | 8 | Width of the state index. The table has 2^STATE_W entries. |
| `NODE_AW` | 9 | Tree memory address width (512 nodes). |
| `FEAT_DEPTH` | 16 | Feature FIFO depth per learner. |
| `RES_DEPTH` | 4 | Result FIFO depth per learner. |
| `STATE_ONEHOT` | 0 | 1: `state` is a one-hot register of 2^STATE_W bits. |

Fixed in `pm_pkg`: leaf and output width `RES_W` = 16, accumulator `ACC_W` = 48,
invocation-length width `T_W` = 32.

At the defaults, the memory adds up to about 2.1 Mbit:

* The 64 tree memories take 1.44 Mbit (512 x 44 bits each). Each one fits a single 36 Kbit
  block RAM.
* The 64 feature FIFOs take 0.64 Mbit (16 x 622 bits each). They are wide and shallow, so they
  suit distributed (LUT) RAM better than block RAM. Reducing `FEAT_DEPTH` or `NUM_FEAT` is the
  first thing to try if memory is tight.
* The result FIFOs and the T FIFO take a few kbit.

## Where this design departs from, or adds to, the published scheme

* **Single-tree sampling mode is not included.** The original work also describes a single-tree
  estimator. It samples the counters every fixed period (for example 3 µs), using a clock
  counter in the feature controller that also clears the activity counters. Only the
  state-clustered ensemble is built here. The counters keep a synchronous clear input (`clr`,
  tied low in the top) for such a mode.
* **DSP-based counters are not included.** The original work lets an activity counter be placed
  in a vendor DSP counter macro instead of LUTs. Only the LUT/flip-flop counter is here.
* **State encoding.** The original block diagram shows the cluster table addressed by one-hot
  state codes. Here the table is indexed by a binary number, and a one-hot register is encoded
  in front of it (`STATE_ONEHOT = 1`). The resulting behaviour is the same.
* **Invocation boundary.** An explicit `inv_done` strobe is an addition. So are the extra segment
  cuts at invocation ends and at 2^20-1 cycles.
* **End markers, the T FIFO and back-pressure.** These are this design's way of doing the
  "result sequence alignment" that the result FIFOs exist for. The original describes the FIFO
  but not the protocol.
* **Latency.** The original quotes 2n+1 cycles per tree, which matches here, and 21 cycles for a
  whole ensemble prediction. This design needs the tree time of the busiest learner (up to 19
  cycles), plus a few cycles of FIFO and aggregation, plus 17 cycles of serial division. The
  end-to-end benches measure 26 to 48 cycles from `inv_done` to `power_valid`, when only one
  invocation is outstanding. A radix-4 or combinational divider would
  close most of the remaining gap, at a cost in area.
* **Formats.** Leaf values, node packing, FIFO depths and widths not listed above are this
  design's own choices.
* **Size on an FPGA.** The original implementation reports at most about 325 LUTs and four
  block RAMs per base learner on a Virtex-7. This RTL has been checked by simulation and by
  generic synthesis only. It has not been through a vendor place-and-route, so its LUT count and
  clock rate are not known.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the module against an
independent model written in the testbench and prints `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_activity_counter` | Edge counting and the 2-cycle latency. |
| `tb_sync_fifo` | Random push/pop against a queue: flags, occupancy, overflow dropping. |
| `tb_feature_generator` | Random state sequences against a reference segmenter: features, lengths, T, forced splits (at a reduced `CNT_W`). |
| `tb_cluster_lut` | Table writes, lookups, one-hot enables. |
| `tb_dt_structure_memory`, `tb_dt_feature_controller`, `tb_dt_fsm`, `tb_dt_engine` | Random trees (`tree_model.svh` builds and evaluates them) against the hardware walk, including the exact 2n+1 latency. |
| `tb_weighted_aggregation`, `tb_summing_scaling` | Arithmetic against reference sums and divisions, and the divider latency. |
| `tb_base_learner`, `tb_ensemble_control_unit` | Ordering, end markers, results of the right invocation. |
| `tb_power_monitor_top` | End to end at reduced size (6 signals, 4 learners, 8-bit counters). |
| `tb_power_monitor_onehot` | The same end-to-end test with a one-hot state register. |
| `tb_state_index_encoder` | Every one-hot code at 4 and 8 bits. |
| `tb_power_monitor_workloads` | The default-size top run eleven times with the model sizes of published benchmark ensembles: 21 to 64 learners in use, 10, 20 or 30 toggling signals, and all phases each time. |
| `tb_power_monitor_full` | End to end at the default size (30 signals, 64 learners). |

The four end-to-end benches share `top_tb_body.svh`. The body does the following:

* It loads random trees and a random cluster table.
* It drives an application model through three phases: random invocations, a stress phase in
  which learner 0 lags behind while the other learners' result FIFOs fill and stall, and a final burst that
  overflows a feature FIFO.
* It predicts every estimate in integer arithmetic and checks every `power` value, plus the
  overflow flag.
* It counts how often each mechanism occurred, and counts a failure for any that never did. The
  mechanisms are: segments, trees run, end markers, learners finishing out of order,
  result-FIFO stalls, forced splits (only in the benches with 8-bit counters) and overflow.
* It measures the latency from `inv_done` to `power_valid` while a single invocation is
  outstanding. The shortest must fall between 17 cycles (the divider alone) and one worst-case
  tree walk plus aggregation and division.

To run one bench with plain Verilator 5:

```
verilator --binary -Wall -Wno-fatal --top-module tb_power_monitor_full \
    -y rtl -y tb -Irtl -Itb rtl/pm_pkg.sv tb/tb_power_monitor_full.sv -o sim
./obj_dir/sim
```

Run from the directory that holds `rtl/` and `tb/`. The full-size bench runs in well under a
second. For another bench, change the top module and the file name. All benches are
deterministic apart from Verilator's random initial values, and everything that is read is reset
or written first.

## Lint notes

Verilator `-Wall` reports only the following:

* FIFO status outputs that a user does not need: `count` and `full` of the feature, result and T
  FIFOs.
* In the top, the observation signals `seg_split`, `cluster` and `learner_stall`. The
  testbenches monitor them.
* The tree FSM state output of `dt_fsm`, which is exported for debugging.
* The top bit of the divider's partial remainder, which is never read.
* `pm_pkg` constants that a particular file does not use.
* `SYNCASYNCNET` on `rst_n`. The reset is asynchronous for the flip-flops and is also used in
  the `disable iff` of the protocol assertions.

None of these is a circuit problem: there are no latches, combinational loops, multiple drivers
or undriven nets.
