# Decision-tree power monitor for FPGA designs

This design estimates, at run time, the dynamic power an FPGA design draws in
each short window of a few hundred clock cycles. It needs no current sensor.
A handful of internal nets (typically 10 to 20) are chosen offline because
their switching activity tracks power well. The monitor counts the rising
edges of each of these nets over a fixed estimation period. At the end of the
period the counts go into a regression decision tree (CART), and the tree
returns a power value. The tree is trained offline from gate-level power
analysis. On chip, it is only a table of nodes in one block RAM, walked by a
small state machine with one unsigned comparator. No multiplier and no
floating point are needed.

Because each estimate arrives a few cycles after its window closes, it can
drive fine-grained power management. This design includes one such user: a
table-driven phase-shedding controller. It picks how many phases of a
five-phase on-chip voltage regulator should run, from the static power plus
the monitored dynamic power. Several independently trained monitors can also
be combined by adding their estimates (the *model ensemble*).

The RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`. Self-checking
testbenches are in `tb/`.

## Structure

```
 monitored nets ──► activity counters ──► feature controller ──► tree FSM ◄──► structure memory
 (NUM_FEATURES)     (edge det + count)    (period counter,       (I/N/S/R)     (one node per word)
                          ▲                buffer, Act_sel mux)      │
                          └──── Rst (period end) ◄──┘                ▼ Done, Result
                                                              ensemble adder (sum of models)
                                                                     ▼
                                            static power ──► phase-shedding table ──► phase enables
```

| module | role |
|---|---|
| `pos_edge_detector` | two flops and a gate; one-cycle pulse per rising edge |
| `activity_counter` | edge detector plus a CNT_W-bit up counter with period clear |
| `feature_controller` | period counter; snapshot buffer; Act_sel multiplexer with output register; Cal_start and Rst pulses |
| `dt_structure_mem` | block RAM with synchronous read, holding the tree, plus a write port for loading |
| `dt_fsm` | tree walker with states I, N, S and R |
| `dt_regression_engine` | feature controller, FSM and memory wired together |
| `power_monitor` | one complete monitor: counters plus engine |
| `ensemble_adder` | sums the estimates of several monitors |
| `phase_shed_ctrl` | converts total power into a number of regulator phases through a threshold table |
| `power_mgmt_top` | NUM_MODELS monitors, the ensemble adder and the phase-shedding controller |
| `dt_pkg` | default sizes, the FSM state type and the node-word width function |

## Counting activity

Each monitored net passes through `pos_edge_detector`. The first flop samples
the net and the second delays it by one cycle. Their outputs are combined as
`q1 & ~q2`, which gives a pulse one cycle long for each 0→1 change. The pulse
enables the counter of that net. The net must be synchronous to the monitor
clock. This is the normal case, because the monitored nets are internal nets
of the same design.

`feature_controller` counts the clock cycles of a period from 0 to PERIOD−1.
In the last cycle of a period (count = PERIOD−1) three things happen at the
same clock edge:

* every counter value is copied into a buffer register;
* every counter restarts (`cnt_rst_o`, decoded straight from the period counter);
* `cal_start_o` is set, so it is high during the next cycle.

If an edge pulse falls in the restart cycle, the counter restarts at 1
instead of 0. As a result, every edge is counted in exactly one period. The
buffer lets the next period count while the tree is still being walked on the
previous period's values.

Counter width: a net can rise at most once every two cycles. A period of P
cycles therefore needs about log2(P/2) bits. The default of 20 bits is far
more than a 300-cycle period needs, and covers periods up to about two
million cycles. A simulation assertion reports a counter that wraps.

## The tree in memory

The whole tree shape is stored in `dt_structure_mem`. The same hardware
therefore runs any tree, balanced or pruned, up to 2^ADDR_W nodes. The root
is at address 0. Each word holds one node, most significant field first:

| node | field 1 (1 bit) | field 2 (CNT_W) | field 3 (ADDR_W) | field 4 (ADDR_W) | field 5 (FEAT_W) |
|---|---|---|---|---|---|
| decision | `is_leaf` = 0 | coefficient | left child address | right child address | feature index |
| leaf | `is_leaf` = 1 | unused | unused | unused | result (low RESULT_W bits, spanning fields 3 to 5) |

At the defaults the word is 1 + 20 + 9 + 9 + 5 = 44 bits, and the memory has
512 words. `dt_pkg::node_width()` computes the word width.

The rule at a decision node is `feature[index] <= coefficient`. If it holds,
the walk goes to the left child, otherwise to the right child. The features
are integer edge counts, so a real-valued split threshold `t` from training
is stored as `floor(t)`. For non-negative integers x, the test x ≤ t gives the
same answer as x ≤ floor(t). A tree is converted by numbering its nodes in
any order with the root at 0, then writing each decision node as
`{1'b0, floor(t), left, right, feature}` and each leaf as
`{1'b1, …, round(value)}`. The leaf value is an unsigned integer in whatever
unit the tree was trained for. The testbenches use mW.

The tree is written through the `tree_*` write port. Load it while the
monitor is held in reset. Otherwise an estimate taken during loading may walk
a half-written tree, and a corrupt tree can contain a cycle, so the walk
would never reach a leaf.

## Walking the tree: states and timing

`dt_fsm` has four states: idle (I), node reading (N), stalling (S) and result
output (R). The only transitions are I→N, N→S, S→N, S→R and R→I. The memory
and the feature path each have one register: the memory returns a word one
cycle after it receives an address, and Act_value shows the buffered feature
one cycle after Act_sel. The work of one tree level is split so that both
registers are always ready when needed:

* **I**: address 0 is kept on the memory. The root word is therefore already
  on the memory output, and its feature index already drives Act_sel. The
  root's feature value is registered in the same cycle that Cal_start is
  high.
* **N**: the current node's word and its feature value are both valid. The
  comparison is made, and the chosen child's address goes to the memory
  straight away, without a register in between.
* **S**: the child's word arrives. Its feature index drives Act_sel, so its
  feature value is registered in this cycle. If the child is a leaf, its
  value is captured into `result_o` and the FSM goes to R. Otherwise it goes
  back to N.
* **R**: `done_o` is high for one cycle. Address 0 is driven again so that
  the root is ready for the next period.

Example: a leaf at depth 2 (cycle 0 is the cycle in which Cal_start is high):

| cycle | state | memory output | Act_value | action |
|---|---|---|---|---|
| 0 | I | root | (loading root feature) | Cal_start seen |
| 1 | N | root | root feature | compare, send child address |
| 2 | S | child | (loading child feature) | child is not a leaf |
| 3 | N | child | child feature | compare, send grandchild address |
| 4 | S | leaf | – | latch result |
| 5 | R | – | – | Done, result valid |

A leaf at depth d raises Done 2d+1 cycles after Cal_start. For a tree of
maximum depth n this bounds each estimate at 2n+1 cycles: 13 cycles for
depth 6, and 17 for the largest memory-filling tree of depth 8. One walk per
period of hundreds of cycles leaves the FSM idle most of the time. Two
special cases:

* A tree that is a single leaf takes N, S and R, which is 3 cycles.
* A Cal_start that arrives when the FSM is not idle is ignored, and an
  assertion reports it. This can only happen if PERIOD is shorter than the
  walk.

## Ensemble and phase shedding

`ensemble_adder` keeps each model's newest result, latched on that model's
Done. Models with trees of different depth finish in different cycles. Once
every model has delivered since the last total, the adder pulses
`sum_valid_o` with the sum. The total appears one cycle after the slowest
model. With the default NUM_MODELS = 1, the total equals the single model's
estimate.

`phase_shed_ctrl` adds `static_power_i` to the dynamic total. It compares the
result with four ascending thresholds and enables 1 + (number of thresholds
exceeded) phases. A power exactly equal to a threshold stays in the lower
range. The output `phase_en_o` is a thermometer code (phases 0..k−1 on). The
outputs update one cycle after each total, and all phases are on after
reset. The default thresholds are 4.5, 8, 12 and 16 W. They are where the
optimum phase count changes on the efficiency curves of the five-phase
regulator this controller was sized for, read off those curves. They are
parameters (`TH_MW`) and must come from the characterisation of the
regulator actually used. Static power is not estimated on chip. Supply it
from a temperature-based figure or treat it as a constant.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_FEATURES` | 20 | monitored nets per model (10 to 20 is typical after feature selection) |
| `CNT_W` | 20 | activity counter and coefficient width |
| `PERIOD` | 300 | estimation period in cycles (3 µs at 100 MHz) |
| `ADDR_W` | 9 | structure memory address width: 512 nodes, a complete tree of depth 8 |
| `RESULT_W` | 16 | leaf value width (mW in the examples, up to 65.5 W) |
| `NUM_MODELS` | 1 | monitors added by the ensemble adder (top only) |
| `NUM_PHASES`, `TH_MW` | 5; 4500, 8000, 12000, 16000 | regulator phases and the phase thresholds in mW |

`FEAT_W`, `DATA_W`, `SEL_W`, `PWR_W` and `NPH_W` are derived widths. Leave
them at their defaults.

## What is taken from the published design and what is not

Taken from the published design:

* The edge-detector-plus-counter structure and the 20-bit counters.
* The 300-cycle period.
* Up to 20 features per model.
* The split of the engine into feature controller, four-state FSM and
  structure memory, with the signal names Act_sel, Act_value, Cal_start,
  Rst, Addr, Done and Result.
* The node fields and the rule `feature ≤ coefficient`, true to the left.
* The 2n+1-cycle bound.
* The unsigned integer comparison.
* Adding model estimates for an ensemble.
* A five-phase regulator with table-based phase selection.

Choices made in this RTL, where the source gives no detail:

* All field widths, the result width and its unit.
* The root at address 0.
* How work is split between the N and S states, and the root prefetch in I.
* Buffering all features before the Act_sel multiplexer.
* Counting an edge that falls in the restart cycle.
* The write port used to load the tree.
* How the ensemble adder gathers Done pulses.
* The threshold values, which are read from curves, not from printed
  numbers.
* The comparison at a threshold boundary, the thermometer phase code and the
  reset states.
* Monitor size: up to 512 nodes per tree, enough for every tree depth
  considered (3 to 8).

Not provided:

* The DSP-slice counter variant. It is a vendor counter macro with the same
  behaviour as `activity_counter`.
* The regulator itself, which is analog.
* The offline flow that selects nets and trains trees.
* Rescaling an estimate when the clock frequency differs from the training
  frequency. Scale outside the monitor by f_current/f_train.

No trained trees are included. The testbenches use random trees and check the
hardware against a software walk of the same tree. They show that the
hardware computes exactly what the loaded tree specifies. They say nothing
about how accurate a trained tree is.

## Simulation

Every testbench checks itself. It prints `TB_RESULT checks=N failures=M` and
ends with `$finish`, and it has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dt_pkg.sv tb/tb_tree_pkg.sv tb/tb_power_mgmt_top.sv --top-module tb_power_mgmt_top
./obj_dir/Vtb_power_mgmt_top
```

Replace the testbench name to run another one. Unit testbenches that do not
use `tb_tree_pkg` can drop it from the file list.

| testbench | what it covers |
|---|---|
| `tb_pos_edge_detector` | random stream; pulse exactly after each sampled rising edge |
| `tb_activity_counter` | bursts of edges with random spacing; clear; an edge during the clear |
| `tb_feature_controller` | period length, Cal_start one cycle after Rst, snapshot values, Act_sel→Act_value latency, out-of-range select |
| `tb_dt_structure_mem` | random fill and read-back; one-cycle read latency |
| `tb_dt_fsm` | FSM with model memory: 60 random trees of depth 0 to 8, result against a software walk, Done at exactly 2d+1, all states used |
| `tb_dt_regression_engine` | engine with 40-cycle period, random counter values, tree reloads, result, latency and period |
| `tb_power_monitor` | full monitor with 60-cycle period, nets toggling at random rates, an independent edge count and tree walk |
| `tb_ensemble_adder` | three models delivering in random order, including repeats |
| `tb_phase_shed_ctrl` | random and boundary powers against the threshold table |
| `tb_power_mgmt_top` | whole design at default parameters, 60 periods, a pruned depth-8 tree |
| `tb_model_ensemble` | three monitors with pruned depth-5 trees, summed |
| `tb_workloads` | six monitors with complete trees of depth 5, 5, 5, 4, 6 and 6 (the tuned depths of the evaluated benchmark models), worst-case walk every period |

The end-to-end benches (`tb_top_env`) keep their own period count and
per-net edge counts, independent of the RTL. They check, in every period:

* each model's result and Done cycle;
* the ensemble total;
* the phase decision.

They also count how often each mechanism occurred: period restarts,
stall-state cycles, edges on a period boundary, leaves at different depths,
phase increases and decreases, and multi-model totals. A mechanism that never
occurred counts as a failure.
