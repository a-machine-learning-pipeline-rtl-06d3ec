# A random-forest pipeline stage for per-instruction clock adjustment

A pipelined processor normally runs at the clock period of its slowest path.
Most instructions finish far sooner. How long an execute-stage operation
really takes depends on what it is, its operands and what the execution unit
computed just before. This design adds one pipeline stage between decode
and execute. The stage predicts, for every instruction, which *delay class*
it falls into. The clock period of that instruction's execute cycle is then
set to the class's upper delay bound. The predictor is a random forest, an
ensemble of small decision trees. A guess that is too fast cannot corrupt
state: the execute output is sampled twice, and an instruction whose two
samples differ is thrown away, fetched again and re-executed with the
worst-case clock.

This RTL implements the added stage and the logic around it: feature
extraction, the forest, clock-class selection, the double-sampling error
detector and the replay control. The 32-bit MIPS-style baseline pipeline
(fetch, decode, execute, memory, write-back, forwarding, caches) and the
clock generator are not included. They connect through the ports of
`ml_pipeline_top`.

## Where the stage sits

```
          +----+   +----+   +--------------+   +-----+   +-----+   +----+
  fetch ->| IF |-->| ID |-->|  ML stage    |-->| EX  |-->| MEM |-->| WB |
          +----+   +----+   | features     |   +-----+   +-----+   +----+
             ^        ^     | random forest|      |  \
             |        |     +--------------+      |   double sampling
             |        |            | class        |   (main + shadow)
             |        |            v              v
             |        |     clock-class select  timing_error_detector
             |        |            |                    | err
             |        +------------+--- replay_ctrl <---+
             +--------- flush, redirect to failing PC
                                   |
                          clk_cls to clock manager -> clk, clk_shadow
```

The stage takes one cycle. An instruction accepted from decode at edge *k* is
in the ML/EX register, with its class, after edge *k+1*. The clock manager
reads `clk_cls` right after that edge. It makes the coming period, the
instruction's execute cycle, the class's period.

## Delay classes

Delays are measured against a worst-case execute delay of 4 ns. Three
configurations are supported (`NUM_CLASSES`, default 4). The period of a
class is the upper bound of its interval:

| classes | class 0 | class 1 | class 2 | class 3 |
|---|---|---|---|---|
| 2 | 0 - 2.2 ns | 2.2 - 4.0 ns | | |
| 3 | 0 - 1.8 ns | 1.8 - 2.6 ns | 2.6 - 4.0 ns | |
| 4 | 0 - 1.0 ns | 1.0 - 2.0 ns | 2.0 - 3.0 ns | 3.0 - 4.0 ns |

Class 0 is the fastest clock. The highest class is the worst-case clock,
which is always safe. `ml_pkg::class_period_ps` holds these numbers. The
RTL itself only produces the class number; the periods matter only to the
clock manager.

Four configurations give the largest speedup, even though their classifier
is the least accurate: a finer grid recovers more slack per instruction.
Two classes give the best energy. Changing `NUM_CLASSES` is all it takes to
switch; the forest must be retrained for the new class set.

## The feature vector

The forest sees nine values per instruction (`ml_pkg::features_t`; the index
is what a tree node names in `fidx`):

| fidx | feature | meaning |
|---|---|---|
| 0-3 | instruction type | one-hot: 1000 arithmetic, 0100 arithmetic with immediate, 0010 logical, 0001 multiply/divide; 0000 for anything else |
| 4 | op1 | first operand |
| 5 | op2 | second operand |
| 6 | op1 ^ previous op1 | bits that toggle on the first operand input |
| 7 | op2 ^ previous op2 | same for the second operand |
| 8 | previous output | most recent checked execute result |

The last three features carry the computation history. Data that overwrites
very different data, and coupling between neighbouring wires, change the
delay.

**Which "previous" instruction.** The history operands come from the
instruction that left the ML stage just before the current one, so they are
exact. The previous *output* cannot be. While the current instruction is
being classified, the one before it is still executing, and its result will
not exist until the end of the cycle. `feature_extract` therefore uses the
newest result already captured behind execute. In an unbroken stream this is
the result of the instruction two places ahead. A forest meant for this
hardware must be trained with the feature defined the same way.

Instructions that belong to none of the four groups (loads, stores, branches,
jumps) are not classified. They always get the worst-case class.

## The forest in hardware

The trained forest is not fixed in the logic. Each tree (`rf_tree`) is a table
of up to `NODES` nodes, written through a load port. A node
(`ml_pkg::rf_node_t`, 57 bits) is either

* an inner node: feature index `fidx`, 32-bit `thresh`, child pointers `left`
  and `right`. The walk goes left when `feature <= thresh` (unsigned);
* a leaf (`leaf` = 1) with its class in `cls`.

The root is node 0. `rf_tree` walks `MAX_DEPTH` levels combinationally. At
each level it reads one node, compares, and picks a child. A leaf keeps the
walk where it is. After the last level the node reached must be a leaf.
Anything else votes for the worst-case class: a table deeper than
`MAX_DEPTH`, a pointer beyond `NODES`, or a node never written since reset.
An unloaded or half-loaded forest is therefore slow but never wrong.

`rf_vote` counts the trees' votes. The class with most votes wins, and a
tie goes to the slower class.

**Loading a scikit-learn forest.** For each estimator, write its nodes with
`wr_tree` = estimator index, `wr_addr` = node id, and:

* `fidx` = the feature index from the table above;
* `thresh` = the threshold mapped back to a raw value (see below);
* `left`, `right` = the children;
* for a leaf, `cls` = the argmax of the leaf's class counts.

Training scaled the features with a quantile transform. That transform is
monotonic, so a threshold on the transformed value equals a threshold on the
raw value: take the largest raw value that the transform maps to at most the
trained threshold. No transform is needed in hardware. The tree's `<=` rule
must also match the exported threshold: scikit-learn sends `x <= t` left, as
here.

Sizes: the defaults (10 trees, depth 10, 512 nodes per tree) are one modest
point of the hyperparameter range such forests are chosen from (1 to 200
trees, depth 10 to 50). For a larger model, raise `N_TREES`, `MAX_DEPTH` and
`NODES`, and `ml_pkg::NODE_AW` if `NODES` exceeds 512. Hardware grows
linearly in trees, nodes and depth. The whole classification must fit in one
cycle at the fastest class period. A deep forest would have to be split over
several stages, which this RTL does not do.

## Catching wrong guesses: double sampling and replay

A class that is too slow only wastes time. A class that is too fast means the
execute output has not settled when the EX/MEM register captures it.
`timing_error_detector` catches this. It captures the execute output twice:

* the main register, on `clk`, gives the value passed on to the memory stage;
* the shadow register, on `clk_shadow` (the same edge delayed by a guard
  time), gets a second sample.

If the two samples differ, `err` rises after the shadow edge. `mem_valid` is
then low, so the memory stage must not commit the result. At the next edge
`replay_ctrl` does three things:

1. it flushes IF, ID, ML and EX (`front_flush`, and inside the stage);
2. it redirects fetch to the failing instruction (`redirect_valid`,
   `redirect_pc`);
3. it arms a flag so that the next instruction to enter execute, which is the
   re-fetched one, runs with the worst-case class (`replay_slow` marks that
   cycle).

Cycle by cycle, with the failing instruction A captured at edge P-1:

```
edge     P-1        P          P+1    P+2    P+3         P+4        P+5
         A captured err high   A in   A in   A in EX     A captured mem_valid
         (wrong)    -> flush,  ID     ML     worst-case  (right)    for A
                    redirect                 clock
```

A commits five edges after its failed attempt. Four of those cycles are the
re-run IF, ID, ML and EX stages. The fifth is the cycle in which the shadow
sample is compared. A stall in between adds its own cycles.

**What the guard time must satisfy.** These conditions are a property of
double sampling, not of the RTL. The system integrator must guarantee them:

* The guard time must be shorter than the shortest execute delay. Otherwise
  the shadow register already sees the *next* instruction's output. That is a
  false error: safe, but it costs a replay.
* A violation is caught only if the late result arrives before the shadow
  edge. If a guess can be more than one class too fast, the guard time must
  cover that distance. Otherwise both samples hold the same wrong value and
  the error goes unseen. The system testbench uses a 0.5 ns guard time with
  four 1 ns classes. Its execute delays stay within 0.3 ns of the next lower
  class boundary.

## Top-level interface (`ml_pipeline_top`)

| port | dir | width | purpose |
|---|---|---|---|
| `clk` | in | 1 | pipeline clock; its period follows `clk_cls` |
| `clk_shadow` | in | 1 | `clk` delayed by the guard time |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `id_valid`, `id_instr` | in | 1, 115 | decoded instruction: pc, group, op1, op2, 16-bit opaque control word |
| `stall` | in | 1 | baseline stall: holds the ML and EX registers |
| `core_flush` | in | 1 | baseline flush (e.g. taken branch): empties the stage |
| `ex_valid`, `ex_instr` | out | 1, 115 | instruction launched into execute |
| `ex_result` | in | 32 | execute output (double sampled) |
| `mem_valid`, `mem_result`, `mem_pc` | out | 1, 32, 32 | checked EX/MEM contents; commit only when `mem_valid` |
| `front_flush` | out | 1 | flush IF and ID |
| `redirect_valid`, `redirect_pc` | out | 1, 32 | refetch from the failing instruction |
| `clk_cls` | out | 2 | class of the execute cycle that just started (0 for a bubble) |
| `replay_slow` | out | 1 | this execute cycle is a worst-case re-execution |
| `wr_en`, `wr_tree`, `wr_addr`, `wr_node` | in | 1, clog2(N_TREES), 9, 57 | forest load port |

Parameters: `N_TREES` (10), `NODES` (512), `MAX_DEPTH` (10), `NUM_CLASSES` (4).
The data width (32) and the control-word width (16) are in `ml_pkg`.

`mem_valid` and `err` settle only after the shadow edge. Sample them on the
next rising edge of `clk`, as every register in this design does.

## Files

| file | content |
|---|---|
| `rtl/ml_pkg.sv` | types, feature numbering, node record, class periods |
| `rtl/feature_extract.sv` | feature vector and history registers |
| `rtl/rf_tree.sv` | one loadable decision tree |
| `rtl/rf_vote.sv` | majority vote, ties to the slower class |
| `rtl/rf_classifier.sv` | the forest: trees plus vote, with the load port |
| `rtl/ml_stage.sv` | the pipeline stage: ID/ML register, features, forest, ML/EX register |
| `rtl/timing_error_detector.sv` | main and shadow sampling of the execute output |
| `rtl/replay_ctrl.sv` | clock-class selection, flush, redirect, worst-case re-execution |
| `rtl/ml_pipeline_top.sv` | everything above wired together |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_rf_pkg.sv` | random forest generator and software reference classifier |
| `tb/adaptive_clock_model.sv` | behavioural clock manager (period from class, shadow clock) |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends. With
Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ml_pipeline_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/ml_pkg.sv tb/tb_rf_pkg.sv \
  tb/tb_ml_pipeline_top.sv -o sim
./obj_dir/sim
```

Replace the top module and the last file for another testbench. The time unit
is 1 ps (Verilator's default); the code declares no timescale.

What the testbenches establish:

* **Forest** (`tb_rf_tree`, `tb_rf_classifier`, `tb_rf_vote`). Random trees are
  loaded and compared, over thousands of random feature vectors, with a
  software walk and vote written separately in `tb_rf_pkg`. Also checked:
  values exactly on a threshold, trees deeper than the depth limit, and
  unloaded trees.
* **Features and stage** (`tb_feature_extract`, `tb_ml_stage`). Every
  feature field is checked against a model of the history. The whole stage
  is checked against a cycle model under random bubbles, stalls and flushes,
  including the one-cycle latency.
* **Detector and replay** (`tb_timing_error_detector`, `tb_replay_ctrl`).
  Values arrive on time or between the main and shadow edges. Error pulses
  are checked against the expected flush, redirect and class selection.
* **System** (`tb_ml_pipeline_top`, default sizes). A random program of one
  million instructions runs through a modelled front end and an execution unit with real
  delays in picoseconds, under the variable clock. About 15% of the
  instructions really belong one class slower than chosen and must be
  replayed; about 15% one class faster. The bench checks three things. Every
  instruction must commit exactly once, in order, with the right value.
  Every first execution must use the class the reference forest predicts.
  Every replay must commit five edges after its failed attempt. It also
  requires that each mechanism occurs. The run takes about 1.25 million
  cycles, including stalls and replays (some 38,000), and about 4.1 ms of
  simulated time against 5.0 ms for the same cycles at a fixed 4 ns clock.
  The simulation takes about 15 s, including the build. That figure reflects the
  testbench's made-up delays, not a real execution unit.

## How far to trust it, and where it departs

What follows the source design:

* the stage between decode and execute;
* the six features, nine values with the one-hot type;
* the random-forest model;
* the 2/3/4-class boundaries;
* per-instruction clock selection;
* double sampling;
* re-execution of a failed instruction with the worst-case clock.

This design's own choices:

* **Loadable trees** instead of trees hard-coded from one training run. The
  forest used for the published results is not available, so no trained
  model ships with the RTL. The testbenches load random forests.
* **Previous output** is the newest *captured* result, not the immediately
  preceding one (see the feature section).
* **Hard majority vote** with ties to the slower class. A software forest
  averages class probabilities, which can differ when leaves are impure.
* **Replay cost** is five edges: the four re-run stages plus one detection
  cycle.
* **Bubbles** run at the fastest class. Unclassified instruction groups run
  at the worst-case class.
* History registers are not rolled back on a replay.
* **Not built:**
  * the baseline processor;
  * the clock manager, assumed able to change the period from one cycle to
    the next;
  * the per-class supply voltage that goes with each clock period;
  * the training and profiling flow that produces the forest.

Compilation: every file passes Verilator lint and the slang front end. At
the default sizes, coarse synthesis of the complete stage takes several
minutes. The node-table walk has `MAX_DEPTH` + 1 read ports per tree. The
result is 291,840 memory bits (10 trees x 512 nodes x 57 bits), about 5,500
flip-flop bits and about 2,500 word-level cells. Among those cells are 100
32-bit comparators, one per tree level.
