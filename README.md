# Per-instruction clock scaling with a Random Forest pipeline stage

A synchronous pipeline is normally clocked for its slowest path, yet most
instructions settle in a fraction of that time. How long an instruction
really takes depends mostly on what it is, what its operands are, and what
the Execute logic computed just before. This design adds a classifier stage
to a 32-bit MIPS-style pipeline that predicts that delay. A small
Random Forest sorts every instruction into one of a few *delay classes*
before it reaches Execute. The pipeline clock for the cycle in which the
instruction executes is then stretched or shortened to suit its class. A
wrong guess that is too optimistic is caught by sampling the Execute output
twice, and the instruction is replayed at the safe worst-case period.

The RTL here is the classifier stage and the control around Execute. It
connects to a host pipeline (fetch, decode, execute, memory, write-back) and
to an adaptive clock generator, neither of which is included.

```
        host pipeline                this design (dfs_ml_core)                  host pipeline
  IF -> ID --id_valid/id_instr--> [ ML stage ] --> [ issue reg ] --ex_*--> Exe --ex_result--+
           <--id_stall---------    features         replay_ctrl                             |
                                   100-tree forest        |                                 v
                                                    freq_select --period_sel/ps--> clock    double_sampler --res_*--> Mem -> WB
                                                                                   generator       ^ clk_shadow
```

## 1. One instruction's trip

| cycle | ML stage              | Execute (issue register)  | clock period of the cycle    | result register |
|-------|-----------------------|---------------------------|------------------------------|-----------------|
| t-1   | instruction *i* held, classified | *i-1*          | class of *i-1*               | *i-2*           |
| t     | *i+1*                 | *i* (with its class)      | class of *i*                 | *i-1*           |
| t+1   | *i+2*                 | *i+1*                     | class of *i+1*               | *i* (main sample at the end of *t*; checked after the shadow edge) |

* The ML stage is an ordinary pipeline stage. Its register is loaded from
  Decode whenever it is not stalled. The features and the forest are
  combinational from that register, so the class is ready when the
  instruction moves on. Throughput is one instruction per cycle and the
  stage adds one cycle of latency.
* The class is stored in the Execute issue register next to the
  instruction. `freq_select` turns it into the period of the cycle in which
  the instruction executes. It does so right after the clock edge, so the
  clock generator must be able to change period from one cycle to the next.
* The result leaves Execute at the end of the (possibly short) cycle. The
  error check for it is known later, during the following cycle.

## 2. Features

`feature_extract` presents six 32-bit values to every tree, in the order of
`dfs_pkg::feature_e`:

| index | feature      | value                                                  |
|-------|--------------|--------------------------------------------------------|
| 0     | `F_TYPE`     | instruction type, 12 bits `{opcode, funct}` zero-extended |
| 1     | `F_OP1`      | operand 1                                              |
| 2     | `F_OP2`      | operand 2                                              |
| 3     | `F_TGL1`     | operand 1 XOR operand 1 of the instruction last issued to Execute |
| 4     | `F_TGL2`     | operand 2 XOR operand 2 of the instruction last issued to Execute |
| 5     | `F_PREV_OUT` | latest Execute result that passed the error check      |

Features 3 and 4 tell the forest which input bits of Execute are about to
toggle. That is the "computation history". The operand history is captured
from what actually enters Execute, replays included.

The previous output is a compromise. The output of the instruction directly
ahead (*i-1*) is still being computed while *i* is classified. The latest
value available is therefore the result of *i-2*.

## 3. The forest

`rf_classifier` holds `NUM_TREES` instances of `decision_tree` and a vote.

**Tree layout.** Each tree is complete, of depth `TREE_DEPTH` (4), and stored
in heap order. Internal node *k* (0 to 14) has a feature select and a 32-bit
threshold. The walk goes to child 2*k*+1 when `feature <= threshold`
(unsigned), and to 2*k*+2 otherwise. Leaves 0 to 15 (node addresses 15 to 30)
each hold a class. All 15 comparisons run in parallel and a four-level
multiplexer chain picks the leaf.

A trained tree that is shallower than 4 is loaded by giving its unused
internal nodes a threshold of all ones, which always goes left, and by
copying the leaf class into every leaf below.

**Programming.** Trained thresholds are data, not part of the design, so the
trees sit in registers. They are written one node per clock through `cfg`
(`dfs_pkg::tree_cfg_t`):

| field  | bits | meaning                                                    |
|--------|------|------------------------------------------------------------|
| `we`   | 1    | write strobe                                               |
| `tree` | 8    | tree index                                                 |
| `node` | 8    | 0..14 internal node, 15..30 leaf                           |
| `fsel` | 3    | feature of an internal node                                |
| `thr`  | 32   | threshold; for a leaf the class is `thr[1:0]`              |

Loading all 100 trees takes 3,100 writes. After reset every leaf holds the
slowest class. An unprogrammed forest therefore runs the pipeline at the
worst-case period, which is simply the conventional processor.

**Vote.** Each tree gives one class, and the class with the most votes wins.
A tie goes to the slower class, because a pessimistic guess costs only time
while an optimistic one costs a replay.

## 4. Delay classes and clock periods

The classes split a 4.0 ns worst-case period. Class 0 is always the fastest.
The period used for a class is the upper edge of its delay range
(`dfs_pkg::class_period_ps`):

| configuration | trees | class 0 | class 1 | class 2 | class 3 |
|---------------|-------|---------|---------|---------|---------|
| 2 classes     | 10    | 2.2 ns  | 4.0 ns  |         |         |
| 3 classes (default) | 100 | 1.8 ns (high performance) | 2.6 ns (nominal) | 4.0 ns (low power) | |
| 4 classes     | 100   | 1.0 ns  | 2.0 ns  | 3.0 ns  | 4.0 ns  |

`freq_select` outputs the class as `period_sel`, an operating-point index,
and the period as `period_ps`. Three cases override the class:

* during a replay, the worst-case period is used;
* an empty Execute slot runs at the fastest period, since Execute holds its
  inputs and has nothing to settle;
* an out-of-range class saturates to the worst case.

Each operating point could also carry its own supply voltage. No voltages
are defined here; `period_sel` is the index a regulator would use.

## 5. Catching and repairing a wrong guess

This is the part that needs the most care when the core is integrated.

### Double sampling

`double_sampler` captures the Execute output node `ex_result` twice:

* the main register takes it at the rising edge of `clk`, which ends the
  scaled cycle;
* the shadow register takes it on `clk_shadow`, a copy of `clk` delayed by
  a fixed amount.

If the instruction had not settled by the main edge, the two samples differ
and `err` rises. The error belongs to the instruction now in the main
register. `err` is only meaningful after the shadow edge, and the core acts
on it at the next main edge.

Two timing rules make the detector sound. Both belong to the clock generator
and to the Execute logic of the host:

1. **Detection window.** The shadow delay must be at least the largest
   amount by which an instruction can overrun its class period. It must also
   be shorter than the shortest period. With 3 classes, a 1.4 ns delay
   covers an overrun of one class (1.8 -> 2.6 -> 4.0 ns) and stays below
   1.8 ns. With 4 classes it must be under 1.0 ns.
2. **Short paths.** No Execute output bit may start to change earlier than
   the shadow delay after a launch. Otherwise the shadow register would see
   the next instruction's value. This is the usual minimum-delay constraint
   of shadow-latch error detection, met by padding short paths.

An instruction misjudged by more than the shadow delay goes undetected. The
forest must not make such errors.

### Replay

When `err` is seen for instruction *i*, Execute already holds *i+1* and the
ML stage holds *i+2*. `replay_ctrl` then does the following, for
`REPLAY_PENALTY = 4`:

| edge after the error cycle | loaded into Execute | ML stage / Decode | period        |
|----------------------------|---------------------|-------------------|---------------|
| end of error cycle         | empty (*i+1* squashed, its sample marked invalid) | stalled | worst case |
| +1                         | empty               | stalled           | worst case    |
| +2                         | *i* again           | stalled           | worst case    |
| +3                         | *i+1* again         | stalled           | worst case    |
| +4                         | *i+2*               | runs              | class of *i+2* |

Without the error, *i+2* would have entered Execute at the first of these
edges, so the error costs exactly four cycles. `REPLAY_PENALTY - 2` empty
cycles are inserted; the other two are the re-issues. A two-entry buffer
holds *i* and *i+1* for the re-issue.

An error reported while a replay is under way is ignored. Re-issued
instructions run at the worst-case period and cannot fail.

The wrong result of *i* has already reached the result register with
`res_valid` set. `res_err` rises late in that cycle, after the shadow edge.
The host's memory stage must drop a result flagged this way. The squashed
*i+1* never shows up as valid.

## 6. Top-level interface (`dfs_ml_core`)

All signals are synchronous to the rising edge of `clk`. `rst_n` is an
active-low asynchronous reset.

| port | dir | width | use |
|------|-----|-------|-----|
| `clk`, `clk_shadow` | in | 1 | scaled pipeline clock; delayed shadow clock |
| `cfg` | in | `tree_cfg_t` | forest programming |
| `id_valid`, `id_instr` | in | 1, `instr_t` (84) | instruction from Decode: type, operands, 8-bit tag |
| `id_stall` | out | 1 | Decode must hold its instruction |
| `ex_valid`, `ex_instr`, `ex_cls` | out | 1, 84, 2 | Execute inputs and the class being used |
| `ex_result` | in | 32 | Execute output node (combinational) |
| `res_valid`, `res_data`, `res_tag` | out | 1, 32, 8 | result towards Memory |
| `res_err` | out | 1 | timing error on that result (valid after the shadow edge) |
| `period_sel`, `period_ps` | out | 2, 16 | operating point and period for the current cycle |
| `replay_active`, `replay_start` | out | 1 | replay under way; error acted on this cycle |

Parameters: `NUM_TREES` (100), `NUM_CLASSES` (3), `TREE_DEPTH` (4),
`REPLAY_PENALTY` (4, at least 3). Data width, type width and tag width are
in `dfs_pkg`.

`id_stall` and `res_err` depend on the error flag, so they can rise late
in a cycle, after the shadow edge. The host must sample them at the clock
edge, as a register would.

Stalls of the host's own hazard logic enter as empty slots (`id_valid = 0`).
A host that must freeze Execute itself, for example on a cache miss, needs an
extra hold input that is not provided here.

The forest is by far the largest part. Coarse synthesis of the default core
gives about 56,000 flip-flop bits, almost all of them tree thresholds, and
about 1,500 32-bit comparators. A forest with fixed trained values would
fold the thresholds into constant comparators and would be far smaller.

## 7. How this relates to the published design

Taken from the published description:

* an extra classifier stage between Decode and Execute;
* the six features: type, two operands, operand XOR toggles, previous
  output;
* a Random Forest with 10 trees (2 classes) or 100 trees (3 and 4 classes);
* the class boundaries on a 4.0 ns worst case, and the three-class default
  with its three class names;
* a per-instruction clock period with near-instant switching;
* double sampling of the output;
* replay at the worst-case period, with a four-cycle penalty.

Choices made here where the description is silent:

* tree depth 4, stored in programmable registers instead of generated fixed
  logic (no trained model is published);
* unsigned `<=` splits;
* majority vote with ties to the slower class;
* a 12-bit type field;
* the previous output being that of the instruction two ahead;
* the shadow-register error detector and its timing rules;
* the squash, empty-cycle and re-issue sequence that makes up the four-cycle
  penalty;
* fastest period for empty slots;
* all reset values;
* all port lists.

Not included:

* the host MIPS pipeline (fetch, decode, execute with forwarding, branch
  handling, caches, memory, write-back);
* the adaptive clock generator (`tb/adaptive_clock_model.sv` is a
  behavioural stand-in);
* supply-voltage control;
* the training flow and the trained trees;
* a forest split over several pipeline stages, which the published
  description allows as an option for slower models.

The published pipeline figure lists "previous operand 1/2" as features. The
text defines the history as the current operands XORed with the previous
ones, and that definition is the one built here.

The published speed-ups come from gate-level delays of a real processor,
which cannot be reproduced in RTL.

## 8. Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb rtl/dfs_pkg.sv tb/tb_dfs_ml_core.sv \
  --top-module tb_dfs_ml_core -o sim && obj_dir/sim
```

Substitute any testbench name.

| testbench | what it shows |
|-----------|---------------|
| `tb_feature_extract` | all six features against a model of the history registers |
| `tb_decision_tree` | reset class; 20 random trees loaded through the port, checked against an independent tree walk (`tb_tree_model.svh`), including values equal to a threshold |
| `tb_rf_classifier` | 100 random trees against the reference vote; directed tie and plurality cases |
| `tb_ml_stage` | stage register with stalls; each feature reaches the forest (one split per feature) |
| `tb_freq_select` | period tables for 2, 3 and 4 classes, replay and bubble overrides |
| `tb_double_sampler` | late and on-time results, valid qualification, error after the shadow edge |
| `tb_replay_ctrl` | cycle-exact comparison against a queue model, with random errors; the four-cycle penalty |
| `tb_dfs_ml_core` | full core at default size with a timed Execute model and the clock model: results in order and correct, errors only on real overruns, the period of every cycle, and every mechanism (all classes, errors, replays, stalls, bubbles, toggles) at least once |
| `tb_workload_random` | 1,000,000 random instructions through the 2-, 3- and 4-class configurations side by side (`dfs_e2e_harness`), with misclassification rates set near the published inference errors (2%, 6%, 15%) |

The Execute delays in these testbenches are synthetic, and the speed-ups
they print only show that the mechanism works. `tb_dfs_ml_core`
deliberately misclassifies half of some instruction types to stress the
replay path, and shows a slowdown for that reason. In `tb_workload_random`
the 2- and 3-class runs come out about 1.2 times faster than a fixed 4.0 ns
clock. The 4-class run, at a 15% error rate, breaks even.

## 9. Files

| file | content |
|------|---------|
| `rtl/dfs_pkg.sv` | widths, feature enum, instruction and configuration structs, period table |
| `rtl/feature_extract.sv` | features and history registers |
| `rtl/decision_tree.sv` | one programmable tree |
| `rtl/rf_classifier.sv` | forest and vote |
| `rtl/ml_stage.sv` | ML pipeline stage |
| `rtl/freq_select.sv` | period selection |
| `rtl/double_sampler.sv` | main/shadow sampling and error flag |
| `rtl/replay_ctrl.sv` | Execute issue register and replay sequence |
| `rtl/dfs_ml_core.sv` | top level |
| `tb/adaptive_clock_model.sv` | behavioural clock generator used by the system testbenches |
| `tb/dfs_e2e_harness.sv`, `tb/tb_tree_model.svh` | testbench helpers |
| `tb/tb_*.sv` | testbenches listed above |
