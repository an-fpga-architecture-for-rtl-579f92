# An online-learning Tsetlin Machine system in SystemVerilog

A Tsetlin Machine (TM) classifies boolean feature vectors with clauses: AND terms over the
features and their complements. Each literal of each clause is switched in or out by its own
small learning automaton, a saturating counter (a Tsetlin automaton, TA). Because learning only
nudges counters up or down, the same hardware that classifies can also keep learning after it
is deployed. This design is a complete on-chip system built around that property. A small
training set trains the TM offline first. The TM is then tested, and it keeps training on a
stream of "online" data that arrives later. Between passes, a processor reads accuracy
figures and may change the learning conditions: it can introduce a class the TM has never seen,
inject stuck-at faults into any automaton, or change the hyperparameters and the number of
active clauses. The system is meant for studying how online learning copes with limited initial
data, a class that appears later, and hardware faults.

Everything is synthesizable except the processor, which is not part of this RTL: its AXI4-Lite
master port is brought out at the top (`tm_online_top`). In simulation, a behavioural master
(`tb/tb_axi_master.sv`) plays its part.

## 1. The Tsetlin Machine core (`tsetlin_machine` and below)

### Automata and clauses
* `tm_automaton` is an 8-bit saturating counter. The upper half of its range means *include*,
  the lower half *exclude*. Clearing puts it at the last exclude state (127). Its output passes
  through a fault gate, `incl = (state_msb & and_mask) | or_mask`. AND=0 forces a stuck-at-0
  (excluded) and OR=1 forces a stuck-at-1 (included).
* `tm_clause` holds 2·16 automata, one per literal. The literals are `{~x, x}`. The clause output
  is the AND of all included literals:
  * A clause with no included literal outputs 1 while training and 0 while classifying.
  * A clause beyond the active clause count outputs 0 and is never trained.
* Per-literal feedback follows the standard TM rules, where *s* is the sensitivity:

| feedback | clause output | literal | TA action |
|---|---|---|---|
| Type I | 1 | 1 | increment with probability (s−1)/s |
| Type I | 1 | 0 | decrement with probability 1/s |
| Type I | 0 | any | decrement with probability 1/s |
| Type II | 1 | 0, TA excluded | increment |

  "With probability 1/s" means that a 16-bit random word is below `thr_s = 65536/s`. s is given
  in Q4.4 fixed point, so 1.375 is the code 22 and 1.0 is 16. With s = 1 every Type I decrement
  fires and no increment does. The feedback sees the fault-gated automaton outputs, so a
  stuck automaton steers learning just as a real defect would.

### Classes and voting
* `tm_class` holds up to 16 clauses. Even-numbered clauses vote +1 and odd-numbered clauses −1,
  so a reduced clause count stays balanced. The sum is clamped to ±T and becomes the class
  confidence.
* While training, each clause of the target class is chosen for feedback with probability
  (T−v)/2T: positive clauses then get Type I and negative clauses Type II. A second class is
  drawn at random among the others. Its clauses are chosen with probability (T+v)/2T, and the
  feedback types are swapped.
* `tm_argmax` returns the most confident class. On a tie, the lowest index wins.
* `tm_randomizer` is a bank of 16-bit xorshift generators (shifts 7, 9, 8), one word per
  consumer. It advances only on training cycles.

### Timing
1. A row is registered in the I/O buffer.
2. On the next edge, every clause, vote, argmax and automaton update is computed and applied at once.

`out_valid` follows `in_valid` by two clock edges, and a new row can enter every cycle.
The clause count, T and s are ports and may change between rows. Idle
or disabled logic is held by clock enables: the randomizer and the TA updates are enabled
only on training rows, and clauses at or above `clause_cnt` are frozen. An ASIC or FPGA flow may
turn these enables into clock gates.

### Fault controller (`fault_controller`)
This block holds one AND bit and one OR bit for each of the 3·16·32 = 1536 automata. At reset
they are AND=1 and OR=0, which means fault-free. The processor writes one TA at a time: the
TA index is `(class·16 + clause)·32 + literal`, where literals 0..15 are the features and
16..31 their complements. A single command clears all faults.

## 2. Data: blocks, sets and orderings

The dataset has 150 rows, stored as five 30-row blocks, each in its own dual-port ROM
(`block_rom`, `onboard_memory`). Each row is 18 bits: `{label[1:0], x[15:0]}`. Reads take one
cycle. Port A feeds the offline path and port B the online path, so both run without
arbitration.

Each run uses one *ordering* of the five blocks, which splits them into three sets:

| set | blocks | rows |
|---|---|---|
| offline training | first 1 block | 30 (a run may use only the first N rows) |
| validation | next 2 blocks | 60 |
| online training | last 2 blocks | 60 |

`cv_mapper` decodes the ordering number 0..119 as a factorial-base (Lehmer) code into one of
the 5! permutations. It then maps (set, row) to (block, address). Averaging accuracy over all
120 orderings removes the effect of which rows happen to be in which set.

The ROM images `rtl/iris_like_block0..4.hex` hold a synthetic dataset with the shape of Fisher's
iris data. It has three classes of 50 rows, each with four measurements drawn around the
per-class means of iris. Each measurement is thermometer-coded into 4 bits, giving 16 features.
The rows are shuffled before they are cut into blocks. **These are not the real iris rows**, and
the synthetic classes separate more easily, so accuracies from this RTL are higher than
iris figures. To use real data, write 150 lines of 5 hex digits in the same format.

### Offline path (`offline_input`)
On a request (set, length, ordering), this block reads the set's rows through port A and hands
them on as a valid/ready row stream (`row_stream_if`, carrying `row_t{last, keep, sample}`).

### Online path (`online_input_parser` → `online_buffer` → `online_data_manager`)
The online data source is the online set itself, replayed cyclically through port B.
* The parser writes rows into a 64-entry first-word-fall-through circular buffer whenever the
  system is busy, and it stalls while the buffer is full.
* The data manager pops the rows of one 60-row pass when the low-level manager asks for them.
  It stalls the stream when the buffer is momentarily empty.

### Class filter (`class_filter`)
When enabled, this block marks rows of one chosen class with `keep = 0`. Those rows are
consumed but neither trained on nor counted. Marking rather than deleting keeps the `last` flag and set
lengths intact. The filter sits on both paths. Disabling it between iterations introduces
the hidden class.

## 3. Control

### Low-level manager (`tm_manager_ll`)
This block runs one pass over a set. It selects the offline or online stream, forwards each kept row to
the TM with the train flag set as commanded, and tells the accuracy counter which results to
count. After the `last` row it waits DRAIN = 3 cycles, which lets the final result leave the
two-stage TM, and then pulses `done`.

### High-level manager (`tm_manager_hl`)
This is the experiment sequencer:

```
INIT (clear the TM, restart the online stream)
OFFLINE TRAIN  x offline_epochs
loop:
  TEST offline set                         -> report
  TEST validation set   (if enabled)       -> report
  TEST online set       (if enabled)       -> report
  if iteration < online_iters:
      ONLINE pass (trains if online learning is enabled), iteration++
  else DONE
```

Each test ends in a *report*. The manager raises `report_req` and holds the whole system still
until the processor acknowledges. The processor uses that pause to read the result and to
change any setting: the filter, T, s, clause count, faults, or the online-learning enable.
Offline training uses s offline and online passes use s online.

### Accuracy analysis (`accuracy_analysis`, `accuracy_history`)
`accuracy_analysis` counts errors and datapoints for one test. It clears at the start of each
test and saturates at 16 bits.

The processor can take each result at its report. In addition, `accuracy_history`
appends every result to a 64-entry RAM on the cycle the report is raised. Each entry holds
the phase, iteration, errors and datapoints. A 16-iteration run that tests all three sets
needs 51 entries. When the RAM is full, further results are dropped and an overflow flag is
set. Starting a run empties the history. The whole history can be read back after the run,
which is convenient in simulation and for slow hosts.

## 4. Processor interface

`axi_lite_regs` is a generic AXI4-Lite slave with 16 32-bit registers. Registers 0..7 are
read/write with byte strobes, and 8..15 are read-only inputs. It also gives a one-cycle write
pulse for every register, and assertions check the bus handshake rules. `sys_regmap` gives the
registers their meaning:

| addr | name | access | fields |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] online learning, [1] test validation set, [2] test online set, [3] filter enable, [5:4] filtered class |
| 0x04 | HYPER | rw | [7:0] T, [15:8] s offline (Q4.4), [23:16] s online (Q4.4) |
| 0x08 | SIZES | rw | [7:0] clause count, [14:8] offline set length, [23:16] offline epochs, [31:24] online iterations |
| 0x0C | ORDER | rw | [6:0] ordering 0..119 |
| 0x10 | CMD | w | [0] start, [1] acknowledge report |
| 0x14 | FAULT | w | [15:0] TA index, [16] AND, [17] OR, [31] clear all |
| 0x20 | STATUS | r | [0] report ready, [1] busy, [2] done, [6:4] phase, [15:8] iteration |
| 0x24 | RESULT | r | [15:0] errors, [31:16] datapoints |
| 0x28 | FAULTRD | r | [0] AND, [1] OR of the last written TA index |
| 0x18 | HISTIDX | rw | [7:0] result-history entry to read |
| 0x2C | HIST0 | r | [15:0] errors, [31:16] datapoints of that entry |
| 0x30 | HIST1 | r | [2:0] phase, [15:8] iteration of that entry, [23:16] entries stored, [31] overflow |

The phase codes are 0 idle, 1 offline training, 2/3/4 test offline/validation/online,
5 online pass, and 6 done. The `report_ready` output mirrors STATUS.ready, for use as an interrupt.

A typical run:
1. Write HYPER, SIZES, ORDER and CTRL.
2. Write CMD.start.
3. Each time STATUS.ready is set, read RESULT, optionally change settings, and write CMD.ack.
4. Stop when STATUS.done is set.

## 5. Where this design departs from, or adds to, the original description

These points were not specified and were chosen here:
* the 8-bit TA state;
* Q4.4 for s;
* the feedback probability arithmetic;
* clause polarity by index parity;
* the xorshift randomizer;
* argmax tie-breaking;
* the 64-row buffer;
* the row stream handshake;
* the factorial ordering decode;
* the register map and the report points;
* the 3-cycle drain.

Other differences:
* The "16 clauses" of the reference configuration are taken as 16 clauses per class.
* Accuracy results are both offered to the processor at each report and kept in the history
  RAM. The original description uses the RAM only in simulation and offloads results on the FPGA.
* Clock gating is expressed as clock enables.
* The ROMs hold a synthetic iris-like dataset (see section 2).
* The processor and its host link are outside the RTL.
* The original description says that a lower s makes feedback less likely ("a bias away from
  issuing feedback"). Under the standard rules used here, s = 1 instead makes every Type I
  decrement fire and no Type I increment fire. No other rule was given, so the standard
  one was kept; a designer who wants the described behaviour would change the two comparisons
  in `tm_clause`.

## 6. Simulating

All files are in `rtl/` (design, package first) and `tb/` (testbenches). Every testbench is
self-checking, prints `TB_RESULT checks=N failures=M` and has a watchdog. Run simulations from the
directory that contains `rtl/`, because the ROM images are loaded by the relative path `rtl/…`.
Example with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_tm_online_top \
  rtl/tm_pkg.sv rtl/row_stream_if.sv rtl/*.sv tb/tb_axi_master.sv tb/tb_dataset_ref.sv \
  tb/tb_tm_online_top.sv -o sim && ./obj_dir/sim
```

`tb_tm_online_top` is the end-to-end test. It runs the full-size design with default parameters
through the reference experiment: 20 offline rows, 10 epochs, T=15, s=1.375 offline and 1.0
online, and 16 online iterations. During that run it:
* hides class 0 until iteration 5;
* raises the clause count from 12 to 16 at iteration 3;
* sticks every fifth automaton at 0 after iteration 8;
* compares every report with a model of the sequence and checks the register reads;
* reads the full result history back after the run.

It finishes in about a second. The per-block testbenches are named `tb_<module>`, and
`tb_tsetlin_machine` checks learning accuracy on the full dataset.
