# IMBUE: a Tsetlin-machine inference array that computes clauses as currents

A Tsetlin machine (TM) classifies Boolean inputs with *clauses*: each clause is
an AND over the input literals (every feature and its complement) that a trained
set of Tsetlin automata (TAs) has chosen to *include*. A clause fires when every
included literal is `1`. Clauses vote +1 or -1 for their class, and the class
with the largest sum wins.

IMBUE keeps the trained include/exclude decisions inside a ReRAM crossbar and
evaluates clauses with Ohm's and Kirchhoff's laws instead of logic gates. Each
TA is a 1T1R cell: a ReRAM device (low resistance = include, high resistance =
exclude) behind an access transistor. A literal is applied as a voltage on the
cell's row: `1` becomes 0 V and `0` becomes 0.2 V. So a cell only draws
noticeable current when it is an **include** *and* its literal is **0**. That is
exactly the condition that kills a clause. The clause therefore fires if and
only if its column current stays small. A current sense amplifier (CSA) turns
"small or large" back into a bit, and the rest is ordinary digital logic:
inverters and an AND gate, up/down counters, an argmax comparator and a
controller.

This repository holds SystemVerilog for the whole array. The digital parts are
synthesizable RTL. The analog parts (ReRAM cell, resistive column, CSA) are
event-level behavioural models with the same ports, so the array can be
simulated end to end.

## 1. From clause logic to current

For one cell, with the nominal device values used here:

| literal | row voltage | TA action | cell current |
|---|---|---|---|
| `0` | 0.2 V | include (LRS) | 76.07 uA |
| `0` | 0.2 V | exclude (HRS) | 1.89 uA |
| `1` | 0 V | either | ~0 (modelled as 0) |

A clause is `AND_k (L_k OR NOT include_k)`. It is false exactly when some
included literal is `0`, which is the first row of the table. The cells of a
clause share a column line. Their currents add and flow to ground through a
resistor R = 100 Ohm, so the column voltage `Col_line = R * sum(I)` is large
when the clause is violated and small when it holds.

## 2. Why clauses are cut into 32-cell partial clauses

Excluded cells still leak 1.89 uA each when their literal is `0`. The CSA
reference must lie above the worst "all excluded" column and below the weakest
"one include" column:

* 32 excluded cells, all literals `0`: 32 x 1.89 uA x 100 Ohm = **6.05 mV**
* one include with literal `0`, all other literals `1`: **7.61 mV**

The reference is therefore set to `REF_UV = 6800` uV. With more cells per
column, the leakage floor would pass the single-include level and the column
could no longer be read. A clause of K literals is therefore stored in
`PARTS` columns of `W = 32` cells. Each column has its own CSA. Each CSA output
says "this part is violated", so the full clause is

    clause = NOT csa[0] AND NOT csa[1] AND ... AND NOT csa[PARTS-1]

The default is two parts (K = 64 literals, 32 features). `PARTS` is a parameter.
Large image models need 1568 literals, which is 49 columns per clause.
`tb_partial_clause_column` checks both margin cases.

## 3. Organisation

```
 features ─► literal_decoder ──row levels (shared by all clauses)──┐
                 ▲                                                   ▼
 control_unit ───┼──► column_line_selector ──column lines──► crossbar: NCLAUSES x PARTS
   │  ▲  SE/Dis  │                                          partial_clause_column (W ta_cells + R)
   │  │          └───────────────────────────────────────────────────┤ Col_line
   │  │                                                                ▼
   │  │                                          one csa per column (vs REF_UV)
   │  │                                                                ▼
   │  │                                          full_clause per clause (NOT, AND)
   │  │                                                                ▼ selected clause
   │  └────── cnt_en ──────────────────────────► updown_counters (class sums, +1/-1)
   │                                                                   ▼
   └── res_load ──► classification_output ◄── comparator (argmax) ◄────┘
```

| module | kind | role |
|---|---|---|
| `imbue_pkg` | package | line-level and mode enums, default sizes, timing and device constants |
| `ta_cell` | behavioural | 1T1R cell: read current, programming by pulse length |
| `partial_clause_column` | behavioural | W cells on one column line plus the resistor R; outputs `Col_line` in uV |
| `csa` | behavioural | latch-type sense amplifier with SE (sense) and Dis (discharge) |
| `full_clause` | RTL | per-part inverters and the AND gate |
| `literal_decoder` | RTL | feature register; literal `2f = x_f`, `2f+1 = NOT x_f`; part `p` row `i` gets literal `p*W+i`; drives read levels or one programming pulse |
| `column_line_selector` | RTL | read: all columns of the selected clause; program: one column |
| `updown_counters` | RTL | one signed counter per class |
| `comparator` | RTL | argmax, lowest index wins a tie |
| `classification_output` | RTL | result register with a valid flag |
| `control_unit` | RTL | programming and inference sequencer |
| `imbue_top` | RTL + models | everything wired together |

Clause numbering: clause `n` belongs to class `n / CPC`. Within a class, even
clauses vote +1 and odd clauses -1, so every class has as many positive clauses
as negative ones. Column `n*PARTS + p` holds part `p` of clause `n`.

## 4. Timing

The clock period is 5 ns, chosen so that every analog phase is a whole number of
cycles.

**Inference.** The clauses are read one after another, one read pulse per clause:

| cycles | phase | what happens |
|---|---|---|
| 2 (10 ns) | settle | literals on the rows, the clause's columns switched on |
| 4 (20 ns) | SE high | the CSAs latch; on the last cycle the full clause is counted |
| 1 (5 ns) | Dis high | the CSA nodes are discharged for the next read |

The read pulse is 7 cycles (35 ns). `result_valid` rises `NCLAUSES*7 + 2` cycles
after the clock edge that accepts `infer_valid`. At the default size (12
clauses) that is 86 cycles, or 430 ns. The discharge phase is not optional. If
it is skipped, the CSA model keeps its previous decision, which stands for the
residual bias the real discharge removes.

**Programming.** Each request writes one cell. The controller turns on that
cell's column and keeps SE low. It then drives the row with Vset (+1 V, include)
or Vreset (-2.5 V, exclude) for 7 cycles (35 ns), followed by a 7-cycle 0 V
spacer. That makes 15 cycles per cell, including the handshake. The cell model
switches only if the pulse lasts at least 35 ns. Reprogramming a cell into the
state it already holds is harmless. Cells start out excluded.

## 5. Top-level interface (`imbue_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | 5 ns clock, asynchronous active-low reset of the digital state (the ReRAM cells are not reset) |
| `prog_valid` / `prog_ready` | in/out | one programming request, accepted when both are high at a clock edge |
| `prog_clause`, `prog_part`, `prog_row`, `prog_include` | in | the cell to write, and 1 = include / 0 = exclude |
| `infer_valid` / `infer_ready` | in/out | start an inference. `features` are latched at acceptance. A programming request wins a tie |
| `features[F-1:0]` | in | Boolean features, F = PARTS*W/2 |
| `result_valid`, `result_class` | out | predicted class. `result_valid` drops when the next inference starts |
| `class_sums[M]` | out | signed class sums (for observation) |

Parameters: `W` (32), `PARTS` (2), `M` classes (2), `CPC` clauses per class (6),
`REF_UV` (6800). The class and clause defaults are the size of the smallest
model the architecture was evaluated on (Noisy XOR: 2 classes, 12 clauses, 48
literals). Larger models need larger parameters:

| model | classes | clauses | literals/clause | PARTS | fits the defaults |
|---|---|---|---|---|---|
| Noisy XOR | 2 | 12 | 48 | 2 | yes (16 rows unused, left excluded) |
| KWS-6 | 6 | 1800 | 754 | 24 | no: `M=6, CPC=300, PARTS=24` |
| MNIST | 10 | 2000 | 1568 | 49 | no: `M=10, CPC=200, PARTS=49` |
| K-MNIST, F-MNIST | 10 | 5000 | 1568 | 49 | no: `M=10, CPC=500, PARTS=49` |

The simulation cost grows with the number of cell instances. A 20-clause,
49-column array (31k cells) did not finish compiling in 15 minutes with
verilator. The full-width clause shape is therefore tested with 2 x 2 clauses.

## 6. What is modelled, and where this RTL makes its own choices

What follows the source architecture:

* 1T1R cells with LRS = include and HRS = exclude.
* Literal voltages of 0 V for `1` and 0.2 V for `0`. Programming pulses of
  Vset = 1 V and Vreset = -2.5 V for 35 ns, separated by a 0 V spacer.
* 32-cell partial-clause columns with R = 100 Ohm and one CSA per column.
* CSA phases of 20 ns SE and 5 ns Dis, inside a 35 ns read pulse.
* Inverters and an AND gate to join the partial clauses.
* Up/down counters for polarity, then a comparator, a classification output and
  a control unit.

Choices made here, where the architecture leaves things open:

* **Reading order.** One clause is read per 35 ns pulse, because the column
  line selector switches on the columns of one clause at a time. Every column
  still has its own CSA, as in the original CSA counts. At the default size this
  gives 24 CSAs for 768 cells. The original counts CSAs as cells/32 (18 for
  Noisy XOR), which would need columns shared between clauses. That is not
  done here.
* **Reference voltage.** `REF_UV` = 6.8 mV, placed inside the margin of
  section 2.
* **Clock and phase placement.** The 5 ns clock, the 10 ns settle time before
  SE, the 35 ns spacer, the valid/ready handshakes and the feature register.
* **Order and polarity.** The literal order (feature, then its complement), the
  clause-to-class and polarity assignment by index, lowest index winning an
  argmax tie, and the counter width (enough for +-CPC/2).
* **Number of parts.** `PARTS` may exceed 2. The architecture is drawn with two
  partial clauses per clause, but its energy figures assume 32-cell columns for
  models with 1568 literals. The parameter covers both.
* **Analog models.** They are ideal and nominal: no device-to-device or
  cycle-to-cycle resistance spread, no CMOS corners, no sneak paths, no RC
  settling, no power or energy figures. They check logic and sequencing, not
  the analog margins. The reported resistance spread under device variation
  (HRS 31-155 kOhm) would move the leakage floor. It is not represented.
* **Circuit warnings.** The CSA model is edge-triggered on SE and Dis, and the
  cell model measures pulse length with `$time`. Neither is meant for synthesis.

## 7. Simulating

All files are plain SystemVerilog-2017. Every testbench is self-checking and
ends with `TB_RESULT checks=N failures=M`. To run the end-to-end test at the
default size:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    --top-module tb_imbue_top rtl/imbue_pkg.sv tb/tb_imbue_top.sv
./obj_dir/Vtb_imbue_top
```

The same pattern works for any `tb/tb_<module>.sv`. Verilator finds the other
files through `-Irtl`.

| testbench | what it shows |
|---|---|
| `tb_imbue_top` | Default size. Programs a random sparse model, reprograms part of it, then runs 301 inferences against a reference TM. Checks latency and class sums, and counts every mechanism: all four programming transitions, up and down counts, violations in each partial clause, firing and silent clauses, ties, and each class winning |
| `tb_imbue_mnist_shape` | 49 columns x 32 cells per clause (1568 literals), 2 classes x 2 clauses, about 10 includes per clause |
| `tb_ta_cell` | read currents; 35 ns vs 20 ns pulses; all four transitions; a pulse with the column off |
| `tb_partial_clause_column` | KCL sum times R; both margin cases |
| `tb_csa` | sensing, hold, discharge, stale result without Dis |
| `tb_full_clause`, `tb_literal_decoder`, `tb_column_line_selector`, `tb_updown_counters`, `tb_comparator`, `tb_classification_output` | the digital blocks, exhaustive or randomised against reference models |
| `tb_control_unit` | cycle-by-cycle phase positions for programming and inference |

To change the array size, set `M`, `CPC`, `PARTS` (and, with care, `W` and
`REF_UV`) on `imbue_top`. `REF_UV` must stay between the all-excluded leakage
(`W x 189` uV) and the single-include level (7607 uV). Elaboration stops with an
error otherwise, so a `W` above 40 is rejected with the nominal currents. `CPC`
must be even, because each class has equally many positive and negative clauses.
