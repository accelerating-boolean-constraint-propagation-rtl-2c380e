# A clause-parallel BCP coprocessor for DPLL SAT solving

DPLL solvers spend most of their time in Boolean constraint propagation (BCP). BCP takes
a new assignment, finds the clauses that became *unit* (every literal false except one
unassigned literal), assigns that last literal to make the clause true, and repeats until
nothing changes or some clause has every literal false (a *conflict*).

This design gives every clause its own small processor. A new assignment is broadcast to
all of them at once, and each one re-evaluates its clause in the same clock cycle. Nothing
has to look up which clauses hold the variable, and no engine walks a clause list. One
implication is chosen from the unit clauses and broadcast in turn, so the coprocessor
propagates one implication per clock cycle.

A host processor runs the rest of DPLL: decisions, backtracking, and splitting formulas
that are too large into *partitions*. A partition holds at most 224 clauses over at most
63 distinct variables. Partitions live in host memory and are *hot-swapped* into the clause
processors when needed. The host talks to the coprocessor over AXI4-Lite.

The architecture follows the FPGA BCP accelerator of Govindasamy, Esfandiari and Garcia,
"Accelerating Boolean Constraint Propagation for Efficient SAT-Solving on FPGAs". The
block structure, the sizes (224 clause processors, 63 variables, 3 literals per clause) and
the way it works come from that description. The register map, the encodings, the
handshakes, the FIFO depth and the timing details are this implementation's own choices.
They are marked as such below and in the header comment of each file.

## Block structure

```
            AXI4-Lite
 host  <=============>  axi_lite_regs ----- command ------>  bcp_engine
(DPLL)                    ^      ^                          +----------------------------+
                          |      +---- status ------------- | control_unit               |
                          |                                 |   | broadcast   ^ conflict  |
                          |                                 |   v             |           |
                          |                                 | clause_array (224 x         |
                          |                                 |   clause_processor)         |
                          |                                 |   | unit flags, implications|
                          |                                 |   v                         |
                          |                                 | implication_selector -------+--> chosen implication
                          |                                 +----------------------------+        |
                          +----- oldest implication ---- implication_fifo <----- push ------------+
```

| file | role |
|---|---|
| `rtl/bcp_pkg.sv` | shared types: literal, clause, assignment value, broadcast, command, status |
| `rtl/clause_processor.sv` | one clause: three literals plus a local copy of each literal's variable value, and the clause status |
| `rtl/clause_array.sv` | `NUM_CP` clause processors on one broadcast bus |
| `rtl/implication_selector.sv` | picks one implication among the unit clauses (lowest index first) |
| `rtl/control_unit.sv` | runs commands; loops over implications until none is left or a conflict appears |
| `rtl/bcp_engine.sv` | control unit + clause array + selector |
| `rtl/implication_fifo.sv` | queue of the implications propagated, for the host |
| `rtl/axi_lite_regs.sv` | AXI4-Lite subordinate with the register map below |
| `rtl/bcp_coprocessor.sv` | top level |

## The clause processor

Each clause processor holds three *slots*. A slot is a literal (6-bit variable index and a
negation bit) plus the 2-bit value of that variable as this processor last saw it:
`00` unassigned, `10` false, `11` true. Variable index 0 means the slot is empty. This
allows one- and two-literal clauses, and it makes 6 bits address exactly 63 variables. A
processor whose slots are all empty is unused: it reports `EMPTY` and never implies or
conflicts.

Every cycle the control unit may broadcast `{variable, value}`. Each processor compares
the variable with its three slots and copies the value into every slot that matches. A
value of `00` retracts the variable; this is how backtracking works. A broadcast of
variable 0 with value `00` clears every slot's value at once. From its slots the
processor computes its status combinationally:

| status | condition |
|---|---|
| `SAT` | some literal is true |
| `CONFLICT` | every literal is false |
| `UNIT` | exactly one literal is unassigned and the others are false; `implication` gives that variable and the value that makes the literal true |
| `UNRESOLVED` | otherwise |

The processors keep *local copies* of the variable values, so no central assignment
memory is read during BCP. The price is that the copies must be set when a clause is loaded.
The `UPDATE` command therefore carries each literal's current value along with the literal.
The host knows every assignment, so it supplies the values.

If a variable occurs twice in one clause, both slots count as separate literals. Such a
clause becomes unit one step later than it logically could. The host model never
generates such clauses.

## One BCP run, cycle by cycle

The control unit has two states, `IDLE` and `EVAL`.

* **Cycle 0 (`IDLE`).** A `DECIDE` command is accepted and the decided value is broadcast.
  The clause processors store it at the end of the cycle.
* **Each `EVAL` cycle.** The statuses now show the last broadcast. The control unit then
  does exactly one of these:
  * some clause is `CONFLICT`: it sets the conflict flag and returns to `IDLE`;
  * some clause is `UNIT` and the FIFO has room: it broadcasts the selector's choice and
    pushes the same implication into the FIFO;
  * some clause is `UNIT` but the FIFO is full: it *stalls* for this cycle;
  * no clause is `UNIT`: BCP is done and it returns to `IDLE`.

A decision with *k* implications and *s* stall cycles therefore takes *k + s + 2* cycles.
A decision that implies nothing is done two cycles after it arrives: receive, evaluate,
done. This matches the three-step sequence the original description gives for its own
approach, against four and five steps for two earlier designs.

The path from the broadcast register through clause evaluation, the 224-way priority
selector and back into the broadcast is one combinational loop per cycle. No timing
closure was done here. At the original FPGA clock of 106.66 MHz this design can
propagate at most 106.66 million implications per second.

**Implication selection.** When several clauses are unit at once, the lowest-numbered
processor wins. There is no separate conflict detector. Suppose two clauses imply
opposite values for the same variable. The first value is broadcast, the second clause
then has every literal false, and the next `EVAL` cycle reports a conflict.

**Backtrack** retracts one variable per command, in one cycle. With variable 0 it clears
every assignment in every processor, also in one cycle; a host returning to the root of
its search uses this instead of one command per variable. The conflict flag is cleared by
the next `DECIDE` or `BACKTRACK`.

## Register map (AXI4-Lite, 32-bit data, 5-bit byte address)

| addr | name | access | fields |
|---|---|---|---|
| 0x00 | CLAUSE | R/W | `[26:0]` three slots; slot *i* at `[9i+8:9i]` = `{value[1:0], negated, variable[5:0]}`. Byte strobes honoured. |
| 0x04 | CMD | W (reads back) | `[1:0]` op: 1 `UPDATE`, 2 `DECIDE`, 3 `BACKTRACK`; `[2]` value; `[8:3]` variable (0 with `BACKTRACK` clears all); `[23:16]` clause processor index (for `UPDATE`, which takes its clause from CLAUSE) |
| 0x08 | STATUS | R | `[0]` busy, `[1]` conflict, `[2]` FIFO empty, `[3]` FIFO full, `[4]` every loaded clause satisfied, `[15:8]` FIFO fill level, `[31:16]` stall cycles of the last decision |
| 0x0C | IMPL | R | `[31]` valid, `[6:1]` variable, `[0]` value of the oldest implication; a read pops it |
| 0x10 | CYCLES | R | `[15:0]` cycles the last decision took in the engine |

A write to CMD is handed to the control unit with a valid/ready handshake. Its write
response (BVALID) is held back until the control unit accepts the command, so a host
that waits for each write response can never overrun the engine. Busy is high from the
CMD write until BCP ends. All responses are OKAY.

## How the host uses it

1. **Load a partition.** For each clause, write CLAUSE, then write CMD with `UPDATE` and
   the processor index. Processors not used by the new partition are loaded with an empty
   clause.
2. **Propagate an assignment.** Write CMD with `DECIDE`. Then loop: read STATUS, and read
   IMPL until its valid bit is clear. Stop once a STATUS read showed busy low and the FIFO
   has been drained.
3. **Record implications.** Each popped implication is a new assignment. The host records
   it and propagates it into every other partition that holds the variable: it swaps that
   partition in (step 1, with current values) and sends the variable as a `DECIDE`. Sending
   `DECIDE` for a variable the partition already holds simply re-runs evaluation, which
   picks up any unit clause the swap exposed.
4. **Handle a conflict.** On a conflict, undo assignments. Variables of the loaded
   partition are retracted with `BACKTRACK`, or all at once with a clear-all `BACKTRACK`
   when the search goes back to its root.

Variables are numbered locally within each partition (1..63). The host keeps the mapping
to global variable numbers. How to split a formula well is an open problem. Runtime
depends heavily on the split: a partition that shares variables with many others is
swapped in often. The testbench host uses the simplest split, consecutive clauses, closing a
partition when it reaches 224 clauses or 63 distinct variables.

## Parameters and sizes

| parameter | default | where |
|---|---|---|
| `NUM_CP` | 224 clause processors | `bcp_coprocessor`, `bcp_engine`, `clause_array`, `implication_selector` |
| `NUM_VARS` | 63 variables (6-bit index, 0 = empty) | `bcp_pkg` |
| `LITS` | 3 literals per clause | `bcp_pkg` |
| `FIFO_DEPTH` | 64 implications | `bcp_coprocessor` |

The first three numbers come from the original design, which reports 224 clause processors
and 63 variables. The FIFO depth is this design's choice: one decision can imply each of
the 63 variables at most once, so 64 entries hold a whole run. Clause processor indices
are 8 bits wide (`CP_IDX_W`), so `NUM_CP` can be at most 256 without widening that field.

After generic synthesis the default top has about 6,200 flip-flop bits: 27 per clause
processor, plus the control unit, the registers and 448 bits of FIFO storage. The
original FPGA build reports 11,059 flip-flops, 13,151 LUTs and 647 LUTs used as memory;
those numbers are not comparable one to one.

## Where this departs from, or goes beyond, the original description

* **Implication FIFO.** The original block diagram shows this FIFO and its output to the
  interface, labelled "most recent implication", but the text does not describe it. Here
  it is first-in first-out and pops on read. The FIFO is fed with the implications the
  control unit actually broadcasts, not with every implication the selector sees.
* **Stalling on a full FIFO** is this design's own rule. It never triggers at the
  default depth unless the host leaves implications of earlier decisions unread.
* **Throughput.** The original reports 175 and 169 million BCPs per second for two
  benchmarks at a 106.66 MHz clock, which is more than one per cycle. How it counts a
  "BCP" is not defined there. This design propagates exactly one implication per cycle
  and counts each one.
* **Loading values with literals**, **one-variable and clear-all backtrack**, **lowest-index selection**,
  the **register map** and the **status counters** are all choices made here. The original
  says only that the control unit loads clauses, broadcasts decisions and clears
  assignments on backtrack, and that the selector picks one implication.
* **Not built:** the host software (DPLL, partitioning, swap scheduling) and the host's
  memory. The testbench model `tb/host_model.sv` stands in for them.

## Verification

Each RTL module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_clause_processor` | random clauses and broadcasts, clear-all included, against an integer reference; all five statuses reached |
| `tb_clause_array` | 16 processors, loads, broadcasts and clear-alls against a whole-formula reference |
| `tb_implication_selector` | 224-wide random unit vectors, lowest-index choice |
| `tb_implication_fifo` | random traffic against a queue; full and empty reached |
| `tb_control_unit` | scripted unit-clause sequences: broadcast order, FIFO pushes, conflict flag, stalls, cycle count *k + s + 2* |
| `tb_axi_lite_regs` | bus-functional master: strobes, command fields, held-back write response, STATUS map, pop-on-read |
| `tb_bcp_engine` | 224 processors; every implication must be forced, BCP must end at a fixed point, conflicts must be real, cycle count exact, with random FIFO-full, hot swaps, and per-variable and clear-all backtracks |
| `tb_bcp_coprocessor` | end to end with the host model on a reduced build (32 processors, 2-entry FIFO), 170 clauses over 40 variables in 6 partitions; counts decisions, implications, multi-unit selections, conflicts, backtracks, hot swaps and stalls, each of which must occur |
| `tb_bcp_full` | the default build solving a 224-clause, 63-variable formula completely; checks the total cycle budget |
| `tb_workloads` | default builds, side by side, on random satisfiable formulas of the evaluated sizes: 63×224 and 63×448 solved completely; 126×448, 225×2240, 630×2240 and 63×22400 for their first decisions |

The host model (`tb/host_model.sv`) checks the design independently of the RTL. It
confirms that each popped implication is forced by some clause under its own assignment.
After each propagation it checks that no clause of the whole formula is unit or false. It
confirms that each reported conflict has a false clause, and that the final assignment
satisfies the formula. The formulas are random 3-CNF, generated to be satisfiable with a
hidden assignment. They are not the benchmark instances of the original evaluation.

To run one testbench with Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv rtl/bcp_pkg.sv \
          tb/tb_bcp_full.sv --top-module tb_bcp_full -o sim
./obj_dir/sim
```

`tb_workloads` is the slowest, at under a minute, because the larger formulas are run
for only their first decisions. A formula with many partitions is swapped in and out by
AXI writes thousands of times, which is exactly the cost the original evaluation reports
as the bottleneck of this approach.
