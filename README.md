# A partition-swapping BCP accelerator for DPLL SAT solving

Most of the run time of a DPLL SAT solver goes into Boolean constraint
propagation (BCP): after every decision, each clause is checked to see whether it
has become *unit* (all literals false but one unassigned, which forces that
literal true) or in *conflict* (all literals false). This design moves BCP into
programmable logic next to an embedded processor. The processor keeps the
whole formula in its own memory and runs the DPLL search (decisions,
backtracking, bookkeeping). The logic holds one *partition* of the formula, up
to 224 clauses over up to 63 variables, with one small clause processor per
clause. Every clause is evaluated in the same clock cycle. When the formula is
larger than that, the processor swaps partitions in and out at run time
("hot swapping"). Any formula size can then be run, and clauses in one partition
may share variables freely. The cost is the time spent swapping, which depends
entirely on how the formula is partitioned.

The RTL is SystemVerilog (IEEE 1800-2017). The top level is `sat_accel_top`. It
has an AXI4-Lite slave port and no other interface.

```
 processor ──AXI4-Lite──► axil_regs ──cmd──► bcp_engine ───────────────────────────┐
 (DPLL, formula,           (registers)  ◄─status/busy─  control_unit               │
  partitions)                 ▲                          │ broadcast               │
                              │                          ▼                         │
                              │                   clause_processor × 224           │
                              │                          │ unit implications       │
                              │                          ▼                         │
                              │                   implication_selector ──chosen──► control_unit
                              │                                                    │
                              └────── pop ────── implication_fifo ◄──── push ──────┘
```

## The propagation loop

The control unit (`control_unit.sv`) is a seven-state machine. It accepts one
command at a time, and only while it is in Idle. There are three commands:

| command            | what happens                                                                  | busy cycles |
|--------------------|-------------------------------------------------------------------------------|-------------|
| Update Clause      | the literals are loaded into one clause processor; status *success*            | 1           |
| Backtrack          | one variable is set back to unassigned in every clause processor; *success*    | 1           |
| Propagate Decision | the decided value is broadcast, then the evaluate/imply loop below runs        | 2 + 3k      |

After a decision, the machine alternates three states until no clause is unit:

1. **Evaluate.** Every clause processor reports its status combinationally. If
   any clause is unit, the implication selector's choice is latched, the status
   becomes *running*, and the machine moves to Get Implication. Otherwise the
   machine returns to Idle and the status becomes *conflict* (some clause has
   every literal false), *SAT* (every clause of the partition is satisfied) or
   *success* (neither).
2. **Get Implication.** On leaving this state the implication is pushed into the
   implication FIFO for the processor, and the status becomes *implication
   found*. If the FIFO is full, the machine waits here until the processor reads
   an entry.
3. **Propagate Implication.** The implied value is broadcast to every clause
   processor, as a decision would be. The next state is Evaluate.

Each state takes one clock cycle. A decision that leads to k implications
therefore keeps the engine busy for 2 + 3k cycles, not counting waits on a full
FIFO.

The engine has **no separate conflict detector**. When two unit clauses demand
opposite values of a variable, only one implication is chosen and propagated.
The other clause then turns into a conflict, which a later Evaluate reports.
Evaluate branches only on "is there a unit clause", so a conflict that exists
together with a unit clause is reported after the remaining implications have
been propagated. The implication list the processor reads at that point may
therefore contain a few implications made after the conflict arose. The
processor discards them when it backtracks.

## Clause processors

A clause processor (`clause_processor.sv`) holds three literals. Each literal is
7 bits: a sign and a 6-bit variable number. Variable number 0 means "empty
slot". This encoding expresses clauses of one or two literals, and it leaves
unused processors empty. An empty processor counts as satisfied.

Each processor also keeps its **own copy of the values of its three
variables**, each unassigned, false or true. There is no shared variable table
that 224 processors would have to read at once. Instead, every assignment is
broadcast on one bus, and each processor compares the broadcast variable number
with its three literals and updates the matching slots. The bus carries four
operations: none, load (addressed by processor number), assign, and clear.

From these registers the ClauseStatus logic computes three flags:

- *sat*: some literal is true;
- *conflict*: every literal present is false;
- *unit*: nothing is true and exactly one literal is unassigned.

A unit clause also drives an implication: the variable of its unassigned
literal, with the value that makes that literal true. The implication selector
(`implication_selector.sv`) is a priority multiplexer: the lowest-numbered unit
processor wins. `bcp_engine.sv` reduces the 224 status words to "any conflict"
and "all satisfied".

Loading a clause clears that processor's copy of the values. A clause must not
name the same variable twice, because two unassigned copies of one variable do
not count as unit.

## Partitions and hot swapping

The logic never sees the whole formula. The processor has to do the following:

- **Partition** the formula. The original design does this greedily: clauses
  are taken in file order, and a partition is closed when the next clause would
  exceed 224 clauses or 63 distinct variables.
- **Renumber** the variables of each partition to 1..63, and keep the mapping
  both ways. Implications come back with partition-local numbers.
- **Swap a partition in** by writing Update Clause for each of its clauses, and
  empty clauses into any processors that still hold clauses of the previous
  partition.
- **Re-broadcast the current assignment** after a swap: one Propagate Decision
  for each assigned variable that occurs in the partition. The clause
  processors start a new partition with every value unassigned. These
  re-broadcasts are also what carry implications found in one partition to the
  others.
- **Keep the propagation going** until no partition has anything new. A
  partition has to be revisited when a variable it contains is assigned
  elsewhere.
- **Backtrack** the loaded partition with one Backtrack command per variable.

A partition that reports *SAT* is only satisfied by itself. The formula is
satisfied when every variable is assigned and no partition is in conflict.

The testbenches contain a complete host of this kind, written in SystemVerilog
(`tb/sat_host_tasks.svh`). It can serve as a reference for the
driver software. Its propagation visits dirty partitions in cyclic order. On a
conflict it clears the loaded partition's copy (one Backtrack per local
variable) and rebuilds it from the trail.

## Programming model

`axil_regs.sv` is an AXI4-Lite slave with a 32-bit data bus and 8-bit byte
addresses. It handles one write and one read at a time.

| addr | name        | access | bits                                                                 |
|------|-------------|--------|----------------------------------------------------------------------|
| 0x00 | CMD         | W      | [1:0] op: 1 Update Clause, 2 Backtrack, 3 Propagate Decision (0 none) |
| 0x04 | VAR         | RW     | [5:0] variable, [8] value                                            |
| 0x08 | CLAUSE_IDX  | RW     | [15:0] clause processor to load                                      |
| 0x0C | CLAUSE_LITS | RW     | literal i (i = 0..2) in [8i+6:8i] = {negated, variable}               |
| 0x10 | STATUS      | R      | [2:0] status, [4] busy, [5] FIFO empty, [6] FIFO full, [7] command dropped (cleared by the read), [15:8] FIFO count |
| 0x14 | IMPL        | R      | [5:0] variable, [8] value, [31] valid; a read of a valid entry pops it |

Status codes: 0 success, 1 running, 2 implication found, 3 conflict, 4 SAT.

To issue a command, write its data registers, then write CMD. Then poll STATUS
until busy is 0, and read IMPL until valid is 0. Busy stays set from the CMD
write until the engine is back in Idle. A CMD write that arrives while an
earlier command is still waiting to be accepted is dropped: it gets an SLVERR
response and sets STATUS[7]. IMPL can be read while the engine is busy; this is
how a full FIFO is drained.

## Sizes and parameters

| parameter                  | default | where                    | origin                                                          |
|----------------------------|---------|--------------------------|-----------------------------------------------------------------|
| `NUM_CLAUSES`              | 224     | `sat_accel_top`, `bcp_engine` | largest clause count the original design holds unpartitioned |
| variables per partition    | 63      | `sat_pkg::VAR_W = 6`     | the same; number 0 is reserved for empty slots                   |
| literals per clause        | 3       | `sat_pkg::LITS`          | the original clause processor                                   |
| `FIFO_DEPTH`               | 64      | `sat_accel_top`          | this design: holds every implication of one decision            |

At the default size, a coarse synthesis of the whole top gives about 6.3k
flip-flops and a 512-bit FIFO memory. The original implementation reports
13,151 LUTs and 11,059 flip-flops on a small Zynq at 106.66 MHz. This RTL
evaluates all clauses, selects an implication and reduces the status words in
one cycle. It has not been timed on any device.

At the original clock of 106.66 MHz, the 2 + 3k rule gives at most one
implication every three cycles, about 35 million per second. Every implication
costs one evaluation of all 224 clauses in parallel. The original design reports
throughput as "BCPs per second" (roughly 170 million) without defining the
unit, so the two figures cannot be compared directly.

Formulas larger than one partition run through hot swapping. Examples are the
2,240- and 22,400-clause random formulas over 63 to 630 variables used to
evaluate the original design; these need at least 10 and 100 partitions of
224 clauses. The clause processors hold three literals, so a formula with longer
clauses must first be rewritten into 3-CNF by the host.

## Departures from the original design, and choices made here

Follows the original design:

- the three-part engine (control unit, clause processor array, implication
  selector);
- the control unit's states, entry and exit actions, transitions and status
  reports;
- clause processors that each hold literals and a private copy of the
  assignments;
- no conflict detector;
- an implication FIFO read by the processor;
- AXI register access with polling;
- 224 clauses, 63 variables and 3 literals.

Chosen here, where the original is silent:

- all encodings, the register map and the literal format with variable 0 as
  empty;
- one clock per state;
- fixed lowest-index priority in the selector;
- conflict reported before SAT before success;
- Backtrack clears one variable per command;
- loading a clause clears its value copy;
- the FIFO depth, and the wait while the FIFO is full;
- the dropped-command rule;
- an asynchronous active-low reset that empties every processor.

In one place the original is inconsistent. Its block diagram labels the FIFO
output "most recent implication", which would suggest last-in first-out order.
Here the block is a true FIFO: the processor reads implications in the order
they were found.

Not built:

- the processor;
- the partitioning and DPLL software, which exist only as the testbench host;
- the off-chip memory that holds the formula.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench                 | what it checks |
|---------------------------|----------------|
| `tb_clause_processor`     | 20,000 random load/assign/clear broadcasts, each compared with a reference evaluation of the clause |
| `tb_implication_selector` | random valid patterns on 16 inputs; the lowest-index valid input must win |
| `tb_implication_fifo`     | random traffic, including push-with-pop on a full queue, against a queue model |
| `tb_control_unit`         | broadcasts, FIFO pushes, status, 1-cycle and 2 + 3k-cycle timing, and the wait on a full FIFO, against a scripted clause array |
| `tb_bcp_engine`           | 8 processors, 400 random formulas; each decision checked against a reference BCP (implications in order, status, cycle count) |
| `tb_axil_regs`            | register map, byte strobes, command handshake, dropped command, status fields, IMPL pop order |
| `tb_sat_accel_top`        | the whole top at default size, with the DPLL host described above (see below) |
| `tb_table2_workloads`     | the whole top at default size on formulas of the original evaluation's sizes (see below) |

`tb_sat_accel_top` runs four cases:

- a 62-step implication chain: order, SAT status, a full-FIFO wait and a
  dropped command;
- a formula with a planted solution (so it is satisfiable) of 300 clauses over 40 variables, in two
  partitions;
- one of 400 clauses over 80 variables, in ten partitions with renumbering;
  both results are checked clause by clause;
- an unsatisfiable 8-clause formula.

It also counts every mechanism: clause update, hot swap, renumbering, decision,
backtrack, implication, conflict, SAT status, FIFO wait and dropped command. A
mechanism that never happens counts as a failure. The run takes about 12.5
million cycles. Most of them are spent swapping the ten-partition formula,
which shows the partitioning cost discussed above.

`tb_table2_workloads` solves one formula of each of these sizes, all at the
default size of the top. The sizes are variable and clause counts used to
evaluate the original design. Each formula is random, with 3 literals per clause
and a planted solution. The testbench checks every model and prints the cost.
One run gave:

| variables × clauses | partitions | hot swaps | decisions sent | implications | clock cycles |
|---------------------|-----------:|----------:|---------------:|-------------:|-------------:|
| 63 × 224            | 1          | 1         | 3,892          | 6,885        | 193,098      |
| 63 × 448            | 2          | 818       | 13,277         | 13,261       | 2,660,079    |
| 126 × 224           | 9          | 378       | 11,929         | 1,560        | 323,367      |
| 126 × 448           | 16         | 13,659    | 303,871        | 25,750       | 9,827,652    |
| 252 × 448           | 19         | 987       | 30,344         | 2,655        | 757,074      |
| 63 × 2240           | 10         | 150       | 1,207          | 740          | 430,281      |
| 126 × 2240          | 78         | 6,945     | 53,706         | 2,120        | 3,340,830    |

The counts depend on the random formula. The spread between rows shows the
cost of swapping. Most of the cycles go to reloading clauses and to
re-broadcasting assignments, not to propagation. The formula that fits in one
partition needs no swapping at all. Clock cycles here include the
testbench's AXI traffic, but not any processor software time. The largest size
simulated is 126 × 2240. At 252 × 2240 the run went past 40 million cycles
without finishing. Sizes with 630 variables or 22,400 clauses were not
simulated.

To simulate with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_sat_accel_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/sat_pkg.sv tb/tb_sat_accel_top.sv
./obj_dir/Vtb_sat_accel_top
```

Replace `tb_sat_accel_top` with any other testbench name. Shared types and
constants are in `rtl/sat_pkg.sv`. The AXI master tasks used by the testbenches
are in `tb/axil_master_tasks.svh`, and the DPLL host is in
`tb/sat_host_tasks.svh`.

Not verified: timing closure at any clock rate, behaviour on hardware, and
formulas of the sizes used to evaluate the original design. Those exceed what
a practical simulation of the host-plus-accelerator loop covers.
