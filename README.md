# RED scheduler coprocessor in SystemVerilog

A mixed-criticality real-time system runs hard real-time, soft real-time and
best-effort processes on one CPU. Plain Earliest Deadline First (EDF)
scheduling accepts every process and, once the CPU is overloaded, lets
deadlines be missed at random. Robust Earliest Deadline (RED) scheduling adds
two policies around the EDF ready queue:

* **rejection**: when admitting a process makes some deadline unreachable
  under worst-case execution times, one low-priority process is taken out of
  the ready queue and parked in a *reject queue*;
* **reclaiming**: when load drops (a process finishes or is killed), the most
  valuable rejected process is tried again, and kept only if it fits.

This RTL implements RED as a small coprocessor. The CPU sends it two kinds of
instruction, *insert a process* and *kill a process*; it always presents the
ID of the ready process with the earliest deadline as the process to run.
Every operation, including the rejection it may cause, completes in two
clock cycles in the common case.

## Block structure

```
            +--------------------------------------------+
            |   ready_queue  (deadline-ordered, N cells) |--> process_to_run
            +--------------------------------------------+
                 ^ CU_TO_RDQ            | RDQ_TO_CU (full, overload, victim)
                 |                      v
 instr ----> +--------------------------------------------+
            |   control_unit                              |
            +--------------------------------------------+
                 | CU_TO_RJQ            ^ RJQ_TO_CU (full, head)
                 v                      |
            +--------------------------------------------+
            |   reject_queue (priority-ordered, N cells)  |
            +--------------------------------------------+
```

| File | Role |
| --- | --- |
| `rtl/red_pkg.sv` | widths, process record, instruction, bus structs |
| `rtl/rdq_cell.sv` | one ready-queue cell: process, execution-time register, overload bit |
| `rtl/ready_queue.sv` | N `rdq_cell`s, overload OR, victim selection |
| `rtl/rjq_cell.sv` | one reject-queue cell |
| `rtl/reject_queue.sv` | N `rjq_cell`s, head output |
| `rtl/control_unit.sv` | decides each cycle what the queues do |
| `rtl/red_scheduler.sv` | top level |

## The process record and the instruction

A process (`process_t`, 50 bits at the default sizes) is

| field | bits | meaning |
| --- | --- | --- |
| `id` | 6 | process ID, unique among live processes |
| `deadline` | 16 | deadline, in the same time unit as `wcet` |
| `wcet` | 16 | worst-case execution time still to run |
| `crit` | 2 | `00` best effort / low soft RT, `01` medium soft RT, `10` high soft RT, `11` hard RT |
| `level` | 10 | one of 1024 priority levels within a criticality |

The *priority* of a process is the 12-bit value `{crit, level}`: criticality
dominates, the level breaks ties. The instruction `instr_t` is
`{op[1:0], process_t}` with `op` = `0` NOP, `1` INSERT, `2` KILL (only `id`
is used). The output `run_t` is `{valid, id}`; `valid` is 0 when nothing is
ready.

Time does not advance inside the coprocessor: deadlines and execution times
are numbers the CPU supplies, and the overload test compares them directly.
When a process completes, the CPU kills it; that is what frees time.

## Shift-register queues

Both queues use the shift-register priority-queue architecture. A queue is
a row of cells, cell 0 at the "head" (drawn on the right). All cells see the
same command on a broadcast bus and each decides locally, from one
comparator and the state of its two neighbours, whether to keep its
process, take the new one, or take a neighbour's:

* **INSERT p**: every cell whose process should come after `p` (or that is
  empty) raises `after`. Because the row is sorted, `after` is 0 for cells
  0..k-1 and 1 from cell k on. Cell k loads `p`; cells above k load their
  right neighbour's process, i.e. the row shifts away from the head by one.
* **REMOVE id**: the matching cell and all cells above it load their left
  neighbour's process, closing the gap.

Both complete in one clock edge regardless of N; the cost is one
comparator and a few multiplexers per cell. A REMOVE of an absent ID does
nothing. An INSERT into a full queue drops the last cell's process; the
control unit avoids this for the ready queue, and for the reject queue it
can only happen when more than 2N processes are live.

* The **ready queue** is ordered by deadline, earliest at cell 0. Equal
  deadlines keep arrival order.
* The **reject queue** is ordered by `{crit, level, deadline}`, largest at
  cell 0: the most important rejected process, and among equals the one with
  the latest deadline (the one that has the most room left). Equal keys keep
  arrival order.

## Overload analysis in the ready queue

This is the part that turns an EDF queue into a RED one.

**Execution-time register.** Each ready cell i holds, besides its process,
`E[i]` = the WCET of its own process plus the WCETs of every process in
cells 0..i-1, i.e. the worst-case time at which process i will have
finished if everything ahead of it runs first. The register is maintained
incrementally by the shift operations:

* on INSERT of `p`, every cell with `after = 1` loads `E[i-1] + p.wcet`
  (its right neighbour's old sum plus the new WCET). For the cell that takes
  `p` this is exactly `p`'s finishing time; for the shifted cells it adds
  `p.wcet` to the finishing time of the process they take over. Cells to the
  right are unchanged.
* on REMOVE of a process with WCET `w`, every cell that shifts loads
  `E[i+1] - w`.

**Overload bit.** Cell i reports overload when it is occupied and
`E[i] > deadline[i]`: its process could miss its deadline. The test is made
on the stored state, one cycle after the insert that caused it; the result
is the same as testing `E_old + p.wcet > deadline` during the insert, and it
also covers the new process itself and processes put back by reclaiming.
All overload bits are ORed into one `overload` bit for the control unit.

**Victim selection.** Let f be the first (lowest-index) overloaded cell.
Only the processes in cells 0..f run before process f finishes, so only
removing one of them can cure that overload. The victim is the one with the
lowest priority among cells 0..f; among equal priorities the one nearer f
(later deadline) is chosen. This is a combinational scan of the N cells
presented on `RDQ_TO_CU` together with `overload`.

Note that this rule does not look at criticality specially: if every
candidate is hard real-time, a hard real-time process is rejected. The
guarantee for hard processes holds when the hard processes alone are
schedulable, since softer processes are then always chosen first.

## Control unit

Every cycle the control unit issues at most one command per queue, chosen in
this order:

1. **CPU instruction.** INSERT goes to the ready queue, or to the reject
   queue if the ready queue is full. KILL is sent to both queues as
   REMOVE; the process is in at most one of them.
2. **Overload.** If the previous cycle was a reclaim, that reclaim is undone:
   the same process is removed from the ready queue and re-inserted into the
   reject queue. Otherwise the victim is moved: REMOVE in the ready queue and
   INSERT in the reject queue, in the same cycle.
3. **Reclaim.** If there is no overload, the reject queue is not empty, the
   ready queue is not full and reclaiming is not blocked, the reject-queue
   head is moved to the ready queue (REMOVE of the head's ID, which pops it,
   and INSERT into the ready queue). Whether it fits is known the next cycle
   (step 2).

Reclaiming is *blocked* after a rejection or an undo, and unblocked by the
next KILL. Only a kill lowers the load, so retrying earlier would put the
same process in and out of the ready queue every other cycle. After a
successful reclaim the next head is tried in the following cycle.

### Timing

```
cycle     0            1                      2
instr     INSERT p     NOP                    (next instruction allowed)
edge      p enters     overload? victim       state final
          ready queue  moves to reject queue
```

`instr` is sampled on each rising edge; the command it causes is applied on
that same edge, and `process_to_run` changes right after it. The CPU must
leave at least one NOP cycle after every instruction; the control unit
asserts this (`a_instr_spacing`). That cycle is the one used to resolve the
overload, so an insert followed by one rejection is complete two cycles
after it was issued. If one rejection does not remove the overload (the
victim's WCET was too small), further rejections follow, one per idle cycle,
and `process_to_run` may change during them; the same holds for a reclaim
and its undo. The testbenches count how often each case occurs: with the
random workloads below, 10 to 15 % of inserts need more than one
rejection.

Reset (`rst_n`, asynchronous, active low) empties both queues and clears the
control unit's state.

## Parameters and sizes

| name | default | where |
| --- | --- | --- |
| `N` | 64 | cells per queue (`ready_queue`, `reject_queue`, `red_scheduler`) |
| `MAX_PROC` | 64 | package; default for `N` |
| `ID_W` | 6 | package; `$clog2(MAX_PROC)`, the narrowest ID for 64 processes |
| `DEADLINE_W`, `WCET_W` | 16 | package |
| `LEVEL_W` | 10 | package; 1024 levels |
| `EXEC_W` | 22 | package; `WCET_W + ID_W`, holds a sum of 64 WCETs |

The reference sizes are 8 to 64 processes in steps of 8; 64 is the default.
Because IDs are unique and 6 bits wide, at most 64 processes are live, so at
the default size neither queue can overflow. `N` can be set smaller per
instance; widths live in the package, so a different ID width means editing
`MAX_PROC` there. At N = 64 the top synthesises (coarse, technology
independent) to about 5,000 word-level cells and 8,000 flip-flops, almost
all of it in the 128 cells.

## Where this follows the reference design and where it does not

Taken from the reference description: the three sub-blocks and their four
buses; the two instructions and the single output; shift-register cells with
an execution-time register per cell, its update on insert and removal, the
per-cell overload test, the overload OR and the victim rule; the MAX-ordered
reject queue keyed by priority then deadline; rejection on overload,
reclaiming of the reject-queue head, undoing a reclaim that overloads; the
criticality encoding, 1024 levels and 64 processes; two-cycle operation.

Chosen here, because the description leaves them open:

* all field widths except the 2-bit criticality and the ID, and the
  instruction and bus encodings;
* the description mentions 1028 levels in total (four criticalities plus
  1024 best-effort levels) but also says criticality `00` covers best-effort
  processes; storing `{crit, level}` covers both readings;
* the overload test on the stored state rather than during the insert, and
  the inclusion of the first overloaded cell among the victim candidates;
* tie-breaking in both queues and in victim selection;
* the priority order in the control unit, the reclaim blocking rule, and
  sending an insert to the reject queue when the ready queue is full;
* the one-idle-cycle instruction spacing, and the `valid` bit on the output;
* the asynchronous reset.

Not reproduced: the area and power figures, which come from synthesis in a
28 nm standard-cell library at 500 MHz and 0.9 V. The RTL has no
technology-specific parts. Its longest combinational paths are the victim
scan, a chain through all N cells, and the `after`/`rm` ripple along the
queues.

## Verification

Each testbench is self-checking and prints one line
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it does |
| --- | --- |
| `tb/tb_rdq_cell.sv` | one ready-queue cell with random command and neighbour inputs; outputs and next state against the shift and execution-time rules |
| `tb/tb_rjq_cell.sv` | the same for one reject-queue cell |
| `tb/tb_ready_queue.sv` | 20,000 random INSERT/REMOVE on 8 cells; head, full, overload and victim against a sorted-array model with execution times recomputed as prefix sums |
| `tb/tb_reject_queue.sv` | random INSERT/pop/REMOVE on 8 cells; head and full against a sorted-array model |
| `tb/tb_control_unit.sv` | directed walk through every decision, then 30,000 random cycles against a rule-level model |
| `tb/tb_red_scheduler.sv` | whole design, N = 8 with 64 IDs so both queues overflow; cycle-by-cycle against a model of the whole scheduler; fails if any mechanism never happens |
| `tb/tb_red_scheduler_full.sv` | the same at the default size, 100,000 instructions |
| `tb/tb_red_paper_workload.sv` | runs of 520 instructions, half inserts and half kills, 100 runs from reset at each size 8, 16, ..., 64 |

`tb/red_tb_body.svh` holds the stimulus and the whole-scheduler reference
model shared by the last three; `tb/red_workload_unit.sv` wraps it for one
size. The model keeps both queues as sorted arrays and applies the control
rules above each cycle. It compares `process_to_run`, the overload bit and
the reject-queue head after every edge, and counts inserts, inserts into a
full ready queue, kills, rejections, successful and undone reclaims,
reject-queue overflows, and how many inserts were settled within two cycles.
At the end of each run it lets the control unit settle and checks that no
overload is left, i.e. that every process in the ready queue then meets its
deadline under worst-case execution times.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_red_scheduler rtl/red_pkg.sv tb/tb_red_scheduler.sv
./obj_dir/Vtb_red_scheduler
```

Variables not reset by the design start at random values in Verilator's
two-state simulation (`+verilator+rand+reset+2`); every register the design
reads is reset.

The reference verification was far longer (over a million runs of more than
500 instructions); the workload testbench runs 800 such runs in a few
seconds, and `ITERATIONS` in it can be raised.
