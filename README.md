# EMPA: a supervisor that lends cores to a running program

In the Explicitly Many-Processor Approach (EMPA), a core that runs a piece
of a single-threaded program can hand part of its work to another core
without going through an operating system. The compiler cuts the code into
*quasi-threads* (QTs) and marks the cut points with *metainstructions*. When a
core meets one, it signals a second control layer, the **supervisor**. The
supervisor rents a free core, copies ("clones") the requester's registers into
it and starts it at the QT's address. The requester then carries on past the
QT. When the child finishes, the supervisor returns the child's result to the
parent, at a moment the parent chooses. Every core talks only to the
supervisor, in a star. The supervisor keeps a few bitmasks per core that
record who is whose parent and child. Waiting, synchronisation and data
exchange are therefore single-clock hardware operations instead of OS calls.

The same mechanism supports two *mass-processing* modes for loops:

* **FOR**: the supervisor runs the loop. It counts the iterations, advances
  the element address and restarts a child for each iteration. The parent's
  loop-control instructions disappear.
* **SUMUP**: many children each fetch one vector element and write it to a
  pseudo register. Each write lands directly in an adder inside the parent.
  A running sum is built without any instruction ever reading and writing
  back the partial sum. The sum grows by one element per supervisor clock.

This RTL implements the supervisor and the per-core EMPA registers. It does
not implement the processing cores (conventional Y86 cores) or the memory. The
top module exposes each core's side of the interface as a port array.

## Files

| file | contents |
|---|---|
| `rtl/empa_pkg.sv` | widths, metainstruction and mode encodings, the command and state structs |
| `rtl/empa_top.sv` | supervisor + one EMPA extension per core (the top) |
| `rtl/empa_supervisor.sv` | metainstruction execution, bitmask upkeep, cloning, SUMUP transfers |
| `rtl/empa_core_ext.sv` | one core's EMPA registers, pseudo register, Avail/Enable/Wait |
| `rtl/empa_sumup_adder.sv` | the parent's SUMUP accumulator |
| `rtl/empa_alloc.sv` | choice of the core to rent; "ALU available" |
| `rtl/empa_rr_arbiter.sv` | round-robin choice among requesting cores |
| `tb/empa_core_model.sv`, `tb/empa_tb_pkg.sv` | behavioural stand-in core and its tiny instruction set (testbench only) |
| `tb/tb_*.sv` | self-checking testbenches, one per block, plus two system tests |

## The per-core EMPA registers (`empa_core_ext`)

Each core gains this state, held beside the core:

| register | meaning |
|---|---|
| Identity | fixed one-hot mask, bit *i* for core *i* |
| Parent | Identity of the core that created the running QT (0 for the first QT) |
| Children | OR of the Identities of the QTs this core has created and that still run |
| Preallocated | OR of the Identities of cores reserved for this core's loops |
| Offset | address of the QT this core runs |
| Mode | NORMAL, FOR or SUMUP |
| ForChild | written by this core as a parent; copied into a child's FromParent when the child starts (FOR/SUMUP: the element address) |
| FromChild | FOR: remaining iteration count; SUMUP: the last summand received |
| ForParent | written by this core as a child; FOR: copied to the parent's FromChild when the child ends; SUMUP: sent to the parent's adder at once |
| FromParent | the parent's ForChild, latched at creation |
| Latched Reg | %eax of a finished child, held until this core waits |
| Count, sum | SUMUP iteration count and the adder's output |

Avail is high when the core runs nothing, is not preallocated, and is not held
off by `disable_i` (for example by a thermal monitor). Enable is the core's
run signal. Wait is high while the supervisor holds the core.

**The pseudo register.** A core reaches these latches through one extra
register, named `%esv` in the architecture. What a read or write does depends
on context. Here the core states that context with `psr_role_i`:

| role | read returns | write goes to |
|---|---|---|
| 0 (as parent) | FromChild; in SUMUP mode the running sum | ForChild |
| 1 (as child) | FromParent | ForParent (in SUMUP mode this also requests a transfer) |

## The supervisor (`empa_supervisor`)

The supervisor owns all the shared state, so it performs one metainstruction
per clock. A round-robin arbiter picks which requesting core is served. A core
presents its request on `meta_valid_i`/`meta_req_i` and holds it until
`meta_ack_o`.

| metainstruction | what the supervisor does in the serving clock |
|---|---|
| `Q_CREATE`, `Q_CALL` | Rents a core, preferring the requester's idle preallocated cores, then the lowest free one. Sets the child's Parent and the parent's Children bit. Puts the parent's register file on the clone bus and loads the child's PC and Offset with `target`. Latches the parent's ForChild into the child's FromParent and enables the child. The parent is acknowledged and resumes at `next_pc` in the same clock. If no core is free, the parent gets Wait. |
| `Q_TERM` | If Children is not empty, the core gets Wait; termination implies waiting for the children. Otherwise the core is disabled and its Parent cleared, and its preallocated cores return to the pool. Its %eax is latched in the parent and its bit is cleared from the parent's Children. In FOR mode a ForParent written during the QT is copied to the parent's FromChild. |
| `Q_WAIT` | If Children is not empty, the core gets Wait. Otherwise a latched child result, if any, is written into %eax and the core resumes at `next_pc`. |
| `Q_ALLOC` | Reserves one free core per clock until `arg` cores are reserved. Each gets the requested Mode and the parent's ForChild. Then it sets the parent's Mode and acknowledges. |
| `Q_FCREATE` | Runs a whole loop while the parent's PC stays on the metainstruction. See below. |
| `Q_IWAIT` | Makes the core an interrupt-servicing core. While interrupt line `arg` is low, the core gets Wait. In the clock the line is seen high, the core is acknowledged, its PC is loaded with the service routine `target`, and the line is acknowledged on `irq_ack_o`. Nothing is saved or restored, and no other core is interrupted. |

A core in Wait does not compete for the supervisor again until its reason has
gone: a core has become available, its Children mask has emptied, or its
interrupt line has risen. Waiting therefore costs no supervisor cycles.

**Interrupt servicing.** The architecture lets a core be prepared in
advance and left waiting, in power-economy mode, until its interrupt arrives.
The core then starts servicing at once, and the running program keeps its
core. Here a parent creates a QT that issues `Q_IWAIT`. The system test raises
the line while the servicing core waits. The service routine starts in the
clock the line rises. Its result returns to the creator through the ordinary
`Q_TERM`/`Q_WAIT` path.

**FOR loop.** The first grant loads the iteration count (`arg`) into
FromChild. On each later grant with no child running, the supervisor checks
FromChild. If it is not zero, the supervisor starts the next iteration on a
preallocated child. The child receives a clone of the parent's registers, in
which %eax is replaced by the previous child's returned %eax. That replacement
is how the partial sum travels. The supervisor also writes that value into the
parent's %eax, decrements FromChild and advances ForChild by one 4-byte word.
The child can end the loop early by writing 0 to its ForParent. When FromChild
reaches zero, the parent takes the last returned value and resumes.

**SUMUP loop.** The first grant loads the count and clears the adder. Each
later grant launches one more child while the count is not zero. A child reads
its element address from FromParent, loads the element and writes it to its
pseudo register. The supervisor moves that value into the parent's FromChild
and adder. The child's final `Q_TERM` uses the same path and returns no %eax.
Both are served by a second arbiter *in parallel* with the metainstruction
path, because they touch only the child and its parent's adder and Children
bit. In steady state the supervisor therefore launches one child per clock
while another child delivers its summand and leaves. A finished child is
reused as soon as it is free. Thirty helpers keep the loop going at any
length, as in the architecture's description. The parent resumes when the
count is exhausted and every child has gone. It then reads the sum through its
pseudo register.

**Measured timing.** These figures come from the system tests, counting
supervisor clocks from the loop's first grant to its release. The stand-in
core executes one instruction per clock.

| vector length | FOR loop | SUMUP loop | SUMUP cores |
|---|---|---|---|
| 1 | 6 | 6 | 2 |
| 2 | 11 | 7 | 3 |
| 4 | 21 | 9 | 5 |
| 6 | 31 | 11 | 7 |
| 31 | – | 36 | 31 |
| 501 | – | 506 | 31 |

SUMUP grows by exactly one clock per element, which is the rate the
architecture claims. FOR costs five clocks per element with this stand-in
core: a launch, three child instructions, and the termination. The absolute
times published for the architecture (for example 31/42/64/86 clocks for FOR)
came from a simulator with its own instruction timings. They cannot be
compared with these figures.

## Interface of `empa_top`

Every per-core signal is an unpacked array indexed by core number.

* From the cores: `meta_valid_i`, `meta_req_i` (`op`, `mode`, `target`,
  `next_pc`, `arg`), `core_rf_i` (the 8 × 32-bit register file, read for
  cloning and for %eax), `psr_we_i`/`psr_role_i`/`psr_wdata_i`, and `disable_i`.
* To the cores: `enable_o`, `wait_o`, `meta_ack_o`, `pc_load_o`/`pc_o`,
  `rf_load_o` with the shared clone bus `rf_o`, `reg_wr_o` with `reg_data_o`
  (write into %eax), and `psr_rdata_o`.
* `alu_avail_o` is high while some core can take a new QT.
* `irq_i` and `irq_ack_o` carry the interrupt lines. A source holds its line
  high until `irq_ack_o` pulses for it.
* `event_o`, `event_core_o`, `xfer_o`, `xterm_o` and `xfer_core_o` report
  what the supervisor did in a clock. They are meant for statistics and
  testbenches.

All outputs are combinational from registered state and the current requests.
Every update lands at the next rising edge, and reset is asynchronous and
active low. After reset only core `BOOT_CORE` is enabled. A core must obey
`pc_load_o`, `rf_load_o` and `reg_wr_o` in the clock they are given, and must
hold its request until acknowledged. The supervisor and the top carry
assertions for these rules.

Parameters: `NCORES` (default 32), `BOOT_CORE` (default 0) and `NIRQ`, the
number of interrupt lines (default 8). Word width,
register count, the link register (%eax = register 0) and the 4-byte element
step are constants in `empa_pkg`. At 32 cores the top synthesises to about
11.6 k flip-flops and 4.5 k word-level cells.

## Where this RTL departs from, or adds to, the architecture

Followed as described:

* the register set of a core and its Avail/Enable/Wait signals;
* one-hot Identities and the star topology;
* cloning at creation, and latching %eax at termination until the parent
  waits;
* termination blocked until the children are gone;
* the FOR loop counting down in FromChild, with the break through ForParent;
* the SUMUP adder fed by FromChild and by its own output;
* one clock per extra SUMUP element.

This design's own choices:

* All encodings, the request format, and the metainstruction operands.
  `target`/`next_pc` give the QT's address and the resume address; `arg` gives
  the counts.
* The explicit role bit of the pseudo register.
* Round-robin arbitration and the lowest-numbered-core allocation.
* A separate Count register for SUMUP.
* Cloning in a single clock over one shared bus.
* The parallel transfer path. Strictly, the architecture's supervisor does one
  operation at a time.
* 32 cores. No core count is given; 32 holds the largest evaluated case of 31
  cores.
* The form of `Q_IWAIT`: its operands, and level-sensitive interrupt lines
  with an acknowledge. Power-economy mode is only the Wait state; no clock or
  power gating is built.

Not built:

* The processing cores and the memory.
* The shared cache.
* The metainstructions that are named but not defined: `QTCreate`, `QPWait`
  and `QInt`.
* Cores dedicated to kernel services, beyond what `Q_CREATE` and `Q_IWAIT`
  give.
* The allocation policy that "prefers leaves of the QT graph".
* The emergency mode in which a parent lends its own core to its children.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Example, the system test at six cores:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/empa_pkg.sv tb/empa_tb_pkg.sv rtl/*.sv tb/empa_core_model.sv \
  tb/tb_empa_top.sv --top-module tb_empa_top -o sim
./obj_dir/sim
```

`tb_empa_top_full` runs the same scenarios at the default 32 cores, including
SUMUP sums of up to 501 elements; it finishes in well under a second of
simulation. The block tests (`tb_empa_alloc`, `tb_empa_sumup_adder`,
`tb_empa_core_ext`, `tb_empa_supervisor`) need only `rtl/empa_pkg.sv`, their
block and its submodules.

The stand-in core (`tb/empa_core_model.sv`) is not a Y86 core. It executes
`IRMOV`, `ADD`, `MRMOV` (a load from a read-only word array), pseudo-register
read and write, and metainstructions, one per clock. Programs are written in
the testbench with helper functions from `empa_tb_pkg`, for example
`qmeta(Q_FCREATE, body, resume, count)`.

The system tests cover:

* nested creation, waiting and result return;
* a parent whose termination is held until its child ends;
* FOR sums and a FOR loop broken by its child;
* SUMUP sums of several lengths, with the one-clock-per-element rate checked;
* more creations than cores, including a disabled core that must never be
  rented;
* an interrupt-servicing core that waits for its line and is started in the
  clock the line rises.

Each supervisor mechanism is counted, and a run in which one never happened
fails.
