# Deterministic user-level interrupts for a small RISC-V core

A real-time microcontroller often runs code from several vendors: a
microkernel, a motor-control library, a communication stack, a vision
job. The kernel keeps them apart with memory protection. Interrupts break
this. A device interrupt handler that belongs to an application either runs
inside the kernel, where it is fast but trusted with everything, or it is
delivered to the application through the kernel, where it is isolated but
costs hundreds of cycles. Often it costs even more if the application's
process is not the one currently scheduled.

This extension removes the kernel from the delivery path without giving up
isolation. The kernel registers a handler once. From then on, when the
interrupt fires, hardware does three things:

* It identifies the handler's **protection domain**. The domain is a PMP
  configuration (the *spatial* domain) and a cycle budget (the *temporal*
  domain).
* It loads both.
* It switches to a clean register context and jumps to the handler in user
  mode.

The handler runs confined to its own memory regions and its own budget. It
ends with `uiret`. If it touches memory outside its regions, raises an
exception or runs out of budget, it is forced to return at once, and the
reason is left in a CSR for the kernel to read later. Entry takes a fixed
number of cycles, whatever process happens to be running.

This RTL is the lowest-latency organisation of that idea, built from these
parts:

* a content-addressable memory (CAM) that maps interrupt numbers to
  domains;
* a PMP unit with a shadow set of registers for the kernel;
* a budget countdown timer;
* a register file with one extra bank, which spills to a stack memory when
  handlers nest deeper;
* three small tightly coupled memories (TCMs): one for the PMP table, one
  for the budget table and one for the stack. They have their own ports, so
  all table traffic happens in parallel.

From the cycle the interrupt line is sampled to the cycle the handler's
first instruction is fetched takes **7 cycles**. In the 3-stage core the
extension was designed for, 2 cycles before that and 2 after (fetch to
execute) give 11 cycles from the pin to the first handler instruction in
execute. A kernel-level interrupt on the same core takes 5.

The pipeline itself is not part of this RTL. Everything the extension needs
from a core is a port of the top module `uli_ext_top` (see
[Attaching a core](#attaching-a-core)).

## Contents

1. [The entry sequence, cycle by cycle](#the-entry-sequence-cycle-by-cycle)
2. [Interrupt controller and sequencer](#interrupt-controller-and-sequencer)
3. [Nesting, preemption and the context stack](#nesting-preemption-and-the-context-stack)
4. [Identification CAM](#identification-cam)
5. [PMP unit: shadow kernel set and table loading](#pmp-unit-shadow-kernel-set-and-table-loading)
6. [Budget timer](#budget-timer)
7. [Memories and the external multiplexer](#memories-and-the-external-multiplexer)
8. [Software view](#software-view)
9. [Attaching a core](#attaching-a-core)
10. [Where this RTL departs from the published design](#where-this-rtl-departs-from-the-published-design)
11. [Verification and simulation](#verification-and-simulation)
12. [Files](#files)

## The entry sequence, cycle by cycle

The cycle numbers below follow the published timing diagram of this
organisation: the last old instruction executes in cycle 2 and the
handler's vector is fetched in cycle 9. Here, that diagram's cycle 2 is the
cycle in which the interrupt line is first seen high.

| cycle | what happens |
|---|---|
| 2 | The line is high. Its rising edge sets the interrupt's pending flag at the end of the cycle. The old code still executes. |
| 3 | **Acknowledge.** The controller picks the highest-priority pending, enabled, user-level interrupt and looks it up in the CAM (combinational). From the CAM's answer it starts three jobs at once. (a) The PMP loader reads the handler's PMP table entry. (b) The budget timer reads the handler's budget. (c) The register file switches to the next bank and clears it at the end of the cycle. `pipe_flush_o` holds and squashes the pipeline, and `muiepc` captures the resume PC. |
| 4 | The budget word arrives. The first PMP word arrives. |
| 5 | The budget is in the timer, on hold. |
| 4-8 | One PMP word arrives per cycle. A table entry is 5 words: one `pmpcfg` word and four `pmpaddr` words. The last word arrives in cycle 8. |
| 9 | `pipe_redirect_o` pulses with the vector `mtvec + 4*irq`. The core fetches it with the handler's PMP set active and user privilege. The budget starts counting down in this cycle. |

The three jobs are independent, and the controller waits for all three
`done` flags. The 5-word PMP load is the longest job, so it sets the
latency. With `NPMP` PMP entries per domain, the fetch happens in cycle
`4 + ceil(NPMP/4) + NPMP`.

A first-level entry never touches the stack, because the extra register
bank is free. A nested entry spills 35 words to the stack: 4 control words
and 31 registers. That spill then dominates, and the line-to-fetch time
becomes 38 cycles (see below).

## Interrupt controller and sequencer

`uli_intc` holds the extension's control and status registers (CSRs), the
interrupt selection logic and a four-state sequencer.

**Selection.** The pending flag of line *i* is set when *i* rises and the
CAM claims *i*. It is cleared when the interrupt is taken. A line is a
candidate if it is pending, enabled in `muiie` and claimed by the CAM. The
candidate with the highest 4-bit priority wins. A tie goes to the lower line
number. The candidate is taken when all of these hold:

* the extension is enabled (`muictl[0]`);
* the sequencer is idle;
* no return is being requested in the same cycle;
* either no handler runs, or the candidate's priority is **strictly
  greater** than the running handler's.

An equal or lower priority stays pending until the running handler returns.

**Kernel interrupts.** Lines the CAM does not claim are kernel-level
interrupts. So are all lines while the extension is disabled. These lines
are passed to `kirq_o` only while no handler runs and no entry is starting.
While a handler runs, kernel lines are held back, and the system timer is
paused (`systimer_pause_o`). This keeps the handler's time from being
charged to the kernel thread it interrupted. A level-sensitive kernel
device is delivered as soon as the last handler returns.

**Sequencer states.**

* `RUN`: normal execution (thread, kernel or handler). A *take* starts the
  three entry jobs and moves to `ENTRY`. An *exit request* starts the budget
  write-back and the register restore, and moves to `EXIT_CTX`.
* `ENTRY`: waits for the PMP, budget and register `done` flags. Each is
  remembered once seen. Then the sequencer pulses the redirect to the
  vector and returns to `RUN`.
* `EXIT_CTX`: waits for the register restore. The budget write-back is a
  single TCM write and completes in the exit-request cycle. What happens
  next depends on the level being left:
  * From level 1, it redirects to `muiepc` (the thread) and is done. The
    kernel's own PMP set takes over again simply because no handler is
    active.
  * From a deeper level, the restore has also returned the preempted
    handler's control words. The sequencer reloads that handler's PMP
    entry and remaining budget from the tables and goes to `EXIT_LOAD`.
* `EXIT_LOAD`: waits for the PMP reload and budget reload, then redirects
  to the preempted handler's PC.

**Returns.** A handler returns voluntarily when the core reports that
`uiret` retired. It is forced to return in three cases:

* the PMP denies one of its fetches or data accesses;
* its budget reaches zero;
* the core reports any exception.

A forced return writes `muicause`:

* `[31]` valid;
* `[20:16]` the core's exception code;
* `[15:8]` the interrupt number;
* `[3:0]` the cause: 1 PMP, 2 budget, 3 exception.

The handler does not trap into the kernel: kernel exception handlers could
be re-entered if it did. Control goes back to the interrupted context, and
the kernel may read the cause whenever it likes.

A PMP fault is registered first, so the forced return starts one cycle
after the faulting access. The fault comes combinationally from the core's
access request, and the core's request depends on `pipe_flush_o`. Acting
on the fault in the same cycle would close a combinational loop through
the core. The core must squash the faulting access itself, as it would any
access fault. For the same reason the timer's `expired` output does not
depend on its `run` input.

Returning to the thread takes 2 cycles after the `uiret` cycle:

* cycle *t*: the budget is written back and the bank is switched;
* cycle *t*+1: the register restore is seen as done;
* cycle *t*+2: the redirect to `muiepc`.

A return from a nested level takes 43 cycles:

* a 35-word fill from the stack, done after 37 cycles;
* a 5-word PMP reload;
* the redirect.

## Nesting, preemption and the context stack

Handlers nest by priority. Level 0 is the thread or kernel, level 1 the
first handler, and so on. With 16 priority values the deepest possible
nesting is 16 levels.

**Register banks (`uli_regfile`).** Bank 0 belongs to level 0. With
`NEXTRA = 1` there is one extra bank.

* Entering level 1 is a pure bank switch. The extra bank is cleared in the
  same clock edge, so the handler never sees another domain's values.
* Entering level *L* ≥ 2 must first free the extra bank. It holds level
  *L*−1's registers, so those are **spilled** to the stack TCM one word per
  cycle, and then the bank is cleared for level *L*.
* Returning from level *L* ≥ 2 **fills** the bank back from the stack.

The number of banks therefore decides how deep nesting goes before latency
grows. The stack decides how deep nesting can go at all. `NEXTRA` can be
raised: each further bank moves the first spill one level deeper.

**What is pushed.** A nested entry pushes a frame onto the stack at
`muistk`. The frame grows upwards, one word per cycle:

| offset (words) | content |
|---|---|
| 0 | `muiepc` of the preempted handler (its resume PC) |
| 1 | preempted handler's PMP table entry address |
| 2 | preempted handler's budget table entry address |
| 3 | `{20'b0, priority[3:0], irq[7:0]}` of the preempted handler |
| 4 … 34 | x1 … x31 of the preempted handler (only when spilling) |

Words 0-3 are the *control words*. They let the preempted handler be
resumed exactly: its PC, its PMP set, its remaining budget and its
priority. When a handler is preempted, its timer value is first written
back to its budget table entry. On resume, the timer is reloaded from that
entry, so the time it has used stays used. First-level entries push
nothing: the thread's state is the kernel PMP set (which is shadowed and
never overwritten) and the thread's registers (which stay in bank 0).

**Latency of a nested entry.** The spill frame has 4 + 31 = 35 words. The
register file reports done 36 cycles after the take, and the redirect
follows. From the line to the fetch is 38 cycles, which the testbenches
check. A return fills the frame back in the reverse order. It takes 37
cycles, because a read is one cycle late.

**Stack size.** The default stack TCM has 1024 words. The deepest nesting,
16 levels, needs 15 frames of 35 words, which is 525 words.

## Identification CAM

`uli_iid_cam` has 16 entries. Each entry has three CSRs:

* `iidnum`: bit 31 valid, bits 7:0 the interrupt number;
* `iidpmp`: the address of the handler's PMP table entry;
* `iidtim`: the address of the handler's budget word.

A lookup compares the requested interrupt number with all valid entries in
parallel. The lowest-numbered matching entry supplies both addresses. The
lookup is combinational and sits inside the acknowledge cycle, so
identification costs no extra cycle. The CAM also produces `uli_mask`, one
bit per line: "some valid entry claims this line". The controller uses it
to split lines between user level and kernel level.

The pointers are word-aligned: bits 1:0 read as zero. Sixteen entries means
16 user-level interrupts can be registered at once.

## PMP unit: shadow kernel set and table loading

`uli_pmp` holds two complete register sets.

* The **kernel set** is the ordinary RISC-V `pmpcfg`/`pmpaddr` CSR set,
  which the kernel programs for its current process.
* The **user-level set** cannot be written by CSR instructions. Only the
  table loader writes it.

`pmp_sel_uli` (high while any handler runs) picks the set that checks
accesses. Because the kernel set is never disturbed, returning to the
thread needs no PMP restore at all.

**Table entry format** with `NPMP = 4`: word 0 holds the four 8-bit `pmpcfg`
fields in the RISC-V layout (entry 0 in bits 7:0), and words 1-4 hold
`pmpaddr0..3`. The loader drives the first address in the acknowledge
cycle, then one address per cycle. It writes each word as it arrives and
raises `load_done` in the cycle the last word arrives.

**Checking** follows the RISC-V PMP rules:

* the address-matching modes OFF, TOR, NA4 and NAPOT;
* the lowest-numbered matching entry decides;
* R/W/X permissions;
* locked entries bind machine mode as well;
* a user-mode access that matches nothing is denied.

Handlers are always checked as user mode. The granularity is 4 bytes.
Fetch and data checks are combinational (`if_fault_o`, `d_fault_o`).

## Budget timer

`uli_budget_timer` holds one countdown counter.

* **Load.** On a load it reads the handler's budget word (in CPU cycles)
  and holds it.
* **Count.** It counts down while `run` is high. `run` is high from the
  vector-fetch cycle until the handler's exit begins.
* **Expire.** `expired` is high whenever the count is zero. A budget of N
  therefore lets the handler run exactly N cycles, and the forced return
  begins in the next one.
* **Save.** A save writes the current count back to the given table
  address. It completes in the cycle it is issued.
* **Save and load together.** When a handler is preempted, the timer gets a
  save and a load at once. It writes first and reads one cycle later,
  because it has one TCM port.

The kernel can read the budget table through the load/store path to
account for used time and to replenish budgets. A budget of 0 expires in
the handler's first cycle.

## Memories and the external multiplexer

`uli_tcm` is a two-port synchronous SRAM with a 1-cycle read. Port A serves
the extension: the PMP loader, the budget timer and the register spill
unit. Port B serves the core's load/store unit and has byte enables. If both
ports write the same word in the same cycle, port A wins. Contents are not
reset.

`uli_ext_mux` decodes every load/store request of the core:

| window | size | target |
|---|---|---|
| `0x4000_0000` | 64 KiB | PMP table TCM (256 words by default) |
| `0x4001_0000` | 64 KiB | budget table TCM (256 words) |
| `0x4002_0000` | 64 KiB | stack TCM (1024 words) |
| anything else | | system bus (`sys_*`: main SRAM, peripherals) |

Each TCM aliases within its window. All targets must answer in the cycle
after the request. The multiplexer registers which target it selected and
steers that target's read data back. The PMP and budget tables could live
in main SRAM, but then their reads would compete with each other and with
the stack. Each one gets its own memory here, so the three entry jobs never
wait for each other.

## Software view

CSR map. Names in *italics* are this design's own.

| CSR | number | access | meaning |
|---|---|---|---|
| `muictl` | `0x7C0` | RW | bit 0 enable, bit 1 reads 1 (extension present), bits 31:2 read 0 |
| `muistk` | `0x7C1` | RW | base address of the context stack (in the stack TCM) |
| `muiepc` | `0x7C2` | RW | PC to resume when the current handler returns |
| *`muicause`* | `0x7C3` | RW | last forced return: `[31]` valid, `[20:16]` exception code, `[15:8]` irq, `[3:0]` cause |
| *`muiie`* | `0x7C4` | RW | one enable bit per interrupt line |
| *`muistat`* | `0x7C5` | RO | `[7:0]` current nesting level |
| *`muiprio0..3`* | `0x7C8-0x7CB` | RW | eight 4-bit priorities per CSR; line *i* in `muiprio[i/8][4*(i%8)+:4]` |
| `iidnum0..15` | `0xBC0-0xBCF` | RW | CAM: `[31]` valid, `[7:0]` interrupt number |
| `iidpmp0..15` | `0xBD0-0xBDF` | RW | CAM: PMP table entry address |
| `iidtim0..15` | `0xBE0-0xBEF` | RW | CAM: budget table entry address |
| `pmpcfg0`, `pmpaddr0..3` | `0x3A0`, `0x3B0-0x3B3` | RW | kernel PMP set (standard) |

Registering a user-level interrupt *k* with handler domain *d*:

1. Write the domain's PMP entry (5 words) to the PMP table.
2. Write its budget to the budget table.
3. Point a free CAM entry at both: `iidpmpX`, `iidtimX`, then `iidnumX = 0x8000_0000 | k`.
4. Set the priority in `muiprioN` and the enable bit in `muiie`.
5. Set `muistk` once, and set `muictl = 1`.

Put the handler's entry jump at `mtvec + 4k`, inside a region that the
domain's PMP entry makes executable.

## Attaching a core

The core side of `uli_ext_top` is a set of plain signals. A core must:

* **Hold the pipeline.** Squash and hold everything while `pipe_flush_o` is
  high. When `pipe_redirect_o` pulses, fetch from `pipe_redirect_pc_o` in
  that same cycle.
* **Supply the resume PC.** Drive `pipe_epc_i` with the PC to resume if an
  interrupt is taken in this cycle (the oldest instruction not yet
  completed).
* **Run handlers in user mode.** Use user privilege while `uli_active_o` is
  high. Drive `priv_m_i` for the thread and kernel.
* **Use the register file.** Read and write GPRs through `rf_*`. They are
  banked and spilled behind the core's back, and `rf_*` must not be used
  while `pipe_flush_o` is high.
* **Check accesses.** Present every fetch (`if_*`) and data access (`d_*`)
  for checking, and squash any access that faults.
* **Report handler events.** Pulse `pipe_uiret_i` when `uiret` retires and
  `pipe_exc_i`/`pipe_exc_cause_i` when a handler raises an exception.
* **Pass CSR instructions.** Put them on the `csr_*` bus. The read data is
  combinational, and `csr_hit_o` says whether the CSR belongs to the
  extension.
* **Route loads and stores.** Send them through `lsu_*`. The extension
  forwards what is not its own to `sys_*`, where the main SRAM and
  peripherals answer one cycle later.
* **Take kernel interrupts from `kirq_o`,** and pause the system timer
  while `systimer_pause_o` is high.

`budget_remain_o`, `rf_bank_o` and `rf_spilling_o` are status outputs for
debugging.

## Where this RTL departs from the published design

* **Latency accounting.** The published figure of 11 cycles runs from the
  pin to the first handler instruction in execute. This RTL covers the 7
  cycles from the sampled line to the vector fetch. The remaining 4 cycles
  are in the core, which is not included.
* **Spill path.** The block diagram draws the register spill unit going
  through the core's bus multiplexer, but the text gives spills a dedicated
  TCM port. The text is followed: the stack TCM has its own port, and the
  core's own bus multiplexer is not needed.
* **Budget table placement.** The published description is not consistent
  about where the budget table lives in this organisation:
  * In one place, the budget is loaded from a TCM, and the block diagram
    draws the PMP table and the budget table as two separate memories.
  * Elsewhere, only the PMP table moves to its own TCM, and the final
    organisation is counted as having two extra memory ports (protection
    tables and stack).

  This RTL gives each table its own TCM. That makes three extension-side
  ports. Merging the two tables into one TCM would not change the entry
  timing. The budget read happens once, in the same cycle as the first PMP
  word, so the two would collide on a shared port in that one cycle.
* **Control words.** The description says `muiepc` is pushed with the
  registers on nesting. Here the preempted handler's PMP pointer, budget
  pointer and priority are pushed with it, because that handler's PMP set
  and budget must be reloaded on resume.
* **Registered PMP fault.** The forced return on a PMP fault starts one
  cycle after the fault (see the controller section).
* **Choices the description leaves open.** All of these are this design's
  own: the CSR numbers; the layouts of `muicause`, `iidnum`, the priority
  and enable CSRs; 4-bit priorities with strict preemption; edge-triggered
  pending flags; holding kernel lines while a handler runs; the vector rule
  `mtvec + 4*irq`; the PMP table entry format; the address map; and the
  memory sizes.
* **Not built.**
  * The 3-stage RV32IM pipeline is described only by its performance. Its
    interface is brought out as ports.
  * The floating-point unit is present in the original chip but is not
    clocked.
  * The system timer, main SRAM, flash and peripherals are outside the
    extension.
  * Floating-point registers are not banked or saved.
* **Not applicable.** `muictl[31:2]` would hold the base of an in-memory
  identification table. With the CAM there is none, so those bits read 0.

## Verification and simulation

Every block has a self-checking testbench in `tb/`, which prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_uli_iid_cam` | random CAM contents against a reference model, first-match priority, mask, CSR read-back |
| `tb_uli_pmp` | loader address sequence and cycle count; random PMP configurations and accesses against a reference model of the RISC-V rules; lock behaviour; set selection |
| `tb_uli_budget_timer` | load, hold and count; expiry after exactly N run cycles; write-back; save-then-load ordering |
| `tb_uli_regfile` | nesting 2 to 4 levels deep, then a random walk between levels 0 and 8: zeroisation, spill frame contents, restored values, control words, cycle counts |
| `tb_uli_tcm` | random two-port traffic with byte enables against a reference array |
| `tb_uli_ext_mux` | decode at and around the window edges, read-data steering |
| `tb_uli_intc` | controller with timing-accurate models of the other blocks: 7-cycle entry, nested entry, strict priority, `uiret` with reload, each forced return and its cause, enables, random interrupt storms |
| `tb_uli_ext_top` | the whole extension at its default parameters, driven by a simple core model and kernel |

`tb_uli_ext_top` fills the tables through the load/store path, programs
the CSRs, and runs three handlers and two kernel interrupts. It then
nests 16 handlers 16 levels deep and unwinds them. It counts 18 mechanisms
and fails if any never occurs:

* entry latency and vector;
* bank switch, preemption, spill, nested restore, 16-level nesting;
* budget write-back and expiry;
* PMP isolation, PMP-fault return, exception return, `uiret`;
* system-timer pause;
* kernel interrupt forwarding and holding;
* kernel PMP after return;
* table fill and system-bus pass-through.

`tb_uli_workloads` runs the evaluation scenarios on the whole extension at
its defaults, with a 50 MHz clock in mind. The handler bodies are modelled
only as cycles of work.

* **Periodic timer.** A timer interrupt fires every 4,000 cycles while the
  target process is running, not running, or constantly switched with
  another process. Every entry takes exactly 7 cycles.
* **Malicious handler.** A handler makes an illegal access or never returns.
  It does this preempting a user thread, the kernel, and another handler.
  Each of the six cases ends in a forced return to exactly the preempted
  context. In the nested case, the preempted handler continues with its
  registers, PMP set and remaining budget.
* **Pulse train output.** Interrupts come at 250 kHz (every 200 cycles) and
  10 kHz. No pulse is missed, and the spread of the entry latency is zero.
* **Modbus-RTU.** One interrupt per 11-bit character at 115.2 kbit/s,
  1 Mbit/s and 2.5 Mbit/s, with a 40-cycle handler. No character is lost.
  The thread loses 8 cycles per character beyond the handler's own work.
  These are the held cycles of entry and return, and the count is the same
  at every rate.
  * The background thread keeps 99.0 %, 91.3 % and 78.1 % of the core at
    the three rates.
  * These shares do not include the 4 pipeline cycles that a real core adds
    per entry.

To run a testbench with Verilator 5:

```sh
verilator --binary --timing --assert --top-module tb_uli_ext_top \
    rtl/uli_pkg.sv $(ls rtl/*.sv | grep -v uli_pkg) tb/tb_uli_ext_top.sv
./obj_dir/Vtb_uli_ext_top
```

Any other testbench works the same way with its own name. Every testbench
has a watchdog and finishes in seconds.

Lint notes that are intended:

* Unused package constants are reported for single modules.
* Address bits outside a memory's range are reported as unused.
* The multiplexer's shared address and data bus shows up as outputs driven
  straight from inputs.

Each module's header comment explains its own notes.

## Files

| file | content |
|---|---|
| `rtl/uli_pkg.sv` | CSR numbers, cause codes, PMP types, control-word count |
| `rtl/uli_ext_top.sv` | top: all blocks wired together |
| `rtl/uli_intc.sv` | interrupt controller and entry/exit sequencer |
| `rtl/uli_iid_cam.sv` | 16-entry identification CAM |
| `rtl/uli_pmp.sv` | PMP with shadow kernel set and table loader |
| `rtl/uli_budget_timer.sv` | budget countdown timer with table access |
| `rtl/uli_regfile.sv` | banked register file with stack spill/fill |
| `rtl/uli_tcm.sv` | two-port TCM (three instances) |
| `rtl/uli_ext_mux.sv` | load/store address decoder to TCMs and system bus |
| `tb/tb_uli_*.sv` | one self-checking testbench per module |
| `tb/tb_uli_workloads.sv` | evaluation scenarios on the whole extension |
