# PULP protection unit: in-process isolation keyed on the program counter

Most memory-safety bugs in user programs come from code that runs inside the
process but should not be trusted with all of its memory: a library routine
handed a wrong length, a parser that copies past a buffer. Page tables cannot
help, because they protect one process from another, not one function from
another function of the same process.

PULP (Protection by User Level Partition) makes the hardware tell the two
apart by the *address of the instruction*. One code range of the process is
trusted: the **primary** function, given by the PPCR register pair. All other
user-mode code is **secondary**. Before calling a secondary function, the
primary code states which data ranges the callee may touch. It does this by
loading SMAR register groups with a `start_protect(addr, len, cfg, index)`
operation. While the callee runs, every load and store it issues is checked
against those ranges in the pipeline. No instrumentation is needed in the
callee. A RAR register holds the address the callee must return to, so that it
cannot jump back into trusted code anywhere else.

This repository holds the SystemVerilog of that protection logic, as it would
be added to a five-stage in-order RISC-V pipeline (the published prototype
extends a Rocket core). The core itself, the operating-system changes and the
compiler support are not included. The unit exposes the signals the core has
to provide and the exception it has to take.

## The three registers

| Register | How many | Contents | Written by |
|---|---|---|---|
| PPCR | one pair | lower and upper PC of the primary function | kernel only (program loader, context switch) |
| SMAR | `N_SMAR` groups (default 4) | lower bound, upper bound, 2-bit permission (bit 0 read, bit 1 write) | primary function or kernel |
| RAR | one | return address of the current secondary call | hardware on a call; kernel (context switch) |

All ranges are half-open: `lower <= x < upper`. `start_protect` stores `addr`
as the lower bound and `addr + len` as the upper bound, so `len` bytes are
granted. The sum saturates at the top of the address space. `end_protect`
clears a group to zero, and a group whose permission field is zero is
*inactive*. Reset clears all registers: PPCR is then empty, so all user code
counts as secondary, no group is active, and nothing is checked. An
unmodified program therefore runs exactly as before.

## Where the checks sit in the pipeline

```
        ID                         ID/EX reg            EX
  pc, priv, class ──► pulp_region_classify ──► region ──► pulp_bound_check ──► fault (load/store)
                       ▲ PPCR (forwarded)       needs      pulp_cfi_check   ──► fault (return), RAR write
                       │                        checks     pulp_regs        ──► illegal cfg, read data
                       └──────────── pulp_regs (PPCR, SMAR, RAR) ◄──────────┘
```

**ID: which region does the instruction belong to?**
`pulp_region_classify` looks at the decoded instruction's PC and privilege
level:

- any privilege above user mode is the kernel, and nothing is checked;
- a user PC inside PPCR is the primary function: its loads and stores are not
  checked (it may use its locals and all globals);
- every other user PC is secondary.

The decision and two flags travel to EX in the ID/EX register:

- `need_mem_check` is set for a secondary load or store;
- `need_cfi_check` is set for a user branch or jump.

**EX: the bound check.** `pulp_bound_check` compares the effective address of a
secondary load or store with all SMAR groups in parallel. The access is legal
if a single active group covers every byte of it (`addr >= lower` and
`addr + 2^size <= upper`) and grants the permission it needs: read for a
load, write for a store, both for an atomic. Otherwise `exc_valid` rises in
the same cycle with the out-of-bound cause, and `mem_allow` drops so that the
core does not send the access to memory. The faulting address goes out on
`exc_tval`. Because the whole access must lie inside a group, a word load
that starts in the buffer and ends past it is refused. Heartbleed-style
over-reads are caught at the first word that leaves the record.

**EX: the return-address check.** `pulp_cfi_check` classifies the target of a
taken user branch or jump against PPCR:

- a **jump** from the primary function to secondary code is a call, and its
  link address (the PC after the jump, supplied by the core) is written into
  RAR;
- any **taken transfer** from secondary code into the primary range is a
  return, and its target must equal RAR. Otherwise the return-address-error
  exception is raised. Conditional branches are included, so a branch cannot
  bypass the check.

Transfers that stay inside one region are not checked.

**Timing.** The checks add no cycle and no stall. All of them are
combinational in the EX cycle. Register state (SMAR, PPCR, RAR) changes at the
clock edge where the instruction leaves EX: `ex_valid && !stall && !ex_kill`.
It changes only if that instruction raised no exception. The next
instruction therefore already sees the new SMAR or RAR in its own EX cycle.

**PPCR forwarding.** PPCR is used in ID, one stage before configuration
instructions complete. An instruction decoded right behind a PPCR write
would therefore be classified with the old range. `pulp_regs` provides the
value PPCR will hold after the current edge (`ppcr_lo_next`, `ppcr_hi_next`),
and the classifier uses that value. No pipeline flush is needed after a PPCR
write.

## When no group is active

The published description contains two statements that pull in different
directions:

- secondary code may access *only* the ranges the SMAR registers indicate;
- `end_protect` clears a group *so that the range is no longer checked*.

Read strictly, the first would fault every library call made outside a
`start_protect`/`end_protect` bracket, because all code outside the primary
range is secondary. This RTL follows the second statement for the case where
no group is active: **secondary accesses are checked only while at least one
SMAR group is active**. Once any group is active, an access is legal only
inside an active group, which follows the first statement.

Consequently, a secondary function that needs its own stack while protected
must be granted it as a group too. The unit does not tell the callee's own
frame from other memory.

## Configuration operations and Rule 2

Configuration instructions reach the unit in EX as `ex_cfg_op` with operands.
The instruction encoding is left to the core's decoder, which only has to
mark the instruction with `iclass.is_cfg`.

| `cfg_op` | Operands | Effect |
|---|---|---|
| `CFG_START` | `index`, `wdata` = addr, `len`, `perm` | `start_protect`: SMAR[index] = {addr, addr+len, perm} |
| `CFG_END` | `index` | `end_protect`: SMAR[index] cleared |
| `CFG_READ` | `sel` | `cfg_rdata` = register `sel` |
| `CFG_WRITE` | `sel`, `wdata` | register `sel` = wdata |

Register map for `sel`:

- `0x00` PPCR lower;
- `0x01` PPCR upper;
- `0x02` RAR;
- `0x10 + 4*i + {0,1,2}`: lower bound, upper bound and permission of SMAR group `i`.

Who may do what:

- Secondary code may execute **no** configuration instruction, not even a
  read. This is the point of the scheme: the callee cannot widen its own
  ranges.
- The primary function may start, end, read and write SMAR groups, and read
  PPCR and RAR.
- The kernel may do everything. It is the only one that may write PPCR or RAR.

A refused operation, or one with a non-existent selector or index, changes
nothing and raises an illegal-instruction exception.

Exception causes on `exc_cause` (RISC-V `mcause` numbering, with custom codes
from the range reserved for that):

| Cause | Value | `exc_tval` |
|---|---|---|
| refused configuration instruction | 2 (illegal instruction) | 0 |
| out-of-bound load | 24 | address |
| out-of-bound store | 25 | address |
| return-address error | 26 | branch/jump target |

## Interface to the host core

`pulp_unit` is the top. Parameters: `XLEN` (address width, default 64) and
`N_SMAR` (number of SMAR groups, default 4).

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `stall` | in | the instruction in EX stays there this cycle |
| `flush` | in | the instruction in ID does not enter EX (a bubble does) |
| `id_valid`, `id_pc`, `id_priv`, `id_iclass` | in | instruction in decode: PC, privilege (`priv_e`), class `{is_load, is_store, is_branch, is_jump, is_cfg}` |
| `ex_kill` | in | the instruction in EX is squashed by the core (older trap, redirect): no effect, no exception, removed even during a stall |
| `ex_addr`, `ex_size` | in | load/store effective address, size as 2^size bytes |
| `ex_target`, `ex_taken`, `ex_link` | in | branch/jump target, branch outcome (ignored for jumps), link address |
| `ex_cfg_*` | in | configuration operation and operands |
| `ex_valid`, `ex_region` | out | an instruction is in EX, and its region |
| `mem_allow` | out | the load/store in EX may be sent to memory |
| `exc_valid`, `exc_cause`, `exc_tval` | out | exception for the instruction in EX; it stays visible while the instruction is stalled |
| `cfg_rdata` | out | data of a configuration read |
| `rar_out`, `ev_call`, `ev_return`, `smar_hit` | out | observability: RAR, call/return seen in EX, groups covering the access |

The core is expected to take the exception as it takes its own EX-stage
faults: squash the instruction and trap. `pulp_unit` carries assertions for
these rules:

- an exception is only raised for a live instruction;
- an out-of-bound access never has `mem_allow` set;
- a stalled instruction stays in EX. Everything in `exc_*` and
`mem_allow` is combinational from the EX inputs. The unit has no path from an
EX input back to an ID input.

## Files

| File | Contents |
|---|---|
| `rtl/pulp_pkg.sv` | shared types: privilege, region, instruction class, configuration operations, permission bits, register map, exception causes |
| `rtl/pulp_regs.sv` | PPCR, SMAR groups and RAR; configuration operations; write rules; PPCR forwarding |
| `rtl/pulp_region_classify.sv` | ID-stage region decision |
| `rtl/pulp_bound_check.sv` | EX-stage SMAR comparison |
| `rtl/pulp_cfi_check.sv` | EX-stage call/return logic |
| `rtl/pulp_unit.sv` | top: the above plus the ID/EX register and exception priority |

Synthesised at the defaults, the unit has about 285 word-level cells and 721
flip-flops. Most of the flip-flops are the eleven 64-bit registers: two PPCR,
eight SMAR bounds and RAR.

## Verification

Every module has a self-checking testbench that compares it with a reference
written independently in the testbench:

- `tb_pulp_regs`: a shadow register model under 20,000 random operations from
  random regions;
- `tb_pulp_region_classify` and `tb_pulp_cfi_check`: random vectors around the
  range edges, plus directed cases;
- `tb_pulp_bound_check`: a byte-by-byte coverage model, plus the end-of-buffer,
  straddling, read-only and address-wrap cases.

The end-to-end testbenches drive `pulp_unit` at its default parameters through
a small pipeline model, `tb/pulp_tb_runner.sv`. It plays a program of
instructions whose outcomes were worked out by hand (`tb/pulp_tb_pkg.sv`). It
checks the exception, `mem_allow` and read data of every instruction in
every EX cycle. It can inject random stalls, flushes and kills, replaying
killed instructions.

| Testbench | What it runs | Result |
|---|---|---|
| `tb_pulp_unit` | one protected call from start to finish: PPCR set-up, grants, in- and out-of-bound accesses, read-only store, attempts by the callee to reconfigure, wrong and right returns, revocation, kernel accesses, PPCR forwarding. Runs once undisturbed (must take one cycle per instruction) and once with random stalls, flushes and kills. Counts every mechanism and fails if one never happens. | pass |
| `tb_pulp_heartbleed` | heartbeat request claiming 65,535 bytes for a 16-byte record, then a well-formed one | 8,196 over-reads refused, none past the record allowed |
| `tb_pulp_overflow` | the two `strcpy` into `char pass[10]` programs (stack and heap), plus six overflow models patterned on wu-ftpd, BIND and sendmail bugs; their buffer sizes are illustrative | every store past the buffer refused, every store inside allowed |
| `tb_pulp_strcpy_micro` | 10,000 protected `strcpy` calls on a 100-byte string | 3,090,002 instructions in 3,100,003 cycles; the extra cycles are one drain cycle per call. Configuration instructions are 1.29% of the instructions. |

To simulate one of them with Verilator (5.x):

```
verilator --binary --timing --assert \
  rtl/pulp_pkg.sv rtl/pulp_regs.sv rtl/pulp_region_classify.sv \
  rtl/pulp_bound_check.sv rtl/pulp_cfi_check.sv rtl/pulp_unit.sv \
  tb/pulp_tb_pkg.sv tb/pulp_tb_runner.sv tb/tb_pulp_unit.sv \
  --top-module tb_pulp_unit -o sim && ./obj_dir/sim
```

Each testbench ends with a line `TB_RESULT checks=N failures=M`. A block
testbench needs only `rtl/pulp_pkg.sv`, its module and its own file. The
strcpy benchmark runs in a few seconds; the others in well under one.

## How far this follows the published design

The published design gives these parts:

- the three register kinds;
- the two rules on who may access which data and who may write which
  register;
- the placement of the classification in ID and of the checks in EX;
- the behaviour of `start_protect`/`end_protect`;
- the two exceptions.

The following are this implementation's own choices, because the description
does not settle them:

- the address width (64, as for a Linux-capable Rocket core) and the number of
  SMAR groups (4; the description only says "several");
- half-open ranges, saturation of `addr + len`, and the check of the last byte
  of an access as well as the first;
- the permission encoding, and the use of a zero permission to mark a group
  inactive;
- the no-active-group rule above;
- that only jumps write RAR, while every taken transfer into primary code is
  checked as a return;
- that the kernel may write SMAR and RAR, that user code may never write RAR,
  and that the primary function may read all registers;
- the register map, the operation set, the cause numbers, the handshake with
  the core (`stall`/`flush`/`ex_kill`, state change when the instruction
  leaves EX) and PPCR forwarding.

Known limits, also present in the published scheme:

- there is one RAR, so a secondary function that calls back into the primary
  function, or nested calls from primary into secondary code, are not
  supported;
- only one primary range exists per process.

The reported hardware cost for the prototype (31% more area and 2% more cells
than the base Rocket core) and its SPEC2006 timing depend on the whole core
and system. This RTL does not reproduce them.

## Changing it

- `N_SMAR` can be raised to 60 without touching the register map (the 8-bit selector holds groups at 0x10 to 0xFF).
- `XLEN` can be set to 32 for an RV32 core.
- The cause numbers and the register map live in `pulp_pkg`.
- To connect the unit to a core, drive the ID inputs from the decoder. Drive
  the EX inputs from the ALU's address and branch outputs. Gate the data
  memory request with `mem_allow`, and merge `exc_*` into the core's EX-stage
  exception logic.
