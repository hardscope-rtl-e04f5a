# HardScope: run-time scope enforcement in hardware

C and C++ compilers enforce variable scope: a function cannot name another
function's locals, and a `static` variable is invisible outside its file. At run
time these rules are gone. Any pointer can reach any address. Data-oriented
programming (DOP) attacks exploit this. They corrupt ordinary data, such as pointers
and counters, so that existing code reads or writes variables it would never touch
in a correct run. They do not change control flow at all.

HardScope brings the scope rules back at run time. The compiler inserts a few extra
instructions that describe, for each execution context (normally one function call),
which memory areas it may use. The hardware keeps these descriptions as a stack of
**frames** of **storage-region entries**, a (base, limit) pair each. This is the
Storage Region Stack (SRS). Every load and store is checked in parallel against the
frame of the running context. An access outside all of them faults. A caller can
**delegate** an area it owns to its callee, or a callee can delegate one back to
its caller. A context therefore gets only the areas that were handed to it. Areas
reachable through a corrupted pointer are not handed on.

This repository holds SystemVerilog for the HardScope unit: the decode-stage
extension, the SRS controller with its three register banks and protected stack
memory, and the load/store guard. The processor core the unit was designed for (a
small in-order RV32 core) is not included. Its decode stage and load/store unit
connect through the ports of `hardscope_top`.

## The six instructions

All six use the RISC-V S-type format: two source registers and a 12-bit signed
immediate. Base and limit are byte addresses, and both are inclusive.

| instruction | operands | effect |
|---|---|---|
| `sbent` | none | enter a new execution context: push a frame |
| `sbxit` | none | leave the context: pop its frame |
| `sradd` | `r1, imm(r2)` | add entry [x[r1], x[r2]+imm] to the running frame |
| `srdda` | `imm(r1), r2` | add entry [x[r1]+imm, x[r2]] to the running frame |
| `srdlg` | `imm(r1)` or `imm` | delegate the running frame's most recent entry that holds address x[r1]+imm (or the absolute address imm, with r1 = x0) |
| `srdsub` | `r1, imm(r2)` | delegate the sub-region [x[r1], x[r2]+imm], provided it lies inside an entry of the running frame |

Delegated entries go to the *next context entered*. If an `sbent` follows, they
belong to the callee's new frame. If an `sbxit` follows, they join the caller's
frame again. Delegation is **lax**: if no running entry matches, nothing is
delegated and no fault is raised. This lets code pass on pointers it never
dereferences itself, such as NULL.

Encoding, which is this design's own choice (see `hs_pkg`): major opcode custom-0
(`0001011`), with funct3 values 0 to 5 giving `sbent`, `sbxit`, `sradd`, `srdda`,
`srdlg`, `srdsub` in that order. `hs_pkg::hs_encode()` builds an instruction word.

A typical instrumented call looks like this:

```
srdda   -16(sp), sp     ; prologue: entry [sp-16, sp] for the stack frame
srdlg   a0              ; hand the destination buffer to the callee
srdsub  a1, 1024(a1)    ; hand it only [a1, a1+1024] of the source, not the whole frame
sbent                   ; the callee's frame starts with just these two entries
jal     ra, memcpy
```

## How the stack is kept in hardware

This is the least obvious part of the design. Three requirements pull against each
other:

- Every load and store must be checked against *all* entries of the running frame
  in the same cycle. So the running frame must live in registers with one comparator
  per entry.
- Entering and leaving a context must be cheap. Both happen on every function call.
- The stack can be deep, so most of it must live in a memory, not in registers.

The unit uses three register banks of `N_ENTRIES` entries each, plus a protected
memory of `N_FRAMES` frames of `N_ENTRIES` entries (`srs_controller`, `srs_bank`,
`srs_mem`):

- **Active bank**: the running frame. It is checked on every access. `sradd` and
  `srdda` append to it.
- **Spare bank**: entries delegated by `srdlg` and `srdsub`, collected ahead of the
  next context switch.
- **Cache bank**: a copy of the frame just below the running one, the caller's
  frame. It is the topmost frame in memory.

Active and spare are two physical banks whose roles swap through one select bit. A
context switch therefore moves no data between them.

**`sbent`**, which takes 1 cycle:
the active bank is copied into the cache. The spare bank becomes the active bank, so
the callee starts with exactly the delegated entries. The old active bank is emptied
and becomes the new spare. Over the next *n* cycles, for a frame of *n* entries, the
cache is written to memory one entry per cycle.

**`sbxit`**, which takes 1 cycle:
the new active frame is the cache contents, followed by the entries waiting in the
spare bank (those delegated back by the callee). The callee's frame is discarded and
its bank becomes the empty spare. The cache is now stale, so over the next *n*
cycles it is refilled from the new topmost frame in memory.

These background transfers overlap with normal execution. They only cost time when
another context switch comes too soon:

| running transfer | next `sbent` | next `sbxit` |
|---|---|---|
| write-back (after `sbent`) | waits until done | waits until done |
| refill (after `sbxit`) | goes ahead at once; the partial refill is dropped and the cache is overwritten with the active bank | waits until done |

Dropping a refill is safe. The frame being refilled is still in memory, and the new
`sbent` needs the cache for the frame it is saving.

Timeline for a call and return where the caller's frame holds 3 entries:

```
cycle        0      1   2   3   4
caller     sbent    -   -   -  sbent/sbxit accepted
write-back         e0  e1  e2
```

A second context switch presented in cycles 1 to 3 stalls. In cycle 4 it goes
through. `sbxit` with a refill of 3 entries works the same way. The first memory
read is issued in the `sbxit` cycle, and the cache is complete at the end of
cycle 3.

**Enabling.** The unit starts with an empty stack and does not enforce anything.
The first `sbent` (normally at the start of `main`) turns enforcement on. The
`sbxit` that empties the stack turns it off again.

**Decode-stage stall.** An `sbent` or `sbxit` that directly follows an `srdlg` or
`srdsub` is held for one cycle in decode. The published cycle counts include this
fixed penalty, so `hs_decode` applies it without asking the unit. The unit in this
RTL writes the spare bank in a single cycle and would not need it.

## Checking loads and stores

`hs_lsu_guard` turns the core's request (address, and size of byte, half-word or
word) into the byte range [addr, addr+size-1]. The controller's comparators report
whether any valid active entry has `base <= lo` and `hi <= limit`. If so, the request
goes on to memory (`mem_req`). If not, it is blocked and `access_fault` is raised in
the same cycle. The check adds no cycle. While enforcement is off, everything passes.
A range that wraps past `0xFFFFFFFF` never matches.

The same comparator array also serves `srdlg` (with range [a, a]) and `srdsub`. A
priority encoder picks the highest matching slot. Banks keep entries in order of
addition, so this is the most recently added entry, which `srdlg` must delegate.
Only one instruction is in execute at a time, so sharing the comparators costs
nothing. An assertion in `srs_controller` checks that a check and a delegation
never arrive in the same cycle.

## Faults

`access_fault` reports a blocked load or store. `op_fault` together with
`op_fault_cause` reports an instruction the unit could not carry out:

| cause | when | effect |
|---|---|---|
| `HS_FAULT_BANK_FULL` | `sradd`/`srdda` with the active bank full; `srdlg`/`srdsub` with the spare bank full | instruction ignored |
| `HS_FAULT_BANK_FULL` | `sbxit` where caller entries plus returned delegations exceed `N_ENTRIES` | the switch happens; delegations that do not fit are dropped |
| `HS_FAULT_STACK_FULL` | `sbent` with all `N_FRAMES` memory frames in use (`N_FRAMES + 1` nested contexts) | ignored |
| `HS_FAULT_STACK_EMPTY` | `sbxit` with enforcement off | ignored |

What the core does with a fault (trap, halt) is up to the integration.

## Module map

| file | role |
|---|---|
| `rtl/hs_pkg.sv` | entry type, operation and fault enums, instruction encoding |
| `rtl/hardscope_top.sv` | the unit with its core-facing ports |
| `rtl/hs_decode.sv` | instruction recognition, operand arithmetic, decode stalls |
| `rtl/srs_controller.sv` | SRS controller: bank roles, context switches, background transfers, faults |
| `rtl/srs_bank.sv` | one bank of entries (used for active, spare and cache) |
| `rtl/srs_match.sv` | parallel subset comparators and most-recent priority encoder |
| `rtl/srs_mem.sv` | protected SRS memory, single port, one-cycle read |
| `rtl/hs_lsu_guard.sv` | load/store range formation and gating |

`hardscope_top` interface. Core decode side: `instr_valid`, `instr`, `rs1_val` and
`rs2_val` in (register values after forwarding); `rs1`, `rs2`, `is_hs` and
`hs_stall` out. A HardScope instruction executes at the clock edge of a cycle in
which it is presented and `hs_stall` is low. Memory side: `lsu_req`, `lsu_addr` and
`lsu_size` in; `mem_req` and `access_fault` out. Status outputs: `enabled`, `depth`,
`xfer_busy`, and the three bank counts.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `N_ENTRIES` | 16 | entries per bank, i.e. maximum entries per frame |
| `N_FRAMES` | 16 | frames in protected memory (256 entries of 64 bits = 16 kbit, one FPGA block RAM) |

The defaults are the main published configuration. Logic grows linearly with
`N_ENTRIES`, with one pair of 32-bit comparators per active entry. The published FPGA
sweep covers banks of 8 to 128 entries. Both parameters can be changed on
`hardscope_top`, and `hardscope_sweep_tb` runs the unit at 8, 32, 64 and 128.

At the defaults, a generic synthesis (yosys, no technology mapping) gives 3,204
flip-flop bits and one 16,384-bit memory. Most of the flip-flops are the three banks:
3 x 16 x 64 bits. The published FPGA build reports 3,221 registers for the same size.
LUT counts depend on the FPGA mapping and were not compared.

Whether known programs fit the defaults:

- A call chain 7 deep (a ProFTPD code excerpt) fits in depth: 7 is at most 17
  nested contexts. Its frame sizes were not published.
- One CoreMark iteration with the profile seeds needs up to 11 nested frames (this
  fits) and up to 23 entries per frame. That is more than 16, so `N_ENTRIES` must be
  at least 23 (in practice 32) for it.
- The CoreMark validation and performance seeds reach 120 entries per frame. That
  needs `N_ENTRIES >= 120`, which the published work itself ran only in simulation.

## Where this RTL follows the published design and where it chooses

These follow the published design:

- the six instructions and their operand forms;
- the S-type format;
- lax delegation, with the most recent matching entry delegated;
- the three banks and their roles;
- one-cycle `sbent`/`sbxit` with background transfers of at most N cycles;
- which context switches stall, and the discarded refill;
- the extra cycle after a delegation;
- the subset check on every load and store at no cycle cost;
- enabling by the first `sbent`;
- the 16 x 16 size.

These are this design's own choices:

- **Encoding**: opcode and funct3 values.
- **Inclusive limit**: the published text is inconsistent here. One sentence says
  the stack-frame entry's limit is "one less than the stack pointer". The matching
  listing writes `srdda -16(sp), sp` with limit = sp. Another listing uses
  `sradd sp,23(sp)` for a 24-byte area. Here the operand value is stored unchanged
  and is inclusive. A compiler that wants an exact area passes size-1 as the offset.
- **Entry order after `sbxit`**: caller entries first, returned delegations after
  them, so the delegations count as most recent.
- **Overflow handling**: all fault causes, and dropping delegations that do not fit.
- **Leftover delegations**: those still waiting when the last frame exits are
  discarded. `sradd`/`srdda` are ignored while enforcement is off.
- **Memory organisation**: fixed frame slots, per-frame counts in registers, a
  single port, a one-cycle read.
- **Single cycle**: decode and execute of a HardScope instruction are folded into
  one cycle. The core's other pipeline stalls are not modelled, and a real
  integration must gate `instr_valid` with them.
- **Reset**: asynchronous, active low.

Not built:

- **Strict delegation**: a variant in which an unmatched delegation faults, except
  for NULL.
- **`srdlgm`**: an instruction mentioned once in the published text, but not part
  of its instruction set.
- **Faster stack transfers**: running the stack memory on a faster clock to shorten
  stalls.
- **Multi-thread and multi-core support**: SRS save and restore, and delegation
  between threads.
- **The processor core.**

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it does |
|---|---|
| `srs_bank_tb` | random load/clear/push against a queue model |
| `srs_match_tb` | random and nested entries; hit and most-recent index |
| `srs_mem_tb` | fill all 256 words, random read-back, one-cycle latency |
| `hs_lsu_guard_tb` | byte/half/word ranges, wrap-around, enforcement on and off |
| `hs_decode_tb` | every instruction form, immediates, both stall rules |
| `srs_controller_tb` | about 20 000 random operations at 4x4 size against the model in `hs_ref_pkg`, plus exact stall-cycle checks |
| `hardscope_top_tb` | end to end at the default 16x16 size through encoded instructions; compares with the model every cycle and fails if any mechanism (each stall kind, discarded refill, hits and misses of both delegations, each fault) never happened |
| `hardscope_dop_tb` | instrumented-code scenarios: a DOP gadget reached through corrupted pointers, a `memcpy` call with delegation, a returned object, return-address protection, a loop isolated from a neighbouring array, and 7- and 11-deep call chains |
| `hardscope_sweep_tb` | the whole unit at 8, 32, 64 and 128 entries per bank (16 frames): every comparator hits and misses, banks overflow, and the write-back lasts N cycles with the matching stall |

`tb/hs_ref_pkg.sv` is a behavioural reference of the SRS. It uses queues, not banks,
and counts transfer cycles. The top-level benches use it.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/hs_pkg.sv tb/hs_ref_pkg.sv tb/hardscope_top_tb.sv --top-module hardscope_top_tb
./obj_dir/Vhardscope_top_tb
```

For a unit bench, replace the last two file and module names, for example
`tb/srs_bank_tb.sv --top-module srs_bank_tb`. All benches finish in well under a
second.
