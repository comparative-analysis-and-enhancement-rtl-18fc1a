# EXCEC control-flow-integrity unit

This is a hardware unit that enforces control-flow integrity (CFI) for a small in-order
RISC-V core, such as a CV32E40P in a PULPissimo microcontroller. It sits beside the
core's decode stage. It sees every instruction the core executes and raises a
violation when the program's control flow leaves the paths the compiler allowed.

It enforces three things:

- **Backward edges (returns).** Every call pushes its return address onto a
  flip-flop shadow stack. Every return is compared with the top entry. Ordinary
  `jal ra` / `jalr ra` / `ret` instructions drive this directly, so returns
  need no extra instruction.
- **Forward edges (indirect calls and jumps).** An indirect call is instrumented
  as `CFI_CALL L; jalr ra, rs; ... target: CFI_CHECK L`, and an indirect jump as
  `CFI_JUMP L; jr rs; ... target: CFI_CHECK L`. The three instructions must follow
  each other directly, and the labels must match.
- **setjmp/longjmp.** `CFI_SETJMP i` is placed after a setjmp call and saves the
  shadow-stack pointer. `CFI_LONGJMP` is placed before a longjmp call. The
  `CFI_SETJMP i` reached through the longjmp then unwinds the shadow stack to the
  saved pointer.

## Files

| File | Content |
|---|---|
| `rtl/excec_pkg.sv` | Sizes, instruction encoding, operation, state and cause types |
| `rtl/cfi_decoder.sv` | Classifies an instruction into a CFI operation and computes the return-address slice |
| `rtl/cfi_controller.sv` | Sequence state machine, violation causes, enable flag and interrupt mask |
| `rtl/shadow_stack.sv` | 128-entry return-address stack with a recursion counter per entry |
| `rtl/setjmp_table.sv` | 8 saved stack pointers and the "longjmp announced" flag |
| `rtl/excec_top.sv` | Top level that connects the four blocks |
| `tb/tb_*.sv` | One self-checking testbench per module; `tb_excec_top` runs end to end |

## Instruction set

All eight custom instructions use the I-type layout with the reserved major opcode
`1101011`. `rd` and `rs1` are zero, `funct3` selects the instruction, and `imm[11:0]`
carries the label or the setjmp index. This bit encoding is this design's own choice.

| funct3 | Instruction | Effect |
|---|---|---|
| 0 | `CFI_CALL L` | Announces an indirect call with label L; the next instruction must be `jalr ra` |
| 1 | `CFI_JUMP L` | Announces an indirect jump with label L; the next instruction must be `jr` |
| 2 | `CFI_CHECK L` | Placed at indirect targets; after the `jalr`/`jr` its L must equal the announced label. Elsewhere it is a no-op, except that `CFI_CHECK 0` is always a violation |
| 3 | `CFI_SETJMP i` | Saves the stack pointer in slot i, or unwinds to slot i if a longjmp was announced |
| 4 | `CFI_LONGJMP` | Announces a longjmp |
| 5 | `CFI_ENABLE` | Turns enforcement on |
| 6 | `CFI_DISABLE` | Turns enforcement off |
| 7 | `CFI_RESET` | Clears stack, table and state, and turns enforcement off |

The unit also tracks three standard RISC-V transfers:

- `jal ra` and `jalr ra` are calls.
- `jalr x0, 0(ra)` is a return.
- Any other `jalr x0` is an indirect jump.

Only `x1` counts as the link register. Compressed instructions arrive expanded, with
`is_compressed_i` set, so a call's return address is pc+2 for them and pc+4 otherwise.

**Trampolines.** Sometimes one function can be reached from several indirect call
sites. Sharing one label between all of them would make the check coarse. Instead, each
such call site calls its own trampoline, through `CFI_CALL L`/`jalr`, and the
trampoline begins with `CFI_CHECK L`. Before the call, the real target is saved on the
software stack. The trampoline reloads it and compares it with the addresses of the
functions that site may call. On a match it uses an ordinary direct branch to the
instruction just after that function's own `CFI_CHECK`. That branch is a direct
transfer, so no label check is needed. The callee later returns straight to the
original call site, which matches the entry pushed by the `jalr`. If nothing matches,
execution falls through to `CFI_CHECK 0`, which always raises a violation. The
hardware needs nothing extra for this.

## Interface (`excec_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | Clock; asynchronous active-low reset |
| `instr_valid_i` | in | 1 | High for one cycle per executed instruction |
| `instr_i` | in | 32 | Expanded instruction word |
| `pc_i` | in | 32 | Its address |
| `is_compressed_i` | in | 1 | The instruction was 16 bits |
| `target_i` | in | 32 | Jump target computed by the core; for a return, the value of `ra` |
| `violation_o` | out | 1 | CFI violation caused by this instruction |
| `cause_o` | out | 3 | 1 stack full, 2 stack empty, 3 return mismatch, 4 label mismatch, 5 invalid flow |
| `irq_disable_o` | out | 1 | The core must not take an interrupt while this is high |
| `enabled_o` | out | 1 | Enforcement is on |
| `state_o` | out | 2 | IDLE, CALL announced, JUMP announced, CHECK pending |
| `ss_depth_o` | out | 8 | Occupied shadow-stack entries (for observation) |
| `ss_recursion_o` | out | 1 | This cycle's push was folded into a counter (for observation) |

**Timing:**

- `violation_o` and `cause_o` are combinational. They answer in the same cycle as
  the instruction, so the core's pipeline controller can raise an exception for
  that instruction.
- All state changes at the clock edge that ends the cycle.
- The core should present only instructions that really execute, not flushed ones.
- `irq_disable_o` rises in the `CFI_CALL`/`CFI_JUMP` cycle and stays high until the
  `CFI_CHECK`. This keeps a guarded transfer atomic.
- Out of reset the unit is disabled, so the startup code runs unchecked until
  `CFI_ENABLE`.

## How it works

**Sequence controller.** It stores only the states that span instructions: IDLE,
CALL_ANN, JUMP_ANN and CHECK_PEND.

- In IDLE:
  - a call pushes;
  - a return is checked and popped;
  - `CFI_CALL`/`CFI_JUMP` latch their label and move on.
- CALL_ANN accepts only `jalr ra`, which pushes. JUMP_ANN accepts only `jr`.
  Both then go to CHECK_PEND.
- CHECK_PEND accepts only `CFI_CHECK` with the latched label.
- Anything else in those states is an *invalid flow*.
- After a violation the controller returns to IDLE with the stacks unchanged.
  The exception handler is expected to issue `CFI_RESET`.
- While the unit is disabled, every CFI instruction, call and return is ignored.
- An unannounced `jalr ra` is pushed like `jal`, and an unannounced `jr` passes.
  Only announced transfers are label-checked.

**Shadow stack.** It has 128 entries of return-address bits [18:1]. Bit 0 of an
instruction address is always zero. In the PULPissimo memory map, the 13 upper bits
of every code address are the same, so bits [18:1] still cover the whole 512 KiB
memory. This gives 128 × 18 =
2304 flip-flops, against 4096 for full 32-bit entries.

- Each entry also has a 7-bit recursion counter. If a call's return address equals
  the top entry (the same call site recursing directly), the counter is
  incremented instead of using a new entry. A return decrements the counter
  before it removes the entry.
- A push to a full stack is refused with cause *stack full*. So is a push that
  would take a counter past 127.
- A return on an empty stack gives *stack empty*. A return to any address but the
  top gives *return mismatch*.

**setjmp table.** It has 8 slots of a saved stack pointer plus a valid bit, and one
pending flag.

- `CFI_LONGJMP` sets the flag.
- `CFI_SETJMP i` with the flag clear saves the pointer. With the flag set it clears
  the flag and unwinds the stack to slot i.
- Restoring from an unused slot, or to a pointer above the current one, is an
  *invalid flow*. So is an index of 8 or more.
- Between `CFI_LONGJMP` and the unwinding `CFI_SETJMP`, returns are not checked,
  because longjmp leaves through a return to the setjmp site.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `SHADOW_STACK_SIZE` | 128 | `excec_top`, `shadow_stack.SIZE` |
| `RECURSION_DEPTH` | 128 (7-bit counters) | `excec_top`, `shadow_stack` |
| `SETJMP_CALLS` | 8 | package |
| `INDIRECT_CALLS`, `INDIRECT_JUMPS` | 64 each → 8-bit labels | package |
| Stored address slice | [18:1] | package |

The whole unit synthesises to about 3,300 storage bits (3,296 in memories plus 28 flip-flops). The original EXCEC
implementation was reported at 6,032 LUTs and 3,459 FFs on a Zynq-7020.

## Verification

Each module has a self-checking testbench. Each one ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

- `tb_cfi_decoder` compares every decoded field against a reference decoder. It uses
  directed cases and 4000 random words.
- `tb_shadow_stack` runs at full size against a queue model. It fills the stack,
  overflows it, hits the recursion bound, empties it, unwinds it, and then runs
  20,000 random operations.
- `tb_setjmp_table` compares the table against a model over 5000 random requests.
- `tb_cfi_controller` walks every rule of the state machine with the stack
  status forced. It then runs 20,000 random cycles against a reference model
  of the rules.
- `tb_excec_top` acts as the core, at the default sizes. It executes a random
  instrumented program with:
  - calls, recursion and returns;
  - indirect calls, some through trampolines;
  - indirect jumps;
  - setjmp/longjmp;
  - disabled stretches;
  - interrupts.

  It then injects attacks and checks each one for the expected cause. Every
  mechanism is counted, and a mechanism that never fires fails the test.
- `tb_excec_workloads` runs the call/return traces of real recursive programs
  through the unit at full size. The programs are:
  - factorial(20);
  - tak(18,12,6);
  - 8-queens;
  - a 50-deep call chain;
  - a sort that calls its comparator through a pointer;
  - a switch-based interpreter.

  It checks the stack depth on every cycle and reports the peak use:

  | Program | Peak entries | Largest recursion count |
  |---|---|---|
  | factorial(20) | 1 | 18 |
  | tak(18,12,6) | 17 | 10 |
  | 8-queens | 2 | 7 |
  | 50-deep call chain | 50 | — |

  All of these fit well inside 128 entries.

Each testbench was also run against a copy of its module with a deliberate bug,
and it detected the bug.

## Simulating

The testbenches use only plain Verilator 5. The package goes first. For example, from
the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --top-module tb_excec_top \
    rtl/excec_pkg.sv rtl/cfi_decoder.sv rtl/shadow_stack.sv rtl/setjmp_table.sv \
    rtl/cfi_controller.sv rtl/excec_top.sv tb/tb_excec_top.sv
./obj_dir/Vtb_excec_top +verilator+rand+reset+2
```

Every testbench prints one `TB_RESULT checks=N failures=M` line, which is the verdict.
The top testbench runs with all parameters at their defaults.
To try other sizes, override `SHADOW_STACK_SIZE` and `RECURSION_DEPTH` on `excec_top`.
The label width and the number of setjmp slots are package constants.

## Choices this implementation makes

The following are not fixed by the original EXCEC description. Each is this
implementation's choice:

- **Instruction encoding.** The custom opcode, the `funct3` assignment and the
  immediate field are this implementation's own.
- **Recognising recursion.** A call counts as recursion when its return address
  equals the top entry.
- **Counter overflow.** A full counter refuses the push. It does not spill into a
  new entry.
- **Stack full.** This is reported as a violation with its own cause code, even
  though it is strictly a capacity problem rather than an attack. Software can tell
  it apart by `cause_o`.
- **Unannounced transfers.** A `jalr ra` with no `CFI_CALL` before it is pushed
  like a direct call. A `jr` with no `CFI_JUMP` passes unchecked. The compiler is
  expected to announce every indirect transfer.
- **Disabled unit.** While it is disabled, calls and returns are ignored as well as
  the CFI instructions. The stack therefore does not track code run while the unit
  is disabled. Enable the unit at a point where the call depth is the one the
  program will return to, or issue `CFI_RESET` first.
- **Management commands.** `CFI_DISABLE` and `CFI_RESET` act in any state, and
  they end an open call/jump sequence without a violation.
- **setjmp valid bits.** These are an addition. A restore from a slot that was
  never saved is an invalid flow.
- **Violation timing.** A violation is signalled combinationally in the cycle of
  the offending instruction. The unit itself has no exception or halt logic.

## Limitations and what is not here

- The host core and the SoC are not included. The changes the core would need are:
  - decode-stage taps for the interface above;
  - an exception on `violation_o`;
  - interrupt masking on `irq_disable_o`.
- The compiler instrumentation (placing the CFI instructions and building the
  trampolines) is software and is not included.
- Nested or mutual recursion uses one entry per distinct return address. Only
  direct recursion of one call site is folded into a counter.
- An unwind restores only the stack pointer, not the counter of the entry that
  becomes the top.
- Labels wider than 8 bits are truncated.
- An interrupt handler that returns while a longjmp is pending is not checked.
