# Scry: a register-free 16-bit instruction set, in RTL

Scry is an instruction set in which every instruction is 16 bits wide and
none of them names a register. An instruction does not say where its inputs
come from. It only says when its result will be needed, counted in executed
instructions: "send my result to the instruction that executes three after
me". The inputs of an instruction are whatever earlier instructions sent to
it. No register numbers are encoded, so the full feature set of a 64-bit
RISC machine with multiply and divide fits in 16-bit words. Four further
ideas keep the encoding small:

* **Operand-count polymorphism.** An instruction can act differently
  depending on how many operands reach it. An `add` that gets one operand
  adds an *implicit immediate* (1), so the ISA needs no separate increment.
* **Typed operands.** Every operand carries a tag: `u8 i8 u16 i16 u32 i32
  u64 i64`. One `add`, one `ld` addressing form and one `st` then serve every
  width and signedness.
* **Not-a-Result (NaR).** An error such as division by zero does not trap.
  It produces a NaR value, which flows on like data. A trap happens only
  when a NaR reaches a store or a jump, or at the explicit `trap` word.
* **Delayed control flow.** A `jmp` or `ret` names a *trigger* address
  further down the code. The transfer happens when execution gets there, and
  the instruction at the trigger is then not executed.

This RTL is one in-order, multi-cycle implementation of that ISA. It runs
single functions written in Scry assembly, such as `strcpy` and `isxdigit`.
It also exposes the events that show each of these mechanisms at work.

## 1. Forward-temporal referencing and the operand window

Number the executed instructions 0, 1, 2, … in execution order. Instruction
*n* with output reference *r* (written `=>r`) sends its result to
instruction *n + 1 + r*. So `=>0` means "the next instruction to execute".
The reference counts *executed* instructions, not addresses. When a jump is
taken, operands already in flight reach whatever instruction executes at
that point in time. The programmer or compiler arranges the code so that
the right instruction is there.

Each instruction receives at most four operands. They are kept in the order
they arrived: an operand sent by an earlier instruction comes first. A fifth
or later operand is dropped.

`scry_operand_window` holds the operands in flight. It has one *slot* per
future instruction, indexed by the executed-instruction count modulo
`DEPTH`:

```
slot  n   : operands for the instruction executing now   (read, then cleared)
slot  n+1 : operands for the next one                    (=>0)
 ...
slot  n+32: furthest normal reference                    (5-bit =>31)
 ...
slot  n+1024 = slot n (mod 1024): furthest echo.l reach (10-bit =>1023)
```

A slot is cleared as soon as its instruction has read it, before that
instruction writes any output. A reference 1024 ahead therefore wraps onto
the slot that was just freed, so `DEPTH = 1024` is the smallest window that
serves every reference the encoding can express. Physically the window is
four banks of 1024 operands, where bank *k* holds the *k*-th operand of every
slot. A 1024 × 3-bit array in flip-flops holds each slot's count. A write
appends at bank `count[slot]`. If that count is already 4, the `drop` signal
pulses instead.

The ISA itself does not limit how many operands are in flight. It expects a
real machine to spill long-lived operands into dedicated operand caches
backed by memory, especially across calls. This design has no such caches.
The flat window is exact for a single function, and calls are not
implemented (see section 7).

## 2. Operands, types and NaR

An operand is `{nar, tag[3:0], value[63:0]}` (`operand_t` in `scry_pkg`).

| tag | type | tag | type |
|-----|------|-----|------|
| 0 | u8  | 1 | i8  |
| 2 | u16 | 3 | i16 |
| 4 | u32 | 5 | i32 |
| 6 | u64 | 7 | i64 |

* Bit 0 of the tag means signed, and bits 2:1 give log2 of the size in bytes.
  Tags 8–15 are reserved; an ALU that sees one returns a NaR.
* Values are kept *canonical*: sign- or zero-extended from their width to
  64 bits. A comparison of two i8 values is then a plain 64-bit signed
  comparison.
* A NaR has `nar = 1` and carries a small code in `value[7:0]`:
  1 division by zero, 2 bad type, 3 memory fault, 4 missing operand.

An instruction that gets a NaR among its inputs outputs NaRs; `isnar` is the
exception. The core *halts* (`HALT_NAR_TRAP`) when a NaR reaches a store
(`st`) or a control-flow instruction (`jmp` as its condition, `ret` as its
first operand). A `pick` whose condition is a NaR forwards that NaR. `ld` given a NaR address
returns a NaR.

## 3. Encoding

Instructions are little-endian 16-bit words. The low bits select one of four
output patterns, which decide how many bits the reference fields take:

| low bits | pattern | instructions |
|----------|---------|--------------|
| `..00`   | no output, or output only to the next instruction | trap, nop, st, rsrv, free, st.s, call, ret, saddr, grow, ld.s, const, fence, jmp |
| `..10`   | one reference | pick, pick.i, ld, cast, echo.l |
| `0001`   | ALU: ref 14:10, mod 9:7, func 6:4 | 15 ALU operations |
| `1001`   | two references | echo, dup (bit 4 selects) |

Inside the `..00` group, the lowest set bit among bits 9:2 selects the
instruction. The fields above that bit are its arguments:

* `jmp`: bit 2, trigger `trig` in 15:10, target offset `imm7` in 9:3.
* `fence`: bit 3.
* `const`: bit 4, type `t[2:0]`, `imm8`.
* `ld.s`: bit 5.
* `saddr` and `grow`: bit 6, with bit 7 choosing between them.
* `st.s`, `call` and `ret`: bit 7.
* `free`: bit 8.
* `rsrv`: none of bits 8:2 set, with a non-zero bytes/t field.

The all-zero word is `trap`, 0x4000 is `nop` and 0x8000 is `st`.
`scry_decoder` and the assembler functions in `tb/scry_asm_pkg.sv` give the
exact bit positions of every field.

### ALU operations (func × mod)

| func | mod 000 | mod 111 | mod 001–110 (two outputs) | implicit immediate |
|------|---------|---------|---------------------------|--------------------|
| 000 | eq    | add.s (saturating) | add (carry in High)      | 0 / 1 / 1 |
| 001 | and   | sub.s (saturating) | sub (borrow in High)     | 1 / 1 / 1 |
| 010 | lt    | gt                 | shl (shifted-out bits)   | 0 / 0 / 1 |
| 011 | or    | xor                | shr (shifted-out bits)   | all ones / all ones / 1 |
| 100 | isnar | –                  | mul (upper half in High) | – / – / 8 |
| 101 | –     | –                  | div (remainder in High)  | – / – / 8 |
| 110, 111 | – | – | – | – |

For mul and div the implicit immediate is the pointer size in bytes (8 here),
so one-operand `mul` scales an index. For the two-output operations, `mod`
picks how Low (the main result) and High are delivered:

| mod | delivery |
|-----|----------|
| 1 | Low, then High, both to `ref` |
| 2 | High, then Low, both to `ref` |
| 3 | Low to `ref`, High to the next instruction |
| 4 | High to `ref`, Low to the next instruction |
| 5 | Low only |
| 6 | High only |

Comparisons and `isnar` return a `u8` 0 or 1. For the others, the result has
the first operand's type, and a second operand of another type is first
converted to it. Division rounds toward zero. The remainder takes the sign
of the dividend.

## 4. Data-flow instructions

These move operands without computing anything.

* **`echo =>a, =>b[, =>]`**: the first operand goes to `a` and the second to
  `b`. With the `s` bit set, the rest go to the next instruction; otherwise
  they are discarded.
* **`echo.l =>r`** (10-bit `r`): every operand goes to `r`. This is the only
  way to reach more than 32 instructions ahead.
* **`dup =>a, =>b[, =>]`**: each operand is copied to `a` and to `b`. With
  `s` set, a third copy goes to the next instruction.
* **`pick =>r`**: takes (condition, x, y) and forwards x if the condition is
  non-zero, y otherwise.
* **`pick.i =>r, Im`**: forwards operand number `Im` and discards the rest.
* **`nop`**: discards its operands.
* **`const t, imm8`**: sends a new operand of type `t` to the next
  instruction. For signed types, `imm8` is sign-extended.
* **`grow imm8`**: sends `(x << 8) | imm8` to the next instruction, keeping
  x's type. A chain of `const`/`grow` builds any constant.
* **`cast t, =>r`**: retags every operand to type `t` and re-canonicalises it.

## 5. Memory access

`ld t, =>r` and `st` form their address the same way (`scry_lsu`):

* The *base* is the first address operand.
  * Unsigned: an absolute address.
  * Signed: relative to the address of the `ld`/`st` itself.
* An optional *displacement* follows the base.
  * Signed: a byte offset.
  * Unsigned: an index, scaled by the access size.

`ld` reads the size given by its type argument. `st` takes (value, base[,
displacement]) and writes as many bytes as the value's own type. No store
type needs encoding. A memory error makes `ld` return a NaR and makes `st`
halt the core.

The data port is a simple request/response:

* `dmem_req`, `we`, `addr`, `size` and `wdata` are held stable until
  `dmem_rvalid`. An assertion checks this.
* Read data is right-aligned.
* `dmem_err` reports a fault.

## 6. Jumps and returns: triggers

`jmp imm7, trig` takes a condition operand. If the condition is non-zero,
the unit arms a transfer:

* trigger = `pc + 2 + 2·trig` (trig unsigned)
* target = `pc + 2 + 2·imm7` (imm7 signed)

Execution continues in order up to the trigger. When the trigger is reached,
fetch goes to the target, and the instruction at the trigger is skipped. The
instructions between `jmp` and its trigger act like delay slots. In
`strcpy`, the loop body keeps running while the loaded byte is checked.

`ret trig` works the same way, but with no target. At its trigger the
function ends. This core then halts with `HALT_RET`. The operands waiting
in the current slot are the return values, shown on `res_ops`/`res_count`.
Those operands are the ones sent to "the instruction after the function",
as the caller would receive them.

`scry_trigger_unit` holds one pending jump and one pending return. If both
fire at the same address, the return wins.

## 7. The core and its timing

`scry_core` runs each instruction through the same steps:

```
FETCH  present pc to instruction memory and the current slot to the window;
       a pending jmp/ret whose trigger equals pc fires here instead
LATCH  capture the instruction word, the slot's operands and count; clear the slot
EXEC   decode; build the list of (reference, operand) outputs,
       or start the ALU or load/store unit and WAIT for it
WRITE  write the outputs into their slots, one per cycle; advance pc and the count
```

Timing per instruction:

* An instruction takes 3 cycles plus one cycle per output operand.
* `ld` and `st` add the memory latency.
* `div` adds XLEN + 2 = 66 cycles. It uses a restoring divider that
  produces one bit per cycle.
* Every other ALU operation takes one cycle.

Nothing overlaps, so there are no hazards. This schedule is a choice for
clarity: the ISA specifies no timing.

Instruction memory is outside the core. `imem_rdata` must hold the word at
`imem_addr` one cycle after the address is presented. The data port is
described in section 5.

To run a function:

1. Hold `rst_n` low, then release it.
2. Inject the arguments with `inj_valid`/`inj_op`. They go to the first
   instruction's slot, in order.
3. Pulse `start` with `start_pc`.
4. Wait for `halted`.

`halt_cause` is one of:

| cause | meaning |
|-------|---------|
| `HALT_RET` | normal return |
| `HALT_TRAP` | `trap` instruction |
| `HALT_NAR_TRAP` | a NaR or a missing operand reached st, jmp or ret |
| `HALT_ILLEGAL` | unused encoding |
| `HALT_UNSUPPORTED` | see below |

The `ev` output pulses one bit per event:

* `retire`
* `opnd_drop`
* `implicit_imm`
* `two_output`
* `nar_made`
* `jmp_taken`, `jmp_skip`
* `long_echo`
* `pass_next`
* `pick`
* `load`, `store`

### Not implemented

* **Calls and stack frames.** `call`, `rsrv`, `free`, `ld.s`, `st.s` and
  `saddr` decode, but halt with `HALT_UNSUPPORTED`. The ISA leaves the
  semantics of calls and stack frames to a later definition, so any
  behaviour here would be invented.
* **Operand caches.** The operand caches that would hold in-flight operands
  across calls are not built.
* **`fence`.** It is accepted as a no-op, because this core finishes every
  memory access before the next instruction starts.

## 8. Where this design makes its own choices

The ISA description leaves the following open. Each choice made here is also
noted in the header of the file that implements it.

* **`func` field width.** One description gives the ALU a 4-bit function
  field. The encoding chart and the ALU table use 3 bits (bits 6:4), and
  24 variants need only 3 bits. This design uses 3 bits.
* **`jmp` polarity.** The jump is taken when its condition is non-zero,
  which is what the `strcpy` loop needs. A published `memcpy` listing
  contains `jmp lp_end, 0`, which only reads correctly with the opposite
  polarity. That listing is not used as a test.
* **Signed `trig` and `imm7`.** Only `imm7` (the jump target) is signed,
  and both offsets count 16-bit words from the next instruction.
* **Unspecified semantics.** The semantics of `pick`, `grow`, `cast` and
  `const`, and the High results of shifts, were chosen as described above.
* **Mixed-type ALU operands.** They are converted to the first operand's
  type.
* **Size.** XLEN = 64 and the pointer size is 8 bytes. The ISA is meant to
  be width-agnostic.

## 9. Files

| file | contents |
|------|----------|
| `rtl/scry_pkg.sv` | types, tags, opcodes, decoded-instruction struct, helpers |
| `rtl/scry_decoder.sv` | combinational decoder |
| `rtl/scry_alu.sv`, `rtl/scry_divider.sv` | ALU and its iterative divider |
| `rtl/scry_operand_window.sv` | operand slots |
| `rtl/scry_lsu.sv` | load/store unit |
| `rtl/scry_trigger_unit.sv` | pending jmp/ret |
| `rtl/scry_core.sv` | the processor (top) |
| `tb/scry_asm_pkg.sv` | assembler functions, one per instruction |
| `tb/scry_mem_model.sv` | behavioural byte memory with latency and faults |
| `tb/tb_*.sv` | self-checking testbenches |

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_scry_decoder` classifies all 65536 words against an independent table.
* `tb_scry_alu` compares every operation on every type against a 128-bit
  reference model.
* `tb_scry_core` runs at the default sizes. It covers:
  * the `isxdigit` listing, for all 256 characters;
  * the `strcpy` listing, on random strings;
  * one short program per mechanism;
  * 300 random straight-line programs, compared operand by operand with
    an instruction-level reference model.

  It counts each event and fails if any event never occurs.

### Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/scry_pkg.sv tb/scry_asm_pkg.sv tb/tb_scry_core.sv --top-module tb_scry_core
./obj_dir/Vtb_scry_core
```

Replace `tb_scry_core` with any other testbench name to run that one. To
write new programs, use the assembler functions, as the core testbench does:
`a_alu(func, mod, ref)`, `a_dup(r1, r2, s)`, `a_jmp(imm7, trig)`, and so on.
