# An IMPLY processing-in-array microcontroller in SystemVerilog

This core computes inside its memory. The data sits in memristive crossbar
arrays. Each array is 512 rows by 512 data columns, plus 8 spare "work"
columns per row. Every computation is a sequence of two primitive
stateful-logic operations applied to whole columns:

* **FALSE**: reset a memristor to 0.
* **IMPLY**: `q <= p -> q`. The target `q` becomes 1 wherever the condition
  `p` is 0.

All rows that are selected at the same time perform the same step in the same
clock cycle. One 32-bit addition therefore costs 640 steps, whether it runs on
one row or on 512 rows. This is the source of both the core's energy advantage
and its slowness.

There are no registers and no loads or stores. The instruction set keeps the
RV32I opcodes and field layout, but the `rs1`, `rs2` and `rd` fields no longer
name registers. They name slots of an **address bank**. Each slot holds a
32-bit **address configuration** that says where the operands live in the
array and on which rows the instruction runs. A small CMOS controller fetches
instructions from a 512-word program memory. It expands each instruction into
its FALSE/IMPLY sequence using a micro-operation table, and drives the row and
column decoders of the active array.

The RTL here models the whole microcontroller:

* controller;
* program counter;
* program memory;
* address bank;
* control/status bank;
* micro-operation table;
* IO register;
* decoders;
* a bit-accurate behavioural model of the crossbar arrays.

The temperature sensor and timer that feed the IO register are not part of the
design. They are driven from the testbench through top-level ports.

## 1. The crossbar and its three pulses

`crossbar_array` keeps one bit per memristor. Each row has 520 bits:

| Columns | Contents |
|---|---|
| 0..511 | 16 data words of 32 bits; bit *i* of word *w* is column `32*w + i` |
| 512..519 | work memristors `w0..w7` |

In every clock cycle the array applies one operation to all selected rows:

| op | effect on each selected row |
|---|---|
| `XB_RESET` | every column in `col_mask` becomes 0 |
| `XB_SET` | every column in `col_mask` becomes 1 |
| `XB_IMPLY` | if the single condition column (`cond_mask`) is 0, every column in `col_mask` becomes 1 |

RESET and SET on a word pattern are how immediate values are written: first
the zeros, then the ones. IMPLY together with FALSE is functionally complete,
and all arithmetic is built from it.

A combinational "sense amplifier" port reads one 32-bit word of one row. It is
used by:

* branches and `jalr`;
* `la`, which loads an address configuration from the array;
* `sio`, which copies an array word to the IO register.

An assertion checks that an IMPLY names exactly one condition column.

The model uses one flip-flop per memristor. The analog behaviour is abstracted
away, so device variability and pulse timing are not modelled. Rows that are
not selected, and arrays that are not active, keep their contents.

## 2. Address configurations: operands as places, not registers

Each address-bank slot holds:

```
 31    28 27    24 23        15 14         6 5      0
+--------+--------+------------+------------+--------+
| col A  | col B  | start row  |  num rows  | stride |
+--------+--------+------------+------------+--------+
```

* **Column A** and **Column B** are word numbers (0..15) within a row.
* A two-operand instruction reads A and B and usually overwrites B with the
  result. Shifts are the exception: they shift A in place, by the distance
  held in B.
* The selected rows are `start + k*(stride+1)` for every `k >= 0` with
  `k*(stride+1) <= num_rows`. Rows past 511 are dropped. So `num_rows = 0`
  means one row, and `stride = 3` means every fourth row.
* All selected rows compute in parallel, so one instruction processes a whole
  column of records.

Example: `[col A 11, col B 0, start 4, num 508, stride 3]` selects rows
4, 8, …, 508, and operates on word 11 of each.

Slots are written with these instructions:

| Instruction | Writes into the slot |
|---|---|
| `laui` | bits 31:12 |
| `lai` | bits 11:0 |
| `la` | a whole 32-bit word read from the array |

With `la`, a word in the array can act as a pointer. Pointers can even be
incremented by ordinary in-array `add`s. The address bank is memristive like
the array, so each of these writes is a SET cycle followed by a RESET cycle,
masked to the field being written.

## 3. How one instruction is executed

`control_logic` is a single state machine:

```
FETCH -> DECODE -> { WR0 (RESET) -> WR1 (SET) }     immediate / IO / link write
                  { RDA [-> RDB] }                  sense-amplifier reads
                  { SEQ ... }                       FALSE/IMPLY algorithm
                  { AB0 (SET) -> AB1 (RESET) }      address-bank write
                  { WFI } { JUMP } { BR }
               -> NEXT (PC + 4)  or  JUMP (PC <- target)
```

### 3.1 Per-bit algorithms and role binding

The micro-operation table (`uop_cache`) holds one short program per per-bit
algorithm. Each entry is either a FALSE on up to three memristors, or an IMPLY.
The entries name **roles**, not columns:

* `a`, `b`: operand bits;
* `c`: carry or borrow;
* `s`: multiplexer select;
* `x`: second multiplexer input;
* `w1..w3`: work memristors.

| algorithm | function | steps |
|---|---|---|
| AND | b = a & b | 5 |
| OR | b = a \| b | 3 |
| XOR | b = a ^ b | 9 |
| COPY | b = a | 3 |
| full adder | b = a^b^c, c = carry | 20 |
| full subtractor | b = a−b−c, c = borrow | 20 |
| MUX | a = s ? x : a | 8 |
| AUX | a = ~s & a | 6 |
| CMP | w1 = (a == b), b = ~a & b | 13 |

For each bit the controller binds the roles to physical columns and replays
the algorithm. Each bit has its own columns: `32*colA + i` for `a`,
`32*colB + i` for `b`, and fixed work columns. Work memristor `w3` holds the
carry/borrow between bits. It is cleared in the first step of bit 0, together
with the other work memristors of that step.

### 3.2 Instruction families

* **Bitwise, add, sub and `mv`**: bit 0 up to bit 31, one algorithm per bit.
* **Shifts** are a logarithmic barrel shifter built in the array:
  * 5 stages *j*, each selected by bit *j* of the distance held in B.
  * In stage *j*, bit *i* takes `mux(d_j, bit i∓2^j, bit i)`.
  * Bits with no source take `~d_j & bit i` (the AUX algorithm), which shifts
    in zeros.
  * Right shifts walk *i* upwards and left shifts walk downwards, so every
    source is read before it is overwritten.
  * `sra` leaves the sign bit in place and muxes it in as the fill value. It
    therefore skips one bit per stage.
* **sltu** compares from the MSB downwards:
  * The comparator runs on bit 31. It leaves "equal so far" (E) in a work
    memristor and "A below B" (L) in `b31`.
  * For every lower bit *i*:
    1. the comparator runs on bit *i*;
    2. `L_i &= E`;
    3. `b_i |= b_{i+1}`;
    4. `E &= eq_i`.
  * The accumulating E alternates between `w0` and `w3`, so the previous value
    is never overwritten while it is still read.
  * A final RESET clears `b[31:1]`, leaving the 0/1 result in bit 0.
* **slt** runs the same chain on bits 30..0. It then runs the comparator on
  the sign bits and folds that result into bit 0 with one OR, one AND and one
  IMPLY. A and B having different signs decides the result directly; equal
  signs leave the unsigned result of the lower bits.

### 3.3 Step counts at n = 32

The testbenches check these counts exactly:

| instruction | steps | formula |
|---|---|---|
| and | 160 | 5n |
| or | 96 | 3n |
| xor | 288 | 9n |
| add, sub | 640 | 20n |
| sll, srl | 1218 | 8n·log n − 2n + 2 |
| sra | 1240 | 8(n−1)·log n |
| sltu | 820 | 26n − 12 |
| slt | 816 | 26n − 16 |
| mv | 96 | 3n |
| immediate forms, auipc | register form + 2 | |
| li, lui, la, lai, laui, lio, jal, jalr | 2 | |
| branches, sio, wfi, mret | 0 crossbar steps | |

How to read the table:

* An immediate instruction first writes its immediate into the array, which
  takes 2 steps (RESET, SET).
  * `addi`, `andi`, `ori`, `xori` write it into A. The result lands in B as
    usual: `B = imm op B`.
  * `slti` and `sltiu` write it into B, so that the result keeps the RV32I
    meaning `A < imm`.
  * Shift immediates write the whole 12-bit immediate field into B as the
    distance. The result is A shifted in place.
  * `auipc` writes `imm<<12` into A and the PC into B in the same two steps,
    then adds. B ends up holding `PC + (imm<<12)`.
* Every instruction also spends one fetch cycle, one decode cycle and one cycle
  to advance the PC. Branches and `jalr` spend one cycle per sense-amplifier
  read.
* The `xb_step` output pulses in every cycle that applies a crossbar or
  address-bank pulse. This makes the step count of any instruction
  observable.

## 4. Writes, reads and control flow

| instruction | action |
|---|---|
| `li` | write imm[11:0] into bits 11:0 of word A on all selected rows |
| `lui` | write imm[31:12] into bits 31:12 |
| `lio` | write the IO register into word A of all selected rows |
| `sio` | read word A of the start row into the IO register |
| `la rd, rs1` | read word A of the start row of rs1's configuration into slot rd |
| branches | read word A at the start rows of rs1 and rs2; compare in the CMOS branch unit; PC-relative target |
| `jal rd` | write PC+4 into word A at rd's start row, then jump PC-relative |
| `jalr rd, rs1, imm` | read the base from the array at rs1, write PC+4 at rd, jump to base+imm |

`li` and `lui` split a 32-bit constant into two independent writes, so
`lui` followed by `li` loads any value. Branches compare the values held in
the array, not register contents.

## 5. Interrupts, sleep and array switching

* **IO and interrupts.** A peripheral writes the IO register through
  `periph_we`, which raises the interrupt flag. Before each fetch, if the flag
  is set and `mstatus.MIE` is 1, the controller takes the trap:
  * `mepc <- PC` and `mcause <- 0x8000000B`;
  * `MPIE <- MIE` and `MIE <- 0`;
  * `PC <- mtvec`.

  `mret` restores MIE and returns to `mepc`.
* **Sleep.** `wfi` puts the controller to sleep (`sleeping` = 1) until the
  flag is set, then continues with the next instruction. The pending interrupt
  is taken at that fetch. A program that ends in `wfi` with MIE clear sleeps
  for good.
* **Exceptions.** `ebreak` and unknown encodings trap with mcause 3 and 2.
* **Control/status bank.** It has 32 entries: 0 mstatus, 1 mtvec, 2 mepc,
  3 mcause. `mtvec` and `mstatus` are set through the programming port. There
  are no CSR instructions.
* **Array switching.** There are `N_ARRAYS` arrays (default 2). All of them
  share the decoders, and only the array named by the array-ID register is
  enabled. The ID increments, wrapping after the last array:
  * after `INSN_THRESHOLD` executed instructions (default 2^20), so that a
    program that runs forever moves on to a fresh array when one is full;
  * or on `nxt_array`, which also restarts the program at address 0.

## 6. Encodings of the instructions RV32I does not have

| instruction | opcode | format | funct3 | fields |
|---|---|---|---|---|
| `li` | 0001011 (custom-0) | I | 000 | rs1 = slot, imm[11:0] |
| `mv` | 0001011 | I | 001 | rs1 = slot (A → B) |
| `la` | 0001011 | I | 010 | rd = destination slot, rs1 = pointer slot |
| `lai` | 0001011 | I | 011 | rd = slot, imm[11:0] |
| `laui` | 0101011 (custom-1) | U | — | rd = slot, imm[31:12] |
| `lio` | 1011011 (custom-2) | R | 000 | rs1 = slot |
| `sio` | 1011011 | R | 001 | rs1 = slot |
| `nxt_array` | 1011011 | R | 010 | — |

Further encoding rules:

* The in-array instructions that RV32I does have (`lui`, `auipc`) take their
  slot from bits 11:7.
* The ALU instructions take their slot from `rs1`.
* `tb/pia_asm_pkg.sv` has one encoder function per instruction.

## 7. Where this design departs from, or goes beyond, the ISA description

The ISA description is not fully consistent. These choices were made:

* **Stride.** The text says a stride code of 2 addresses "every fifth row".
  The worked example uses stride 3 for every fourth row. The example is
  followed: the interval is `stride + 1`.
* **Immediate placement.** One passage places the immediate of `addi` and the
  bitwise immediates in Column A, another in Column B. Column A is used, and
  B keeps the usual destination role. The column for `slti`/`sltiu` and for
  shift immediates is not specified (see section 3.3).
* **sra cost.** The `sra` routine updates 31 bits per stage, giving
  8(n−1)·log n = 1240 steps. The summary table quotes 8n·log n. The routine
  is followed.
* **slti/sltiu cost.** The table's formulas for `slti`/`sltiu` do not match
  "register form + 2". This design spends register form + 2.
* **PC timing.** The PC advances once per instruction, after all of its
  steps.
* **Array switching.** The threshold value, the wrap-around after the last
  array, and the restart at 0 on `nxt_array` are this design's choices.
* **Encodings.** Custom opcodes (section 6); CSR numbering; the traps for
  `ebreak` and illegal instructions.
* **Programming port.** The programming port on the top (program memory and
  CSRs, used while in reset) is an addition. The description does not say
  how the program gets in.
* **Work columns.** Which work memristor holds the carry, and the alternating
  work memristors in the comparator chain, are this design's assignments.

## 8. Module map

| file | role | timing |
|---|---|---|
| `rtl/pia_pkg.sv` | geometry, address-configuration struct, op/role/kernel enums, opcodes | — |
| `rtl/pia_top.sv` | top level: wires everything, `N_ARRAYS` crossbars in a generate loop | — |
| `rtl/control_logic.sv` | the state machine of section 3, role binding, array-ID register | 1 step per clock |
| `rtl/uop_cache.sv` | per-bit algorithm table | combinational |
| `rtl/crossbar_array.sv` | behavioural crossbar model | op applied at the clock edge; combinational read |
| `rtl/row_decoder.sv` | start/num/stride to row enables | combinational |
| `rtl/column_decoder.sv` | up to 4 single columns plus 2 word patterns to a column mask (two copies: drive columns and the IMPLY condition column) | combinational |
| `rtl/address_bank.sv` | 32 × 32-bit slots, 3 read ports, masked SET/RESET write | write at the clock edge |
| `rtl/csr_bank.sv` | control/status bank with trap/mret updates | clock edge |
| `rtl/program_memory.sv` | 512 × 32 instruction store with a programming port | combinational read |
| `rtl/program_counter.sv` | asynchronous reset to 0, load or +4 | clock edge |
| `rtl/branch_unit.sv` | RV32I branch comparator | combinational |
| `rtl/io_register.sv` | IO register and interrupt flag | clock edge |

Top-level ports of `pia_top`:

* **Inputs:**
  * `clk`, `rst_n` (asynchronous, active low);
  * `prog_pm_we/addr/wdata` and `prog_csr_we/addr/wdata` (loading);
  * `periph_we/periph_wdata` (sensor).
* **Outputs:**
  * `io_value`;
  * `mcause`, `pc`, `insn`, `array_id`;
  * the strobes `xb_step`, `insn_done`, `trap_taken`, `sleeping`,
    `array_switch`.

Synthesis note: the crossbar model contains 2 × 512 × 520 flip-flops, each
with a per-row parallel update. A generic synthesis flow takes a long time on
it. The model stands in for an analog macro and is not meant to become gates.

## 9. Verification

Each module has a self-checking testbench in `tb/`. Every testbench:

* ends with a line `TB_RESULT checks=N failures=M`;
* has a watchdog.

To run one with plain verilator, name the two packages and the testbench, and
let verilator find the modules by name in `rtl/` and `tb/`:

```
verilator --binary --top-module tb_pia_top -y rtl -y tb \
    rtl/pia_pkg.sv tb/pia_asm_pkg.sv tb/tb_pia_top.sv
./obj_dir/Vtb_pia_top
```

### Unit testbenches

* `tb_uop_cache` executes every algorithm on every input combination, on a
  one-row model. It checks the function and the step count.
* `tb_crossbar_array` runs random pulses on a 16-row array against a
  reference model.
* `tb_row_decoder`, `tb_column_decoder` and `tb_branch_unit` compare against
  reference loops.
* `tb_address_bank`, `tb_csr_bank`, `tb_program_memory`, `tb_io_register` and
  `tb_program_counter` check random sequences and one-edge latencies.
* `tb_control_logic` runs the controller against simple models of its
  neighbours. It checks the crossbar commands of `li`, the step counts of
  `and`/`add`/`sll`, both branch outcomes, `lai`/`laui`, the
  illegal-instruction trap, `nxt_array`, `wfi`, and interrupt entry.

### End-to-end: `tb_pia_top`

This testbench (threshold overridden to 200) runs small programs and checks
the array contents directly. It covers:

* every ALU instruction and its immediate form, plus `mv`, `li`/`lui` and
  `auipc`, twice each with random operands;
* four rows at once with a random start row and stride, with a skipped row
  checked to be untouched;
* exact step counts for every instruction;
* all six branch conditions, both ways;
* `jal`, `jalr`, `la`/`lai`/`laui`;
* a pointer kept in the array, advanced by an in-array `add`, loaded with `la`
  and then used as an address configuration;
* an interrupt that wakes `wfi`, with `lio` into strided rows, `sio`, `mret`
  and mcause;
* `ebreak` and illegal traps;
* both array-switch mechanisms.

It counts each mechanism and fails if one never occurs.

### Full size: `tb_pia_full`

This testbench uses the default parameters: two 512-row arrays and a 512-word
program. It runs a day of the temperature-node workload:

1. 32 interrupt-driven samples are stored with `lio` into four period rows.
2. In parallel over the four rows:
   * the samples above a per-row threshold are counted (`mv`, `slt`, `add`);
   * the average is computed (8 × `add`, `srai 3`).
3. A flag per period is computed with `slt`.
4. Branches count the periods above threshold, and `sio` reports the result.

It checks every stored sample, count, average and flag, and the total of
20 728 steps against the sum of the per-instruction counts. The program uses
277 of the 512 program words.

The workload is a condensed form of the published sensor-node program, not
that program instruction for instruction. The published program keeps its
pointers (sample, period, day) as address configurations in the array. It
advances them with in-array `add`s and loads them with `la`. Its column
fields are patched with `and`/`or` masks, and every sample is counted with
`mv`, `slt` and `add` as here. `tb_pia_top` checks those mechanisms (`la`,
in-array arithmetic on stored configurations, strided `lio`) separately.

### Not covered

* Electrical behaviour: pulse amplitudes, energy, device state drift.
* A full-length run through 2^20 instructions to the default threshold. The
  threshold mechanism is tested at 200.
