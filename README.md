# ART-9: a 9-trit balanced-ternary RISC core in SystemVerilog

ART-9 is a small RISC processor that computes in balanced ternary instead of
binary. Each digit (a *trit*) is -1, 0 or +1, and both data words and
instructions are 9 trits long. A 9-trit word covers the 19,683 values from
-9,841 to +9,841. There is no sign bit, because negation just flips every
trit. The core has 24 instructions, nine general-purpose registers, separate
instruction and data memories, and a classic five-stage pipeline. Its hazard
handling is arranged so that only two situations cost a cycle: a load whose
result is needed by the next instruction, and a taken branch or jump.

This RTL runs the ternary machine on ordinary binary logic. Every trit is
carried on two wires, and every ternary operator is written as logic on those
pairs. The result can be simulated with Verilator and synthesized like any
other binary design. It is the same "binary-encoded ternary" approach that is
used to prototype ternary cores on FPGAs before ternary devices (for example
carbon-nanotube transistors with three stable levels) are available.

## Trits on two wires

| trit | bits `[1:0]` |
|------|--------------|
| 0    | `00`         |
| +1   | `01`         |
| -1   | `10`         |

The code `11` is never produced, and any logic that reads it treats it as 0.
The package `art9_pkg` defines `trit_t` (2 bits) and `tword_t` (9 trits, 18
bits, trit 0 least significant).

Words have two readings:

* **Signed (balanced):** value = sum of t_i * 3^i. All arithmetic uses this
  reading, and results wrap modulo 3^9.
* **Unsigned:** each trit is read as the digit t_i + 1, which amounts to
  signed value + 9,841. This reading names memory words: the word whose trits
  are all -1 is address 0, and the all-+1 word is address 19,682. A 2-trit
  register field works the same way, so T0 is (-1,-1) and T8 is (+1,+1).

The trit-wise operators follow the usual balanced-ternary truth tables:

* AND is the minimum of the two trits.
* OR is the maximum.
* XOR is the negated product.
* STI (standard inverter) negates the trit.
* NTI (negative inverter) gives +1 only for -1, and -1 otherwise.
* PTI (positive inverter) gives -1 only for +1, and +1 otherwise.

## Instruction set

All instructions use two addresses: the result overwrites `TRF[Ta]`. The
one-operand functions MV, PTI, NTI and STI read their operand from `Tb`.

| class | instructions | operation |
|-------|--------------|-----------|
| R | MV PTI NTI STI AND OR XOR ADD SUB SR SL COMP | `Ta = Ta op Tb` (or `op(Tb)`) |
| I | ADDI ANDI (3-trit imm), SRI SLI (2-trit imm), LUI (4-trit imm), LI (5-trit imm) | `Ta = Ta op imm` |
| B | BEQ BNE (1-trit B, 4-trit offset), JAL (5-trit offset), JALR (3-trit offset) | PC-relative or register-based |
| M | LOAD STORE (3-trit offset) | `TDM[TRF[Tb] + imm]` |

More detail on the less usual instructions:

* **COMP.** Compares `Ta` with `Tb`. The least significant trit of the result
  is +1, 0 or -1 for greater, equal or less. The other eight trits are
  cleared.
* **BEQ / BNE.** Compare trit 0 of the named register with the instruction's
  B trit. The intended idiom is a COMP followed by a branch on its result.
* **Shifts.** SL, SR, SLI and SRI use the signed value k of a 2-trit amount
  (-4..+4). SL moves the trits up by k places (times 3^k) and SR moves them down by k
  places, dropping the low trits (division by 3^k, rounded to nearest). Vacated trits are
  filled with 0, and a negative k shifts the other way.
* **LUI.** Sets trits 8:5 to the immediate and clears trits 4:0.
* **LI.** Replaces trits 4:0 and keeps trits 8:5. So `LUI` followed by `LI`
  builds any 9-trit constant.
* **JAL / JALR.** Write PC+1 (the address after the jump) to `Ta`.
* **NOP.** There is no NOP opcode. The NOP is `ADDI` with a zero immediate.

The instruction encoding is this design's own; it is documented at the top of
`rtl/art9_pkg.sv`. In short:

* trits 1:0 hold the opcode, trits 3:2 hold Ta, and trits 5:4 hold Tb;
* trits 8:6 hold the R-type function or a 3-trit immediate;
* the I-type instructions use trit 4 as a sub-opcode. When trit 4 is 0 the
  instruction is LUI, and trits 8:5 are its immediate;
* BEQ and BNE keep their register in trits 3:2, B in trit 4, and the offset in
  trits 8:5.

Branch offsets are added to the address of the branch itself. The testbench
package `tb/art9_asm_pkg.sv` contains an assembler (one function per
instruction format) that produces these encodings.

## Pipeline

```
 IF            ID                                EX             MEM            WB
 PC gen ──► TIM ──► NOP mux ─► decoder ─► ID/EX ─► fwd muxes ─► TALU ─► TDM ─► wb mux ─► TRF
   ▲  (sync read)     TRF read (async)          (4:1 each)       │  (sync)   (load/ALU)
   │                  HDU                                         └► EX/MEM
   └────────────────  branch unit (target + condition)
```

* **IF.** `pc_gen` holds the PC. The PC addresses the synchronous
  instruction memory (TIM), whose output is registered, so that output acts as
  the IF/ID register.
* **ID.** A multiplexer replaces the fetched word with NOP in the cycle after
  a taken branch. `decoder` splits the instruction into fields and controls,
  and the register file `trf` is read asynchronously. `hdu` decides forwarding
  and stalls, and `branch_unit` computes the branch target and checks the
  condition.
* **EX.** Two forwarding multiplexers feed the ALU `talu`. For loads and
  stores the ALU computes the memory address.
* **MEM.** The synchronous data memory (TDM) captures the address and the
  store data at the end of EX, so read data appears during MEM. A multiplexer
  then picks the loaded word or the registered ALU result.
* **WB.** The register file is written at the clock edge.

Both memories are `tmem` instances: single-port, synchronous, read-first,
with an enable that holds the output.

### Hazards: what costs a cycle and what does not

This is the part of the design that needs the most care. The core sustains
one instruction per cycle except in two cases.

**Taken branch or jump: 1 bubble.** Branches and jumps are resolved in ID.
At the end of that cycle the PC is loaded with the target. By then the TIM has
already fetched the word after the branch. A register (`squash_q`) remembers
that a branch was taken, and in the next cycle the NOP multiplexer feeds NOP
to the decoder in place of that word. Not-taken branches cost nothing.

**Load followed by a user of the loaded register: 1 bubble.** The loaded
word appears during the load's MEM stage, which is too late for an
instruction that is then in EX. The `hdu` spots the case while the user is
still in ID:

* it raises `stall`;
* the PC and the TIM output are held, and so is the PC of the ID
  instruction;
* a bubble is written into ID/EX: the instruction is kept, but its write,
  load and store enables are cleared.

One cycle later, the same instruction is decoded again and takes the load
data by forwarding.

**Every other dependence is forwarded.** The `hdu` compares the two source
indices of the ID instruction with the destinations in EX, MEM and WB, and
the nearest writer wins. The chosen source is registered with the
instruction and selects an ALU input in EX:

| select | the producer was, when the consumer was in ID | value used in EX |
|--------|-----------------------------------------------|------------------|
| `FWD_M` | in EX | write-back value of the MEM stage (ALU result or load data) |
| `FWD_W` | in MEM | MEM/WB register |
| `FWD_H` | in WB | one-entry register holding the last value written back |
| `FWD_RF` | none | value read from the register file in ID |

The `FWD_H` case arises because the register file is read in ID, while a
write in the same cycle only lands at the edge. The consumer therefore read
the stale value, and the hold register supplies the new one a cycle later.

Branch conditions and the JALR base are needed in ID itself, so they get
their own forwarding path. It takes the current EX result, the MEM-stage
write-back value, or the MEM/WB register. This never adds a stall, except
that a branch on the result of a load in EX is covered by the load-use stall.

With these rules, the number of cycles from reset until the instruction at
position n reaches ID is exactly:

```
1 + (instructions executed before it) + (load-use stalls) + (taken branches)
```

The end-to-end testbench checks this for every program it runs.

## Units

| file | unit |
|------|------|
| `rtl/art9_pkg.sv` | types, opcodes, trit operators, encoding table |
| `rtl/tadder.sv` | N-trit ripple-carry balanced-ternary adder (ternary full adder per trit) |
| `rtl/talu.sv` | ALU: logic functions, inverters, adder with a negating inverter on operand b for SUB, shifter, comparator, LI merge |
| `rtl/trf.sv` | 9 x 9-trit register file: 2 asynchronous reads, 1 synchronous write, reset to 0 |
| `rtl/tmem.sv` | synchronous single-port memory, used for both TIM and TDM |
| `rtl/pc_gen.sv` | PC register with +1 adder, branch-target load and hold |
| `rtl/branch_unit.sv` | branch-target adder and BEQ/BNE condition checker |
| `rtl/decoder.sv` | main decoder |
| `rtl/hdu.sv` | forwarding selects and load-use stall |
| `rtl/art9_core.sv` | top: the five-stage core |

### Top-level interface (`art9_core`)

| port | meaning |
|------|---------|
| `clk`, `rst_n` | clock, asynchronous active-low reset |
| `prog_we`, `prog_addr`, `prog_wdata` | write port into the TIM. Use it while `rst_n` is low |
| `ext_en`, `ext_we`, `ext_addr`, `ext_wdata`, `ext_rdata` | access port to the TDM. Use it while the core is in reset; `ext_rdata` is valid one cycle after the address |
| `ev` | per-cycle events: load-use stall, taken branch, EX and ID forwarding, register write |
| `dbg_id_pc` | address of the instruction now in ID |

Addresses on the ports are 9-trit words and use the unsigned reading.
After reset the PC is the all-(-1) word, unsigned address 0. The first cycle
after reset decodes a NOP.

The parameters `TIM_DEPTH` and `TDM_DEPTH` both default to 19,683 words, which
is the full 9-trit address range. A smaller depth wraps the address modulo the
depth.

## Departures from the original description and choices made here

The published description of the core gives its units, their placement and
the instruction semantics, but not bit-level detail. The following points are
choices made in this implementation, or places where it differs:

* **Instruction encoding.** The opcode values, the field positions and the
  BEQ/BNE layout are this design's own. So is the convention that branch
  offsets are relative to the branch itself.
* **SUB and the inverter.** The ALU block diagram places an inverter on the
  first operand, but the instruction table defines SUB as `Ta - Tb`. This
  design follows the table and negates operand b.
* **Branch-operand forwarding.** The original forwards a single trit (the one
  tested by BEQ/BNE) into ID. Here the whole 9-trit word is forwarded,
  because JALR needs its base register in ID as well.
* **Load-use handling.** The original says only that the decoder creates a
  stall signal that selects NOP in the next ID. Here the load-use case holds
  the front end and sends a bubble to EX. Taken branches use the NOP
  selection.
* **Last-write-back register.** The third EX forwarding source, a register
  that keeps the value just written back, is an addition. It is needed
  because this register file does not pass a same-cycle write through to its
  reads.
* **Memory size.** The memories span the whole 9-trit address range, 19,683
  words each, which is 354,294 bits per memory in this two-bit encoding. The
  published FPGA prototype reports only 9,216 bits of RAM in total, so it
  must have used much smaller memories. Their sizes are not given, and the
  depth parameters let you shrink the memories.
* **COMP, LUI, LI, immediates.**
  * COMP clears the upper eight trits of its result.
  * LUI clears the low five trits.
  * Immediates are extended with zeros, which in balanced ternary preserves
    the sign.
* **NOP and reserved encodings.** A NOP decodes to "no write, no register
  read". Unused encodings also act as NOP.
* **Peripherals.** There is no I/O, interrupt or exception logic, because
  none is described. The program and data load ports exist only so the core
  can be used and tested.
* **Not built.** The transistor-level ternary gates and ternary memory
  cells, and the software toolchain (compiler, instruction-level simulator,
  gate-level cost estimator), are outside this RTL.

## Program sizes

The benchmark programs published for this ISA are bubble sort, GEMM, a Sobel
filter and Dhrystone. Their code sizes are about 0.7K, 1.8K, 3.1K and 11.6K
trits, which is about 78, 200, 344 and 1,290 instruction words. Even the
largest uses under 7% of the default instruction memory. The data footprint of
these programs is not known. The program texts themselves are not available,
so their published cycle counts cannot be reproduced here. The testbenches
below run a bubble sort, a matrix product and a Sobel filter written for
this encoding instead, at small sizes.

## Verification

Each unit has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` at the end and stops itself with a watchdog.
The expected values never come from the RTL's own functions:

* `tb/art9_asm_pkg.sv` has its own integer implementation of the trit
  tables, the arithmetic and a complete instruction-level reference model of
  the ISA.
* `tb_tadder`, `tb_talu`: random and corner operands against integer
  arithmetic and the truth tables.
* `tb_trf`, `tb_tmem`, `tb_pc_gen`: read/write, hold and reset behaviour,
  cycle by cycle.
* `tb_branch_unit`, `tb_decoder`, `tb_hdu`: every instruction format and
  every producer/consumer distance.
* `tb_art9_core`: runs at the default memory sizes. It runs one directed
  program and 40 random programs of 60 instructions. Each program ends in a
  jump-to-self.
  * Checks: all nine registers, every data word the reference touched, and
    the exact cycle at which the halt reaches ID.
  * The run fails unless each mechanism happens at least once: load-use
    stall, taken branch, not-taken branch, each of the three EX forwarding
    sources, and each of the three ID forwarding sources.
* `tb_art9_bubble`: a 22-instruction bubble sort runs on the full core. It
  sorts a random array of 16 words, a reversed array of 16 words and an array
  of 32 words with many duplicates.
  * The result is compared with the testbench's own sort and with the
    reference model.
  * The cycle count is checked with the formula above. For example, the
    random 16-word array takes 1,602 cycles: 1,431 instructions plus 170
    taken-branch bubbles.
* `tb_art9_kernels`: two more kernels, generated as straight-line code by
  the assembler, run on the full core.
  * A 4 x 4 matrix product. ART-9 has no multiplier, so each product calls a
    trit-serial multiply subroutine through JALR. The subroutine adds or
    subtracts the multiplicand according to the multiplier's lowest trit
    (BEQ/BNE), then shifts the multiplicand up and the multiplier down.
    This run has 449 program words and takes 2,230 cycles.
  * A Sobel filter on an 8 x 8 image, computing |Gx| + |Gy|. It has 1,371
    program words and takes 1,659 cycles, 288 of them load-use bubbles.
  * Results are checked against integer arithmetic and the reference model,
    and the cycle count against the formula above.

To simulate one testbench with Verilator 5 (from the directory holding `rtl/`
and `tb/`):

```
verilator --binary --timing -Wno-fatal --top-module tb_art9_core \
    -y rtl -y tb +libext+.sv rtl/art9_pkg.sv tb/art9_asm_pkg.sv tb/tb_art9_core.sv
./obj_dir/Vtb_art9_core
```

Unit testbenches that do not use the assembler can leave out
`tb/art9_asm_pkg.sv`; listing it does no harm. The RTL has no delays and uses
no simulator-specific code. Simulation is two-state, so every register that
is read is reset.
