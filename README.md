# A single-cycle RV32I core with a decimal display

This is a small 32-bit RISC-V processor that executes 37 instructions of the RV32I base
set: all of them except ECALL, EBREAK and FENCE. It was first drawn as a Logisim
schematic for teaching. The RTL keeps that schematic's partitioning and its two
unusual ideas:

* **One wire per instruction.** The decoder does not produce ALU opcodes or mux
  selects. It produces 37 *instruction lines*, at most one of them high, one for each
  instruction (`ADD`, `SUB`, …, `LHU`). The ALU has a separate small unit for every
  computational instruction. All the units run in parallel, and the high instruction
  line picks which unit drives the result.
* **A control ROM per instruction class.** The global enables (register write, memory
  write, PC jump, and so on) come from a 32-word × 10-bit ROM addressed by opcode bits
  [6:2]. They do not come from the instruction lines.

Every instruction finishes in one clock cycle. Results that write a register are also
latched into a display register. That register is shown in decimal on ten
seven-segment digits, using a shift-and-add-3 ("double dabble") converter.

## Block map

```
           +-----------------+   pc    +------+  instr  +---------------+ inst[36:0] +---------------+
  run ---->| program_counter |-------->| imem |-------->| decode_logic1 |----------->| decode_logic2 |
           |  (8-bit, +4)    |         | 64 w |         | (one-hot)     |            | fmt, rd, rs1, |
           +-----------------+         +------+         +---------------+            | rs2, imm, op  |
              ^ dest   ^ write_en           ^ load port          |                   +---------------+
              |        |                    |                    | inst                 |opcode  |fields
              |  +-------------------+      |                    v                      v        v
              +--| control_flow_unit |<-----+---------------+  alu  <----+      control_logic   register_file
                 |  take, target     |<-- pc+imm, rs1+imm --|           |      (10-bit ROM)    (32 x 32, 2R1W)
                 +-------------------+                      +-----------+           |              |
                                                             | result  | rs1+imm    | enables      | rs1, rs2
                                                             v         v            v              |
                                                     write-back mux <-- dmem (256 B) <-------------+
                                                        |    (ALU / load data / PC+4)
                                                        +--> register_file (rd), output_unit (10 digits)
```

| Module | Role |
|---|---|
| `rv32i_cpu` | Top level. Wires the blocks below into the single-cycle data path. |
| `program_counter` | 8-bit PC. Each step it goes to PC+4 or to a jump/branch destination. |
| `imem` | 64 × 32-bit instruction memory, read by the PC, with a port for loading programs. |
| `decode_logic1` | Instruction word → 37 one-hot instruction lines. |
| `decode_logic2` | Instruction lines → format (R/I/S/SB/U/UJ), register fields and sign-extended immediate. |
| `control_logic` | Control ROM: opcode[6:2] → 10 enables. |
| `register_file` | 32 × 32-bit registers (one `register` block each, 1 kbit in all) with two read ports and one write port. x0 is always 0. |
| `alu` | One unit per computational instruction, selected one-hot. Also gives rs1+imm and pc+imm. |
| `control_flow_unit` | Branch comparisons, the take decision and the next-PC target. |
| `dmem` | 256-byte data memory: byte/halfword/word stores, sign- or zero-extending loads, and a word port for loading initial data. |
| `output_unit` | Display register, `double_dabble` converter and ten `seven_seg_encoder`s. |
| `register`, `d_flip_flop` | Register made of one flip-flop cell per bit. Used for the PC, the register file and the display register. |
| `cla_adder`, `half_adder`, `full_adder`, `add3`, `mux` | Adder and selector building blocks. |
| `rv32_pkg` | Shared types: instruction-line enum, formats, control word, control ROM contents. |

## The instruction lines

`rv32_pkg::instr_e` gives the position of each line in the 37-bit vector `inst`:

```
 0 ADD    1 SUB    2 SLL    3 SLT    4 SLTU   5 XOR    6 SRL    7 SRA
 8 OR     9 AND   10 ADDI  11 JALR  12 SLTI  13 SLTIU 14 XORI  15 ORI
16 ANDI  17 SLLI  18 SRLI  19 SRAI  20 SB    21 SH    22 SW    23 LUI
24 AUIPC 25 JAL   26 BEQ   27 BNE   28 BLT   29 BGE   30 BLTU  31 BGEU
32 LB    33 LH    34 LW    35 LBU   36 LHU
```

`decode_logic1` raises a line when the opcode, funct3 and funct7 bit 5 match that
instruction. The other funct7 bits are not compared, as in the original decode table.
So, for example, `0x4000_7033` (AND with bit 30 set) raises nothing, while a word with a
nonzero funct7 other than bit 30 decodes as the plain instruction. Any other word
raises no line. This includes ECALL, FENCE, words whose low two bits are not `11`, and
the all-zero contents of an empty memory.

The rest of the core uses the lines directly:

* `decode_logic2` ORs them into a format. The format decides which of rd, rs1 and rs2
  are passed on (a field the format lacks reads 0) and how the immediate is assembled.
* `alu` ANDs each unit's 32-bit result with its line and ORs everything together.
  This is the synthesizable form of the original's shared bus driven by enabled
  buffers.
* The write-back mux, the load size and signedness, and the branch condition are all
  simple ORs of lines.

An assertion in `rv32i_cpu` checks that at most one line is ever high.

## The control word

`control_logic` reads `CTRL_ROM[opcode[6:2]]` when `opcode[1:0] == 2'b11`; otherwise
the word is 0. Bit 9 is the first field of `ctrl_t`:

| bit | field | effect in this RTL |
|---|---|---|
| 9 | `clk_en` | Together with the `run` input, allows any state to change. 0 = the core stops. |
| 8 | `mem_rd` | DMEM read enable. Load data read 0 without it. |
| 7 | `mem_wr` | DMEM write enable. |
| 6 | `reg_rd` | Register-file read enable. rs1/rs2 read 0 without it. |
| 5 | `reg_wr` | Register-file write enable for rd. |
| 4 | `alu_en` | ALU output enable. The result reads 0 without it. |
| 3 | `out_en` | Display register loads the write-back value. |
| 2 | `cnt_en` | PC count enable. |
| 1 | `cnt_out_en` | PC read enable. Gates the PC value the ALU sees. |
| 0 | `jump` | PC write enable. The control-flow target is taken only if this is set. |

ROM contents, in hex (all other words are `000`):

| opcode[6:2] | class | word | notes |
|---|---|---|---|
| 00000 | LOAD (I) | `37e` | The original table has `27e`; memory read enable is added so loads work. |
| 00100 | OP-IMM (I) | `27e` | |
| 00101 | AUIPC (U) | `337` | |
| 01000 | STORE (S) | `2d6` | |
| 01011 | R | `27e` | From the original table. No instruction line matches this opcode (see below). |
| 01100 | OP (R) | `27e` | |
| 01101 | LUI (U) | `337` | Missing from the original table. Given the U-row word. |
| 10100 | R | `27e` | From the original table. No instruction line matches. |
| 11000 | BRANCH (B) | `257` | |
| 11001 | JALR (I) | `27f` | The original table has `27e`; jump is added so JALR jumps. |
| 11011 | JAL (J) | `327` | |

Points to note:

* **A zero word halts the core.** With `clk_en` low, nothing updates and the PC stays
  put. This is how a program ends: put an ECALL (or any word outside the 37) after the
  last instruction. `halted` shows it, and only `rst` gets the core out of it.
* **Some enables are set where they have no effect.** The U and J rows set `mem_rd`,
  and the U row sets `jump`. This is harmless: load data are written back only for load
  lines, and the PC is redirected only when `control_flow_unit` also says *take*, which
  happens only for branches whose condition holds and for JAL/JALR.
* **Opcodes 01011 and 10100 are quirks.** They appear in the original R rows and keep
  their words. An instruction with one of these opcodes raises no line, so it writes 0
  to its rd field and shows 0 on the display. RV32I does not define them. Do not use them.

## One cycle, step by step

Everything between two rising edges is combinational:

1. `pc` addresses `imem`. Bits [7:2] select the word.
2. The two decoders and the control ROM work from the instruction word.
3. `register_file` reads rs1 and rs2.
4. `alu` forms every result, plus `addr_sum = rs1 + imm` and `pc_imm = pc + imm`. The
   first is ADDI's result, the load/store address and the JALR target. The second is
   AUIPC's result and the branch/JAL target. Each of the three adders is a 32-bit
   carry-lookahead adder built from 4-bit lookahead groups.
5. `control_flow_unit` decides `take` and gives `target`: `pc_imm`, or `addr_sum` with
   bit 0 cleared for JALR, cut to 8 bits.
6. `dmem` reads (loads) combinationally at `addr_sum[7:0]`.
7. The write-back value is the load data for loads, PC+4 for JAL/JALR, and the ALU
   result otherwise.

At the edge, with `step = run & clk_en`:

* the PC loads `jump & take ? target : pc + 4` when `cnt_en` is set;
* rd is written when `reg_wr` is set (writes to x0 are dropped);
* DMEM is written when `mem_wr` is set;
* the display register loads the write-back value when `out_en` is set.

The display register is loaded for R, I and load instructions and for JALR, but not for
stores, branches, JAL, LUI or AUIPC. A write to x0 (for example `addi x0, x0, 5`) still
updates the display.

Register values written in one cycle are read in the next. No bypass is needed because
nothing overlaps: there are no hazards, stalls or flushes. CPI is exactly 1, and the
clock period is the whole fetch-decode-execute-memory-write path.

## Address space

* **PC: 8 bits.** Programs hold at most 64 instructions (`imem` has 2^(8-2) words).
  PC+4 and every jump target wrap modulo 256. There is no misalignment trap: a target
  with bit 1 set simply has that bit ignored by `imem`.
* **Data: 8-bit byte address.** `dmem` is 64 words, i.e. 256 bytes, little-endian.
  Only the low 8 bits of rs1+imm are used, so every address aliases into those 256
  bytes. Address bits below the access size are ignored: a word access uses bits [7:2],
  a halfword access bits [7:1]. Loads sign-extend (LB, LH) or zero-extend (LBU, LHU).
* Both memories are register arrays cleared by `rst`. The data path itself is fully
  32 bits wide. AUIPC, JAL and JALR see the PC zero-extended from 8 bits.

## The display

`output_unit` drives ten digits because a 32-bit unsigned value has up to ten decimal
digits (4 294 967 295). `double_dabble` is the combinational form of the algorithm: 32
stages, each adding 3 to every digit that is 5 or more and then shifting in the next
input bit. `bcd[4*i+3:4*i]` is digit *i*, units first. Each `add3` cell is a
four-full-adder ripple. `seven_seg_encoder` first decodes a digit to 16 lines, then
ORs them into segments `seg[i][0]` = A … `seg[i][6]` = G, with 1 = lit. The display
shows the register's contents in the cycle after the load. Values are shown unsigned;
a negative result appears as its 32-bit two's-complement value.

## Where this RTL departs from the original schematic

The original is a Logisim drawing with a short description. These are the places where
they disagree, or where one of them says nothing:

* **Timing.** The schematic has a clocked register between the opcode and the control
  ROM, with no timing given for it. Here the ROM is combinational and the whole core
  is single-cycle.
* **Immediates.** Several immediate paths in the drawing are 12 bits wide, and its
  format decoder only sign-extends a 12-bit immediate. Here all arithmetic is 32 bits,
  and the immediates follow the RV32I formats (I, S, B, U, J).
* **JAL/JALR link.** The drawing routes the plain PC onto the result bus for JAL/JALR.
  Here the link value is PC+4, the address of the next instruction.
* **Control ROM.** Three words are changed: LOAD, JALR and LUI (see the ROM table above).
* **Data memory.** The drawing shows a word-wide RAM. Here byte and halfword stores use
  byte lanes, because the instruction descriptions require them.
* **Choices the original does not specify:** x0 hard-wired to zero, the branch
  comparators, the JALR bit-0 clear, the misalignment handling, synchronous active-high
  reset clearing all state, the form of the two load ports (the original loads memory
  images from files), the `run` input, and the segment shapes.
* **Flip-flop.** The original's flip-flop drawing is a gated latch. The cell here is a
  rising-edge flip-flop with enable and synchronous clear.

Nothing here is a pipeline, a cache, an interrupt, a trap or a CSR. None of these
exist in the original either.

## Simulating

All files are plain SystemVerilog 2017. `rtl/rv32_pkg.sv` must come first; the
testbenches that assemble programs also need `tb/rv_asm_pkg.sv`. To run the whole-core
test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/rv32_pkg.sv tb/rv_asm_pkg.sv tb/tb_rv32i_cpu.sv --top-module tb_rv32i_cpu
./obj_dir/Vtb_rv32i_cpu
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`. Each also has a
watchdog that fails the run if it hangs. There is one testbench per module:
`tb/tb_<module>.sv`.

`tb_rv32i_cpu` runs the core at its default parameters against an instruction-level
reference model written in the testbench. It compares the PC before every edge, and
all 32 registers and the display after every edge. It runs one hand-written program
that uses all 37 instructions and reads one preloaded data word, then 40 random
64-word programs, each with random initial data memory. The random programs
use forward-only branches and jumps and end with ECALL. The testbench counts taken and
untaken branches, backward branches, JAL, JALR, loads, stores, x0 writes, display
updates, halts and cycles with `run` low. It fails if any of these never happens.

To load your own program: hold `rst` for one cycle, then with `run` low write words
through `imem_load_en` / `imem_load_addr` (word index) / `imem_load_data`. Initial data
goes into `dmem` the same way, through `dmem_load_en` / `dmem_load_addr` (word index) /
`dmem_load_data`; tie `dmem_load_en` low if the data memory should start cleared. Then
raise `run`. `rv_asm_pkg` has one encoder function per instruction (`addi(rd, rs1, imm)`,
`beq(rs1, rs2, offset)`, …) for building programs inside a testbench.

## Changing it

* `rv32i_cpu #(PC_W, DMEM_AW, DIGITS)`: program space (2^(PC_W-2) instructions), data
  memory size (2^DMEM_AW bytes), and display digits.
* To make the ROM more conventional, edit `rv32_pkg::ctrl_rom_init`. For example, clear
  `mem_rd`/`jump` in the U and J rows, or drop the two unused R rows.
* To add an instruction: add a line to `instr_e` and raise `NUM_INSTR`. Then give it a
  pattern in `decode_logic1`, a format in `decode_logic2`, and a unit in `alu` (or a
  case in `control_flow_unit`).
