// decode_logic1: instruction decoder, one output line per instruction.
//
// Compares the opcode (bits 6:0), funct3 (bits 14:12) and, where it distinguishes two
// instructions, funct7 bit 5 (instruction bit 30) with the value pattern of each of
// the 37 RV32I instructions the core runs, and raises that instruction's line of
// inst (at most one line is high; none for anything else, e.g. ECALL or FENCE).
// Line positions are given by rv32_pkg::instr_e: lines 0-31 are the "inst 1-32"
// group, lines 32-36 the five loads ("inst 33-37"). Combinational.
// The patterns are the design's decode table; like that table, only bit 5 of funct7
// is compared, the other funct7 bits are ignored.
module decode_logic1
  import rv32_pkg::*;
(
  input  logic [31:0] instr,
  output inst_vec_t   inst
);
  logic [6:0] op;
  logic [2:0] f3;
  logic       f7b5;

  assign op   = instr[6:0];
  assign f3   = instr[14:12];
  assign f7b5 = instr[30];

  always_comb begin
    inst = '0;
    unique case (op)
      OP_LUI:   inst[I_LUI]   = 1'b1;
      OP_AUIPC: inst[I_AUIPC] = 1'b1;
      OP_JAL:   inst[I_JAL]   = 1'b1;
      OP_JALR:  inst[I_JALR]  = (f3 == 3'b000);
      OP_BRANCH: begin
        inst[I_BEQ]  = (f3 == 3'b000);
        inst[I_BNE]  = (f3 == 3'b001);
        inst[I_BLT]  = (f3 == 3'b100);
        inst[I_BGE]  = (f3 == 3'b101);
        inst[I_BLTU] = (f3 == 3'b110);
        inst[I_BGEU] = (f3 == 3'b111);
      end
      OP_LOAD: begin
        inst[I_LB]  = (f3 == 3'b000);
        inst[I_LH]  = (f3 == 3'b001);
        inst[I_LW]  = (f3 == 3'b010);
        inst[I_LBU] = (f3 == 3'b100);
        inst[I_LHU] = (f3 == 3'b101);
      end
      OP_STORE: begin
        inst[I_SB] = (f3 == 3'b000);
        inst[I_SH] = (f3 == 3'b001);
        inst[I_SW] = (f3 == 3'b010);
      end
      OP_IMM: begin
        inst[I_ADDI]  = (f3 == 3'b000);
        inst[I_SLTI]  = (f3 == 3'b010);
        inst[I_SLTIU] = (f3 == 3'b011);
        inst[I_XORI]  = (f3 == 3'b100);
        inst[I_ORI]   = (f3 == 3'b110);
        inst[I_ANDI]  = (f3 == 3'b111);
        inst[I_SLLI]  = (f3 == 3'b001) && !f7b5;
        inst[I_SRLI]  = (f3 == 3'b101) && !f7b5;
        inst[I_SRAI]  = (f3 == 3'b101) &&  f7b5;
      end
      OP_REG: begin
        inst[I_ADD]  = (f3 == 3'b000) && !f7b5;
        inst[I_SUB]  = (f3 == 3'b000) &&  f7b5;
        inst[I_SLL]  = (f3 == 3'b001) && !f7b5;
        inst[I_SLT]  = (f3 == 3'b010) && !f7b5;
        inst[I_SLTU] = (f3 == 3'b011) && !f7b5;
        inst[I_XOR]  = (f3 == 3'b100) && !f7b5;
        inst[I_SRL]  = (f3 == 3'b101) && !f7b5;
        inst[I_SRA]  = (f3 == 3'b101) &&  f7b5;
        inst[I_OR]   = (f3 == 3'b110) && !f7b5;
        inst[I_AND]  = (f3 == 3'b111) && !f7b5;
      end
      default: inst = '0;
    endcase
  end
endmodule
