// decode_logic2: format decoder and field extractor.
//
// From the one-hot instruction lines it works out the instruction's format (R, I, S,
// SB, U or UJ; FMT_NONE when no line is high) and then takes the fields that format
// has out of the instruction word: rd (bits 11:7) for R, I, U and UJ; rs1 (bits
// 19:15) for R, I, S and SB; rs2 (bits 24:20) for R, S and SB; and the immediate,
// assembled and sign-extended to 32 bits per format (U: bits 31:12 placed in the
// upper 20 bits). A field the format lacks reads 0. opcode passes bits 6:0 to the
// control ROM. Combinational.
// The format grouping and the zero for absent fields follow the design's decoder;
// the immediate layouts are the RV32I base formats.
module decode_logic2
  import rv32_pkg::*;
(
  input  logic [31:0] instr,
  input  inst_vec_t   inst,
  output fmt_e        fmt,
  output logic [6:0]  opcode,
  output logic [4:0]  rd,
  output logic [4:0]  rs1,
  output logic [4:0]  rs2,
  output logic [31:0] imm
);
  logic is_r, is_i, is_s, is_sb, is_u, is_uj;

  assign is_r  = inst[I_ADD] | inst[I_SUB] | inst[I_SLL] | inst[I_SLT] | inst[I_SLTU] |
                 inst[I_XOR] | inst[I_SRL] | inst[I_SRA] | inst[I_OR]  | inst[I_AND];
  assign is_i  = inst[I_ADDI] | inst[I_SLTI] | inst[I_SLTIU] | inst[I_XORI] | inst[I_ORI] |
                 inst[I_ANDI] | inst[I_SLLI] | inst[I_SRLI]  | inst[I_SRAI] | inst[I_JALR] |
                 (|inst[I_LHU:I_LB]);
  assign is_s  = inst[I_SB] | inst[I_SH] | inst[I_SW];
  assign is_sb = inst[I_BEQ] | inst[I_BNE] | inst[I_BLT] | inst[I_BGE] | inst[I_BLTU] | inst[I_BGEU];
  assign is_u  = inst[I_LUI] | inst[I_AUIPC];
  assign is_uj = inst[I_JAL];

  always_comb begin
    if      (is_r)  fmt = FMT_R;
    else if (is_i)  fmt = FMT_I;
    else if (is_s)  fmt = FMT_S;
    else if (is_sb) fmt = FMT_SB;
    else if (is_u)  fmt = FMT_U;
    else if (is_uj) fmt = FMT_UJ;
    else            fmt = FMT_NONE;
  end

  assign opcode = instr[6:0];
  assign rd     = (is_r | is_i | is_u | is_uj)   ? instr[11:7]  : 5'd0;
  assign rs1    = (is_r | is_i | is_s | is_sb)   ? instr[19:15] : 5'd0;
  assign rs2    = (is_r | is_s | is_sb)          ? instr[24:20] : 5'd0;

  always_comb begin
    unique case (fmt)
      FMT_I:   imm = {{20{instr[31]}}, instr[31:20]};
      FMT_S:   imm = {{20{instr[31]}}, instr[31:25], instr[11:7]};
      FMT_SB:  imm = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
      FMT_U:   imm = {instr[31:12], 12'b0};
      FMT_UJ:  imm = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};
      default: imm = '0;
    endcase
  end
endmodule
