// alu: arithmetic-logic unit of the single-cycle RV32I core.
//
// Every computational instruction has its own unit, and all of them work in parallel
// on the same operands: op1 (rs1), op2 (rs2), imm (the decoded immediate) and pc.
// The one-hot instruction lines then choose which unit's value goes to result
// (an AND-OR selector, the on-chip form of the shared bus the design drives through
// enabled buffers); result is 0 when no computational line is high or alu_en is low.
// The units: add/sub (one carry-lookahead adder; sub inverts op2 and adds a carry of
// 1), addi, and/or/xor and their immediate forms, sll/srl/sra and slli/srli/srai
// (shift amount = low 5 bits of op2 or of imm), slt/sltu/slti/sltiu (two's-complement
// or unsigned compare, result 0 or 1), lui (imm, the upper immediate) and auipc
// (pc + imm).
// Two sums leave the unit as well: addr_sum = op1 + imm, which is both addi's result
// and the load/store address (and the jalr target), and pc_imm = pc + imm, which is
// auipc's result and the branch/jal target. Combinational.
// The per-instruction units and the shared output follow the design. The design's
// drawings carry some immediate paths on 12 bits; here everything is 32 bits wide, as
// the text describes.
module alu
  import rv32_pkg::*;
#(
  parameter int unsigned PC_W = 8
) (
  input  inst_vec_t       inst,
  input  logic [XLEN-1:0] op1,
  input  logic [XLEN-1:0] op2,
  input  logic [XLEN-1:0] imm,
  input  logic [PC_W-1:0] pc,
  input  logic            alu_en,
  output logic [XLEN-1:0] result,
  output logic [XLEN-1:0] addr_sum,
  output logic [XLEN-1:0] pc_imm
);
  logic            sub;
  logic [XLEN-1:0] addsub, pc_ext;
  logic            co_as, co_ai, co_pc;
  logic [4:0]      sh_r, sh_i;
  logic [XLEN-1:0] val [NUM_INSTR];

  assign sub    = inst[I_SUB];
  assign pc_ext = XLEN'(pc);
  assign sh_r   = op2[4:0];
  assign sh_i   = imm[4:0];

  cla_adder #(.WIDTH(XLEN)) u_addsub (.a(op1), .b(op2 ^ {XLEN{sub}}), .cin(sub), .sum(addsub), .cout(co_as));
  cla_adder #(.WIDTH(XLEN)) u_addimm (.a(op1), .b(imm), .cin(1'b0), .sum(addr_sum), .cout(co_ai));
  cla_adder #(.WIDTH(XLEN)) u_pcimm  (.a(pc_ext), .b(imm), .cin(1'b0), .sum(pc_imm), .cout(co_pc));

  always_comb begin
    for (int i = 0; i < NUM_INSTR; i++) val[i] = '0;
    val[I_ADD]   = addsub;
    val[I_SUB]   = addsub;
    val[I_SLL]   = op1 << sh_r;
    val[I_SLT]   = XLEN'($signed(op1) < $signed(op2));
    val[I_SLTU]  = XLEN'(op1 < op2);
    val[I_XOR]   = op1 ^ op2;
    val[I_SRL]   = op1 >> sh_r;
    val[I_SRA]   = XLEN'($signed(op1) >>> sh_r);
    val[I_OR]    = op1 | op2;
    val[I_AND]   = op1 & op2;
    val[I_ADDI]  = addr_sum;
    val[I_SLTI]  = XLEN'($signed(op1) < $signed(imm));
    val[I_SLTIU] = XLEN'(op1 < imm);
    val[I_XORI]  = op1 ^ imm;
    val[I_ORI]   = op1 | imm;
    val[I_ANDI]  = op1 & imm;
    val[I_SLLI]  = op1 << sh_i;
    val[I_SRLI]  = op1 >> sh_i;
    val[I_SRAI]  = XLEN'($signed(op1) >>> sh_i);
    val[I_LUI]   = imm;
    val[I_AUIPC] = pc_imm;
  end

  // One-hot selection onto the result bus, gated by the ALU enable.
  always_comb begin
    result = '0;
    for (int i = 0; i < NUM_INSTR; i++) result |= {XLEN{inst[i]}} & val[i];
    if (!alu_en) result = '0;
  end
endmodule
