// control_flow_unit: decides where the program counter goes next.
//
// For a conditional branch it compares rs1 (op1) with rs2 (op2): beq equal, bne not
// equal, blt/bge signed less-than / greater-or-equal, bltu/bgeu the unsigned forms.
// take is high for a branch whose condition holds and always for jal and jalr.
// target is pc + imm (pc_imm from the ALU) for branches and jal, and rs1 + imm with
// bit 0 cleared (addr_sum from the ALU) for jalr, cut to the PC width. Combinational.
// The comparisons are those the design lists; clearing bit 0 of the jalr target is
// RV32I's rule, which the design does not mention.
module control_flow_unit
  import rv32_pkg::*;
#(
  parameter int unsigned PC_W = 8
) (
  input  inst_vec_t       inst,
  input  logic [XLEN-1:0] op1,
  input  logic [XLEN-1:0] op2,
  input  logic [XLEN-1:0] addr_sum,
  input  logic [XLEN-1:0] pc_imm,
  output logic            take,
  output logic [PC_W-1:0] target
);
  logic eq, lt, ltu, cond;

  assign eq  = (op1 == op2);
  assign lt  = ($signed(op1) < $signed(op2));
  assign ltu = (op1 < op2);

  assign cond = (inst[I_BEQ]  &  eq)  | (inst[I_BNE]  & ~eq)  |
                (inst[I_BLT]  &  lt)  | (inst[I_BGE]  & ~lt)  |
                (inst[I_BLTU] &  ltu) | (inst[I_BGEU] & ~ltu);

  assign take   = cond | inst[I_JAL] | inst[I_JALR];
  assign target = inst[I_JALR] ? (addr_sum[PC_W-1:0] & ~PC_W'(1)) : pc_imm[PC_W-1:0];
endmodule
