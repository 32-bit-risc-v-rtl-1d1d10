// rv_asm_pkg: instruction encoders for the testbenches (a tiny RV32I assembler).
//
// Each function returns the 32-bit machine word of one instruction, built from the
// RV32I base formats; register numbers are 0..31 and immediates are plain integers.
package rv_asm_pkg;

  function automatic logic [31:0] r_type(int f7, int rs2, int rs1, int f3, int rd, int op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction

  function automatic logic [31:0] i_type(int imm, int rs1, int f3, int rd, int op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction

  function automatic logic [31:0] s_type(int imm, int rs2, int rs1, int f3, int op);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'(op)};
  endfunction

  function automatic logic [31:0] b_type(int imm, int rs2, int rs1, int f3);
    logic [12:0] i = 13'(imm);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] u_type(int imm20, int rd, int op);
    return {20'(imm20), 5'(rd), 7'(op)};
  endfunction

  function automatic logic [31:0] j_type(int imm, int rd);
    logic [20:0] i = 21'(imm);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  // R-type register-register operations.
  function automatic logic [31:0] add (int rd, int a, int b); return r_type(0,  b, a, 0, rd, 'h33); endfunction
  function automatic logic [31:0] sub (int rd, int a, int b); return r_type(32, b, a, 0, rd, 'h33); endfunction
  function automatic logic [31:0] sll (int rd, int a, int b); return r_type(0,  b, a, 1, rd, 'h33); endfunction
  function automatic logic [31:0] slt (int rd, int a, int b); return r_type(0,  b, a, 2, rd, 'h33); endfunction
  function automatic logic [31:0] sltu(int rd, int a, int b); return r_type(0,  b, a, 3, rd, 'h33); endfunction
  function automatic logic [31:0] xor_(int rd, int a, int b); return r_type(0,  b, a, 4, rd, 'h33); endfunction
  function automatic logic [31:0] srl (int rd, int a, int b); return r_type(0,  b, a, 5, rd, 'h33); endfunction
  function automatic logic [31:0] sra (int rd, int a, int b); return r_type(32, b, a, 5, rd, 'h33); endfunction
  function automatic logic [31:0] or_ (int rd, int a, int b); return r_type(0,  b, a, 6, rd, 'h33); endfunction
  function automatic logic [31:0] and_(int rd, int a, int b); return r_type(0,  b, a, 7, rd, 'h33); endfunction

  // I-type arithmetic, loads, jalr.
  function automatic logic [31:0] addi (int rd, int a, int imm); return i_type(imm, a, 0, rd, 'h13); endfunction
  function automatic logic [31:0] slti (int rd, int a, int imm); return i_type(imm, a, 2, rd, 'h13); endfunction
  function automatic logic [31:0] sltiu(int rd, int a, int imm); return i_type(imm, a, 3, rd, 'h13); endfunction
  function automatic logic [31:0] xori (int rd, int a, int imm); return i_type(imm, a, 4, rd, 'h13); endfunction
  function automatic logic [31:0] ori  (int rd, int a, int imm); return i_type(imm, a, 6, rd, 'h13); endfunction
  function automatic logic [31:0] andi (int rd, int a, int imm); return i_type(imm, a, 7, rd, 'h13); endfunction
  function automatic logic [31:0] slli (int rd, int a, int sh);  return i_type(sh & 31, a, 1, rd, 'h13); endfunction
  function automatic logic [31:0] srli (int rd, int a, int sh);  return i_type(sh & 31, a, 5, rd, 'h13); endfunction
  function automatic logic [31:0] srai (int rd, int a, int sh);  return i_type((sh & 31) | 'h400, a, 5, rd, 'h13); endfunction
  function automatic logic [31:0] lb   (int rd, int a, int imm); return i_type(imm, a, 0, rd, 'h03); endfunction
  function automatic logic [31:0] lh   (int rd, int a, int imm); return i_type(imm, a, 1, rd, 'h03); endfunction
  function automatic logic [31:0] lw   (int rd, int a, int imm); return i_type(imm, a, 2, rd, 'h03); endfunction
  function automatic logic [31:0] lbu  (int rd, int a, int imm); return i_type(imm, a, 4, rd, 'h03); endfunction
  function automatic logic [31:0] lhu  (int rd, int a, int imm); return i_type(imm, a, 5, rd, 'h03); endfunction
  function automatic logic [31:0] jalr (int rd, int a, int imm); return i_type(imm, a, 0, rd, 'h67); endfunction

  // Stores, branches, upper immediates, jal.
  function automatic logic [31:0] sb  (int b, int a, int imm); return s_type(imm, b, a, 0, 'h23); endfunction
  function automatic logic [31:0] sh  (int b, int a, int imm); return s_type(imm, b, a, 1, 'h23); endfunction
  function automatic logic [31:0] sw  (int b, int a, int imm); return s_type(imm, b, a, 2, 'h23); endfunction
  function automatic logic [31:0] beq (int a, int b, int off); return b_type(off, b, a, 0); endfunction
  function automatic logic [31:0] bne (int a, int b, int off); return b_type(off, b, a, 1); endfunction
  function automatic logic [31:0] blt (int a, int b, int off); return b_type(off, b, a, 4); endfunction
  function automatic logic [31:0] bge (int a, int b, int off); return b_type(off, b, a, 5); endfunction
  function automatic logic [31:0] bltu(int a, int b, int off); return b_type(off, b, a, 6); endfunction
  function automatic logic [31:0] bgeu(int a, int b, int off); return b_type(off, b, a, 7); endfunction
  function automatic logic [31:0] lui  (int rd, int imm20); return u_type(imm20, rd, 'h37); endfunction
  function automatic logic [31:0] auipc(int rd, int imm20); return u_type(imm20, rd, 'h17); endfunction
  function automatic logic [31:0] jal  (int rd, int off);   return j_type(off, rd); endfunction

  localparam logic [31:0] ECALL = 32'h0000_0073;
  localparam logic [31:0] FENCE = 32'h0000_000f;

endpackage
