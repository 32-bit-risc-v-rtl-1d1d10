// tb_decode_logic1: for each of the 37 instructions, 40 encodings with random
// registers and immediates must raise exactly that instruction's line. Words that
// are none of the 37 (ECALL, EBREAK, FENCE, unused funct3 values, funct7 bit 5 where
// it is not allowed, a 16-bit opcode) must raise no line.
module tb_decode_logic1;
  import rv32_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] instr;
  inst_vec_t   inst;
  int checks = 0, failures = 0;

  decode_logic1 dut (.instr(instr), .inst(inst));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] gen(int k);
    int rd = $urandom % 32, a = $urandom % 32, b = $urandom % 32;
    int imm = int'($urandom % 4096) - 2048, shamt = $urandom % 32;
    int boff = 2 * (int'($urandom % 4096) - 2048), joff = 2 * (int'($urandom % 1048576) - 524288);
    int up = $urandom % 1048576;
    case (k)
      I_ADD: return add(rd, a, b);     I_SUB: return sub(rd, a, b);
      I_SLL: return sll(rd, a, b);     I_SLT: return slt(rd, a, b);
      I_SLTU: return sltu(rd, a, b);   I_XOR: return xor_(rd, a, b);
      I_SRL: return srl(rd, a, b);     I_SRA: return sra(rd, a, b);
      I_OR: return or_(rd, a, b);      I_AND: return and_(rd, a, b);
      I_ADDI: return addi(rd, a, imm); I_JALR: return jalr(rd, a, imm);
      I_SLTI: return slti(rd, a, imm); I_SLTIU: return sltiu(rd, a, imm);
      I_XORI: return xori(rd, a, imm); I_ORI: return ori(rd, a, imm);
      I_ANDI: return andi(rd, a, imm); I_SLLI: return slli(rd, a, shamt);
      I_SRLI: return srli(rd, a, shamt);  I_SRAI: return srai(rd, a, shamt);
      I_SB: return sb(b, a, imm);      I_SH: return sh(b, a, imm);
      I_SW: return sw(b, a, imm);      I_LUI: return lui(rd, up);
      I_AUIPC: return auipc(rd, up);   I_JAL: return jal(rd, joff);
      I_BEQ: return beq(a, b, boff);   I_BNE: return bne(a, b, boff);
      I_BLT: return blt(a, b, boff);   I_BGE: return bge(a, b, boff);
      I_BLTU: return bltu(a, b, boff); I_BGEU: return bgeu(a, b, boff);
      I_LB: return lb(rd, a, imm);     I_LH: return lh(rd, a, imm);
      I_LW: return lw(rd, a, imm);     I_LBU: return lbu(rd, a, imm);
      default: return lhu(rd, a, imm);
    endcase
  endfunction

  initial begin
    logic [31:0] bad [10];
    for (int k = 0; k < NUM_INSTR; k++) begin
      for (int r = 0; r < 40; r++) begin
        instr = gen(k); #1;
        checks++;
        if (inst !== (NUM_INSTR'(1) << k)) begin
          failures++; $display("FAIL instr %0d word %h: lines %b", k, instr, inst);
        end
      end
    end
    bad[0] = ECALL;
    bad[1] = 32'h0010_0073;                           // EBREAK
    bad[2] = FENCE;
    bad[3] = b_type(8, 1, 2, 2);                      // branch funct3 010
    bad[4] = i_type(4, 1, 3, 2, 'h03);                // load funct3 011
    bad[5] = s_type(4, 1, 2, 3, 'h23);                // store funct3 011
    bad[6] = r_type(32, 1, 2, 7, 3, 'h33);            // "and" with funct7 bit 5
    bad[7] = i_type('h400 | 3, 1, 1, 2, 'h13);        // slli with funct7 bit 5
    bad[8] = add(1, 2, 3) & 32'hffff_fffc;            // opcode bits [1:0] = 00
    bad[9] = i_type(0, 1, 1, 2, 'h67);                // jalr funct3 001
    for (int i = 0; i < 10; i++) begin
      instr = bad[i]; #1;
      checks++;
      if (inst !== '0) begin failures++; $display("FAIL non-instruction %h raised %b", instr, inst); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
