// tb_alu: ALU at its defaults. For every computational instruction line, random and
// corner operands (0, -1, most negative, shift amounts 0 and 31) are applied and the
// result is compared with a reference written with plain SystemVerilog operators.
// Also: addr_sum = op1 + imm and pc_imm = pc + imm for every line, a zero result for
// lines that are not computational, and a zero result with alu_en low.
module tb_alu;
  import rv32_pkg::*;
  inst_vec_t   inst;
  logic [31:0] op1, op2, imm, result, addr_sum, pc_imm;
  logic [7:0]  pc;
  logic        alu_en;
  int checks = 0, failures = 0;

  alu dut (.inst(inst), .op1(op1), .op2(op2), .imm(imm), .pc(pc), .alu_en(alu_en),
           .result(result), .addr_sum(addr_sum), .pc_imm(pc_imm));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model(instr_e k, logic [31:0] a, logic [31:0] b, logic [31:0] i, logic [7:0] p);
    int sa = a, sb = b, si = i;
    case (k)
      I_ADD:   return a + b;
      I_SUB:   return a - b;
      I_SLL:   return a << b[4:0];
      I_SLT:   return (sa < sb) ? 1 : 0;
      I_SLTU:  return (a < b) ? 1 : 0;
      I_XOR:   return a ^ b;
      I_SRL:   return a >> b[4:0];
      I_SRA:   return sa >>> b[4:0];
      I_OR:    return a | b;
      I_AND:   return a & b;
      I_ADDI:  return a + i;
      I_SLTI:  return (sa < si) ? 1 : 0;
      I_SLTIU: return (a < i) ? 1 : 0;
      I_XORI:  return a ^ i;
      I_ORI:   return a | i;
      I_ANDI:  return a & i;
      I_SLLI:  return a << i[4:0];
      I_SRLI:  return a >> i[4:0];
      I_SRAI:  return sa >>> i[4:0];
      I_LUI:   return i;
      I_AUIPC: return {24'h0, p} + i;
      default: return 0;
    endcase
  endfunction

  function automatic logic [31:0] pick();
    int kind = $urandom % 6;
    case (kind)
      0: return 32'h0;
      1: return 32'hffff_ffff;
      2: return 32'h8000_0000;
      3: return 32'(int'($urandom % 64) - 32);
      default: return $urandom;
    endcase
  endfunction

  initial begin
    for (int k = 0; k < NUM_INSTR; k++) begin
      for (int r = 0; r < 300; r++) begin
        logic [31:0] e;
        inst = NUM_INSTR'(1) << k;
        op1 = pick(); op2 = pick(); imm = pick(); pc = 8'($urandom);
        if (r == 0) op2 = 31; if (r == 1) imm = 31;
        alu_en = ($urandom % 10) != 0;
        #1;
        e = alu_en ? model(instr_e'(k), op1, op2, imm, pc) : 32'h0;
        checks++;
        if (result !== e || addr_sum !== op1 + imm || pc_imm !== {24'h0, pc} + imm) begin
          failures++;
          $display("FAIL line %0d op1=%h op2=%h imm=%h pc=%h en=%b: result=%h expected %h sum=%h pcimm=%h",
                   k, op1, op2, imm, pc, alu_en, result, e, addr_sum, pc_imm);
        end
      end
    end
    inst = '0; alu_en = 1; op1 = 32'h1234; op2 = 32'h55; #1;
    checks++; if (result !== 0) begin failures++; $display("FAIL no line but result %h", result); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
