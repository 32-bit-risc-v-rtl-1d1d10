// tb_control_flow_unit: for every branch, jal and jalr, and for a non-control
// instruction, random and equal/near-equal operands; take must follow the branch
// rule worked out here and target must be pc_imm (branches, jal) or addr_sum with
// bit 0 cleared (jalr), cut to 8 bits.
module tb_control_flow_unit;
  import rv32_pkg::*;
  inst_vec_t   inst;
  logic [31:0] op1, op2, addr_sum, pc_imm;
  logic        take;
  logic [7:0]  target;
  int checks = 0, failures = 0;
  int taken = 0, not_taken = 0;

  control_flow_unit dut (.inst(inst), .op1(op1), .op2(op2), .addr_sum(addr_sum), .pc_imm(pc_imm),
                         .take(take), .target(target));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_e kinds [9] = '{I_BEQ, I_BNE, I_BLT, I_BGE, I_BLTU, I_BGEU, I_JAL, I_JALR, I_ADD};
    for (int k = 0; k < 9; k++) begin
      for (int r = 0; r < 400; r++) begin
        logic e_take;
        logic [7:0] e_tgt;
        int s1, s2;
        inst = NUM_INSTR'(1) << kinds[k];
        op1 = $urandom;
        case (r % 4)
          0: op2 = op1;
          1: op2 = op1 + 1;
          2: op2 = ~op1;
          default: op2 = $urandom;
        endcase
        addr_sum = $urandom; pc_imm = $urandom;
        #1;
        s1 = op1; s2 = op2;
        case (kinds[k])
          I_BEQ:  e_take = (op1 == op2);
          I_BNE:  e_take = (op1 != op2);
          I_BLT:  e_take = (s1 < s2);
          I_BGE:  e_take = (s1 >= s2);
          I_BLTU: e_take = (op1 < op2);
          I_BGEU: e_take = (op1 >= op2);
          I_JAL, I_JALR: e_take = 1;
          default: e_take = 0;
        endcase
        e_tgt = (kinds[k] == I_JALR) ? (addr_sum[7:0] & 8'hfe) : pc_imm[7:0];
        if (e_take) taken++; else not_taken++;
        checks++;
        if (take !== e_take || (e_take && target !== e_tgt)) begin
          failures++;
          $display("FAIL %s op1=%h op2=%h: take=%b target=%h expected %b %h",
                   kinds[k].name(), op1, op2, take, target, e_take, e_tgt);
        end
      end
    end
    $display("taken=%0d not_taken=%0d", taken, not_taken);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
