// tb_control_logic: all 128 opcodes. The expected control signals are written out
// here row by row from the control table (columns: clock enable, memory read,
// memory write, register read, register write, ALU enable, output enable, count
// enable, count output enable, jump), with the three rows that differ from it
// (LOAD memory read, JALR jump, LUI added). Every other opcode, and every opcode
// whose low bits are not 11, must give all signals low.
module tb_control_logic;
  import rv32_pkg::*;
  logic [6:0] opcode;
  ctrl_t      ctrl;
  int checks = 0, failures = 0;

  control_logic dut (.opcode(opcode), .ctrl(ctrl));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic string row(logic [4:0] op5);
    case (op5)
      5'b00000: return "1101111110";   // LOAD (I)
      5'b00100: return "1001111110";   // OP-IMM (I)
      5'b00101: return "1100110111";   // AUIPC (U)
      5'b01000: return "1011010110";   // STORE (S)
      5'b01011: return "1001111110";   // R
      5'b01100: return "1001111110";   // OP (R)
      5'b01101: return "1100110111";   // LUI (U)
      5'b10100: return "1001111110";   // R
      5'b11000: return "1001010111";   // BRANCH (B)
      5'b11001: return "1001111111";   // JALR (I)
      5'b11011: return "1100100111";   // JAL (J)
      default:  return "0000000000";
    endcase
  endfunction

  initial begin
    for (int op = 0; op < 128; op++) begin
      string s;
      logic [9:0] e;
      opcode = 7'(op); #1;
      s = (op[1:0] == 2'b11) ? row(5'(op >> 2)) : "0000000000";
      for (int c = 0; c < 10; c++) e[9 - c] = (s[c] == "1");
      checks++;
      if ({ctrl.clk_en, ctrl.mem_rd, ctrl.mem_wr, ctrl.reg_rd, ctrl.reg_wr, ctrl.alu_en,
           ctrl.out_en, ctrl.cnt_en, ctrl.cnt_out_en, ctrl.jump} !== e) begin
        failures++; $display("FAIL opcode %b: %b expected %b", opcode, ctrl, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
