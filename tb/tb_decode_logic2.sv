// tb_decode_logic2: random instructions of every format are encoded from known
// register numbers and immediates; the decoder (fed with the correct one-hot line)
// must return the format, the opcode, the registers that format has (0 for the
// others) and the immediate as the signed value that was encoded.
module tb_decode_logic2;
  import rv32_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] instr, imm;
  inst_vec_t   inst;
  fmt_e        fmt;
  logic [6:0]  opcode;
  logic [4:0]  rd, rs1, rs2;
  int checks = 0, failures = 0;

  decode_logic2 dut (.instr(instr), .inst(inst), .fmt(fmt), .opcode(opcode),
                     .rd(rd), .rs1(rs1), .rs2(rs2), .imm(imm));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_fields(string name, fmt_e f, int e_rd, int e_rs1, int e_rs2, int e_imm);
    #1;
    checks++;
    if (fmt !== f || opcode !== instr[6:0] || rd !== 5'(e_rd) || rs1 !== 5'(e_rs1) ||
        rs2 !== 5'(e_rs2) || imm !== 32'(e_imm)) begin
      failures++;
      $display("FAIL %s %h: fmt=%s rd=%0d rs1=%0d rs2=%0d imm=%h; expected rd=%0d rs1=%0d rs2=%0d imm=%h",
               name, instr, fmt.name(), rd, rs1, rs2, imm, e_rd, e_rs1, e_rs2, 32'(e_imm));
    end
  endtask

  initial begin
    inst = '0; instr = '0; #1;
    checks++;
    if (fmt !== FMT_NONE || rd !== 0 || rs1 !== 0 || rs2 !== 0 || imm !== 0) begin
      failures++; $display("FAIL no line: fields not zero");
    end
    for (int r = 0; r < 200; r++) begin
      automatic int d = $urandom % 32, a = $urandom % 32, b = $urandom % 32;
      automatic int i12 = int'($urandom % 4096) - 2048;
      automatic int boff = 2 * (int'($urandom % 4096) - 2048);
      automatic int joff = 2 * (int'($urandom % 1048576) - 524288);
      automatic int up = $urandom % 1048576;

      instr = sub(d, a, b); inst = '0; inst[I_SUB] = 1;   expect_fields("R", FMT_R, d, a, b, 0);
      instr = xori(d, a, i12); inst = '0; inst[I_XORI] = 1; expect_fields("I", FMT_I, d, a, 0, i12);
      instr = lhu(d, a, i12); inst = '0; inst[I_LHU] = 1;  expect_fields("load", FMT_I, d, a, 0, i12);
      instr = jalr(d, a, i12); inst = '0; inst[I_JALR] = 1; expect_fields("jalr", FMT_I, d, a, 0, i12);
      instr = sh(b, a, i12); inst = '0; inst[I_SH] = 1;    expect_fields("S", FMT_S, 0, a, b, i12);
      instr = bgeu(a, b, boff); inst = '0; inst[I_BGEU] = 1; expect_fields("SB", FMT_SB, 0, a, b, boff);
      instr = lui(d, up); inst = '0; inst[I_LUI] = 1;      expect_fields("U", FMT_U, d, 0, 0, up << 12);
      instr = auipc(d, up); inst = '0; inst[I_AUIPC] = 1;  expect_fields("U", FMT_U, d, 0, 0, up << 12);
      instr = jal(d, joff); inst = '0; inst[I_JAL] = 1;    expect_fields("UJ", FMT_UJ, d, 0, 0, joff);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
