// tb_rv32i_cpu: end-to-end test of the core at its default parameters.
//
// A reference model of the instruction set (written here from the RV32I rules, with
// the core's 8-bit PC and 256-byte data memory) runs the same program. Before every
// clock edge the core's PC must equal the model's; after it, all 32 registers and the
// displayed value must match. Programs: one hand-written program that uses all 37
// instructions, a counted backward loop, taken and untaken branches of every kind,
// jal/jalr, every load/store size, a write to x0, and stops on ECALL; then random
// programs (random ALU, load/store and forward branch/jump instructions, ECALL at the
// end). Each program is loaded through the instruction-memory load port, and its
// initial data (zero for the hand-written program apart from one word, random for the
// random programs) through the data-memory load port, with run low, after a reset. The testbench counts how often each mechanism of the core occurred
// (taken and untaken branch, backward branch, jal, jalr, load, store, x0 write,
// display update, halt, run held low) and fails if one never did. At the end of each
// program the decimal digits and segment lines of the display are checked.
module tb_rv32i_cpu;
  import rv32_pkg::*;
  import rv_asm_pkg::*;

  logic        clk = 0, rst, run, imem_load_en;
  logic [5:0]  imem_load_addr;
  logic [31:0] imem_load_data, shown;
  logic        dmem_load_en;
  logic [5:0]  dmem_load_addr;
  logic [31:0] dmem_load_data;
  logic [7:0]  pc;
  logic        halted;
  ctrl_t       ctrl;
  logic [39:0] bcd;
  logic [6:0]  seg [10];
  int checks = 0, failures = 0;

  rv32i_cpu dut (.clk(clk), .rst(rst), .run(run), .imem_load_en(imem_load_en),
                 .imem_load_addr(imem_load_addr), .imem_load_data(imem_load_data),
                 .dmem_load_en(dmem_load_en), .dmem_load_addr(dmem_load_addr), .dmem_load_data(dmem_load_data),
                 .pc(pc), .halted(halted), .ctrl(ctrl), .shown(shown), .bcd(bcd), .seg(seg));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  logic [31:0] prog [64];
  logic [31:0] dinit [64];              // initial data memory, one word per entry
  logic [31:0] m_x [32];
  logic [7:0]  m_mem [256];
  logic [7:0]  m_pc;
  logic [31:0] m_shown;
  logic        m_halt;

  // mechanism counters
  int n_taken, n_untaken, n_back, n_jal, n_jalr, n_load, n_store, n_x0, n_disp, n_halt, n_idle;

  function automatic logic [31:0] sx(logic [31:0] v, int bits);
    return 32'($signed(v << (32 - bits)) >>> (32 - bits));
  endfunction

  task automatic model_step();
    logic [31:0] w = prog[m_pc[7:2]];
    logic [6:0]  op = w[6:0];
    logic [2:0]  f3 = w[14:12];
    logic        alt = w[30];
    int unsigned rd = w[11:7], r1 = w[19:15], r2 = w[24:20];
    logic [31:0] a = m_x[r1], b = m_x[r2];
    logic [31:0] ii = sx({20'h0, w[31:20]}, 12);
    logic [31:0] is = sx({20'h0, w[31:25], w[11:7]}, 12);
    logic [31:0] ib = sx({19'h0, w[31], w[7], w[30:25], w[11:8], 1'b0}, 13);
    logic [31:0] ij = sx({11'h0, w[31], w[19:12], w[20], w[30:21], 1'b0}, 21);
    logic [31:0] iu = {w[31:12], 12'h0};
    logic [7:0]  next = m_pc + 8'd4;
    logic [31:0] v = 0;
    logic        wr = 0, disp = 0;
    logic [7:0]  ad;
    case (op)
      7'h37: begin v = iu; wr = 1; end
      7'h17: begin v = {24'h0, m_pc} + iu; wr = 1; end
      7'h6f: begin v = {24'h0, m_pc + 8'd4}; wr = 1; next = m_pc + ij[7:0]; end
      7'h67: begin v = {24'h0, m_pc + 8'd4}; wr = 1; disp = 1; next = (a[7:0] + ii[7:0]) & 8'hfe; end
      7'h63: begin
        logic t;
        case (f3)
          0: t = (a == b);
          1: t = (a != b);
          4: t = ($signed(a) < $signed(b));
          5: t = ($signed(a) >= $signed(b));
          6: t = (a < b);
          default: t = (a >= b);
        endcase
        if (t) next = m_pc + ib[7:0];
      end
      7'h03: begin
        ad = a[7:0] + ii[7:0];
        case (f3)
          0: v = sx({24'h0, m_mem[ad]}, 8);
          1: v = sx({16'h0, m_mem[ad & 8'hfe | 8'h1], m_mem[ad & 8'hfe]}, 16);
          2: v = {m_mem[ad & 8'hfc | 8'h3], m_mem[ad & 8'hfc | 8'h2], m_mem[ad & 8'hfc | 8'h1], m_mem[ad & 8'hfc]};
          4: v = {24'h0, m_mem[ad]};
          default: v = {16'h0, m_mem[ad & 8'hfe | 8'h1], m_mem[ad & 8'hfe]};
        endcase
        wr = 1; disp = 1;
      end
      7'h23: begin
        ad = a[7:0] + is[7:0];
        case (f3)
          0: m_mem[ad] = b[7:0];
          1: begin m_mem[ad & 8'hfe] = b[7:0]; m_mem[ad & 8'hfe | 8'h1] = b[15:8]; end
          default: for (int k = 0; k < 4; k++) m_mem[ad & 8'hfc | 8'(k)] = b[8*k +: 8];
        endcase
      end
      7'h13, 7'h33: begin
        logic [31:0] o = (op == 7'h13) ? ii : b;
        case (f3)
          0: v = (op == 7'h33 && alt) ? a - o : a + o;
          1: v = a << o[4:0];
          2: v = ($signed(a) < $signed(o)) ? 1 : 0;
          3: v = (a < o) ? 1 : 0;
          4: v = a ^ o;
          5: v = alt ? 32'($signed(a) >>> o[4:0]) : a >> o[4:0];
          6: v = a | o;
          default: v = a & o;
        endcase
        wr = 1; disp = 1;
      end
      default: return;   // a stopping instruction: nothing changes
    endcase
    if (wr && rd != 0) m_x[rd] = v;
    if (disp) m_shown = v;
    m_pc = next;
  endtask

  // The core stops on any word outside the instruction set (the programs use ECALL).
  function automatic logic stops_at(logic [7:0] at);
    logic [6:0] op = prog[at[7:2]][6:0];
    return !(op inside {7'h37, 7'h17, 7'h6f, 7'h67, 7'h63, 7'h03, 7'h23, 7'h13, 7'h33});
  endfunction

  // ---------------- checks ----------------
  task automatic compare_state(string when);
    logic ok = (shown === m_shown) && (halted === m_halt);
    for (int r = 0; r < 32; r++) ok &= (dut.u_rf.regs[r] === m_x[r]);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at pc=%h: shown=%h (model %h) halted=%b (model %b)", when, pc, shown, m_shown, halted, m_halt);
      for (int r = 0; r < 32; r++)
        if (dut.u_rf.regs[r] !== m_x[r]) $display("   x%0d = %h, model %h", r, dut.u_rf.regs[r], m_x[r]);
    end
  endtask

  task automatic check_display();
    longint unsigned rest = longint'(shown);
    logic [6:0] pat [10] = '{7'h3f, 7'h06, 7'h5b, 7'h4f, 7'h66, 7'h6d, 7'h7d, 7'h07, 7'h7f, 7'h6f};
    logic ok = 1;
    for (int i = 0; i < 10; i++) begin
      ok &= (bcd[4*i +: 4] === 4'(rest % 10)) && (seg[i] === pat[rest % 10]);
      rest = rest / 10;
    end
    checks++;
    if (!ok) begin failures++; $display("FAIL display of %0d: bcd %h", shown, bcd); end
  endtask

  task automatic run_program(string name, int max_cycles);
    // reset, load with run low, then run until the core stops
    rst = 1; run = 0; imem_load_en = 0; dmem_load_en = 0;
    @(posedge clk); #1; rst = 0;
    imem_load_en = 1; dmem_load_en = 1;
    for (int i = 0; i < 64; i++) begin
      imem_load_addr = 6'(i); imem_load_data = prog[i];
      dmem_load_addr = 6'(i); dmem_load_data = dinit[i];
      @(posedge clk); #1;
      n_idle += (pc == 0);
    end
    imem_load_en = 0; dmem_load_en = 0;
    checks++;
    if (pc !== 8'h00) begin failures++; $display("FAIL %s: PC moved while run was low", name); end
    for (int r = 0; r < 32; r++) m_x[r] = 0;
    for (int i = 0; i < 256; i++) m_mem[i] = dinit[i / 4][8 * (i % 4) +: 8];
    m_pc = 0; m_shown = 0; m_halt = stops_at(0);
    run = 1;
    for (int c = 0; c < max_cycles; c++) begin
      logic [31:0] w;
      checks++;
      if (pc !== m_pc) begin failures++; $display("FAIL %s: pc=%h model %h", name, pc, m_pc); end
      w = prog[m_pc[7:2]];
      // mechanism counts, from the core's own signals
      if (|dut.inst[I_BGEU:I_BEQ]) begin
        if (dut.take) n_taken++; else n_untaken++;
        if (dut.take && w[31]) n_back++;
      end
      n_jal  += dut.inst[I_JAL];
      n_jalr += dut.inst[I_JALR];
      n_load += |dut.inst[I_LHU:I_LB];
      n_store += |dut.inst[I_SW:I_SB];
      n_x0   += (ctrl.reg_wr && ctrl.clk_en && w[11:7] == 0);
      n_disp += (ctrl.out_en && ctrl.clk_en);
      model_step();
      m_halt = stops_at(m_pc);
      @(posedge clk); #1;
      compare_state(name);
      if (m_halt) break;
    end
    checks++;
    if (!halted) begin failures++; $display("FAIL %s: did not stop", name); end
    n_halt += halted;
    // stays stopped
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (pc !== m_pc) begin failures++; $display("FAIL %s: PC moved after the stop", name); end
    check_display();
  endtask

  function automatic logic [31:0] rand_instr(int at);
    int rd = 1 + $urandom % 31, a = $urandom % 32, b = $urandom % 32;
    int imm = int'($urandom % 4096) - 2048;
    int room = 63 - at;                           // words left before the final ECALL
    int fwd = 4 * (1 + ($urandom % (room > 0 ? room : 1)));
    int kind = $urandom % 16, pick = $urandom % 6;   // drawn once: a case expression may be re-evaluated
    case (kind)
      0: return add(rd, a, b);
      1: return sub(rd, a, b);
      2: case (pick % 4) 0: return sll(rd, a, b); 1: return srl(rd, a, b); 2: return sra(rd, a, b); default: return xor_(rd, a, b); endcase
      3: case (pick % 4) 0: return slt(rd, a, b); 1: return sltu(rd, a, b); 2: return or_(rd, a, b); default: return and_(rd, a, b); endcase
      4: case (pick % 4) 0: return addi(rd, a, imm); 1: return slti(rd, a, imm); 2: return sltiu(rd, a, imm); default: return xori(rd, a, imm); endcase
      5: case (pick % 4) 0: return ori(rd, a, imm); 1: return andi(rd, a, imm); 2: return slli(rd, a, imm); default: return srli(rd, a, imm); endcase
      6: return srai(rd, a, imm);
      7: return ($urandom % 2) ? lui(rd, $urandom % 1048576) : auipc(rd, $urandom % 1048576);
      8: case (pick % 3) 0: return sb(b, a, imm); 1: return sh(b, a, imm); default: return sw(b, a, imm); endcase
      9, 10: case (pick % 5) 0: return lb(rd, a, imm); 1: return lh(rd, a, imm); 2: return lw(rd, a, imm);
                                  3: return lbu(rd, a, imm); default: return lhu(rd, a, imm); endcase
      11, 12: case (pick % 6) 0: return beq(a, b, fwd); 1: return bne(a, b, fwd); 2: return blt(a, b, fwd);
                                  3: return bge(a, b, fwd); 4: return bltu(a, b, fwd); default: return bgeu(a, b, fwd); endcase
      13: return jal(($urandom % 4 == 0) ? 0 : rd, fwd);
      14: return jalr(rd, 0, 4 * at + fwd);          // x0 base: absolute forward target
      default: return addi(0, a, imm);               // write to x0, must be dropped
    endcase
  endfunction

  initial begin
    {n_taken, n_untaken, n_back, n_jal, n_jalr, n_load, n_store, n_x0, n_disp, n_halt, n_idle} = '0;
    rst = 1; run = 0; imem_load_en = 0; imem_load_addr = 0; imem_load_data = 0;
    dmem_load_en = 0; dmem_load_addr = 0; dmem_load_data = 0;
    repeat (2) @(posedge clk);

    // ---- hand-written program covering all 37 instructions ----
    for (int i = 0; i < 64; i++) begin prog[i] = ECALL; dinit[i] = 0; end
    dinit[60] = 32'hcafe_0123;            // preloaded data word at byte 240
    prog[0]  = lui(1, 'h12345);
    prog[1]  = addi(1, 1, 'h678);
    prog[2]  = auipc(2, 1);
    prog[3]  = addi(3, 0, -5);
    prog[4]  = addi(4, 0, 7);
    prog[5]  = add(5, 3, 4);
    prog[6]  = sub(6, 3, 4);
    prog[7]  = sll(7, 4, 4);
    prog[8]  = slt(8, 3, 4);
    prog[9]  = sltu(9, 3, 4);
    prog[10] = xor_(10, 1, 3);
    prog[11] = srl(11, 3, 4);
    prog[12] = sra(12, 3, 4);
    prog[13] = or_(13, 1, 3);
    prog[14] = and_(14, 1, 3);
    prog[15] = slti(15, 3, -4);
    prog[16] = sltiu(16, 4, 8);
    prog[17] = xori(17, 1, -1);
    prog[18] = ori(18, 4, 'h100);
    prog[19] = andi(19, 1, 'hff);
    prog[20] = slli(20, 1, 4);
    prog[21] = srli(21, 3, 28);
    prog[22] = srai(22, 3, 1);
    prog[23] = sw(1, 0, 16);
    prog[24] = sh(3, 0, 20);
    prog[25] = sb(4, 0, 23);
    prog[26] = lw(23, 0, 16);
    prog[27] = lh(24, 0, 20);
    prog[28] = lhu(25, 0, 20);
    prog[29] = lb(26, 0, 19);
    prog[30] = lbu(27, 0, 20);
    prog[31] = addi(28, 0, 3);
    prog[32] = addi(28, 28, -1);          // loop body
    prog[33] = bne(28, 0, -4);            // back twice, then falls through
    prog[34] = beq(28, 0, 8);             // taken
    prog[35] = addi(29, 0, 99);           // skipped
    prog[36] = blt(3, 4, 8);              // taken
    prog[37] = addi(29, 0, 98);           // skipped
    prog[38] = bge(3, 4, 8);              // not taken
    prog[39] = bltu(3, 4, 8);             // not taken
    prog[40] = bgeu(3, 4, 8);             // taken
    prog[41] = addi(29, 0, 97);           // skipped
    prog[42] = jal(30, 8);                // to 44
    prog[43] = addi(29, 0, 96);           // skipped
    prog[44] = addi(31, 0, 200);
    prog[45] = jalr(5, 31, 5);            // to 204 (bit 0 cleared) = word 51
    for (int i = 46; i < 51; i++) prog[i] = addi(29, 0, 95);
    prog[51] = addi(0, 0, 5);             // x0 stays 0; display shows 5
    prog[52] = lw(9, 0, 240);             // the preloaded word
    prog[53] = lw(29, 0, 20);
    prog[54] = ECALL;
    run_program("directed", 200);
    checks++;
    if (dut.u_rf.regs[1] !== 32'h1234_5678 || dut.u_rf.regs[28] !== 0 || dut.u_rf.regs[29] !== 32'h0700_fffb ||
        dut.u_rf.regs[30] !== 32'd172 || dut.u_rf.regs[5] !== 32'd184 ||
        dut.u_rf.regs[9] !== 32'hcafe_0123 || shown !== 32'h0700_fffb) begin
      failures++; $display("FAIL directed program end state");
    end

    // ---- random programs ----
    for (int p = 0; p < 40; p++) begin
      for (int i = 0; i < 63; i++) prog[i] = rand_instr(i);
      for (int i = 0; i < 64; i++) dinit[i] = $urandom;
      prog[63] = ECALL;
      run_program($sformatf("random %0d", p), 100);
    end

    $display("mechanisms: taken=%0d untaken=%0d backward=%0d jal=%0d jalr=%0d load=%0d store=%0d x0-write=%0d display=%0d halt=%0d idle=%0d",
             n_taken, n_untaken, n_back, n_jal, n_jalr, n_load, n_store, n_x0, n_disp, n_halt, n_idle);
    if (n_taken == 0 || n_untaken == 0 || n_back == 0 || n_jal == 0 || n_jalr == 0 || n_load == 0 ||
        n_store == 0 || n_x0 == 0 || n_disp == 0 || n_halt == 0 || n_idle == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
