// rv32i_cpu: single-cycle 32-bit RISC-V core (37 RV32I instructions) with a
// ten-digit decimal display.
//
// Every clock cycle executes one instruction, left to right:
//   program_counter -> imem (instruction at the PC)
//   -> decode_logic1 (one line per instruction) -> decode_logic2 (format, rd/rs1/rs2,
//      immediate) and control_logic (10-bit control word from opcode[6:2])
//   -> register_file (rs1, rs2) -> alu (result, rs1+imm, pc+imm) and
//      control_flow_unit (branch/jump decision and target)
//   -> dmem (load/store at rs1+imm) -> write-back mux -> register_file (rd) and
//      output_unit (display).
// At the rising edge the PC, the destination register, a stored memory word and the
// display register update together. The value written to rd is the memory data for
// loads, PC+4 for jal/jalr and the ALU result otherwise; rd is written when the
// control word's register write enable is high.
// The PC advances when the run input, the control word's clock enable and its count
// enable are all high; it takes the control-flow target when jump is high and the
// control-flow unit says taken (branch condition true, or jal/jalr), else PC+4.
// An instruction whose control word is all zero (anything outside the 37, such as
// ECALL, EBREAK or FENCE, or an empty memory word) clears clock enable: nothing
// updates and the core stays on that instruction, which is reported on halted.
// Programs are written into imem through the imem_load_* port, and initial data into
// dmem through the dmem_load_* port, with run low.
// rst (synchronous, active high) clears the PC, registers, both memories and the
// display; a program must be loaded after it.
//
// The block partitioning, the control word, the 8-bit PC and data address and the
// ten-digit display follow the design. Single-cycle timing, the write-back rule for
// jal/jalr and the run / load interface are this design's choices.
module rv32i_cpu
  import rv32_pkg::*;
#(
  parameter int unsigned PC_W    = 8,
  parameter int unsigned DMEM_AW = 8,
  parameter int unsigned DIGITS  = 10
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              run,
  input  logic              imem_load_en,
  input  logic [PC_W-3:0]   imem_load_addr,
  input  logic [31:0]       imem_load_data,
  input  logic              dmem_load_en,
  input  logic [DMEM_AW-3:0] dmem_load_addr,
  input  logic [31:0]       dmem_load_data,
  output logic [PC_W-1:0]   pc,
  output logic              halted,
  output ctrl_t             ctrl,
  output logic [XLEN-1:0]   shown,
  output logic [4*DIGITS-1:0] bcd,
  output logic [6:0]        seg [DIGITS]
);
  logic [31:0]     instr;
  inst_vec_t       inst;
  fmt_e            fmt;
  logic [6:0]      opcode;
  logic [4:0]      rd, rs1, rs2;
  logic [XLEN-1:0] imm, rs1_data, rs2_data;
  logic [XLEN-1:0] alu_result, addr_sum, pc_imm, load_data, wb_data;
  logic [PC_W-1:0] pc_read, pc_plus4, target;
  logic            take, step, is_load, is_link;
  mem_size_e       size;
  logic            uns;
  logic [XLEN-1:0] wb_in [4];
  logic [1:0]      wb_sel;

  // ---- fetch -------------------------------------------------------------------
  assign step = run & ctrl.clk_en;

  program_counter #(.PC_W(PC_W)) u_pc (
    .clk(clk), .clr(rst), .count_en(step & ctrl.cnt_en), .write_en(ctrl.jump & take),
    .dest(target), .read_en(ctrl.cnt_out_en), .pc_out(pc), .pc_read(pc_read), .pc_plus4(pc_plus4));

  imem #(.ADDR_W(PC_W)) u_imem (
    .clk(clk), .clr(rst), .load_en(imem_load_en), .load_addr(imem_load_addr),
    .load_data(imem_load_data), .addr(pc), .instr(instr));

  // ---- decode ------------------------------------------------------------------
  decode_logic1 u_dec1 (.instr(instr), .inst(inst));

  decode_logic2 u_dec2 (.instr(instr), .inst(inst), .fmt(fmt), .opcode(opcode),
                        .rd(rd), .rs1(rs1), .rs2(rs2), .imm(imm));

  control_logic u_ctrl (.opcode(opcode), .ctrl(ctrl));

  assign halted = ~ctrl.clk_en;

  // ---- register file -----------------------------------------------------------
  register_file u_rf (
    .clk(clk), .clr(rst), .re(ctrl.reg_rd), .a1(rs1), .a2(rs2), .a3(rd),
    .we3(step & ctrl.reg_wr), .wd3(wb_data), .rd1(rs1_data), .rd2(rs2_data));

  // ---- execute -----------------------------------------------------------------
  alu #(.PC_W(PC_W)) u_alu (
    .inst(inst), .op1(rs1_data), .op2(rs2_data), .imm(imm), .pc(pc_read), .alu_en(ctrl.alu_en),
    .result(alu_result), .addr_sum(addr_sum), .pc_imm(pc_imm));

  control_flow_unit #(.PC_W(PC_W)) u_cfu (
    .inst(inst), .op1(rs1_data), .op2(rs2_data), .addr_sum(addr_sum), .pc_imm(pc_imm),
    .take(take), .target(target));

  // ---- memory ------------------------------------------------------------------
  assign is_load = |inst[I_LHU:I_LB];
  assign uns     = inst[I_LBU] | inst[I_LHU];
  always_comb begin
    if      (inst[I_LB] | inst[I_LBU] | inst[I_SB]) size = SZ_BYTE;
    else if (inst[I_LH] | inst[I_LHU] | inst[I_SH]) size = SZ_HALF;
    else                                            size = SZ_WORD;
  end

  dmem #(.ADDR_W(DMEM_AW)) u_dmem (
    .clk(clk), .clr(rst), .load_en(dmem_load_en), .load_addr(dmem_load_addr),
    .load_data(dmem_load_data), .we(step & ctrl.mem_wr), .re(ctrl.mem_rd), .size(size), .uns(uns),
    .addr(addr_sum[DMEM_AW-1:0]), .wdata(rs2_data), .rdata(load_data));

  // ---- write-back --------------------------------------------------------------
  assign is_link  = inst[I_JAL] | inst[I_JALR];
  assign wb_sel   = {is_link, is_load};
  assign wb_in[0] = alu_result;
  assign wb_in[1] = load_data;
  assign wb_in[2] = XLEN'(pc_plus4);
  assign wb_in[3] = '0;

  mux #(.SEL_W(2), .WIDTH(XLEN)) u_wb (.in(wb_in), .sel(wb_sel), .out(wb_data));

  // ---- display -----------------------------------------------------------------
  output_unit #(.DIGITS(DIGITS)) u_out (
    .clk(clk), .clr(rst), .load(step & ctrl.out_en), .value(wb_data),
    .shown(shown), .bcd(bcd), .seg(seg));

  // The instruction decoder raises at most one instruction line.
  property p_onehot;
    @(posedge clk) disable iff (rst) $onehot0(inst);
  endproperty
  a_onehot: assert property (p_onehot);
endmodule
