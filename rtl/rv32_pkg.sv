// rv32_pkg: types and constants shared by the RV32I core.
//
// Holds the data width, the list of the 37 instructions the core executes (one line
// per instruction, as the instruction decoder produces them), the six instruction
// formats, the 10-bit control word produced by the control ROM, and the ROM contents.
// The ROM words follow the printed control table of the design; three entries
// (LOAD, JALR, LUI) are changed so that those instructions behave as RV32I requires:
// see control_logic.sv.
package rv32_pkg;

  localparam int unsigned XLEN = 32;

  // RV32I major opcodes (instruction bits [6:0]).
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;

  // Position of each instruction's line in the one-hot instruction vector.
  // Lines 0..31 form the "inst 1-32" group, lines 32..36 the "inst 33-37" group (loads).
  typedef enum logic [5:0] {
    I_ADD   = 6'd0,  I_SUB   = 6'd1,  I_SLL   = 6'd2,  I_SLT   = 6'd3,
    I_SLTU  = 6'd4,  I_XOR   = 6'd5,  I_SRL   = 6'd6,  I_SRA   = 6'd7,
    I_OR    = 6'd8,  I_AND   = 6'd9,  I_ADDI  = 6'd10, I_JALR  = 6'd11,
    I_SLTI  = 6'd12, I_SLTIU = 6'd13, I_XORI  = 6'd14, I_ORI   = 6'd15,
    I_ANDI  = 6'd16, I_SLLI  = 6'd17, I_SRLI  = 6'd18, I_SRAI  = 6'd19,
    I_SB    = 6'd20, I_SH    = 6'd21, I_SW    = 6'd22, I_LUI   = 6'd23,
    I_AUIPC = 6'd24, I_JAL   = 6'd25, I_BEQ   = 6'd26, I_BNE   = 6'd27,
    I_BLT   = 6'd28, I_BGE   = 6'd29, I_BLTU  = 6'd30, I_BGEU  = 6'd31,
    I_LB    = 6'd32, I_LH    = 6'd33, I_LW    = 6'd34, I_LBU   = 6'd35,
    I_LHU   = 6'd36
  } instr_e;

  localparam int unsigned NUM_INSTR = 37;
  typedef logic [NUM_INSTR-1:0] inst_vec_t;

  // Instruction formats (RV32I base formats).
  typedef enum logic [2:0] {
    FMT_NONE = 3'd0, FMT_R = 3'd1, FMT_I = 3'd2, FMT_S = 3'd3,
    FMT_SB   = 3'd4, FMT_U = 3'd5, FMT_UJ = 3'd6
  } fmt_e;

  // Access size of a load or store.
  typedef enum logic [1:0] {
    SZ_BYTE = 2'd0, SZ_HALF = 2'd1, SZ_WORD = 2'd2
  } mem_size_e;

  // Control word: bit 9 first, bit 0 last, in the order of the control table.
  typedef struct packed {
    logic clk_en;      // 9: clock enable
    logic mem_rd;      // 8: memory read enable
    logic mem_wr;      // 7: memory write enable
    logic reg_rd;      // 6: register read enable
    logic reg_wr;      // 5: register write enable
    logic alu_en;      // 4: ALU enable
    logic out_en;      // 3: output (display) enable
    logic cnt_en;      // 2: count enable (PC)
    logic cnt_out_en;  // 1: count output enable (PC read)
    logic jump;        // 0: jump (PC write enable)
  } ctrl_t;

  // Control ROM: 32 words of 10 bits, addressed by opcode bits [6:2].
  typedef logic [9:0] ctrl_rom_t [32];

  function automatic ctrl_rom_t ctrl_rom_init();
    ctrl_rom_t rom;
    for (int i = 0; i < 32; i++) rom[i] = 10'h000;
    rom[5'b00000] = 10'h37e;  // LOAD   (table: 27e; memory read enable set)
    rom[5'b00100] = 10'h27e;  // OP-IMM
    rom[5'b00101] = 10'h337;  // AUIPC  (U row)
    rom[5'b01000] = 10'h2d6;  // STORE  (S row)
    rom[5'b01011] = 10'h27e;  // R row
    rom[5'b01100] = 10'h27e;  // OP     (R row)
    rom[5'b01101] = 10'h337;  // LUI    (not in the table; U row used)
    rom[5'b10100] = 10'h27e;  // R row
    rom[5'b11000] = 10'h257;  // BRANCH (B row)
    rom[5'b11001] = 10'h27f;  // JALR   (table: 27e; jump set)
    rom[5'b11011] = 10'h327;  // JAL    (J row)
    return rom;
  endfunction

  localparam ctrl_rom_t CTRL_ROM = ctrl_rom_init();

endpackage
