// control_logic: control ROM of the core.
//
// Opcode bits [6:2] address a 32-word ROM whose 10-bit words hold the control signals
// of each instruction class (rv32_pkg::ctrl_t, bit 9 first): clock enable, memory read
// enable, memory write enable, register read enable, register write enable, ALU
// enable, output enable, PC count enable, PC count-output (read) enable, and jump
// (PC write enable). An opcode whose bits [1:0] are not 11 is not a 32-bit RISC-V
// instruction and gives an all-low word. A word of all zeros, which every
// opcode outside the table gets (ECALL/EBREAK, FENCE, ...), drops clock enable: the
// core stops there. Combinational.
// The ROM contents are the design's control table with three changes that the
// instruction descriptions require: loads get memory read enable, jalr gets jump,
// and lui (absent from the table) gets the same word as auipc. The design places a
// clocked register in front of the ROM without giving its timing; here the lookup is
// combinational so that each instruction's controls apply in its own cycle. The
// check of bits [1:0] is this design's choice.
module control_logic
  import rv32_pkg::*;
(
  input  logic [6:0] opcode,
  output ctrl_t      ctrl
);
  assign ctrl = ctrl_t'((opcode[1:0] == 2'b11) ? CTRL_ROM[opcode[6:2]] : 10'h000);
endmodule
