// half_adder: adds two bits. s = a xor b, c = a and b.
//
// Purely combinational. It has no carry input, so on its own it cannot be chained into
// a multi-bit adder; in this core it serves as the propagate/generate cell of the
// carry-lookahead adder (s is the propagate bit, c the generate bit) and as the bit
// cell of the program counter's incrementer.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);
  assign s = a ^ b;
  assign c = a & b;
endmodule
