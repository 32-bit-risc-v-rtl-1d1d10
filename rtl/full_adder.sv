// full_adder: adds two bits and a carry-in, giving a sum bit and a carry-out.
//
// Purely combinational; full adders chain through cin/cout into multi-bit ripple
// adders. In this core they form the 4-bit "add 3" cells of the binary-to-decimal
// converter of the display.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic cout
);
  assign s    = a ^ b ^ cin;
  assign cout = (a & b) | (cin & (a ^ b));
endmodule
