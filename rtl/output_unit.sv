// output_unit: decimal display of the core's results.
//
// On a rising clock edge with load (the output enable of the control word) high,
// the 32-bit value is stored in a register (shown); clr clears it. The stored value
// goes through the combinational double_dabble converter into DIGITS decimal digits
// (bcd, units first), and each digit through a seven_seg_encoder to seg[i] (seg[0]
// drives the units digit). The display therefore shows the last value latched, one
// clock edge after load. The register / double-dabble / seven-segment chain and the
// ten digits are the design's; feeding it the value written back to the register
// file is this design's choice.
module output_unit
  import rv32_pkg::*;
#(
  parameter int unsigned DIGITS = 10
) (
  input  logic              clk,
  input  logic              clr,
  input  logic              load,
  input  logic [XLEN-1:0]   value,
  output logic [XLEN-1:0]   shown,
  output logic [4*DIGITS-1:0] bcd,
  output logic [6:0]        seg [DIGITS]
);
  register #(.WIDTH(XLEN)) u_out (.clk(clk), .clr(clr), .en(load), .d(value), .q(shown));

  double_dabble #(.BIN_W(XLEN), .DIGITS(DIGITS)) u_dd (.bin(shown), .bcd(bcd));

  for (genvar i = 0; i < DIGITS; i++) begin : g_digit
    seven_seg_encoder u_seg (.digit(bcd[4*i +: 4]), .seg(seg[i]));
  end
endmodule
