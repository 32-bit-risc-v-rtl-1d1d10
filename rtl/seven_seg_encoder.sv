// seven_seg_encoder: one decimal digit to the seven segments of a display.
//
// The 4-bit digit is first decoded into 16 one-hot lines; each segment line is then
// the OR of the lines of the digits that light it. seg[0] is segment A (top), then
// B, C, D, E, F and seg[6] = G (middle); 1 lights a segment. Codes 10 to 15 light
// nothing. Combinational. The decoder-then-OR structure follows the design; the
// digit shapes are the usual ones (7 without F, 9 with D).
module seven_seg_encoder (
  input  logic [3:0] digit,
  output logic [6:0] seg
);
  // Segment patterns, G..A, for digits 0-9.
  localparam logic [6:0] PATTERN [10] = '{
    7'b0111111, 7'b0000110, 7'b1011011, 7'b1001111, 7'b1100110,
    7'b1101101, 7'b1111101, 7'b0000111, 7'b1111111, 7'b1101111
  };

  logic [15:0] line;

  assign line = 16'b1 << digit;

  always_comb begin
    seg = '0;
    for (int d = 0; d < 10; d++) seg |= {7{line[d]}} & PATTERN[d];
  end
endmodule
