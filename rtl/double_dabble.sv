// double_dabble: binary to binary-coded-decimal converter (shift and add 3).
//
// The BIN_W-bit unsigned input is shifted, most significant bit first, into a row of
// DIGITS four-bit decimal digits. Before each of the BIN_W shifts, every digit that
// is 5 or more gets 3 added (add3 cell), so that the shift carries into the next
// digit as a decimal carry would. After the last shift the row holds the decimal
// value: digit i (units first) in bcd[4*i+3:4*i]. The whole array is unrolled, so
// the converter is combinational, with a depth of BIN_W add-3 stages. DIGITS must be
// at least ceil(BIN_W*log10(2)), 10 for 32 bits; the top digit's overflow is lost.
// With 32 bits the top digit is at most 4 (2**32-1 = 4294967295), so bcd[39] is
// always 0; it is kept so that every digit has the same four-bit shape.
// The array of add-3 cells is the design's (drawn for 8 bits and 3 digits); 32 bits
// and 10 digits match the 32-bit data path and the ten-digit display.
module double_dabble #(
  parameter int unsigned BIN_W  = 32,
  parameter int unsigned DIGITS = 10
) (
  input  logic [BIN_W-1:0]    bin,
  output logic [4*DIGITS-1:0] bcd
);
  logic [4*DIGITS-1:0] stage [BIN_W+1];

  assign stage[0] = '0;

  for (genvar s = 0; s < BIN_W; s++) begin : g_shift
    logic [4*DIGITS-1:0] adj;
    for (genvar d = 0; d < DIGITS; d++) begin : g_digit
      add3 u_add3 (.d(stage[s][4*d +: 4]), .q(adj[4*d +: 4]));
    end
    assign stage[s+1] = {adj[4*DIGITS-2:0], bin[BIN_W-1-s]};
  end

  assign bcd = stage[BIN_W];
endmodule
