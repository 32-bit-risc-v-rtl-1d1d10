// add3: one cell of the shift-and-add-3 (double dabble) converter.
//
// If the 4-bit decimal digit d is 5 or more, 3 is added, so that the following
// left shift carries correctly into the next decimal digit; otherwise d passes
// unchanged. The addition is a ripple of four full_adder cells adding 0011.
// Combinational.
module add3 (
  input  logic [3:0] d,
  output logic [3:0] q
);
  logic       ge5;
  logic [3:0] k;
  logic [4:0] c;

  assign ge5  = d[3] | (d[2] & (d[1] | d[0]));
  assign k    = {2'b00, ge5, ge5};
  assign c[0] = 1'b0;

  for (genvar i = 0; i < 4; i++) begin : g_fa
    full_adder u_fa (.a(d[i]), .b(k[i]), .cin(c[i]), .s(q[i]), .cout(c[i+1]));
  end
endmodule
