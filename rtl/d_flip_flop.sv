// d_flip_flop: one-bit storage cell, the basic element of every register in the core.
//
// On the rising edge of clk the cell takes d when en is high and keeps its value
// otherwise; clr (synchronous, stronger than en) forces it to 0. q_n is the complement
// of q. The design's drawing shows a gated SR latch whose R input is the inverted data
// bit; this cell keeps that idea (one data input, no forbidden S=R state) but, as the
// text asks for, changes only at the rising clock edge. The enable and clear pins are
// this design's choice, so that registers can hold and reset.
module d_flip_flop (
  input  logic clk,
  input  logic clr,
  input  logic en,
  input  logic d,
  output logic q,
  output logic q_n
);
  always_ff @(posedge clk) begin
    if (clr)     q <= 1'b0;
    else if (en) q <= d;
  end

  assign q_n = ~q;
endmodule
