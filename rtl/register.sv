// register: WIDTH-bit register built from one d_flip_flop per bit.
//
// All cells share the clock, the clear and the load enable: on a rising edge with en
// high the word d is stored, with clr high the register is cleared, otherwise it holds.
// q can be read at any time. The one-cell-per-bit structure follows the 4-bit and
// 32-bit registers of the design; the default width of 32 is the design's; the
// synchronous clear is this design's choice.
module register #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             clr,
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] q_n_unused;

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    d_flip_flop u_ff (.clk(clk), .clr(clr), .en(en), .d(d[i]), .q(q[i]), .q_n(q_n_unused[i]));
  end
endmodule
