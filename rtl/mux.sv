// mux: selects one of 2**SEL_W inputs of WIDTH bits with SEL_W select lines.
//
// Purely combinational: out = in[sel]. Used for the register file's two read ports
// (32 inputs), the program counter's next-address choice (2 inputs) and the choice of
// the value written back to the register file (4 inputs).
module mux #(
  parameter int unsigned SEL_W = 1,
  parameter int unsigned WIDTH = 32
) (
  input  logic [WIDTH-1:0] in [2**SEL_W],
  input  logic [SEL_W-1:0] sel,
  output logic [WIDTH-1:0] out
);
  assign out = in[sel];
endmodule
