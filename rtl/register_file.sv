// register_file: 32 registers of 32 bits, two read ports and one write port.
//
// Read ports: rd1 = x[a1] and rd2 = x[a2], combinational, each through a 32:1 mux;
// both read 0 while re (register read enable) is low. Write port: on the rising
// clock edge with we3 high, wd3 is stored in x[a3]. Register x0 always reads 0 and
// ignores writes, as RV32I requires. clr (reset) clears all registers. A value
// written in one cycle is read in the next (no write-to-read bypass).
// Registers x1..x31 are each one instance of the 32-bit register block (one
// flip-flop per bit), loaded when we3 is high and a3 selects it; x0 is a constant.
// From the original design: the port names and sizes, and a 1-kbit store made of
// 32-bit registers. This design's choices: the x0 rule (from RV32I) and the clear.
module register_file #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned XLEN  = 32,
  localparam int unsigned AW   = $clog2(NREGS)
) (
  input  logic            clk,
  input  logic            clr,
  input  logic            re,
  input  logic [AW-1:0]   a1,
  input  logic [AW-1:0]   a2,
  input  logic [AW-1:0]   a3,
  input  logic            we3,
  input  logic [XLEN-1:0] wd3,
  output logic [XLEN-1:0] rd1,
  output logic [XLEN-1:0] rd2
);
  logic [XLEN-1:0] regs [NREGS];
  logic [XLEN-1:0] view [2**AW];
  logic [XLEN-1:0] m1, m2;

  for (genvar r = 0; r < NREGS; r++) begin : g_reg
    if (r == 0) begin : g_zero
      assign regs[r] = '0;
    end else begin : g_word
      register #(.WIDTH(XLEN)) u_reg (.clk(clk), .clr(clr), .en(we3 && a3 == AW'(r)), .d(wd3), .q(regs[r]));
    end
  end

  always_comb begin
    for (int i = 0; i < 2**AW; i++) view[i] = (i == 0 || i >= NREGS) ? '0 : regs[i];
  end

  mux #(.SEL_W(AW), .WIDTH(XLEN)) u_rd1 (.in(view), .sel(a1), .out(m1));
  mux #(.SEL_W(AW), .WIDTH(XLEN)) u_rd2 (.in(view), .sel(a2), .out(m2));

  assign rd1 = re ? m1 : '0;
  assign rd2 = re ? m2 : '0;
endmodule
