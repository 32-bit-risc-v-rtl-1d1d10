// program_counter: holds the byte address of the instruction being executed.
//
// Each rising clock edge with count_en high the PC either steps to the next
// instruction (PC + 4, instructions being four bytes) or, when write_en (the select
// pin) is high, loads dest, the jump or branch destination. clr resets it to 0.
// pc_out always shows the PC and feeds the instruction memory; pc_read is the same
// value gated by read_en (0 when read_en is low) and feeds the ALU. pc_plus4 is the
// address of the next sequential instruction, used as the link value of jal/jalr.
//
// Structure as in the design: a register of d_flip_flop cells, an adder whose constant
// is 4, and a 2:1 selector in front of the register. The 8-bit width is the design's.
// The incrementer is a chain of half adders on bits [PC_W-1:2] (bits 1:0 pass
// unchanged), this design's choice. The PC wraps at 2**PC_W.
module program_counter #(
  parameter int unsigned PC_W = 8
) (
  input  logic            clk,
  input  logic            clr,
  input  logic            count_en,
  input  logic            write_en,
  input  logic [PC_W-1:0] dest,
  input  logic            read_en,
  output logic [PC_W-1:0] pc_out,
  output logic [PC_W-1:0] pc_read,
  output logic [PC_W-1:0] pc_plus4
);
  logic [PC_W-1:0] pc_next;
  logic [PC_W-1:0] next_in [2];
  logic [PC_W:2]   carry;

  // PC + 4: half-adder chain starting at bit 2 with a carry-in of 1.
  assign carry[2] = 1'b1;
  for (genvar i = 2; i < PC_W; i++) begin : g_inc
    half_adder u_ha (.a(pc_out[i]), .b(carry[i]), .s(pc_plus4[i]), .c(carry[i+1]));
  end
  assign pc_plus4[1:0] = pc_out[1:0];

  assign next_in[0] = pc_plus4;
  assign next_in[1] = dest;

  mux #(.SEL_W(1), .WIDTH(PC_W)) u_sel (.in(next_in), .sel(write_en), .out(pc_next));

  register #(.WIDTH(PC_W)) u_pc (.clk(clk), .clr(clr), .en(count_en), .d(pc_next), .q(pc_out));

  assign pc_read = read_en ? pc_out : '0;
endmodule
