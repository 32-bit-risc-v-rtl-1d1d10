// dmem: data memory, 2**(ADDR_W-2) words of 32 bits with one read/write port.
//
// addr is a byte address (rs1 + imm). A store (we high) writes on the rising clock
// edge: a byte (sb) into the lane addr[1:0], a halfword (sh) into the half addr[1],
// or the whole word (sw); the other lanes keep their value. A load reads
// combinationally: the selected byte or halfword is sign-extended, or zero-extended
// when uns is high (lbu, lhu), to 32 bits. rdata is 0 while re is low. clr (reset)
// clears the memory. A separate load port (load_en, load_addr = word index,
// load_data) writes whole words on the rising edge, for placing initial data before
// a program runs; a store in the same cycle loses to it. Address bits below the
// access size are ignored (no misaligned accesses).
// From the original design: the 8-bit address, the register-built memory and
// loading data into it. My choices: the little-endian lane layout (as RISC-V) and
// the form of the load port.
module dmem
  import rv32_pkg::*;
#(
  parameter int unsigned ADDR_W = 8,
  parameter int unsigned WORDS  = 2**(ADDR_W-2)
) (
  input  logic              clk,
  input  logic              clr,
  input  logic              load_en,
  input  logic [ADDR_W-3:0] load_addr,
  input  logic [31:0]       load_data,
  input  logic              we,
  input  logic              re,
  input  mem_size_e         size,
  input  logic              uns,
  input  logic [ADDR_W-1:0] addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata
);
  logic [31:0] mem [WORDS];
  logic [ADDR_W-3:0] widx;
  logic [1:0]  lane;
  logic [3:0]  be;
  logic [31:0] wword, rword;

  assign widx = addr[ADDR_W-1:2];
  assign lane = addr[1:0];

  // Byte enables and the store data moved into its lanes.
  always_comb begin
    unique case (size)
      SZ_BYTE: begin be = 4'b0001 << lane;              wword = {4{wdata[7:0]}};  end
      SZ_HALF: begin be = lane[1] ? 4'b1100 : 4'b0011;  wword = {2{wdata[15:0]}}; end
      default: begin be = 4'b1111;                      wword = wdata;            end
    endcase
  end

  always_ff @(posedge clk) begin
    if (clr) begin
      for (int i = 0; i < WORDS; i++) mem[i] <= '0;
    end else if (load_en) begin
      mem[load_addr] <= load_data;
    end else if (we) begin
      for (int b = 0; b < 4; b++)
        if (be[b]) mem[widx][8*b +: 8] <= wword[8*b +: 8];
    end
  end

  // Load: pick the lane(s), then sign- or zero-extend.
  always_comb begin
    logic [7:0]  bsel;
    logic [15:0] hsel;
    rword = mem[widx];
    bsel  = rword[8*lane +: 8];
    hsel  = lane[1] ? rword[31:16] : rword[15:0];
    unique case (size)
      SZ_BYTE: rdata = {{24{bsel[7] & ~uns}}, bsel};
      SZ_HALF: rdata = {{16{hsel[15] & ~uns}}, hsel};
      default: rdata = rword;
    endcase
    if (!re) rdata = '0;
  end
endmodule
