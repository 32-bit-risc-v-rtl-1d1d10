// imem: instruction memory, 2**(ADDR_W-2) words of 32 bits, built from registers.
//
// The core only reads it: instr is the word at byte address addr (bits [ADDR_W-1:2]
// select the word, bits 1:0 are ignored), combinationally. A separate load port
// writes the program: on a rising edge with load_en high, load_data is stored at
// word index load_addr. clr (reset) clears every word to 0, which the control ROM
// treats as a stop. The 8-bit address and 32-bit words are the design's; reading it
// by byte address and the synchronous load port are this design's choices.
module imem #(
  parameter int unsigned ADDR_W = 8,
  parameter int unsigned WORDS  = 2**(ADDR_W-2)
) (
  input  logic              clk,
  input  logic              clr,
  input  logic              load_en,
  input  logic [ADDR_W-3:0] load_addr,
  input  logic [31:0]       load_data,
  input  logic [ADDR_W-1:0] addr,
  output logic [31:0]       instr
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (clr) begin
      for (int i = 0; i < WORDS; i++) mem[i] <= '0;
    end else if (load_en) begin
      mem[load_addr] <= load_data;
    end
  end

  assign instr = mem[addr[ADDR_W-1:2]];
endmodule
