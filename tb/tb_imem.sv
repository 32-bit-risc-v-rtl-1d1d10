// tb_imem: 64-word instruction memory at its defaults. Loads random words through
// the load port, reads each back by byte address (the low two address bits must be
// ignored), and checks that the clear empties the memory.
module tb_imem;
  logic clk = 0, clr, load_en;
  logic [5:0] load_addr;
  logic [31:0] load_data, instr;
  logic [7:0] addr;
  logic [31:0] ref_mem [64];
  int checks = 0, failures = 0;

  imem dut (.clk(clk), .clr(clr), .load_en(load_en), .load_addr(load_addr),
            .load_data(load_data), .addr(addr), .instr(instr));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 1; load_en = 0; load_addr = 0; load_data = 0; addr = 0;
    @(posedge clk); #1; clr = 0;
    for (int i = 0; i < 64; i++) begin
      addr = 8'(4 * i + ($urandom % 4)); #1;
      checks++; if (instr !== 32'h0) begin failures++; $display("FAIL not cleared at %0d", i); end
    end
    load_en = 1;
    for (int i = 0; i < 64; i++) begin
      load_addr = 6'(i); load_data = $urandom; ref_mem[i] = load_data;
      @(posedge clk); #1;
    end
    load_en = 0;
    for (int k = 0; k < 300; k++) begin
      automatic int i = $urandom % 64;
      addr = 8'(4 * i + ($urandom % 4)); #1;
      checks++; if (instr !== ref_mem[i]) begin failures++; $display("FAIL read %h: %h expected %h", addr, instr, ref_mem[i]); end
    end
    clr = 1; @(posedge clk); #1; clr = 0;
    addr = 8'h10; #1;
    checks++; if (instr !== 32'h0) begin failures++; $display("FAIL clear after load"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
