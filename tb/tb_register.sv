// tb_register: 32-bit register at its default width. Random loads, holds and clears;
// q is compared after every clock edge with a reference word.
module tb_register;
  logic clk = 0, clr, en;
  logic [31:0] d, q, ref_q;
  int checks = 0, failures = 0;

  register dut (.clk(clk), .clr(clr), .en(en), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 1; en = 0; d = '0;
    @(posedge clk); #1; ref_q = '0;
    for (int i = 0; i < 300; i++) begin
      clr = ($urandom % 10) == 0; en = $urandom % 2; d = $urandom;
      @(posedge clk);
      if (clr) ref_q = '0; else if (en) ref_q = d;
      #1;
      checks++;
      if (q !== ref_q) begin failures++; $display("FAIL step %0d: q=%h expected %h", i, q, ref_q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
