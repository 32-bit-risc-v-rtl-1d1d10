// tb_register_file: 32 x 32 register file at its defaults. Random writes and reads on
// both ports against a reference array: x0 must stay 0, a write is visible from the
// next cycle, both ports read 0 while re is low, and the clear zeroes everything.
module tb_register_file;
  logic clk = 0, clr, re, we3;
  logic [4:0] a1, a2, a3;
  logic [31:0] wd3, rd1, rd2;
  logic [31:0] ref_r [32];
  int checks = 0, failures = 0;

  register_file dut (.clk(clk), .clr(clr), .re(re), .a1(a1), .a2(a2), .a3(a3),
                     .we3(we3), .wd3(wd3), .rd1(rd1), .rd2(rd2));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_reads();
    #1;
    checks++;
    if (rd1 !== (re ? ref_r[a1] : 32'h0) || rd2 !== (re ? ref_r[a2] : 32'h0)) begin
      failures++;
      $display("FAIL re=%b x%0d=%h x%0d=%h expected %h %h", re, a1, rd1, a2, rd2, ref_r[a1], ref_r[a2]);
    end
  endtask

  initial begin
    clr = 1; re = 1; we3 = 0; a1 = 0; a2 = 0; a3 = 0; wd3 = 0;
    @(posedge clk); #1; clr = 0;
    for (int i = 0; i < 32; i++) ref_r[i] = 0;
    for (int k = 0; k < 1500; k++) begin
      a1 = 5'($urandom); a2 = 5'($urandom); a3 = 5'($urandom); wd3 = $urandom;
      we3 = $urandom % 2; re = ($urandom % 8) != 0;
      check_reads();
      @(posedge clk);
      if (we3 && a3 != 0) ref_r[a3] = wd3;
      check_reads();
    end
    we3 = 0; clr = 1; @(posedge clk); #1; clr = 0; re = 1;
    for (int i = 0; i < 32; i++) ref_r[i] = 0;
    for (int i = 0; i < 32; i++) begin a1 = 5'(i); a2 = 5'(31 - i); check_reads(); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
