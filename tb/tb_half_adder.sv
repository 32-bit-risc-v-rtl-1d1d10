// tb_half_adder: all four input pairs; {c,s} must equal a+b.
module tb_half_adder;
  logic a, b, s, c;
  int checks = 0, failures = 0;

  half_adder dut (.a(a), .b(b), .s(s), .c(c));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i); #1;
      checks++;
      if ({c, s} !== 2'(int'(a) + int'(b))) begin failures++; $display("FAIL a=%b b=%b -> c=%b s=%b", a, b, c, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
