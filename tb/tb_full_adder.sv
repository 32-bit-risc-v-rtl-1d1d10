// tb_full_adder: all eight input combinations; {cout,s} must equal a+b+cin.
module tb_full_adder;
  logic a, b, cin, s, cout;
  int checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      {a, b, cin} = 3'(i); #1;
      checks++;
      if ({cout, s} !== 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++; $display("FAIL a=%b b=%b cin=%b -> cout=%b s=%b", a, b, cin, cout, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
