// tb_cla_adder: 32-bit carry-lookahead adder at its defaults. Corner operands (0,
// all ones, carries running through every group) and random operands; {cout,sum}
// must equal the 33-bit sum a+b+cin.
module tb_cla_adder;
  logic [31:0] a, b, sum;
  logic cin, cout;
  int checks = 0, failures = 0;

  cla_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input logic [31:0] x, input logic [31:0] y, input logic ci);
    logic [32:0] expect_v;
    a = x; b = y; cin = ci; #1;
    expect_v = {1'b0, x} + {1'b0, y} + 33'(ci);
    checks++;
    if ({cout, sum} !== expect_v) begin
      failures++; $display("FAIL %h + %h + %b = %b_%h, expected %h", x, y, ci, cout, sum, expect_v);
    end
  endtask

  initial begin
    try(32'h0, 32'h0, 0);
    try(32'hffff_ffff, 32'h0, 1);
    try(32'hffff_ffff, 32'hffff_ffff, 1);
    try(32'h7fff_ffff, 32'h1, 0);
    try(32'h0fff_fff0, 32'h0000_0010, 0);
    try(32'haaaa_aaaa, 32'h5555_5555, 1);
    for (int i = 0; i < 2000; i++) try($urandom, $urandom, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
