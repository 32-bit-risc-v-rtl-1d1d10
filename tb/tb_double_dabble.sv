// tb_double_dabble: 32-bit converter at its defaults. Corner values (0, 9, 10, 99,
// 4294967295, powers of ten, the 8-bit examples 28 and 204) and random values; each
// output digit must equal (value / 10**i) % 10, worked out here by division.
module tb_double_dabble;
  logic [31:0] bin;
  logic [39:0] bcd;
  int checks = 0, failures = 0;

  double_dabble dut (.bin(bin), .bcd(bcd));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(logic [31:0] v);
    longint unsigned rest;
    logic [39:0] e;
    bin = v; #1;
    rest = longint'(v);
    for (int i = 0; i < 10; i++) begin e[4*i +: 4] = 4'(rest % 10); rest = rest / 10; end
    checks++;
    if (bcd !== e) begin failures++; $display("FAIL %0d -> %h expected %h", v, bcd, e); end
  endtask

  initial begin
    logic [31:0] p = 1;
    try(0); try(9); try(10); try(99); try(28); try(204); try(32'hffff_ffff);
    for (int i = 0; i < 10; i++) begin try(p); try(p - 1); p = p * 10; end
    for (int i = 0; i < 3000; i++) try($urandom >> ($urandom % 32));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
