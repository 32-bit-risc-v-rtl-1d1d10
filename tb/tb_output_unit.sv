// tb_output_unit: output unit at its defaults (32 bits, 10 digits). Random values are
// offered with load high or low; after each clock edge shown must be the last value
// loaded, bcd its decimal digits and every seg[i] the segment pattern of digit i
// (patterns listed here by digit).
module tb_output_unit;
  logic clk = 0, clr, load;
  logic [31:0] value, shown, ref_v;
  logic [39:0] bcd;
  logic [6:0]  seg [10];
  int checks = 0, failures = 0;

  output_unit dut (.clk(clk), .clr(clr), .load(load), .value(value), .shown(shown), .bcd(bcd), .seg(seg));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [6:0] PAT [10] = '{7'h3f, 7'h06, 7'h5b, 7'h4f, 7'h66, 7'h6d, 7'h7d, 7'h07, 7'h7f, 7'h6f};

  task automatic expect_shown();
    longint unsigned rest = longint'(ref_v);
    logic ok = (shown === ref_v);
    for (int i = 0; i < 10; i++) begin
      ok &= (bcd[4*i +: 4] === 4'(rest % 10)) && (seg[i] === PAT[rest % 10]);
      rest = rest / 10;
    end
    checks++;
    if (!ok) begin failures++; $display("FAIL shown=%0d bcd=%h expected %0d", shown, bcd, ref_v); end
  endtask

  initial begin
    clr = 1; load = 0; value = 0;
    @(posedge clk); #1; clr = 0; ref_v = 0; expect_shown();
    for (int i = 0; i < 500; i++) begin
      value = $urandom >> ($urandom % 32); load = $urandom % 2;
      @(posedge clk); if (load) ref_v = value; #1;
      expect_shown();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
