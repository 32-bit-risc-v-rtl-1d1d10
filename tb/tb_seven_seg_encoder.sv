// tb_seven_seg_encoder: all 16 codes. The lit segments of each digit are listed here
// by letter (A top, B upper right, C lower right, D bottom, E lower left, F upper
// left, G middle); codes 10-15 must light nothing.
module tb_seven_seg_encoder;
  logic [3:0] digit;
  logic [6:0] seg;
  int checks = 0, failures = 0;

  seven_seg_encoder dut (.digit(digit), .seg(seg));

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string lit [10] = '{"ABCDEF", "BC", "ABDEG", "ABCDG", "BCFG", "ACDFG", "ACDEFG", "ABC", "ABCDEFG", "ABCDFG"};
    for (int v = 0; v < 16; v++) begin
      automatic logic [6:0] e = '0;
      if (v < 10) for (int c = 0; c < lit[v].len(); c++) e[int'(lit[v][c]) - 65] = 1'b1;
      digit = 4'(v); #1;
      checks++;
      if (seg !== e) begin failures++; $display("FAIL digit %0d: %b expected %b", v, seg, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
