// tb_d_flip_flop: random stimulus on d, en and clr; after every rising edge q must
// equal a reference bit updated by the same rules (clr wins, then en loads d), and
// q_n must be its complement.
module tb_d_flip_flop;
  logic clk = 0, clr, en, d, q, q_n, ref_q;
  int checks = 0, failures = 0;

  d_flip_flop dut (.clk(clk), .clr(clr), .en(en), .d(d), .q(q), .q_n(q_n));

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 1; en = 0; d = 0;
    @(posedge clk); #1; ref_q = 0;
    for (int i = 0; i < 300; i++) begin
      clr = ($urandom % 8) == 0; en = $urandom % 2; d = $urandom % 2;
      @(posedge clk);
      if (clr) ref_q = 0; else if (en) ref_q = d;
      #1;
      checks++;
      if (q !== ref_q || q_n !== ~ref_q) begin
        failures++; $display("FAIL step %0d: q=%b q_n=%b expected %b", i, q, q_n, ref_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
