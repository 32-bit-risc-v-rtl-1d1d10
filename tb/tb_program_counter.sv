// tb_program_counter: 8-bit PC at its default width. Checks the clear, the +4 step
// (with wrap-around at 256), holding when count_en is low, loading dest when
// write_en is high, pc_plus4, and pc_read gating by read_en. Every step takes one
// clock edge.
module tb_program_counter;
  logic clk = 0, clr, count_en, write_en, read_en;
  logic [7:0] dest, pc_out, pc_read, pc_plus4, ref_pc;
  int checks = 0, failures = 0;

  program_counter dut (.clk(clk), .clr(clr), .count_en(count_en), .write_en(write_en), .dest(dest),
                       .read_en(read_en), .pc_out(pc_out), .pc_read(pc_read), .pc_plus4(pc_plus4));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_pc(input string what);
    checks++;
    if (pc_out !== ref_pc || pc_plus4 !== 8'(ref_pc + 4) || pc_read !== (read_en ? ref_pc : 8'h00)) begin
      failures++;
      $display("FAIL %s: pc=%h pc+4=%h pc_read=%h expected %h", what, pc_out, pc_plus4, pc_read, ref_pc);
    end
  endtask

  initial begin
    clr = 1; count_en = 0; write_en = 0; dest = '0; read_en = 1;
    @(posedge clk); #1; ref_pc = 0; expect_pc("clear");
    clr = 0; count_en = 1;
    // 70 sequential steps: wraps past 0xfc back to 0x00.
    for (int i = 0; i < 70; i++) begin
      @(posedge clk); #1; ref_pc = 8'(ref_pc + 4); expect_pc("increment");
    end
    for (int i = 0; i < 400; i++) begin
      count_en = ($urandom % 4) != 0; write_en = ($urandom % 3) == 0;
      dest = 8'($urandom) & 8'hfc; read_en = $urandom % 2; clr = ($urandom % 50) == 0;
      @(posedge clk);
      if (clr) ref_pc = 0; else if (count_en) ref_pc = write_en ? dest : 8'(ref_pc + 4);
      #1; expect_pc("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
