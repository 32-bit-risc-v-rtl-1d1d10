// tb_mux: a 32-input, 32-bit mux (SEL_W = 5, as in the register file's read ports)
// and the default 2-input mux; out must be the selected input for every select value.
module tb_mux;
  logic [31:0] in32 [32];
  logic [31:0] in2  [2];
  logic [4:0]  sel32;
  logic        sel2;
  logic [31:0] out32, out2;
  int checks = 0, failures = 0;

  mux #(.SEL_W(5), .WIDTH(32)) dut32 (.in(in32), .sel(sel32), .out(out32));
  mux                          dut2  (.in(in2),  .sel(sel2),  .out(out2));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 10; r++) begin
      for (int i = 0; i < 32; i++) in32[i] = $urandom;
      in2[0] = $urandom; in2[1] = $urandom;
      for (int s = 0; s < 32; s++) begin
        sel32 = 5'(s); sel2 = s[0]; #1;
        checks++;
        if (out32 !== in32[s]) begin failures++; $display("FAIL sel=%0d out=%h expected %h", s, out32, in32[s]); end
        checks++;
        if (out2 !== in2[s % 2]) begin failures++; $display("FAIL 2:1 sel=%0d", s % 2); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
