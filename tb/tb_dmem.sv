// tb_dmem: data memory at its defaults (256 bytes). A byte-array reference model is
// updated by random byte, halfword and word stores; random loads of every kind
// (signed and unsigned byte and halfword, word) are compared with the reference,
// assembled little-endian and extended here. Also checks that re low gives 0 and
// that the clear empties the memory. The memory is first filled with random words
// through the load port; later load-port writes are mixed into the stores, sometimes
// in the same cycle as a store, where the load port must win.
module tb_dmem;
  import rv32_pkg::*;
  logic clk = 0, clr, we, re, uns, load_en;
  logic [5:0] load_addr;
  logic [31:0] load_data;
  mem_size_e size;
  logic [7:0] addr;
  logic [31:0] wdata, rdata;
  logic [7:0] ref_b [256];
  int checks = 0, failures = 0;

  dmem dut (.clk(clk), .clr(clr), .load_en(load_en), .load_addr(load_addr), .load_data(load_data), .we(we), .re(re), .size(size), .uns(uns),
            .addr(addr), .wdata(wdata), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_load(logic [7:0] a, mem_size_e sz, logic u);
    logic [7:0] base;
    case (sz)
      SZ_BYTE: return u ? {24'h0, ref_b[a]} : {{24{ref_b[a][7]}}, ref_b[a]};
      SZ_HALF: begin
        base = a & 8'hfe;
        return u ? {16'h0, ref_b[base+1], ref_b[base]}
                 : {{16{ref_b[base+1][7]}}, ref_b[base+1], ref_b[base]};
      end
      default: begin
        base = a & 8'hfc;
        return {ref_b[base+3], ref_b[base+2], ref_b[base+1], ref_b[base]};
      end
    endcase
  endfunction

  initial begin
    clr = 1; we = 0; re = 1; uns = 0; size = SZ_WORD; addr = 0; wdata = 0;
    load_en = 0; load_addr = 0; load_data = 0;
    @(posedge clk); #1; clr = 0;
    load_en = 1;
    for (int i = 0; i < 64; i++) begin
      load_addr = 6'(i); load_data = $urandom;
      for (int b = 0; b < 4; b++) ref_b[4 * i + b] = load_data[8*b +: 8];
      @(posedge clk); #1;
    end
    load_en = 0;
    for (int k = 0; k < 1500; k++) begin
      addr = 8'($urandom); size = mem_size_e'($urandom % 3); uns = $urandom % 2;
      if ($urandom % 8 == 0) begin
        // load-port write, with a store in the same cycle half the time
        load_addr = 6'($urandom); load_data = $urandom; load_en = 1;
        wdata = $urandom; we = $urandom % 2;
        @(posedge clk); #1; load_en = 0; we = 0;
        for (int b = 0; b < 4; b++) ref_b[4 * load_addr + b] = load_data[8*b +: 8];
      end else if ($urandom % 2) begin
        // store
        wdata = $urandom; we = 1;
        @(posedge clk); #1; we = 0;
        case (size)
          SZ_BYTE: ref_b[addr] = wdata[7:0];
          SZ_HALF: begin ref_b[addr & 8'hfe] = wdata[7:0]; ref_b[(addr & 8'hfe) + 1] = wdata[15:8]; end
          default: for (int b = 0; b < 4; b++) ref_b[(addr & 8'hfc) + 8'(b)] = wdata[8*b +: 8];
        endcase
      end else begin
        re = ($urandom % 8) != 0; #1;
        checks++;
        if (rdata !== (re ? ref_load(addr, size, uns) : 32'h0)) begin
          failures++;
          $display("FAIL load addr=%h size=%0d uns=%b re=%b: %h expected %h", addr, size, uns, re, rdata,
                   re ? ref_load(addr, size, uns) : 32'h0);
        end
        re = 1;
      end
    end
    clr = 1; @(posedge clk); #1; clr = 0;
    size = SZ_WORD;
    for (int i = 0; i < 64; i++) begin
      addr = 8'(4 * i); #1;
      checks++; if (rdata !== 32'h0) begin failures++; $display("FAIL clear word %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
