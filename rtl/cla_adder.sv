// cla_adder: WIDTH-bit carry-lookahead adder, sum = a + b + cin, with carry-out.
//
// The design prefers carry lookahead over ripple carry but does not give the adder's
// insides; this is the plain textbook form. Each bit's propagate p = a^b and generate
// g = a&b come from a half_adder. Bits are grouped by GROUP (4 by default, this design's
// choice): inside a group every carry is computed directly from the group's carry-in
// and the p/g bits (c[i+1] = g[i] | p[i]&c[i] expanded), and the groups are chained.
// Combinational; WIDTH must be a multiple of GROUP.
module cla_adder #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned GROUP = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);
  localparam int unsigned NGROUPS = WIDTH / GROUP;

  logic [WIDTH-1:0] p, g;
  logic [WIDTH:0]   c;
  logic [NGROUPS:0] gc;   // carry into each group

  for (genvar i = 0; i < WIDTH; i++) begin : g_pg
    half_adder u_ha (.a(a[i]), .b(b[i]), .s(p[i]), .c(g[i]));
  end

  assign gc[0] = cin;

  for (genvar k = 0; k < NGROUPS; k++) begin : g_group
    logic [GROUP:0] cg;   // carries of this group, cg[0] = group carry-in

    // Lookahead: cg[j] = OR over m<j of (g[m] & p[m+1..j-1])  OR  (cg[0] & p[0..j-1]).
    always_comb begin
      cg[0] = gc[k];
      for (int j = 1; j <= GROUP; j++) begin
        logic cj, term;
        cj = 1'b0;
        for (int m = 0; m < j; m++) begin
          term = g[k*GROUP+m];
          for (int n = m + 1; n < j; n++) term = term & p[k*GROUP+n];
          cj = cj | term;
        end
        term = gc[k];
        for (int n = 0; n < j; n++) term = term & p[k*GROUP+n];
        cg[j] = cj | term;
      end
    end

    assign c[k*GROUP +: GROUP] = cg[GROUP-1:0];
    assign gc[k+1]             = cg[GROUP];
  end

  assign c[WIDTH] = gc[NGROUPS];

  assign sum  = p ^ c[WIDTH-1:0];
  assign cout = c[WIDTH];
endmodule
