// cla_module_cin -- WIDTH-bit carry-lookahead module with a carry input,
// used for every module of the lookahead part except the least significant.
//
// Each bit forms generate G_i = A_i & B_i and propagate P_i = A_i ^ B_i.
// Every lookahead carry is its own two-level sum of products of these and
// the carry input C0:
//   C_{i+1} = G_i | P_i G_{i-1} | ... | P_i..P_1 G_0 | P_i..P_0 C0
// so no carry waits for another inside the module, and the carry input
// reaches the carry out through one AND and one OR level. Sum_i = P_i ^ C_i.
// The FBHA uses a delay-optimized gate arrangement of these equations for
// its 4-bit module; that exact arrangement is not reproduced here. This
// module writes the same Boolean function flat and leaves the gate mapping
// to synthesis. Widths other than 4 (2, 6, 8) use the same equations.
//
// Interface: a, b (WIDTH bits), cin in; sum (WIDTH bits), cout = C_WIDTH
// out. Purely combinational.
module cla_module_cin #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [WIDTH-1:0] g, p;
  logic [WIDTH:0]   c;     // c[i] is the carry into bit i, c[WIDTH] the carry out

  always_comb begin
    logic term;
    g    = a & b;
    p    = a ^ b;
    c[0] = cin;
    for (int i = 0; i < int'(WIDTH); i++) begin
      // P_i..P_0 C0
      term = cin;
      for (int k = 0; k <= i; k++) term = term & p[k];
      c[i+1] = term;
      // P_i..P_{j+1} G_j for j = 0..i
      for (int j = 0; j <= i; j++) begin
        term = g[j];
        for (int k = j + 1; k <= i; k++) term = term & p[k];
        c[i+1] = c[i+1] | term;
      end
    end
    sum  = p ^ c[WIDTH-1:0];
    cout = c[WIDTH];
  end
endmodule
