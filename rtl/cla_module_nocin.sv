// cla_module_nocin -- WIDTH-bit carry-lookahead module without a carry
// input, the least significant module of the lookahead part.
//
// The same lookahead equations as cla_module_cin with C0 = 0, so the
// product terms holding C0 disappear and the module is smaller:
//   C_{i+1} = G_i | P_i G_{i-1} | ... | P_i..P_1 G_0,  C_0 = 0
//   Sum_i = P_i ^ C_i (Sum_0 = P_0).
// As for cla_module_cin, the Boolean function is written flat and the gate
// mapping is left to synthesis.
//
// Interface: a, b (WIDTH bits) in; sum (WIDTH bits), cout = C_WIDTH out.
// Purely combinational.
module cla_module_nocin #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
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
    c[0] = 1'b0;
    for (int i = 0; i < int'(WIDTH); i++) begin
      c[i+1] = 1'b0;
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
