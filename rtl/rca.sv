// rca -- WIDTH-bit ripple carry adder with a constant carry input CIN.
//
// The carry-select part holds two of these, one computing a+b (CIN=0) and
// one computing a+b+1 (CIN=1). Bits 1..WIDTH-1 are full adders chained
// carry-out to carry-in. Bit 0 of the CIN=0 adder is a half adder, so an
// 8-bit adder is seven full adders and one half adder, as the FBHA's
// carry-select part is described. Bit 0 of the CIN=1 adder is a full adder
// with its carry input tied to 1; this design's choice, and a synthesis
// tool reduces it to an XNOR and an OR.
//
// Interface: a, b in; sum (WIDTH bits) and cout out. Purely combinational,
// delay grows linearly with WIDTH.
module rca #(
  parameter int unsigned WIDTH = 8,
  parameter bit          CIN   = 1'b0
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [WIDTH:0] c;  // c[i] is the carry into bit i

  if (CIN) begin : g_bit0_one
    full_adder u_fa0 (.a(a[0]), .b(b[0]), .cin(1'b1), .sum(sum[0]), .cout(c[1]));
  end else begin : g_bit0_zero
    half_adder u_ha0 (.a(a[0]), .b(b[0]), .sum(sum[0]), .cout(c[1]));
  end
  assign c[0] = CIN;

  for (genvar i = 1; i < WIDTH; i++) begin : g_fa
    full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
  end

  assign cout = c[WIDTH];
endmodule
