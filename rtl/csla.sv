// csla -- carry-select adder forming the significant (upper) part of the
// FBHA.
//
// Two ripple carry adders add the upper bits of A and B at the same time,
// one assuming a carry input of 0 and one of 1. A bank of Mux21 cells,
// all selected by the carry out of the lookahead part (sel), passes on the
// sum of the right one. Because both sums are ready while the lookahead
// part is still working, the upper part costs only one multiplexer delay
// after sel, as long as the ripple adders are no slower than the lookahead
// part. One extra Mux21 also selects the carry out; the carry-out mux is
// this design's addition, the sum muxes follow the paper.
//
// Interface: a, b (WIDTH bits), sel in; sum (WIDTH bits), cout out.
// Purely combinational.
module csla #(
  parameter int unsigned WIDTH = 8
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             sel,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [WIDTH-1:0] sum0, sum1;
  logic             cout0, cout1;

  rca #(.WIDTH(WIDTH), .CIN(1'b0)) u_rca0 (.a(a), .b(b), .sum(sum0), .cout(cout0));
  rca #(.WIDTH(WIDTH), .CIN(1'b1)) u_rca1 (.a(a), .b(b), .sum(sum1), .cout(cout1));

  for (genvar i = 0; i < WIDTH; i++) begin : g_mux
    mux21 u_mux (.d0(sum0[i]), .d1(sum1[i]), .sel(sel), .y(sum[i]));
  end
  mux21 u_mux_cout (.d0(cout0), .d1(cout1), .sel(sel), .y(cout));
endmodule
