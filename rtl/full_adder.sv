// full_adder -- one-bit full adder, the cell the carry-select part's ripple
// carry adders are chained from.
//
// sum = a ^ b ^ cin and cout = majority(a, b, cin). Purely combinational.
// The adder is the textbook cell; nothing beyond its name is specific to
// the FBHA.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    sum  = a ^ b ^ cin;
    cout = (a & b) | (cin & (a ^ b));
  end
endmodule
