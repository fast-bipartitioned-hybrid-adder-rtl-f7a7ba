// half_adder -- one-bit half adder, bit 0 of the ripple carry adder whose
// carry input is 0.
//
// sum = a ^ b and cout = a & b. Purely combinational, textbook cell.
module half_adder (
  input  logic a,
  input  logic b,
  output logic sum,
  output logic cout
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    sum  = a ^ b;
    cout = a & b;
  end
endmodule
