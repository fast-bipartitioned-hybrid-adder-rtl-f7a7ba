// mux21 -- one-bit 2-to-1 multiplexer. The carry-select part has one per
// result bit; all of them share the lookahead part's carry out as select.
//
// y = sel ? d1 : d0, written as the AND-OR form of the gate. Purely
// combinational.
module mux21 (
  input  logic d0,   // chosen when sel = 0
  input  logic d1,   // chosen when sel = 1
  input  logic sel,
  output logic y
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb y = (d0 & ~sel) | (d1 & sel);
endmodule
