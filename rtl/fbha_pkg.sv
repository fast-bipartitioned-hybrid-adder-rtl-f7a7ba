// fbha_pkg -- sizes shared by the fast bipartitioned hybrid adder (FBHA).
//
// The FBHA splits an N-bit addition into a K-bit carry-lookahead part (the
// low bits) and an (N-K)-bit carry-select part (the high bits). The values
// below are the configuration the design is built around: a 32-bit adder
// with a 24-bit lookahead part made of six modules of 8, 4, 4, 4, 2 and 2
// bits, and an 8-bit carry-select part ("FBHA_844422"). The order of the
// modules along the carry chain is this design's choice: index 0 is the
// least significant module, so the two 2-bit modules take bits 3:0 and the
// 8-bit module takes bits 23:16.
package fbha_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned FBHA_N    = 32;  // total adder width
  localparam int unsigned FBHA_K    = 24;  // width of the lookahead part
  localparam int unsigned FBHA_NMOD = 6;   // lookahead modules in the cascade

  typedef int unsigned msize_t [FBHA_NMOD];
  // Module widths, least significant module first.
  localparam msize_t FBHA_MSIZE = '{2, 2, 4, 4, 4, 8};
endpackage
