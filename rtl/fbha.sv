// fbha -- N-bit fast bipartitioned hybrid adder (top).
//
// An N-bit adder built from two different adders placed side by side. The
// low K bits go to a carry-lookahead adder (cla), whose delay grows only
// slowly with width. The high N-K bits go to a carry-select adder (csla):
// its two ripple adders compute the upper sum for carry 0 and carry 1 while
// the lookahead adder is still busy, and the lookahead carry out then picks
// one through a row of 2-to-1 multiplexers. When the ripple adders are no
// slower than the lookahead part, the adder's delay is the K-bit lookahead
// delay plus one multiplexer, less than that of an N-bit lookahead or
// carry-select adder. Sum is the concatenation {csla sum, cla sum}.
//
// Defaults: N=32, K=24 with lookahead modules 2,2,4,4,4,8 from bit 0 up,
// the configuration called FBHA_844422. The other configurations (other K,
// other module lists) are parameter settings.
//
// Interface: a, b (N bits) in; sum (N bits) and cout (carry out of bit N-1,
// this design's addition) out. No carry input, no clock: purely
// combinational.
module fbha
  import fbha_pkg::*;
#(
  parameter int unsigned N             = FBHA_N,
  parameter int unsigned K             = FBHA_K,
  parameter int unsigned NMOD          = FBHA_NMOD,
  parameter int unsigned MSIZE [NMOD]  = FBHA_MSIZE
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] sum,
  output logic         cout
);
  timeunit 1ns;
  timeprecision 1ps;

  if (K == 0 || K >= N) begin : g_k_check
    $error("fbha: K=%0d must lie between 1 and N-1=%0d", K, N - 1);
  end

  logic cla_cout;  // carry out of the lookahead part = select of the carry-select part

  cla #(.K(K), .NMOD(NMOD), .MSIZE(MSIZE)) u_cla (
    .a(a[K-1:0]), .b(b[K-1:0]), .sum(sum[K-1:0]), .cout(cla_cout));

  csla #(.WIDTH(N - K)) u_csla (
    .a(a[N-1:K]), .b(b[N-1:K]), .sel(cla_cout), .sum(sum[N-1:K]), .cout(cout));
endmodule
