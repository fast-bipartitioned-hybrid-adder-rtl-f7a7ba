// cla -- K-bit carry-lookahead adder, the less significant part of the
// FBHA.
//
// The K bits are cut into NMOD lookahead modules of MSIZE[0..NMOD-1] bits,
// MSIZE[0] being the least significant. The first module has no carry
// input (cla_module_nocin); every other module (cla_module_cin) takes the
// lookahead carry out of the module below it, so the carry crosses each
// module boundary through one AND-OR level. The carry out of the last
// module is this adder's cout, which selects the carry-select part's
// result. The default is the 24-bit part of FBHA_844422: modules of
// 2, 2, 4, 4, 4 and 8 bits from bit 0 upward. The set of sizes follows the
// paper; their order along the chain is this design's choice.
//
// Interface: a, b (K bits) in; sum (K bits), cout out. Purely
// combinational. MSIZE must add up to K; elaboration stops otherwise.
module cla
  import fbha_pkg::*;
#(
  parameter int unsigned K             = FBHA_K,
  parameter int unsigned NMOD          = FBHA_NMOD,
  parameter int unsigned MSIZE [NMOD]  = FBHA_MSIZE
) (
  input  logic [K-1:0] a,
  input  logic [K-1:0] b,
  output logic [K-1:0] sum,
  output logic         cout
);
  timeunit 1ns;
  timeprecision 1ps;

  // Bit position of module m's least significant bit.
  function automatic int unsigned lsb_of(int unsigned m);
    int unsigned s = 0;
    for (int unsigned i = 0; i < m; i++) s += MSIZE[i];
    return s;
  endfunction

  if (lsb_of(NMOD) != K) begin : g_size_check
    $error("cla: module sizes add up to %0d, not K=%0d", lsb_of(NMOD), K);
  end

  logic [NMOD:0] mc;  // mc[m] is the carry into module m
  assign mc[0] = 1'b0;

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    localparam int unsigned LO = lsb_of(m);
    localparam int unsigned W  = MSIZE[m];
    if (m == 0) begin : g_first
      cla_module_nocin #(.WIDTH(W)) u_mod (
        .a(a[LO +: W]), .b(b[LO +: W]), .sum(sum[LO +: W]), .cout(mc[m+1]));
    end else begin : g_next
      cla_module_cin #(.WIDTH(W)) u_mod (
        .a(a[LO +: W]), .b(b[LO +: W]), .cin(mc[m]), .sum(sum[LO +: W]), .cout(mc[m+1]));
    end
  end

  assign cout = mc[NMOD];
endmodule
