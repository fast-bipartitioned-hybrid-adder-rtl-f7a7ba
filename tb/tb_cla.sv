// tb_cla -- self-checking test of the 24-bit lookahead part at its default
// module list (2, 2, 4, 4, 4, 8 bits from bit 0 up).
//
// Applies directed corner cases (all-propagate words, a carry generated in
// bit 0 and carried through every module) and 200000 random pairs, and
// compares {cout, sum} with the integer a+b. For every boundary between two
// modules it counts how often a carry crossed it and how often none did,
// using an independent integer sum of the bits below the boundary; a
// boundary that never saw both counts as a failure.
module tb_cla;
  import fbha_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int K = FBHA_K;

  logic [K-1:0] a, b, sum;
  logic         cout;
  int checks = 0, failures = 0;
  int n_cross [FBHA_NMOD];   // carry into module m was 1
  int n_quiet [FBHA_NMOD];   // carry into module m was 0
  int n_full_chain = 0;      // carry born in bit 0 reached the carry out

  cla dut (.a(a), .b(b), .sum(sum), .cout(cout));

  task automatic apply(logic [K-1:0] x, logic [K-1:0] y);
    longint unsigned expect_v;
    int unsigned lo;
    a = x;
    b = y;
    #1;
    expect_v = longint'(x) + longint'(y);
    checks++;
    if ({cout, sum} != (K+1)'(expect_v)) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h -> %h expected %h", x, y, {cout, sum}, expect_v);
    end
    lo = 0;
    for (int m = 0; m < int'(FBHA_NMOD); m++) begin
      if (m > 0) begin
        if (1 == (((longint'(x) & ((64'd1 << lo) - 1)) + (longint'(y) & ((64'd1 << lo) - 1))) >> lo))
          n_cross[m]++;
        else
          n_quiet[m]++;
      end
      lo += FBHA_MSIZE[m];
    end
    if (x[0] & y[0] && ((x ^ y) | K'(1)) == '1) n_full_chain++;
  endtask

  initial begin
    foreach (n_cross[m]) begin n_cross[m] = 0; n_quiet[m] = 0; end
    apply('0, '0);
    apply('1, '0);
    apply('1, K'(1));
    apply('1, '1);
    apply(K'(1), '1);
    apply(K'('h555555), K'('haaaaab));
    for (int i = 0; i < 200000; i++) apply(K'($urandom), K'($urandom));
    for (int m = 1; m < int'(FBHA_NMOD); m++) begin
      $display("boundary into module %0d: carry=%0d no carry=%0d", m, n_cross[m], n_quiet[m]);
      if (n_cross[m] == 0 || n_quiet[m] == 0) failures++;
    end
    $display("full-length carry chains: %0d", n_full_chain);
    if (n_full_chain == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
