// tb_csla -- exhaustive self-checking test of the 8-bit carry-select adder.
//
// Drives every (a, b, sel) combination and compares {cout, sum} with the
// integer a+b+sel: the select plays the part of the carry coming from the
// lookahead part. Counts how often each select value and a carry out were
// exercised and fails if any never occurred.
module tb_csla;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int W = 8;

  logic [W-1:0] a, b, sum;
  logic         sel, cout;
  int checks = 0, failures = 0;
  int n_sel0 = 0, n_sel1 = 0, n_cout = 0;

  csla #(.WIDTH(W)) dut (.a(a), .b(b), .sel(sel), .sum(sum), .cout(cout));

  initial begin
    for (int s = 0; s < 2; s++) begin
      for (int x = 0; x < (1 << W); x++) begin
        for (int y = 0; y < (1 << W); y++) begin
          a   = W'(x);
          b   = W'(y);
          sel = 1'(s);
          #1;
          checks++;
          if (s == 0) n_sel0++; else n_sel1++;
          if (cout) n_cout++;
          if ({cout, sum} != (W+1)'(x + y + s)) begin
            failures++;
            if (failures < 10) $display("FAIL sel=%0d a=%0d b=%0d -> %0d", s, x, y, {cout, sum});
          end
        end
      end
    end
    if (n_sel0 == 0 || n_sel1 == 0 || n_cout == 0) failures++;
    $display("sel0=%0d sel1=%0d carry_out=%0d", n_sel0, n_sel1, n_cout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
