// tb_cla_module_nocin -- exhaustive self-checking test of the lookahead
// module without carry input, at widths 2, 4, 6 and 8.
//
// All (a, b) pairs are applied and {cout, sum} is compared with a+b.
module tb_cla_module_nocin;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [1:0] a2, b2, s2;  logic co2;
  logic [3:0] a4, b4, s4;  logic co4;
  logic [5:0] a6, b6, s6;  logic co6;
  logic [7:0] a8, b8, s8;  logic co8;

  cla_module_nocin #(.WIDTH(2)) dut2 (.a(a2), .b(b2), .sum(s2), .cout(co2));
  cla_module_nocin             dut4 (.a(a4), .b(b4), .sum(s4), .cout(co4));
  cla_module_nocin #(.WIDTH(6)) dut6 (.a(a6), .b(b6), .sum(s6), .cout(co6));
  cla_module_nocin #(.WIDTH(8)) dut8 (.a(a8), .b(b8), .sum(s8), .cout(co8));

  task automatic check(int w, int x, int y, int got);
    checks++;
    if (got != x + y) begin
      failures++;
      if (failures < 10) $display("FAIL w=%0d a=%0d b=%0d -> %0d", w, x, y, got);
    end
  endtask

  initial begin
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y++) begin
        a8 = 8'(x); b8 = 8'(y);
        a6 = 6'(x); b6 = 6'(y);
        a4 = 4'(x); b4 = 4'(y);
        a2 = 2'(x); b2 = 2'(y);
        #1;
        check(8, x, y, int'({co8, s8}));
        if (x < 64 && y < 64) check(6, x, y, int'({co6, s6}));
        if (x < 16 && y < 16) check(4, x, y, int'({co4, s4}));
        if (x < 4 && y < 4)   check(2, x, y, int'({co2, s2}));
      end
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
