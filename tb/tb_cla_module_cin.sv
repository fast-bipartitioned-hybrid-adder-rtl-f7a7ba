// tb_cla_module_cin -- exhaustive self-checking test of the lookahead
// module with carry input, at every module width the FBHA configurations
// use (2, 4, 6 and 8 bits).
//
// For each width all (a, b, cin) combinations are applied and {cout, sum}
// is compared with the integer a+b+cin.
module tb_cla_module_cin;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [1:0] a2, b2, s2;  logic ci2, co2;
  logic [3:0] a4, b4, s4;  logic ci4, co4;
  logic [5:0] a6, b6, s6;  logic ci6, co6;
  logic [7:0] a8, b8, s8;  logic ci8, co8;

  cla_module_cin #(.WIDTH(2)) dut2 (.a(a2), .b(b2), .cin(ci2), .sum(s2), .cout(co2));
  cla_module_cin             dut4 (.a(a4), .b(b4), .cin(ci4), .sum(s4), .cout(co4));
  cla_module_cin #(.WIDTH(6)) dut6 (.a(a6), .b(b6), .cin(ci6), .sum(s6), .cout(co6));
  cla_module_cin #(.WIDTH(8)) dut8 (.a(a8), .b(b8), .cin(ci8), .sum(s8), .cout(co8));

  task automatic check(int w, int x, int y, int c, int got);
    checks++;
    if (got != x + y + c) begin
      failures++;
      if (failures < 10) $display("FAIL w=%0d a=%0d b=%0d cin=%0d -> %0d", w, x, y, c, got);
    end
  endtask

  initial begin
    for (int c = 0; c < 2; c++)
      for (int x = 0; x < 256; x++)
        for (int y = 0; y < 256; y++) begin
          a8 = 8'(x); b8 = 8'(y); ci8 = 1'(c);
          a6 = 6'(x); b6 = 6'(y); ci6 = 1'(c);
          a4 = 4'(x); b4 = 4'(y); ci4 = 1'(c);
          a2 = 2'(x); b2 = 2'(y); ci2 = 1'(c);
          #1;
          check(8, x, y, c, int'({co8, s8}));
          if (x < 64 && y < 64) check(6, x, y, c, int'({co6, s6}));
          if (x < 16 && y < 16) check(4, x, y, c, int'({co4, s4}));
          if (x < 4 && y < 4)   check(2, x, y, c, int'({co2, s2}));
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
