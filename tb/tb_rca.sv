// tb_rca -- exhaustive self-checking test of the two ripple carry adders
// of the carry-select part.
//
// Instantiates rca at its default width (8) twice, with carry input 0 and
// with carry input 1, applies all 65536 pairs (a, b) and compares each
// {cout, sum} with the integer sums a+b and a+b+1.
module tb_rca;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int W = 8;

  logic [W-1:0] a, b, sum0, sum1;
  logic         cout0, cout1;
  int checks = 0, failures = 0;

  rca #(.WIDTH(W), .CIN(1'b0)) dut0 (.a(a), .b(b), .sum(sum0), .cout(cout0));
  rca #(.WIDTH(W), .CIN(1'b1)) dut1 (.a(a), .b(b), .sum(sum1), .cout(cout1));

  initial begin
    for (int x = 0; x < (1 << W); x++) begin
      for (int y = 0; y < (1 << W); y++) begin
        a = W'(x);
        b = W'(y);
        #1;
        checks += 2;
        if ({cout0, sum0} != (W+1)'(x + y)) begin
          failures++;
          if (failures < 10) $display("FAIL cin=0 a=%0d b=%0d -> %0d", x, y, {cout0, sum0});
        end
        if ({cout1, sum1} != (W+1)'(x + y + 1)) begin
          failures++;
          if (failures < 10) $display("FAIL cin=1 a=%0d b=%0d -> %0d", x, y, {cout1, sum1});
        end
      end
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
