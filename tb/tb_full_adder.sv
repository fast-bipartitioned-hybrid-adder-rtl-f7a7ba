// tb_full_adder -- exhaustive self-checking test of full_adder.
//
// Applies all 8 input combinations, one per 4 ns tick, and compares sum
// and cout with the integer sum a+b+cin. A watchdog ends the run with a
// failure if the sequence does not finish in time.
module tb_full_adder;
  timeunit 1ns;
  timeprecision 1ps;

  logic a, b, cin, sum, cout;
  int checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #4;
      checks++;
      if ({cout, sum} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0b b=%0b cin=%0b -> cout=%0b sum=%0b", a, b, cin, cout, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
