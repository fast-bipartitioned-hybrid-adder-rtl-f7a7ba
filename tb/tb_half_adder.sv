// tb_half_adder -- exhaustive self-checking test of half_adder.
//
// Applies all 4 input combinations, one per 4 ns tick, and compares sum
// and cout with the integer sum a+b. A watchdog ends the run with a
// failure if the sequence does not finish in time.
module tb_half_adder;
  timeunit 1ns;
  timeprecision 1ps;

  logic a, b, sum, cout;
  int checks = 0, failures = 0;

  half_adder dut (.a(a), .b(b), .sum(sum), .cout(cout));

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #4;
      checks++;
      if ({cout, sum} != 2'(int'(a) + int'(b))) begin
        failures++;
        $display("FAIL a=%0b b=%0b -> cout=%0b sum=%0b", a, b, cout, sum);
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
