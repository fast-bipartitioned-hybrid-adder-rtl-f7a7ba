// tb_mux21 -- exhaustive self-checking test of mux21.
//
// Applies all 8 combinations of d0, d1 and sel, one per 4 ns tick, and
// checks that y equals d1 when sel is 1 and d0 otherwise.
module tb_mux21;
  timeunit 1ns;
  timeprecision 1ps;

  logic d0, d1, sel, y;
  int checks = 0, failures = 0;

  mux21 dut (.d0(d0), .d1(d1), .sel(sel), .y(y));

  initial begin
    for (int v = 0; v < 8; v++) begin
      {sel, d1, d0} = 3'(v);
      #4;
      checks++;
      if (y != (sel ? d1 : d0)) begin
        failures++;
        $display("FAIL sel=%0b d1=%0b d0=%0b -> y=%0b", sel, d1, d0, y);
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
