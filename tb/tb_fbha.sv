// tb_fbha -- end-to-end self-checking test of the 32-bit FBHA at its
// default parameters (K=24, lookahead modules 2,2,4,4,4,8).
//
// Like the power characterisation the adder was designed for, it applies
// 1000 random input vectors, one every 4 ns, then directed corners and a
// further 100000 random vectors. Each result {cout, sum} is compared with
// the integer a+b. The test also counts, from independent integer sums,
// how often each mechanism of the adder was used: the carry-select part
// taking its carry-0 result, taking its carry-1 result, a carry out of the
// whole adder, and a carry born in bit 0 that travels through every
// lookahead module and the carry-select part. Any that never happened
// counts as a failure. A watchdog ends the run after a fixed number of
// 4 ns ticks.
module tb_fbha;
  import fbha_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N = FBHA_N;
  localparam int K = FBHA_K;
  localparam int N_RANDOM = 100000;

  logic clk = 1'b0;
  logic [N-1:0] a, b, sum;
  logic         cout;
  int checks = 0, failures = 0, ticks = 0;
  int n_sel0 = 0, n_sel1 = 0, n_cout = 0, n_full_chain = 0;

  fbha dut (.a(a), .b(b), .sum(sum), .cout(cout));

  always #2 clk = ~clk;       // 4 ns between vectors
  always @(posedge clk) ticks++;

  task automatic apply(logic [N-1:0] x, logic [N-1:0] y);
    longint unsigned expect_v, low;
    @(posedge clk);
    a <= x;
    b <= y;
    @(negedge clk);
    expect_v = longint'(x) + longint'(y);
    low      = longint'(x[K-1:0]) + longint'(y[K-1:0]);
    checks++;
    if ({cout, sum} != (N+1)'(expect_v)) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h -> %h expected %h", x, y, {cout, sum}, expect_v);
    end
    if (low[K]) n_sel1++; else n_sel0++;
    if (expect_v[N]) n_cout++;
    if (x[0] & y[0] && ((x ^ y) | N'(1)) == '1) n_full_chain++;
  endtask

  initial begin
    a = '0;
    b = '0;
    for (int i = 0; i < 1000; i++) apply($urandom, $urandom);
    apply('0, '0);
    apply('1, N'(1));                // carry from bit 0 through all 32 bits
    apply(N'(1), '1);
    apply('1, '1);
    apply(32'h00ff_ffff, 32'h0000_0001);  // lookahead carry out alone
    apply(32'hff00_0000, 32'h0100_0000);  // carry-select carry out alone
    apply(32'h7fff_ffff, 32'h0000_0001);
    for (int i = 0; i < N_RANDOM; i++) apply($urandom, $urandom);
    $display("select carry0=%0d carry1=%0d carry_out=%0d full_chain=%0d",
             n_sel0, n_sel1, n_cout, n_full_chain);
    if (n_sel0 == 0) failures++;
    if (n_sel1 == 0) failures++;
    if (n_cout == 0) failures++;
    if (n_full_chain == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    wait (ticks >= N_RANDOM + 2000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
