// tb_fbha_variants -- the 32-bit FBHA in every partition and lookahead
// module list of its design-space study, checked side by side.
//
// Partitions (carry-select bits _ lookahead bits, lookahead built from
// 4-bit modules): 4_28, 8_24, 12_20, 16_16. Module lists for the 8_24
// partition (most significant module first in the name): 2x12, 4x6, 6x4,
// 8x3, 84444, 66444, 844422 (the default), 664422. All eleven distinct
// adders get the same 1000 random vectors, one every 4 ns, plus corner
// cases, and each result is compared with the integer a+b.
module tb_fbha_variants;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N  = 32;
  localparam int NV = 11;

  typedef int unsigned s7_t  [7];
  typedef int unsigned s6_t  [6];
  typedef int unsigned s5_t  [5];
  typedef int unsigned s4_t  [4];
  typedef int unsigned s3_t  [3];
  typedef int unsigned s12_t [12];

  // Module widths, least significant module first.
  localparam s7_t SIZES_V0 = '{4,4,4,4,4,4,4};
  localparam s6_t SIZES_V1 = '{4,4,4,4,4,4};
  localparam s5_t SIZES_V2 = '{4,4,4,4,4};
  localparam s4_t SIZES_V3 = '{4,4,4,4};
  localparam s12_t SIZES_V4 = '{2,2,2,2,2,2,2,2,2,2,2,2};
  localparam s4_t SIZES_V5 = '{6,6,6,6};
  localparam s3_t SIZES_V6 = '{8,8,8};
  localparam s5_t SIZES_V7 = '{4,4,4,4,8};
  localparam s5_t SIZES_V8 = '{4,4,4,6,6};
  localparam s6_t SIZES_V9 = '{2,2,4,4,4,8};
  localparam s6_t SIZES_V10 = '{2,2,4,4,6,6};

  logic [N-1:0] a, b;
  logic [N-1:0] sum  [NV];
  logic         cout [NV];
  int checks = 0, failures = 0;
  string names [NV] = '{"FBHA_4_28", "FBHA_8_24 (4x6)", "FBHA_12_20", "FBHA_16_16",
                        "FBHA_2x12", "FBHA_6x4", "FBHA_8x3", "FBHA_84444",
                        "FBHA_66444", "FBHA_844422", "FBHA_664422"};

  fbha #(.K(28), .NMOD(7),  .MSIZE(SIZES_V0))
    v0 (.a(a), .b(b), .sum(sum[0]), .cout(cout[0]));
  fbha #(.K(24), .NMOD(6),  .MSIZE(SIZES_V1))
    v1 (.a(a), .b(b), .sum(sum[1]), .cout(cout[1]));
  fbha #(.K(20), .NMOD(5),  .MSIZE(SIZES_V2))
    v2 (.a(a), .b(b), .sum(sum[2]), .cout(cout[2]));
  fbha #(.K(16), .NMOD(4),  .MSIZE(SIZES_V3))
    v3 (.a(a), .b(b), .sum(sum[3]), .cout(cout[3]));
  fbha #(.K(24), .NMOD(12), .MSIZE(SIZES_V4))
    v4 (.a(a), .b(b), .sum(sum[4]), .cout(cout[4]));
  fbha #(.K(24), .NMOD(4),  .MSIZE(SIZES_V5))
    v5 (.a(a), .b(b), .sum(sum[5]), .cout(cout[5]));
  fbha #(.K(24), .NMOD(3),  .MSIZE(SIZES_V6))
    v6 (.a(a), .b(b), .sum(sum[6]), .cout(cout[6]));
  fbha #(.K(24), .NMOD(5),  .MSIZE(SIZES_V7))
    v7 (.a(a), .b(b), .sum(sum[7]), .cout(cout[7]));
  fbha #(.K(24), .NMOD(5),  .MSIZE(SIZES_V8))
    v8 (.a(a), .b(b), .sum(sum[8]), .cout(cout[8]));
  fbha #(.K(24), .NMOD(6),  .MSIZE(SIZES_V9))
    v9 (.a(a), .b(b), .sum(sum[9]), .cout(cout[9]));
  fbha #(.K(24), .NMOD(6),  .MSIZE(SIZES_V10))
    v10 (.a(a), .b(b), .sum(sum[10]), .cout(cout[10]));

  task automatic apply(logic [N-1:0] x, logic [N-1:0] y);
    longint unsigned expect_v;
    a = x;
    b = y;
    #4;
    expect_v = longint'(x) + longint'(y);
    for (int v = 0; v < NV; v++) begin
      checks++;
      if ({cout[v], sum[v]} != (N+1)'(expect_v)) begin
        failures++;
        if (failures < 10) $display("FAIL %s a=%h b=%h -> %h", names[v], x, y, {cout[v], sum[v]});
      end
    end
  endtask

  initial begin
    apply('0, '0);
    apply('1, N'(1));
    apply('1, '1);
    for (int k = 0; k < N; k++) apply(N'(1) << k, ~(N'(1) << k) | (N'(1) << k));
    for (int i = 0; i < 1000; i++) apply($urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
