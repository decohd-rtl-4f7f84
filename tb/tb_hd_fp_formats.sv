// tb_hd_fp_formats: the binding multiplier and bundling adder built for the
// reduced precisions the method is also evaluated in: fp16 (5 exponent,
// 10 mantissa bits), bfloat16 (8, 7), the 8-bit layouts E5M2 and E4M3 and
// the 4-bit layout E2M1. Random operands over a wide exponent range,
// including overflow and flush-to-zero cases, are checked against a
// double-precision reference rounded to the target layout with the same
// rules (round to nearest even, flush below the normal range). The datapath
// keeps IEEE-style codes in every layout (all-ones exponent is infinity), so
// E5M2 is the usual 8-bit format, while its E4M3 tops out at 240 rather than
// the 448 of the variant that gives up infinities, and E2M1 holds only
// +-{1, 1.5, 2, 3}, zero and infinity.
module tb_hd_fp_formats;
  import fp_ref_pkg::*;
  logic [15:0] a16, b16, p16, s16, ab, bb, pb, sb;
  logic [7:0]  a52, b52, p52, s52, a43, b43, p43, s43;
  logic [3:0]  a21, b21, p21, s21;
  int checks = 0, failures = 0;

  hd_fp_mul #(.EW(5), .MW(10)) u_mul16 (.a(a16), .b(b16), .y(p16));
  hd_fp_add #(.EW(5), .MW(10)) u_add16 (.a(a16), .b(b16), .y(s16));
  hd_fp_mul #(.EW(8), .MW(7))  u_mulbf (.a(ab), .b(bb), .y(pb));
  hd_fp_add #(.EW(8), .MW(7))  u_addbf (.a(ab), .b(bb), .y(sb));
  hd_fp_mul #(.EW(5), .MW(2))  u_mul52 (.a(a52), .b(b52), .y(p52));
  hd_fp_add #(.EW(5), .MW(2))  u_add52 (.a(a52), .b(b52), .y(s52));
  hd_fp_mul #(.EW(4), .MW(3))  u_mul43 (.a(a43), .b(b43), .y(p43));
  hd_fp_add #(.EW(4), .MW(3))  u_add43 (.a(a43), .b(b43), .y(s43));
  hd_fp_mul #(.EW(2), .MW(1))  u_mul21 (.a(a21), .b(b21), .y(p21));
  hd_fp_add #(.EW(2), .MW(1))  u_add21 (.a(a21), .b(b21), .y(s21));

  task automatic cmp(input string what, input logic [15:0] got, input logic [31:0] exp,
                     input logic [15:0] x, input logic [15:0] y);
    checks++;
    if (got !== exp[15:0]) begin
      failures++;
      if (failures < 10) $display("FAIL %s %h, %h -> %h expected %h", what, x, y, got, exp[15:0]);
    end
  endtask

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      int sp16, spbf;
      sp16 = (i % 4 == 0) ? 14 : 5;
      spbf = (i % 4 == 0) ? 126 : 20;
      a16 = 16'(frandx(5, 10, sp16));
      b16 = 16'(frandx(5, 10, sp16));
      ab  = 16'(frandx(8, 7, spbf));
      bb  = 16'(frandx(8, 7, spbf));
      a52 = 8'(frandx(5, 2, (i % 4 == 0) ? 14 : 5));
      b52 = 8'(frandx(5, 2, (i % 4 == 0) ? 14 : 5));
      a43 = 8'(frandx(4, 3, (i % 4 == 0) ? 6 : 3));
      b43 = 8'(frandx(4, 3, (i % 4 == 0) ? 6 : 3));
      a21 = 4'(frandx(2, 1, 1));
      b21 = 4'(frandx(2, 1, 1));
      if (i % 7 == 0) b16 = {~a16[15], a16[14:10], a16[9:0] ^ 10'($urandom_range(0, 7))};
      if (i % 5 == 0) b43 = {~a43[7], a43[6:0]};
      #1;
      cmp("fp16 mul", p16, r2fx(fx2r(32'(a16), 5, 10) * fx2r(32'(b16), 5, 10), 5, 10), a16, b16);
      cmp("fp16 add", s16, r2fx(fx2r(32'(a16), 5, 10) + fx2r(32'(b16), 5, 10), 5, 10), a16, b16);
      cmp("bf16 mul", pb,  r2fx(fx2r(32'(ab), 8, 7) * fx2r(32'(bb), 8, 7), 8, 7), ab, bb);
      cmp("bf16 add", sb,  r2fx(fx2r(32'(ab), 8, 7) + fx2r(32'(bb), 8, 7), 8, 7), ab, bb);
      cmp("e5m2 mul", 16'(p52), r2fx(fx2r(32'(a52), 5, 2) * fx2r(32'(b52), 5, 2), 5, 2), 16'(a52), 16'(b52));
      cmp("e5m2 add", 16'(s52), r2fx(fx2r(32'(a52), 5, 2) + fx2r(32'(b52), 5, 2), 5, 2), 16'(a52), 16'(b52));
      cmp("e4m3 mul", 16'(p43), r2fx(fx2r(32'(a43), 4, 3) * fx2r(32'(b43), 4, 3), 4, 3), 16'(a43), 16'(b43));
      cmp("e4m3 add", 16'(s43), r2fx(fx2r(32'(a43), 4, 3) + fx2r(32'(b43), 4, 3), 4, 3), 16'(a43), 16'(b43));
      cmp("e2m1 mul", 16'(p21), r2fx(fx2r(32'(a21), 2, 1) * fx2r(32'(b21), 2, 1), 2, 1), 16'(a21), 16'(b21));
      cmp("e2m1 add", 16'(s21), r2fx(fx2r(32'(a21), 2, 1) + fx2r(32'(b21), 2, 1), 2, 1), 16'(a21), 16'(b21));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
