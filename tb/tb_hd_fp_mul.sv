// tb_hd_fp_mul: checks the binding multiplier against the double-precision
// reference for random operands, zeros, overflow, underflow flush and exact
// rounding ties.
module tb_hd_fp_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  hd_fp_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] exp);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h expected %h", ta, tb_, y, exp);
    end
  endtask

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x0, x1;
      x0 = frand(60);
      x1 = frand(60);
      check(x0, x1, fmul(x0, x1));
    end
    // wide exponent range: overflow and flush to zero
    for (int i = 0; i < 5000; i++) begin
      logic [31:0] x0, x1;
      x0 = frand(126);
      x1 = frand(126);
      check(x0, x1, fmul(x0, x1));
    end
    check(32'h3f800000, 32'h40000000, 32'h40000000);   // 1*2
    check(32'h00000000, 32'h40490fdb, 32'h00000000);   // 0*pi
    check(32'h80000000, 32'h40490fdb, 32'h80000000);   // -0*pi
    check(32'h3f800001, 32'h3f800001, 32'h3f800002);   // (1+u)^2 rounds to 1+2u
    check(32'h3fc00000, 32'h3fc00000, 32'h40100000);   // 1.5*1.5 = 2.25
    check(32'h7f000000, 32'h40000000, 32'h7f800000);   // overflow -> inf
    check(32'h00800000, 32'h3f000000, 32'h00000000);   // min normal * 0.5 -> flush
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
