// tb_hd_fp_add: checks the bundling adder against the double-precision
// reference: random sums and differences with close and distant exponents,
// cancellation, zeros and rounding ties.
module tb_hd_fp_add;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  hd_fp_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] exp);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h expected %h", ta, tb_, y, exp);
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
      x0 = frand(20);
      x1 = frand(20);
      check(x0, x1, fadd(x0, x1));
    end
    // close exponents and near-cancellation
    for (int i = 0; i < 10000; i++) begin
      logic [31:0] x0, x1;
      x0 = frand(1);
      x1 = {~x0[31], x0[30:23], x0[22:0] ^ 23'($urandom_range(0, 255))};
      check(x0, x1, fadd(x0, x1));
    end
    check(32'h3f800000, 32'h3f800000, 32'h40000000);   // 1+1
    check(32'h3f800000, 32'hbf800000, 32'h00000000);   // 1-1 = +0
    check(32'h00000000, 32'h40490fdb, 32'h40490fdb);   // 0+pi
    check(32'h80000000, 32'h80000000, 32'h80000000);   // -0 + -0
    check(32'h3f800000, 32'h33800000, 32'h3f800000);   // 1 + 2^-24 tie -> even (1)
    check(32'h3f800001, 32'h33800000, 32'h3f800002);   // 1+u + 2^-24 tie -> even (1+2u)
    check(32'h3f800000, 32'h33800001, 32'h3f800001);   // just above the tie rounds up
    check(32'h4b7fffff, 32'h3f800000, 32'h4b800000);   // carry-out renormalise
    check(32'h00800001, 32'h80800000, 32'h00000000);   // difference below normal range -> flush
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
