// tb_hd_argmax: random score vectors (mixed signs, close values and forced
// ties) with a varying number of active classes; index and value are compared
// with a reference that compares the scores as real numbers and keeps the
// first maximum.
module tb_hd_argmax;
  import fp_ref_pkg::*;
  localparam int unsigned C = 8;
  logic [31:0] scores [C];
  logic [3:0] cfg_class;
  logic [2:0] idx;
  logic [31:0] max;
  int checks = 0, failures = 0;

  hd_argmax #(.C(C), .FW(32)) dut (.*);

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3000; k++) begin
      int n, best;
      n = $urandom_range(1, C);
      for (int c = 0; c < C; c++) scores[c] = frand(k % 3 == 0 ? 1 : 10);
      if (k % 5 == 0) scores[$urandom_range(0, C - 1)] = scores[$urandom_range(0, C - 1)];
      cfg_class = 4'(n);
      #1;
      best = 0;
      for (int c = 1; c < n; c++) if (f2r(scores[c]) > f2r(scores[best])) best = c;
      checks++;
      if (32'(idx) != best || max !== scores[best]) begin
        failures++;
        $display("FAIL argmax n=%0d got %0d expected %0d", n, idx, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
