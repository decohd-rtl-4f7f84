// tb_hd_score_unit: C = 5 classes, M = 3 paths, with the head memory
// modelled in the testbench. Two queries: scores are cleared, then each path
// m delivers a random t, and after every update the scores are compared with
// s_c = s_c + W[c][m]*t computed by the reference (inactive classes must stay
// unchanged). The start-to-done latency must be cfg_class+2.
module tb_hd_score_unit;
  import fp_ref_pkg::*;
  localparam int unsigned C = 5, M = 3;
  logic clk = 0, rst_n = 0, clear = 0, start = 0;
  logic [1:0] m = '0;
  logic [31:0] t = '0;
  logic [2:0] cfg_class = 3'(C);
  logic [3:0] w_raddr;
  logic [31:0] w_rdata;
  logic [31:0] scores [C];
  logic busy, done;
  logic [31:0] w [C * M];
  logic [31:0] ref_s [C];
  int checks = 0, failures = 0;

  hd_score_unit #(.C(C), .M(M)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) w_rdata <= w[w_raddr];

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < C * M; i++) w[i] = frand(4);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int q = 0; q < 4; q++) begin
      int n;
      n = (q % 2 == 0) ? C : 3;
      cfg_class <= 3'(n);
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      for (int c = 0; c < C; c++) ref_s[c] = 32'h0;
      for (int p = 0; p < M; p++) begin
        int cyc;
        logic [31:0] tv;
        tv = frand(6);
        m <= 2'(p); t <= tv;
        @(posedge clk);
        start <= 1;
        cyc = 0;
        do begin @(posedge clk); #1; start = 0; cyc++; end while (!done);
        for (int c = 0; c < n; c++) ref_s[c] = fadd(ref_s[c], fmul(w[c * M + p], tv));
        for (int c = 0; c < C; c++) begin
          checks++;
          if (scores[c] !== ref_s[c]) begin
            failures++;
            $display("FAIL q%0d path %0d s[%0d] = %h expected %h", q, p, c, scores[c], ref_s[c]);
          end
        end
        checks++;
        if (cyc != n + 2) begin
          failures++;
          $display("FAIL latency %0d expected %0d", cyc, n + 2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
