// tb_hd_head_mem: loads a small C x M head with random weights at c*M+m and
// reads them back in random order, checking the one-cycle read latency.
module tb_hd_head_mem;
  localparam int unsigned C = 5, M = 4, AW = $clog2(C * M);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [C][M];
  int checks = 0, failures = 0;

  hd_head_mem #(.C(C), .M(M), .FW(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int c = 0; c < C; c++)
      for (int m = 0; m < M; m++) begin
        model[c][m] = $urandom;
        we <= 1; waddr <= AW'(c * M + m); wdata <= model[c][m];
        @(posedge clk);
      end
    we <= 0;
    for (int i = 0; i < 200; i++) begin
      int c, m;
      c = $urandom_range(0, C - 1);
      m = $urandom_range(0, M - 1);
      raddr <= AW'(c * M + m);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[c][m]) begin
        failures++;
        $display("FAIL W[%0d][%0d] = %h expected %h", c, m, rdata, model[c][m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
