// tb_hd_encoder: a 6-feature, 8-dimension encoder is loaded with a random
// projection and random features; the stream of h elements is compared with
// the reference h_d = sum_j x_j*W[j][d] accumulated in feature order, for the
// full size and a reduced feature/dimension count. Every element must be
// written exactly once and 'done' must follow 'start' by dim*feat+2 cycles.
module tb_hd_encoder;
  import fp_ref_pkg::*;
  localparam int unsigned D_IN = 6, D = 8;
  logic clk = 0, rst_n = 0, x_we = 0, w_we = 0, start = 0;
  logic [2:0] x_addr = '0;
  logic [5:0] w_addr = '0;
  logic [31:0] x_data = '0, w_data = '0;
  logic [3:0] cfg_dim = 4'(D);
  logic [2:0] cfg_feat = 3'(D_IN);
  logic h_we, busy, done;
  logic [2:0] h_addr;
  logic [31:0] h_data;
  logic [31:0] x [D_IN];
  logic [31:0] w [D_IN][D];
  logic [31:0] got [D];
  int nwr [D];
  int checks = 0, failures = 0;

  hd_encoder #(.D_IN(D_IN), .D(D)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (h_we) begin
    got[h_addr] = h_data;
    nwr[h_addr]++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int j = 0; j < D_IN; j++)
      for (int d = 0; d < D; d++) begin
        w[j][d] = frand(3);
        w_we <= 1; w_addr <= 6'(j * D + d); w_data <= w[j][d];
        @(posedge clk);
      end
    w_we <= 0;
    for (int q = 0; q < 3; q++) begin
      int nd, nf, cyc;
      nd = (q == 1) ? 5 : D;
      nf = (q == 1) ? 4 : D_IN;
      for (int j = 0; j < D_IN; j++) begin
        x[j] = frand(3);
        x_we <= 1; x_addr <= 3'(j); x_data <= x[j];
        @(posedge clk);
      end
      x_we <= 0;
      cfg_dim <= 4'(nd); cfg_feat <= 3'(nf);
      for (int d = 0; d < D; d++) nwr[d] = 0;
      @(posedge clk);
      start <= 1;
      cyc = 0;
      do begin @(posedge clk); #1; start = 0; cyc++; end while (!done);
      @(posedge clk); #1;
      for (int d = 0; d < D; d++) begin
        logic [31:0] r;
        r = 32'h0;
        for (int j = 0; j < nf; j++) r = fadd(r, fmul(x[j], w[j][d]));
        checks++;
        if (d < nd && (nwr[d] != 1 || got[d] !== r)) begin
          failures++;
          $display("FAIL q%0d h[%0d] = %h (%0d writes) expected %h", q, d, got[d], nwr[d], r);
        end else if (d >= nd && nwr[d] != 0) begin
          failures++;
          $display("FAIL q%0d h[%0d] written beyond cfg_dim", q, d);
        end
      end
      checks++;
      if (cyc != nd * nf + 2) begin
        failures++;
        $display("FAIL latency %0d expected %0d", cyc, nd * nf + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
