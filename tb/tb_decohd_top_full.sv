// tb_decohd_top_full: one complete classification with the design at its
// built size (D = 10000, 617 input features, 26 classes, one layer of 10
// channels, binary32). The host loads the full 617 x 10000 projection, the
// ten channel hypervectors and the 26 x 10 head with random values, writes
// one feature vector and starts. The testbench computes h, the ten path
// similarities, the 26 scores and the argmax on its own, in the same
// operation order, and checks every score, the predicted class and score,
// and the cycle count 1 + (D*617 + 2) + 10*((D + 2) + (26 + 2)) + 1.
module tb_decohd_top_full;
  import decohd_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned D = 10000, D_IN = 617, C = 26, L = 10, M = 10;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  wr_target_e wr_tgt = TGT_FEATURE;
  logic [7:0] wr_layer = '0;
  logic [31:0] wr_addr = '0, wr_data = '0;
  logic [13:0] cfg_dim = 14'(D);
  logic [9:0] cfg_feat = 10'(D_IN);
  logic [4:0] cfg_class = 5'(C);
  logic start = 0, busy, done;
  logic start_mat = 0;             // channels are loaded, not materialised
  logic [7:0] mat_layer = '0, mat_chan = '0;
  logic [4:0] pred_class;
  logic [31:0] pred_score;
  logic [31:0] scores [C];

  logic [31:0] wenc [D_IN][D];
  logic [31:0] chan [L][D];
  logic [31:0] head [C][M];
  logic [31:0] x [D_IN];
  logic [31:0] h [D];
  logic [31:0] s [C];

  int checks = 0, failures = 0;

  decohd_top dut (.*);
  always #5 clk = ~clk;

  task automatic host_write(input wr_target_e tgt, input int addr, input logic [31:0] data);
    wr_en <= 1; wr_tgt <= tgt; wr_layer <= 8'd0; wr_addr <= addr; wr_data <= data;
    @(posedge clk);
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s = %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] z, t;
    int cyc, best, expc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int j = 0; j < int'(D_IN); j++)
      for (int d = 0; d < int'(D); d++) begin
        wenc[j][d] = frand(2);
        host_write(TGT_ENC_W, j * D + d, wenc[j][d]);
      end
    for (int l = 0; l < int'(L); l++)
      for (int d = 0; d < int'(D); d++) begin
        chan[l][d] = frand(2);
        host_write(TGT_CHANNEL, l * D + d, chan[l][d]);
      end
    for (int c = 0; c < int'(C); c++)
      for (int m = 0; m < int'(M); m++) begin
        head[c][m] = frand(3);
        host_write(TGT_HEAD, c * M + m, head[c][m]);
      end
    for (int j = 0; j < int'(D_IN); j++) begin
      x[j] = frand(2);
      host_write(TGT_FEATURE, j, x[j]);
    end
    wr_en <= 0;
    // reference
    for (int d = 0; d < int'(D); d++) begin
      h[d] = 32'h0;
      for (int j = 0; j < int'(D_IN); j++) h[d] = fadd(h[d], fmul(x[j], wenc[j][d]));
    end
    for (int c = 0; c < int'(C); c++) s[c] = 32'h0;
    for (int m = 0; m < int'(M); m++) begin
      t = 32'h0;
      for (int d = 0; d < int'(D); d++) begin
        z = fmul(h[d], chan[m][d]);
        t = fadd(t, fmul(z, h[d]));
      end
      for (int c = 0; c < int'(C); c++) s[c] = fadd(s[c], fmul(head[c][m], t));
    end
    best = 0;
    for (int c = 1; c < int'(C); c++) if (f2r(s[c]) > f2r(s[best])) best = c;
    expc = 1 + (int'(D) * int'(D_IN) + 2) + int'(M) * ((int'(D) + 2) + (int'(C) + 2)) + 1;
    @(posedge clk);
    start <= 1;
    cyc = 0;
    do begin @(posedge clk); #1; start = 0; cyc++; end while (!done && cyc < 10_000_000);
    for (int c = 0; c < int'(C); c++) check($sformatf("score[%0d]", c), scores[c], s[c]);
    check("pred_class", 32'(pred_class), 32'(best));
    check("pred_score", pred_score, s[best]);
    check("latency", 32'(cyc), 32'(expc));
    $display("predicted class %0d, %0d cycles", pred_class, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
