// tb_decohd_depth: the deeper factorizations of the depth study at full
// size (D = 10000, 617 features, 26 classes). Two builds run side by side:
//   two layers of 3 channels   (M = 9)
//   three layers of 2 channels (M = 8)
// channel counts being 10^(1/N) rounded to integers. Projection and features
// are written to both over a shared bus; channels and head are written to
// each build with its own write enable. Each build classifies the same
// query; all scores, the predictions and the cycle counts are checked
// against an independent reference that binds h with the selected channel
// of every layer.
module tb_decohd_depth;
  import decohd_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned D = 10000, D_IN = 617, C = 26;
  localparam int unsigned L2 [2] = '{3, 3};
  localparam int unsigned L3 [3] = '{2, 2, 2};

  logic clk = 0, rst_n = 0;
  logic en2 = 0, en3 = 0;
  wr_target_e wr_tgt = TGT_FEATURE;
  logic [7:0] wr_layer = '0;
  logic [31:0] wr_addr = '0, wr_data = '0;
  logic [13:0] cfg_dim = 14'(D);
  logic [9:0] cfg_feat = 10'(D_IN);
  logic [4:0] cfg_class = 5'(C);
  logic start = 0, busy2, busy3, done2, done3;
  logic [4:0] pc2, pc3;
  logic [31:0] ps2, ps3;
  logic [31:0] sc2 [C];
  logic [31:0] sc3 [C];

  logic [31:0] wenc [D_IN][D];
  logic [31:0] x [D_IN];
  logic [31:0] h [D];
  logic [31:0] ch2 [2][3][D];
  logic [31:0] ch3 [3][2][D];
  logic [31:0] hd2 [C][9];
  logic [31:0] hd3 [C][8];

  int checks = 0, failures = 0;

  decohd_top #(.N_LAYERS(2), .L_CH(L2)) dut2 (
    .clk, .rst_n, .wr_en(en2), .wr_tgt, .wr_layer, .wr_addr, .wr_data, .cfg_dim, .cfg_feat,
    .cfg_class, .start, .start_mat(1'b0), .mat_layer(8'd0), .mat_chan(8'd0), .busy(busy2), .done(done2), .pred_class(pc2), .pred_score(ps2), .scores(sc2));
  decohd_top #(.N_LAYERS(3), .L_CH(L3)) dut3 (
    .clk, .rst_n, .wr_en(en3), .wr_tgt, .wr_layer, .wr_addr, .wr_data, .cfg_dim, .cfg_feat,
    .cfg_class, .start, .start_mat(1'b0), .mat_layer(8'd0), .mat_chan(8'd0), .busy(busy3), .done(done3), .pred_class(pc3), .pred_score(ps3), .scores(sc3));

  always #5 clk = ~clk;

  task automatic host_write(input logic e2, input logic e3, input wr_target_e tgt, input int layer,
                            input int addr, input logic [31:0] data);
    en2 <= e2; en3 <= e3; wr_tgt <= tgt; wr_layer <= 8'(layer); wr_addr <= addr; wr_data <= data;
    @(posedge clk);
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s = %h expected %h", what, got, exp);
    end
  endtask

  // reference scores of one build; digit i of path m has radix l[i], last layer fastest
  task automatic reference(input int n, input int mm, output logic [31:0] s [C], output int best);
    logic [31:0] z, t;
    int r, sel [3];
    for (int c = 0; c < int'(C); c++) s[c] = 32'h0;
    for (int m = 0; m < mm; m++) begin
      r = m;
      for (int i = n - 1; i >= 0; i--) begin
        int li;
        li = (n == 2) ? 3 : 2;
        sel[i] = r % li;
        r = r / li;
      end
      t = 32'h0;
      for (int d = 0; d < int'(D); d++) begin
        z = h[d];
        for (int i = 0; i < n; i++) z = fmul(z, (n == 2) ? ch2[i][sel[i]][d] : ch3[i][sel[i]][d]);
        t = fadd(t, fmul(z, h[d]));
      end
      for (int c = 0; c < int'(C); c++)
        s[c] = fadd(s[c], fmul((n == 2) ? hd2[c][m] : hd3[c][m], t));
    end
    best = 0;
    for (int c = 1; c < int'(C); c++) if (f2r(s[c]) > f2r(s[best])) best = c;
  endtask

  initial begin
    repeat (30_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] s2 [C];
    logic [31:0] s3 [C];
    int b2, b3, cyc, cyc2, cyc3, exp2, exp3;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int j = 0; j < int'(D_IN); j++)
      for (int d = 0; d < int'(D); d++) begin
        wenc[j][d] = frand(2);
        host_write(1, 1, TGT_ENC_W, 0, j * D + d, wenc[j][d]);
      end
    for (int j = 0; j < int'(D_IN); j++) begin
      x[j] = frand(2);
      host_write(1, 1, TGT_FEATURE, 0, j, x[j]);
    end
    for (int i = 0; i < 2; i++)
      for (int l = 0; l < 3; l++)
        for (int d = 0; d < int'(D); d++) begin
          ch2[i][l][d] = frand(1);
          host_write(1, 0, TGT_CHANNEL, i, l * D + d, ch2[i][l][d]);
        end
    for (int i = 0; i < 3; i++)
      for (int l = 0; l < 2; l++)
        for (int d = 0; d < int'(D); d++) begin
          ch3[i][l][d] = frand(1);
          host_write(0, 1, TGT_CHANNEL, i, l * D + d, ch3[i][l][d]);
        end
    for (int c = 0; c < int'(C); c++) begin
      for (int m = 0; m < 9; m++) begin
        hd2[c][m] = frand(3);
        host_write(1, 0, TGT_HEAD, 0, c * 9 + m, hd2[c][m]);
      end
      for (int m = 0; m < 8; m++) begin
        hd3[c][m] = frand(3);
        host_write(0, 1, TGT_HEAD, 0, c * 8 + m, hd3[c][m]);
      end
    end
    en2 <= 0; en3 <= 0;
    for (int d = 0; d < int'(D); d++) begin
      h[d] = 32'h0;
      for (int j = 0; j < int'(D_IN); j++) h[d] = fadd(h[d], fmul(x[j], wenc[j][d]));
    end
    reference(2, 9, s2, b2);
    reference(3, 8, s3, b3);
    exp2 = 1 + (int'(D) * int'(D_IN) + 2) + 9 * ((int'(D) + 2) + (int'(C) + 2)) + 1;
    exp3 = 1 + (int'(D) * int'(D_IN) + 2) + 8 * ((int'(D) + 2) + (int'(C) + 2)) + 1;
    @(posedge clk);
    start <= 1;
    cyc = 0; cyc2 = 0; cyc3 = 0;
    do begin
      @(posedge clk); #1; start = 0; cyc++;
      if (done2) cyc2 = cyc;
      if (done3) cyc3 = cyc;
    end while ((cyc2 == 0 || cyc3 == 0) && cyc < 10_000_000);
    for (int c = 0; c < int'(C); c++) begin
      check($sformatf("2-layer score[%0d]", c), sc2[c], s2[c]);
      check($sformatf("3-layer score[%0d]", c), sc3[c], s3[c]);
    end
    check("2-layer pred_class", 32'(pc2), 32'(b2));
    check("3-layer pred_class", 32'(pc3), 32'(b3));
    check("2-layer latency", 32'(cyc2), 32'(exp2));
    check("3-layer latency", 32'(cyc3), 32'(exp3));
    $display("2-layer: class %0d, %0d cycles; 3-layer: class %0d, %0d cycles", pc2, cyc2, pc3, cyc3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
