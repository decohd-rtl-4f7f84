// tb_decohd_latent: deployment from latents on the default build
// (D = 10000, 617 features, 26 classes, one layer of 10 channels).
// The model is delivered as ten 256-element latents a_l and one fixed
// random projector R (256 x 10000), the smallest latent size the method
// studies. The projector goes into the projection memory and each latent
// into the feature buffer in turn; start_mat then writes A_l = a_l R into the
// channel bank. Afterwards the query projection W_enc is loaded back, the
// head and a query are loaded, and one query is classified. The reference
// forms the channels and the scores in the datapath's operation order, so
// every score, the prediction, each materialise latency
// (1 + (10000 * 256 + 2) cycles) and the query latency must match exactly.
// Latents longer than the 617-word feature buffer (the method's 1024 and
// 4096) cannot be materialised by this build.
module tb_decohd_latent;
  import decohd_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned D = 10000, D_IN = 617, C = 26, L = 10, M = 10;
  localparam int unsigned DLAT = 256;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  wr_target_e wr_tgt = TGT_FEATURE;
  logic [7:0] wr_layer = '0;
  logic [31:0] wr_addr = '0, wr_data = '0;
  logic [13:0] cfg_dim = 14'(D);
  logic [9:0] cfg_feat = 10'(DLAT);
  logic [4:0] cfg_class = 5'(C);
  logic start = 0, busy, done;
  logic start_mat = 0;
  logic [7:0] mat_layer = '0, mat_chan = '0;
  logic [4:0] pred_class;
  logic [31:0] pred_score;
  logic [31:0] scores [C];

  logic [31:0] r [DLAT][D];
  logic [31:0] wenc [D_IN][D];
  logic [31:0] chan [L][D];
  logic [31:0] head [C][M];
  logic [31:0] x [D_IN];
  logic [31:0] h [D];
  logic [31:0] s [C];

  int checks = 0, failures = 0, n_mat = 0;

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

  task automatic wait_done(output int cyc);
    cyc = 0;
    do begin @(posedge clk); #1; start = 0; start_mat = 0; cyc++; end
    while (!done && cyc < 10_000_000);
  endtask

  initial begin
    repeat (60_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] a [DLAT];
    logic [31:0] z, t;
    int cyc, best;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // projector R in the projection memory
    for (int j = 0; j < int'(DLAT); j++)
      for (int d = 0; d < int'(D); d++) begin
        r[j][d] = frand(2);
        host_write(TGT_ENC_W, j * D + d, r[j][d]);
      end
    // each channel from its latent
    for (int l = 0; l < int'(L); l++) begin
      for (int j = 0; j < int'(DLAT); j++) begin
        a[j] = frand(2);
        host_write(TGT_FEATURE, j, a[j]);
      end
      wr_en <= 0;
      for (int d = 0; d < int'(D); d++) begin
        chan[l][d] = 32'h0;
        for (int j = 0; j < int'(DLAT); j++) chan[l][d] = fadd(chan[l][d], fmul(a[j], r[j][d]));
      end
      @(posedge clk);
      start_mat <= 1; mat_layer <= 8'd0; mat_chan <= 8'(l);
      wait_done(cyc);
      check($sformatf("materialise channel %0d latency", l), 32'(cyc), 32'(1 + (D * DLAT + 2)));
      n_mat++;
    end
    // query projection, head and query
    for (int j = 0; j < int'(D_IN); j++)
      for (int d = 0; d < int'(D); d++) begin
        wenc[j][d] = frand(2);
        host_write(TGT_ENC_W, j * D + d, wenc[j][d]);
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
    cfg_feat <= 10'(D_IN);
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
    @(posedge clk);
    start <= 1;
    wait_done(cyc);
    for (int c = 0; c < int'(C); c++) check($sformatf("score[%0d]", c), scores[c], s[c]);
    check("pred_class", 32'(pred_class), 32'(best));
    check("pred_score", pred_score, s[best]);
    check("query latency", 32'(cyc), 32'(1 + (D * D_IN + 2) + M * ((D + 2) + (C + 2)) + 1));
    checks++;
    if (n_mat != int'(L)) failures++;
    $display("%0d channels materialised from %0d-element latents; class %0d", n_mat, DLAT, pred_class);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
