// tb_decohd_top: end-to-end test of the classifier at a reduced size:
// D = 24, 5 input features, 6 classes, two layers of 3 and 2 channels
// (M = 6 bound paths). The host loads a random projection, channel bank and
// bundling head, then runs four queries, one with reduced runtime sizes.
// For each query the testbench computes, independently of the RTL, the
// encoded h, t_m for every path, the class scores and the argmax in the same
// operation order, and compares all scores, the predicted class and score,
// and the start-to-done cycle count. It also counts how often each mechanism
// happened: encodings, path sweeps, score updates, carries between layer
// digits of the path counter, runtime size reduction, score clearing
// between back-to-back queries and channel materialisation; one that never
// happened is a failure. Before the queries, two of the loaded channels (one
// in each layer) are replaced by materialising them on chip from random
// 4-element latents and a random 4 x 24 projector, A = a R; the projection
// memory is then reloaded with W_enc. The queries therefore also check the
// materialised channels bit-exactly, and the materialise latency
// 1 + (D*d + 2) is checked on its own.
module tb_decohd_top;
  import decohd_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned D = 24, D_IN = 5, C = 6, N = 2;
  localparam int unsigned L [N] = '{3, 2};
  localparam int unsigned M = 6;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  wr_target_e wr_tgt = TGT_FEATURE;
  logic [7:0] wr_layer = '0;
  logic [31:0] wr_addr = '0, wr_data = '0;
  logic [4:0] cfg_dim = 5'(D);
  logic [2:0] cfg_feat = 3'(D_IN);
  logic [2:0] cfg_class = 3'(C);
  logic start = 0, busy, done;
  logic start_mat = 0;
  logic [7:0] mat_layer = '0, mat_chan = '0;
  logic [2:0] pred_class;
  logic [31:0] pred_score;
  logic [31:0] scores [C];

  logic [31:0] wenc [D_IN][D];
  logic [31:0] chan [N][3][D];
  logic [31:0] head [C][M];
  logic [31:0] x [D_IN];

  int checks = 0, failures = 0;
  int n_encode = 0, n_path = 0, n_score = 0, n_carry = 0, n_reduced = 0, n_clear = 0, n_mat = 0;
  localparam int unsigned DLAT = 4;   // latent length d

  decohd_top #(.D(D), .D_IN(D_IN), .C(C), .N_LAYERS(N), .L_CH(L)) dut (.*);
  always #5 clk = ~clk;

  // mechanism counters, observed on the design's internal handshakes
  always @(posedge clk) if (rst_n) begin
    if (dut.enc_done && dut.state_q == ST_ENCODE) n_encode++;
    if (dut.pe_done)  n_path++;
    if (dut.sc_done)  n_score++;
    if (dut.pc_step && dut.sel[1] == 8'(L[1] - 1)) n_carry++;
    if (dut.sc_clear && dut.scores[0] != 32'h0) n_clear++;
    if (dut.enc_done && dut.state_q == ST_MATERIAL) n_mat++;
  end

  task automatic host_write(input wr_target_e tgt, input int layer, input int addr, input logic [31:0] data);
    wr_en <= 1; wr_tgt <= tgt; wr_layer <= 8'(layer); wr_addr <= addr; wr_data <= data;
    @(posedge clk);
  endtask

  // a broken design may still be busy: never load into it while it is
  task automatic wait_idle();
    for (int i = 0; i < 100000 && busy; i++) @(posedge clk);
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s = %h expected %h", what, got, exp);
    end
  endtask

  task automatic run_query(input int nd, input int nf, input int nc);
    logic [31:0] h [D];
    logic [31:0] s [C];
    logic [31:0] z, t;
    int cyc, best, expc;
    wait_idle();
    for (int j = 0; j < D_IN; j++) begin
      x[j] = frand(2);
      host_write(TGT_FEATURE, 0, j, x[j]);
    end
    wr_en <= 0;
    cfg_dim <= 5'(nd); cfg_feat <= 3'(nf); cfg_class <= 3'(nc);
    if (nd < int'(D) || nf < int'(D_IN) || nc < int'(C)) n_reduced++;
    // reference model
    for (int d = 0; d < nd; d++) begin
      h[d] = 32'h0;
      for (int j = 0; j < nf; j++) h[d] = fadd(h[d], fmul(x[j], wenc[j][d]));
    end
    for (int c = 0; c < C; c++) s[c] = 32'h0;
    for (int m0 = 0; m0 < int'(L[0]); m0++)
      for (int m1 = 0; m1 < int'(L[1]); m1++) begin
        t = 32'h0;
        for (int d = 0; d < nd; d++) begin
          z = fmul(fmul(h[d], chan[0][m0][d]), chan[1][m1][d]);
          t = fadd(t, fmul(z, h[d]));
        end
        for (int c = 0; c < nc; c++) s[c] = fadd(s[c], fmul(head[c][m0 * L[1] + m1], t));
      end
    best = 0;
    for (int c = 1; c < nc; c++) if (f2r(s[c]) > f2r(s[best])) best = c;
    expc = 1 + (nd * nf + 2) + int'(M) * ((nd + 2) + (nc + 2)) + 1;
    // run
    @(posedge clk);
    start <= 1;
    cyc = 0;
    do begin @(posedge clk); #1; start = 0; cyc++; end while (!done && cyc < 100000);
    for (int c = 0; c < nc; c++) check($sformatf("score[%0d]", c), scores[c], s[c]);
    check("pred_class", 32'(pred_class), 32'(best));
    check("pred_score", pred_score, s[best]);
    check("latency", 32'(cyc), 32'(expc));
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  // replace channel l of layer i by a R, computed on chip
  task automatic materialise(input int i, input int l);
    logic [31:0] a [DLAT];
    logic [31:0] r [DLAT][D];
    logic [2:0]  keep_class;
    logic [31:0] keep_score;
    int cyc;
    wait_idle();
    for (int j = 0; j < int'(DLAT); j++)
      for (int d = 0; d < D; d++) begin
        r[j][d] = frand(2);
        host_write(TGT_ENC_W, 0, j * D + d, r[j][d]);
      end
    for (int j = 0; j < int'(DLAT); j++) begin
      a[j] = frand(2);
      host_write(TGT_FEATURE, 0, j, a[j]);
    end
    wr_en <= 0;
    cfg_dim <= 5'(D); cfg_feat <= 3'(DLAT);
    for (int d = 0; d < D; d++) begin
      chan[i][l][d] = 32'h0;
      for (int j = 0; j < int'(DLAT); j++) chan[i][l][d] = fadd(chan[i][l][d], fmul(a[j], r[j][d]));
    end
    keep_class = pred_class;
    keep_score = pred_score;
    @(posedge clk);
    start_mat <= 1; mat_layer <= 8'(i); mat_chan <= 8'(l);
    cyc = 0;
    do begin @(posedge clk); #1; start_mat = 0; cyc++; end while (!done && cyc < 100000);
    check($sformatf("materialise layer %0d channel %0d latency", i, l), 32'(cyc), 32'(1 + (D * DLAT + 2)));
    check("result kept over materialise", {29'(0), keep_class}, {29'(0), pred_class});
    check("score kept over materialise", keep_score, pred_score);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int j = 0; j < D_IN; j++)
      for (int d = 0; d < D; d++) begin
        wenc[j][d] = frand(2);
        host_write(TGT_ENC_W, 0, j * D + d, wenc[j][d]);
      end
    for (int i = 0; i < N; i++)
      for (int l = 0; l < int'(L[i]); l++)
        for (int d = 0; d < D; d++) begin
          chan[i][l][d] = frand(2);
          host_write(TGT_CHANNEL, i, l * D + d, chan[i][l][d]);
        end
    for (int c = 0; c < C; c++)
      for (int m = 0; m < M; m++) begin
        head[c][m] = frand(3);
        host_write(TGT_HEAD, 0, c * M + m, head[c][m]);
      end
    wr_en <= 0;
    run_query(D, D_IN, C);
    materialise(0, 2);
    materialise(1, 0);
    wait_idle();
    for (int j = 0; j < D_IN; j++)
      for (int d = 0; d < D; d++) host_write(TGT_ENC_W, 0, j * D + d, wenc[j][d]);
    wr_en <= 0;
    run_query(D, D_IN, C);
    run_query(13, 3, 4);
    run_query(D, D_IN, C);
    $display("mechanisms: encode=%0d path_sweep=%0d score_update=%0d layer_carry=%0d reduced_size=%0d score_clear=%0d materialise=%0d",
             n_encode, n_path, n_score, n_carry, n_reduced, n_clear, n_mat);
    checks++; if (n_encode != 4)      begin failures++; $display("FAIL encodings %0d", n_encode); end
    checks++; if (n_path != 4 * M)    begin failures++; $display("FAIL path sweeps %0d", n_path); end
    checks++; if (n_score != 4 * M)   begin failures++; $display("FAIL score updates %0d", n_score); end
    checks++; if (n_carry == 0)       begin failures++; $display("FAIL no layer carry"); end
    checks++; if (n_reduced == 0)     begin failures++; $display("FAIL no reduced-size query"); end
    checks++; if (n_clear == 0)       begin failures++; $display("FAIL no score clear"); end
    checks++; if (n_mat != 2)         begin failures++; $display("FAIL materialisations %0d", n_mat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
