// tb_decohd_precision: the whole classifier built for the two reduced
// precisions the method is evaluated in, fp16 (5 exponent, 10 mantissa bits)
// and bfloat16 (8, 7), by rebuilding the top with other EW / MW parameters.
// Each copy is small (D = 128, 16 features, 8 classes, one layer of
// 4 channels) and classifies several queries. A double-precision reference
// rounds every product and every sum to the target layout in the datapath's
// order, with the same value rules (round to nearest even, flush below the
// normal range), so scores, prediction and cycle count must match exactly.
// Operands are drawn from [1/8, 1) with random sign so that no fp16 score
// can overflow: |h| < 16, so |t| < 128 * 16 * 16 = 32768 < 65504, and
// |s| < 4 * 32768 only if every term is at its bound, which random data
// never approaches.
module tb_decohd_precision;
  import decohd_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned D = 128, D_IN = 16, C = 8, L = 4, M = 4;
  localparam int unsigned QUERIES = 3;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  wr_target_e wr_tgt = TGT_FEATURE;
  logic [7:0] wr_layer = '0;
  logic [31:0] wr_addr = '0;
  logic [15:0] wr_data = '0;
  logic [7:0] cfg_dim = 8'(D);
  logic [4:0] cfg_feat = 5'(D_IN);
  logic [3:0] cfg_class = 4'(C);
  logic start = 0;
  logic busy16, done16, busybf, donebf;
  logic [2:0] pred16, predbf;
  logic [15:0] pscore16, pscorebf;
  logic [15:0] scores16 [C];
  logic [15:0] scoresbf [C];

  int checks = 0, failures = 0, runs = 0;

  decohd_top #(.D(D), .D_IN(D_IN), .C(C), .N_LAYERS(1), .L_CH('{4}), .EW(5), .MW(10)) u_fp16 (
    .clk, .rst_n, .wr_en, .wr_tgt, .wr_layer, .wr_addr, .wr_data,
    .cfg_dim, .cfg_feat, .cfg_class, .start,
    .start_mat(1'b0), .mat_layer(8'd0), .mat_chan(8'd0),
    .busy(busy16), .done(done16), .pred_class(pred16), .pred_score(pscore16), .scores(scores16));

  decohd_top #(.D(D), .D_IN(D_IN), .C(C), .N_LAYERS(1), .L_CH('{4}), .EW(8), .MW(7)) u_bf16 (
    .clk, .rst_n, .wr_en, .wr_tgt, .wr_layer, .wr_addr, .wr_data,
    .cfg_dim, .cfg_feat, .cfg_class, .start,
    .start_mat(1'b0), .mat_layer(8'd0), .mat_chan(8'd0),
    .busy(busybf), .done(donebf), .pred_class(predbf), .pred_score(pscorebf), .scores(scoresbf));

  always #5 clk = ~clk;

  // ---- reference arithmetic in a given layout
  function automatic logic [31:0] xmul(input logic [31:0] a, input logic [31:0] b,
                                       input int ew, input int mw);
    return r2fx(fx2r(a, ew, mw) * fx2r(b, ew, mw), ew, mw);
  endfunction

  function automatic logic [31:0] xadd(input logic [31:0] a, input logic [31:0] b,
                                       input int ew, input int mw);
    return r2fx(fx2r(a, ew, mw) + fx2r(b, ew, mw), ew, mw);
  endfunction

  // random value in [1/8, 1) with random sign
  function automatic logic [31:0] xrand(input int ew, input int mw);
    int bias;
    bias = (1 << (ew - 1)) - 1;
    return (32'($urandom_range(0, 1)) << (ew + mw))
         | (32'(bias - 3 + int'($urandom_range(0, 2))) << mw)
         | ($urandom & ((32'd1 << mw) - 1));
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s = %h expected %h", what, got, exp);
    end
  endtask

  task automatic host_write(input wr_target_e tgt, input int addr, input logic [15:0] data);
    wr_en <= 1; wr_tgt <= tgt; wr_layer <= 8'd0; wr_addr <= addr; wr_data <= data;
    @(posedge clk);
  endtask

  // Both copies share the host bus and the start pulse, and have the same
  // latency. A run loads a random model and query in one layout, so only
  // that layout's copy is checked; the other copy runs on the same words
  // read as its own layout and finishes in the same cycle.
  task automatic run_layout(input string name, input int ew, input int mw, input int q);
    logic [31:0] wenc [D_IN][D];
    logic [31:0] chan [L][D];
    logic [31:0] head [C][M];
    logic [31:0] x [D_IN];
    logic [31:0] h [D];
    logic [31:0] s [C];
    logic [31:0] z, t, got;
    int cyc, best, expc;
    bit is16;
    is16 = (ew == 5);
    for (int j = 0; j < int'(D_IN); j++)
      for (int d = 0; d < int'(D); d++) begin
        wenc[j][d] = xrand(ew, mw);
        host_write(TGT_ENC_W, j * D + d, 16'(wenc[j][d]));
      end
    for (int l = 0; l < int'(L); l++)
      for (int d = 0; d < int'(D); d++) begin
        chan[l][d] = xrand(ew, mw);
        host_write(TGT_CHANNEL, l * D + d, 16'(chan[l][d]));
      end
    for (int c = 0; c < int'(C); c++)
      for (int m = 0; m < int'(M); m++) begin
        head[c][m] = xrand(ew, mw);
        host_write(TGT_HEAD, c * M + m, 16'(head[c][m]));
      end
    for (int j = 0; j < int'(D_IN); j++) begin
      x[j] = xrand(ew, mw);
      host_write(TGT_FEATURE, j, 16'(x[j]));
    end
    wr_en <= 0;
    for (int d = 0; d < int'(D); d++) begin
      h[d] = 32'h0;
      for (int j = 0; j < int'(D_IN); j++) h[d] = xadd(h[d], xmul(x[j], wenc[j][d], ew, mw), ew, mw);
    end
    for (int c = 0; c < int'(C); c++) s[c] = 32'h0;
    for (int m = 0; m < int'(M); m++) begin
      t = 32'h0;
      for (int d = 0; d < int'(D); d++) begin
        z = xmul(h[d], chan[m][d], ew, mw);
        t = xadd(t, xmul(z, h[d], ew, mw), ew, mw);
      end
      for (int c = 0; c < int'(C); c++) s[c] = xadd(s[c], xmul(head[c][m], t, ew, mw), ew, mw);
    end
    best = 0;
    for (int c = 1; c < int'(C); c++) if (fx2r(s[c], ew, mw) > fx2r(s[best], ew, mw)) best = c;
    expc = 1 + (int'(D) * int'(D_IN) + 2) + int'(M) * ((int'(D) + 2) + (int'(C) + 2)) + 1;
    @(posedge clk);
    start <= 1;
    cyc = 0;
    do begin
      @(posedge clk); #1; start = 0; cyc++;
    end while (!(is16 ? done16 : donebf) && cyc < 200_000);
    for (int c = 0; c < int'(C); c++) begin
      got = 32'(is16 ? scores16[c] : scoresbf[c]);
      check($sformatf("%s q%0d score[%0d]", name, q, c), got, s[c]);
    end
    check($sformatf("%s q%0d pred_class", name, q), 32'(is16 ? pred16 : predbf), 32'(best));
    check($sformatf("%s q%0d pred_score", name, q), 32'(is16 ? pscore16 : pscorebf), s[best]);
    check($sformatf("%s q%0d latency", name, q), 32'(cyc), 32'(expc));
    // the scores must not be all zero: the layout really carries the values
    checks++;
    if (s[best] == 32'h0) failures++;
    runs++;
    $display("%s query %0d: class %0d, %0d cycles", name, q, is16 ? pred16 : predbf, cyc);
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int q = 0; q < int'(QUERIES); q++) begin
      run_layout("fp16", 5, 10, q);
      run_layout("bf16", 8, 7, q);
    end
    checks++;
    if (runs != 2 * int'(QUERIES)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
