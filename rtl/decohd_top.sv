// decohd_top: DecoHD decomposed hyperdimensional classifier, inference engine.
//
// Instead of one D-element prototype per class, the model stores a few
// shared channel hypervectors per layer (N_LAYERS layers, L_CH[i] channels
// each) and a small bundling head W (C x M, M = prod L_CH[i]). A query is
// classified by visiting every bound path m = (m_1..m_N):
//   t_m  = < h (x) A^(1)_{m_1} (x) ... (x) A^(N)_{m_N}, h >
//   s_c += W[c][m] * t_m            for every class c
// and returning argmax_c s_c. Nothing larger than one hypervector (h) plus
// C scalar scores is kept per query (score-only streaming).
//
// The channels are learned as short latents a (d elements) and expanded by
// a fixed random projector R (d x D) into A = a R before use. That is the
// same vector-matrix product as the encoder's h = x W_enc, so the engine can
// also materialise channels itself: with a in the feature buffer, R in the
// projection memory (d <= D_IN) and cfg_feat = d, a pulse on start_mat runs
// the encoder and writes its D outputs into channel mat_chan of layer
// mat_layer instead of into h. The host then reloads W_enc before queries.
//
// Blocks: hd_encoder (h = x W_enc), hd_query_buf (h), hd_channel_bank
// (channels), hd_path_counter (path enumeration), hd_path_engine (stacked
// binding and t_m), hd_head_mem (W), hd_score_unit (score updates),
// hd_argmax (prediction).
//
// Interface. Loading: while idle, the host writes one word per cycle with
// wr_en, selecting the memory with wr_tgt (decohd_pkg::wr_target_e),
// the layer with wr_layer (channel bank only) and the word with wr_addr
// (feature j; W_enc j*D+d; channel l*D+d; head c*M+m). Query: set
// cfg_dim <= D, cfg_feat <= D_IN and cfg_class <= C, load the features and
// pulse 'start'. 'busy' is high until 'done' pulses; pred_class, pred_score
// and scores then hold the result until the next start. Materialising:
// load a and R as above, set cfg_dim and cfg_feat = d, hold mat_layer and
// mat_chan and pulse start_mat; 'done' pulses when the channel is written,
// and the previous result outputs are left as they were.
//
// Timing, counted from the cycle in which start is high to the cycle in
// which done is high:
//   1 + (dim*feat + 2) + M * ((dim + 2) + (cls + 2)) + 1  cycles
// i.e. one multiply-accumulate per cycle in the encoder, one hypervector
// element per cycle per path and one class per cycle per score update; each
// stage is started in the cycle its predecessor reports done. Materialising
// one channel takes 1 + (dim*d + 2) cycles.
// The computation, the score-only order and materialising channels from
// latents at deployment follow the method; the sequencing, host bus,
// runtime size registers, the reuse of the encoder for materialising and
// the timing are this design's own choices.
module decohd_top
  import decohd_pkg::*;
#(
  parameter int unsigned D        = 10000,
  parameter int unsigned D_IN     = 617,
  parameter int unsigned C        = 26,
  parameter int unsigned N_LAYERS = 1,
  parameter int unsigned L_CH [N_LAYERS] = '{10},
  parameter int unsigned EW       = FP_EW,
  parameter int unsigned MW       = FP_MW,
  localparam int unsigned FW      = EW + MW + 1,
  localparam int unsigned CW      = (C > 1) ? $clog2(C) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host load bus
  input  logic                      wr_en,
  input  wr_target_e                wr_tgt,
  input  logic [7:0]                wr_layer,
  input  logic [31:0]               wr_addr,
  input  logic [FW-1:0]             wr_data,
  // runtime sizes
  input  logic [$clog2(D+1)-1:0]    cfg_dim,
  input  logic [$clog2(D_IN+1)-1:0] cfg_feat,
  input  logic [$clog2(C+1)-1:0]    cfg_class,
  // query
  input  logic                      start,
  // channel materialisation A = a R
  input  logic                      start_mat,
  input  logic [7:0]                mat_layer,
  input  logic [7:0]                mat_chan,
  output logic                      busy,
  output logic                      done,
  output logic [CW-1:0]             pred_class,
  output logic [FW-1:0]             pred_score,
  output logic [FW-1:0]             scores [C]
);
  function automatic int unsigned num_paths();
    int unsigned p = 1;
    for (int unsigned i = 0; i < N_LAYERS; i++) p *= L_CH[i];
    return p;
  endfunction

  function automatic logic is_channel(input logic [7:0] layer, input logic [7:0] chan);
    logic ok = 1'b0;
    for (int unsigned i = 0; i < N_LAYERS; i++)
      if (32'(layer) == i && 32'(chan) < L_CH[i]) ok = 1'b1;
    return ok;
  endfunction

  localparam int unsigned M       = num_paths();
  localparam int unsigned PW      = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned DW      = $clog2(D);
  localparam int unsigned JW      = (D_IN > 1) ? $clog2(D_IN) : 1;
  localparam int unsigned LAYER_W = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1;
  localparam int unsigned WAW     = $clog2(D_IN * D);

  state_e state_q;
  logic   mat_q;                       // encoder output goes to the channel bank
  logic [7:0]  mat_layer_q, mat_chan_q;
  logic        ch_we;
  logic [31:0] ch_waddr;
  logic [7:0]  ch_wlayer;
  logic [FW-1:0] ch_wdata;

  // ---------------------------------------------------------------- encoder
  logic          enc_start, enc_done, enc_busy;
  logic          h_we;
  logic [DW-1:0] h_waddr;
  logic [FW-1:0] h_wdata;

  hd_encoder #(.D_IN(D_IN), .D(D), .EW(EW), .MW(MW)) u_encoder (
    .clk, .rst_n,
    .x_we    (wr_en && wr_tgt == TGT_FEATURE),
    .x_addr  (JW'(wr_addr)),
    .x_data  (wr_data),
    .w_we    (wr_en && wr_tgt == TGT_ENC_W),
    .w_addr  (WAW'(wr_addr)),
    .w_data  (wr_data),
    .start   (enc_start),
    .cfg_dim, .cfg_feat,
    .h_we, .h_addr(h_waddr), .h_data(h_wdata),
    .busy    (enc_busy),
    .done    (enc_done)
  );

  // ----------------------------------------------------------- query buffer
  logic [DW-1:0] pe_raddr;
  logic [FW-1:0] h_rdata;

  hd_query_buf #(.D(D), .FW(FW)) u_query (
    .clk, .we(h_we && !mat_q), .waddr(h_waddr), .wdata(h_wdata), .raddr(pe_raddr), .rdata(h_rdata)
  );

  // ----------------------------------------------------- paths and channels
  logic [SEL_W-1:0] sel [N_LAYERS];
  logic [PW-1:0]    path_m;
  logic             path_last, pc_clear, pc_step;
  logic [FW-1:0]    a_rdata [N_LAYERS];

  hd_path_counter #(.N_LAYERS(N_LAYERS), .L_CH(L_CH)) u_paths (
    .clk, .rst_n, .clear(pc_clear), .step(pc_step), .sel, .m(path_m), .last(path_last)
  );

  hd_channel_bank #(.N_LAYERS(N_LAYERS), .L_CH(L_CH), .D(D), .FW(FW)) u_channels (
    .clk,
    .we     (ch_we),
    .wlayer (LAYER_W'(ch_wlayer)),
    .waddr  (ch_waddr),
    .wdata  (ch_wdata),
    .sel,
    .raddr  (pe_raddr),
    .rdata  (a_rdata)
  );

  // ------------------------------------------------------------ path engine
  logic          pe_start, pe_done, pe_busy;
  logic [FW-1:0] t_m;

  hd_path_engine #(.N_LAYERS(N_LAYERS), .D(D), .EW(EW), .MW(MW)) u_engine (
    .clk, .rst_n, .start(pe_start), .cfg_dim, .raddr(pe_raddr),
    .h_rdata, .a_rdata, .t(t_m), .busy(pe_busy), .done(pe_done)
  );

  // ------------------------------------------------------ head and scores
  logic                   sc_start, sc_done, sc_busy, sc_clear;
  logic [$clog2(C*M)-1:0] w_raddr;
  logic [FW-1:0]          w_rdata;

  hd_head_mem #(.C(C), .M(M), .FW(FW)) u_head (
    .clk,
    .we    (wr_en && wr_tgt == TGT_HEAD),
    .waddr ($clog2(C*M)'(wr_addr)),
    .wdata (wr_data),
    .raddr (w_raddr),
    .rdata (w_rdata)
  );

  hd_score_unit #(.C(C), .M(M), .EW(EW), .MW(MW)) u_scores (
    .clk, .rst_n, .clear(sc_clear), .start(sc_start), .m(path_m), .t(t_m), .cfg_class,
    .w_raddr, .w_rdata, .scores, .busy(sc_busy), .done(sc_done)
  );

  // ------------------------------------------------------------------ argmax
  logic [CW-1:0] am_idx;
  logic [FW-1:0] am_max;

  hd_argmax #(.C(C), .FW(FW)) u_argmax (
    .scores, .cfg_class, .idx(am_idx), .max(am_max)
  );

  // channel bank write port: the host, or the encoder while materialising
  assign mat_q = (state_q == ST_MATERIAL);
  always_comb begin
    if (mat_q) begin
      ch_we     = h_we;
      ch_wlayer = mat_layer_q;
      ch_waddr  = 32'(mat_chan_q) * D + 32'(h_waddr);
      ch_wdata  = h_wdata;
    end else begin
      ch_we     = wr_en && wr_tgt == TGT_CHANNEL;
      ch_wlayer = wr_layer;
      ch_waddr  = wr_addr;
      ch_wdata  = wr_data;
    end
  end

  // --------------------------------------------------------------- sequencer
  always_comb begin
    enc_start = 1'b0;
    pe_start  = 1'b0;
    sc_start  = 1'b0;
    sc_clear  = 1'b0;
    pc_clear  = 1'b0;
    pc_step   = 1'b0;
    unique case (state_q)
      ST_IDLE: if (start) begin
        enc_start = 1'b1;
        sc_clear  = 1'b1;
        pc_clear  = 1'b1;
      end else if (start_mat) begin
        enc_start = 1'b1;
      end
      ST_ENCODE: if (enc_done) pe_start = 1'b1;
      ST_PATH:   if (pe_done)  sc_start = 1'b1;
      ST_SCORE:  if (sc_done && !path_last) begin
        pc_step  = 1'b1;
        pe_start = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= ST_IDLE;
      done       <= 1'b0;
      pred_class <= '0;
      pred_score <= '0;
      mat_layer_q <= '0;
      mat_chan_q  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        ST_IDLE: if (start) begin
          state_q <= ST_ENCODE;
        end else if (start_mat) begin
          state_q     <= ST_MATERIAL;
          mat_layer_q <= mat_layer;
          mat_chan_q  <= mat_chan;
        end
        ST_MATERIAL: if (enc_done) begin
          done    <= 1'b1;
          state_q <= ST_IDLE;
        end
        ST_ENCODE: if (enc_done) state_q <= ST_PATH;
        ST_PATH:   if (pe_done)  state_q <= ST_SCORE;
        ST_SCORE:  if (sc_done)  state_q <= path_last ? ST_RESULT : ST_PATH;
        ST_RESULT: begin
          pred_class <= am_idx;
          pred_score <= am_max;
          done       <= 1'b1;
          state_q    <= ST_IDLE;
        end
        default:   state_q <= ST_IDLE;
      endcase
    end
  end

  assign busy = (state_q != ST_IDLE) || enc_busy || pe_busy || sc_busy;

  // host bus rules: no loading during a query; sizes within the built ones
  always_ff @(posedge clk) begin
    if (rst_n && busy) a_no_load_while_busy: assert (!wr_en)
      else $error("host write while a query is running");
    if (rst_n && start_mat && !busy) a_mat_target: assert (is_channel(mat_layer, mat_chan))
      else $error("materialise target is not a built channel");
    if (rst_n && (start || start_mat)) a_sizes: assert (cfg_dim >= 1 && 32'(cfg_dim) <= D && cfg_feat >= 1
                                         && 32'(cfg_feat) <= D_IN && cfg_class >= 1
                                         && 32'(cfg_class) <= C)
      else $error("runtime size out of range");
  end
endmodule
