// hd_score_unit: score-only streaming class accumulators.
//
// Holds the C class scores s_c. After the path engine delivers t_m for
// path m, 'start' makes the unit add W[c][m] * t_m to s_c for every active
// class c = 0 .. cfg_class-1, one class per cycle, reading the weights from
// the bundling head (address c*M + m, one cycle read latency). This replaces
// building the class bundles Y_c and scoring them afterwards, so no class
// hypervector is ever stored. 'clear' zeroes all scores before a query.
//
// Timing: 'done' pulses cfg_class+2 cycles after 'start'; m and t must stay
// stable in between. One multiplier and one adder are shared by all classes
// (this design's choice).
module hd_score_unit #(
  parameter int unsigned C  = 26,
  parameter int unsigned M  = 10,
  parameter int unsigned EW = decohd_pkg::FP_EW,
  parameter int unsigned MW = decohd_pkg::FP_MW,
  localparam int unsigned FW = EW + MW + 1,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned AW = $clog2(C * M)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   start,
  input  logic [PW-1:0]          m,
  input  logic [FW-1:0]          t,
  input  logic [$clog2(C+1)-1:0] cfg_class,
  output logic [AW-1:0]          w_raddr,
  input  logic [FW-1:0]          w_rdata,
  output logic [FW-1:0]          scores [C],
  output logic                   busy,
  output logic                   done
);
  logic          issue_q, valid_q, last_q;
  logic [CW-1:0] c_q, cv_q;
  logic [FW-1:0] wt, upd;

  assign w_raddr = AW'(32'(c_q) * M + 32'(m));
  assign busy    = issue_q | valid_q | start;

  hd_fp_mul #(.EW(EW), .MW(MW)) u_mul (.a(w_rdata), .b(t), .y(wt));
  hd_fp_add #(.EW(EW), .MW(MW)) u_add (.a(scores[cv_q]), .b(wt), .y(upd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_q <= 1'b0;
      valid_q <= 1'b0;
      last_q  <= 1'b0;
      c_q     <= '0;
      cv_q    <= '0;
      done    <= 1'b0;
      for (int c = 0; c < C; c++) scores[c] <= '0;
    end else begin
      valid_q <= issue_q;
      last_q  <= issue_q && (32'(c_q) == 32'(cfg_class) - 1);
      cv_q    <= c_q;
      done    <= valid_q && last_q;
      if (start) begin
        issue_q <= 1'b1;
        c_q     <= '0;
      end else if (issue_q) begin
        if (32'(c_q) == 32'(cfg_class) - 1) issue_q <= 1'b0;
        else c_q <= c_q + 1'b1;
      end
      if (clear) begin
        for (int c = 0; c < C; c++) scores[c] <= '0;
      end else if (valid_q) begin
        scores[cv_q] <= upd;
      end
    end
  end

  // handshake rule: no new start while an update is in flight
  always_ff @(posedge clk) begin
    if (rst_n && start) a_no_restart: assert (!(issue_q || valid_q))
      else $error("score unit restarted while updating");
  end
endmodule
