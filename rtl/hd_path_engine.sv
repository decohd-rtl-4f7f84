// hd_path_engine: stacked binding and path similarity for one bound path.
//
// For the path selected in the channel bank it computes
//   t_m = < h (x) A^(1)_{m_1} (x) ... (x) A^(N)_{m_N} , h >
//       = sum_d ( ((h_d * A1_d) * A2_d) ... * AN_d ) * h_d
// by sweeping d = 0 .. cfg_dim-1, one element per cycle. The path
// hypervector Z_m is never stored: each element is bound, multiplied by h_d
// and folded into the running sum at once, which is what makes score-only
// streaming need no hypervector storage beyond h and the channels.
// The N+1 multipliers form a combinational chain in the same cycle as the
// accumulate.
//
// Interface: pulse 'start' for one cycle; the engine drives raddr to the
// query buffer and channel bank (both answer one cycle later). 'done'
// pulses cfg_dim+2 cycles after 'start' with t valid; t holds until the next
// start. The order of multiplications and the one-element-per-cycle rate are
// this design's choices.
module hd_path_engine #(
  parameter int unsigned N_LAYERS = 1,
  parameter int unsigned D  = 10000,
  parameter int unsigned EW = decohd_pkg::FP_EW,
  parameter int unsigned MW = decohd_pkg::FP_MW,
  localparam int unsigned FW = EW + MW + 1,
  localparam int unsigned DW = $clog2(D)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [$clog2(D+1)-1:0] cfg_dim,
  output logic [DW-1:0]         raddr,
  input  logic [FW-1:0]         h_rdata,
  input  logic [FW-1:0]         a_rdata [N_LAYERS],
  output logic [FW-1:0]         t,
  output logic                  busy,
  output logic                  done
);
  logic          issue_q, valid_q, last_q;
  logic [DW-1:0] addr_q;
  logic [FW-1:0] acc_q, acc_d, prod;
  logic [FW-1:0] chain [N_LAYERS+1];

  // h_d bound with the selected element of every layer
  assign chain[0] = h_rdata;
  for (genvar i = 0; i < N_LAYERS; i++) begin : g_bind
    hd_fp_mul #(.EW(EW), .MW(MW)) u_bind (.a(chain[i]), .b(a_rdata[i]), .y(chain[i+1]));
  end
  // Z_m[d] * h_d, then accumulate
  hd_fp_mul #(.EW(EW), .MW(MW)) u_dot (.a(chain[N_LAYERS]), .b(h_rdata), .y(prod));
  hd_fp_add #(.EW(EW), .MW(MW)) u_acc (.a(acc_q), .b(prod), .y(acc_d));

  assign raddr = addr_q;
  assign t     = acc_q;
  assign busy  = issue_q | valid_q | start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_q <= 1'b0;
      valid_q <= 1'b0;
      last_q  <= 1'b0;
      addr_q  <= '0;
      acc_q   <= '0;
      done    <= 1'b0;
    end else begin
      valid_q <= issue_q;
      last_q  <= issue_q && (32'(addr_q) == 32'(cfg_dim) - 1);
      done    <= valid_q && last_q;
      if (start) begin
        issue_q <= 1'b1;
        addr_q  <= '0;
        acc_q   <= '0;
      end else begin
        if (issue_q) begin
          if (32'(addr_q) == 32'(cfg_dim) - 1) issue_q <= 1'b0;
          else addr_q <= addr_q + 1'b1;
        end
        if (valid_q) acc_q <= acc_d;
      end
    end
  end

  // handshake rule: no new start while a sweep is in flight
  always_ff @(posedge clk) begin
    if (rst_n && start) a_no_restart: assert (!(issue_q || valid_q))
      else $error("path engine restarted while sweeping");
  end
endmodule
