// hd_encoder: the fixed random-projection encoder h = x W_enc.
//
// Maps an input of cfg_feat features (at most D_IN) to a hypervector of
// cfg_dim elements (at most D). The frozen projection matrix W_enc (Gaussian
// or ternary values, generated off chip) and the feature vector x are held
// in on-chip memories that the host writes: x[j] at x_addr j, W_enc[j][d] at
// w_addr j*D + d. After 'start' the encoder computes, for each d in turn,
//   h_d = ((x_0*W[0][d] + x_1*W[1][d]) + x_2*W[2][d]) + ...
// with one multiply-accumulate per cycle, and emits each finished element
// on (h_we, h_addr, h_data) for the query buffer. The same product expands
// a channel latent by its projector (A = a R, with a in the feature memory
// and R in the projection memory); the top then sends the output stream to
// the channel bank instead.
//
// Timing: 'done' pulses cfg_dim*cfg_feat+2 cycles after 'start', in the same
// cycle as the last h_we. The encoder itself follows the method; the
// one-MAC-per-cycle schedule and the memory layout are this design's
// choices.
module hd_encoder #(
  parameter int unsigned D_IN = 617,
  parameter int unsigned D    = 10000,
  parameter int unsigned EW   = decohd_pkg::FP_EW,
  parameter int unsigned MW   = decohd_pkg::FP_MW,
  localparam int unsigned FW  = EW + MW + 1,
  localparam int unsigned DW  = $clog2(D),
  localparam int unsigned JW  = (D_IN > 1) ? $clog2(D_IN) : 1,
  localparam int unsigned WAW = $clog2(D_IN * D)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      x_we,
  input  logic [JW-1:0]             x_addr,
  input  logic [FW-1:0]             x_data,
  input  logic                      w_we,
  input  logic [WAW-1:0]            w_addr,
  input  logic [FW-1:0]             w_data,
  input  logic                      start,
  input  logic [$clog2(D+1)-1:0]    cfg_dim,
  input  logic [$clog2(D_IN+1)-1:0] cfg_feat,
  output logic                      h_we,
  output logic [DW-1:0]             h_addr,
  output logic [FW-1:0]             h_data,
  output logic                      busy,
  output logic                      done
);
  logic [FW-1:0]  xmem [D_IN];
  logic [FW-1:0]  wmem [D_IN * D];
  logic [FW-1:0]  x_q, w_q;

  logic           issue_q, valid_q, first_q, lastj_q, lastall_q;
  logic [DW-1:0]  d_q, dv_q;
  logic [JW-1:0]  j_q;
  logic [WAW-1:0] ptr_q;       // j_q*D + d_q
  logic [FW-1:0]  acc_q, prod, acc_in, acc_d;
  logic           lastj, lastd;

  always_ff @(posedge clk) begin
    if (x_we) xmem[x_addr] <= x_data;
    if (w_we) wmem[w_addr] <= w_data;
    x_q <= xmem[j_q];
    w_q <= wmem[ptr_q];
  end

  hd_fp_mul #(.EW(EW), .MW(MW)) u_mul (.a(x_q), .b(w_q), .y(prod));
  assign acc_in = first_q ? '0 : acc_q;
  hd_fp_add #(.EW(EW), .MW(MW)) u_add (.a(acc_in), .b(prod), .y(acc_d));

  assign lastj = (32'(j_q) == 32'(cfg_feat) - 1);
  assign lastd = (32'(d_q) == 32'(cfg_dim) - 1);
  assign busy  = issue_q | valid_q | start | h_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_q   <= 1'b0;
      valid_q   <= 1'b0;
      first_q   <= 1'b0;
      lastj_q   <= 1'b0;
      lastall_q <= 1'b0;
      d_q       <= '0;
      dv_q      <= '0;
      j_q       <= '0;
      ptr_q     <= '0;
      acc_q     <= '0;
      h_we      <= 1'b0;
      h_addr    <= '0;
      h_data    <= '0;
      done      <= 1'b0;
    end else begin
      valid_q   <= issue_q;
      first_q   <= issue_q && (j_q == '0);
      lastj_q   <= issue_q && lastj;
      lastall_q <= issue_q && lastj && lastd;
      dv_q      <= d_q;
      if (start) begin
        issue_q <= 1'b1;
        d_q     <= '0;
        j_q     <= '0;
        ptr_q   <= '0;
      end else if (issue_q) begin
        if (lastj) begin
          j_q   <= '0;
          d_q   <= d_q + 1'b1;
          ptr_q <= WAW'(32'(d_q) + 1);
          if (lastd) issue_q <= 1'b0;
        end else begin
          j_q   <= j_q + 1'b1;
          ptr_q <= ptr_q + WAW'(D);
        end
      end
      if (valid_q) acc_q <= acc_d;
      h_we   <= valid_q && lastj_q;
      h_addr <= dv_q;
      h_data <= acc_d;
      done   <= valid_q && lastall_q;
    end
  end

  // handshake rule: no new start while encoding
  always_ff @(posedge clk) begin
    if (rst_n && start) a_no_restart: assert (!(issue_q || valid_q))
      else $error("encoder restarted while busy");
  end
endmodule
