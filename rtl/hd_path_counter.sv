// hd_path_counter: enumerates the bound paths of the decomposition.
//
// A path chooses one channel in every layer, m = (m_1, ..., m_N) with
// m_i < L_CH[i]; there are M = prod L_CH[i] paths. This mixed-radix counter
// walks all of them, the last layer's digit moving fastest, and also keeps
// the linear path index m = ((m_1*L_2 + m_2)*L_3 + m_3)... used to address
// the bundling head. 'clear' returns to path 0; 'step' advances one path and
// wraps after the last. 'last' is high while the current path is M-1. The
// path order is this design's choice; the method only requires every path to
// be visited once.
module hd_path_counter #(
  parameter int unsigned N_LAYERS = 1,
  parameter int unsigned L_CH [N_LAYERS] = '{10},
  localparam int unsigned SW = decohd_pkg::SEL_W,
  localparam int unsigned M  = decohd_pkg_paths(N_LAYERS, L_CH),
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          step,
  output logic [SW-1:0] sel [N_LAYERS],
  output logic [MW-1:0] m,
  output logic          last
);
  function automatic int unsigned decohd_pkg_paths(input int unsigned n, input int unsigned l [N_LAYERS]);
    int unsigned p = 1;
    for (int unsigned i = 0; i < n; i++) p *= l[i];
    return p;
  endfunction

  logic [N_LAYERS-1:0] at_max;
  logic [SW-1:0]       sel_inc [N_LAYERS];

  // ripple carry from the last layer towards the first
  always_comb begin
    logic carry;
    carry = 1'b1;
    for (int i = N_LAYERS - 1; i >= 0; i--) begin
      at_max[i]  = (32'(sel[i]) == L_CH[i] - 1);
      sel_inc[i] = sel[i];
      if (carry) begin
        if (at_max[i]) sel_inc[i] = '0;
        else begin
          sel_inc[i] = sel[i] + 1'b1;
          carry      = 1'b0;
        end
      end
    end
    last = &at_max;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_LAYERS; i++) sel[i] <= '0;
      m <= '0;
    end else if (clear) begin
      for (int i = 0; i < N_LAYERS; i++) sel[i] <= '0;
      m <= '0;
    end else if (step) begin
      sel <= sel_inc;
      m   <= last ? '0 : m + 1'b1;
    end
  end
endmodule
