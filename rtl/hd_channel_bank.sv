// hd_channel_bank: the shared channel hypervectors of all decomposition layers.
//
// Layer i holds L_CH[i] channel hypervectors A^(i)_l of D elements each;
// the whole bank is sum_i L_CH[i] x D values, the dominant memory of the
// model. One memory per layer, so that for a path (m_1..m_N) the N selected
// channels can be read together: in one cycle the bank returns element d of
// A^(i)_{m_i} for every layer i. The host writes one element per cycle into
// layer wlayer at address l*D + d. Reads are registered (one cycle latency).
// Storing materialised channels follows the deployed model of the method;
// the per-layer banking and the timing are this design's choice.
module hd_channel_bank #(
  parameter int unsigned N_LAYERS = 1,
  parameter int unsigned L_CH [N_LAYERS] = '{10},
  parameter int unsigned D  = 10000,
  parameter int unsigned FW = 32,
  localparam int unsigned SW = decohd_pkg::SEL_W,
  localparam int unsigned DW = $clog2(D),
  localparam int unsigned LAYER_W = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [LAYER_W-1:0]  wlayer,
  input  logic [31:0]         waddr,
  input  logic [FW-1:0]       wdata,
  input  logic [SW-1:0]       sel   [N_LAYERS],
  input  logic [DW-1:0]       raddr,
  output logic [FW-1:0]       rdata [N_LAYERS]
);
  for (genvar i = 0; i < N_LAYERS; i++) begin : g_layer
    localparam int unsigned DEPTH = L_CH[i] * D;
    localparam int unsigned AW    = $clog2(DEPTH);
    logic [FW-1:0] mem [DEPTH];
    logic [AW-1:0] ra;

    // channel sel[i] starts at sel[i]*D
    assign ra = AW'(sel[i] * D + 32'(raddr));

    always_ff @(posedge clk) begin
      if (we && 32'(wlayer) == i) mem[AW'(waddr)] <= wdata;
      rdata[i] <= mem[ra];
    end
  end
endmodule
