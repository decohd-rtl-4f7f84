// hd_head_mem: the class bundling head W (C x M weights).
//
// W[c][m] is the weight with which path m contributes to class c. Stored row
// major at address c*M + m. Loaded by the host, read by the score unit one
// weight per cycle: synchronous write, registered read with one cycle of
// latency. The layout and timing are this design's choice.
module hd_head_mem #(
  parameter int unsigned C  = 26,
  parameter int unsigned M  = 10,
  parameter int unsigned FW = 32,
  localparam int unsigned AW = $clog2(C * M)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [FW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [FW-1:0] rdata
);
  logic [FW-1:0] mem [C * M];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
