// hd_query_buf: the working hypervector buffer holding the encoded query h.
//
// D elements of FW bits. The encoder writes h one element per cycle; the
// path engine reads it once per bound path, so every path reuses the same h
// for binding and for the dot product. A plain synchronous memory: a write
// lands at the clock edge, a read returns mem[raddr] on rdata one cycle after
// raddr is presented. The single-port-per-direction organisation is this
// design's choice.
module hd_query_buf #(
  parameter int unsigned D  = 10000,
  parameter int unsigned FW = 32
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(D)-1:0] waddr,
  input  logic [FW-1:0]        wdata,
  input  logic [$clog2(D)-1:0] raddr,
  output logic [FW-1:0]        rdata
);
  logic [FW-1:0] mem [D];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
