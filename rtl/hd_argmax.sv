// hd_argmax: picks the predicted class, argmax_c s_c.
//
// Scans the first cfg_class scores and returns the index and value of the
// largest. Floating-point order is obtained by mapping each score to an
// unsigned key (negative numbers: all bits inverted; positive: sign bit set),
// which is monotonic in the real value. Ties go to the lowest class index;
// +0 ranks just above -0. Combinational; the scan order and tie rule are this
// design's choice.
module hd_argmax #(
  parameter int unsigned C  = 26,
  parameter int unsigned FW = 32,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1
) (
  input  logic [FW-1:0]        scores [C],
  input  logic [$clog2(C+1)-1:0] cfg_class,
  output logic [CW-1:0]        idx,
  output logic [FW-1:0]        max
);
  function automatic logic [FW-1:0] key(input logic [FW-1:0] f);
    return f[FW-1] ? ~f : (f | {1'b1, {(FW-1){1'b0}}});
  endfunction

  always_comb begin
    idx = '0;
    max = scores[0];
    for (int c = 1; c < C; c++) begin
      if (c < 32'(cfg_class) && key(scores[c]) > key(max)) begin
        idx = CW'(c);
        max = scores[c];
      end
    end
  end
endmodule
