// hd_fp_mul: the binding operator, one element of h (x) A.
//
// Binding in this hyperdimensional classifier is elementwise multiplication
// of real hypervector elements; this module multiplies two floating-point
// numbers (EW exponent bits, MW mantissa bits, default binary32).
// It forms the exact (MW+1)x(MW+1)-bit significand product, normalises it,
// and rounds to nearest, ties to even. Subnormal inputs count as zero and a
// result whose rounded exponent falls below the normal range is flushed to a
// signed zero; an overflow gives a signed infinity. These rounding and
// special-value rules are this design's choice: the method only specifies
// real multiplication. Purely combinational: y follows a and b in the same
// cycle.
module hd_fp_mul #(
  parameter int unsigned EW = decohd_pkg::FP_EW,
  parameter int unsigned MW = decohd_pkg::FP_MW
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int unsigned  FW   = EW + MW + 1;
  localparam int signed    BIAS = (1 << (EW - 1)) - 1;
  localparam int signed    EMAX = (1 << EW) - 1;

  logic               sa, sb, sy;
  logic [EW-1:0]      ea, eb;
  logic [MW:0]        ma, mb;
  logic [2*MW+1:0]    prod;
  logic [MW:0]        mant;
  logic               guard, sticky, rnd;
  logic [MW+1:0]      mant_r;
  int signed          exp_r;

  always_comb begin
    sa = a[FW-1];
    sb = b[FW-1];
    ea = a[FW-2:MW];
    eb = b[FW-2:MW];
    ma = {1'b1, a[MW-1:0]};
    mb = {1'b1, b[MW-1:0]};
    sy = sa ^ sb;
    prod = ma * mb;
    exp_r = int'(ea) + int'(eb) - BIAS;
    if (prod[2*MW+1]) begin
      mant   = prod[2*MW+1:MW+1];
      guard  = prod[MW];
      sticky = |prod[MW-1:0];
      exp_r  = exp_r + 1;
    end else begin
      mant   = prod[2*MW:MW];
      guard  = prod[MW-1];
      sticky = |(prod & (((2*MW+2)'(1) << (MW - 1)) - (2*MW+2)'(1)));  // bits below the guard
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + (MW+2)'(rnd);
    if (mant_r[MW+1]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_r + 1;
    end
    if (ea == '0 || eb == '0) begin
      y = {sy, {(FW-1){1'b0}}};                       // zero (or flushed subnormal) operand
    end else if (ea == EW'(EMAX) || eb == EW'(EMAX) || exp_r >= EMAX) begin
      y = {sy, {EW{1'b1}}, {MW{1'b0}}};               // infinity
    end else if (exp_r <= 0) begin
      y = {sy, {(FW-1){1'b0}}};                       // flush to zero
    end else begin
      y = {sy, exp_r[EW-1:0], mant_r[MW-1:0]};
    end
  end
endmodule
