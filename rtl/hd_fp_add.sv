// hd_fp_add: the bundling operator and accumulator adder.
//
// Bundling is elementwise real addition; the same adder accumulates the
// path dot product and the class scores. Floating point with EW exponent
// and MW mantissa bits (default binary32). The operand of larger magnitude
// is kept, the other is shifted right into a field with guard, round and a
// sticky bit, the significands are added or subtracted, the sum is
// renormalised and rounded to nearest, ties to even. Subnormal operands are
// treated as zero, results below the normal range flush to a signed zero and
// overflow gives infinity (this design's choice; the method only specifies
// real addition). An exact zero sum is +0. Combinational.
module hd_fp_add #(
  parameter int unsigned EW = decohd_pkg::FP_EW,
  parameter int unsigned MW = decohd_pkg::FP_MW
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int unsigned FW   = EW + MW + 1;
  localparam int signed   EMAX = (1 << EW) - 1;
  localparam int unsigned SW   = MW + 5;   // carry, hidden one, MW bits, guard, round, sticky

  logic [EW+MW:0]  big, sml;
  logic            zb, zs, sub;
  logic [EW-1:0]   eb, es;
  int unsigned     dexp;
  logic [SW-1:0]   fb, fs, sum;
  logic [MW+3:0]   shifted_out_mask;
  logic            sticky;
  int signed       exp_r;
  int unsigned     lz;
  logic [MW:0]     mant;
  logic            rnd;
  logic [MW+1:0]   mant_r;

  always_comb begin
    // order operands by magnitude (exponent then mantissa, flushing subnormals)
    if (a[FW-2:0] >= b[FW-2:0]) begin big = a; sml = b; end
    else                        begin big = b; sml = a; end
    eb  = big[FW-2:MW];
    es  = sml[FW-2:MW];
    zb  = (eb == '0);
    zs  = (es == '0);
    sub = big[FW-1] ^ sml[FW-1];
    dexp = int'(eb) - int'(es);
    fb = {1'b0, 1'b1, big[MW-1:0], 3'b000};
    fs = {1'b0, 1'b1, sml[MW-1:0], 3'b000};
    // right-align the smaller operand, folding lost bits into the sticky bit
    shifted_out_mask = '0;
    if (dexp >= SW) begin
      sticky = 1'b1;
      fs     = '0;
    end else begin
      shifted_out_mask = (MW+4)'((64'd1 << dexp) - 64'd1);
      sticky = |(fs[MW+3:0] & shifted_out_mask);
      fs     = fs >> dexp;
    end
    fs[0] = fs[0] | sticky;
    sum   = sub ? (fb - fs) : (fb + fs);
    exp_r = int'(eb);
    lz    = 0;
    if (sum[SW-1]) begin
      sum   = (sum >> 1) | SW'(sum[0]);
      exp_r = exp_r + 1;
    end else begin
      // leading-zero count below the carry bit; the highest set bit wins
      lz = SW - 1;
      for (int i = 0; i <= SW - 2; i++) begin
        if (sum[i]) lz = SW - 2 - i;
      end
      if (lz <= SW - 2) begin
        sum   = sum << lz;
        exp_r = exp_r - int'(lz);
      end
    end
    mant   = sum[MW+3:3];
    rnd    = sum[2] & (sum[1] | sum[0] | mant[0]);
    mant_r = {1'b0, mant} + (MW+2)'(rnd);
    if (mant_r[MW+1]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_r + 1;
    end
    if (zb && zs) begin
      y = {big[FW-1] & sml[FW-1], {(FW-1){1'b0}}};
    end else if (zs) begin
      y = big;                                        // adding zero: exact
    end else if (eb == EW'(EMAX)) begin
      y = {big[FW-1], {EW{1'b1}}, {MW{1'b0}}};        // infinity operand
    end else if (sum == '0) begin
      y = '0;                                         // exact cancellation: +0
    end else if (exp_r >= EMAX) begin
      y = {big[FW-1], {EW{1'b1}}, {MW{1'b0}}};
    end else if (exp_r <= 0) begin
      y = {big[FW-1], {(FW-1){1'b0}}};
    end else begin
      y = {big[FW-1], exp_r[EW-1:0], mant_r[MW-1:0]};
    end
  end
endmodule
