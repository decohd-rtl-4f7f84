// fp_ref_pkg: binary32 reference arithmetic for the testbenches.
//
// Independent of the RTL: operands are converted to the simulator's double
// precision, the operation is done there (exact for a product of two
// binary32 values, and exact or harmlessly rounded for a sum), and the double
// is rounded back to binary32 by round-to-nearest-even on the bit pattern.
// Results below the normal range become a signed zero and subnormal inputs
// read as zero, the same value rules as the datapath.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return $bitstoreal({f[31], 63'd0});
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [24:0] m;
    logic        g, s;
    int          e;
    d = $realtobits(x);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    g = d[28];
    s = |d[27:0];
    if (g && (s || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // random normal binary32 with exponent in [127-span, 127+span]
  function automatic logic [31:0] frand(input int span);
    int e;
    e = 127 - span + int'($urandom_range(0, 2 * span));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  // ---- the same rules for a general layout: ew exponent bits, mw mantissa bits
  function automatic real fx2r(input logic [31:0] f, input int ew, input int mw);
    int e, bias;
    real v;
    bias = (1 << (ew - 1)) - 1;
    e = int'((f >> mw) & ((32'd1 << ew) - 1));
    if (e == 0) return $bitstoreal({f[ew + mw], 63'd0});
    v = 1.0 + real'(f & ((32'd1 << mw) - 1)) / real'(64'd1 << mw);
    v = v * (2.0 ** (e - bias));
    return f[ew + mw] ? -v : v;
  endfunction

  function automatic logic [31:0] r2fx(input real x, input int ew, input int mw);
    logic [63:0] d;
    logic [53:0] m;
    logic        g, s;
    int          e, bias, emax, sh;
    logic [31:0] sign;
    d = $realtobits(x);
    sign = 32'(d[63]) << (ew + mw);
    if (d[62:0] == 63'd0) return sign;
    bias = (1 << (ew - 1)) - 1;
    emax = (1 << ew) - 1;
    e = int'(d[62:52]) - 1023 + bias;
    sh = 52 - mw;
    m = {2'b01, d[51:0]} >> sh;
    g = d[sh - 1];
    s = (sh > 1) ? ((d[51:0] & ((52'd1 << (sh - 1)) - 1)) != 0) : 1'b0;
    if (g && (s || m[0])) m = m + 54'd1;
    if (m[mw + 1]) begin m = m >> 1; e = e + 1; end
    if (e <= 0)    return sign;
    if (e >= emax) return sign | (32'(emax) << mw);
    return sign | (32'(e) << mw) | (32'(m) & ((32'd1 << mw) - 1));
  endfunction

  function automatic logic [31:0] frandx(input int ew, input int mw, input int span);
    int e, bias;
    bias = (1 << (ew - 1)) - 1;
    e = bias - span + int'($urandom_range(0, 2 * span));
    return (32'($urandom_range(0, 1)) << (ew + mw)) | (32'(e) << mw) | ($urandom & ((32'd1 << mw) - 1));
  endfunction

endpackage
