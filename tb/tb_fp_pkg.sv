// tb_fp_pkg: reference arithmetic for the testbenches.
//
// Single-precision values are converted exactly to double-precision reals, the
// operation is done in double precision, and the result is rounded back to single
// precision to nearest-even by explicit bit manipulation of the 64-bit pattern.
// For one add or multiply of two singles this double rounding gives the correctly
// rounded single result, so it is an independent model of the fp32 units. Values
// below the single normal range are flushed to zero, as in the design.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    real m;
    int  fr, ex;
    if (f[30:23] == 8'd0) return 0.0;
    fr = int'(f[22:0]);
    ex = int'(f[30:23]) - 127;
    m  = 1.0 + fr / 8388608.0;
    while (ex > 0) begin m = m * 2.0; ex--; end
    while (ex < 0) begin m = m / 2.0; ex++; end
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [52:0] mant;
    logic [24:0] m24;
    logic        g, st;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e    = int'(d[62:52]) - 1023 + 127;
    mant = {1'b1, d[51:0]};
    m24  = {1'b0, mant[52:29]};
    g    = mant[28];
    st   = |mant[27:0];
    if (g && (st || m24[0])) m24 = m24 + 25'd1;
    if (m24[24]) begin m24 = m24 >> 1; e = e + 1; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m24[22:0]};
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // a random normal single with exponent in [127-span, 127+span]
  function automatic logic [31:0] frand(int span);
    int unsigned e;
    e = 32'(127 - span) + ($urandom % 32'(2 * span + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  function automatic logic [31:0] fleaky(logic [31:0] x);
    if (!x[31]) return x;
    return r2f(f2r(x) * 0.25);
  endfunction

  function automatic logic [31:0] fmax(logic [31:0] a, logic [31:0] b);
    return (f2r(b) > f2r(a)) ? b : a;
  endfunction

endpackage
