// fp32_add: IEEE-754 single-precision adder/subtractor (the "fADD" / "fSUB" DSP
// unit). y = a + b when sub = 0, y = a - b when sub = 1.
//
// Combinational. The operand of larger magnitude is kept in place, the other is
// shifted right into a 27-bit field (24 significand bits, guard, round and a
// sticky bit that collects everything shifted further). After the add or subtract
// the result is normalised (one place right on carry, or left by the leading-zero
// count after cancellation) and rounded to nearest, ties to even. Subnormals are
// flushed to zero, overflow saturates to infinity, an exact zero difference is +0.
// IEEE-754 single precision follows the paper; the flush-to-zero is this design's.
module fp32_add
  import nn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  logic  sub,
  output fp32_t y
);
  fp32_fields_t fa, fb;
  logic [7:0]   ebig, esml;
  logic [22:0]  frbig, frsml;
  logic         sb;
  logic         sbig, ssml;
  logic [23:0]  mbig, msml;
  logic [7:0]   d;
  logic [4:0]   dsh;
  logic [71:0]  wide;
  logic [26:0]  big_ext, sml_ext;
  logic [27:0]  sum;
  logic [26:0]  norm;
  logic [4:0]   lz;
  logic         found;
  logic signed [10:0] exp_r;
  logic [23:0]  mant;
  logic         guard, sticky, rnd;
  logic [24:0]  mant_r;

  always_comb begin
    fa = fp32_fields_t'(a);
    fb = fp32_fields_t'(b);
    sb = fb.sign ^ sub;
    // order by magnitude
    if ({fb.exp, fb.frac} > {fa.exp, fa.frac}) begin
      ebig = fb.exp; frbig = fb.frac; sbig = sb;
      esml = fa.exp; frsml = fa.frac; ssml = fa.sign;
    end else begin
      ebig = fa.exp; frbig = fa.frac; sbig = fa.sign;
      esml = fb.exp; frsml = fb.frac; ssml = sb;
    end
    mbig = (ebig == 8'd0) ? 24'd0 : {1'b1, frbig};
    msml = (esml == 8'd0) ? 24'd0 : {1'b1, frsml};
    d    = ebig - esml;
    dsh  = (d > 8'd31) ? 5'd31 : d[4:0];
    // align the smaller operand: 24 bits + 3 rounding bits, rest collapsed to sticky
    wide    = {msml, 48'd0} >> dsh;
    sml_ext = {wide[71:46], |wide[45:0]};
    big_ext = {mbig, 3'b000};

    exp_r = $signed({3'b000, ebig});
    if (sbig == ssml) sum = {1'b0, big_ext} + {1'b0, sml_ext};
    else              sum = {1'b0, big_ext} - {1'b0, sml_ext};

    // normalise
    lz    = 5'd0;
    found = 1'b0;
    norm  = sum[26:0];
    if (sum[27]) begin
      norm  = {sum[27:2], sum[1] | sum[0]};
      exp_r = exp_r + 11'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz    = 5'(26 - i);
        end
      end
      norm  = sum[26:0] << lz;
      exp_r = exp_r - $signed({6'd0, lz});
    end

    mant   = norm[26:3];
    guard  = norm[2];
    sticky = norm[1] | norm[0];
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_r + 11'sd1;
    end

    if (sum == 28'd0)
      y = {sbig & ssml, 31'd0};           // x + (-x) = +0, (-0) + (-0) = -0
    else if (exp_r <= 11'sd0)
      y = {sbig, 31'd0};
    else if (exp_r >= 11'sd255)
      y = {sbig, FP32_INF[30:0]};
    else
      y = {sbig, exp_r[7:0], mant_r[22:0]};
  end
endmodule
