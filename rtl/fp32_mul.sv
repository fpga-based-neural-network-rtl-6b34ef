// fp32_mul: IEEE-754 single-precision multiplier (the "fMUL" DSP unit of the
// convolution, Leaky-ReLU and output layers).
//
// Combinational. The 24x24-bit significand product is normalised by at most one
// place and rounded to nearest, ties to even, using a guard bit and a sticky bit.
// Subnormal operands are read as zero and results below the normal range are
// flushed to a signed zero; results above the range saturate to infinity. NaN and
// infinity operands are not given special treatment: the networks never produce
// them. IEEE-754 single precision follows the paper; the flush-to-zero and the
// missing special-value handling are this design's simplifications.
module fp32_mul
  import nn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_fields_t fa, fb;
  logic         sign;
  logic [23:0]  ma, mb;
  logic [47:0]  prod;
  logic [23:0]  mant;
  logic         guard, sticky, rnd;
  logic [24:0]  mant_r;
  logic signed [10:0] exp_r;

  always_comb begin
    fa   = fp32_fields_t'(a);
    fb   = fp32_fields_t'(b);
    sign = fa.sign ^ fb.sign;
    ma   = {1'b1, fa.frac};
    mb   = {1'b1, fb.frac};
    prod = ma * mb;
    exp_r = $signed({3'b000, fa.exp}) + $signed({3'b000, fb.exp}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_r  = exp_r + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_r + 11'sd1;
    end
    if (fa.exp == 8'd0 || fb.exp == 8'd0 || exp_r <= 11'sd0)
      y = {sign, 31'd0};
    else if (exp_r >= 11'sd255)
      y = {sign, FP32_INF[30:0]};
    else
      y = {sign, exp_r[7:0], mant_r[22:0]};
  end
endmodule
