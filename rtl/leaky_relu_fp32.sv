// leaky_relu_fp32: hardware-friendly Leaky-ReLU on an IEEE-754 single value,
// f(x) = x for x >= 0 and f(x) = 0.25*x for x < 0.
//
// Combinational. The ">= 0" comparison is the sign bit. The 0.25 factor is a
// right shift of the value by SHIFT places, which for a floating-point number is
// a subtraction of SHIFT from the exponent; the significand is untouched, so the
// result is exact. A negative value whose exponent would leave the normal range is
// flushed to -0. The slope 0.25 and the shift realisation follow the paper; the
// exponent form of the shift is this design's reading of it for fp32 data.
module leaky_relu_fp32
  import nn_pkg::*;
#(
  parameter int unsigned SHIFT = LEAKY_SHIFT
) (
  input  fp32_t x,
  output fp32_t y
);
  fp32_fields_t f;
  always_comb begin
    f = fp32_fields_t'(x);
    if (!f.sign)
      y = x;
    else if (f.exp <= 8'(SHIFT))
      y = {1'b1, 31'd0};
    else
      y = {1'b1, f.exp - 8'(SHIFT), f.frac};
  end
endmodule
