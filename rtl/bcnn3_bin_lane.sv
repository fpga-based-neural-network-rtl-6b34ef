// bcnn3_bin_lane: one of the two lanes of a BCNN3 binary convolutional layer.
//
// Each tap is an XNOR of the input sign bit and the kernel sign bit; a match adds
// +1 and a mismatch -1 to an ACC_W-bit two's-complement accumulator that starts
// from the integer bias on the first tap (taps in the zero padding add nothing).
// On the last tap the MSB of the sum selects Leaky-ReLU: negative sums are
// shifted right arithmetically by LEAKY_SHIFT (x0.25). Positions come in pooling
// pairs: the first activation is kept, on the second (pool_phase = 1) the larger
// of the two is binarised (fSign: out_bit = 1 for a negative value) and out_valid
// is high. Timing: one tap per clock, outputs combinational in the last tap's
// clock. XNOR, +1/-1 adder, MSB-selected shift and sign follow the paper's BCNN3
// drawing; the accumulator width is this design's (see ACC_W in nn_pkg).
module bcnn3_bin_lane
  import nn_pkg::*;
#(
  parameter int unsigned ACC_W = BIN_ACC_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic first,
  input  logic last,
  input  logic tap_valid,
  input  logic x_bit,
  input  logic w_bit,
  input  logic signed [ACC_W-1:0] bias,
  input  logic pool_phase,
  output logic out_bit,
  output logic out_valid
);
  logic signed [ACC_W-1:0] acc_q, prev_q, acc_base, acc_nx, act, pooled;
  logic match;

  always_comb begin
    match     = ~(x_bit ^ w_bit);
    acc_base  = first ? bias : acc_q;
    acc_nx    = !tap_valid ? acc_base : (match ? acc_base + ACC_W'(1) : acc_base - ACC_W'(1));
    act       = acc_nx[ACC_W-1] ? (acc_nx >>> LEAKY_SHIFT) : acc_nx;
    pooled    = (act > prev_q) ? act : prev_q;
    out_bit   = pooled[ACC_W-1];
    out_valid = en && last && pool_phase;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q  <= '0;
      prev_q <= '0;
    end else if (en) begin
      acc_q <= acc_nx;
      if (last && !pool_phase) prev_q <= act;
    end
  end
endmodule
