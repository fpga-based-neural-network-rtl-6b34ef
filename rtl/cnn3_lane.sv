// cnn3_lane: one of the two compute lanes of a CNN3 convolutional layer. It holds
// the fMUL/fADD multiply-accumulate ("Convolution"), the Leaky-ReLU and the
// maxpool comparison ("Maxpooling") for the output position it is working on.
//
// Each enabled clock the lane adds x*w to its accumulator; on the first tap of a
// position the accumulator starts from the bias, and a tap outside the input
// (zero padding) adds nothing. On the last tap the finished sum goes through
// Leaky-ReLU in the same clock. Positions come in pairs for the pool of 2: on the
// first position of a pair (pool_phase = 0) the activation is kept; on the second
// (pool_phase = 1) pool_valid is high and pooled = max(kept, current).
// Timing: one tap per clock, pooled/pool_valid are combinational in the last tap's
// clock. The lane structure follows the paper's CNN3 drawing; the single-clock MAC
// is this design's choice.
module cnn3_lane
  import nn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,          // a tap is presented this clock
  input  logic  first,       // first tap of an output position
  input  logic  last,        // last tap of an output position
  input  logic  tap_valid,   // 0: tap falls in the zero padding
  input  fp32_t x,
  input  fp32_t w,
  input  fp32_t bias,
  input  logic  pool_phase,  // 1: second position of a pooling pair
  output fp32_t pooled,
  output logic  pool_valid
);
  fp32_t acc_q, prev_q;
  fp32_t acc_base, prod, acc_sum, acc_nx, act;

  fp32_mul u_mul  (.a(x), .b(w), .y(prod));
  fp32_add u_add  (.a(acc_base), .b(prod), .sub(1'b0), .y(acc_sum));
  leaky_relu_fp32 u_act (.x(acc_nx), .y(act));
  maxpool_fp32    u_mp  (.a(prev_q), .b(act), .y(pooled));

  always_comb begin
    acc_base   = first ? bias : acc_q;
    acc_nx     = tap_valid ? acc_sum : acc_base;
    pool_valid = en && last && pool_phase;
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
