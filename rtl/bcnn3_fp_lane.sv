// bcnn3_fp_lane: one of the two lanes of the BCNN3 first layer. The input is fp32,
// the kernel is +/-1, so each tap is an fADD (kernel +1) or an fSUB (kernel -1) of
// the input sample into the accumulator, which starts from the fp32 bias on the
// first tap; taps in the zero padding add nothing. On the last tap the sum goes
// through Leaky-ReLU (fCMP, x0.25) and fSign(): out_bit = 1 when the result is
// negative (value -1), 0 otherwise (+1).
// Timing: one tap per clock; out_bit/out_valid are combinational in the last
// tap's clock. fADD/fSUB, Leaky-ReLU and fSign follow the paper's BCNN3 drawing.
module bcnn3_fp_lane
  import nn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  first,
  input  logic  last,
  input  logic  tap_valid,
  input  fp32_t x,
  input  logic  w_neg,       // kernel bit: 1 = -1, 0 = +1
  input  fp32_t bias,
  output logic  out_bit,
  output logic  out_valid
);
  fp32_t acc_q, acc_base, acc_sum, acc_nx, act;

  fp32_add        u_add (.a(acc_base), .b(x), .sub(w_neg), .y(acc_sum));
  leaky_relu_fp32 u_act (.x(acc_nx), .y(act));

  always_comb begin
    acc_base  = first ? bias : acc_q;
    acc_nx    = tap_valid ? acc_sum : acc_base;
    out_bit   = act[31] && (act[30:0] != 31'd0);   // fSign(): -0 counts as +1
    out_valid = en && last;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  acc_q <= '0;
    else if (en) acc_q <= acc_nx;
  end
endmodule
