// maxpool_fp32: two-input maximum of IEEE-754 single values (the "fCMP" unit of
// the 1-D maxpooling stage, window 2).
//
// Combinational. Compares sign-magnitude words without converting them: two
// non-negative numbers compare like unsigned integers, two negative ones in
// reverse, and a negative one loses to a non-negative one. Equal values and the
// pair +0/-0 return a. Pooling follows the paper; the tie rule is this design's.
module maxpool_fp32
  import nn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic b_gt_a;
  always_comb begin
    unique case ({a[31], b[31]})
      2'b00:   b_gt_a = b[30:0] > a[30:0];
      2'b11:   b_gt_a = b[30:0] < a[30:0];
      2'b10:   b_gt_a = (a[30:0] != 31'd0) || (b[30:0] != 31'd0);
      default: b_gt_a = 1'b0;
    endcase
    y = b_gt_a ? b : a;
  end
endmodule
