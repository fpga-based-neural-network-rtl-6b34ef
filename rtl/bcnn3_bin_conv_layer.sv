// bcnn3_bin_conv_layer: binary convolutional layer of the BCNN3 accelerator
// (layers 2 and 3), computed inner-parallel.
//
// Input and output feature maps are sign bits (1 = -1). For each kernel m the
// layer walks i = 0 .. LEN/2-1 with lane A at position i and lane B at position
// LEN-1-i; each position takes IN_CH*KS clocks of XNOR and +/-1 accumulation, then
// Leaky-ReLU by arithmetic shift, a pool of 2 and binarisation. On odd i lane A
// writes y[m][i/2] and lane B y[m][(LEN-1-i)/2].
// Interface: kernel bits 32 per word (bit b = ((m*IN_CH)+n)*KS+k at word b/32,
// bit b%32), then the OUT_CH integer biases (low ACC_W bits of a word). A start
// pulse runs the layer; done pulses OUT_CH*(LEN/2)*IN_CH*KS + 1 clocks later and y
// holds OUT_CH x LEN/2 bits, channel-major. The datapath and schedule follow the
// paper; padding (zero contribution), stride 1 and the packing are this design's.
module bcnn3_bin_conv_layer
  import nn_pkg::*;
#(
  parameter int unsigned IN_CH  = BCNN_L1_OUT,
  parameter int unsigned OUT_CH = BCNN_L2_OUT,
  parameter int unsigned LEN    = WIN_LEN,
  parameter int unsigned KS     = BCNN_KS,
  parameter int unsigned ACC_W  = BIN_ACC_W,
  localparam int unsigned HALF  = LEN / 2,
  localparam int unsigned PAD   = (KS - 1) / 2,
  localparam int unsigned NWB   = OUT_CH * IN_CH * KS,
  localparam int unsigned NWW   = (NWB + 31) / 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  input  logic [IN_CH*LEN-1:0]   x,
  output logic [OUT_CH*HALF-1:0] y,
  input  logic        w_we,
  input  logic [15:0] w_addr,
  input  logic [31:0] w_data
);
  localparam int unsigned WAW = (NWW > 1) ? $clog2(NWW) : 1;
  localparam int unsigned BAW = (OUT_CH > 1) ? $clog2(OUT_CH) : 1;

  initial begin
    assert (LEN % 4 == 0) else $error("LEN must be a multiple of 4 for paired pooling on both lanes");
    assert (2 ** (ACC_W - 1) > IN_CH * KS + 1) else $error("ACC_W too small for IN_CH*KS terms");
  end

  logic [$clog2(OUT_CH+1)-1:0] m_q;
  logic [$clog2(HALF+1)-1:0]   i_q;
  logic [$clog2(IN_CH+1)-1:0]  n_q;
  logic [$clog2(KS+1)-1:0]     k_q;
  logic first, last, last_pos;
  int   pa, pb, ta, tb, bidx;
  logic va, vb, wbit, xa, xb;
  logic [31:0] wword;
  logic [ACC_W-1:0] bv;
  logic ob_a, ob_b, ov_a, ov_b;

  param_ram #(.DEPTH(NWW), .WIDTH(32)) u_wram (
    .clk, .we(w_we && w_addr < 16'(NWW)), .waddr(WAW'(w_addr)), .wdata(w_data),
    .raddr(WAW'(bidx / 32)), .rdata(wword));
  param_ram #(.DEPTH(OUT_CH), .WIDTH(ACC_W)) u_bram (
    .clk, .we(w_we && w_addr >= 16'(NWW)), .waddr(BAW'(w_addr - 16'(NWW))), .wdata(w_data[ACC_W-1:0]),
    .raddr(BAW'(m_q)), .rdata(bv));

  always_comb begin
    first    = (n_q == 0) && (k_q == 0);
    last     = (32'(n_q) == IN_CH - 1) && (32'(k_q) == KS - 1);
    last_pos = last && (32'(i_q) == HALF - 1) && (32'(m_q) == OUT_CH - 1);
    bidx     = (int'(m_q) * IN_CH + int'(n_q)) * KS + int'(k_q);
    wbit     = wword[bidx % 32];
    pa = int'(i_q);
    pb = LEN - 1 - int'(i_q);
    ta = pa + int'(k_q) - PAD;
    tb = pb + int'(k_q) - PAD;
    va = (ta >= 0) && (ta < LEN);
    vb = (tb >= 0) && (tb < LEN);
    xa = va ? x[int'(n_q) * LEN + ta] : 1'b0;
    xb = vb ? x[int'(n_q) * LEN + tb] : 1'b0;
  end

  bcnn3_bin_lane #(.ACC_W(ACC_W)) u_lane_a (
    .clk, .rst_n, .en(busy), .first, .last, .tap_valid(va), .x_bit(xa), .w_bit(wbit),
    .bias(bv), .pool_phase(i_q[0]), .out_bit(ob_a), .out_valid(ov_a));
  bcnn3_bin_lane #(.ACC_W(ACC_W)) u_lane_b (
    .clk, .rst_n, .en(busy), .first, .last, .tap_valid(vb), .x_bit(xb), .w_bit(wbit),
    .bias(bv), .pool_phase(i_q[0]), .out_bit(ob_b), .out_valid(ov_b));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      m_q <= '0; i_q <= '0; n_q <= '0; k_q <= '0;
      y <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          m_q <= '0; i_q <= '0; n_q <= '0; k_q <= '0;
        end
      end else begin
        if (ov_a) y[int'(m_q) * HALF + pa / 2] <= ob_a;
        if (ov_b) y[int'(m_q) * HALF + pb / 2] <= ob_b;
        if (32'(k_q) != KS - 1) k_q <= k_q + 1'b1;
        else begin
          k_q <= '0;
          if (32'(n_q) != IN_CH - 1) n_q <= n_q + 1'b1;
          else begin
            n_q <= '0;
            if (32'(i_q) != HALF - 1) i_q <= i_q + 1'b1;
            else begin
              i_q <= '0;
              m_q <= m_q + 1'b1;
            end
          end
        end
        if (last_pos) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
