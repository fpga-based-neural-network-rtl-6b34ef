// cnn3_conv_layer: a CNN3 1-D convolutional layer with inner-parallel computation.
//
// For every output channel m the layer walks i = 0 .. LEN/2-1 and computes two
// output positions at once: lane A position i from the start of the input and
// lane B position LEN-1-i from its end. Both lanes share the kernel word
// W[m][n][k] read from the parameter memory and each reads its own input sample
// X[n][p+k-PAD]. A position takes IN_CH*KS clocks (one multiply-accumulate per
// lane per clock, bias first), is activated by Leaky-ReLU and pooled in pairs with
// window 2, so on odd i each lane writes one pooled value:
//   y[m][i/2] (lane A) and y[m][(LEN-1-i)/2] (lane B).
// Stride 1 and zero padding PAD = (KS-1)/2 keep the length before pooling at LEN.
//
// Interface: parameters are loaded over w_we/w_addr/w_data, weights first at
// address ((m*IN_CH)+n)*KS+k, then the OUT_CH biases. A start pulse runs the layer;
// done pulses one clock after the last tap, OUT_CH*(LEN/2)*IN_CH*KS + 1 clocks
// after start, and y then holds the OUT_CH x LEN/2 result, channel-major.
// The two-sided computation and the activation/pooling order follow the paper's
// inner-parallel algorithm; the loop order (all taps of a position before the next
// position), padding and stride are this design's choices.
module cnn3_conv_layer
  import nn_pkg::*;
#(
  parameter int unsigned IN_CH  = 1,
  parameter int unsigned OUT_CH = CNN_L1_OUT,
  parameter int unsigned LEN    = WIN_LEN,
  parameter int unsigned KS     = CNN_KS,
  localparam int unsigned HALF  = LEN / 2,
  localparam int unsigned PAD   = (KS - 1) / 2,
  localparam int unsigned NW    = OUT_CH * IN_CH * KS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  input  fp32_t x [IN_CH*LEN],
  output fp32_t y [OUT_CH*HALF],
  input  logic        w_we,
  input  logic [15:0] w_addr,
  input  fp32_t       w_data
);
  localparam int unsigned WAW = (NW > 1) ? $clog2(NW) : 1;
  localparam int unsigned BAW = (OUT_CH > 1) ? $clog2(OUT_CH) : 1;

  initial begin
    assert (LEN % 4 == 0) else $error("LEN must be a multiple of 4 for paired pooling on both lanes");
  end

  logic [$clog2(OUT_CH+1)-1:0] m_q;
  logic [$clog2(HALF+1)-1:0]   i_q;
  logic [$clog2(IN_CH+1)-1:0]  n_q;
  logic [$clog2(KS+1)-1:0]     k_q;
  logic first, last, last_pos;
  int   pa, pb, ta, tb;
  logic va, vb;
  fp32_t xa, xb, wv, bv, pooled_a, pooled_b;
  logic  pv_a, pv_b;
  logic [WAW-1:0] w_raddr;

  // parameter memories: kernels and biases
  param_ram #(.DEPTH(NW), .WIDTH(32)) u_wram (
    .clk, .we(w_we && w_addr < 16'(NW)), .waddr(WAW'(w_addr)), .wdata(w_data),
    .raddr(w_raddr), .rdata(wv));
  param_ram #(.DEPTH(OUT_CH), .WIDTH(32)) u_bram (
    .clk, .we(w_we && w_addr >= 16'(NW)), .waddr(BAW'(w_addr - 16'(NW))), .wdata(w_data),
    .raddr(BAW'(m_q)), .rdata(bv));

  always_comb begin
    first    = (int'(n_q) == 0) && (int'(k_q) == 0);
    last     = (int'(n_q) == IN_CH - 1) && (int'(k_q) == KS - 1);
    last_pos = last && (int'(i_q) == HALF - 1) && (int'(m_q) == OUT_CH - 1);
    w_raddr  = WAW'((int'(m_q) * IN_CH + int'(n_q)) * KS + int'(k_q));
    pa = int'(i_q);
    pb = LEN - 1 - int'(i_q);
    ta = pa + int'(k_q) - PAD;
    tb = pb + int'(k_q) - PAD;
    va = (ta >= 0) && (ta < LEN);
    vb = (tb >= 0) && (tb < LEN);
    xa = va ? x[int'(n_q) * LEN + ta] : '0;
    xb = vb ? x[int'(n_q) * LEN + tb] : '0;
  end

  cnn3_lane u_lane_a (.clk, .rst_n, .en(busy), .first, .last, .tap_valid(va), .x(xa), .w(wv),
                      .bias(bv), .pool_phase(i_q[0]), .pooled(pooled_a), .pool_valid(pv_a));
  cnn3_lane u_lane_b (.clk, .rst_n, .en(busy), .first, .last, .tap_valid(vb), .x(xb), .w(wv),
                      .bias(bv), .pool_phase(i_q[0]), .pooled(pooled_b), .pool_valid(pv_b));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      m_q <= '0; i_q <= '0; n_q <= '0; k_q <= '0;
      for (int j = 0; j < OUT_CH * HALF; j++) y[j] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          m_q <= '0; i_q <= '0; n_q <= '0; k_q <= '0;
        end
      end else begin
        if (pv_a) y[int'(m_q) * HALF + pa / 2] <= pooled_a;
        if (pv_b) y[int'(m_q) * HALF + pb / 2] <= pooled_b;
        // tap counters: k fastest, then n, then position pair i, then channel m
        if (int'(k_q) != KS - 1) k_q <= k_q + 1'b1;
        else begin
          k_q <= '0;
          if (int'(n_q) != IN_CH - 1) n_q <= n_q + 1'b1;
          else begin
            n_q <= '0;
            if (int'(i_q) != HALF - 1) i_q <= i_q + 1'b1;
            else begin
              i_q <= '0;
              m_q <= m_q + 1'b1;
            end
          end
        end
        if (last_pos) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
