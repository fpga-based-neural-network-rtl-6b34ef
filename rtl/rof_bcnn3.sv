// rof_bcnn3: BCNN3 decision-scheme accelerator for the radio-over-fibre receiver.
//
// A window of WIN_LEN fp32 samples passes through
//   L1: 48 kernels 1x5, +/-1 weights on fp32 data (fADD/fSUB), Leaky-ReLU, sign -> 48 x 16 bits
//   L2: 64 kernels 1x5, XNOR/+-1 sums, shift Leaky-ReLU, maxpool 2, sign      -> 64 x 8 bits
//   L3: 72 kernels 1x5, same as L2                                            -> 72 x 4 bits
//   binary fully-connected output layer (288 -> N_OUT), decision = argmax
// Every convolutional layer has two lanes working inwards from both ends of its
// input (inner-parallel computation); the layers run one after another.
// Interface: in_we/in_addr/in_data fill the input buffer; prm_we/prm_addr/prm_data
// load a flat parameter space: L1 kernel bits (8 words), L1 fp32 biases (48),
// L2 kernel bits (480 words), L2 biases (64), L3 kernel bits (720 words),
// L3 biases (72), FC weight bits (18 words), FC biases (N_OUT); kernel bits are
// packed 32 per word, integer biases in the low bits of a word. A start pulse
// runs one decision; done pulses when decision and scores are valid: the layers
// are busy for 1920, 122880, 92160 and N_OUT*288 clocks plus one clock per
// hand-over, 217539 clock edges after start for N_OUT = 2. The network and the
// datapaths follow the paper; the load interface and address map are this
// design's stand-in for the paper's AXI/DMA system.
module rof_bcnn3
  import nn_pkg::*;
#(
  parameter int unsigned LEN   = WIN_LEN,
  parameter int unsigned N_OUT = N_CLASS,
  localparam int unsigned FCIN  = BCNN_L3_OUT * LEN / 4,
  localparam int unsigned W1    = (BCNN_L1_OUT * BCNN_KS + 31) / 32,
  localparam int unsigned W2    = (BCNN_L2_OUT * BCNN_L1_OUT * BCNN_KS + 31) / 32,
  localparam int unsigned W3    = (BCNN_L3_OUT * BCNN_L2_OUT * BCNN_KS + 31) / 32,
  localparam int unsigned WF    = (N_OUT * FCIN + 31) / 32,
  localparam int unsigned B_L1  = 0,
  localparam int unsigned B_L2  = B_L1 + W1 + BCNN_L1_OUT,
  localparam int unsigned B_L3  = B_L2 + W2 + BCNN_L2_OUT,
  localparam int unsigned B_FC  = B_L3 + W3 + BCNN_L3_OUT,
  localparam int unsigned NPRM  = B_FC + WF + N_OUT,
  localparam int unsigned OW    = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned FC_AW = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_we,
  input  logic [7:0]  in_addr,
  input  fp32_t       in_data,
  input  logic        prm_we,
  input  logic [15:0] prm_addr,
  input  logic [31:0] prm_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [OW-1:0] decision,
  output logic signed [FC_AW-1:0] scores [N_OUT]
);
  fp32_t xin [LEN];
  logic [BCNN_L1_OUT*LEN-1:0]   f1;
  logic [BCNN_L2_OUT*LEN/2-1:0] f2;
  logic [FCIN-1:0]              f3;
  logic s1, d1, d2, d3, d4, b1, b2, b3, b4;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LEN; i++) xin[i] <= '0;
    end else if (in_we && 32'(in_addr) < LEN) begin
      xin[in_addr[$clog2(LEN)-1:0]] <= in_data;
    end
  end

  assign s1   = start && !busy;
  assign busy = b1 | b2 | b3 | b4;
  assign done = d4;

  bcnn3_fp_conv_layer #(.IN_CH(1), .OUT_CH(BCNN_L1_OUT), .LEN(LEN), .KS(BCNN_KS)) u_l1 (
    .clk, .rst_n, .start(s1), .busy(b1), .done(d1), .x(xin), .y(f1),
    .w_we(prm_we && prm_addr < 16'(B_L2)),  // B_L1 is 0
    .w_addr(prm_addr - 16'(B_L1)), .w_data(prm_data));

  bcnn3_bin_conv_layer #(.IN_CH(BCNN_L1_OUT), .OUT_CH(BCNN_L2_OUT), .LEN(LEN), .KS(BCNN_KS)) u_l2 (
    .clk, .rst_n, .start(d1), .busy(b2), .done(d2), .x(f1), .y(f2),
    .w_we(prm_we && prm_addr >= 16'(B_L2) && prm_addr < 16'(B_L3)),
    .w_addr(prm_addr - 16'(B_L2)), .w_data(prm_data));

  bcnn3_bin_conv_layer #(.IN_CH(BCNN_L2_OUT), .OUT_CH(BCNN_L3_OUT), .LEN(LEN/2), .KS(BCNN_KS)) u_l3 (
    .clk, .rst_n, .start(d2), .busy(b3), .done(d3), .x(f2), .y(f3),
    .w_we(prm_we && prm_addr >= 16'(B_L3) && prm_addr < 16'(B_FC)),
    .w_addr(prm_addr - 16'(B_L3)), .w_data(prm_data));

  bcnn_fc_layer #(.N_IN(FCIN), .N_OUT(N_OUT), .ACC_W(FC_AW)) u_fc (
    .clk, .rst_n, .start(d3), .busy(b4), .done(d4), .x(f3), .scores, .decision,
    .w_we(prm_we && prm_addr >= 16'(B_FC) && prm_addr < 16'(NPRM)),
    .w_addr(prm_addr - 16'(B_FC)), .w_data(prm_data));
endmodule
