// rof_cnn3: CNN3 decision-scheme accelerator for the radio-over-fibre receiver.
//
// A window of WIN_LEN received samples (fp32) is held in an input buffer and
// passed through
//   conv L1: 8 kernels 1x3  -> Leaky-ReLU -> maxpool 2 -> 8 x 8
//   conv L2: 16 kernels 1x3 -> Leaky-ReLU -> maxpool 2 -> 16 x 4
//   fully-connected output layer (64 -> N_OUT) -> decision = argmax
// The layers run one after another; each convolutional layer uses two lanes that
// work inwards from both ends of its input (inner-parallel computation).
// Interface: in_we/in_addr/in_data fill the input buffer; prm_we/prm_addr/prm_data
// load the parameters into a flat address space: L1 kernels (24), L1 biases (8),
// L2 kernels (384), L2 biases (16), FC weights (N_OUT*64), FC biases (N_OUT).
// A start pulse runs one decision; done pulses when decision and logits are
// valid. L1, L2 and FC are busy for 192, 1536 and N_OUT*64 clocks, each hand-over
// costs one clock, so done goes high on the 1858th clock edge after the edge that
// sampled start (N_OUT = 2). The network shape and layer order follow the paper;
// the load interface and address map stand in for its AXI/DMA system.
module rof_cnn3
  import nn_pkg::*;
#(
  parameter int unsigned LEN   = WIN_LEN,
  parameter int unsigned N_OUT = N_CLASS,
  localparam int unsigned L1W  = CNN_L1_OUT * CNN_KS,
  localparam int unsigned L2W  = CNN_L2_OUT * CNN_L1_OUT * CNN_KS,
  localparam int unsigned FCIN = CNN_L2_OUT * LEN / 4,
  localparam int unsigned FCW  = N_OUT * FCIN,
  localparam int unsigned B_L1 = 0,
  localparam int unsigned B_L2 = B_L1 + L1W + CNN_L1_OUT,
  localparam int unsigned B_FC = B_L2 + L2W + CNN_L2_OUT,
  localparam int unsigned NPRM = B_FC + FCW + N_OUT,
  localparam int unsigned OW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_we,
  input  logic [7:0]  in_addr,
  input  fp32_t       in_data,
  input  logic        prm_we,
  input  logic [15:0] prm_addr,
  input  fp32_t       prm_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [OW-1:0] decision,
  output fp32_t       logits [N_OUT]
);
  fp32_t xin [LEN];
  fp32_t f1 [CNN_L1_OUT*LEN/2];
  fp32_t f2 [FCIN];
  logic  s1, d1, d2, d3, b1, b2, b3;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LEN; i++) xin[i] <= '0;
    end else if (in_we && 32'(in_addr) < LEN) begin
      xin[in_addr[$clog2(LEN)-1:0]] <= in_data;
    end
  end

  assign s1   = start && !busy;
  assign busy = b1 | b2 | b3;

  cnn3_conv_layer #(.IN_CH(1), .OUT_CH(CNN_L1_OUT), .LEN(LEN), .KS(CNN_KS)) u_l1 (
    .clk, .rst_n, .start(s1), .busy(b1), .done(d1), .x(xin), .y(f1),
    .w_we(prm_we && prm_addr < 16'(B_L2)),  // B_L1 is 0
    .w_addr(prm_addr - 16'(B_L1)), .w_data(prm_data));

  cnn3_conv_layer #(.IN_CH(CNN_L1_OUT), .OUT_CH(CNN_L2_OUT), .LEN(LEN/2), .KS(CNN_KS)) u_l2 (
    .clk, .rst_n, .start(d1), .busy(b2), .done(d2), .x(f1), .y(f2),
    .w_we(prm_we && prm_addr >= 16'(B_L2) && prm_addr < 16'(B_FC)),
    .w_addr(prm_addr - 16'(B_L2)), .w_data(prm_data));

  cnn_fc_layer #(.N_IN(FCIN), .N_OUT(N_OUT)) u_fc (
    .clk, .rst_n, .start(d2), .busy(b3), .done(d3), .x(f2), .logits, .decision,
    .w_we(prm_we && prm_addr >= 16'(B_FC) && prm_addr < 16'(NPRM)),
    .w_addr(prm_addr - 16'(B_FC)), .w_data(prm_data));

  assign done = d3;
endmodule
