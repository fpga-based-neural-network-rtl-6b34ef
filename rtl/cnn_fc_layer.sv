// cnn_fc_layer: fully-connected fp32 output layer of the CNN with the symbol
// decision.
//
// One fMUL/fADD multiply-accumulate per clock: for each output neuron o the
// accumulator starts from bias[o] and adds x[j]*W[o][j] for j = 0 .. N_IN-1; the
// finished sum is stored in logits[o] and compared (fCMP) with the best so far.
// The decision is the index of the largest output, the lowest index on a tie.
// Interface: weights at address o*N_IN+j, then the N_OUT biases, over
// w_we/w_addr/w_data; a start pulse runs the layer, done pulses
// N_OUT*N_IN + 1 clocks after start with logits and decision valid.
// A fully-connected fp32 output layer follows the paper; the serial MAC, the
// number of outputs and the argmax decision are this design's choices.
module cnn_fc_layer
  import nn_pkg::*;
#(
  parameter int unsigned N_IN  = CNN_L2_OUT * WIN_LEN / 4,
  parameter int unsigned N_OUT = N_CLASS,
  localparam int unsigned NW   = N_OUT * N_IN,
  localparam int unsigned OW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  input  fp32_t x [N_IN],
  output fp32_t logits [N_OUT],
  output logic [OW-1:0] decision,
  input  logic        w_we,
  input  logic [15:0] w_addr,
  input  fp32_t       w_data
);
  localparam int unsigned WAW = (NW > 1) ? $clog2(NW) : 1;
  localparam int unsigned JW  = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic [$clog2(N_IN+1)-1:0]  j_q;
  logic [$clog2(N_OUT+1)-1:0] o_q;
  fp32_t acc_q, best_q, acc_base, prod, acc_nx, wv, bv, best_nx;
  logic  first, last;

  param_ram #(.DEPTH(NW), .WIDTH(32)) u_wram (
    .clk, .we(w_we && w_addr < 16'(NW)), .waddr(WAW'(w_addr)), .wdata(w_data),
    .raddr(WAW'(int'(o_q) * N_IN + int'(j_q))), .rdata(wv));
  param_ram #(.DEPTH(N_OUT), .WIDTH(32)) u_bram (
    .clk, .we(w_we && w_addr >= 16'(NW)), .waddr(OW'(w_addr - 16'(NW))), .wdata(w_data),
    .raddr(OW'(o_q)), .rdata(bv));

  fp32_mul     u_mul (.a(x[JW'(j_q)]), .b(wv), .y(prod));
  fp32_add     u_add (.a(acc_base), .b(prod), .sub(1'b0), .y(acc_nx));
  maxpool_fp32 u_cmp (.a(best_q), .b(acc_nx), .y(best_nx));

  always_comb begin
    first    = (j_q == 0);
    last     = (32'(j_q) == N_IN - 1);
    acc_base = first ? bv : acc_q;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      j_q <= '0; o_q <= '0;
      acc_q <= '0; best_q <= '0;
      decision <= '0;
      for (int o = 0; o < N_OUT; o++) logits[o] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; j_q <= '0; o_q <= '0;
        end
      end else begin
        acc_q <= acc_nx;
        if (last) begin
          logits[OW'(o_q)] <= acc_nx;
          j_q <= '0;
          // first output always taken; later ones only when strictly larger
          if (int'(o_q) == 0 || best_nx != best_q) begin
            best_q   <= acc_nx;
            decision <= OW'(o_q);
          end
          if (32'(o_q) == N_OUT - 1) begin
            busy <= 1'b0; done <= 1'b1;
          end else o_q <= o_q + 1'b1;
        end else j_q <= j_q + 1'b1;
      end
    end
  end
endmodule
