// bcnn_fc_layer: binary fully-connected output layer of the BCNN with the symbol
// decision.
//
// Inputs and weights are sign bits (1 = -1). For each output o the accumulator
// starts from the integer bias and adds +1 for every input/weight pair that
// agrees (XNOR) and -1 for every pair that does not, one pair per clock. The
// finished sum is stored in scores[o]; the decision is the index of the largest
// score, the lowest index on a tie.
// Interface: weight bits 32 per word (bit b = o*N_IN+j at word b/32, bit b%32),
// then N_OUT integer biases (low ACC_W bits). A start pulse runs the layer; done
// pulses N_OUT*N_IN + 1 clocks later. Logic-gate (XNOR) computation follows the
// paper; the serial schedule, output count and decision rule are this design's.
module bcnn_fc_layer
  import nn_pkg::*;
#(
  parameter int unsigned N_IN  = BCNN_L3_OUT * WIN_LEN / 4,
  parameter int unsigned N_OUT = N_CLASS,
  parameter int unsigned ACC_W = 12,
  localparam int unsigned NWB  = N_OUT * N_IN,
  localparam int unsigned NWW  = (NWB + 31) / 32,
  localparam int unsigned OW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  input  logic [N_IN-1:0] x,
  output logic signed [ACC_W-1:0] scores [N_OUT],
  output logic [OW-1:0] decision,
  input  logic        w_we,
  input  logic [15:0] w_addr,
  input  logic [31:0] w_data
);
  localparam int unsigned WAW = (NWW > 1) ? $clog2(NWW) : 1;

  logic [$clog2(N_IN+1)-1:0]  j_q;
  logic [$clog2(N_OUT+1)-1:0] o_q;
  logic signed [ACC_W-1:0] acc_q, best_q, acc_base, acc_nx, bv;
  logic [31:0] wword;
  int   bidx;
  logic first, last, match;

  param_ram #(.DEPTH(NWW), .WIDTH(32)) u_wram (
    .clk, .we(w_we && w_addr < 16'(NWW)), .waddr(WAW'(w_addr)), .wdata(w_data),
    .raddr(WAW'(bidx / 32)), .rdata(wword));
  param_ram #(.DEPTH(N_OUT), .WIDTH(ACC_W)) u_bram (
    .clk, .we(w_we && w_addr >= 16'(NWW)), .waddr(OW'(w_addr - 16'(NWW))), .wdata(w_data[ACC_W-1:0]),
    .raddr(OW'(o_q)), .rdata(bv));

  always_comb begin
    bidx     = int'(o_q) * N_IN + int'(j_q);
    match    = ~(x[j_q] ^ wword[bidx % 32]);
    first    = (j_q == 0);
    last     = (32'(j_q) == N_IN - 1);
    acc_base = first ? bv : acc_q;
    acc_nx   = match ? acc_base + ACC_W'(1) : acc_base - ACC_W'(1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      j_q <= '0; o_q <= '0;
      acc_q <= '0; best_q <= '0;
      decision <= '0;
      for (int o = 0; o < N_OUT; o++) scores[o] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; j_q <= '0; o_q <= '0;
        end
      end else begin
        acc_q <= acc_nx;
        if (last) begin
          scores[OW'(o_q)] <= acc_nx;
          j_q <= '0;
          if (int'(o_q) == 0 || acc_nx > best_q) begin
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
