// rof_nn_accel: neural-network decision accelerator for a 60 GHz radio-over-fibre
// receiver, holding both the CNN3 and the BCNN3 decision schemes and a latency
// timer.
//
// The host (in a full system a soft micro-controller with a DMA engine on an AXI
// bus) writes the network parameters and a window of WIN_LEN received samples
// (fp32) and pulses start. net_sel picks the network for parameter writes and for
// the run; it is sampled at start, so changing it during a run has no effect on
// that run. Input samples go to both networks' input buffers. done pulses when the
// selected network has its symbol decision; latency_cycles then holds the number
// of clocks from start to done. A start while busy is ignored.
// Ports: prm_addr is the flat address inside the selected network's parameter map
// (see rof_cnn3 / rof_bcnn3). CNN logits are fp32; BCNN scores are integers.
// Latency from the start edge to done (N_CLASS = 2): CNN 1858 clocks, BCNN 217539
// clocks; latency_cycles reads the same numbers.
// The two networks, their layers and the inner-parallel lanes follow the paper,
// which builds the CNN and the BCNN as separate designs; putting both behind one
// selector and the simple load port are this design's choices.
module rof_nn_accel
  import nn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  net_sel_e    net_sel,
  input  logic        in_we,
  input  logic [7:0]  in_addr,
  input  fp32_t       in_data,
  input  logic        prm_we,
  input  logic [15:0] prm_addr,
  input  logic [31:0] prm_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [$clog2(N_CLASS)-1:0] decision,
  output fp32_t       cnn_logits [N_CLASS],
  output logic signed [11:0] bcnn_scores [N_CLASS],
  output logic [31:0] latency_cycles,
  output logic        latency_valid
);
  net_sel_e sel_q;
  logic go, c_busy, c_done, b_busy, b_done;
  logic [$clog2(N_CLASS)-1:0] c_dec, b_dec;

  assign busy = c_busy | b_busy;
  assign go   = start && !busy;

  always_ff @(posedge clk) begin
    if (!rst_n)  sel_q <= NET_CNN;
    else if (go) sel_q <= net_sel;
  end

  rof_cnn3 u_cnn (
    .clk, .rst_n, .in_we, .in_addr, .in_data,
    .prm_we(prm_we && net_sel == NET_CNN), .prm_addr, .prm_data,
    .start(go && net_sel == NET_CNN), .busy(c_busy), .done(c_done),
    .decision(c_dec), .logits(cnn_logits));

  rof_bcnn3 u_bcnn (
    .clk, .rst_n, .in_we, .in_addr, .in_data,
    .prm_we(prm_we && net_sel == NET_BCNN), .prm_addr, .prm_data,
    .start(go && net_sel == NET_BCNN), .busy(b_busy), .done(b_done),
    .decision(b_dec), .scores(bcnn_scores));

  assign done     = (sel_q == NET_CNN) ? c_done : b_done;
  assign decision = (sel_q == NET_CNN) ? c_dec  : b_dec;

  latency_timer #(.W(32)) u_timer (
    .clk, .rst_n, .start(go), .done, .cycles(latency_cycles), .valid(latency_valid));

  // a run never has both networks busy
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(c_busy && b_busy)) else $error("both networks busy");
  end
endmodule
