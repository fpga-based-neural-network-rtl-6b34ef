// tb_rof_nn_accel: end-to-end test of the whole accelerator at its default sizes.
//
// Loads random parameters into both networks, then runs input windows alternately
// on the CNN and the BCNN (switching networks between runs) and compares every
// decision, CNN logit and BCNN score with the layer-by-layer reference model, and
// the timer reading with the measured start-to-done latency. It also counts how
// often each mechanism of the design happened and fails if one never did: both
// inner-parallel lanes producing results, zero-padding taps, negative Leaky-ReLU
// inputs (fp32 and shifted integer), the pool choosing the later position, a
// network switch, a start ignored while busy, both decision values.
module tb_rof_nn_accel;
  import nn_pkg::*;
  import tb_fp_pkg::*;
  import tb_ref_pkg::*;
  localparam int LEN = 16, N_OUT = 2;
  localparam int LAT_CNN  = (8*8*1*3 + 1) + (16*4*8*3 + 1) + (N_OUT*64 + 1);
  localparam int LAT_BCNN = (48*8*5 + 1) + (64*8*48*5 + 1) + (72*4*64*5 + 1) + (N_OUT*288 + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  net_sel_e net_sel = NET_CNN;
  logic in_we = 1'b0, prm_we = 1'b0;
  logic [7:0] in_addr = '0;
  logic [15:0] prm_addr = '0;
  logic [31:0] in_data = '0, prm_data = '0;
  logic decision;
  logic [31:0] cnn_logits [N_OUT];
  logic signed [11:0] bcnn_scores [N_OUT];
  logic [31:0] latency_cycles;
  logic latency_valid;
  int checks = 0, failures = 0;
  int a;

  // mechanism counters
  int n_cnn_runs, n_bcnn_runs, n_switch, n_ignored, n_dec [N_OUT];
  int n_lane_a, n_lane_b, n_pad, n_leaky_neg_fp, n_leaky_neg_bin, n_pool_later, n_bin_lane_b;

  rof_nn_accel dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (dut.u_cnn.u_l2.u_lane_a.pool_valid) n_lane_a++;
    if (dut.u_cnn.u_l2.u_lane_b.pool_valid) n_lane_b++;
    if (dut.u_cnn.u_l1.busy && !dut.u_cnn.u_l1.va) n_pad++;
    if (dut.u_cnn.u_l1.u_lane_b.en && dut.u_cnn.u_l1.u_lane_b.last && dut.u_cnn.u_l1.u_lane_b.acc_nx[31])
      n_leaky_neg_fp++;
    if (dut.u_cnn.u_l1.u_lane_a.pool_valid &&
        dut.u_cnn.u_l1.u_lane_a.pooled != dut.u_cnn.u_l1.u_lane_a.prev_q) n_pool_later++;
    if (dut.u_bcnn.u_l2.u_lane_a.en && dut.u_bcnn.u_l2.u_lane_a.last && dut.u_bcnn.u_l2.u_lane_a.acc_nx[9])
      n_leaky_neg_bin++;
    if (dut.u_bcnn.u_l3.u_lane_b.out_valid) n_bin_lane_b++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wp(logic [31:0] d);
    @(negedge clk); prm_we = 1'b1; prm_addr = 16'(a); prm_data = d;
    @(negedge clk); prm_we = 1'b0;
    a++;
  endtask

  task automatic load_fp(int n, int span, ref fq_t q);
    q = {};
    for (int i = 0; i < n; i++) begin q.push_back(frand(span)); wp(q[i]); end
  endtask

  task automatic load_bits(int n, ref bq_t q);
    logic [31:0] word;
    q = {};
    for (int i = 0; i < (n + 31) / 32 * 32; i++) q.push_back(1'($urandom));
    for (int wd = 0; wd < (n + 31) / 32; wd++) begin
      for (int b = 0; b < 32; b++) word[b] = q[wd*32 + b];
      wp(word);
    end
  endtask

  task automatic load_ints(int n, int span, ref iq_t q);
    q = {};
    for (int i = 0; i < n; i++) begin q.push_back(int'($urandom % (2*span + 1)) - span); wp(32'(q[i])); end
  endtask

  // CNN parameters
  fq_t cw1, cb1, cw2, cb2, cwf, cbf;
  // BCNN parameters
  bq_t bw1, bw2, bw3, bwf;
  fq_t bb1;
  iq_t bb2, bb3, bbf;
  net_sel_e last_sel = NET_CNN;

  task automatic run(net_sel_e sel, bit poke_start);
    fq_t xs, f1, f2, ref_l;
    bq_t g1, g2, g3;
    iq_t ref_s;
    int cyc, exp_lat, exp_dec;
    xs = {};
    for (int i = 0; i < LEN; i++) begin
      xs.push_back(frand(2));
      @(negedge clk); in_we = 1'b1; in_addr = 8'(i); in_data = xs[i];
    end
    @(negedge clk); in_we = 1'b0;
    if (sel == NET_CNN) begin
      f1 = conv_fp(xs, 1, LEN, cw1, cb1, 8, 3);
      f2 = conv_fp(f1, 8, LEN / 2, cw2, cb2, 16, 3);
      ref_l = fc_fp(f2, cwf, cbf, N_OUT);
      exp_dec = argmax_fp(ref_l);
      exp_lat = LAT_CNN;
    end else begin
      g1 = conv_fp_bin(xs, 1, LEN, bw1, bb1, 48, 5);
      g2 = conv_bin(g1, 48, LEN, bw2, bb2, 64, 5);
      g3 = conv_bin(g2, 64, LEN / 2, bw3, bb3, 72, 5);
      ref_s = fc_bin(g3, bwf, bbf, N_OUT);
      exp_dec = argmax_int(ref_s);
      exp_lat = LAT_BCNN;
    end
    if (sel != last_sel) n_switch++;
    last_sel = sel;
    net_sel = sel;
    start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin
      // a second start (with the other network selected) must be ignored
      if (poke_start && cyc == 20) begin
        start = 1'b1;
        net_sel = (sel == NET_CNN) ? NET_BCNN : NET_CNN;
        n_ignored++;
      end
      @(negedge clk); cyc++;
      start = 1'b0;
      net_sel = sel;
    end
    checks++;
    if (cyc != exp_lat) begin failures++; $display("LATENCY %0d expected %0d", cyc, exp_lat); end
    @(negedge clk);
    checks++;
    if (!latency_valid || int'(latency_cycles) != exp_lat - 1) begin
      failures++; $display("TIMER %0d valid %b expected %0d", latency_cycles, latency_valid, exp_lat - 1);
    end
    checks++;
    if (int'(decision) != exp_dec) begin failures++; $display("DECISION %0d expected %0d", decision, exp_dec); end
    n_dec[decision]++;
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (sel == NET_CNN && cnn_logits[o] !== ref_l[o]) begin
        failures++; $display("MISMATCH cnn out %0d got %h expected %h", o, cnn_logits[o], ref_l[o]);
      end
      if (sel == NET_BCNN && int'(bcnn_scores[o]) != ref_s[o]) begin
        failures++; $display("MISMATCH bcnn out %0d got %0d expected %0d", o, bcnn_scores[o], ref_s[o]);
      end
    end
    if (sel == NET_CNN) n_cnn_runs++; else n_bcnn_runs++;
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("COUNT %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    net_sel = NET_CNN;
    a = 0;
    load_fp(24, 2, cw1);  load_fp(8, 2, cb1);
    load_fp(384, 3, cw2); load_fp(16, 2, cb2);
    load_fp(128, 3, cwf); load_fp(2, 2, cbf);
    net_sel = NET_BCNN;
    a = 0;
    load_bits(48 * 5, bw1);      load_fp(48, 2, bb1);
    load_bits(64 * 48 * 5, bw2); load_ints(64, 20, bb2);
    load_bits(72 * 64 * 5, bw3); load_ints(72, 20, bb3);
    load_bits(2 * 288, bwf);     load_ints(2, 20, bbf);
    for (int r = 0; r < 10; r++) run(NET_CNN, r == 2);
    run(NET_BCNN, 1'b1);
    run(NET_CNN, 1'b0);
    run(NET_BCNN, 1'b0);
    need("cnn runs", n_cnn_runs);
    need("bcnn runs", n_bcnn_runs);
    need("network switches", n_switch);
    need("starts ignored while busy", n_ignored);
    need("lane A pooled outputs", n_lane_a);
    need("lane B pooled outputs", n_lane_b);
    need("binary lane B outputs", n_bin_lane_b);
    need("zero-padding taps", n_pad);
    need("negative fp32 Leaky-ReLU", n_leaky_neg_fp);
    need("negative binary Leaky-ReLU", n_leaky_neg_bin);
    need("pool took later position", n_pool_later);
    need("decision 0", n_dec[0]);
    need("decision 1", n_dec[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
