// tb_rof_workload: symbol decisions on a synthetic received OOK signal, run on the
// whole accelerator at its default sizes, for both the CNN and the BCNN scheme.
//
// Link model (this bench's own, standing in for the measured 60 GHz radio-over-
// fibre data, which is not available): on-off keyed symbols, 4 samples per
// symbol, so one 16-sample window holds 4 symbols and the decision is for the
// third one (samples 8..11). Each sample is b(t) + alpha*b(t-2) (dispersion
// smearing half a symbol into the next), then a square-law term 0.1*r^2 (detector
// nonlinearity) and Gaussian noise (sigma 0.03). Three alpha values, 0.10, 0.20
// and 0.25, stand for the three fibre lengths.
//
// The networks get hand-set weights that make them threshold detectors for the
// centre symbol instead of trained weights:
//   CNN:  L1 and L2 channel 0 pass their input through (kernel 0,1,0); the two
//         pools give max(x[8..11]) at FC input 2; logit1 = that - 0.7, logit0 = 0.
//   BCNN: every L1 channel sums 5 samples with bias -3.7 and takes the sign; L2,
//         L3 and the FC use +-1 weights that cancel across channels on every tap
//         except the centre one, so the decision is +1 when any of the 5-sample
//         sums centred on samples 8..11 is above 3.7.
// Every window is also checked against the layer-by-layer reference model, and the
// decided bits are compared with the transmitted ones; the bench fails on any
// model mismatch or on any bit error.
module tb_rof_workload;
  import nn_pkg::*;
  import tb_fp_pkg::*;
  import tb_ref_pkg::*;
  localparam int LEN = 16, N_OUT = 2, SPS = 4;
  localparam int CNN_WIN = 60, BCNN_WIN = 6;

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

  rof_nn_accel dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wp(logic [31:0] d);
    @(negedge clk); prm_we = 1'b1; prm_addr = 16'(a); prm_data = d;
    @(negedge clk); prm_we = 1'b0;
    a++;
  endtask

  task automatic put_fp(ref fq_t q, input real v);
    q.push_back(r2f(v)); wp(q[q.size() - 1]);
  endtask

  task automatic put_bits(ref bq_t q);
    logic [31:0] word;
    for (int wd = 0; wd < (q.size() + 31) / 32; wd++) begin
      for (int b = 0; b < 32; b++) word[b] = (wd*32 + b < q.size()) ? q[wd*32 + b] : 1'b0;
      wp(word);
    end
  endtask

  task automatic put_ints(ref iq_t q, input int n);
    for (int i = 0; i < n; i++) begin q.push_back(0); wp(32'(0)); end
  endtask

  fq_t cw1, cb1, cw2, cb2, cwf, cbf;
  bq_t bw1, bw2, bw3, bwf;
  fq_t bb1;
  iq_t bb2, bb3, bbf;

  task automatic load_cnn();
    net_sel = NET_CNN; a = 0;
    for (int m = 0; m < 8; m++) for (int k = 0; k < 3; k++) put_fp(cw1, (m == 0 && k == 1) ? 1.0 : 0.0);
    for (int m = 0; m < 8; m++) put_fp(cb1, 0.0);
    for (int m = 0; m < 16; m++) for (int n = 0; n < 8; n++) for (int k = 0; k < 3; k++)
      put_fp(cw2, (m == 0 && n == 0 && k == 1) ? 1.0 : 0.0);
    for (int m = 0; m < 16; m++) put_fp(cb2, 0.0);
    for (int o = 0; o < N_OUT; o++) for (int j = 0; j < 64; j++) put_fp(cwf, (o == 1 && j == 2) ? 1.0 : 0.0);
    put_fp(cbf, 0.0); put_fp(cbf, -0.7);
  endtask

  // binary weight bit: 1 = -1, 0 = +1
  function automatic bit cancel_bit(int c, int k);
    return (k == 2) ? 1'b0 : 1'(c % 2);
  endfunction

  task automatic load_bcnn();
    net_sel = NET_BCNN; a = 0;
    for (int i = 0; i < 48 * 5; i++) bw1.push_back(1'b0);
    put_bits(bw1);
    for (int m = 0; m < 48; m++) put_fp(bb1, -3.7);
    for (int m = 0; m < 64; m++) for (int n = 0; n < 48; n++) for (int k = 0; k < 5; k++)
      bw2.push_back(cancel_bit(n, k));
    put_bits(bw2); put_ints(bb2, 64);
    for (int m = 0; m < 72; m++) for (int n = 0; n < 64; n++) for (int k = 0; k < 5; k++)
      bw3.push_back(cancel_bit(n, k));
    put_bits(bw3); put_ints(bb3, 72);
    for (int o = 0; o < N_OUT; o++) for (int c = 0; c < 72; c++) for (int p = 0; p < 4; p++)
      bwf.push_back(1'(o == 0) ^ ((p == 2) ? 1'b0 : 1'(c % 2)));
    put_bits(bwf); put_ints(bbf, N_OUT);
  endtask

  function automatic real gauss(real sigma);
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 1000000) / 1000000.0;
    return (s - 6.0) * sigma;
  endfunction

  // one window: 4 symbols plus the one before (for the smearing)
  task automatic make_window(real alpha, output fq_t xs, output int centre_bit);
    bit sym [5];
    for (int s = 0; s < 5; s++) sym[s] = 1'($urandom);
    xs = {};
    for (int t = 0; t < LEN; t++) begin
      real r;
      int ts = t + SPS;  // sample index counting the extra leading symbol
      r = real'(sym[ts / SPS]) + alpha * real'(sym[(ts - 2) / SPS]);
      r = r + 0.1 * r * r + gauss(0.03);
      xs.push_back(r2f(r));
    end
    centre_bit = int'(sym[3]);
  endtask

  task automatic run(net_sel_e sel, real alpha, ref int errors);
    fq_t xs, f1, f2, ref_l;
    bq_t g1, g2, g3;
    iq_t ref_s;
    int bit_tx, exp_dec;
    make_window(alpha, xs, bit_tx);
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk); in_we = 1'b1; in_addr = 8'(i); in_data = xs[i];
    end
    @(negedge clk); in_we = 1'b0;
    if (sel == NET_CNN) begin
      f1 = conv_fp(xs, 1, LEN, cw1, cb1, 8, 3);
      f2 = conv_fp(f1, 8, LEN / 2, cw2, cb2, 16, 3);
      ref_l = fc_fp(f2, cwf, cbf, N_OUT);
      exp_dec = argmax_fp(ref_l);
    end else begin
      g1 = conv_fp_bin(xs, 1, LEN, bw1, bb1, 48, 5);
      g2 = conv_bin(g1, 48, LEN, bw2, bb2, 64, 5);
      g3 = conv_bin(g2, 64, LEN / 2, bw3, bb3, 72, 5);
      ref_s = fc_bin(g3, bwf, bbf, N_OUT);
      exp_dec = argmax_int(ref_s);
    end
    net_sel = sel;
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if (int'(decision) != exp_dec) begin
      failures++; $display("MISMATCH decision %0d, model %0d", decision, exp_dec);
    end
    if (int'(decision) != bit_tx) errors++;
    @(negedge clk);
  endtask

  real alphas [3] = '{0.10, 0.20, 0.25};
  int errors;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_cnn();
    load_bcnn();
    foreach (alphas[d]) begin
      errors = 0;
      for (int r = 0; r < CNN_WIN; r++) run(NET_CNN, alphas[d], errors);
      checks++;
      $display("WORKLOAD CNN  alpha=%0.2f windows=%0d bit errors=%0d", alphas[d], CNN_WIN, errors);
      if (errors != 0) failures++;
      errors = 0;
      for (int r = 0; r < BCNN_WIN; r++) run(NET_BCNN, alphas[d], errors);
      checks++;
      $display("WORKLOAD BCNN alpha=%0.2f windows=%0d bit errors=%0d", alphas[d], BCNN_WIN, errors);
      if (errors != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
