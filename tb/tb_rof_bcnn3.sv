// tb_rof_bcnn3: loads random parameters into the BCNN3 accelerator, runs input
// windows and compares the scores and decision with the layer-by-layer reference
// model; checks the end-to-end latency.
module tb_rof_bcnn3;
  import tb_fp_pkg::*;
  import tb_ref_pkg::*;
  localparam int LEN = 16, N_OUT = 2;
  localparam int LAT = (48*8*5 + 1) + (64*8*48*5 + 1) + (72*4*64*5 + 1) + (N_OUT*288 + 1);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic in_we = 1'b0, prm_we = 1'b0;
  logic [7:0] in_addr = '0;
  logic [15:0] prm_addr = '0;
  logic [31:0] in_data = '0, prm_data = '0;
  logic decision;
  logic signed [11:0] scores [N_OUT];
  int checks = 0, failures = 0;
  int a;

  rof_bcnn3 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wp(logic [31:0] d);
    @(negedge clk); prm_we = 1'b1; prm_addr = 16'(a); prm_data = d;
    @(negedge clk); prm_we = 1'b0;
    a++;
  endtask

  // random kernel bits, written 32 per word
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

  initial begin
    bq_t w1, w2, w3, wf, f1, f2, f3;
    fq_t b1, xs;
    iq_t b2, b3, bf, ref_y;
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    a = 0;
    load_bits(48 * 5, w1);
    for (int i = 0; i < 48; i++) begin b1.push_back(frand(2)); wp(b1[i]); end
    load_bits(64 * 48 * 5, w2);
    load_ints(64, 20, b2);
    load_bits(72 * 64 * 5, w3);
    load_ints(72, 20, b3);
    load_bits(2 * 288, wf);
    load_ints(2, 20, bf);
    for (int r = 0; r < 3; r++) begin
      xs = {};
      for (int i = 0; i < LEN; i++) begin
        xs.push_back(frand(2));
        @(negedge clk); in_we = 1'b1; in_addr = 8'(i); in_data = xs[i];
      end
      @(negedge clk); in_we = 1'b0;
      f1 = conv_fp_bin(xs, 1, LEN, w1, b1, 48, 5);
      f2 = conv_bin(f1, 48, LEN, w2, b2, 64, 5);
      f3 = conv_bin(f2, 64, LEN / 2, w3, b3, 72, 5);
      ref_y = fc_bin(f3, wf, bf, N_OUT);
      start = 1'b1; @(negedge clk); start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != LAT) begin failures++; $display("LATENCY %0d expected %0d", cyc, LAT); end
      for (int o = 0; o < N_OUT; o++) begin
        checks++;
        if (int'(scores[o]) != ref_y[o]) begin
          failures++; $display("MISMATCH out %0d got %0d expected %0d", o, scores[o], ref_y[o]);
        end
      end
      checks++;
      if (int'(decision) != argmax_int(ref_y)) begin failures++; $display("DECISION %0d", decision); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
