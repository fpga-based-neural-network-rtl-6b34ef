// tb_rof_cnn3: loads random parameters into the CNN3 accelerator, runs several
// input windows and compares the logits and decision with the layer-by-layer
// reference model; checks the end-to-end latency.
module tb_rof_cnn3;
  import tb_fp_pkg::*;
  import tb_ref_pkg::*;
  localparam int LEN = 16, N_OUT = 2;
  localparam int LAT = (8*8*1*3 + 1) + (16*4*8*3 + 1) + (N_OUT*64 + 1);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic in_we = 1'b0, prm_we = 1'b0;
  logic [7:0] in_addr = '0;
  logic [15:0] prm_addr = '0;
  logic [31:0] in_data = '0, prm_data = '0;
  logic decision;
  logic [31:0] logits [N_OUT];
  int checks = 0, failures = 0;

  rof_cnn3 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wp(int a, logic [31:0] d);
    @(negedge clk); prm_we = 1'b1; prm_addr = 16'(a); prm_data = d;
    @(negedge clk); prm_we = 1'b0;
  endtask

  initial begin
    fq_t w1, b1, w2, b2, wf, bf, xs, f1, f2, ref_y;
    int a, cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 24; i++)  w1.push_back(frand(2));
    for (int i = 0; i < 8; i++)   b1.push_back(frand(2));
    for (int i = 0; i < 384; i++) w2.push_back(frand(3));
    for (int i = 0; i < 16; i++)  b2.push_back(frand(2));
    for (int i = 0; i < 128; i++) wf.push_back(frand(3));
    for (int i = 0; i < 2; i++)   bf.push_back(frand(2));
    a = 0;
    foreach (w1[i]) wp(a++, w1[i]);
    foreach (b1[i]) wp(a++, b1[i]);
    foreach (w2[i]) wp(a++, w2[i]);
    foreach (b2[i]) wp(a++, b2[i]);
    foreach (wf[i]) wp(a++, wf[i]);
    foreach (bf[i]) wp(a++, bf[i]);
    for (int r = 0; r < 6; r++) begin
      xs = {};
      for (int i = 0; i < LEN; i++) begin
        xs.push_back(frand(2));
        @(negedge clk); in_we = 1'b1; in_addr = 8'(i); in_data = xs[i];
      end
      @(negedge clk); in_we = 1'b0;
      f1 = conv_fp(xs, 1, LEN, w1, b1, 8, 3);
      f2 = conv_fp(f1, 8, LEN / 2, w2, b2, 16, 3);
      ref_y = fc_fp(f2, wf, bf, N_OUT);
      start = 1'b1; @(negedge clk); start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != LAT) begin failures++; $display("LATENCY %0d expected %0d", cyc, LAT); end
      for (int o = 0; o < N_OUT; o++) begin
        checks++;
        if (logits[o] !== ref_y[o]) begin
          failures++; $display("MISMATCH out %0d got %h expected %h", o, logits[o], ref_y[o]);
        end
      end
      checks++;
      if (int'(decision) != argmax_fp(ref_y)) begin failures++; $display("DECISION %0d", decision); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
