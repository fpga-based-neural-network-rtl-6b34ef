// tb_cnn3_conv_layer: runs the CNN second-layer shape (8 input channels, 16 kernels
// of 1x3, 8 positions) on random data three times and compares every pooled output
// with a reference convolution, Leaky-ReLU and pool-of-2 computed here, and checks
// the latency OUT_CH*(LEN/2)*IN_CH*KS + 1 clocks.
module tb_cnn3_conv_layer;
  import tb_fp_pkg::*;
  localparam int IN_CH = 8, OUT_CH = 16, LEN = 8, KS = 3, HALF = LEN / 2, PAD = 1;
  localparam int NW = OUT_CH * IN_CH * KS;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [31:0] x [IN_CH*LEN];
  logic [31:0] y [OUT_CH*HALF];
  logic w_we = 1'b0;
  logic [15:0] w_addr = '0;
  logic [31:0] w_data = '0;
  logic [31:0] wts [NW];
  logic [31:0] bs [OUT_CH];
  int checks = 0, failures = 0;

  cnn3_conv_layer #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .LEN(LEN), .KS(KS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); w_we = 1'b1; w_addr = 16'(a); w_data = d;
    @(negedge clk); w_we = 1'b0;
  endtask

  task automatic run_once();
    logic [31:0] acc, act [LEN], expv;
    int cyc;
    for (int i = 0; i < NW; i++) begin wts[i] = frand(3); wr(i, wts[i]); end
    for (int i = 0; i < OUT_CH; i++) begin bs[i] = frand(3); wr(NW + i, bs[i]); end
    for (int i = 0; i < IN_CH * LEN; i++) x[i] = frand(3);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != OUT_CH * HALF * IN_CH * KS + 1) begin
      failures++; $display("LATENCY %0d expected %0d", cyc, OUT_CH * HALF * IN_CH * KS + 1);
    end
    for (int m = 0; m < OUT_CH; m++) begin
      for (int p = 0; p < LEN; p++) begin
        acc = bs[m];
        for (int n = 0; n < IN_CH; n++)
          for (int k = 0; k < KS; k++)
            if (p + k - PAD >= 0 && p + k - PAD < LEN)
              acc = fadd(acc, fmul(x[n*LEN + p + k - PAD], wts[(m*IN_CH + n)*KS + k]));
        act[p] = fleaky(acc);
      end
      for (int j = 0; j < HALF; j++) begin
        expv = fmax(act[2*j], act[2*j+1]);
        checks++;
        if (y[m*HALF + j] !== expv) begin
          failures++;
          if (failures < 10) $display("MISMATCH m=%0d j=%0d got %h expected %h", m, j, y[m*HALF + j], expv);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) run_once();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
