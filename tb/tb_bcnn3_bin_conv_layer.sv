// tb_bcnn3_bin_conv_layer: the BCNN second-layer shape (48 input channels, 64
// kernels of 1x5, 16 positions) with random sign-bit inputs and kernels and random
// integer biases; every pooled, binarised output bit is compared with the
// reference and the latency OUT_CH*(LEN/2)*IN_CH*KS + 1 is checked.
module tb_bcnn3_bin_conv_layer;
  import tb_ref_pkg::*;
  localparam int IN_CH = 48, OUT_CH = 64, LEN = 16, KS = 5, HALF = LEN / 2;
  localparam int NWB = OUT_CH * IN_CH * KS, NWW = (NWB + 31) / 32;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [IN_CH*LEN-1:0] x;
  logic [OUT_CH*HALF-1:0] y;
  logic w_we = 1'b0;
  logic [15:0] w_addr = '0;
  logic [31:0] w_data = '0;
  int checks = 0, failures = 0, ones = 0;

  bcnn3_bin_conv_layer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); w_we = 1'b1; w_addr = 16'(a); w_data = d;
    @(negedge clk); w_we = 1'b0;
  endtask

  task automatic run_once();
    bq_t wb, xs, ref_y;
    iq_t bs;
    logic [31:0] word;
    int cyc;
    for (int i = 0; i < NWW * 32; i++) wb.push_back(1'($urandom));
    for (int wd = 0; wd < NWW; wd++) begin
      for (int b = 0; b < 32; b++) word[b] = wb[wd*32 + b];
      wr(wd, word);
    end
    for (int i = 0; i < OUT_CH; i++) begin
      bs.push_back(int'($urandom % 41) - 20);
      wr(NWW + i, 32'(bs[i]));
    end
    for (int i = 0; i < IN_CH * LEN; i++) begin x[i] = 1'($urandom); xs.push_back(x[i]); end
    ref_y = conv_bin(xs, IN_CH, LEN, wb, bs, OUT_CH, KS);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != OUT_CH * HALF * IN_CH * KS + 1) begin failures++; $display("LATENCY %0d", cyc); end
    for (int i = 0; i < OUT_CH * HALF; i++) begin
      checks++;
      ones += int'(y[i]);
      if (y[i] !== ref_y[i]) begin
        failures++;
        if (failures < 10) $display("MISMATCH bit %0d got %b expected %b", i, y[i], ref_y[i]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) run_once();
    checks++;
    if (ones == 0 || ones == 2 * OUT_CH * HALF) begin failures++; $display("outputs never vary"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
