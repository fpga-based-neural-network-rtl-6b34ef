// tb_bcnn_fc_layer: binary 288-input, 2-output layer with random bits and biases;
// checks both scores, the argmax decision (each output must win at least once)
// and the latency N_OUT*N_IN + 1.
module tb_bcnn_fc_layer;
  import tb_ref_pkg::*;
  localparam int N_IN = 288, N_OUT = 2, ACC_W = 12;
  localparam int NWW = (N_OUT * N_IN + 31) / 32;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [N_IN-1:0] x;
  logic signed [ACC_W-1:0] scores [N_OUT];
  logic decision;
  logic w_we = 1'b0;
  logic [15:0] w_addr = '0;
  logic [31:0] w_data = '0;
  int checks = 0, failures = 0;
  int wins [N_OUT];

  bcnn_fc_layer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); w_we = 1'b1; w_addr = 16'(a); w_data = d;
    @(negedge clk); w_we = 1'b0;
  endtask

  task automatic run_once();
    bq_t wb, xs;
    iq_t bs, ref_y;
    logic [31:0] word;
    int cyc;
    for (int i = 0; i < NWW * 32; i++) wb.push_back(1'($urandom));
    for (int wd = 0; wd < NWW; wd++) begin
      for (int b = 0; b < 32; b++) word[b] = wb[wd*32 + b];
      wr(wd, word);
    end
    for (int i = 0; i < N_OUT; i++) begin bs.push_back(int'($urandom % 61) - 30); wr(NWW + i, 32'(bs[i])); end
    for (int i = 0; i < N_IN; i++) begin x[i] = 1'($urandom); xs.push_back(x[i]); end
    ref_y = fc_bin(xs, wb, bs, N_OUT);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != N_OUT * N_IN + 1) begin failures++; $display("LATENCY %0d", cyc); end
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (int'(scores[o]) != ref_y[o]) begin failures++; $display("MISMATCH out %0d got %0d expected %0d", o, scores[o], ref_y[o]); end
    end
    checks++;
    if (int'(decision) != argmax_int(ref_y)) begin failures++; $display("DECISION %0d", decision); end
    wins[decision]++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (12) run_once();
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (wins[o] == 0) begin failures++; $display("output %0d never won", o); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
