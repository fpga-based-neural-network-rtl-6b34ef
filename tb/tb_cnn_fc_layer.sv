// tb_cnn_fc_layer: random 64-input, 2-output fp32 layer run several times; checks
// each output against the reference dot product, the argmax decision and the
// latency N_OUT*N_IN + 1 clocks. One run forces output 1 to win.
module tb_cnn_fc_layer;
  import tb_fp_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_IN = 64, N_OUT = 2;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [31:0] x [N_IN];
  logic [31:0] logits [N_OUT];
  logic decision;
  logic w_we = 1'b0;
  logic [15:0] w_addr = '0;
  logic [31:0] w_data = '0;
  int checks = 0, failures = 0;
  int wins [N_OUT];

  cnn_fc_layer #(.N_IN(N_IN), .N_OUT(N_OUT)) dut (.*);
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

  task automatic run_once(bit force1);
    fq_t xs, ws, bs, ref_y;
    int cyc;
    for (int i = 0; i < N_OUT * N_IN; i++) begin ws.push_back(frand(3)); wr(i, ws[i]); end
    for (int i = 0; i < N_OUT; i++) begin
      bs.push_back(frand(3));
      if (force1 && i == 1) bs[i] = 32'h47000000;  // 32768: output 1 wins
      wr(N_OUT * N_IN + i, bs[i]);
    end
    for (int i = 0; i < N_IN; i++) begin x[i] = frand(3); xs.push_back(x[i]); end
    ref_y = fc_fp(xs, ws, bs, N_OUT);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != N_OUT * N_IN + 1) begin failures++; $display("LATENCY %0d", cyc); end
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (logits[o] !== ref_y[o]) begin
        failures++; $display("MISMATCH out %0d got %h expected %h", o, logits[o], ref_y[o]);
      end
    end
    checks++;
    if (int'(decision) != argmax_fp(ref_y)) begin failures++; $display("DECISION %0d", decision); end
    wins[decision]++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 8; r++) run_once(r == 3);
    checks++;
    if (wins[1] == 0) begin failures++; $display("output 1 never won"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
