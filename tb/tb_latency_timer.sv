// tb_latency_timer: a start pulse and a done pulse that is first sampled at the
// l-th clock edge after the start edge must read back l-1 (the edges at which done
// was still low), hold it with valid high; a start while counting is ignored.
module tb_latency_timer;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done = 1'b0;
  logic [31:0] cycles;
  logic valid;
  int checks = 0, failures = 0;

  latency_timer #(.W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int l, bit extra_start);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    // done rises l clocks after the start edge
    for (int c = 1; c < l; c++) begin
      if (extra_start && c == l / 2) start = 1'b1;
      @(negedge clk);
      start = 1'b0;
    end
    done = 1'b1; @(negedge clk); done = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (!valid || cycles != 32'(l - 1)) begin
      failures++; $display("MISMATCH l=%0d cycles=%0d valid=%b", l, cycles, valid);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (valid) begin failures++; $display("valid after reset"); end
    measure(5, 0);
    measure(1000, 0);
    measure(37, 1);
    for (int r = 0; r < 10; r++) measure(2 + int'($urandom % 500), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
