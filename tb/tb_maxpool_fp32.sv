// tb_maxpool_fp32: maximum of two singles against a real-number comparison.
module tb_maxpool_fp32;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  maxpool_fp32 dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] x, logic [31:0] z);
    logic [31:0] exp_y;
    a = x; b = z; #1;
    exp_y = fmax(x, z);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH max(%h,%h) = %h expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    check(32'hbf800000, 32'h3f800000);
    check(32'h3f800000, 32'hbf800000);
    check(32'hc0000000, 32'hbf800000);
    check(32'h80000000, 32'h00000000);
    for (int i = 0; i < 5000; i++) check(frand(20), frand(20));
    for (int i = 0; i < 2000; i++) begin r = frand(5); check(r, {r[31:4], 4'($urandom)}); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
