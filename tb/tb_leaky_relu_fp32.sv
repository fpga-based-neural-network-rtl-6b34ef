// tb_leaky_relu_fp32: positive values pass unchanged, negative values are scaled
// by 0.25 (reference computed in double precision).
module tb_leaky_relu_fp32;
  import tb_fp_pkg::*;
  logic [31:0] x, y;
  int checks = 0, failures = 0;
  leaky_relu_fp32 dut (.x(x), .y(y));

  task automatic check(logic [31:0] v);
    logic [31:0] exp_y;
    x = v; #1;
    exp_y = fleaky(v);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH leaky(%h) = %h expected %h", v, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'hbf800000);  // -1 -> -0.25
    check(32'h3f800000);  // 1 -> 1
    check(32'h00000000);
    for (int i = 0; i < 5000; i++) check(frand(60));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
