// tb_fp32_mul: random and directed products checked against a double-precision
// reference rounded to single precision.
module tb_fp32_mul;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] x, logic [31:0] z);
    logic [31:0] exp_y;
    a = x; b = z; #1;
    exp_y = fmul(x, z);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h * %h = %h expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3f800000, 32'h40000000);  // 1*2
    check(32'h3fc00000, 32'hbfc00000);  // 1.5*-1.5
    check(32'h00000000, 32'h40490fdb);  // 0*pi
    check(32'h3f800001, 32'h3f800001);  // rounding
    check(32'h3fffffff, 32'h3fffffff);  // carry out of rounding
    for (int i = 0; i < 20000; i++) check(frand(40), frand(40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
