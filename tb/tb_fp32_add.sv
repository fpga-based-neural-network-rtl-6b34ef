// tb_fp32_add: random and directed sums and differences, including operands of
// close magnitude (cancellation) and far apart (sticky rounding), checked against
// a double-precision reference rounded to single precision.
module tb_fp32_add;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y;
  logic        sub;
  int checks = 0, failures = 0;
  fp32_add dut (.a(a), .b(b), .sub(sub), .y(y));

  task automatic check(logic [31:0] x, logic [31:0] z, logic s);
    logic [31:0] exp_y;
    a = x; b = z; sub = s; #1;
    exp_y = fadd(x, s ? {~z[31], z[30:0]} : z);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h %s %h = %h expected %h", x, s ? "-" : "+", z, y, exp_y);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    check(32'h3f800000, 32'h3f800000, 1'b0);  // 1+1
    check(32'h3f800000, 32'h3f800000, 1'b1);  // 1-1 = +0
    check(32'h3f800000, 32'h33800000, 1'b0);  // tie to even
    check(32'h3f800001, 32'h33800000, 1'b0);  // tie rounds up
    check(32'h3f800000, 32'h00000000, 1'b1);
    check(32'h00000000, 32'hc0400000, 1'b0);
    for (int i = 0; i < 20000; i++) check(frand(30), frand(30), 1'($urandom));
    for (int i = 0; i < 10000; i++) begin   // close magnitudes
      r = frand(10);
      check(r, {r[31:8], 8'($urandom)}, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
