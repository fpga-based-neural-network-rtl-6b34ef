// tb_param_ram: write every word, read it back, overwrite a few and check the
// write enable gates writes.
module tb_param_ram;
  localparam int DEPTH = 24;
  logic clk = 1'b0;
  logic we;
  logic [4:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;
  param_ram #(.DEPTH(DEPTH), .WIDTH(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 5'(i); wdata = $urandom; model[i] = wdata;
    end
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 5'($urandom % DEPTH); wdata = $urandom;
      if (we) model[waddr] = wdata;
      raddr = 5'($urandom % DEPTH);
      #1;
      // asynchronous read shows the old word until the clock edge
      checks++;
      if (rdata !== model[raddr] && !(we && waddr == raddr)) begin
        failures++; $display("MISMATCH addr %0d got %h", raddr, rdata);
      end
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      raddr = 5'(i); #1; checks++;
      if (rdata !== model[i]) begin failures++; $display("MISMATCH addr %0d got %h exp %h", i, rdata, model[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
