// param_ram: on-chip parameter memory (weights and biases of one layer).
//
// DEPTH words of WIDTH bits, one synchronous write port and one asynchronous read
// port, written as an array so that synthesis maps it to distributed or block RAM.
// The array is not reset: it is loaded over the write port before inference.
// Holding the parameters on chip follows the paper; the port arrangement and the
// same-cycle read are this design's choices (the read feeds a lane in the cycle
// the address is presented).
module param_ram #(
  parameter int unsigned DEPTH = 24,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : '0;
endmodule
