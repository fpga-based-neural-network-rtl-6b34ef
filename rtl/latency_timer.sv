// latency_timer: measures the processing latency of one decision in clock cycles.
//
// A start pulse clears the count and starts it; the count then rises by one every
// clock until the done pulse is seen, after which it holds and valid is high until
// the next start. For an engine whose done rises L clocks after the start edge the
// result is L. The timer stands in for the general-purpose timer the host reads
// around each inference; its start/stop-on-done behaviour is this design's.
module latency_timer #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         done,
  output logic [W-1:0] cycles,
  output logic         valid
);
  logic running;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      valid   <= 1'b0;
      cycles  <= '0;
    end else if (start && !running) begin
      running <= 1'b1;
      valid   <= 1'b0;
      cycles  <= '0;
    end else if (running) begin
      if (done) begin
        running <= 1'b0;
        valid   <= 1'b1;
      end else if (cycles != '1) begin
        cycles <= cycles + 1'b1;
      end
    end
  end
endmodule
