// perf_counter: self-test timer. It counts the clock cycles from a start
// pulse until the consumer has received the expected number of packets,
// then holds the count for software to read.
//
// The paper says it "samples and stores the clock cycles needed to complete
// the data transfers"; the start/stop rule is this design's: start clears
// the count and begins counting, the count stops on the first cycle in
// which got >= target. Bandwidth = bytes moved / (cycles / 156.25 MHz).
//
// Interface: start, target, got (packets so far); cycles, running.
module perf_counter (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] target,
  input  logic [15:0] got,
  output logic [31:0] cycles,
  output logic        running
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycles  <= '0;
      running <= 1'b0;
    end else if (start) begin
      cycles  <= '0;
      running <= 1'b1;
    end else if (running) begin
      if (got >= target) running <= 1'b0;
      else               cycles  <= cycles + 1'b1;
    end
  end
endmodule
