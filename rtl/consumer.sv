// consumer: self-test sink. While enabled it empties an intra-tile RX
// port of the router, popping the header/footer FIFO and the payload FIFO
// whenever they hold a word, so that traffic from the traffic generator
// never fills them.
//
// The paper gives only the function ("flushes the receiving FIFOs"). The
// counters are this design's: headers and footers alternate in their FIFO,
// so every second word popped there ends a packet; pkts counts those, and
// words counts payload words. Both clear when clear is pulsed.
//
// Interface: enable, clear; FIFO read ports (first-word-fall-through);
// pkts, words. Timing: one word per FIFO per clock.
module consumer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        clear,
  output logic        hf_pop,
  input  logic        hf_empty,
  output logic        data_pop,
  input  logic        data_empty,
  output logic [15:0] pkts,
  output logic [31:0] words
);
  logic in_pkt;  // a header was popped, its footer not yet

  assign hf_pop   = enable && !hf_empty;
  assign data_pop = enable && !data_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= 1'b0;
      pkts   <= '0;
      words  <= '0;
    end else if (clear) begin
      in_pkt <= 1'b0;
      pkts   <= '0;
      words  <= '0;
    end else begin
      if (hf_pop) begin
        in_pkt <= !in_pkt;
        if (in_pkt) pkts <= pkts + 1'b1;
      end
      if (data_pop) words <= words + 1'b1;
    end
  end
endmodule
