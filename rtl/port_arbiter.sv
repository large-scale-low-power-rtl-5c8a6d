// port_arbiter: grants one output port of the APErouter to one input.
//
// Requests come from the switch gates that want this output and whose
// packet fits in the output's FIFOs. The grant is held for a whole packet
// and freed by release (the granted gate has sent the footer). Two
// policies, chosen at run time by fixed_mode: round robin (the search
// starts after the last granted input) or fixed priority (the search starts
// at input prio_first, a configuration register, so the order can be changed
// while running). A new grant can be given the cycle after release.
// The paper gives the two policies; the search-from-pointer structure is
// this design's choice.
module port_arbiter #(
  parameter int unsigned N = 6,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          fixed_mode,
  input  logic [IW-1:0] prio_first,
  input  logic          release_i,
  output logic          busy,
  output logic [IW-1:0] grant_idx
);
  logic [IW-1:0] rr_ptr, start, pick;
  logic          any;

  always_comb begin
    start = fixed_mode ? prio_first : rr_ptr;
    any   = 1'b0;
    pick  = '0;
    for (int k = 0; k < int'(N); k++) begin
      int unsigned i;
      i = (32'(start) + 32'(k)) % N;
      if (!any && req[i]) begin
        any  = 1'b1;
        pick = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      grant_idx <= '0;
      rr_ptr    <= '0;
    end else if (busy) begin
      if (release_i) begin
        busy   <= 1'b0;
        rr_ptr <= (32'(grant_idx) == N - 1) ? '0 : grant_idx + 1'b1;
      end
    end else if (any) begin
      busy      <= 1'b1;
      grant_idx <= pick;
    end
  end

  a_grant_requested: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && any) |=> busy && $past(req[pick]));
endmodule
