// crossbar: the fully connected switch of the APErouter.
//
// Each output is a multiplexer over all inputs, steered by the grant of
// that output's arbiter; an output with no grant carries an invalid word.
// Combinational: a word leaves an input gate and reaches the output FIFO in
// the same cycle. Inputs are the switch gates, outputs the intra-tile RX and
// inter-tile TX ports.
module crossbar
  import exanet_pkg::*;
#(
  parameter int unsigned N_IN  = 6,
  parameter int unsigned N_OUT = 4,
  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  xword_t        in_word  [N_IN],
  input  logic          sel_valid[N_OUT],
  input  logic [IW-1:0] sel      [N_OUT],
  output xword_t        out_word [N_OUT]
);
  always_comb begin
    for (int j = 0; j < int'(N_OUT); j++) begin
      out_word[j] = '0;
      if (sel_valid[j] && 32'(sel[j]) < N_IN) out_word[j] = in_word[sel[j]];
    end
  end
endmodule
