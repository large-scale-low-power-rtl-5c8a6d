// aperouter: the switching and routing core of the ExaNet network IP.
//
// It joins N_INTRA intra-tile ports (towards the processing system) and
// N_INTER inter-tile ports (towards the APElink links) through a fully
// connected crossbar. Following the paper's block diagram:
//   * every intra-tile port has a TX side (host -> router) and an RX side
//     (router -> host); every inter-tile port has one TX side (router ->
//     link) and one RX side per virtual channel (VCH0, VCH1);
//   * each side is a switch_port: a 128 x 128-bit header/footer FIFO and a
//     payload FIFO of 4096 x 128 bit (intra-tile) or 1024 x 128 bit
//     (inter-tile);
//   * a switch_gate with its own dor_router sits on every side that feeds
//     the crossbar (intra-tile TX, inter-tile RX VCH0/VCH1);
//   * one port_arbiter per output (intra-tile RX, inter-tile TX).
// Switching is virtual cut-through: an input is granted an output only when
// the output's FIFOs can hold the whole packet, and then forwards words as
// they arrive. Crossbar input numbering: intra TX ports 0..N_INTRA-1, then
// inter RX port k, virtual channel v at N_INTRA + 2k + v. Output numbering:
// intra RX ports 0..N_INTRA-1, then inter TX port k at N_INTRA + k.
// The inter-tile RX side is written by the link logic without back-pressure
// (credits guarantee room); its pops are brought out so the link can return
// credits. One clock domain.
module aperouter
  import exanet_pkg::*;
#(
  parameter int unsigned N_INTRA     = 2,
  parameter int unsigned N_INTER     = 2,
  parameter int unsigned HF_DEPTH    = 128,
  parameter int unsigned INTRA_DEPTH = 4096,
  parameter int unsigned INTER_DEPTH = 1024,
  localparam int unsigned N_IN  = N_INTRA + 2 * N_INTER,
  localparam int unsigned N_OUT = N_INTRA + N_INTER,
  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned OW = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration
  input  coord_t        my_coord,
  input  coord_t        lattice,
  input  logic [5:0]    dim_order,
  input  logic [2:0]    dim_en,
  input  logic          arb_fixed,
  input  logic [IW-1:0] arb_prio_first,
  // intra-tile TX ports (host writes)
  input  logic          itx_hf_push   [N_INTRA],
  input  logic [127:0]  itx_hf_din    [N_INTRA],
  output logic          itx_hf_full   [N_INTRA],
  input  logic          itx_data_push [N_INTRA],
  input  logic [127:0]  itx_data_din  [N_INTRA],
  output logic          itx_data_full [N_INTRA],
  // intra-tile RX ports (host reads)
  input  logic          irx_hf_pop    [N_INTRA],
  output logic [127:0]  irx_hf_dout   [N_INTRA],
  output logic          irx_hf_empty  [N_INTRA],
  input  logic          irx_data_pop  [N_INTRA],
  output logic [127:0]  irx_data_dout [N_INTRA],
  output logic          irx_data_empty[N_INTRA],
  // inter-tile TX ports (link reads)
  input  logic          etx_hf_pop    [N_INTER],
  output logic [127:0]  etx_hf_dout   [N_INTER],
  output logic          etx_hf_empty  [N_INTER],
  input  logic          etx_data_pop  [N_INTER],
  output logic [127:0]  etx_data_dout [N_INTER],
  output logic          etx_data_empty[N_INTER],
  // inter-tile RX ports, index 2k+v (link writes)
  input  logic          erx_hf_push   [2*N_INTER],
  input  logic [127:0]  erx_hf_din    [2*N_INTER],
  input  logic          erx_data_push [2*N_INTER],
  input  logic [127:0]  erx_data_din  [2*N_INTER],
  output logic          erx_hf_popped [2*N_INTER],
  output logic          erx_data_popped[2*N_INTER]
);
  // gate side signals
  logic [127:0]  g_hf_dout [N_IN];
  logic          g_hf_empty[N_IN];
  logic          g_hf_pop  [N_IN];
  logic [127:0]  g_d_dout  [N_IN];
  logic          g_d_empty [N_IN];
  logic          g_d_pop   [N_IN];
  logic          g_req     [N_IN];
  logic [OW-1:0] g_port    [N_IN];
  logic [12:0]   g_words   [N_IN];
  logic          g_granted [N_IN];
  logic          g_done    [N_IN];
  xword_t        g_word    [N_IN];

  // output side signals
  xword_t        o_word    [N_OUT];
  int unsigned   o_hf_free [N_OUT];
  int unsigned   o_d_free  [N_OUT];
  logic          a_busy    [N_OUT];
  logic [IW-1:0] a_gidx    [N_OUT];
  logic [N_IN-1:0] a_req   [N_OUT];
  logic          a_rel     [N_OUT];

  // ---------------- input sides ----------------
  for (genvar i = 0; i < N_INTRA; i++) begin : g_itx
    logic [$clog2(HF_DEPTH):0]    hf_free;
    logic [$clog2(INTRA_DEPTH):0] d_free;
    logic hf_full_s, d_full_s;
    switch_port #(.HF_DEPTH(HF_DEPTH), .DATA_DEPTH(INTRA_DEPTH)) u_port (
      .clk, .rst_n,
      .hf_push(itx_hf_push[i]), .hf_din(itx_hf_din[i]), .hf_pop(g_hf_pop[i]),
      .hf_dout(g_hf_dout[i]), .hf_empty(g_hf_empty[i]), .hf_full(hf_full_s), .hf_free(hf_free),
      .data_push(itx_data_push[i]), .data_din(itx_data_din[i]), .data_pop(g_d_pop[i]),
      .data_dout(g_d_dout[i]), .data_empty(g_d_empty[i]), .data_full(d_full_s), .data_free(d_free));
    assign itx_hf_full[i]   = hf_full_s;
    assign itx_data_full[i] = d_full_s;
  end

  for (genvar k = 0; k < 2 * N_INTER; k++) begin : g_erx
    localparam int unsigned I = N_INTRA + k;
    logic [$clog2(HF_DEPTH):0]    hf_free;
    logic [$clog2(INTER_DEPTH):0] d_free;
    logic hf_full_s, d_full_s;
    switch_port #(.HF_DEPTH(HF_DEPTH), .DATA_DEPTH(INTER_DEPTH)) u_port (
      .clk, .rst_n,
      .hf_push(erx_hf_push[k]), .hf_din(erx_hf_din[k]), .hf_pop(g_hf_pop[I]),
      .hf_dout(g_hf_dout[I]), .hf_empty(g_hf_empty[I]), .hf_full(hf_full_s), .hf_free(hf_free),
      .data_push(erx_data_push[k]), .data_din(erx_data_din[k]), .data_pop(g_d_pop[I]),
      .data_dout(g_d_dout[I]), .data_empty(g_d_empty[I]), .data_full(d_full_s), .data_free(d_free));
    assign erx_hf_popped[k]   = g_hf_pop[I];
    assign erx_data_popped[k] = g_d_pop[I];
  end

  for (genvar i = 0; i < N_IN; i++) begin : g_gate
    switch_gate #(.N_INTRA(N_INTRA), .N_INTER(N_INTER)) u_gate (
      .clk, .rst_n,
      .hf_dout(g_hf_dout[i]), .hf_empty(g_hf_empty[i]), .hf_pop(g_hf_pop[i]),
      .data_dout(g_d_dout[i]), .data_empty(g_d_empty[i]), .data_pop(g_d_pop[i]),
      .my_coord, .lattice, .dim_order, .dim_en,
      .req(g_req[i]), .req_port(g_port[i]), .req_words(g_words[i]),
      .granted(g_granted[i]), .out_word(g_word[i]), .done(g_done[i]));
    assign g_granted[i] = a_busy[g_port[i]] && (a_gidx[g_port[i]] == IW'(i));
  end

  // ---------------- arbitration and crossbar ----------------
  for (genvar j = 0; j < N_OUT; j++) begin : g_arb
    always_comb begin
      for (int i = 0; i < int'(N_IN); i++) begin
        a_req[j][i] = g_req[i] && (g_port[i] == OW'(j)) && (o_hf_free[j] >= 2)
                      && (o_d_free[j] >= 32'(g_words[i]));
      end
    end
    assign a_rel[j] = a_busy[j] && g_done[a_gidx[j]];
    port_arbiter #(.N(N_IN)) u_arb (
      .clk, .rst_n, .req(a_req[j]), .fixed_mode(arb_fixed), .prio_first(arb_prio_first),
      .release_i(a_rel[j]), .busy(a_busy[j]), .grant_idx(a_gidx[j]));
  end

  crossbar #(.N_IN(N_IN), .N_OUT(N_OUT)) u_xbar (
    .in_word(g_word), .sel_valid(a_busy), .sel(a_gidx), .out_word(o_word));

  // ---------------- output sides ----------------
  for (genvar i = 0; i < N_INTRA; i++) begin : g_irx
    logic [$clog2(HF_DEPTH):0]    hf_free;
    logic [$clog2(INTRA_DEPTH):0] d_free;
    logic hf_full_s, d_full_s;
    switch_port #(.HF_DEPTH(HF_DEPTH), .DATA_DEPTH(INTRA_DEPTH)) u_port (
      .clk, .rst_n,
      .hf_push(o_word[i].valid && o_word[i].hf), .hf_din(o_word[i].data), .hf_pop(irx_hf_pop[i]),
      .hf_dout(irx_hf_dout[i]), .hf_empty(irx_hf_empty[i]), .hf_full(hf_full_s), .hf_free(hf_free),
      .data_push(o_word[i].valid && !o_word[i].hf), .data_din(o_word[i].data),
      .data_pop(irx_data_pop[i]), .data_dout(irx_data_dout[i]), .data_empty(irx_data_empty[i]),
      .data_full(d_full_s), .data_free(d_free));
    assign o_hf_free[i] = 32'(hf_free);
    assign o_d_free[i]  = 32'(d_free);
  end

  for (genvar k = 0; k < N_INTER; k++) begin : g_etx
    localparam int unsigned J = N_INTRA + k;
    logic [$clog2(HF_DEPTH):0]    hf_free;
    logic [$clog2(INTER_DEPTH):0] d_free;
    logic hf_full_s, d_full_s;
    switch_port #(.HF_DEPTH(HF_DEPTH), .DATA_DEPTH(INTER_DEPTH)) u_port (
      .clk, .rst_n,
      .hf_push(o_word[J].valid && o_word[J].hf), .hf_din(o_word[J].data), .hf_pop(etx_hf_pop[k]),
      .hf_dout(etx_hf_dout[k]), .hf_empty(etx_hf_empty[k]), .hf_full(hf_full_s), .hf_free(hf_free),
      .data_push(o_word[J].valid && !o_word[J].hf), .data_din(o_word[J].data),
      .data_pop(etx_data_pop[k]), .data_dout(etx_data_dout[k]), .data_empty(etx_data_empty[k]),
      .data_full(d_full_s), .data_free(d_free));
    assign o_hf_free[J] = 32'(hf_free);
    assign o_d_free[J]  = 32'(d_free);
  end
endmodule
