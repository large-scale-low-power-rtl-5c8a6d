// exanet_ip: the ExaNet network IP of one node, in the configuration of
// the two-link prototype: an APErouter with two intra-tile ports and two
// inter-tile ports (X+, Y+), one APElink TCL per inter-tile port, and the
// Target Controller holding configuration and status registers.
//
// Interfaces (all in one 156.25 MHz clock domain in this design):
//   * intra-tile ports: the host pushes headers/footers and payload words
//     into the TX FIFOs and pops received ones from the RX FIFOs
//     (128-bit words);
//   * links: per inter-tile port a 64-bit ready/valid transmit stream and a
//     64-bit valid-only receive stream, each with a tctrl flag for credit
//     words, to be connected to a transceiver core (Aurora 64B/66B on the
//     prototype, not part of this RTL);
//   * a 32-bit AXI4-Lite slave for the Target Controller.
// Status words of the Target Controller (byte address 0x40 + 4n):
//   n=0  FIFO status: bit i irx header empty, 2+i irx payload empty,
//        4+k etx header empty, 6+k etx payload empty
//   n=1+3k link k {pkt_sent, pkt_rcvd}; n=2+3k {ecc_corr, ecc_uncorr};
//   n=3+3k {crc_err, frame_err}; n=7 {16'b0, health1, health0} of the
//   neighbours, with link suspension flags in bits 17:16;
//   n=8  self-test cycle count; n=9 {consumer packets, generator packets};
//   n=10 payload words consumed; n=11 bit 0 self-test timer running.
// Self-test: a traffic generator shares intra-tile TX port 0 with the host
// and a consumer shares intra-tile RX port 0 (their writes and pops are
// OR-ed with the host's, so the host should leave port 0 alone while a
// test runs); a performance counter times a test from its start until the
// consumer has received the number of packets set for the test. This is
// how the bandwidth of the IP is measured without the host in the loop.
// The paper's prototype runs the AXI bus at 100 MHz; the clock-domain
// crossing to the 156.25 MHz network clock is left out here.
module exanet_ip
  import exanet_pkg::*;
#(
  parameter int unsigned HF_DEPTH    = 128,
  parameter int unsigned INTRA_DEPTH = 4096,
  parameter int unsigned INTER_DEPTH = 1024,
  localparam int unsigned N_INTRA = 2,
  localparam int unsigned N_INTER = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite
  input  logic [7:0]   s_awaddr,
  input  logic         s_awvalid,
  output logic         s_awready,
  input  logic [31:0]  s_wdata,
  input  logic         s_wvalid,
  output logic         s_wready,
  output logic [1:0]   s_bresp,
  output logic         s_bvalid,
  input  logic         s_bready,
  input  logic [7:0]   s_araddr,
  input  logic         s_arvalid,
  output logic         s_arready,
  output logic [31:0]  s_rdata,
  output logic [1:0]   s_rresp,
  output logic         s_rvalid,
  input  logic         s_rready,
  // intra-tile TX ports
  input  logic         itx_hf_push   [N_INTRA],
  input  logic [127:0] itx_hf_din    [N_INTRA],
  output logic         itx_hf_full   [N_INTRA],
  input  logic         itx_data_push [N_INTRA],
  input  logic [127:0] itx_data_din  [N_INTRA],
  output logic         itx_data_full [N_INTRA],
  // intra-tile RX ports
  input  logic         irx_hf_pop    [N_INTRA],
  output logic [127:0] irx_hf_dout   [N_INTRA],
  output logic         irx_hf_empty  [N_INTRA],
  input  logic         irx_data_pop  [N_INTRA],
  output logic [127:0] irx_data_dout [N_INTRA],
  output logic         irx_data_empty[N_INTRA],
  // links to the transceivers
  output logic [63:0]  tx_tdata [N_INTER],
  output logic         tx_tvalid[N_INTER],
  output logic         tx_tctrl [N_INTER],
  input  logic         tx_tready[N_INTER],
  input  logic [63:0]  rx_tdata [N_INTER],
  input  logic         rx_tvalid[N_INTER],
  input  logic         rx_tctrl [N_INTER]
);
  coord_t      my_coord, lattice;
  logic [5:0]  dim_order;
  logic [2:0]  dim_en;
  logic        arb_fixed;
  logic [3:0]  arb_prio_first;
  logic [11:0] tred;
  logic [7:0]  health;
  logic [31:0] status [12];
  logic        st_start, st_cons_en;
  logic [15:0] st_npkts;
  logic [13:0] st_size;
  logic [4:0]  st_ptype;
  coord_t      st_dest;

  // self-test IPs on intra-tile port 0
  logic         r_itx_hf_push  [N_INTRA];
  logic [127:0] r_itx_hf_din   [N_INTRA];
  logic         r_itx_data_push[N_INTRA];
  logic [127:0] r_itx_data_din [N_INTRA];
  logic         r_irx_hf_pop   [N_INTRA];
  logic         r_irx_data_pop [N_INTRA];
  logic         tg_hf_push, tg_data_push, tg_busy, cs_hf_pop, cs_data_pop, pc_running;
  logic [127:0] tg_hf_din, tg_data_din;
  logic [15:0]  tg_sent, cs_pkts;
  logic [31:0]  cs_words, pc_cycles;

  traffic_generator u_tgen (
    .clk, .rst_n, .start(st_start), .n_pkts(st_npkts), .size(st_size), .ptype(st_ptype),
    .dest(st_dest), .src(my_coord),
    .hf_push(tg_hf_push), .hf_din(tg_hf_din), .hf_full(itx_hf_full[0]),
    .data_push(tg_data_push), .data_din(tg_data_din), .data_full(itx_data_full[0]),
    .busy(tg_busy), .sent(tg_sent));

  consumer u_cons (
    .clk, .rst_n, .enable(st_cons_en), .clear(st_start),
    .hf_pop(cs_hf_pop), .hf_empty(irx_hf_empty[0]),
    .data_pop(cs_data_pop), .data_empty(irx_data_empty[0]),
    .pkts(cs_pkts), .words(cs_words));

  perf_counter u_perf (
    .clk, .rst_n, .start(st_start), .target(st_npkts), .got(cs_pkts),
    .cycles(pc_cycles), .running(pc_running));

  for (genvar i = 0; i < N_INTRA; i++) begin : g_host
    if (i == 0) begin : g_st
      assign r_itx_hf_push[i]   = itx_hf_push[i] || tg_hf_push;
      assign r_itx_hf_din[i]    = tg_busy ? tg_hf_din : itx_hf_din[i];
      assign r_itx_data_push[i] = itx_data_push[i] || tg_data_push;
      assign r_itx_data_din[i]  = tg_busy ? tg_data_din : itx_data_din[i];
      assign r_irx_hf_pop[i]    = irx_hf_pop[i] || cs_hf_pop;
      assign r_irx_data_pop[i]  = irx_data_pop[i] || cs_data_pop;
    end else begin : g_plain
      assign r_itx_hf_push[i]   = itx_hf_push[i];
      assign r_itx_hf_din[i]    = itx_hf_din[i];
      assign r_itx_data_push[i] = itx_data_push[i];
      assign r_itx_data_din[i]  = itx_data_din[i];
      assign r_irx_hf_pop[i]    = irx_hf_pop[i];
      assign r_irx_data_pop[i]  = irx_data_pop[i];
    end
  end

  logic [127:0] etx_hf_dout   [N_INTER];
  logic         etx_hf_empty  [N_INTER];
  logic         etx_hf_pop    [N_INTER];
  logic [127:0] etx_data_dout [N_INTER];
  logic         etx_data_empty[N_INTER];
  logic         etx_data_pop  [N_INTER];
  logic         erx_hf_push   [2*N_INTER];
  logic [127:0] erx_hf_din    [2*N_INTER];
  logic         erx_data_push [2*N_INTER];
  logic [127:0] erx_data_din  [2*N_INTER];
  logic         erx_hf_popped [2*N_INTER];
  logic         erx_data_popped[2*N_INTER];

  aperouter #(.N_INTRA(N_INTRA), .N_INTER(N_INTER), .HF_DEPTH(HF_DEPTH),
              .INTRA_DEPTH(INTRA_DEPTH), .INTER_DEPTH(INTER_DEPTH)) u_router (
    .clk, .rst_n, .my_coord, .lattice, .dim_order, .dim_en, .arb_fixed,
    .arb_prio_first(arb_prio_first[2:0]),
    .itx_hf_push(r_itx_hf_push), .itx_hf_din(r_itx_hf_din), .itx_hf_full,
    .itx_data_push(r_itx_data_push), .itx_data_din(r_itx_data_din), .itx_data_full,
    .irx_hf_pop(r_irx_hf_pop), .irx_hf_dout, .irx_hf_empty,
    .irx_data_pop(r_irx_data_pop), .irx_data_dout, .irx_data_empty,
    .etx_hf_pop, .etx_hf_dout, .etx_hf_empty, .etx_data_pop, .etx_data_dout, .etx_data_empty,
    .erx_hf_push, .erx_hf_din, .erx_data_push, .erx_data_din, .erx_hf_popped, .erx_data_popped);

  logic        susp      [N_INTER];
  logic [7:0]  rhealth   [N_INTER];
  logic [15:0] c_sent    [N_INTER];
  logic [15:0] c_rcvd    [N_INTER];
  logic [15:0] c_ecc_c   [N_INTER];
  logic [15:0] c_ecc_u   [N_INTER];
  logic [15:0] c_crc     [N_INTER];
  logic [15:0] c_frame   [N_INTER];

  for (genvar k = 0; k < N_INTER; k++) begin : g_link
    logic [1:0]   hf_push, data_push;
    logic [127:0] hf_din, data_din;
    apelink_tcl #(.REMOTE_HF_DEPTH(HF_DEPTH), .REMOTE_DATA_DEPTH(INTER_DEPTH)) u_tcl (
      .clk, .rst_n,
      .etx_hf_dout(etx_hf_dout[k]), .etx_hf_empty(etx_hf_empty[k]), .etx_hf_pop(etx_hf_pop[k]),
      .etx_data_dout(etx_data_dout[k]), .etx_data_empty(etx_data_empty[k]),
      .etx_data_pop(etx_data_pop[k]),
      .erx_hf_push(hf_push), .erx_hf_din(hf_din), .erx_data_push(data_push), .erx_data_din(data_din),
      .erx_hf_popped({erx_hf_popped[2*k+1], erx_hf_popped[2*k]}),
      .erx_data_popped({erx_data_popped[2*k+1], erx_data_popped[2*k]}),
      .tx_tdata(tx_tdata[k]), .tx_tvalid(tx_tvalid[k]), .tx_tctrl(tx_tctrl[k]),
      .tx_tready(tx_tready[k]),
      .rx_tdata(rx_tdata[k]), .rx_tvalid(rx_tvalid[k]), .rx_tctrl(rx_tctrl[k]),
      .tred, .health, .suspended(susp[k]), .remote_health(rhealth[k]),
      .pkt_sent(c_sent[k]), .pkt_rcvd(c_rcvd[k]), .ecc_corr_cnt(c_ecc_c[k]),
      .ecc_uncorr_cnt(c_ecc_u[k]), .crc_err_cnt(c_crc[k]), .frame_err_cnt(c_frame[k]));
    for (genvar v = 0; v < 2; v++) begin : g_vc
      assign erx_hf_push[2*k+v]   = hf_push[v];
      assign erx_hf_din[2*k+v]    = hf_din;
      assign erx_data_push[2*k+v] = data_push[v];
      assign erx_data_din[2*k+v]  = data_din;
    end
    assign status[1+3*k] = {c_sent[k], c_rcvd[k]};
    assign status[2+3*k] = {c_ecc_c[k], c_ecc_u[k]};
    assign status[3+3*k] = {c_crc[k], c_frame[k]};
  end

  assign status[0] = {24'd0, etx_data_empty[1], etx_data_empty[0], etx_hf_empty[1],
                      etx_hf_empty[0], irx_data_empty[1], irx_data_empty[0],
                      irx_hf_empty[1], irx_hf_empty[0]};
  assign status[7] = {14'd0, susp[1], susp[0], rhealth[1], rhealth[0]};
  assign status[8] = pc_cycles;
  assign status[9] = {cs_pkts, tg_sent};
  assign status[10] = cs_words;
  assign status[11] = {31'd0, pc_running};

  target_controller #(.N_STATUS(12)) u_tc (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready, .s_bresp, .s_bvalid,
    .s_bready, .s_araddr, .s_arvalid, .s_arready, .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .my_coord, .lattice, .dim_order, .dim_en, .arb_fixed, .arb_prio_first, .tred, .health,
    .st_start, .st_cons_en, .st_npkts, .st_size, .st_ptype, .st_dest, .status);
endmodule
