// apelink_tcl: APElink Transmission Control Logic for one serial link.
//
// Vendor-independent data-link layer between an inter-tile port of the
// APErouter (128-bit) and a transceiver core such as Aurora 64B/66B
// (64-bit AXI-stream-like ready/valid, plus a tctrl flag that marks credit
// words). apelink_tx serializes packets and applies credit flow control;
// apelink_rx deserializes and decodes; credit words received by apelink_rx
// feed apelink_tx ("transmission suspension" path of the block scheme), and
// pops of the router's receive FIFOs feed the credits that apelink_tx sends.
module apelink_tcl
  import exanet_pkg::*;
#(
  parameter int unsigned REMOTE_HF_DEPTH   = 128,
  parameter int unsigned REMOTE_DATA_DEPTH = 1024,
  parameter int unsigned CREDIT_GAP        = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  // inter-tile TX port of the router
  input  logic [127:0] etx_hf_dout,
  input  logic         etx_hf_empty,
  output logic         etx_hf_pop,
  input  logic [127:0] etx_data_dout,
  input  logic         etx_data_empty,
  output logic         etx_data_pop,
  // inter-tile RX ports of the router (VCH0, VCH1)
  output logic [1:0]   erx_hf_push,
  output logic [127:0] erx_hf_din,
  output logic [1:0]   erx_data_push,
  output logic [127:0] erx_data_din,
  input  logic [1:0]   erx_hf_popped,
  input  logic [1:0]   erx_data_popped,
  // transceiver
  output logic [63:0]  tx_tdata,
  output logic         tx_tvalid,
  output logic         tx_tctrl,
  input  logic         tx_tready,
  input  logic [63:0]  rx_tdata,
  input  logic         rx_tvalid,
  input  logic         rx_tctrl,
  // configuration / status
  input  logic [11:0]  tred,
  input  logic [7:0]   health,
  output logic         suspended,
  output logic [7:0]   remote_health,
  output logic [15:0]  pkt_sent,
  output logic [15:0]  pkt_rcvd,
  output logic [15:0]  ecc_corr_cnt,
  output logic [15:0]  ecc_uncorr_cnt,
  output logic [15:0]  crc_err_cnt,
  output logic [15:0]  frame_err_cnt
);
  logic    cr_valid;
  credit_t cr;

  apelink_tx #(.REMOTE_HF_DEPTH(REMOTE_HF_DEPTH), .REMOTE_DATA_DEPTH(REMOTE_DATA_DEPTH),
               .CREDIT_GAP(CREDIT_GAP)) u_tx (
    .clk, .rst_n,
    .hf_dout(etx_hf_dout), .hf_empty(etx_hf_empty), .hf_pop(etx_hf_pop),
    .data_dout(etx_data_dout), .data_empty(etx_data_empty), .data_pop(etx_data_pop),
    .tx_tdata, .tx_tvalid, .tx_tctrl, .tx_tready,
    .rcv_credit_valid(cr_valid), .rcv_credit(cr),
    .rx_hf_popped(erx_hf_popped), .rx_data_popped(erx_data_popped),
    .tred, .health, .suspended, .pkt_sent);

  apelink_rx u_rx (
    .clk, .rst_n, .rx_tdata, .rx_tvalid, .rx_tctrl,
    .hf_push(erx_hf_push), .hf_din(erx_hf_din), .data_push(erx_data_push), .data_din(erx_data_din),
    .credit_valid(cr_valid), .credit(cr), .remote_health,
    .pkt_rcvd, .ecc_corr_cnt, .ecc_uncorr_cnt, .crc_err_cnt, .frame_err_cnt);
endmodule
