// apelink_rx: receive half of the APElink Transmission Control Logic
// (deserializer and decoder).
//
// Takes 64-bit words from the transceiver. Words flagged tctrl=1 are credit
// words: their freed counts and health byte are handed to apelink_tx (and
// the health byte kept as the neighbour's status). Data words are framed by
// the state machine: a packet starts with MAGIC then START; the two header
// halves are joined into a 128-bit header, checked and, for a single-bit
// error, corrected by header_ecc_dec, and written into the header/footer
// FIFO of the virtual channel named in the header; payload halves are
// joined and written into that channel's payload FIFO while their CRC-32 is
// computed; the footer is written last and its CRC field compared.
// The receive stream has no back-pressure (credits guarantee FIFO room).
// Errors are counted, not corrected by retransmission: the paper states
// that APElink has no acknowledgement or retransmission. A word other than
// MAGIC while idle, or other than START after MAGIC, counts a framing error
// and the decoder waits for the next MAGIC. Packets with a bad CRC or an
// uncorrectable header are still delivered (this design's choice).
module apelink_rx
  import exanet_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // from transceiver
  input  logic [63:0]  rx_tdata,
  input  logic         rx_tvalid,
  input  logic         rx_tctrl,
  // to inter-tile RX port, per virtual channel
  output logic [1:0]   hf_push,
  output logic [127:0] hf_din,
  output logic [1:0]   data_push,
  output logic [127:0] data_din,
  // credit words received
  output logic         credit_valid,
  output credit_t      credit,
  output logic [7:0]   remote_health,
  // status counters
  output logic [15:0]  pkt_rcvd,
  output logic [15:0]  ecc_corr_cnt,
  output logic [15:0]  ecc_uncorr_cnt,
  output logic [15:0]  crc_err_cnt,
  output logic [15:0]  frame_err_cnt
);
  typedef enum logic [3:0] {S_IDLE, S_MAGIC, S_H0, S_H1, S_P0, S_P1, S_F0, S_F1} state_t;
  state_t state;

  logic [63:0] low;
  logic        vc;
  logic [12:0] remaining;
  logic        dvalid;
  hdr_t        hdr_fix;
  logic        corr, uncorr;
  logic [31:0] crc;
  logic        crc_clear, crc_en;

  assign dvalid = rx_tvalid && !rx_tctrl;

  header_ecc_dec u_ecc (.hdr_in(hdr_t'({rx_tdata, low})), .hdr_out(hdr_fix),
                        .corrected(corr), .uncorrectable(uncorr));
  crc32_64 u_crc (.clk, .rst_n, .clear(crc_clear), .en(crc_en), .data(rx_tdata), .crc);

  assign crc_clear = dvalid && state == S_MAGIC;
  assign crc_en    = dvalid && (state == S_P0 || state == S_P1);

  always_comb begin
    hf_push   = 2'b00;
    data_push = 2'b00;
    hf_din    = {rx_tdata, low};
    data_din  = {rx_tdata, low};
    if (dvalid && state == S_H1) begin
      hf_din = hdr_fix;
      hf_push[hdr_fix.vc[0]] = 1'b1;
    end
    if (dvalid && state == S_P1) data_push[vc] = 1'b1;
    if (dvalid && state == S_F1) hf_push[vc] = 1'b1;
  end

  assign credit_valid = rx_tvalid && rx_tctrl && (rx_tdata[63:48] == CREDIT_TAG);
  assign credit       = credit_t'(rx_tdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      low            <= '0;
      vc             <= 1'b0;
      remaining      <= '0;
      remote_health  <= '0;
      pkt_rcvd       <= '0;
      ecc_corr_cnt   <= '0;
      ecc_uncorr_cnt <= '0;
      crc_err_cnt    <= '0;
      frame_err_cnt  <= '0;
    end else begin
      if (credit_valid) remote_health <= credit.health;
      if (dvalid) begin
        unique case (state)
          S_IDLE: if (rx_tdata == LINK_MAGIC) state <= S_MAGIC;
                  else frame_err_cnt <= frame_err_cnt + 1'b1;
          S_MAGIC: if (rx_tdata == LINK_START) state <= S_H0;
                   else begin
                     state <= S_IDLE;
                     frame_err_cnt <= frame_err_cnt + 1'b1;
                   end
          S_H0: begin low <= rx_tdata; state <= S_H1; end
          S_H1: begin
            vc        <= hdr_fix.vc[0];
            remaining <= payload_words(hdr_fix.size);
            if (corr && !uncorr) ecc_corr_cnt <= ecc_corr_cnt + 1'b1;
            if (uncorr) ecc_uncorr_cnt <= ecc_uncorr_cnt + 1'b1;
            state <= (payload_words(hdr_fix.size) == 0) ? S_F0 : S_P0;
          end
          S_P0: begin low <= rx_tdata; state <= S_P1; end
          S_P1: begin
            remaining <= remaining - 1'b1;
            state     <= (remaining == 13'd1) ? S_F0 : S_P0;
          end
          S_F0: begin low <= rx_tdata; state <= S_F1; end
          S_F1: begin
            if (rx_tdata[63:32] != crc) crc_err_cnt <= crc_err_cnt + 1'b1;
            pkt_rcvd <= pkt_rcvd + 1'b1;
            state    <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
