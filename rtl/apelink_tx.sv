// apelink_tx: transmit half of the APElink Transmission Control Logic.
//
// Reads packets from the router's inter-tile TX port (128-bit words) and
// sends them over the 64-bit ready/valid stream of the transceiver as
//   MAGIC, START, header low/high, payload low/high ..., footer low/high.
// The header serializer writes the ECC into the EDAC field on the way out
// and the footer serializer writes the CRC-32 of the payload into the CRC
// field (row 2, bits 63:32), computed while the payload is serialized.
//
// Flow control: for each virtual channel the transmitter counts the 128-bit
// words it has sent into the remote header/footer FIFO and payload FIFO and
// compares them with the cumulative "freed" counts that the remote returns
// in credit words. Credit = remote FIFO depth - words in flight. A word is
// held back (transmission suspension) while the credit of its pool is at or
// below the programmable threshold tred, and goes out again as soon as a
// credit word restores it. For the small header/footer pool the threshold is
// tred capped at REMOTE_HF_DEPTH - 2, so that a large tred cannot block
// headers for good. The transmitter also advertises the local
// receive FIFOs: when the counts of words popped from them (or the health
// byte) change, it sends a credit word, marked by tctrl=1, ahead of data once
// CREDIT_GAP link words have passed since the last one, or at once when the
// link carries no data.
//
// The paper gives the word order, MAGIC/START framing, credit with a TRED
// threshold, and the health information embedded in credits; the credit
// word layout, the control-word flag and the credit pacing are this design's.
// Timing: 2 + 2 + 2*ceil(size/16) + 2 link cycles per packet when not
// suspended and the link is always ready.
module apelink_tx
  import exanet_pkg::*;
#(
  parameter int unsigned REMOTE_HF_DEPTH   = 128,
  parameter int unsigned REMOTE_DATA_DEPTH = 1024,
  parameter int unsigned CREDIT_GAP        = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  // inter-tile TX port, read side
  input  logic [127:0] hf_dout,
  input  logic         hf_empty,
  output logic         hf_pop,
  input  logic [127:0] data_dout,
  input  logic         data_empty,
  output logic         data_pop,
  // to transceiver
  output logic [63:0]  tx_tdata,
  output logic         tx_tvalid,
  output logic         tx_tctrl,
  input  logic         tx_tready,
  // credits received from the remote (via apelink_rx)
  input  logic         rcv_credit_valid,
  input  credit_t      rcv_credit,
  // pops of the local inter-tile RX FIFOs, per virtual channel
  input  logic [1:0]   rx_hf_popped,
  input  logic [1:0]   rx_data_popped,
  // configuration / status
  input  logic [11:0]  tred,
  input  logic [7:0]   health,
  output logic         suspended,
  output logic [15:0]  pkt_sent
);
  typedef enum logic [3:0] {S_IDLE, S_MAGIC, S_START, S_H0, S_H1, S_P0, S_P1, S_F0, S_F1} state_t;
  state_t state;

  // ---------------- credit accounting ----------------
  logic [7:0]  sent_hf   [2];
  logic [11:0] sent_data [2];
  logic [7:0]  rem_hf    [2];
  logic [11:0] rem_data  [2];
  logic [11:0] credit_hf [2];
  logic [11:0] credit_data[2];
  logic        ok_hf [2];
  logic        ok_data [2];
  logic [11:0] tred_hf;

  // the header/footer pool is much smaller than the payload pool: its
  // threshold is TRED capped so that one header and footer always fit
  assign tred_hf = (tred > 12'(REMOTE_HF_DEPTH - 2)) ? 12'(REMOTE_HF_DEPTH - 2) : tred;

  always_comb begin
    for (int v = 0; v < 2; v++) begin
      credit_hf[v]   = 12'(REMOTE_HF_DEPTH) - {4'h0, 8'(sent_hf[v] - rem_hf[v])};
      credit_data[v] = 12'(REMOTE_DATA_DEPTH) - 12'(sent_data[v] - rem_data[v]);
      ok_hf[v]   = credit_hf[v] > tred_hf;
      ok_data[v] = credit_data[v] > tred;
    end
  end

  // ---------------- packet serializer ----------------
  hdr_t        hdr_enc;
  ftr_t        ftr;
  logic        vc;
  logic [12:0] remaining;
  logic [31:0] crc;
  logic        crc_clear, crc_en;
  logic [63:0] d_word;
  logic        d_valid;
  logic        charge_hf, charge_data;

  header_ecc_enc u_ecc (.hdr_in(hdr_t'(hf_dout)), .hdr_out(hdr_enc));
  crc32_64 u_crc (.clk, .rst_n, .clear(crc_clear), .en(crc_en), .data(d_word), .crc);

  assign ftr = ftr_t'(hf_dout);

  always_comb begin
    d_valid     = 1'b0;
    d_word      = '0;
    charge_hf   = 1'b0;
    charge_data = 1'b0;
    unique case (state)
      S_MAGIC: begin d_valid = 1'b1; d_word = LINK_MAGIC; end
      S_START: begin d_valid = 1'b1; d_word = LINK_START; end
      S_H0:    begin d_valid = ok_hf[vc]; d_word = hdr_enc[63:0]; charge_hf = 1'b1; end
      S_H1:    begin d_valid = 1'b1; d_word = hdr_enc[127:64]; end
      S_P0:    begin d_valid = !data_empty && ok_data[vc]; d_word = data_dout[63:0]; charge_data = 1'b1; end
      S_P1:    begin d_valid = 1'b1; d_word = data_dout[127:64]; end
      S_F0:    begin d_valid = !hf_empty && ok_hf[vc]; d_word = hf_dout[63:0]; charge_hf = 1'b1; end
      S_F1:    begin d_valid = 1'b1; d_word = {crc, ftr.user_lo}; end
      default: ;
    endcase
  end

  assign suspended = (state == S_H0 && !ok_hf[vc]) || (state == S_F0 && !ok_hf[vc])
                  || (state == S_P0 && !ok_data[vc]);

  // ---------------- credit word generation ----------------
  logic [7:0]  loc_hf   [2];
  logic [11:0] loc_data [2];
  credit_t     cw, cw_last;
  logic        cw_pending, cw_send;
  logic [7:0]  gap;

  always_comb begin
    cw = '{tag: CREDIT_TAG, health: health, vc1_data: loc_data[1], vc1_hf: loc_hf[1],
           vc0_data: loc_data[0], vc0_hf: loc_hf[0]};
    cw_pending = (cw != cw_last);
    cw_send    = cw_pending && (32'(gap) >= CREDIT_GAP || !d_valid);
  end

  logic fire, d_fire;
  assign tx_tvalid = cw_send || d_valid;
  assign tx_tctrl  = cw_send;
  assign tx_tdata  = cw_send ? 64'(cw) : d_word;
  assign fire      = tx_tvalid && tx_tready;
  assign d_fire    = fire && !cw_send;
  assign crc_clear = (state == S_START) && d_fire;
  assign crc_en    = d_fire && (state == S_P0 || state == S_P1);
  assign hf_pop    = d_fire && (state == S_H1 || state == S_F1);
  assign data_pop  = d_fire && (state == S_P1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      vc        <= 1'b0;
      remaining <= '0;
      pkt_sent  <= '0;
      cw_last   <= '{tag: CREDIT_TAG, default: '0};
      gap       <= '0;
      for (int v = 0; v < 2; v++) begin
        sent_hf[v] <= '0; sent_data[v] <= '0; rem_hf[v] <= '0; rem_data[v] <= '0;
        loc_hf[v]  <= '0; loc_data[v]  <= '0;
      end
    end else begin
      // local pops to advertise
      for (int v = 0; v < 2; v++) begin
        if (rx_hf_popped[v])   loc_hf[v]   <= loc_hf[v] + 1'b1;
        if (rx_data_popped[v]) loc_data[v] <= loc_data[v] + 1'b1;
      end
      // credits from the remote
      if (rcv_credit_valid) begin
        rem_hf[0] <= rcv_credit.vc0_hf;  rem_data[0] <= rcv_credit.vc0_data;
        rem_hf[1] <= rcv_credit.vc1_hf;  rem_data[1] <= rcv_credit.vc1_data;
      end
      if (fire && cw_send) begin
        cw_last <= cw;
        gap     <= '0;
      end else if (fire && gap != 8'hFF) begin
        gap <= gap + 1'b1;
      end
      if (d_fire) begin
        if (charge_hf)   sent_hf[vc]   <= sent_hf[vc] + 1'b1;
        if (charge_data) sent_data[vc] <= sent_data[vc] + 1'b1;
      end
      unique case (state)
        S_IDLE: if (!hf_empty) begin
          vc        <= hdr_enc.vc[0];
          remaining <= payload_words(hdr_enc.size);
          state     <= S_MAGIC;
        end
        S_MAGIC: if (d_fire) state <= S_START;
        S_START: if (d_fire) state <= S_H0;
        S_H0:    if (d_fire) state <= S_H1;
        S_H1:    if (d_fire) state <= (remaining == 0) ? S_F0 : S_P0;
        S_P0:    if (d_fire) state <= S_P1;
        S_P1:    if (d_fire) begin
          remaining <= remaining - 1'b1;
          state     <= (remaining == 13'd1) ? S_F0 : S_P0;
        end
        S_F0:    if (d_fire) state <= S_F1;
        S_F1:    if (d_fire) begin
          state    <= S_IDLE;
          pkt_sent <= pkt_sent + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
