// traffic_generator: self-test source of EXApackets. After a start pulse it
// writes n_pkts packets into an intra-tile TX port of the router, the same
// way the host would: header into the header/footer FIFO, ceil(size/16)
// payload words into the payload FIFO, then the footer.
//
// The paper names this IP as one of three self-test blocks used to measure
// bandwidth, and says configuration registers set the packets' type, size,
// destination coordinates and port. How it does so is this design's own:
// a small state machine (IDLE, HDR, PAY, FTR) that writes one word per
// clock whenever the target FIFO is not full. Packet p carries p in the
// header's address field and the payload word w of packet p is
// {4{p[15:0], w[15:0]}}, so a receiver can check what it got. The
// footer carries the source coordinates; the CRC field is left 0 because
// the link transmitter fills it in.
//
// Interface: start (one-cycle pulse, ignored while busy), n_pkts, size,
// ptype, dest, src; FIFO write ports hf_push/hf_din/hf_full and
// data_push/data_din/data_full; busy and sent (packets written so far).
// Timing: 2 + ceil(size/16) clocks per packet when the FIFOs never fill.
module traffic_generator
  import exanet_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [15:0]  n_pkts,
  input  logic [13:0]  size,
  input  logic [4:0]   ptype,
  input  coord_t       dest,
  input  coord_t       src,
  output logic         hf_push,
  output logic [127:0] hf_din,
  input  logic         hf_full,
  output logic         data_push,
  output logic [127:0] data_din,
  input  logic         data_full,
  output logic         busy,
  output logic [15:0]  sent
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY, S_FTR} state_t;
  state_t      state;
  logic [12:0] nwords, widx;
  hdr_t        hdr;
  ftr_t        ftr;

  assign busy = (state != S_IDLE);

  always_comb begin
    hdr           = '0;
    hdr.size      = size;
    hdr.ptype     = ptype;
    hdr.dest      = dest;
    hdr.dest_addr = {24'd0, sent};
    ftr           = '0;
    ftr.src       = src;
    hf_push   = (state == S_HDR || state == S_FTR) && !hf_full;
    hf_din    = (state == S_HDR) ? 128'(hdr) : 128'(ftr);
    data_push = (state == S_PAY) && !data_full;
    data_din  = {4{sent, 3'd0, widx}};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      sent   <= '0;
      nwords <= '0;
      widx   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start && n_pkts != 0) begin
          state  <= S_HDR;
          sent   <= '0;
          nwords <= payload_words(size);
        end
        S_HDR: if (hf_push) begin
          widx  <= '0;
          state <= (nwords == 0) ? S_FTR : S_PAY;
        end
        S_PAY: if (data_push) begin
          widx <= widx + 1'b1;
          if (widx + 1'b1 == nwords) state <= S_FTR;
        end
        S_FTR: if (hf_push) begin
          sent  <= sent + 1'b1;
          state <= (sent + 1'b1 == n_pkts) ? S_IDLE : S_HDR;
        end
      endcase
    end
  end
endmodule
