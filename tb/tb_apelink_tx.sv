// tb_apelink_tx: self-checking test of the APElink transmit side.
// Packets are queued in a switch_port; the link words are captured and
// checked here: MAGIC, START, header halves (ECC must decode clean and the
// other fields must be unchanged), payload halves in order, footer halves
// with the CRC field equal to a CRC-32 computed here byte by byte. With the
// link always ready and credit to spare, a packet of n payload words must
// take exactly 6 + 2n consecutive link cycles. Credit flow control is run
// against a small remote FIFO (16 payload words, TRED = 2): with no credit
// returned exactly 14 payload words may leave before transmission stops,
// and returning credit must resume it. Local FIFO pops must come out as a
// credit word with the right counts.
module tb_apelink_tx;
  import exanet_pkg::*;
  localparam int RD = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic hf_push = 0, data_push = 0;
  logic [127:0] hf_din = '0, data_din = '0, hf_dout, data_dout;
  logic hf_empty, data_empty, hf_pop, data_pop, hf_full, data_full;
  logic [7:0] hf_free;
  logic [10:0] data_free;
  logic [63:0] tx_tdata;
  logic tx_tvalid, tx_tctrl, tx_tready = 1;
  logic rcv_credit_valid = 0;
  credit_t rcv_credit = '0;
  logic [1:0] rx_hf_popped = '0, rx_data_popped = '0;
  logic [11:0] tred = '0;
  logic suspended;
  logic [15:0] pkt_sent;

  switch_port #(.HF_DEPTH(128), .DATA_DEPTH(1024)) u_port (
    .clk, .rst_n, .hf_push, .hf_din, .hf_pop, .hf_dout, .hf_empty, .hf_full, .hf_free,
    .data_push, .data_din, .data_pop, .data_dout, .data_empty, .data_full, .data_free);
  apelink_tx #(.REMOTE_HF_DEPTH(128), .REMOTE_DATA_DEPTH(RD), .CREDIT_GAP(4)) dut (
    .clk, .rst_n, .hf_dout, .hf_empty, .hf_pop, .data_dout, .data_empty, .data_pop,
    .tx_tdata, .tx_tvalid, .tx_tctrl, .tx_tready, .rcv_credit_valid, .rcv_credit,
    .rx_hf_popped, .rx_data_popped, .tred, .health(8'h5A), .suspended, .pkt_sent);

  hdr_t chk_in, chk_out;
  logic chk_c, chk_u;
  header_ecc_dec u_chk (.hdr_in(chk_in), .hdr_out(chk_out), .corrected(chk_c), .uncorrectable(chk_u));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] ref_crc(input logic [127:0] w[$]);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    foreach (w[i]) for (int by = 0; by < 16; by++) begin
      c = c ^ {24'h0, w[i][8*by +: 8]};
      for (int k = 0; k < 8; k++) c = c[0] ? (c >> 1) ^ 32'hEDB8_8320 : c >> 1;
    end
    return ~c;
  endfunction

  // capture of link words
  logic [63:0] lw[$];
  int          lt[$];
  credit_t     cws[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (tx_tvalid && tx_tready) begin
      if (tx_tctrl) cws.push_back(credit_t'(tx_tdata));
      else begin lw.push_back(tx_tdata); lt.push_back(cyc); end
    end
  end

  task automatic queue_pkt(input hdr_t h, input logic [127:0] pay[$], input ftr_t f);
    @(negedge clk); hf_push = 1; hf_din = h;
    foreach (pay[i]) begin @(negedge clk); hf_push = 0; data_push = 1; data_din = pay[i]; end
    @(negedge clk); data_push = 0; hf_push = 1; hf_din = f;
    @(negedge clk); hf_push = 0;
  endtask

  task automatic expect_pkt(input hdr_t h, input logic [127:0] pay[$], input ftr_t f, input bit timed);
    int n, t0;
    n = pay.size();
    wait (lw.size() >= 6 + 2 * n);
    check(lw[0] == LINK_MAGIC && lw[1] == LINK_START, "MAGIC, START");
    t0 = lt[0];
    chk_in = hdr_t'({lw[3], lw[2]});
    #1;
    check(!chk_c && !chk_u, "header ECC clean");
    check(chk_in[111:0] == h[111:0], "header fields");
    for (int i = 0; i < n; i++) check({lw[5 + 2*i], lw[4 + 2*i]} == pay[i], "payload");
    check(lw[4 + 2*n] == f[63:0], "footer low half");
    check(lw[5 + 2*n][31:0] == f[95:64], "footer user field");
    check(lw[5 + 2*n][63:32] == ref_crc(pay), "footer CRC");
    if (timed) check(lt[5 + 2*n] - t0 == 5 + 2*n, $sformatf("%0d cycles for %0d words", lt[5+2*n]-t0+1, n));
    repeat (6 + 2 * n) begin void'(lw.pop_front()); void'(lt.pop_front()); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent_data;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. framing, ECC, CRC and timing, one packet at a time
    for (int p = 0; p < 20; p++) begin
      hdr_t h; ftr_t f;
      logic [127:0] pay[$];
      int n;
      n = $urandom_range(0, 6);
      h = hdr_t'({$urandom, $urandom, $urandom, $urandom});
      h.size = 14'(16 * n);
      h.vc = 5'(p % 2);
      f = ftr_t'({$urandom, $urandom, $urandom, $urandom});
      pay = {};
      for (int i = 0; i < n; i++) pay.push_back({$urandom, $urandom, $urandom, $urandom});
      queue_pkt(h, pay, f);
      expect_pkt(h, pay, f, 1);
      // give the credit back as the remote would
      @(negedge clk);
      rcv_credit_valid = 1;
      rcv_credit.vc0_data = dut.sent_data[0]; rcv_credit.vc0_hf = dut.sent_hf[0];
      rcv_credit.vc1_data = dut.sent_data[1]; rcv_credit.vc1_hf = dut.sent_hf[1];
      @(negedge clk); rcv_credit_valid = 0;
    end
    check(pkt_sent == 20, "packet counter");

    // 2. credit exhaustion: VC1, 10-word packets, no credit returned
    tred = 12'd2;
    fork
      for (int p = 0; p < 2; p++) begin
        hdr_t h; ftr_t f;
        logic [127:0] pay[$];
        h = hdr_t'({$urandom, $urandom, $urandom, $urandom});
        h.size = 14'(160); h.vc = 5'd1;
        f = ftr_t'({$urandom, $urandom, $urandom, $urandom});
        pay = {};
        for (int i = 0; i < 10; i++) pay.push_back({$urandom, $urandom, $urandom, $urandom});
        queue_pkt(h, pay, f);
      end
    join
    repeat (100) @(negedge clk);
    check(suspended, "transmission suspended");
    // 6 framing/header/footer words of packet 1 + 4 of packet 2 + 14 payload
    sent_data = 0;
    foreach (lw[i]) ;
    check(lw.size() == 6 + 2 * 10 + 4 + 2 * (RD - 2 - 10), $sformatf("words before stop %0d", lw.size()));
    // return credit: transmission resumes
    @(negedge clk);
    rcv_credit_valid = 1;
    rcv_credit.vc1_data = dut.sent_data[1]; rcv_credit.vc1_hf = dut.sent_hf[1];
    @(negedge clk); rcv_credit_valid = 0;
    repeat (50) @(negedge clk);
    check(!suspended && lw.size() == 2 * (6 + 20), "transmission resumed");
    lw = {}; lt = {};

    // 3. credit word for local pops
    cws = {};
    @(negedge clk); rx_hf_popped = 2'b01; rx_data_popped = 2'b10;
    @(negedge clk); rx_data_popped = 2'b10; rx_hf_popped = 2'b00;
    @(negedge clk); rx_data_popped = 2'b00;
    repeat (20) @(negedge clk);
    check(cws.size() > 0, "credit word sent");
    if (cws.size() > 0) begin
      check(cws[$].tag == CREDIT_TAG && cws[$].health == 8'h5A, "credit tag and health");
      check(cws[$].vc0_hf == 1 && cws[$].vc1_data == 2 && cws[$].vc0_data == 0 && cws[$].vc1_hf == 0,
            "credit counts");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
