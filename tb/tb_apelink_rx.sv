// tb_apelink_rx: self-checking test of the APElink receive side. Link
// streams are built here (MAGIC, START, ECC-encoded header, payload, footer
// with a CRC-32 computed here), with credit words slipped in between and
// inside packets, idle gaps, and injected faults: one or two flipped header
// bits, a flipped payload bit, stray words. Checked: words reach the FIFO
// of the virtual channel named in the header, in order; single header
// errors are repaired; every error lands in the right counter; credit
// words are decoded and never disturb the packet.
module tb_apelink_rx;
  import exanet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [63:0] rx_tdata = '0;
  logic rx_tvalid = 0, rx_tctrl = 0;
  logic [1:0] hf_push, data_push;
  logic [127:0] hf_din, data_din;
  logic credit_valid;
  credit_t credit;
  logic [7:0] remote_health;
  logic [15:0] pkt_rcvd, ecc_corr_cnt, ecc_uncorr_cnt, crc_err_cnt, frame_err_cnt;
  hdr_t enc_in, enc_out;

  apelink_rx dut (.*);
  header_ecc_enc u_enc (.hdr_in(enc_in), .hdr_out(enc_out));
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

  logic [127:0] got_hf[2][$], got_d[2][$];
  int credits = 0;
  always @(posedge clk) begin
    for (int v = 0; v < 2; v++) begin
      if (hf_push[v]) got_hf[v].push_back(hf_din);
      if (data_push[v]) got_d[v].push_back(data_din);
    end
    if (credit_valid) credits++;
  end

  task automatic word(input logic [63:0] w, input bit ctrl = 0);
    @(negedge clk);
    if ($urandom_range(0, 4) == 0) begin rx_tvalid = 0; @(negedge clk); end
    if (!ctrl && $urandom_range(0, 5) == 0) begin
      rx_tvalid = 1; rx_tctrl = 1;
      rx_tdata = {CREDIT_TAG, 8'h3C, 48'($urandom)};
      @(negedge clk);
    end
    rx_tvalid = 1; rx_tctrl = ctrl; rx_tdata = w;
    @(negedge clk);
    rx_tvalid = 0; rx_tctrl = 0;
  endtask

  // fault: 0 none, 1 single header bit, 2 double header bit, 3 payload bit
  task automatic send_check(input int fault);
    hdr_t h, hs; ftr_t f;
    logic [127:0] pay[$], sp[$];
    int n, v, b1, b2;
    int c0, u0, e0, p0;
    c0 = ecc_corr_cnt; u0 = ecc_uncorr_cnt; e0 = crc_err_cnt; p0 = pkt_rcvd;
    n = $urandom_range(fault == 3 ? 1 : 0, 8);
    v = $urandom_range(0, 1);
    h = hdr_t'({$urandom, $urandom, $urandom, $urandom});
    h.size = 14'(16 * n - $urandom_range(0, n > 0 ? 15 : 0));
    h.vc = 5'(v);
    enc_in = h; #1; hs = enc_out;
    f = ftr_t'({$urandom, $urandom, $urandom, $urandom});
    for (int i = 0; i < n; i++) pay.push_back({$urandom, $urandom, $urandom, $urandom});
    f.crc = ref_crc(pay);
    sp = pay;
    // header bits to flip: outside the VC and size fields, so that the
    // packet stays framed and lands in a known channel
    b1 = $urandom_range(5, 47);
    b2 = $urandom_range(62, 111);
    if (fault == 1) hs[b1] = ~hs[b1];
    if (fault == 2) begin
      hs[b1] = ~hs[b1]; hs[b2] = ~hs[b2];
    end
    if (fault == 3) sp[0][7] = ~sp[0][7];
    word(LINK_MAGIC); word(LINK_START);
    word(hs[63:0]); word(hs[127:64]);
    foreach (sp[i]) begin word(sp[i][63:0]); word(sp[i][127:64]); end
    word(f[63:0]); word(f[127:64]);
    @(negedge clk);
    check(pkt_rcvd == p0 + 1, "packet counted");
    check(got_hf[v].size() == 2 && got_hf[1-v].size() == 0, "header+footer in the right VC");
    if (got_hf[v].size() == 2) begin
      if (fault != 2) check(got_hf[v][0][111:0] == h[111:0], "header delivered (repaired)");
      check(got_hf[v][1] == f, "footer delivered");
    end
    check(got_d[v].size() == n && got_d[1-v].size() == 0, "payload in the right VC");
    if (fault != 3) foreach (pay[i]) if (i < got_d[v].size()) check(got_d[v][i] == pay[i], "payload word");
    check(ecc_corr_cnt == c0 + (fault == 1), "ECC corrected count");
    check(ecc_uncorr_cnt == u0 + (fault == 2), "ECC uncorrectable count");
    check(crc_err_cnt == e0 + (fault == 3), "CRC error count");
    for (int k = 0; k < 2; k++) begin got_hf[k] = {}; got_d[k] = {}; end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) send_check(t % 4);
    // stray word while idle, then a good packet
    word(64'h1234);
    @(negedge clk);
    check(frame_err_cnt == 1, "framing error counted");
    send_check(0);
    // a credit word by itself
    word({CREDIT_TAG, 8'hA7, 12'd5, 8'd6, 12'd7, 8'd8}, 1);
    check(remote_health == 8'hA7, "health byte from credit word");
    check(credits > 0, "credit words seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (credit_valid && rx_tdata[55:48] == 8'hA7)
    begin
      checks++;
      if (!(credit.vc1_data == 5 && credit.vc1_hf == 6 && credit.vc0_data == 7 && credit.vc0_hf == 8)) failures++;
    end
endmodule
