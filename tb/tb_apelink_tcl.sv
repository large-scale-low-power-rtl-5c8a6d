// tb_apelink_tcl: two APElink TCLs joined back to back (A transmits, B
// receives; B's credits flow back to A). A's inter-tile TX port is a
// switch_port filled with random packets on both virtual channels; B's
// receive FIFOs are modelled here with the remote depths (8 header/footer
// and 24 payload words) and drained slowly at random. Checked: every packet
// arrives intact in its virtual channel, no receive FIFO ever overflows
// (the credit mechanism works), transmission is suspended at least once and
// resumes, the link carries credit words, and the CRC/ECC counters stay 0.
module tb_apelink_tcl;
  import exanet_pkg::*;
  localparam int HD = 8, DD = 24;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic hf_push = 0, data_push = 0;
  logic [127:0] hf_din = '0, data_din = '0, hf_dout, data_dout;
  logic hf_empty, data_empty, hf_pop, data_pop, hf_full, data_full;
  logic [7:0] hf_free;
  logic [10:0] data_free;

  // A -> B and B -> A links
  logic [63:0] ab_tdata, ba_tdata;
  logic ab_tvalid, ab_tctrl, ab_tready, ba_tvalid, ba_tctrl;
  logic [1:0] b_hf_push, b_data_push, b_hf_popped, b_data_popped;
  logic [127:0] b_hf_din, b_data_din;
  logic a_susp, b_susp;
  logic [15:0] a_sent, b_rcvd, b_ecc_c, b_ecc_u, b_crc, b_frame, unused16[6];
  logic [7:0] a_rh, b_rh;
  logic [1:0] a_hf_push_u, a_data_push_u;
  logic [127:0] a_hf_din_u, a_data_din_u;
  logic [63:0] b_tdata_u;
  logic b_hf_pop_u, b_data_pop_u;

  switch_port #(.HF_DEPTH(128), .DATA_DEPTH(1024)) u_port (
    .clk, .rst_n, .hf_push, .hf_din, .hf_pop, .hf_dout, .hf_empty, .hf_full, .hf_free,
    .data_push, .data_din, .data_pop, .data_dout, .data_empty, .data_full, .data_free);

  apelink_tcl #(.REMOTE_HF_DEPTH(HD), .REMOTE_DATA_DEPTH(DD)) u_a (
    .clk, .rst_n,
    .etx_hf_dout(hf_dout), .etx_hf_empty(hf_empty), .etx_hf_pop(hf_pop),
    .etx_data_dout(data_dout), .etx_data_empty(data_empty), .etx_data_pop(data_pop),
    .erx_hf_push(a_hf_push_u), .erx_hf_din(a_hf_din_u), .erx_data_push(a_data_push_u),
    .erx_data_din(a_data_din_u), .erx_hf_popped(2'b00), .erx_data_popped(2'b00),
    .tx_tdata(ab_tdata), .tx_tvalid(ab_tvalid), .tx_tctrl(ab_tctrl), .tx_tready(ab_tready),
    .rx_tdata(ba_tdata), .rx_tvalid(ba_tvalid), .rx_tctrl(ba_tctrl),
    .tred(12'd1), .health(8'h11), .suspended(a_susp), .remote_health(a_rh),
    .pkt_sent(a_sent), .pkt_rcvd(unused16[0]), .ecc_corr_cnt(unused16[1]),
    .ecc_uncorr_cnt(unused16[2]), .crc_err_cnt(unused16[3]), .frame_err_cnt(unused16[4]));

  apelink_tcl #(.REMOTE_HF_DEPTH(HD), .REMOTE_DATA_DEPTH(DD)) u_b (
    .clk, .rst_n,
    .etx_hf_dout('0), .etx_hf_empty(1'b1), .etx_hf_pop(b_hf_pop_u),
    .etx_data_dout('0), .etx_data_empty(1'b1), .etx_data_pop(b_data_pop_u),
    .erx_hf_push(b_hf_push), .erx_hf_din(b_hf_din), .erx_data_push(b_data_push),
    .erx_data_din(b_data_din), .erx_hf_popped(b_hf_popped), .erx_data_popped(b_data_popped),
    .tx_tdata(ba_tdata), .tx_tvalid(ba_tvalid), .tx_tctrl(ba_tctrl), .tx_tready(1'b1),
    .rx_tdata(ab_tdata), .rx_tvalid(ab_tvalid && ab_tready), .rx_tctrl(ab_tctrl),
    .tred(12'd1), .health(8'h22), .suspended(b_susp), .remote_health(b_rh),
    .pkt_sent(unused16[5]), .pkt_rcvd(b_rcvd), .ecc_corr_cnt(b_ecc_c),
    .ecc_uncorr_cnt(b_ecc_u), .crc_err_cnt(b_crc), .frame_err_cnt(b_frame));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // B's receive FIFOs, per VC
  logic [127:0] rhf[2][$], rd[2][$];
  logic [127:0] exp_hf[2][$], exp_d[2][$];
  int overflow = 0, susp_cycles = 0, ctrl_words = 0;
  always @(posedge clk) begin
    ab_tready <= ($urandom_range(0, 7) != 0);
    if (a_susp) susp_cycles++;
    if (ba_tvalid && ba_tctrl) ctrl_words++;
    for (int v = 0; v < 2; v++) begin
      if (b_hf_push[v]) rhf[v].push_back(b_hf_din);
      if (b_data_push[v]) rd[v].push_back(b_data_din);
      if (rhf[v].size() > HD || rd[v].size() > DD) overflow++;
    end
  end
  // slow, random drain of B's FIFOs, checking contents
  always @(negedge clk) begin
    b_hf_popped = 2'b00; b_data_popped = 2'b00;
    for (int v = 0; v < 2; v++) begin
      if (rhf[v].size() > 0 && $urandom_range(0, 15) == 0) begin
        checks++;
        if (exp_hf[v].size() == 0 || rhf[v][0][95:0] != exp_hf[v][0][95:0]) failures++;
        void'(rhf[v].pop_front()); if (exp_hf[v].size() > 0) void'(exp_hf[v].pop_front());
        b_hf_popped[v] = 1;
      end
      if (rd[v].size() > 0 && $urandom_range(0, 7) == 0) begin
        checks++;
        if (exp_d[v].size() == 0 || rd[v][0] != exp_d[v][0]) failures++;
        void'(rd[v].pop_front()); if (exp_d[v].size() > 0) void'(exp_d[v].pop_front());
        b_data_popped[v] = 1;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      hdr_t h; ftr_t f;
      int n, v;
      n = $urandom_range(0, 16);
      v = $urandom_range(0, 1);
      h = hdr_t'({$urandom, $urandom, $urandom, $urandom});
      h.size = 14'(16 * n); h.vc = 5'(v);
      f = ftr_t'({$urandom, $urandom, $urandom, $urandom});
      while (hf_free < 4 || data_free < 20) @(negedge clk);
      @(negedge clk); hf_push = 1; hf_din = h; exp_hf[v].push_back(h);
      for (int i = 0; i < n; i++) begin
        @(negedge clk); hf_push = 0; data_push = 1; data_din = {$urandom, $urandom, $urandom, $urandom};
        exp_d[v].push_back(data_din);
      end
      @(negedge clk); data_push = 0; hf_push = 1; hf_din = f; exp_hf[v].push_back(f);
      @(negedge clk); hf_push = 0;
    end
    wait (b_rcvd == 60);
    wait (exp_hf[0].size() == 0 && exp_hf[1].size() == 0 && exp_d[0].size() == 0 && exp_d[1].size() == 0);
    check(a_sent == 60, "all packets sent");
    check(overflow == 0, "receive FIFOs never overflow");
    check(susp_cycles > 0, "transmission suspended at least once");
    check(ctrl_words > 0, "credit words on the link");
    check(b_crc == 0 && b_ecc_c == 0 && b_ecc_u == 0 && b_frame == 0, "no link errors");
    check(a_rh == 8'h22 && b_rh == 8'h11, "health bytes exchanged");
    $display("suspended cycles=%0d credit words=%0d", susp_cycles, ctrl_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
