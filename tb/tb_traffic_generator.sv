// tb_traffic_generator: self-checking test of traffic_generator. Runs
// bursts of packets with several sizes (0, 1, 16, 17, 100, 4096 bytes),
// first with the FIFOs always ready, where the burst must take exactly
// n_pkts * (2 + ceil(size/16)) clocks, then with random full flags. Every
// word written is checked against the header/payload/footer sequence the
// test works out itself.
module tb_traffic_generator;
  import exanet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0; logic [15:0] n_pkts; logic [13:0] size; logic [4:0] ptype;
  coord_t dest, src;
  logic hf_push, data_push, hf_full = 0, data_full = 0, busy;
  logic [127:0] hf_din, data_din; logic [15:0] sent;
  bit rand_full = 0;

  traffic_generator dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s @%0t", what, $time); end
  endtask

  // expected stream
  int exp_pkt, exp_w, nw, phase;  // phase 0 header, 1 payload, 2 footer
  hdr_t h;
  ftr_t f;
  always @(posedge clk) if (rst_n) begin
    if (rand_full) begin hf_full <= ($urandom_range(3) == 0); data_full <= ($urandom_range(3) == 0); end
    else begin hf_full <= 0; data_full <= 0; end
    check(!(hf_push && data_push), "one FIFO written per clock");
    if (hf_push) begin
      if (phase == 0) begin
        h = hdr_t'(hf_din);
        check(h.size == size && h.ptype == ptype && h.dest == dest && h.dest_addr == 40'(exp_pkt), "header fields");
        phase = (nw == 0) ? 2 : 1; exp_w = 0;
      end else begin
        f = ftr_t'(hf_din);
        check(phase != 0 && exp_w == nw, "footer after all payload");
        check(f.src == src && f.crc == 0, "footer fields");
        exp_pkt++; phase = 0;
      end
    end
    if (data_push) begin
      check(phase == 1, "payload between header and footer");
      check(data_din == {4{exp_pkt[15:0], 16'(exp_w)}}, "payload word pattern");
      exp_w++;
    end
  end

  task automatic burst(input int np, input int sz, input bit rf);
    int t0, t1;
    rand_full = rf; n_pkts = 16'(np); size = 14'(sz); ptype = 5'($urandom);
    dest = coord_t'($urandom); src = coord_t'($urandom);
    nw = int'(payload_words(size)); exp_pkt = 0; phase = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time / 10;
    while (busy) @(negedge clk);
    t1 = $time / 10;
    @(negedge clk);
    check(exp_pkt == np && sent == 16'(np), $sformatf("all %0d packets of %0d B written", np, sz));
    if (!rf) check(t1 - t0 == np * (2 + nw), $sformatf("burst time %0d, expected %0d", t1 - t0, np * (2 + nw)));
  endtask

  initial begin
    n_pkts = 0; size = 0; ptype = 0; dest = '0; src = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    burst(5, 0, 0); burst(5, 1, 0); burst(4, 16, 0); burst(4, 17, 0); burst(3, 100, 0); burst(2, 4096, 0);
    burst(20, 48, 1); burst(3, 4096, 1); burst(10, 33, 1);
    // start with n_pkts = 0 does nothing
    n_pkts = 0; @(negedge clk); start = 1; @(negedge clk); start = 0; @(negedge clk);
    check(!busy, "zero-packet start ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
