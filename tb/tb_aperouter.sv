// tb_aperouter: self-checking test of the APErouter (2 intra-tile, 2
// inter-tile ports, FIFO depths scaled down to make them fill quickly).
// The node sits at (0,0,0) of a 2 x 2 x 1 lattice. Host processes write
// packets into both intra-tile TX ports; link processes inject packets into
// the inter-tile RX FIFOs of both virtual channels; readers drain the
// intra-tile RX and inter-tile TX ports. Every packet carries a unique tag in
// its destination-address field, and a scoreboard computed here (from the
// destination and the dimension order) gives its expected output port,
// virtual channel and words. Checked besides the data: each mechanism
// happens (several inputs contending for one output, a grant held back
// because the output FIFO lacks room for the whole packet, fixed-priority
// mode, both virtual channels), and the router streams one word per cycle:
// latency minus packet length is the same for short and long packets.
module tb_aperouter;
  import exanet_pkg::*;
  localparam int NI = 2, NE = 2, HD = 16, ID = 64, ED = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  coord_t my_coord, lattice;
  logic arb_fixed = 0;
  logic [2:0] arb_prio_first = '0;
  logic itx_hf_push[NI], itx_hf_full[NI], itx_data_push[NI], itx_data_full[NI];
  logic [127:0] itx_hf_din[NI], itx_data_din[NI];
  logic irx_hf_pop[NI], irx_hf_empty[NI], irx_data_pop[NI], irx_data_empty[NI];
  logic [127:0] irx_hf_dout[NI], irx_data_dout[NI];
  logic etx_hf_pop[NE], etx_hf_empty[NE], etx_data_pop[NE], etx_data_empty[NE];
  logic [127:0] etx_hf_dout[NE], etx_data_dout[NE];
  logic erx_hf_push[2*NE], erx_data_push[2*NE], erx_hf_popped[2*NE], erx_data_popped[2*NE];
  logic [127:0] erx_hf_din[2*NE], erx_data_din[2*NE];

  aperouter #(.N_INTRA(NI), .N_INTER(NE), .HF_DEPTH(HD), .INTRA_DEPTH(ID), .INTER_DEPTH(ED)) dut (
    .clk, .rst_n, .my_coord, .lattice, .dim_order(6'b00_01_10), .dim_en(3'b111),
    .arb_fixed, .arb_prio_first, .*);
  always #5 clk = ~clk;

  typedef struct {
    int port;  // expected output
    int vc;    // expected VC field (-1: unchanged)
    hdr_t h;
    ftr_t f;
    logic [127:0] pay[$];
  } pkt_t;
  pkt_t sb[int];
  int next_tag = 1, delivered = 0, sent = 0;
  bit hold_rx0 = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic pkt_t make_pkt(input coord_t dest, input int size);
    pkt_t p;
    p.h = hdr_t'({$urandom, $urandom, $urandom, $urandom});
    p.h.size = 14'(size);
    p.h.dest = dest;
    p.h.dest_addr = 40'(next_tag);
    p.f = ftr_t'({$urandom, $urandom, $urandom, $urandom});
    for (int i = 0; i < (size + 15) / 16; i++) p.pay.push_back({$urandom, $urandom, $urandom, $urandom});
    // order Z (size 1: skipped), Y, X from node (0,0,0); links are X+ and Y+
    if (dest.y != 0) begin p.port = NI + 1; p.vc = 1; end
    else if (dest.x != 0) begin p.port = NI + 0; p.vc = 1; end
    else begin p.port = dest.port; p.vc = -1; end
    sb[next_tag] = p;
    next_tag++;
    return p;
  endfunction

  task automatic host_send(input int port, input pkt_t p);
    @(negedge clk);
    while (itx_hf_full[port]) @(negedge clk);
    itx_hf_push[port] = 1; itx_hf_din[port] = p.h;
    @(negedge clk); itx_hf_push[port] = 0;
    foreach (p.pay[i]) begin
      while (itx_data_full[port]) @(negedge clk);
      itx_data_push[port] = 1; itx_data_din[port] = p.pay[i];
      @(negedge clk); itx_data_push[port] = 0;
    end
    while (itx_hf_full[port]) @(negedge clk);
    itx_hf_push[port] = 1; itx_hf_din[port] = p.f;
    @(negedge clk); itx_hf_push[port] = 0;
    sent++;
  endtask

  // link side injection (credits guarantee room in the real design; here
  // the test keeps the total below the FIFO depth)
  task automatic link_send(input int k, input int v, input pkt_t p);
    int i;
    i = 2 * k + v;
    @(negedge clk); erx_hf_push[i] = 1; erx_hf_din[i] = p.h;
    @(negedge clk); erx_hf_push[i] = 0;
    foreach (p.pay[j]) begin
      erx_data_push[i] = 1; erx_data_din[i] = p.pay[j]; @(negedge clk); erx_data_push[i] = 0;
    end
    erx_hf_push[i] = 1; erx_hf_din[i] = p.f; @(negedge clk); erx_hf_push[i] = 0;
    sent++;
  endtask

  // checks one packet read out of an output port
  task automatic got(input int port, input hdr_t h, input logic [127:0] pay[$], input ftr_t f);
    int tag;
    pkt_t e;
    tag = int'(h.dest_addr);
    if (!sb.exists(tag)) begin check(0, "unknown packet"); return; end
    e = sb[tag];
    check(e.port == port, $sformatf("tag %0d out on %0d exp %0d", tag, port, e.port));
    check(h.vc == (e.vc < 0 ? e.h.vc : 5'(e.vc)), "virtual channel field");
    check(h.size == e.h.size && h.dest == e.h.dest && f == e.f, "header/footer");
    check(pay.size() == e.pay.size(), "payload length");
    foreach (pay[i]) if (i < e.pay.size()) check(pay[i] == e.pay[i], "payload word");
    sb.delete(tag);
    delivered++;
  endtask

  // readers
  for (genvar o = 0; o < NI + NE; o++) begin : g_rd
    initial begin
      forever begin
        hdr_t h; ftr_t f;
        logic [127:0] pay[$];
        @(negedge clk);
        if (o == 0 && hold_rx0) continue;
        if (o < NI ? !irx_hf_empty[o] : !etx_hf_empty[o - NI]) begin
          h = o < NI ? irx_hf_dout[o] : etx_hf_dout[o - NI];
          if (o < NI) irx_hf_pop[o] = 1; else etx_hf_pop[o - NI] = 1;
          @(negedge clk);
          if (o < NI) irx_hf_pop[o] = 0; else etx_hf_pop[o - NI] = 0;
          pay = {};
          for (int i = 0; i < (int'(h.size) + 15) / 16; i++) begin
            while (o < NI ? irx_data_empty[o] : etx_data_empty[o - NI]) @(negedge clk);
            pay.push_back(o < NI ? irx_data_dout[o] : etx_data_dout[o - NI]);
            if (o < NI) irx_data_pop[o] = 1; else etx_data_pop[o - NI] = 1;
            @(negedge clk);
            if (o < NI) irx_data_pop[o] = 0; else etx_data_pop[o - NI] = 0;
          end
          while (o < NI ? irx_hf_empty[o] : etx_hf_empty[o - NI]) @(negedge clk);
          f = o < NI ? irx_hf_dout[o] : etx_hf_dout[o - NI];
          if (o < NI) irx_hf_pop[o] = 1; else etx_hf_pop[o - NI] = 1;
          @(negedge clk);
          if (o < NI) irx_hf_pop[o] = 0; else etx_hf_pop[o - NI] = 0;
          got(o, h, pay, f);
        end
      end
    end
  end

  // mechanism counters from inside the router
  int contention = 0, vct_wait = 0;
  int occ[2*NE] = '{default: 0};
  bit measure = 0;
  always @(posedge clk) for (int i = 0; i < 2 * NE; i++)
    occ[i] <= occ[i] + int'(erx_data_push[i]) - int'(erx_data_popped[i]);
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < NI + NE; j++) if ($countones(dut.a_req[j]) > 1 && !dut.a_busy[j]) contention++;
    for (int i = 0; i < NI + 2 * NE; i++)
      if (dut.g_req[i] && !dut.a_busy[dut.g_port[i]] && !dut.a_req[dut.g_port[i]][i]) vct_wait++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic coord_t cd(input int x, input int y, input int port);
    return '{x: 4'(x), y: 4'(y), z: 0, port: 2'(port), default: 0};
  endfunction

  initial begin
    int lat[2];
    foreach (itx_hf_push[i]) begin itx_hf_push[i] = 0; itx_data_push[i] = 0; itx_hf_din[i] = '0; itx_data_din[i] = '0; end
    foreach (irx_hf_pop[i]) begin irx_hf_pop[i] = 0; irx_data_pop[i] = 0; end
    foreach (etx_hf_pop[i]) begin etx_hf_pop[i] = 0; etx_data_pop[i] = 0; end
    foreach (erx_hf_push[i]) begin erx_hf_push[i] = 0; erx_data_push[i] = 0; erx_hf_din[i] = '0; erx_data_din[i] = '0; end
    my_coord = cd(0, 0, 0);
    lattice = '{x: 2, y: 2, z: 1, default: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. streaming rate: packets queued whole before the header arrives
    measure = 1;
    for (int s = 0; s < 2; s++) begin
      pkt_t p;
      p = make_pkt(cd(0, 0, 1), 16 * (s ? 40 : 2));
      @(negedge clk);
      foreach (p.pay[i]) begin itx_data_push[0] = 1; itx_data_din[0] = p.pay[i]; @(negedge clk); end
      itx_data_push[0] = 0;
      itx_hf_push[0] = 1; itx_hf_din[0] = p.h; @(negedge clk);
      itx_hf_din[0] = p.f; @(negedge clk); itx_hf_push[0] = 0;
      sent++;
      wait (sb.size() == 0);
    end
    measure = 0;
    check(rate_checked == 2, "rate measured");

    // 2. mixed traffic from both intra-tile ports and both links, both VCs
    fork
      for (int n = 0; n < 40; n++) host_send(0, make_pkt(cd($urandom_range(0, 1), $urandom_range(0, 1), $urandom_range(0, 1)), $urandom_range(0, 200)));
      for (int n = 0; n < 40; n++) host_send(1, make_pkt(cd($urandom_range(0, 1), $urandom_range(0, 1), $urandom_range(0, 1)), $urandom_range(0, 200)));
      for (int n = 0; n < 20; n++) begin
        link_send(0, n % 2, make_pkt(cd(0, 0, $urandom_range(0, 1)), $urandom_range(0, 64)));
        wait (occ[n % 2] < 8);
      end
      for (int n = 0; n < 20; n++) begin
        link_send(1, n % 2, make_pkt(cd(0, $urandom_range(0, 1), $urandom_range(0, 1)), $urandom_range(0, 64)));
        wait (occ[2 + n % 2] < 8);
      end
    join
    wait (sb.size() == 0);

    // 3. virtual cut-through: intra RX 0 is not read; packets of 48 words
    //    to it wait until the 64-entry payload FIFO has room for a whole one
    hold_rx0 = 1;
    fork
      host_send(0, make_pkt(cd(0, 0, 0), 48 * 16));
      host_send(1, make_pkt(cd(0, 0, 0), 48 * 16));
    join
    repeat (200) @(negedge clk);
    check(dut.g_irx[0].u_port.data_free == 64 - 48, "only one whole packet admitted");
    hold_rx0 = 0;
    wait (sb.size() == 0);

    // 4. fixed priority: input 1 first
    arb_fixed = 1; arb_prio_first = 3'd1;
    fork
      for (int n = 0; n < 10; n++) host_send(0, make_pkt(cd(1, 0, 0), 64));
      for (int n = 0; n < 10; n++) host_send(1, make_pkt(cd(1, 0, 0), 64));
    join
    wait (sb.size() == 0);

    check(delivered == sent, $sformatf("all %0d packets delivered (%0d)", sent, delivered));
    check(contention > 0, "contention seen");
    check(vct_wait > 0, "grant held back for lack of room");
    $display("contention=%0d vct_wait=%0d delivered=%0d", contention, vct_wait, delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rate check: once a packet's header leaves a gate, a fully queued packet
  // leaves one word per cycle: count cycles from header to footer at gate 0
  int hdr_t0 = -1, rate_checked = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_word[0].valid && dut.g_word[0].hf && dut.g_hf_pop[0] && dut.g_gate[0].u_gate.req) hdr_t0 = 0;
    else if (hdr_t0 >= 0) hdr_t0++;
    if (dut.g_done[0] && hdr_t0 >= 0) begin
      if (measure) begin
        check(hdr_t0 == int'(dut.g_gate[0].u_gate.req_words) + 1,
              $sformatf("one word per cycle: %0d cycles for %0d words", hdr_t0, dut.g_gate[0].u_gate.req_words));
        rate_checked++;
      end
      hdr_t0 = -1;
    end
  end
endmodule
