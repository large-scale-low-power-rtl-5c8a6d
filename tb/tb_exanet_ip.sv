// tb_exanet_ip: end-to-end test of four ExaNet IP nodes wired as the
// 2 x 2 prototype, every node at its default sizes. Node n sits at
// x = n % 2, y = n / 2; link 0 (X) of each node is cabled to link 0 of its
// X neighbour and link 1 (Y) to link 1 of its Y neighbour. The cables are a
// behavioural stand-in for the transceivers: a few cycles of delay, random
// back-pressure on transmit, and optional bit flips. Software is played by
// tasks that program each Target Controller over AXI4-Lite and push/pop
// words of the intra-tile ports. A last phase runs the built-in self-test:
// a traffic generator loops 8 x 4096 B through the router into a consumer
// (the cycle count must be within 40 cycles of one payload word per clock,
// 8 x 258), then sends 4 packets over a link to the neighbour's consumer.
//
// Every packet carries a unique tag; a scoreboard checks that it reaches
// the intra-tile port named in its destination, intact. The test makes each
// mechanism happen and counts it, failing if one never happened:
// local loop, one hop, two hops (cut-through forwarding in the middle
// node), both virtual channels, contention for an output, an output grant
// held back for lack of room for a whole packet, link transmission
// suspended by exhausted credit (TRED raised), fixed-priority arbitration,
// a header bit error corrected by ECC, a payload error caught by CRC, and a
// health byte carried to the neighbour in credit words.
module tb_exanet_ip;
  import exanet_pkg::*;
  localparam int NN = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #3.2 clk = ~clk;  // 156.25 MHz

  logic [7:0]  awaddr[NN], araddr[NN];
  logic        awvalid[NN], awready[NN], wvalid[NN], wready[NN], bvalid[NN], bready[NN];
  logic        arvalid[NN], arready[NN], rvalid[NN], rready[NN];
  logic [31:0] wdata[NN], rdata[NN];
  logic [1:0]  bresp[NN], rresp[NN];
  logic        itx_hf_push[NN][2], itx_hf_full[NN][2], itx_data_push[NN][2], itx_data_full[NN][2];
  logic [127:0] itx_hf_din[NN][2], itx_data_din[NN][2];
  logic        irx_hf_pop[NN][2], irx_hf_empty[NN][2], irx_data_pop[NN][2], irx_data_empty[NN][2];
  logic [127:0] irx_hf_dout[NN][2], irx_data_dout[NN][2];
  logic [63:0] tx_tdata[NN][2], rx_tdata[NN][2];
  logic        tx_tvalid[NN][2], tx_tctrl[NN][2], tx_tready[NN][2];
  logic        rx_tvalid[NN][2], rx_tctrl[NN][2];

  for (genvar n = 0; n < NN; n++) begin : g_node
    exanet_ip u_ip (
      .clk, .rst_n,
      .s_awaddr(awaddr[n]), .s_awvalid(awvalid[n]), .s_awready(awready[n]),
      .s_wdata(wdata[n]), .s_wvalid(wvalid[n]), .s_wready(wready[n]),
      .s_bresp(bresp[n]), .s_bvalid(bvalid[n]), .s_bready(bready[n]),
      .s_araddr(araddr[n]), .s_arvalid(arvalid[n]), .s_arready(arready[n]),
      .s_rdata(rdata[n]), .s_rresp(rresp[n]), .s_rvalid(rvalid[n]), .s_rready(rready[n]),
      .itx_hf_push(itx_hf_push[n]), .itx_hf_din(itx_hf_din[n]), .itx_hf_full(itx_hf_full[n]),
      .itx_data_push(itx_data_push[n]), .itx_data_din(itx_data_din[n]),
      .itx_data_full(itx_data_full[n]),
      .irx_hf_pop(irx_hf_pop[n]), .irx_hf_dout(irx_hf_dout[n]), .irx_hf_empty(irx_hf_empty[n]),
      .irx_data_pop(irx_data_pop[n]), .irx_data_dout(irx_data_dout[n]),
      .irx_data_empty(irx_data_empty[n]),
      .tx_tdata(tx_tdata[n]), .tx_tvalid(tx_tvalid[n]), .tx_tctrl(tx_tctrl[n]),
      .tx_tready(tx_tready[n]),
      .rx_tdata(rx_tdata[n]), .rx_tvalid(rx_tvalid[n]), .rx_tctrl(rx_tctrl[n]));
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10 || what.substr(0,6) != "payloa") $display("FAIL: %s @%0t", what, $time); end
  endtask

  function automatic int neighbour(input int n, input int k);
    return k == 0 ? (n ^ 1) : (n ^ 2);
  endfunction

  // ---------------- cables (transceiver stand-in) ----------------
  localparam int DELAY = 4;
  logic [65:0] pipe[NN][2][DELAY];
  bit stall_links = 1;
  int flip_hdr = 0, flip_pay = 0;  // armed single faults on node 0, link 0
  int wcount[NN][2];
  always @(posedge clk) begin
    for (int n = 0; n < NN; n++) for (int k = 0; k < 2; k++) begin
      logic [65:0] w;
      w = {tx_tvalid[n][k] && tx_tready[n][k], tx_tctrl[n][k], tx_tdata[n][k]};
      if (w[65] && !w[64]) begin
        if (tx_tdata[n][k] == LINK_MAGIC) wcount[n][k] = 0; else wcount[n][k]++;
        if (n == 0 && k == 0 && flip_hdr == 1 && wcount[n][k] == 2) begin w[9] = ~w[9]; flip_hdr = 2; end
        if (n == 0 && k == 0 && flip_pay == 1 && wcount[n][k] == 4) begin w[3] = ~w[3]; flip_pay = 2; end
      end
      for (int d = DELAY - 1; d > 0; d--) pipe[n][k][d] <= pipe[n][k][d-1];
      pipe[n][k][0] <= w;
      tx_tready[n][k] <= !stall_links || ($urandom_range(0, 9) != 0);
    end
  end
  always_comb
    for (int n = 0; n < NN; n++) for (int k = 0; k < 2; k++) begin
      rx_tvalid[n][k] = pipe[neighbour(n, k)][k][DELAY-1][65];
      rx_tctrl[n][k]  = pipe[neighbour(n, k)][k][DELAY-1][64];
      rx_tdata[n][k]  = pipe[neighbour(n, k)][k][DELAY-1][63:0];
    end

  // ---------------- AXI4-Lite software model ----------------
  task automatic axi_write(input int n, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awvalid[n] = 1; awaddr[n] = a; wvalid[n] = 1; wdata[n] = d;
    #0.1;
    while (!(awready[n] && wready[n])) @(negedge clk);
    @(negedge clk); awvalid[n] = 0; wvalid[n] = 0;
    while (!bvalid[n]) @(negedge clk);
    bready[n] = 1; @(negedge clk); bready[n] = 0;
  endtask

  task automatic axi_read(input int n, input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid[n] = 1; araddr[n] = a;
    #0.1;
    while (!arready[n]) @(negedge clk);
    @(negedge clk); arvalid[n] = 0;
    while (!rvalid[n]) @(negedge clk);
    d = rdata[n];
    rready[n] = 1; @(negedge clk); rready[n] = 0;
  endtask

  // ---------------- packets and scoreboard ----------------
  typedef struct {
    int node, port, src, hops;
    bit corrupt;
    hdr_t h;
    ftr_t f;
    logic [127:0] pay[$];
  } pkt_t;
  pkt_t sb[int];
  int next_tag = 1, sent = 0, delivered = 0;
  int n_local = 0, n_1hop = 0, n_2hop = 0, n_vc0 = 0, n_vc1 = 0;
  bit hold_rx[NN][2];
  bit next_corrupt = 0;

  function automatic pkt_t make_pkt(input int src, input int dst, input int port, input int size);
    pkt_t p;
    p.node = dst; p.port = port; p.src = src;
    p.hops = ((src ^ dst) & 1) + (((src ^ dst) >> 1) & 1);
    p.corrupt = next_corrupt;
    p.h = hdr_t'({$urandom, $urandom, $urandom, $urandom});
    p.h.size = 14'(size);
    p.h.dest = '{x: 4'(dst % 2), y: 4'(dst / 2), z: 0, port: 2'(port), default: 0};
    p.h.dest_addr = 40'(next_tag);
    p.h.vc = 5'd0;
    p.f = ftr_t'({$urandom, $urandom, $urandom, $urandom});
    p.f.src = '{x: 4'(src % 2), y: 4'(src / 2), z: 0, port: 0, default: 0};
    for (int i = 0; i < (size + 15) / 16; i++) p.pay.push_back({$urandom, $urandom, $urandom, $urandom});
    sb[next_tag] = p;
    next_tag++;
    return p;
  endfunction

  task automatic host_send(input int n, input int port, input pkt_t p);
    @(negedge clk);
    #0.1;
    while (itx_hf_full[n][port]) @(negedge clk);
    itx_hf_push[n][port] = 1; itx_hf_din[n][port] = p.h;
    @(negedge clk); itx_hf_push[n][port] = 0;
    foreach (p.pay[i]) begin
      #0.1;
      while (itx_data_full[n][port]) @(negedge clk);
      itx_data_push[n][port] = 1; itx_data_din[n][port] = p.pay[i];
      @(negedge clk); itx_data_push[n][port] = 0;
    end
    #0.1;
    while (itx_hf_full[n][port]) @(negedge clk);
    itx_hf_push[n][port] = 1; itx_hf_din[n][port] = p.f;
    @(negedge clk); itx_hf_push[n][port] = 0;
    sent++;
  endtask

  task automatic send_burst(input int ss, input int pp);
    for (int r = 0; r < 12; r++)
      host_send(ss, pp, make_pkt(ss, (ss + r) % NN, r % 2, $urandom_range(1, 600)));
  endtask

  task automatic got(input int n, input int port, input hdr_t h, input logic [127:0] pay[$], input ftr_t f);
    int tag;
    pkt_t e;
    tag = int'(h.dest_addr);
    if (!sb.exists(tag)) begin check(0, "unknown packet"); return; end
    e = sb[tag];
    check(e.node == n && e.port == port, $sformatf("tag %0d at node %0d port %0d", tag, n, port));
    check(h.size == e.h.size && h.dest == e.h.dest && h.ptype == e.h.ptype && h.proto == e.h.proto,
          "header fields");
    check(f[95:0] == e.f[95:0], "footer fields");
    if (f[95:0] != e.f[95:0] && failures < 12) $display("  tag %0d src %0d dst %0d port %0d size %0d got %0d words, exp %0d", tag, e.src, e.node, e.port, e.h.size, pay.size(), e.pay.size());
    check(pay.size() == e.pay.size(), "payload length");
    if (!e.corrupt) foreach (pay[i]) if (i < e.pay.size()) check(pay[i] == e.pay[i], "payload word");
    if (e.hops == 0) n_local++; else if (e.hops == 1) n_1hop++; else n_2hop++;
    if (e.hops > 0) begin if (h.vc[0]) n_vc1++; else n_vc0++; end
    sb.delete(tag);
    delivered++;
  endtask

  for (genvar n = 0; n < NN; n++) begin : g_rd
    for (genvar o = 0; o < 2; o++) begin : g_port
      initial begin
        irx_hf_pop[n][o] = 0; irx_data_pop[n][o] = 0;
        forever begin
          hdr_t h; ftr_t f;
          logic [127:0] pay[$];
          @(negedge clk);
          if (hold_rx[n][o] || irx_hf_empty[n][o]) continue;
          h = irx_hf_dout[n][o];
          irx_hf_pop[n][o] = 1; @(negedge clk); irx_hf_pop[n][o] = 0;
          pay = {};
          for (int i = 0; i < (int'(h.size) + 15) / 16; i++) begin
            #0.1;
            while (irx_data_empty[n][o]) @(negedge clk);
            pay.push_back(irx_data_dout[n][o]);
            irx_data_pop[n][o] = 1; @(negedge clk); irx_data_pop[n][o] = 0;
          end
          #0.1;
          while (irx_hf_empty[n][o]) @(negedge clk);
          f = irx_hf_dout[n][o];
          irx_hf_pop[n][o] = 1; @(negedge clk); irx_hf_pop[n][o] = 0;
          got(n, o, h, pay, f);
        end
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int contention = 0, vct_wait = 0, susp = 0, fixed_grants = 0, st_cycles = 0;
  for (genvar n = 0; n < NN; n++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      for (int j = 0; j < 4; j++) begin
        if ($countones(g_node[n].u_ip.u_router.a_req[j]) > 1 && !g_node[n].u_ip.u_router.a_busy[j]) begin
          contention++;
          if (g_node[n].u_ip.u_router.arb_fixed) fixed_grants++;
        end
      end
      for (int i = 0; i < 6; i++)
        if (g_node[n].u_ip.u_router.g_req[i]
            && !g_node[n].u_ip.u_router.a_busy[g_node[n].u_ip.u_router.g_port[i]]
            && !g_node[n].u_ip.u_router.a_req[g_node[n].u_ip.u_router.g_port[i]][i]) vct_wait++;
      if (g_node[n].u_ip.g_link[0].u_tcl.suspended || g_node[n].u_ip.g_link[1].u_tcl.suspended) susp++;
    end
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog: sent=%0d delivered=%0d", sent, delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drain();
    int t;
    t = 0;
    while (sb.size() != 0 && t < 1000000) begin @(negedge clk); t++; end
    check(sb.size() == 0, $sformatf("%0d packets outstanding", sb.size()));
  endtask

  initial begin
    logic [31:0] d;
    for (int n = 0; n < NN; n++) begin
      awvalid[n] = 0; wvalid[n] = 0; bready[n] = 0; arvalid[n] = 0; rready[n] = 0;
      awaddr[n] = 0; araddr[n] = 0; wdata[n] = 0;
      for (int k = 0; k < 2; k++) begin
        itx_hf_push[n][k] = 0; itx_data_push[n][k] = 0; itx_hf_din[n][k] = 0; itx_data_din[n][k] = 0;
        hold_rx[n][k] = 0; wcount[n][k] = 0;
        for (int d2 = 0; d2 < DELAY; d2++) pipe[n][k][d2] = '0;
      end
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    // configure coordinates; lattice 2x2x1 and order Z, Y, X are the reset values
    for (int n = 0; n < NN; n++) begin
      axi_write(n, 8'h00, {28'd0, 4'(n / 2), 4'(n % 2)} );
      axi_read(n, 8'h00, d);
      check(d == {24'd0, 4'(n / 2), 4'(n % 2)}, "coordinates programmed");
    end

    // 1. every source to every destination and port, random byte-aligned sizes
    fork
      send_burst(0, 0); send_burst(0, 1); send_burst(1, 0); send_burst(1, 1);
      send_burst(2, 0); send_burst(2, 1); send_burst(3, 0); send_burst(3, 1);
    join
    drain();

    // 2. contention + cut-through: both ports of nodes 0 and 3 to node 1 and 2
    fork
      for (int r = 0; r < 8; r++) host_send(0, 0, make_pkt(0, 3, 0, 512));
      for (int r = 0; r < 8; r++) host_send(0, 1, make_pkt(0, 3, 1, 512));
      for (int r = 0; r < 8; r++) host_send(3, 0, make_pkt(3, 0, 0, 512));
      for (int r = 0; r < 8; r++) host_send(3, 1, make_pkt(3, 0, 1, 512));
    join
    drain();

    // 3. credit exhaustion: TRED close to the receive FIFO depth on node 1
    axi_write(1, 8'h14, 32'd1022);
    fork
      for (int r = 0; r < 6; r++) host_send(1, 0, make_pkt(1, 0, 0, 4096));
    join
    drain();
    axi_write(1, 8'h14, 32'd0);

    // 4. virtual cut-through hold: node 2 port 1 stops reading; 4096-byte
    //    packets fill its 4096-word payload FIFO
    hold_rx[2][1] = 1;
    fork
      for (int r = 0; r < 18; r++) host_send(2, 0, make_pkt(2, 2, 1, 4096));
    join_none
    repeat (6000) @(negedge clk);
    hold_rx[2][1] = 0;
    wait fork;
    drain();

    // 5. fixed-priority arbitration on node 0, input 1 first
    axi_write(0, 8'h10, 32'h0000_0101);
    fork
      for (int r = 0; r < 6; r++) host_send(0, 0, make_pkt(0, 0, 1, 64));
      for (int r = 0; r < 6; r++) host_send(0, 1, make_pkt(0, 0, 1, 64));
    join
    drain();
    axi_write(0, 8'h10, 32'h0);

    // 6. link faults on node 0's X cable: one header bit, then one payload bit
    stall_links = 0;
    flip_hdr = 1;
    host_send(0, 0, make_pkt(0, 1, 0, 64));
    drain();
    next_corrupt = 1;
    flip_pay = 1;
    host_send(0, 0, make_pkt(0, 1, 0, 64));
    drain();
    next_corrupt = 0;
    axi_read(1, 8'h48, d);  // link 0 {ecc corrected, uncorrectable}
    check(d == {16'd1, 16'd0}, $sformatf("ECC counters on node 1: %h", d));
    axi_read(1, 8'h4C, d);  // link 0 {crc errors, framing errors}
    check(d == {16'd1, 16'd0}, $sformatf("CRC counters on node 1: %h", d));

    // 6b. self-test: node 0's traffic generator sends 8 packets of 4096 B
    //     to its own intra-tile port 0, drained by its consumer; the
    //     performance counter must show one payload word per clock
    hold_rx[0][0] = 1;
    axi_write(0, 8'h24, 32'h0);
    axi_write(0, 8'h20, 32'h0003_1000);
    axi_write(0, 8'h1C, {16'd8, 14'd0, 2'b11});
    repeat (2600) @(negedge clk);
    axi_read(0, 8'h64, d);
    check(d == {16'd8, 16'd8}, $sformatf("self-test packets consumed/sent %h", d));
    axi_read(0, 8'h60, d);
    st_cycles = int'(d);
    check(st_cycles >= 8 * 258 && st_cycles <= 8 * 258 + 40, $sformatf("self-test took %0d cycles", st_cycles));
    axi_read(0, 8'h68, d);
    check(d == 32'(8 * 256), "self-test payload words consumed");
    axi_read(0, 8'h6C, d);
    check(d[0] == 1'b0, "self-test timer stopped");
    //     then 4 packets of 512 B over the X link to node 1's consumer
    hold_rx[1][0] = 1;
    axi_write(1, 8'h1C, 32'h2);
    axi_write(0, 8'h24, 32'h1);
    axi_write(0, 8'h20, 32'h0000_0200);
    axi_write(0, 8'h1C, {16'd4, 14'd0, 2'b01});
    repeat (600) @(negedge clk);
    axi_read(1, 8'h64, d);
    check(d[31:16] == 16'd4, $sformatf("self-test packets at node 1: %0d", d[31:16]));
    axi_read(0, 8'h64, d);
    check(d[15:0] == 16'd4, "self-test packets sent by node 0");
    axi_write(1, 8'h1C, 32'h0);
    hold_rx[0][0] = 0; hold_rx[1][0] = 0;

    // 7. health byte of node 0 reaches nodes 1 (X) and 2 (Y)
    axi_write(0, 8'h18, 32'h0000_00E5);
    host_send(1, 0, make_pkt(1, 0, 0, 16));
    host_send(2, 0, make_pkt(2, 0, 0, 16));
    drain();
    repeat (50) @(negedge clk);
    axi_read(1, 8'h5C, d);
    check(d[7:0] == 8'hE5, "health at X neighbour");
    axi_read(2, 8'h5C, d);
    check(d[15:8] == 8'hE5, "health at Y neighbour");

    // 8. packet counters agree
    for (int n = 0; n < NN; n++) begin
      axi_read(n, 8'h40, d);
      check(d[3:0] == 4'hF, "intra-tile RX FIFOs empty at the end");
    end

    check(delivered == sent, $sformatf("sent %0d delivered %0d", sent, delivered));
    $display("local=%0d 1hop=%0d 2hop=%0d vc0=%0d vc1=%0d contention=%0d fixed=%0d vct_wait=%0d susp=%0d selftest_cycles=%0d",
             n_local, n_1hop, n_2hop, n_vc0, n_vc1, contention, fixed_grants, vct_wait, susp, st_cycles);
    check(n_local > 0, "local loop happened");
    check(n_1hop > 0, "one-hop delivery happened");
    check(n_2hop > 0, "two-hop delivery happened");
    check(n_vc0 > 0 && n_vc1 > 0, "both virtual channels used");
    check(contention > 0, "output contention happened");
    check(fixed_grants > 0, "fixed-priority arbitration happened");
    check(vct_wait > 0, "grant held back for lack of room happened");
    check(susp > 0, "link suspension happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
