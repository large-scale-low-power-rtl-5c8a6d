// tb_switch_gate: self-checking test of switch_gate fed by a switch_port.
// Packets to the local node and to X+/Y+ neighbours are queued; the test
// grants the request after a random delay and checks the requested output,
// the payload word count, the word order header/payload/footer on the
// crossbar side, the virtual-channel field written into headers that leave
// on an inter-tile port, and that a fully buffered packet of n payload words
// takes exactly n + 2 cycles from grant to done. Payload that arrives late
// must stall the gate without losing words.
module tb_switch_gate;
  import exanet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic hf_push = 0, data_push = 0;
  logic [127:0] hf_din = '0, data_din = '0;
  logic [127:0] hf_dout, data_dout;
  logic hf_empty, data_empty, hf_pop, data_pop, hf_full, data_full;
  logic [7:0] hf_free;
  logic [10:0] data_free;
  coord_t my_coord, lattice;
  logic req, granted = 0, done;
  logic [1:0] req_port;
  logic [12:0] req_words;
  xword_t out_word;

  switch_port #(.HF_DEPTH(128), .DATA_DEPTH(1024)) u_port (
    .clk, .rst_n, .hf_push, .hf_din, .hf_pop, .hf_dout, .hf_empty, .hf_full, .hf_free,
    .data_push, .data_din, .data_pop, .data_dout, .data_empty, .data_full, .data_free);
  switch_gate #(.N_INTRA(2), .N_INTER(2)) dut (
    .clk, .rst_n, .hf_dout, .hf_empty, .hf_pop, .data_dout, .data_empty, .data_pop,
    .my_coord, .lattice, .dim_order(6'b00_01_10), .dim_en(3'b111),
    .req, .req_port, .req_words, .granted, .out_word, .done);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int stalls = 0;
    my_coord = '{x: 1, y: 0, z: 0, default: 0};
    lattice  = '{x: 2, y: 2, z: 1, default: 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      hdr_t h; ftr_t f;
      logic [127:0] pay[$];
      int size, n, exp_port, exp_vc, late, t0;
      size = $urandom_range(0, 300);
      n = (size + 15) / 16;
      h = hdr_t'({$urandom, $urandom, $urandom, $urandom});
      h.size = 14'(size);
      h.dest = '{x: 1'($urandom), y: 1'($urandom), z: 0, port: 1'($urandom), default: 0};
      f = ftr_t'({$urandom, $urandom, $urandom, $urandom});
      // Z first (size 1, skipped), then Y, then X
      if (h.dest.y != my_coord.y) begin exp_port = 3; exp_vc = h.dest.y > my_coord.y; end
      else if (h.dest.x != my_coord.x) begin exp_port = 2; exp_vc = h.dest.x > my_coord.x; end
      else begin exp_port = h.dest.port; exp_vc = -1; end
      late = (n > 2) && ($urandom_range(0, 2) == 0);
      for (int i = 0; i < n; i++) pay.push_back({$urandom, $urandom, $urandom, $urandom});
      @(negedge clk); hf_push = 1; hf_din = h;
      if (!late) for (int i = 0; i < n; i++) begin
        @(negedge clk); hf_push = 0; data_push = 1; data_din = pay[i];
      end
      @(negedge clk); hf_push = 1; data_push = 0; hf_din = f;
      @(negedge clk); hf_push = 0;
      // wait for request
      while (!req) @(negedge clk);
      check(req_port == 2'(exp_port), $sformatf("requested port %0d exp %0d", req_port, exp_port));
      check(req_words == 13'(n), "payload words");
      repeat ($urandom_range(0, 3)) @(negedge clk);
      granted = 1;
      t0 = $time;
      #1;
      begin
        hdr_t ho;
        ho = hdr_t'(out_word.data);
        check(out_word.valid && out_word.hf, "header first");
        if (exp_vc >= 0) check(ho.vc == 5'(exp_vc), "VC rewritten");
        else check(ho.vc == h.vc, "VC kept on local delivery");
        check(ho.dest == h.dest && ho.size == h.size, "header fields kept");
      end
      @(negedge clk);
      if (late) fork
        begin
          repeat (3) @(negedge clk);
          for (int i = 0; i < n; i++) begin data_push = 1; data_din = pay[i]; @(negedge clk); end
          data_push = 0;
        end
      join_none
      for (int i = 0; i < n; i++) begin
        int w;
        w = 0;
        while (!out_word.valid) begin @(negedge clk); w++; end
        if (w > 0) stalls++;
        check(!out_word.hf && out_word.data == pay[i], "payload word");
        @(negedge clk);
      end
      while (!out_word.valid) @(negedge clk);
      check(out_word.hf && out_word.data == f && done, "footer and done");
      if (!late) check(($time - t0) / 10 == n + 1, $sformatf("%0d-word packet cycles %0d", n, ($time - t0) / 10 + 1));
      @(negedge clk);
      granted = 0;
      check(!done, "done is one pulse");
    end
    check(stalls > 0, "late payload stalled the gate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
