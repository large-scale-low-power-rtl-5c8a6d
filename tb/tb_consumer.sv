// tb_consumer: self-checking test of consumer. A model FIFO pair is filled
// with random packets (header, payload, footer) at random times; with the
// consumer enabled both FIFOs must drain, one word per clock each, and the
// packet and word counts must match what was written. While disabled the
// consumer must not pop at all; clear must zero the counters.
module tb_consumer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 0, clear = 0, hf_pop, data_pop;
  logic [15:0] pkts; logic [31:0] words;
  int hf_cnt = 0, d_cnt = 0;
  logic hf_empty, data_empty;
  assign hf_empty = (hf_cnt == 0);
  assign data_empty = (d_cnt == 0);

  consumer dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s @%0t", what, $time); end
  endtask

  int add_hf = 0, add_d = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      check(!hf_pop || (enable && !hf_empty), "header pop only when enabled and not empty");
      check(!data_pop || (enable && !data_empty), "payload pop only when enabled and not empty");
      check(hf_pop == (enable && !hf_empty), "header FIFO drained every clock");
    end
    hf_cnt <= hf_cnt - int'(hf_pop) + add_hf;
    d_cnt  <= d_cnt - int'(data_pop) + add_d;
  end

  initial begin
    int np, nw;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      enable = round[0]; np = 0; nw = 0;
      clear = 1; @(negedge clk); clear = 0;
      for (int p = 0; p < 40; p++) begin
        int w;
        w = $urandom_range(20);
        add_hf = 2; add_d = w; np++; nw += w;
        @(negedge clk);
        add_hf = 0; add_d = 0;
        repeat ($urandom_range(3)) @(negedge clk);
      end
      enable = 1;
      repeat (1000) @(negedge clk);
      check(hf_cnt == 0 && d_cnt == 0, "FIFOs flushed");
      check(pkts == 16'(np), $sformatf("packets %0d expected %0d", pkts, np));
      check(words == 32'(nw), $sformatf("words %0d expected %0d", words, nw));
    end
    clear = 1; @(negedge clk); clear = 0; @(negedge clk);
    check(pkts == 0 && words == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
