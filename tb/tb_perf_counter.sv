// tb_perf_counter: self-checking test of perf_counter. For random targets
// and random packet arrival times the stored cycle count must equal the
// number of clock edges after the start edge that saw the packet count
// below the target, and must then hold still.
module tb_perf_counter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [15:0] target = 0, got = 0; logic [31:0] cycles; logic running;

  perf_counter dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 50; r++) begin
      int n;
      n = 0;
      target = 16'($urandom_range(1, 20)); got = 0;
      start = 1; @(negedge clk); start = 0;
      check(running && cycles == 0, "started");
      // packets arrive; count clocks until got reaches target
      while (got < target) begin
        @(negedge clk); n++;
        if ($urandom_range(3) == 0) got = got + 1'b1;
      end
      @(negedge clk);
      check(!running, "stopped at target");
      check(cycles == 32'(n), $sformatf("cycles %0d expected %0d", cycles, n));
      repeat (5) @(negedge clk);
      check(cycles == 32'(n), "count held");
    end
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
