// tb_port_arbiter: self-checking test of port_arbiter. A model computes the
// expected winner: in round-robin mode the first requester after the last
// grant, in fixed mode the first requester from prio_first upwards. Grants
// are held until release; the priority register is changed at run time.
module tb_port_arbiter;
  localparam int N = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req = '0;
  logic fixed_mode = 0, release_i = 0, busy;
  logic [2:0] prio_first = '0, grant_idx;

  port_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last = N - 1, exp, hold;
    int wins[N];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t == 1000) fixed_mode = 1;
      if (fixed_mode && t % 100 == 0) prio_first = 3'($urandom_range(0, N - 1));
      req = N'($urandom) | N'(1 << $urandom_range(0, N - 1));
      exp = -1;
      for (int k = 0; k < N; k++) begin
        int i;
        i = ((fixed_mode ? int'(prio_first) : last + 1) + k) % N;
        if (exp < 0 && req[i]) exp = i;
      end
      check(!busy, "idle before request");
      @(negedge clk);
      check(busy && grant_idx == exp, $sformatf("grant %0d expected %0d", grant_idx, exp));
      wins[grant_idx]++;
      req = '0;
      hold = $urandom_range(0, 3);
      repeat (hold) begin @(negedge clk); check(busy && grant_idx == exp, "grant held"); end
      release_i = 1; @(negedge clk); release_i = 0;
      last = exp;
    end
    for (int i = 0; i < N; i++) check(wins[i] > 100, "every input served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
