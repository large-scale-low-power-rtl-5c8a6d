// tb_sync_fifo: self-checking test of sync_fifo against a queue model with
// random push/pop traffic, including runs to full and to empty.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [$clog2(D):0] count, free;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int bias;
      bias = (t / 300) % 2 == 0 ? 70 : 30;  // phases that fill, then drain
      @(negedge clk);
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      check(count == model.size() && free == D - model.size(), "count/free");
      if (model.size() > 0) check(dout == model[0], "data order");
      push = !full && ($urandom_range(0, 99) < bias);
      pop  = !empty && ($urandom_range(0, 99) >= bias);
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
