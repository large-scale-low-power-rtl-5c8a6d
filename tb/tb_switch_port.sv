// tb_switch_port: self-checking test of switch_port. Packets (header,
// payload words, footer) are written and read back; headers/footers must
// come out of the header/footer FIFO and payload words out of the payload
// FIFO in order, with free counts matching the paper's FIFO depths scaled
// down for the test (8 and 32 entries).
module tb_switch_port;
  localparam int HD = 8, DD = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic hf_push = 0, hf_pop = 0, data_push = 0, data_pop = 0;
  logic [127:0] hf_din = '0, data_din = '0, hf_dout, data_dout;
  logic hf_empty, hf_full, data_empty, data_full;
  logic [$clog2(HD):0] hf_free;
  logic [$clog2(DD):0] data_free;
  logic [127:0] mh[$], md[$];

  switch_port #(.HF_DEPTH(HD), .DATA_DEPTH(DD)) dut (.*);
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
    check(hf_free == HD && data_free == DD && hf_empty && data_empty, "reset state");
    for (int p = 0; p < 40; p++) begin
      int n;
      n = $urandom_range(0, 12);
      // write header
      @(negedge clk); hf_push = 1; hf_din = {$urandom, $urandom, $urandom, $urandom}; mh.push_back(hf_din);
      for (int i = 0; i < n; i++) begin
        @(negedge clk); hf_push = 0; data_push = 1; data_din = {$urandom, $urandom, $urandom, $urandom};
        md.push_back(data_din);
      end
      @(negedge clk); data_push = 0; hf_push = 1; hf_din = {$urandom, $urandom, $urandom, $urandom}; mh.push_back(hf_din);
      @(negedge clk); hf_push = 0;
      check(hf_free == HD - mh.size(), "hf free after write");
      check(data_free == DD - md.size(), "data free after write");
      // read the packet back
      check(!hf_empty && hf_dout == mh[0], "header out"); hf_pop = 1; @(negedge clk); hf_pop = 0; void'(mh.pop_front());
      for (int i = 0; i < n; i++) begin
        check(!data_empty && data_dout == md[0], "payload out");
        data_pop = 1; @(negedge clk); data_pop = 0; void'(md.pop_front());
      end
      check(!hf_empty && hf_dout == mh[0], "footer out"); hf_pop = 1; @(negedge clk); hf_pop = 0; void'(mh.pop_front());
      check(hf_empty && data_empty, "empty after packet");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
