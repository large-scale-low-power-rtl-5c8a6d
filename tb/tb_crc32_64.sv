// tb_crc32_64: self-checking test of crc32_64. The reference is a
// byte-at-a-time CRC-32 written here (reflected polynomial 0xEDB88320),
// plus the published check value of the ASCII string "12345678"
// (0x9AE0DAAF). The CRC must be ready one cycle after the last word.
module tb_crc32_64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [63:0] data = '0;
  logic [31:0] crc;

  crc32_64 dut (.clk, .rst_n, .clear, .en, .data, .crc);
  always #5 clk = ~clk;

  function automatic logic [31:0] ref_crc(input logic [63:0] w[$]);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    foreach (w[i]) for (int by = 0; by < 8; by++) begin
      c = c ^ {24'h0, w[i][8*by +: 8]};
      for (int k = 0; k < 8; k++) c = c[0] ? (c >> 1) ^ 32'hEDB8_8320 : c >> 1;
    end
    return ~c;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] q[$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    // "12345678" : bytes 0x31..0x38, first byte in bits 7:0
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    en = 1; data = 64'h3837_3635_3433_3231; @(negedge clk); en = 0;
    check(crc == 32'h9AE0_DAAF, $sformatf("check value %h", crc));
    for (int t = 0; t < 50; t++) begin
      int n;
      n = $urandom_range(1, 40);
      q = {};
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < n; i++) begin
        q.push_back({$urandom, $urandom});
        en = 1; data = q[$]; @(negedge clk);
        en = ($urandom_range(0, 3) == 0) ? 0 : 1;
        if (!en) @(negedge clk);
        en = 0;
      end
      check(crc == ref_crc(q), $sformatf("random block %0d words", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
