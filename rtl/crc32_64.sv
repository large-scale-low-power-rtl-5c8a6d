// crc32_64: CRC-32 accumulator for the payload, 64 bits per clock.
//
// The paper protects the payload with "a CRC32 code" without naming the
// variant; this design uses the common reflected CRC-32 (polynomial
// 0x04C11DB7, initial value 0xFFFFFFFF, final inversion), with the bytes of
// each 64-bit word taken least significant byte first. clear restarts the
// accumulation; each cycle with en folds in data. crc is the finished value
// (already inverted) of everything folded in so far, valid the cycle after
// the last en.
module crc32_64 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        en,
  input  logic [63:0] data,
  output logic [31:0] crc
);
  logic [31:0] state, nxt;

  always_comb begin
    nxt = state;
    for (int b = 0; b < 64; b++) begin
      nxt = (nxt[0] ^ data[b]) ? ((nxt >> 1) ^ 32'hEDB8_8320) : (nxt >> 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= 32'hFFFF_FFFF;
    else if (clear) state <= 32'hFFFF_FFFF;
    else if (en)    state <= nxt;
  end

  assign crc = ~state;
endmodule
