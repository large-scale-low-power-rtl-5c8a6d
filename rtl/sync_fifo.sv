// sync_fifo: single-clock first-word-fall-through FIFO.
//
// The storage is a plain array (a block RAM on an FPGA). dout shows the
// oldest word whenever empty is low; pop removes it. count and free give the
// fill level so that a writer can reserve room for a whole packet before it
// starts (virtual cut-through). Pushing when full or popping when empty is a
// protocol error, checked by assertions. Reset empties the FIFO.
module sync_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  logic [WIDTH-1:0]       din,
  input  logic                   pop,
  output logic [WIDTH-1:0]       dout,
  output logic                   empty,
  output logic                   full,
  output logic [$clog2(DEPTH):0] count,
  output logic [$clog2(DEPTH):0] free
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      cnt;

  always_ff @(posedge clk) begin
    if (push && !full) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (push && !full) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop && !empty) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      cnt <= cnt + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  assign dout  = mem[rptr];
  assign empty = (cnt == '0);
  assign full  = (cnt == (AW+1)'(DEPTH));
  assign count = cnt;
  assign free  = (AW+1)'(DEPTH) - cnt;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
