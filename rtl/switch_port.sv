// switch_port: one direction of an APErouter switch port.
//
// Every port direction holds two FIFOs: a header/footer FIFO (128 x 128 bit
// in the paper) and a payload FIFO (4096 x 128 bit on intra-tile ports,
// 1024 x 128 bit on inter-tile ports). The packet order header, payload,
// footer is kept by the writer and reader (switch gate, link logic or
// host); the port only stores. Both FIFOs are first-word-fall-through and
// report their fill level for the virtual cut-through space check.
module switch_port #(
  parameter int unsigned HF_DEPTH   = 128,
  parameter int unsigned DATA_DEPTH = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        hf_push,
  input  logic [127:0]                hf_din,
  input  logic                        hf_pop,
  output logic [127:0]                hf_dout,
  output logic                        hf_empty,
  output logic                        hf_full,
  output logic [$clog2(HF_DEPTH):0]   hf_free,
  input  logic                        data_push,
  input  logic [127:0]                data_din,
  input  logic                        data_pop,
  output logic [127:0]                data_dout,
  output logic                        data_empty,
  output logic                        data_full,
  output logic [$clog2(DATA_DEPTH):0] data_free
);
  logic [$clog2(HF_DEPTH):0]   hf_count;
  logic [$clog2(DATA_DEPTH):0] data_count;

  sync_fifo #(.WIDTH(128), .DEPTH(HF_DEPTH)) u_hf (
    .clk, .rst_n, .push(hf_push), .din(hf_din), .pop(hf_pop), .dout(hf_dout),
    .empty(hf_empty), .full(hf_full), .count(hf_count), .free(hf_free));

  sync_fifo #(.WIDTH(128), .DEPTH(DATA_DEPTH)) u_data (
    .clk, .rst_n, .push(data_push), .din(data_din), .pop(data_pop), .dout(data_dout),
    .empty(data_empty), .full(data_full), .count(data_count), .free(data_free));
endmodule
