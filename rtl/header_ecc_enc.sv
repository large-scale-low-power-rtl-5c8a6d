// header_ecc_enc: computes the EDAC field of an EXApacket header.
//
// The header is the routing-critical part of a packet, so it travels over
// the link protected by an error-correcting code. This design uses an
// extended Hamming (SECDED) code over the 112 header bits that lie outside
// the 16-bit EDAC field: seven Hamming check bits plus one overall parity
// bit, placed in EDAC[7:0]; EDAC[15:8] is zero. The paper names an ECC but
// not the code, so the code choice is this design's own.
// Purely combinational: hdr_out is hdr_in with the EDAC field replaced.
module header_ecc_enc
  import exanet_pkg::*;
(
  input  hdr_t hdr_in,
  output hdr_t hdr_out
);
  logic [111:0] d;
  logic [6:0]   p;

  always_comb begin
    d = ecc_data(hdr_in);
    p = ecc_check_bits(d);
    hdr_out = hdr_in;
    hdr_out.edac = {8'h00, (^d) ^ (^p), p};
  end
endmodule
