// header_ecc_dec: checks and corrects an EXApacket header received from
// the link.
//
// Recomputes the extended Hamming (SECDED) check bits of header_ecc_enc and
// compares them with EDAC[7:0]. A single flipped bit anywhere in the 120
// protected bits is corrected (corrected=1); two flipped bits are detected
// but not corrected (uncorrectable=1). The EDAC field of hdr_out is passed
// on as received. Purely combinational. The code is this design's choice;
// the paper only states that the header is ECC-protected.
module header_ecc_dec
  import exanet_pkg::*;
(
  input  hdr_t hdr_in,
  output hdr_t hdr_out,
  output logic corrected,
  output logic uncorrectable
);
  logic [111:0] d, dfix;
  logic [6:0]   syn;
  logic         ovr;

  always_comb begin
    d    = ecc_data(hdr_in);
    syn  = ecc_check_bits(d) ^ hdr_in.edac[6:0];
    ovr  = (^d) ^ (^hdr_in.edac[7:0]);
    dfix = d;
    corrected     = 1'b0;
    uncorrectable = 1'b0;
    if (ovr) begin
      corrected = 1'b1;
      // syndrome 0: overall parity bit itself; power of two: a check bit
      if (syn != 7'd0 && (syn & (syn - 7'd1)) != 7'd0) begin
        if (syn < 7'd120) dfix[ecc_pos_to_idx(syn)] = ~d[ecc_pos_to_idx(syn)];
        else uncorrectable = 1'b1;
      end
    end else if (syn != 7'd0) begin
      uncorrectable = 1'b1;
    end
    hdr_out = hdr_t'({hdr_in.edac, dfix});
  end
endmodule
