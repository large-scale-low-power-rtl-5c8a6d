// tb_header_ecc: self-checking test of header_ecc_enc and header_ecc_dec.
// Random headers are encoded; the decoder must return them unchanged with
// no flag, repair any single flipped bit of the 120 protected bits
// (112 header bits + EDAC[7:0]) and flag any two flipped bits as
// uncorrectable. Expected values are the original headers.
module tb_header_ecc;
  import exanet_pkg::*;
  int checks = 0, failures = 0;
  hdr_t h, enc, rx, dec;
  logic corr, unc;

  header_ecc_enc u_enc (.hdr_in(h), .hdr_out(enc));
  header_ecc_dec u_dec (.hdr_in(rx), .hdr_out(dec), .corrected(corr), .uncorrectable(unc));

  // bit positions of the header that are protected: 0..111 and 112..119
  function automatic int prot_bit(input int n);
    return n;  // EDAC[7:0] sits at 112..119, so protected bits are 0..119
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      h = hdr_t'({$urandom, $urandom, $urandom, $urandom});
      #1;
      check(enc.edac[15:8] == 8'h00, "EDAC high byte zero");
      check(enc[111:0] == h[111:0], "encoder keeps header bits");
      // clean
      rx = enc; #1;
      check(!corr && !unc && dec == enc, "clean header passes");
      // single error
      begin
        int b;
        b = prot_bit($urandom_range(0, 119));
        rx = enc; rx[b] = ~rx[b]; #1;
        check(corr && !unc, $sformatf("single error at %0d flagged corrected", b));
        check(dec[111:0] == enc[111:0], $sformatf("single error at %0d repaired", b));
      end
      // double error
      begin
        int b1, b2;
        b1 = $urandom_range(0, 119);
        do b2 = $urandom_range(0, 119); while (b2 == b1);
        rx = enc; rx[b1] = ~rx[b1]; rx[b2] = ~rx[b2]; #1;
        check(unc, $sformatf("double error %0d,%0d detected", b1, b2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
