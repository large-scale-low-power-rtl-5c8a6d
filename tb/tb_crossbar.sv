// tb_crossbar: self-checking test of crossbar: random words on all inputs,
// random selections; each output must carry the selected input's word, or
// an invalid word when unselected.
module tb_crossbar;
  import exanet_pkg::*;
  localparam int NI = 6, NO = 4;
  int checks = 0, failures = 0;
  xword_t in_word[NI];
  logic sel_valid[NO];
  logic [2:0] sel[NO];
  xword_t out_word[NO];

  crossbar #(.N_IN(NI), .N_OUT(NO)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      foreach (in_word[i]) in_word[i] = xword_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      foreach (sel[j]) begin sel[j] = 3'($urandom_range(0, NI - 1)); sel_valid[j] = 1'($urandom); end
      #1;
      foreach (out_word[j]) begin
        checks++;
        if (out_word[j] != (sel_valid[j] ? in_word[sel[j]] : xword_t'(0))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
