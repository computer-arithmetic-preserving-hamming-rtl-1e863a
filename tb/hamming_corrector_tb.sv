// hamming_corrector_tb: exhaustive test of the (7,4) Hamming corrector.
//
// For each of the 16 codewords and each of the 8 cases "no error" and "bit p
// flipped" (p = 1..7) the corrected word must be the original codeword and the
// syndrome must be p (0 without error). Expected values come from the
// brute-force reference in tb_ref_pkg.
module hamming_corrector_tb;
  import hdp_pkg::*;
  import tb_ref_pkg::*;

  logic [6:0] cw_i, cw_o;
  logic [2:0] syn;
  int   checks = 0, failures = 0;

  hamming_corrector dut (.cw_i(cw_i), .cw_o(cw_o), .syndrome_o(syn));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 16; d++) begin
      for (int p = 0; p <= 7; p++) begin
        logic [6:0] c;
        c = 7'(ref_enc(4, 64'(4'(d))));
        cw_i = (p == 0) ? c : c ^ (7'd1 << (p - 1));
        #1;
        checks++;
        if (cw_o !== c || syn !== 3'(p)) begin
          failures++;
          $display("FAIL d=%0d flip=%0d in=%b out=%b syn=%0d", d, p, cw_i, cw_o, syn);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
