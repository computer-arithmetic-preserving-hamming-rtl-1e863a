// bch_corrector: two-error corrector of the BCH(15,7) code (bch_pkg).
//
// The syndrome s = r(x) mod g(x) is formed as an XOR network over the input
// bits. Because the code has minimum distance 5, every error pattern of
// weight 0, 1 or 2 has its own syndrome, so bit i is in error exactly when s
// equals the syndrome of bit i alone or of bit i together with some other bit
// j. The output flips those bits. Patterns of weight 3 or more are not
// corrected.
//
// Interface: cw_i received word, cw_o corrected codeword, syndrome_o the
// syndrome (0 = no error). Timing: purely combinational.
//
// The paper names a "BCH error corrector" and its purpose; the decoder
// structure (a direct syndrome match rather than an algebraic decoder) is
// this design's choice, the simplest that does the job for a short code.
module bch_corrector
  import bch_pkg::*;
(
  input  bch_cw_t  cw_i,
  output bch_cw_t  cw_o,
  output bch_syn_t syndrome_o
);

  bch_syn_t s;
  bch_cw_t  e;

  always_comb begin
    s = '0;
    for (int unsigned i = 0; i < BCH_N; i++) begin
      if (cw_i[i]) s ^= syn_col(i);
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < BCH_N; i++) begin
      e[i] = (s == syn_col(i));
      for (int unsigned j = 0; j < BCH_N; j++) begin
        if (j != i && s == (syn_col(i) ^ syn_col(j))) e[i] = 1'b1;
      end
    end
  end

  assign cw_o       = cw_i ^ e;
  assign syndrome_o = s;

endmodule
