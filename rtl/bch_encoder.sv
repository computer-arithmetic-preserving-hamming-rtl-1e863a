// bch_encoder: systematic encoder of the BCH(15,7) code (bch_pkg).
//
// p(x) = d(x) x^8 mod g(x), computed as the XOR of the constants
// x^(8+k) mod g(x) over the data bits d_k that are set: an AND-XOR network.
//
// Interface: d_i 7 data bits, p_o 8 parity bits. Timing: combinational.
//
// Follows the "BCH encoder" box of the paper's multi-error NAND block; the
// code itself is this design's choice.
module bch_encoder
  import bch_pkg::*;
(
  input  bch_data_t d_i,
  output bch_syn_t  p_o
);

  always_comb begin
    p_o = '0;
    for (int unsigned k = 0; k < BCH_K; k++) begin
      if (d_i[k]) p_o ^= syn_col(BCH_R + k);
    end
  end

endmodule
