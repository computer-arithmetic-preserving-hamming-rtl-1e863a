// bch_logic: two-error-tolerant bitwise NAND (and AND, OR, NOR) on BCH(15,7)
// codewords.
//
// Same principle as the Hamming block hdp_logic, carried over to a code that
// corrects two errors:
//   * Data part: seven 2-input gates on the raw data bits of x_i, y_i.
//   * Parity part: one branch per parity bit p_j (eight branches). Each branch
//     corrects both operands with its own pair of BCH correctors, applies the
//     bitwise gate to the corrected data, runs a BCH encoder and keeps parity
//     bit j.
// Up to two errors in total, in the operands or in gates, reach at most two
// bits of z_o, which the code still corrects.
//
// Interface: x_i, y_i BCH codewords (data in [14:8], parity in [7:0]); z_o the
// codeword of the bitwise OP of their data. OP defaults to NAND.
// Timing: purely combinational.
//
// Follows the paper's multi-error NAND figure. As in the Hamming NAND block
// its figure labels the branch gate "BW-AND"; the operation of the text is
// used. The figure shows four data bits and three parity outputs only as an
// illustration; the widths here are those of the BCH(15,7) code chosen. The
// AND/OR/NOR variants are this design's application of the paper's remark
// that every operation carries BCH correctors in the same way.
module bch_logic
  import hdp_pkg::*;
  import bch_pkg::*;
#(
  parameter logic_op_e OP = LOGIC_NAND
) (
  input  bch_cw_t x_i,
  input  bch_cw_t y_i,
  output bch_cw_t z_o
);

  // ---- data part ----
  for (genvar i = 0; i < BCH_K; i++) begin : g_data
    assign z_o[BCH_R+i] = logic_gate(OP, x_i[BCH_R+i], y_i[BCH_R+i]);
  end

  // ---- parity part: one branch per parity bit ----
  for (genvar j = 0; j < BCH_R; j++) begin : g_par
    bch_cw_t   cx, cy;
    bch_data_t w;
    bch_syn_t  p;

    bch_corrector u_cx (.cw_i(x_i), .cw_o(cx), .syndrome_o());
    bch_corrector u_cy (.cw_i(y_i), .cw_o(cy), .syndrome_o());

    for (genvar i = 0; i < BCH_K; i++) begin : g_bw
      assign w[i] = logic_gate(OP, cx[BCH_R+i], cy[BCH_R+i]);
    end

    bch_encoder u_enc (.d_i(w), .p_o(p));

    assign z_o[j] = p[j];
  end

endmodule
