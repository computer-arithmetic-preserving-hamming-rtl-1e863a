// bch_adder: two-error-tolerant 7-bit adder / subtractor on BCH(15,7)
// codewords.
//
// The structure of the Hamming adder (hdp_adder) with the BCH code of bch_pkg:
// every one of the 15 result bits has a branch of its own.
//   * Data branch i (7 of them): two BCH correctors, a 7-bit adder /
//     subtractor (add_sub), and sum bit i becomes data bit i of z_o.
//   * Parity branch j (8 of them): two BCH correctors, an adder /
//     subtractor, and a BCH encoder of which parity bit j is kept.
// Up to two operand errors are removed in every branch, and a fault inside a
// branch reaches only that branch's bit, so up to two faults in total leave
// z_o correctable.
//
// Interface: x_i, y_i BCH codewords; sub_i = 0 adds, 1 subtracts (mod 128);
// z_o the result codeword. Timing: purely combinational.
//
// The paper states that every operation of the multi-error variant carries BCH
// correctors and computes its parity bits with a BCH circuit, but draws only
// the NAND block; this adder applies its Hamming adder structure to the BCH
// code. sub_i is not protected.
module bch_adder
  import bch_pkg::*;
(
  input  bch_cw_t x_i,
  input  bch_cw_t y_i,
  input  logic    sub_i,
  output bch_cw_t z_o
);

  // ---- data branches ----
  for (genvar i = 0; i < BCH_K; i++) begin : g_data
    bch_cw_t   cx, cy;
    bch_data_t s;

    bch_corrector u_cx (.cw_i(x_i), .cw_o(cx), .syndrome_o());
    bch_corrector u_cy (.cw_i(y_i), .cw_o(cy), .syndrome_o());
    add_sub #(.DW(BCH_K)) u_fa (
      .a_i(cx[BCH_N-1:BCH_R]), .b_i(cy[BCH_N-1:BCH_R]), .sub_i(sub_i), .s_o(s));

    assign z_o[BCH_R+i] = s[i];
  end

  // ---- parity branches ----
  for (genvar j = 0; j < BCH_R; j++) begin : g_par
    bch_cw_t   cx, cy;
    bch_data_t s;
    bch_syn_t  p;

    bch_corrector u_cx (.cw_i(x_i), .cw_o(cx), .syndrome_o());
    bch_corrector u_cy (.cw_i(y_i), .cw_o(cy), .syndrome_o());
    add_sub #(.DW(BCH_K)) u_fa (
      .a_i(cx[BCH_N-1:BCH_R]), .b_i(cy[BCH_N-1:BCH_R]), .sub_i(sub_i), .s_o(s));
    bch_encoder u_enc (.d_i(s), .p_o(p));

    assign z_o[j] = p[j];
  end

endmodule
