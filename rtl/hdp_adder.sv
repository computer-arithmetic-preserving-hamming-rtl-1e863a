// hdp_adder: Hamming-distance-preserving adder / subtractor (4 bits by
// default).
//
// A carry spreads one wrong input bit over several sum bits, so unlike the
// bitwise blocks no result bit may come from raw operand bits. Every one of
// the DW + PW result bits is made by a branch of its own:
//   * Data branch i: two Hamming correctors clean x_i and y_i, a DW-bit
//     adder / subtractor adds them, and sum bit i becomes d_z^i.
//   * Parity branch j: two correctors, an adder / subtractor, and an XOR of
//     the sum bits that hj covers.
// Nothing is shared between branches, so one wrong operand bit is removed in
// every branch and one faulty gate reaches only the result bit of its branch.
//
// Interface: x_i, y_i codewords; sub_i = 0 adds, 1 subtracts (modulo 2^DW);
// z_o the result codeword. Timing: purely combinational.
//
// Follows the paper's adder figure (correctors and a full adder in every
// branch). The subtract mode is this design's choice of building block, which
// the paper names as an option; sub_i itself is not protected.
module hdp_adder
  import hdp_pkg::*;
#(
  parameter int unsigned DW = DW_DEFAULT,
  localparam int unsigned PW = hp_par_w(DW),
  localparam int unsigned CW = DW + PW
) (
  input  logic [CW-1:0] x_i,
  input  logic [CW-1:0] y_i,
  input  logic          sub_i,
  output logic [CW-1:0] z_o
);

  // ---- data branches ----
  for (genvar i = 0; i < DW; i++) begin : g_data
    logic [CW-1:0] cx, cy;
    logic [DW-1:0] dx, dy, s;

    hamming_corrector #(.DW(DW)) u_cx (.cw_i(x_i), .cw_o(cx), .syndrome_o());
    hamming_corrector #(.DW(DW)) u_cy (.cw_i(y_i), .cw_o(cy), .syndrome_o());
    for (genvar b = 0; b < DW; b++) begin : g_d
      assign dx[b] = cx[hp_data_pos(b)];
      assign dy[b] = cy[hp_data_pos(b)];
    end
    add_sub #(.DW(DW)) u_fa (.a_i(dx), .b_i(dy), .sub_i(sub_i), .s_o(s));

    assign z_o[hp_data_pos(i)] = s[i];
  end

  // ---- parity branches ----
  for (genvar j = 0; j < PW; j++) begin : g_par
    localparam int unsigned NC = hp_cover_cnt(DW, j);
    logic [CW-1:0] cx, cy;
    logic [DW-1:0] dx, dy, s;
    logic [NC-1:0] sel;

    hamming_corrector #(.DW(DW)) u_cx (.cw_i(x_i), .cw_o(cx), .syndrome_o());
    hamming_corrector #(.DW(DW)) u_cy (.cw_i(y_i), .cw_o(cy), .syndrome_o());
    for (genvar b = 0; b < DW; b++) begin : g_d
      assign dx[b] = cx[hp_data_pos(b)];
      assign dy[b] = cy[hp_data_pos(b)];
    end
    add_sub #(.DW(DW)) u_fa (.a_i(dx), .b_i(dy), .sub_i(sub_i), .s_o(s));

    for (genvar k = 0; k < NC; k++) begin : g_sel
      assign sel[k] = s[hp_cover_idx(DW, j, k)];
    end

    hamming_parity_xor #(.N(NC)) u_xor (.d_i(sel), .p_o(z_o[hp_par_pos(j)]));
  end

endmodule
