// hdp_logic: Hamming-distance-preserving bitwise NAND (and AND, OR, NOR).
//
// A bitwise gate does not commute with the parity equations, so the parity
// bits of the result cannot come from the operands' parity bits. The block
// splits into two parts that share no logic:
//   * Data part: DW 2-input gates compute d_z from the raw data bits of x_i
//     and y_i, one gate per bit.
//   * Parity part: one branch per parity bit hj. Each branch corrects both
//     operands with its own pair of Hamming correctors, applies the DW-bit
//     bitwise gate to the corrected data, and XORs the result bits that hj
//     covers.
// A single error, in one operand bit or in any one gate, therefore reaches at
// most one bit of z_o: a data error hits one d_z bit (the parity branches work
// on corrected copies), and a fault inside a branch hits only its own hj.
//
// Interface: x_i, y_i are codewords, z_o the codeword of OP applied bitwise
// to their data. Parameter OP selects NAND (default), AND, OR or NOR; DW is the
// data width (default 4, the (7,4) code). Timing: purely combinational.
//
// Follows the paper's NAND block. Its figure labels the gate inside each
// parity branch "BW-AND", while the text says every branch uses the same 4-bit
// NAND building block; the text is followed, since AND-then-XOR would give the
// complement of the NAND parity. The AND/OR/NOR variants reuse the structure,
// as the paper states they share its principle. Each branch keeps its full
// DW-bit gate, as drawn; the paper notes a branch needs only the bits it
// covers, and synthesis removes the rest.
module hdp_logic
  import hdp_pkg::*;
#(
  parameter logic_op_e   OP = LOGIC_NAND,
  parameter int unsigned DW = DW_DEFAULT,
  localparam int unsigned PW = hp_par_w(DW),
  localparam int unsigned CW = DW + PW
) (
  input  logic [CW-1:0] x_i,
  input  logic [CW-1:0] y_i,
  output logic [CW-1:0] z_o
);

  // ---- data part: raw operand bits, one gate each ----
  for (genvar i = 0; i < DW; i++) begin : g_data
    localparam int unsigned P = hp_data_pos(i);
    assign z_o[P] = logic_gate(OP, x_i[P], y_i[P]);
  end

  // ---- parity part: one independent branch per parity bit ----
  for (genvar j = 0; j < PW; j++) begin : g_par
    localparam int unsigned NC = hp_cover_cnt(DW, j);
    logic [CW-1:0] cx, cy;   // corrected operands, private to this branch
    logic [DW-1:0] w;        // bitwise gate output of this branch
    logic [NC-1:0] sel;      // the bits of w that hj covers

    hamming_corrector #(.DW(DW)) u_cx (.cw_i(x_i), .cw_o(cx), .syndrome_o());
    hamming_corrector #(.DW(DW)) u_cy (.cw_i(y_i), .cw_o(cy), .syndrome_o());

    for (genvar i = 0; i < DW; i++) begin : g_bw
      assign w[i] = logic_gate(OP, cx[hp_data_pos(i)], cy[hp_data_pos(i)]);
    end

    for (genvar k = 0; k < NC; k++) begin : g_sel
      assign sel[k] = w[hp_cover_idx(DW, j, k)];
    end

    hamming_parity_xor #(.N(NC)) u_xor (.d_i(sel), .p_o(z_o[hp_par_pos(j)]));
  end

endmodule
