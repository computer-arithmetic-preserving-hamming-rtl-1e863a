// hdp_alu: Hamming-distance-preserving ALU on Hamming-coded operands
// (4 data bits in a (7,4) codeword by default).
//
// Both operands arrive as codewords, possibly carrying an error. Every
// operation is computed by a block whose result is again a codeword, and in
// which one error in the operands or one faulty gate reaches at most one
// result bit:
//   XOR              hdp_xor      independent XOR gates, one per code bit
//   NOT x            hdp_xor      x XOR the codeword of all-ones data
//                                 (all ones for the (7,4) code; y is ignored)
//   AND/OR/NAND/NOR  hdp_logic    raw-bit data gates + corrected parity branches
//   ADD/SUB          hdp_adder    a corrector + adder branch per result bit
// A bit-sliced multiplexer picks the block selected by op_i; each output bit
// of the multiplexer depends on one bit of each block, so it keeps the
// one-fault-one-bit property. z_o is this protected (still coded) result. A
// single Hamming corrector at the very end gives the corrected result zc_o,
// its data q_o and the syndrome; only this last corrector is unprotected.
//
// A second, multi-error lane does the same on BCH(15,7) codewords, which
// tolerate two errors: XOR and NOT (hdp_xor at the BCH width), AND/OR/NAND/NOR
// (bch_logic), ADD/SUB (bch_adder), a multiplexer on the same op_i and a
// final BCH corrector. It has its own operand and result ports.
//
// Interface: x_i, y_i codewords, op_i operation (hdp_pkg::alu_op_e); outputs
// as above. DW sets the data width. Timing: purely combinational, no clock.
//
// The per-operation blocks and the single final corrector are the paper's;
// the operation encoding, the multiplexer and the output set are this
// design's choices. op_i is not protected: the paper's op-code protection is
// not specified in enough detail to build.
module hdp_alu
  import hdp_pkg::*;
  import bch_pkg::*;
#(
  parameter int unsigned DW = DW_DEFAULT,
  localparam int unsigned PW = hp_par_w(DW),
  localparam int unsigned CW = DW + PW
) (
  input  logic [CW-1:0] x_i,
  input  logic [CW-1:0] y_i,
  input  alu_op_e       op_i,
  output logic [CW-1:0] z_o,          // protected result codeword
  output logic [CW-1:0] zc_o,         // after the final corrector
  output logic [DW-1:0] q_o,          // data bits of zc_o
  output logic [PW-1:0] syndrome_o,   // position of the corrected bit, 0 if none
  // multi-error lane (BCH(15,7))
  input  bch_cw_t       bx_i,
  input  bch_cw_t       by_i,
  output bch_cw_t       bz_o,         // protected result codeword
  output bch_cw_t       bzc_o,        // after the final BCH corrector
  output bch_data_t     bq_o,         // data bits of bzc_o
  output bch_syn_t      bsyndrome_o   // syndrome seen by the final BCH corrector
);

  // codeword of the all-ones data word: the NOT mask
  function automatic logic [CW-1:0] ones_codeword();
    logic [CW-1:0] c;
    c = '0;
    for (int unsigned i = 0; i < DW; i++) c[hp_data_pos(i)] = 1'b1;
    for (int unsigned b = 0; b < PW; b++) c[hp_par_pos(b)] = hp_cover_cnt(DW, b) % 2 == 1;
    return c;
  endfunction

  localparam logic [CW-1:0] NOT_MASK = ones_codeword();

  logic [CW-1:0] z_xor, z_not, z_and, z_or, z_nand, z_nor, z_add;

  hdp_xor #(.DW(DW)) u_xor (.x_i(x_i), .y_i(y_i),      .z_o(z_xor));
  hdp_xor #(.DW(DW)) u_not (.x_i(x_i), .y_i(NOT_MASK), .z_o(z_not));

  hdp_logic #(.OP(LOGIC_AND),  .DW(DW)) u_and  (.x_i(x_i), .y_i(y_i), .z_o(z_and));
  hdp_logic #(.OP(LOGIC_OR),   .DW(DW)) u_or   (.x_i(x_i), .y_i(y_i), .z_o(z_or));
  hdp_logic #(.OP(LOGIC_NAND), .DW(DW)) u_nand (.x_i(x_i), .y_i(y_i), .z_o(z_nand));
  hdp_logic #(.OP(LOGIC_NOR),  .DW(DW)) u_nor  (.x_i(x_i), .y_i(y_i), .z_o(z_nor));

  hdp_adder #(.DW(DW)) u_add (.x_i(x_i), .y_i(y_i), .sub_i(op_i == OP_SUB), .z_o(z_add));

  always_comb begin
    unique case (op_i)
      OP_XOR:  z_o = z_xor;
      OP_NOT:  z_o = z_not;
      OP_AND:  z_o = z_and;
      OP_OR:   z_o = z_or;
      OP_NAND: z_o = z_nand;
      OP_NOR:  z_o = z_nor;
      default: z_o = z_add;   // OP_ADD, OP_SUB
    endcase
  end

  hamming_corrector #(.DW(DW)) u_final (.cw_i(z_o), .cw_o(zc_o), .syndrome_o(syndrome_o));

  for (genvar i = 0; i < DW; i++) begin : g_q
    assign q_o[i] = zc_o[hp_data_pos(i)];
  end

  // ---- multi-error lane ----

  // BCH codeword of the all-ones data word: the NOT mask of the lane
  function automatic bch_cw_t bch_ones_codeword();
    bch_syn_t par;
    par = '0;
    for (int unsigned k = 0; k < BCH_K; k++) par ^= syn_col(BCH_R + k);
    return {{BCH_K{1'b1}}, par};
  endfunction

  localparam bch_cw_t BCH_NOT_MASK = bch_ones_codeword();

  bch_cw_t b_xor, b_not, b_and, b_or, b_nand, b_nor, b_add;

  hdp_xor #(.CW(BCH_N)) u_bxor (.x_i(bx_i), .y_i(by_i),         .z_o(b_xor));
  hdp_xor #(.CW(BCH_N)) u_bnot (.x_i(bx_i), .y_i(BCH_NOT_MASK), .z_o(b_not));

  bch_logic #(.OP(LOGIC_AND))  u_band  (.x_i(bx_i), .y_i(by_i), .z_o(b_and));
  bch_logic #(.OP(LOGIC_OR))   u_bor   (.x_i(bx_i), .y_i(by_i), .z_o(b_or));
  bch_logic #(.OP(LOGIC_NAND)) u_bnand (.x_i(bx_i), .y_i(by_i), .z_o(b_nand));
  bch_logic #(.OP(LOGIC_NOR))  u_bnor  (.x_i(bx_i), .y_i(by_i), .z_o(b_nor));

  bch_adder u_badd (.x_i(bx_i), .y_i(by_i), .sub_i(op_i == OP_SUB), .z_o(b_add));

  always_comb begin
    unique case (op_i)
      OP_XOR:  bz_o = b_xor;
      OP_NOT:  bz_o = b_not;
      OP_AND:  bz_o = b_and;
      OP_OR:   bz_o = b_or;
      OP_NAND: bz_o = b_nand;
      OP_NOR:  bz_o = b_nor;
      default: bz_o = b_add;   // OP_ADD, OP_SUB
    endcase
  end

  bch_corrector u_bfinal (.cw_i(bz_o), .cw_o(bzc_o), .syndrome_o(bsyndrome_o));

  assign bq_o = bzc_o[BCH_N-1:BCH_R];

endmodule
