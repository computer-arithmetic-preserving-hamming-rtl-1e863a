// hdp_xor: Hamming-distance-preserving bitwise XOR (and NOT).
//
// Because the Hamming parity bits are themselves XORs of data bits, the XOR of
// two codewords is the codeword of the XOR of their data. The block is
// therefore DW + PW independent 2-input XOR gates (seven for the (7,4) code),
// one per code bit, parity bits included. No gate feeds another, so an error
// in one operand bit or one faulty gate changes exactly one result bit, in the
// same position, and the result stays correctable. The bitwise NOT is this
// block with y_i tied to all ones, which is a codeword of every full Hamming
// code; for a shortened code see hdp_alu.
//
// The same holds for every linear code, so the block also serves the BCH
// lane of the ALU, with CW set to the BCH word width.
//
// Interface: x_i, y_i are codewords, z_o = x_i ^ y_i.
// Timing: purely combinational.
//
// Follows the paper's XOR block gate for gate.
module hdp_xor
  import hdp_pkg::*;
#(
  parameter int unsigned DW = DW_DEFAULT,
  parameter int unsigned CW = DW + hp_par_w(DW)   // word width; set directly for other codes
) (
  input  logic [CW-1:0] x_i,
  input  logic [CW-1:0] y_i,
  output logic [CW-1:0] z_o
);

  for (genvar i = 0; i < CW; i++) begin : g_bit
    assign z_o[i] = x_i[i] ^ y_i[i];
  end

endmodule
