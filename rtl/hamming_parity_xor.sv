// hamming_parity_xor: the parity generator of one Hamming parity bit.
//
// In the NAND block and the adder every parity bit hj of the result is made by
// its own branch, which ends in an XOR of the result data bits that the code
// assigns to hj (hdp_pkg::hp_covers). This module is that XOR. For the (7,4)
// code each parity bit covers three data bits, so N defaults to 3.
//
// Interface: d_i holds the N covered data bits, p_o is their parity.
// Timing: purely combinational.
//
// Follows the paper's figures, which print the three data bits entering each
// XOR box.
module hamming_parity_xor #(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0] d_i,
  output logic         p_o
);

  assign p_o = ^d_i;

endmodule
