// add_sub: DW-bit two's-complement adder / subtractor, the building block of
// the distance-preserving adder.
//
// s_o = a_i + b_i when sub_i = 0 and a_i - b_i (a_i + ~b_i + 1) when sub_i = 1,
// both modulo 2^DW. It is a ripple of full adders written bit by bit.
//
// Interface: a_i, b_i DW-bit data, sub_i mode, s_o DW-bit result.
// Timing: purely combinational.
//
// The paper's adder figure uses a 4-bit full adder here and mentions a
// two's-complement adder / subtractor as a possible building block; this
// design takes the latter so that one block covers both operations. Carry-in
// and carry-out are left out, as in the figure.
module add_sub #(
  parameter int unsigned DW = 4
) (
  input  logic [DW-1:0] a_i,
  input  logic [DW-1:0] b_i,
  input  logic          sub_i,
  output logic [DW-1:0] s_o
);

  logic [DW-1:0] c;   // carry into each bit (the carry out of the MSB is dropped)
  logic [DW-1:0] bb;

  assign c[0] = sub_i;
  assign bb   = b_i ^ {DW{sub_i}};

  for (genvar i = 0; i < DW; i++) begin : g_fa
    assign s_o[i] = a_i[i] ^ bb[i] ^ c[i];
    if (i + 1 < DW) begin : g_c
      assign c[i+1] = (a_i[i] & bb[i]) | (c[i] & (a_i[i] ^ bb[i]));
    end
  end

endmodule
