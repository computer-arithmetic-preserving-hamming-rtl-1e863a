// hamming_corrector: single-error corrector C(.) of the Hamming code of
// hdp_pkg, for DW data bits (default 4: the (7,4) code).
//
// It is the "Error corrector" box of the distance-preserving blocks and also
// the one final corrector an ALU needs on its result. Syndrome bit b is the
// parity check over the code positions whose index has bit b set; a non-zero
// syndrome is the position of the flipped bit, which is inverted. A syndrome
// that points past the last position (possible only for a shortened code, and
// only with two or more errors) leaves the word unchanged. With two or more
// errors the output is in general a wrong codeword: distance 3 cannot tell.
//
// Interface: cw_i is the received word in the layout of hdp_pkg, cw_o the
// corrected codeword, syndrome_o the error position (0 = no error).
// Timing: purely combinational.
//
// The paper names the corrector and states its function; this decoder is the
// textbook syndrome decoder for the layout shown in its figures.
module hamming_corrector
  import hdp_pkg::*;
#(
  parameter int unsigned DW = DW_DEFAULT,
  localparam int unsigned PW = hp_par_w(DW),
  localparam int unsigned CW = DW + PW
) (
  input  logic [CW-1:0] cw_i,
  output logic [CW-1:0] cw_o,
  output logic [PW-1:0] syndrome_o
);

  logic [PW-1:0] s;

  always_comb begin
    s = '0;
    for (int unsigned p = 1; p <= CW; p++) begin
      for (int unsigned b = 0; b < PW; b++) begin
        if (p[b]) s[b] ^= cw_i[p-1];
      end
    end
  end

  always_comb begin
    for (int unsigned p = 1; p <= CW; p++) begin
      cw_o[p-1] = cw_i[p-1] ^ (s == PW'(p));
    end
  end

  assign syndrome_o = s;

endmodule
