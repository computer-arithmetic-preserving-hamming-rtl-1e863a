// bch_pkg: code constants of the multi-error (BCH) variant of the NAND block.
//
// The code is the binary BCH(15,7) code, minimum distance 5, which corrects
// any two bit errors in a 15-bit word. Its generator polynomial is
//   g(x) = x^8 + x^7 + x^6 + x^4 + 1 = (x^4 + x + 1)(x^4 + x^3 + x^2 + x + 1).
// Codewords are systematic, data first as in X = (D, P):
//   bits [14:8] = data d0..d6, bits [7:0] = parity p(x) = d(x) x^8 mod g(x).
// The syndrome of a received word r is r(x) mod g(x); it is the XOR of the
// column constants syn_col(i) = x^i mod g(x) over the bits that are set, so
// encoder and syndrome are both AND-XOR networks built from these constants.
// The choice of this particular code is this design's: the paper leaves the
// BCH code open.
package bch_pkg;

  localparam int unsigned BCH_N = 15;         // code length n
  localparam int unsigned BCH_K = 7;          // data bits k
  localparam int unsigned BCH_R = BCH_N - BCH_K;  // parity bits n-k
  localparam int unsigned BCH_T = 2;          // correctable errors t
  localparam logic [BCH_R:0] BCH_G = 9'h1D1;  // g(x), bit i = coefficient of x^i

  typedef logic [BCH_N-1:0] bch_cw_t;
  typedef logic [BCH_K-1:0] bch_data_t;
  typedef logic [BCH_R-1:0] bch_syn_t;

  // x^i mod g(x)
  function automatic bch_syn_t syn_col(int unsigned i);
    logic [BCH_R:0] rem;
    rem = '0;
    rem[0] = 1'b1;
    for (int unsigned k = 0; k < i; k++) begin
      rem = rem << 1;
      if (rem[BCH_R]) rem = rem ^ BCH_G;
    end
    return rem[BCH_R-1:0];
  endfunction

endpackage
