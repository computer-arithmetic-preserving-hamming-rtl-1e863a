// tb_ref_pkg: reference model used by the testbenches.
//
// It re-derives the Hamming code from its definition instead of reusing the
// design's equations: data bits fill the code positions that are not powers
// of two, in increasing order, and the parity bit at position 2^b is chosen
// so that the XOR over all positions with bit b set is zero. Words are held
// in 64-bit containers so one set of functions serves every data width.
// Decoding searches the word and its single-bit neighbours for a codeword.
// The BCH(15,7) reference encodes by polynomial long division, g(x) = 0x1D1.
package tb_ref_pkg;

  typedef logic [63:0] word_t;

  function automatic int ref_par_w(int dw);
    int m;
    m = 0;
    while ((1 << m) < dw + m + 1) m++;
    return m;
  endfunction

  function automatic word_t ref_enc(int dw, word_t d);
    word_t c;
    int n, p, cw;
    cw = dw + ref_par_w(dw);
    c = '0;
    n = 0;
    for (p = 1; p <= cw; p++)
      if ((p & (p - 1)) != 0) begin c[p-1] = d[n]; n++; end
    for (int b = 0; (1 << b) <= cw; b++) begin
      logic par;
      par = 1'b0;
      for (p = 1; p <= cw; p++)
        if (p[b] && p != (1 << b)) par ^= c[p-1];
      c[(1 << b) - 1] = par;
    end
    return c;
  endfunction

  function automatic word_t ref_data(int dw, word_t c);
    word_t d;
    int n;
    d = '0;
    n = 0;
    for (int p = 1; p <= dw + ref_par_w(dw); p++)
      if ((p & (p - 1)) != 0) begin d[n] = c[p-1]; n++; end
    return d;
  endfunction

  function automatic bit ref_is_cw(int dw, word_t c);
    return c == ref_enc(dw, ref_data(dw, c));
  endfunction

  // data of the codeword at distance <= 1 (the word's own data if none)
  function automatic word_t ref_dec(int dw, word_t c);
    if (ref_is_cw(dw, c)) return ref_data(dw, c);
    for (int i = 0; i < dw + ref_par_w(dw); i++) begin
      word_t t;
      t = c;
      t[i] = ~t[i];
      if (ref_is_cw(dw, t)) return ref_data(dw, t);
    end
    return ref_data(dw, c);
  endfunction

  function automatic int ref_dist(word_t a, word_t b);
    return $countones(a ^ b);
  endfunction

  // BCH(15,7): data in [14:8], parity in [7:0] = d(x) x^8 mod g(x)
  function automatic logic [14:0] ref_bch_enc(logic [6:0] d);
    logic [14:0] r;
    r = {d, 8'h00};
    for (int i = 14; i >= 8; i--)
      if (r[i]) r = r ^ (15'(9'h1D1) << (i - 8));
    return {d, r[7:0]};
  endfunction

endpackage
