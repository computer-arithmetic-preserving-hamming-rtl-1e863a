// hdp_pkg: shared types, constants and code functions of the
// Hamming-distance-preserving ALU.
//
// Operands and results travel as single-error-correcting Hamming codewords
// with DW data bits and PW = hp_par_w(DW) parity bits (the smallest PW with
// 2^PW >= DW + PW + 1). Bit i of a codeword holds code position i+1, in the
// order printed for the operands in the paper's figures for DW = 4:
//   X = (h1, h2, d1, h3, d2, d3, d4).
// Parity bit hb+1 sits at position 2^b; data bits fill the remaining positions
// in increasing order. The syndrome of a single flipped bit is its position.
// For DW = 4 the parity equations are
//   h1 = d1 ^ d2 ^ d4,  h2 = d1 ^ d3 ^ d4,  h3 = d2 ^ d3 ^ d4,
// the same data bits the figures route into each parity XOR. For other widths
// the code is the Hamming code shortened to DW + PW bits.
// Design choice (the paper gives no numeric weights): d1 is the least
// significant bit of the value.
package hdp_pkg;

  // ---- code geometry, all evaluated at elaboration ----

  // number of parity bits for dw data bits
  function automatic int unsigned hp_par_w(int unsigned dw);
    int unsigned m;
    m = 0;
    while ((1 << m) < dw + m + 1) m++;
    return m;
  endfunction

  // codeword bit index of data bit i (0-based); data bit i sits below
  // position 2*i + 3, so the loop bound is never reached
  function automatic int unsigned hp_data_pos(int unsigned i);
    int unsigned n;
    n = 0;
    for (int unsigned p = 3; p < 2 * i + 4; p++) begin
      if ((p & (p - 1)) != 0) begin   // not a power of two
        if (n == i) return p - 1;
        n++;
      end
    end
    return 0;
  endfunction

  // codeword bit index of parity bit b (0-based)
  function automatic int unsigned hp_par_pos(int unsigned b);
    return (1 << b) - 1;
  endfunction

  // does parity bit b cover data bit i?
  function automatic bit hp_covers(int unsigned b, int unsigned i);
    int unsigned p;
    p = hp_data_pos(i) + 1;
    return p[b];
  endfunction

  // number of data bits (out of dw) covered by parity bit b
  function automatic int unsigned hp_cover_cnt(int unsigned dw, int unsigned b);
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < dw; i++) if (hp_covers(b, i)) n++;
    return n;
  endfunction

  // k-th data bit (0-based) covered by parity bit b, among dw data bits
  function automatic int unsigned hp_cover_idx(int unsigned dw, int unsigned b, int unsigned k);
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < dw; i++) begin
      if (hp_covers(b, i)) begin
        if (n == k) return i;
        n++;
      end
    end
    return 0;
  endfunction

  // ---- the paper's (7,4) configuration ----
  localparam int unsigned DW_DEFAULT = 4;

  // Bitwise operations built on the principle of the NAND block.
  typedef enum logic [1:0] {
    LOGIC_AND  = 2'd0,
    LOGIC_OR   = 2'd1,
    LOGIC_NAND = 2'd2,
    LOGIC_NOR  = 2'd3
  } logic_op_e;

  // Operation select of the ALU.
  typedef enum logic [2:0] {
    OP_XOR  = 3'd0,
    OP_NOT  = 3'd1,
    OP_AND  = 3'd2,
    OP_OR   = 3'd3,
    OP_NAND = 3'd4,
    OP_NOR  = 3'd5,
    OP_ADD  = 3'd6,
    OP_SUB  = 3'd7
  } alu_op_e;

  // One 2-input gate of the bitwise family.
  function automatic logic logic_gate(logic_op_e op, logic a, logic b);
    unique case (op)
      LOGIC_AND:  return a & b;
      LOGIC_OR:   return a | b;
      LOGIC_NAND: return ~(a & b);
      default:    return ~(a | b);
    endcase
  endfunction

endpackage
