// hdp_alu_tb: end-to-end test of the distance-preserving ALU.
//
// Every operation is run on every pair of 4-bit values, with clean operands
// and with each of the 14 single-bit operand errors. For each case:
//   * the protected result z_o lies within one bit of the codeword of the
//     right result (exactly on it when the operands are clean),
//   * the final corrector returns exactly that codeword and its data q_o,
//   * the reported syndrome is non-zero exactly when z_o had to be corrected.
// The multi-error lane is then driven with every operation on random
// BCH(15,7) operands carrying two errors; its final corrector must return the
// exact result codeword. Mechanisms counted, each of which must occur: every
// operation, an operand error absorbed inside a block (z_o clean although an
// operand was not), a correction by the final corrector, and a two-error case
// and a final correction in the BCH lane. The top is instantiated with its
// default parameters, i.e. at the (7,4) size.
module hdp_alu_tb;
  import hdp_pkg::*;
  import bch_pkg::*;
  import tb_ref_pkg::*;

  logic [6:0] x, y, z, zc;
  alu_op_e op;
  logic [3:0] q;
  logic [2:0] syn;
  bch_cw_t   bx, by, bz, bzc;
  bch_data_t bq;
  bch_syn_t  bsyn;

  int checks = 0, failures = 0;
  int op_count [8];
  int absorbed = 0, final_corrections = 0, bch_two_err = 0, bch_corrections = 0;

  hdp_alu dut (
    .x_i(x), .y_i(y), .op_i(op),
    .z_o(z), .zc_o(zc), .q_o(q), .syndrome_o(syn),
    .bx_i(bx), .by_i(by), .bz_o(bz), .bzc_o(bzc), .bq_o(bq), .bsyndrome_o(bsyn)
  );

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [3:0] ref_op(alu_op_e o, logic [3:0] a, logic [3:0] b);
    unique case (o)
      OP_XOR:  return a ^ b;
      OP_NOT:  return ~a;
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      OP_NAND: return ~(a & b);
      OP_NOR:  return ~(a | b);
      OP_ADD:  return a + b;
      default: return a - b;
    endcase
  endfunction

  function automatic logic [6:0] ref_op7(alu_op_e o, logic [6:0] a, logic [6:0] b);
    unique case (o)
      OP_XOR:  return a ^ b;
      OP_NOT:  return ~a;
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      OP_NAND: return ~(a & b);
      OP_NOR:  return ~(a | b);
      OP_ADD:  return a + b;
      default: return a - b;
    endcase
  endfunction

  initial begin
    foreach (op_count[i]) op_count[i] = 0;
    bx = '0; by = '0;
    for (int o = 0; o < 8; o++) begin
      op = alu_op_e'(o);
      for (int a = 0; a < 16; a++) begin
        for (int b = 0; b < 16; b++) begin
          logic [3:0] exp;
          logic [6:0] e;
          exp = ref_op(op, 4'(a), 4'(b));
          e   = 7'(ref_enc(4, 64'(exp)));
          for (int f = 0; f <= 14; f++) begin
            int dz;
            x = 7'(ref_enc(4, 64'(4'(a))));
            y = 7'(ref_enc(4, 64'(4'(b))));
            if (f >= 1 && f <= 7) x[f-1] = ~x[f-1];
            if (f >= 8) y[f-8] = ~y[f-8];
            #1;
            dz = ref_dist(64'(z), 64'(e));
            checks++;
            if (dz > (f == 0 ? 0 : 1) || zc !== e || q !== exp || (syn != 0) != (dz != 0)) begin
              failures++;
              $display("FAIL op=%s x=%b y=%b z=%b zc=%b q=%h syn=%0d expected %b",
                       op.name(), x, y, z, zc, q, syn, e);
            end
            op_count[o]++;
            if (f != 0 && dz == 0 && !(op == OP_NOT && f >= 8)) absorbed++;
            if (syn != 0) final_corrections++;
          end
        end
      end
    end

    // multi-error lane: every operation with two operand errors
    for (int t = 0; t < 1600; t++) begin
      logic [6:0] da, db, exp7;
      logic [14:0] e;
      int p1, p2;
      op = alu_op_e'(t % 8);
      da = 7'($urandom);
      db = 7'($urandom);
      exp7 = ref_op7(op, da, db);
      e  = ref_bch_enc(exp7);
      bx = ref_bch_enc(da);
      by = ref_bch_enc(db);
      p1 = int'($urandom_range(0, 14));
      p2 = int'($urandom_range(0, 13));
      if (p2 >= p1) p2++;
      if (t % 16 < 8) begin bx[p1] = ~bx[p1]; bx[p2] = ~bx[p2]; end
      else            begin bx[p1] = ~bx[p1]; by[p2] = ~by[p2]; end
      #1;
      checks++;
      if (ref_dist(64'(bz), 64'(e)) > 2 || bzc !== e || bq !== exp7) begin
        failures++;
        $display("FAIL bch lane op=%s bx=%h by=%h bz=%h bzc=%h expected %h",
                 op.name(), bx, by, bz, bzc, e);
      end
      bch_two_err++;
      if (bsyn != 0) bch_corrections++;
    end

    foreach (op_count[i]) begin
      $display("op %s: %0d cases", alu_op_e'(i), op_count[i]);
      if (op_count[i] == 0) failures++;
    end
    $display("operand errors absorbed inside a block: %0d", absorbed);
    $display("corrections by the final corrector:     %0d", final_corrections);
    $display("two-error cases on the BCH lane:         %0d", bch_two_err);
    $display("corrections by the final BCH corrector:  %0d", bch_corrections);
    if (absorbed == 0) failures++;
    if (final_corrections == 0) failures++;
    if (bch_two_err == 0) failures++;
    if (bch_corrections == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
