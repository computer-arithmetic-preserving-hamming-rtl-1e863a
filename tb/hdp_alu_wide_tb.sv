// hdp_alu_wide_tb: the ALU at wider data paths, with random operands.
//
// Two instances run side by side: 32 data bits (a (38,32) shortened Hamming
// code, the 32-bit ALU size discussed for this scheme) and 11 data bits (the
// full (15,11) code). Each trial picks an operation, two random data words and
// either no error or one flipped operand bit, and checks that the protected
// result is within one bit of the right codeword (on it when clean) and that
// the final corrector returns the right data. Expected values come from the
// reference model in tb_ref_pkg.
module hdp_alu_wide_tb;
  import hdp_pkg::*;
  import bch_pkg::*;
  import tb_ref_pkg::*;

  localparam int TRIALS = 20000;
  localparam int DA = 32, CA = DA + 6;   // (38,32)
  localparam int DB = 11, CB = DB + 4;   // (15,11)

  alu_op_e        op;
  logic [CA-1:0]  xa, ya, za, zca;
  logic [DA-1:0]  qa;
  logic [5:0]     sa;
  logic [CB-1:0]  xb, yb, zb, zcb;
  logic [DB-1:0]  qb;
  logic [3:0]     sb;
  bch_cw_t        bz0, bz1, bzc0, bzc1;
  bch_data_t      bq0, bq1;
  bch_syn_t       bs0, bs1;

  int checks = 0, failures = 0;
  int op_count [8];
  int corrected = 0;

  hdp_alu #(.DW(DA)) dut32 (
    .x_i(xa), .y_i(ya), .op_i(op), .z_o(za), .zc_o(zca), .q_o(qa), .syndrome_o(sa),
    .bx_i('0), .by_i('0), .bz_o(bz0), .bzc_o(bzc0), .bq_o(bq0), .bsyndrome_o(bs0));
  hdp_alu #(.DW(DB)) dut11 (
    .x_i(xb), .y_i(yb), .op_i(op), .z_o(zb), .zc_o(zcb), .q_o(qb), .syndrome_o(sb),
    .bx_i('0), .by_i('0), .bz_o(bz1), .bzc_o(bzc1), .bq_o(bq1), .bsyndrome_o(bs1));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t ref_op(int dw, alu_op_e o, word_t a, word_t b);
    word_t r, m;
    m = (64'd1 << dw) - 1;
    unique case (o)
      OP_XOR:  r = a ^ b;
      OP_NOT:  r = ~a;
      OP_AND:  r = a & b;
      OP_OR:   r = a | b;
      OP_NAND: r = ~(a & b);
      OP_NOR:  r = ~(a | b);
      OP_ADD:  r = a + b;
      default: r = a - b;
    endcase
    return r & m;
  endfunction

  task automatic check(int dw, word_t z, word_t zc, word_t q, word_t exp, bit err);
    word_t e;
    e = ref_enc(dw, exp);
    checks++;
    if (ref_dist(z, e) > (err ? 1 : 0) || zc != e || q != exp) begin
      failures++;
      $display("FAIL dw=%0d op=%s z=%h zc=%h q=%h expected q=%h cw=%h", dw, op.name(), z, zc, q, exp, e);
    end
  endtask

  initial begin
    foreach (op_count[i]) op_count[i] = 0;
    for (int t = 0; t < TRIALS; t++) begin
      word_t a32, b32, a11, b11;
      int fa, fb;
      op  = alu_op_e'(t % 8);
      a32 = word_t'($urandom); b32 = word_t'($urandom);
      a11 = word_t'($urandom_range(0, 2047)); b11 = word_t'($urandom_range(0, 2047));
      xa = CA'(ref_enc(DA, a32)); ya = CA'(ref_enc(DA, b32));
      xb = CB'(ref_enc(DB, a11)); yb = CB'(ref_enc(DB, b11));
      fa = int'($urandom_range(0, 2 * CA));   // 0 = clean
      fb = int'($urandom_range(0, 2 * CB));
      if (t % 2 == 0) begin fa = 0; fb = 0; end
      if (fa >= 1 && fa <= CA) xa[fa-1] = ~xa[fa-1];
      if (fa > CA)             ya[fa-CA-1] = ~ya[fa-CA-1];
      if (fb >= 1 && fb <= CB) xb[fb-1] = ~xb[fb-1];
      if (fb > CB)             yb[fb-CB-1] = ~yb[fb-CB-1];
      #1;
      check(DA, word_t'(za), word_t'(zca), word_t'(qa), ref_op(DA, op, a32, b32), fa != 0);
      check(DB, word_t'(zb), word_t'(zcb), word_t'(qb), ref_op(DB, op, a11, b11), fb != 0);
      op_count[t % 8]++;
      if (sa != 0) corrected++;
    end
    foreach (op_count[i]) if (op_count[i] == 0) failures++;
    $display("32-bit results fixed by the final corrector: %0d", corrected);
    if (corrected == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
