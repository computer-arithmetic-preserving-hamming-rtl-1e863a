// bch_logic_tb: randomised test of the two-error-tolerant BCH bitwise blocks.
//
// Four instances cover NAND (the default), AND, OR and NOR. Each trial
// encodes two random 7-bit data values with the reference BCH(15,7) encoder
// and injects 0, 1 or 2 errors at distinct random positions among the 30
// operand bits. Each result must lie within that many bits of the codeword of
// the right bitwise result (exactly on it with no error), and the nearest of
// the 128 codewords must be that codeword. A second set of trials adds one
// operand error and forces the gate output of one parity branch of the NAND
// instance to a random value (one faulty gate), two faults in all.
module bch_logic_tb;
  import hdp_pkg::*;
  import bch_pkg::*;
  import tb_ref_pkg::*;

  localparam int TRIALS = 3000;

  bch_cw_t x, y, z_nand, z_and, z_or, z_nor;
  int checks = 0, failures = 0;
  int seen_err [3] = '{0, 0, 0};

  bch_logic                   dut     (.x_i(x), .y_i(y), .z_o(z_nand));
  bch_logic #(.OP(LOGIC_AND)) dut_and (.x_i(x), .y_i(y), .z_o(z_and));
  bch_logic #(.OP(LOGIC_OR))  dut_or  (.x_i(x), .y_i(y), .z_o(z_or));
  bch_logic #(.OP(LOGIC_NOR)) dut_nor (.x_i(x), .y_i(y), .z_o(z_nor));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [6:0] nearest(logic [14:0] c);
    int best, bd;
    best = 99; bd = 0;
    for (int d = 0; d < 128; d++) begin
      int dd;
      dd = $countones(c ^ ref_bch_enc(7'(d)));
      if (dd < best) begin best = dd; bd = d; end
    end
    return 7'(bd);
  endfunction

  task automatic flip(int pos);
    if (pos < 15) x[pos] = ~x[pos];
    else          y[pos-15] = ~y[pos-15];
  endtask

  task automatic check(bch_cw_t z, logic [6:0] exp, int nerr, string what);
    logic [14:0] e;
    e = ref_bch_enc(exp);
    checks++;
    if (ref_dist(64'(z), 64'(e)) > nerr || nearest(z) != exp) begin
      failures++;
      $display("FAIL %s x=%h y=%h z=%h expected %h", what, x, y, z, e);
    end
  endtask

  task automatic force_branch(int j, logic [6:0] v);
    unique case (j)
      0: force dut.g_par[0].w = v;
      1: force dut.g_par[1].w = v;
      2: force dut.g_par[2].w = v;
      3: force dut.g_par[3].w = v;
      4: force dut.g_par[4].w = v;
      5: force dut.g_par[5].w = v;
      6: force dut.g_par[6].w = v;
      default: force dut.g_par[7].w = v;
    endcase
  endtask

  task automatic release_all();
    release dut.g_par[0].w; release dut.g_par[1].w;
    release dut.g_par[2].w; release dut.g_par[3].w;
    release dut.g_par[4].w; release dut.g_par[5].w;
    release dut.g_par[6].w; release dut.g_par[7].w;
  endtask

  initial begin
    for (int t = 0; t < TRIALS; t++) begin
      logic [6:0] da, db;
      int nerr, p1, p2;
      da = 7'($urandom);
      db = 7'($urandom);
      nerr = t % 3;
      x = ref_bch_enc(da);
      y = ref_bch_enc(db);
      p1 = int'($urandom_range(0, 29));
      p2 = int'($urandom_range(0, 28));
      if (p2 >= p1) p2++;
      if (nerr >= 1) flip(p1);
      if (nerr >= 2) flip(p2);
      seen_err[nerr]++;
      #1;
      check(z_nand, ~(da & db), nerr, "nand");
      check(z_and,  da & db,    nerr, "and");
      check(z_or,   da | db,    nerr, "or");
      check(z_nor,  ~(da | db), nerr, "nor");
      if (t % 4 == 0) begin
        x = ref_bch_enc(da);
        y = ref_bch_enc(db);
        flip(p1);
        force_branch(t % 8, 7'($urandom));
        #1;
        check(z_nand, ~(da & db), 2, "nand, operand error + branch fault");
        release_all();
        #1;
      end
    end
    $display("trials: %0d clean, %0d with one error, %0d with two errors",
             seen_err[0], seen_err[1], seen_err[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
