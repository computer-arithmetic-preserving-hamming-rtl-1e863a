// bch_adder_tb: randomised test of the two-error-tolerant BCH adder.
//
// Each trial encodes two random 7-bit values with the reference BCH(15,7)
// encoder, picks add or subtract, and injects 0, 1 or 2 operand errors at
// distinct random positions. Every branch corrects its operands, so the
// result must be exactly the codeword of (a + b) or (a - b) mod 128. A second
// set of trials adds one operand error and forces the 7-bit sum of one branch
// (any of the 15) to a random value; the result must then be within one bit
// of the right codeword.
module bch_adder_tb;
  import bch_pkg::*;
  import tb_ref_pkg::*;

  localparam int TRIALS = 3000;

  bch_cw_t x, y, z;
  logic    sub;
  int checks = 0, failures = 0;

  bch_adder dut (.x_i(x), .y_i(y), .sub_i(sub), .z_o(z));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic flip(int pos);
    if (pos < 15) x[pos] = ~x[pos];
    else          y[pos-15] = ~y[pos-15];
  endtask

  task automatic check(logic [6:0] exp, int maxerr, string what);
    logic [14:0] e;
    e = ref_bch_enc(exp);
    checks++;
    if (ref_dist(64'(z), 64'(e)) > maxerr) begin
      failures++;
      $display("FAIL %s sub=%0b x=%h y=%h z=%h expected %h", what, sub, x, y, z, e);
    end
  endtask

  task automatic force_branch(int br, logic [6:0] v);
    unique case (br)
      0:  force dut.g_data[0].s = v;
      1:  force dut.g_data[1].s = v;
      2:  force dut.g_data[2].s = v;
      3:  force dut.g_data[3].s = v;
      4:  force dut.g_data[4].s = v;
      5:  force dut.g_data[5].s = v;
      6:  force dut.g_data[6].s = v;
      7:  force dut.g_par[0].s = v;
      8:  force dut.g_par[1].s = v;
      9:  force dut.g_par[2].s = v;
      10: force dut.g_par[3].s = v;
      11: force dut.g_par[4].s = v;
      12: force dut.g_par[5].s = v;
      13: force dut.g_par[6].s = v;
      default: force dut.g_par[7].s = v;
    endcase
  endtask

  task automatic release_all();
    release dut.g_data[0].s; release dut.g_data[1].s; release dut.g_data[2].s;
    release dut.g_data[3].s; release dut.g_data[4].s; release dut.g_data[5].s;
    release dut.g_data[6].s;
    release dut.g_par[0].s; release dut.g_par[1].s; release dut.g_par[2].s;
    release dut.g_par[3].s; release dut.g_par[4].s; release dut.g_par[5].s;
    release dut.g_par[6].s; release dut.g_par[7].s;
  endtask

  initial begin
    for (int t = 0; t < TRIALS; t++) begin
      logic [6:0] da, db, exp;
      int nerr, p1, p2;
      da  = 7'($urandom);
      db  = 7'($urandom);
      sub = t[0];
      exp = sub ? da - db : da + db;
      nerr = (t / 2) % 3;
      x = ref_bch_enc(da);
      y = ref_bch_enc(db);
      p1 = int'($urandom_range(0, 29));
      p2 = int'($urandom_range(0, 28));
      if (p2 >= p1) p2++;
      if (nerr >= 1) flip(p1);
      if (nerr >= 2) flip(p2);
      #1;
      check(exp, 0, "operand errors");
      if (t % 3 == 0) begin
        x = ref_bch_enc(da);
        y = ref_bch_enc(db);
        flip(p1);
        force_branch(t % 15, 7'($urandom));
        #1;
        check(exp, 1, "operand error + branch fault");
        release_all();
        #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
