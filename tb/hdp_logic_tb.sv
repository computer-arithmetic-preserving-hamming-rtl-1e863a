// hdp_logic_tb: exhaustive test of the distance-preserving bitwise blocks.
//
// Four instances cover NAND (the default), AND, OR and NOR. For every pair of
// data values, operands are encoded by the reference model and given no error
// or one flipped bit (14 positions). Without an error the result must be
// exactly the codeword of the bitwise operation; with one error it may differ
// in at most one bit and must still decode to the right data.
// Gate faults: in the NAND instance the 4-bit gate output and the corrected
// operand of each parity branch are forced, one at a time, to a random
// value; the result must again be within one bit of the right codeword.
module hdp_logic_tb;
  import hdp_pkg::*;
  import tb_ref_pkg::*;

  logic [6:0] x, y, z_nand, z_and, z_or, z_nor;
  int  checks = 0, failures = 0;

  hdp_logic                    dut     (.x_i(x), .y_i(y), .z_o(z_nand));
  hdp_logic #(.OP(LOGIC_AND))  dut_and (.x_i(x), .y_i(y), .z_o(z_and));
  hdp_logic #(.OP(LOGIC_OR))   dut_or  (.x_i(x), .y_i(y), .z_o(z_or));
  hdp_logic #(.OP(LOGIC_NOR))  dut_nor (.x_i(x), .y_i(y), .z_o(z_nor));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [6:0] z, logic [3:0] exp, int maxerr, string what);
    logic [6:0] e;
    int dd;
    e  = 7'(ref_enc(4, 64'(exp)));
    dd = ref_dist(64'(z), 64'(e));
    checks++;
    if (dd > maxerr || 4'(ref_dec(4, 64'(z))) != exp) begin
      failures++;
      $display("FAIL %s x=%b y=%b z=%b expected %b", what, x, y, z, e);
    end
  endtask

  task automatic force_branch(int j, int kind, logic [6:0] v);
    unique case ({j[1:0], kind[0]})
      3'b000: force dut.g_par[0].w  = v[3:0];
      3'b001: force dut.g_par[0].cx = v;
      3'b010: force dut.g_par[1].w  = v[3:0];
      3'b011: force dut.g_par[1].cx = v;
      3'b100: force dut.g_par[2].w  = v[3:0];
      default: force dut.g_par[2].cx = v;
    endcase
  endtask

  task automatic release_all();
    release dut.g_par[0].w;  release dut.g_par[0].cx;
    release dut.g_par[1].w;  release dut.g_par[1].cx;
    release dut.g_par[2].w;  release dut.g_par[2].cx;
  endtask

  initial begin
    for (int a = 0; a < 16; a++) begin
      for (int b = 0; b < 16; b++) begin
        logic [3:0] da, db;
        da = 4'(a); db = 4'(b);
        for (int f = 0; f <= 14; f++) begin
          x = 7'(ref_enc(4, 64'(da)));
          y = 7'(ref_enc(4, 64'(db)));
          if (f >= 1 && f <= 7) x[f-1] = ~x[f-1];
          if (f >= 8) y[f-8] = ~y[f-8];
          #1;
          check(z_nand, ~(da & db), f == 0 ? 0 : 1, "nand");
          check(z_and,  da & db,    f == 0 ? 0 : 1, "and");
          check(z_or,   da | db,    f == 0 ? 0 : 1, "or");
          check(z_nor,  ~(da | db), f == 0 ? 0 : 1, "nor");
        end
        // one faulty gate / corrector inside a parity branch, clean operands
        x = 7'(ref_enc(4, 64'(da)));
        y = 7'(ref_enc(4, 64'(db)));
        for (int j = 0; j < 3; j++) begin
          for (int k = 0; k < 2; k++) begin
            force_branch(j, k, 7'($urandom));
            #1;
            check(z_nand, ~(da & db), 1, "nand branch fault");
            release_all();
            #1;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
