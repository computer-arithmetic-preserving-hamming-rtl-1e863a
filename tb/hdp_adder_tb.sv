// hdp_adder_tb: exhaustive test of the distance-preserving adder / subtractor.
//
// For both modes and every pair of data values, operands are encoded by the
// reference model and given no error or one flipped bit (14 positions). Every
// branch corrects its operands, so the result must be exactly the codeword of
// (a + b) mod 16 or (a - b) mod 16 in all of these cases.
// Gate faults: the 4-bit sum of one branch at a time (four data branches,
// three parity branches) is forced to a random value, modelling any fault in
// that branch's adder or correctors; the result must then be within one bit of
// the right codeword and decode to the right value.
module hdp_adder_tb;
  import hdp_pkg::*;
  import tb_ref_pkg::*;

  logic [6:0] x, y, z;
  logic sub;
  int   checks = 0, failures = 0;

  hdp_adder dut (.x_i(x), .y_i(y), .sub_i(sub), .z_o(z));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [3:0] exp, int maxerr, string what);
    logic [6:0] e;
    e = 7'(ref_enc(4, 64'(exp)));
    checks++;
    if (ref_dist(64'(z), 64'(e)) > maxerr || 4'(ref_dec(4, 64'(z))) != exp) begin
      failures++;
      $display("FAIL %s sub=%0b x=%b y=%b z=%b expected %b", what, sub, x, y, z, e);
    end
  endtask

  task automatic force_branch(int br, logic [3:0] v);
    unique case (br)
      0: force dut.g_data[0].s = v;
      1: force dut.g_data[1].s = v;
      2: force dut.g_data[2].s = v;
      3: force dut.g_data[3].s = v;
      4: force dut.g_par[0].s  = v;
      5: force dut.g_par[1].s  = v;
      default: force dut.g_par[2].s = v;
    endcase
  endtask

  task automatic release_all();
    release dut.g_data[0].s; release dut.g_data[1].s;
    release dut.g_data[2].s; release dut.g_data[3].s;
    release dut.g_par[0].s;  release dut.g_par[1].s; release dut.g_par[2].s;
  endtask

  initial begin
    for (int m = 0; m < 2; m++) begin
      sub = m[0];
      for (int a = 0; a < 16; a++) begin
        for (int b = 0; b < 16; b++) begin
          logic [3:0] exp;
          exp = sub ? 4'(a - b) : 4'(a + b);
          for (int f = 0; f <= 14; f++) begin
            x = 7'(ref_enc(4, 64'(4'(a))));
            y = 7'(ref_enc(4, 64'(4'(b))));
            if (f >= 1 && f <= 7) x[f-1] = ~x[f-1];
            if (f >= 8) y[f-8] = ~y[f-8];
            #1;
            check(exp, 0, sub ? "sub" : "add");
          end
          x = 7'(ref_enc(4, 64'(4'(a))));
          y = 7'(ref_enc(4, 64'(4'(b))));
          for (int br = 0; br < 7; br++) begin
            force_branch(br, 4'($urandom));
            #1;
            check(exp, 1, "branch fault");
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
