// hdp_xor_tb: exhaustive test of the distance-preserving XOR / NOT block.
//
// For every pair of 4-bit data values the operands are encoded by the
// reference, then either left intact or given one flipped bit (any of the 14
// bits of x and y). Checks: without an error the result is exactly the
// codeword of dx ^ dy; with one error it is at distance 1 from it, so the
// nearest codeword still carries dx ^ dy. The NOT is checked the same way with
// y tied to all ones.
module hdp_xor_tb;
  import hdp_pkg::*;
  import tb_ref_pkg::*;

  logic [6:0] x, y, z;
  int  checks = 0, failures = 0;

  hdp_xor dut (.x_i(x), .y_i(y), .z_o(z));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [3:0] exp, int nerr, string what);
    logic [6:0] e;
    e = 7'(ref_enc(4, 64'(exp)));
    checks++;
    if (ref_dist(64'(z), 64'(e)) != nerr || 4'(ref_dec(4, 64'(z))) != exp) begin
      failures++;
      $display("FAIL %s x=%b y=%b z=%b expected %b (errors injected %0d)", what, x, y, z, e, nerr);
    end
  endtask

  initial begin
    for (int a = 0; a < 16; a++) begin
      for (int b = 0; b < 16; b++) begin
        for (int f = 0; f <= 14; f++) begin
          x = 7'(ref_enc(4, 64'(4'(a))));
          y = 7'(ref_enc(4, 64'(4'(b))));
          if (f >= 1 && f <= 7) x[f-1] = ~x[f-1];
          if (f >= 8) y[f-8] = ~y[f-8];
          #1;
          check(4'(a ^ b), f == 0 ? 0 : 1, "xor");
        end
      end
      for (int f = 0; f <= 7; f++) begin
        x = 7'(ref_enc(4, 64'(4'(a))));
        y = '1;
        if (f >= 1) x[f-1] = ~x[f-1];
        #1;
        check(~4'(a), f == 0 ? 0 : 1, "not");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
