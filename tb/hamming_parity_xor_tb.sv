// hamming_parity_xor_tb: exhaustive test of the 3-input parity generator.
module hamming_parity_xor_tb;
  logic [2:0] d;
  logic       p;
  int checks = 0, failures = 0;

  hamming_parity_xor dut (.d_i(d), .p_o(p));

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      d = 3'(i);
      #1;
      checks++;
      if (p !== ($countones(i) % 2 == 1)) begin
        failures++;
        $display("FAIL d=%b p=%b", d, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
