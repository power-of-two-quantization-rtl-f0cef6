// tb_pot_sign_correct: exhaustive check of the sign correction.
//
// Every 12-bit product with both sign values; the expected 16-bit term is the
// product's integer value, negated when the sign bit is 1, computed with
// plain integers. Includes -2048, whose negation does not fit in 12 bits.
module tb_pot_sign_correct;
  logic signed [11:0] prod;
  logic               sign;
  logic signed [15:0] term;
  int checks = 0, failures = 0;

  pot_sign_correct dut (.prod(prod), .sign(sign), .term(term));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = -2048; p < 2048; p++) begin
      for (int s = 0; s < 2; s++) begin
        prod = 12'(p);
        sign = 1'(s);
        #1;
        checks++;
        if (int'(term) != (s ? -p : p)) begin
          failures++;
          if (failures < 10) $display("FAIL p=%0d s=%0d term=%0d", p, s, term);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
