// tb_poly_stage: exhaustive check of the mantissa correction over all 128
// fractions f. Each output must be within one LSB (2^-7) of the real-valued
// polynomial, alpha*f*(f+gamma1) for f < 0.5 and
// 1 - 2^-7 - beta*(1 - 2^-7 - f)*(f+gamma2) for f >= 0.5 (not(v) taken as
// 1 - 2^-7 - v), and within 2.5 LSB of 2^f - 1, the function it approximates.
module tb_poly_stage;
  int checks = 0, failures = 0;
  logic [6:0] f, p;

  poly_stage dut (.frac_i(f), .p_o(p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 128; i++) begin
      real fr, pr, lsb, got;
      lsb = 1.0 / 128.0;
      f  = 7'(i);
      #1;
      fr  = real'(i) * lsb;
      if (i < 64) pr = 0.21875 * fr * (fr + 3.296875);
      else        pr = 1.0 - lsb - 0.4375 * (1.0 - lsb - fr) * (fr + 2.171875);
      got = real'(p) * lsb;
      checks++;
      if (got - pr > lsb || pr - got > lsb) begin
        failures++;
        $display("FAIL poly f=%0d p=%0d ref=%f", i, p, pr * 128.0);
      end
      checks++;
      if (got - ((2.0 ** fr) - 1.0) > 2.5 * lsb || ((2.0 ** fr) - 1.0) - got > 2.5 * lsb) begin
        failures++;
        $display("FAIL 2^f f=%0d p=%0d", i, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
