// tb_nl_lut: every Taylor coefficient of 2^-f must equal (-ln2)^k/k! in
// Q1.22 to within one LSB, and the polynomial built from the table must give
// 2^-f to better than 1e-5 at a few points.
module tb_nl_lut;
  localparam int NCOEF = 9, CW = 24, CF = 22;
  logic [NCOEF*CW-1:0] coef;
  int checks = 0, failures = 0;

  nl_lut #(.NCOEF(NCOEF), .CW(CW), .CF(CF)) dut (.coef(coef));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real fact, c, got, x, poly;
    #1;
    fact = 1.0;
    for (int k = 0; k < NCOEF; k++) begin
      if (k > 0) fact = fact * k;
      c   = ((-$ln(2.0)) ** k) / fact * (2.0 ** CF);
      got = real'(signed'(coef[k*CW +: CW]));
      checks++;
      if (got - c > 1.0 || c - got > 1.0) begin
        failures++;
        $display("FAIL c%0d = %f expected %f", k, got, c);
      end
    end
    for (int t = 0; t < 8; t++) begin
      x = t / 8.0;
      poly = 0.0;
      for (int k = NCOEF - 1; k >= 0; k--) poly = poly * x + real'(signed'(coef[k*CW +: CW])) / (2.0 ** CF);
      checks++;
      if ((poly - 2.0 ** (-x)) > 1e-5 || (2.0 ** (-x) - poly) > 1e-5) begin
        failures++;
        $display("FAIL poly(%f) = %f", x, poly);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
