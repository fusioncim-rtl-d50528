// nl_lut: coefficient table of the Taylor-series exponential.
//
// Holds c_k = (-ln 2)^k / k!, k = 0..NCOEF-1, in signed fixed point with CF
// fraction bits (Q1.22 by default).  With these coefficients the polynomial
// sum_k c_k f^k approximates 2^-f for 0 <= f < 1, which the exponential PE
// combines with a shift to form exp(-x).  The table is shared by all softmax
// units of a macro; because the units work in lock step, every word is
// presented at once on `coef` (word k in bits k*CW +: CW).
//
// The paper stores the Taylor coefficients in a local LUT (128 B); the choice
// of a base-2 expansion and of the number format is this design's own.  The
// entries are computed at elaboration time from the formula above.
module nl_lut #(
  parameter int unsigned NCOEF = 9,
  parameter int unsigned CW    = 24,
  parameter int unsigned CF    = 22
) (
  output logic [NCOEF*CW-1:0] coef
);
  function automatic longint coef_value(int k);
    real c;
    c = 1.0;
    for (int i = 1; i <= k; i++) c = c * (-0.6931471805599453) / real'(i);
    return longint'($rtoi(c * real'(64'(1) << CF) + ((c < 0.0) ? -0.5 : 0.5)));
  endfunction

  for (genvar k = 0; k < NCOEF; k++) begin : g_word
    localparam longint C = coef_value(k);
    assign coef[k*CW +: CW] = CW'(C);
  end
endmodule
