// exp_taylor_pe: lightweight exponential PE, exp(-d * scale) by Taylor series.
//
// The argument is a non-negative integer score difference d.  On `start` the PE
// reduces it to base 2:  y = (d * log2(e)) >> ssh  with FF fraction bits, so
// exp(-d*2^-ssh) = 2^-n * 2^-f with n = floor(y) and f = frac(y).  The factor
// 2^-f is evaluated with an order-8 polynomial in Horner form,
//   r <- c8;  r <- r*f + c_k  for k = 7 .. 0,
// one multiply-add per clock, so the eight iterations take eight cycles and
// match the eight bit-serial cycles of the CIM macros.  The result is shifted
// right by n and rounded to an unsigned Q0.8 probability, saturated at 255.
//
// Timing: start is accepted when idle or in the last iteration; with start at
// edge E0 the iterations run at E1..E8 and `result`/`done` update at E8 (done
// is a one-cycle pulse).  The coefficients come from the shared nl_lut.
//
// The paper gives the Taylor method, the eight-step iteration in one PE and
// the coefficient LUT; it computes in FP16.  The base-2 range reduction and the
// fixed-point formats are this design's own.
module exp_taylor_pe
  import fusioncim_pkg::*;
#(
  parameter int unsigned DW   = 24,      // width of d
  parameter int unsigned OUTW = PW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [DW-1:0]        d,
  input  logic [4:0]           ssh,
  input  logic [NCOEF*CW-1:0]  coef,
  output logic                 ready,
  output logic                 done,
  output logic [OUTW-1:0]      result
);
  localparam int unsigned YW = DW + 15;        // width of d * log2(e)
  localparam int unsigned RW = CW + 2;         // Horner register
  localparam int unsigned NMAX = CF + 1;       // beyond this the result is 0

  logic              busy;
  logic [2:0]        cnt;
  logic              last;
  logic [FF-1:0]     f;
  logic [5:0]        n;
  logic              underflow;
  logic signed [RW-1:0] r, r_next;

  // range reduction (combinational on the input)
  logic [YW-1:0] y;
  logic [YW-FF-1:0] y_int;
  always_comb begin
    y     = (YW'(d) * YW'(LOG2E_Q14)) >> ssh;
    y_int = y[YW-1:FF];
  end

  assign last  = busy && (cnt == 3'd7);
  assign ready = !busy || last;

  // one Horner step with coefficient c_(7-cnt)
  always_comb begin
    logic signed [RW+FF+1:0] prod;
    logic signed [CW-1:0]    ck;
    ck     = signed'(coef[(7 - int'(cnt))*CW +: CW]);
    prod   = (RW+FF+2)'(r) * signed'({1'b0, f});
    r_next = RW'(prod >>> FF) + RW'(ck);
  end

  // final scaling to Q0.OUTW with rounding and saturation
  logic [OUTW-1:0] p_final;
  always_comb begin
    logic [RW+1:0] sh, rnd;
    int unsigned   s;
    s   = int'(n) + CF - OUTW;
    rnd = (RW+2)'(1) << (s - 1);
    sh  = ((RW+2)'(r_next) + rnd) >> s;
    if (underflow || r_next <= 0)         p_final = '0;
    else if (sh > (RW+2)'((1 << OUTW) - 1)) p_final = '1;
    else                                  p_final = OUTW'(sh);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      cnt    <= '0;
      done   <= 1'b0;
      result <= '0;
    end else begin
      done <= last;
      if (last) result <= p_final;
      if (busy) begin
        cnt <= cnt + 1'b1;
        r   <= r_next;
      end
      if (start && ready) begin
        busy      <= 1'b1;
        cnt       <= '0;
        f         <= y[FF-1:0];
        underflow <= (y_int >= (YW-FF)'(NMAX));
        n         <= (y_int >= (YW-FF)'(NMAX)) ? 6'(NMAX) : 6'(y_int);
        r         <= RW'(signed'(coef[8*CW +: CW]));
      end else if (last) begin
        busy <= 1'b0;
      end
    end
  end
endmodule
