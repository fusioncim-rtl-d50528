// safe_softmax_unit: online safe-softmax for one row of the score matrix.
//
// One unit serves one IP-CIM output channel (one query).  It keeps the running
// row maximum m, a valid flag and the running row sum l, and for each score s
// of the row it produces the 8-bit probability p and the output-rescale
// command for the OP-CIM row:
//   masked key          : p = 0,   no rescale, state unchanged
//   first unmasked key  : m = s,   p = 255 (1.0), alpha = 0, rescale (clears O)
//   s > m (new maximum) : m = s,   p = 255, alpha = exp(m_old - s), rescale
//   otherwise           : p = exp(s - m), no rescale
// so the output row always holds sum_t exp(s_t - m) * v_t in Q0.8 units of p,
// and l holds sum_t exp(s_t - m).  Only one exponential is needed per key; it
// runs in the unit's exp_taylor_pe.  `rescale_event` marks a true rescale of
// existing output (the new-maximum case) and is what the pattern-aware
// schedule tries to avoid.
//
// Timing: start (with s, masked) is accepted when the exponential unit is
// ready, i.e. every eight clocks at most; the comparison and the max update
// happen at the start edge, and p/alpha/rescale/out_valid follow ten clocks
// later (nine for the exponential, one output register) together with the
// update of l.  Because the next key may already have been accepted when a
// result is registered, the kind of the finishing key is kept in a second
// register (kind_p).  `clear` (start of a new
// pass) empties the state.
//
// Max tracker, comparator, subtractor and Taylor exponential follow the paper
// (Fig. 3 of the FusionCIM paper).  The handling of the first key, the mask,
// keeping l here and the fixed-point formats are this design's choices.
module safe_softmax_unit
  import fusioncim_pkg::*;
#(
  parameter int unsigned SW = 23,
  parameter int unsigned LW_P = LW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                start,
  input  logic signed [SW-1:0] s,
  input  logic                masked,
  input  logic [4:0]          ssh,
  input  logic [NCOEF*CW-1:0] coef,
  output logic                out_valid,
  output logic [PW-1:0]       p,
  output logic [PW-1:0]       alpha,
  output logic                rescale,
  output logic                rescale_event,
  output logic signed [SW-1:0] m,
  output logic [LW_P-1:0]     l
);
  typedef enum logic [1:0] {K_MASK, K_FIRST, K_NEWMAX, K_NORMAL} kind_e;

  logic            valid;
  kind_e           kind, kind_in, kind_p, kind_o;
  logic            started_d;
  logic [SW:0]     d;
  logic            pe_ready, pe_done;
  logic [PW-1:0]   pe_res;

  // maximum tracker: comparator and subtractor
  always_comb begin
    if (masked)          kind_in = K_MASK;
    else if (!valid)     kind_in = K_FIRST;
    else if (s > m)      kind_in = K_NEWMAX;
    else                 kind_in = K_NORMAL;
    if (kind_in == K_NEWMAX) d = (SW+1)'(s) - (SW+1)'(m);
    else if (kind_in == K_NORMAL) d = (SW+1)'(m) - (SW+1)'(s);
    else d = '0;
  end

  exp_taylor_pe #(.DW(SW + 1), .OUTW(PW)) u_exp (
    .clk(clk), .rst_n(rst_n), .start(start), .d(d), .ssh(ssh), .coef(coef),
    .ready(pe_ready), .done(pe_done), .result(pe_res)
  );

  // outputs at the end of the exponential
  logic [PW-1:0]   p_n, a_n;
  logic            r_n;
  logic [LW_P+PW:0] l_scaled;
  logic [LW_P:0]   l_n;
  always_comb begin
    p_n = '0; a_n = '0; r_n = 1'b0;
    l_scaled = ({{(PW+1){1'b0}}, l} * (LW_P+PW+1)'(pe_res)) >> PW;
    l_n = {1'b0, l};
    // a new key accepted on the edge that raised done has already replaced
    // kind, so the key being finished is the one saved in kind_p
    kind_o = started_d ? kind_p : kind;
    unique case (kind_o)
      K_MASK:   ;
      K_FIRST:  begin p_n = '1; a_n = '0;     r_n = 1'b1; l_n = (LW_P+1)'(p_n); end
      K_NEWMAX: begin
        p_n = '1; a_n = pe_res; r_n = 1'b1;
        // l * alpha / 256 never exceeds l; the check keeps the saturation exact
        l_n = (l_scaled[LW_P+PW:LW_P] != '0) ? {1'b1, {LW_P{1'b0}}}
                                               : (LW_P+1)'(l_scaled) + (LW_P+1)'(p_n);
      end
      K_NORMAL: begin p_n = pe_res;                       l_n = {1'b0, l} + (LW_P+1)'(pe_res); end
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid <= 1'b0; m <= '0; l <= '0; kind <= K_MASK; kind_p <= K_MASK; started_d <= 1'b0;
      out_valid <= 1'b0; p <= '0; alpha <= '0; rescale <= 1'b0; rescale_event <= 1'b0;
    end else begin
      out_valid <= pe_done;
      if (pe_done) begin
        p             <= p_n;
        alpha         <= a_n;
        rescale       <= r_n;
        rescale_event <= (kind_o == K_NEWMAX);
        l             <= l_n[LW_P] ? '1 : l_n[LW_P-1:0];   // saturate
      end
      started_d <= start && pe_ready;
      if (start && pe_ready) begin
        kind   <= kind_in;
        kind_p <= kind;
        if (kind_in == K_FIRST || kind_in == K_NEWMAX) begin
          m     <= s;
          valid <= 1'b1;
        end
      end
      if (clear) begin
        valid <= 1'b0;
        l     <= '0;
      end
    end
  end
endmodule
