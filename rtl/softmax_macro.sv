// softmax_macro: the SoftMax macro between the two CIM macros.
//
// ROWS safe_softmax_unit instances, one per IP-CIM output channel, share one
// nl_lut coefficient table and run in lock step.  A score vector (one score
// per query row, for one key) enters with `start`; eight clocks later the
// probability vector p, the rescale factors alpha and the per-row rescale
// flags appear with `out_valid`.  The causal mask is formed here: when the key
// tile is the query tile's own (diag) and the key index exceeds the row index,
// that row's key is masked.  `n_rescale` counts the rows that had to rescale
// existing output for this key (pattern-aware scheduling aims to keep it low).
//
// The unit count and shared LUT follow the paper; the mask logic and the
// event count are this design's own.
module softmax_macro
  import fusioncim_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned SW   = 23
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    start,
  input  logic [ROWS*SW-1:0]      score,
  input  logic                    diag,
  input  logic [$clog2(ROWS)-1:0] key_idx,
  input  logic [4:0]              ssh,
  output logic                    out_valid,
  output logic [ROWS*PW-1:0]      p,
  output logic [ROWS*PW-1:0]      alpha,
  output logic [ROWS-1:0]         rescale,
  output logic [$clog2(ROWS+1)-1:0] n_rescale,
  output logic [ROWS*LW-1:0]      l
);
  logic [NCOEF*CW-1:0] coef;
  logic [ROWS-1:0]     ov, ev, masked;

  // causal mask of the diagonal tile: query row i sees keys 0..i only
  always_comb begin
    for (int i = 0; i < ROWS; i++) masked[i] = diag && (int'(key_idx) > i);
  end

  nl_lut #(.NCOEF(NCOEF), .CW(CW), .CF(CF)) u_lut (.coef(coef));

  for (genvar i = 0; i < ROWS; i++) begin : g_unit
    logic signed [SW-1:0] m_unused;
    safe_softmax_unit #(.SW(SW)) u_sm (
      .clk(clk), .rst_n(rst_n), .clear(clear), .start(start),
      .s(signed'(score[i*SW +: SW])),
      .masked(masked[i]),
      .ssh(ssh), .coef(coef),
      .out_valid(ov[i]), .p(p[i*PW +: PW]), .alpha(alpha[i*PW +: PW]),
      .rescale(rescale[i]), .rescale_event(ev[i]), .m(m_unused),
      .l(l[i*LW +: LW])
    );
  end

  // all units run in lock step
  assign out_valid = &ov;

  always_comb begin
    n_rescale = '0;
    for (int i = 0; i < ROWS; i++) n_rescale += $clog2(ROWS+1)'(ev[i]);
  end
endmodule
