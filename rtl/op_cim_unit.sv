// op_cim_unit: a row of N DCIM units of the outer-product CIM macro (N = 1
// gives a single unit; the macro uses one instance per row with N = COLS,
// the units of a row share p, the alpha bit and the rescale flag, and unit u
// gets its own value bit v_bit[u] and read data rd_data[u*OW +: OW]).
//
// It holds the output bank (BANK_WORDS words of OW bits, 4x16 by default) and
// a fused 1b x 8b MAC.  Over eight bit cycles, MSB first, it receives one bit
// of the value element v_j per cycle (v_bit) and, on its row, the 8-bit
// probability p_i and one bit of the rescale factor alpha_i per cycle.  Two
// serial accumulators form
//   pv = p_i * v_j                       (two's complement, MSB negative)
//   ra = O_old * alpha_i                 (alpha unsigned Q0.8)
// and in the last cycle the bank word is written back with
//   O_new = sat( (rescale ? ra >>> 8 : O_old) + (pv >>> qsh) ),
// i.e. O_ij[t] = P_i * V_j + O_ij[t-1] with the online-softmax rescale folded
// in.  `qsh` is the run-time partial-sum quantisation shift.
//
// Timing: first/last mark the first and last bit cycle; the old word is read
// during all eight cycles and written at the `last` edge.  rd_word/rd_data is
// a combinational read port for result read-out.  The bank is not reset.
//
// From the paper: the 4x16 output bank, the 1b x 8b FMAC, in-place
// accumulation and a dynamic partial-sum quantiser.  The serial rescale by
// alpha and the simple shift-and-saturate quantiser are this design's own.
module op_cim_unit #(
  parameter int unsigned BANK_WORDS = 4,
  parameter int unsigned OW         = 16,
  parameter int unsigned PW         = 8,
  parameter int unsigned VW         = 8,
  parameter int unsigned N          = 1
) (
  input  logic                          clk,
  input  logic [$clog2(BANK_WORDS)-1:0] blk,
  input  logic                          busy,
  input  logic                          first,
  input  logic                          last,
  input  logic [PW-1:0]                 p,
  input  logic                          a_bit,
  input  logic                          rescale,
  input  logic [N-1:0]                  v_bit,
  input  logic [3:0]                    qsh,
  input  logic [$clog2(BANK_WORDS)-1:0] rd_word,
  output logic [N*OW-1:0]               rd_data
);
  localparam int unsigned PVW = PW + VW + 1;
  localparam int unsigned RAW = OW + PW + 1;

  // bank word w of unit u is bank[w][u*OW +: OW]
  logic [N*OW-1:0]       bank [BANK_WORDS];
  logic [N*OW-1:0]       o_new;
  logic signed [PVW-1:0] pv [N];
  logic signed [PVW-1:0] pv_next [N];
  logic signed [RAW-1:0] ra [N];
  logic signed [RAW-1:0] ra_next [N];

  assign rd_data = bank[rd_word];

  always_comb begin
    for (int u = 0; u < N; u++) begin
      logic signed [OW-1:0]  o_old;
      logic signed [PVW-1:0] term;
      logic signed [OW+1:0]  o_sum;
      o_old      = signed'(bank[blk][u*OW +: OW]);
      term       = v_bit[u] ? PVW'({1'b0, p}) : '0;
      pv_next[u] = first ? -term : ((pv[u] <<< 1) + term);
      ra_next[u] = (first ? '0 : (ra[u] <<< 1)) + (a_bit ? RAW'(o_old) : '0);
      o_sum      = (rescale ? (OW+2)'(ra_next[u] >>> PW) : (OW+2)'(o_old)) + (OW+2)'(pv_next[u] >>> qsh);
      if (o_sum > (OW+2)'(2**(OW-1) - 1))       o_new[u*OW +: OW] = {1'b0, {(OW-1){1'b1}}};
      else if (o_sum < -(OW+2)'(2**(OW-1)))     o_new[u*OW +: OW] = {1'b1, {(OW-1){1'b0}}};
      else                                      o_new[u*OW +: OW] = OW'(o_sum);
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      pv <= pv_next;
      ra <= ra_next;
    end
    if (busy && last) bank[blk] <= o_new;
  end
endmodule
