// ip_cim_unit: a row of N DCIM units of the inner-product CIM macro (N = 1
// gives a single unit; the macro uses one instance per row with N = COLS,
// the units of a row share the wordline select and the write enable).
//
// It holds a small query bank of BANK_WORDS words of QW bits (4x8 in the
// published design) and a 1-bit x 8-bit multiplier.  The wordline select
// `wl` picks the stored query byte; the broadcast key bit `k_bit` gates it, so
// the product is either the query byte or zero.  The sign of the key's MSB is
// handled by the shift-and-add periphery of the macro, not here.
//
// Interface: a write port (wr_en, wr_word, wr_data: unit u in bits
// [u*QW +: QW]) updates one bank word of every unit per clock; the read/multiply path is combinational (prod is valid in the same
// cycle as wl and k_bit).  The bank is not reset: it is written before use.
// The bank organisation and the 1b x 8b multiply follow the paper; the write
// port is this design's choice.
module ip_cim_unit #(
  parameter int unsigned BANK_WORDS = 4,
  parameter int unsigned QW         = 8,
  parameter int unsigned N          = 1
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [$clog2(BANK_WORDS)-1:0] wr_word,
  input  logic [N*QW-1:0]               wr_data,
  input  logic [$clog2(BANK_WORDS)-1:0] wl,
  input  logic [N-1:0]                  k_bit,
  output logic [N*QW-1:0]               prod
);
  // bank word w of unit u is bank[w][u*QW +: QW]
  logic [N*QW-1:0] bank [BANK_WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) bank[wr_word] <= wr_data;
  end

  // 1b x 8b multiplier: AND of the key bit with every bit of the query byte.
  always_comb begin
    for (int u = 0; u < N; u++) prod[u*QW +: QW] = k_bit[u] ? bank[wl][u*QW +: QW] : '0;
  end
endmodule
