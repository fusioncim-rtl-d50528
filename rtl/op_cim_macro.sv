// op_cim_macro: outer-product CIM macro accumulating O += P V in place.
//
// A ROWS x COLS array of DCIM units (one op_cim_unit instance of COLS units
// per row) keeps the output tile stationary:
// unit (i,j) holds O[i][j] of the query block selected by `blk`.  With
// `start` the macro takes the probability vector p (one 8-bit value per row),
// the rescale factors alpha and flags, and a value vector v (COLS signed
// bytes).  p_i is broadcast along row i; the value bits are sent down the
// columns MSB first over eight cycles together with the alpha bits along the
// rows; each unit then writes back O[i][j] = rescale_i ? O*alpha_i : O,
// plus p_i * v_j (quantised by qsh).
//
// Timing: start is accepted when idle or in the last bit cycle (one vector
// every eight clocks).  With start at edge E0 the bits are processed at
// E1..E8 and the bank words are written at E8, when `done` pulses (one cycle
// later it is visible).  rd_row/rd_word select a row of the bank for
// read-out on rd_data (combinational).
//
// The array, row-broadcast of P and column-serial V follow the paper; the
// read-out port and the hand-over timing are this design's own.
module op_cim_macro #(
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 128,
  parameter int unsigned BANK_WORDS = 4,
  parameter int unsigned OW         = 16,
  parameter int unsigned PW         = 8,
  parameter int unsigned VW         = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(BANK_WORDS)-1:0] blk,
  input  logic [3:0]                    qsh,
  input  logic                          start,
  input  logic [ROWS*PW-1:0]            p,
  input  logic [ROWS*PW-1:0]            alpha,
  input  logic [ROWS-1:0]               rescale,
  input  logic [COLS*VW-1:0]            v_vec,
  output logic                          ready,
  output logic                          busy,
  output logic                          done,
  input  logic [$clog2(ROWS)-1:0]       rd_row,
  input  logic [$clog2(BANK_WORDS)-1:0] rd_word,
  output logic [COLS*OW-1:0]            rd_data
);
  logic [ROWS*PW-1:0]    preg, areg;
  logic [ROWS-1:0]       rreg;
  logic [COLS*VW-1:0]    vreg;
  logic [$clog2(VW)-1:0] cnt;
  logic                  last, first;
  logic [COLS-1:0]       v_bits;
  logic [ROWS-1:0]       a_bits;
  logic [COLS*OW-1:0]    row_data [ROWS];

  assign last  = busy && (cnt == $clog2(VW)'(VW - 1));
  assign first = (cnt == '0);
  assign ready = !busy || last;

  always_comb begin
    for (int j = 0; j < COLS; j++) v_bits[j] = vreg[j*VW + (VW - 1 - int'(cnt))];
    for (int i = 0; i < ROWS; i++) a_bits[i] = areg[i*PW + (PW - 1 - int'(cnt))];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= last;
      if (busy) cnt <= cnt + 1'b1;
      if (start && ready) begin
        preg <= p;
        areg <= alpha;
        rreg <= rescale;
        vreg <= v_vec;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (last) begin
        busy <= 1'b0;
      end
    end
  end

  // one instance per row holds the COLS DCIM units of that row
  for (genvar i = 0; i < ROWS; i++) begin : g_row
    op_cim_unit #(.BANK_WORDS(BANK_WORDS), .OW(OW), .PW(PW), .VW(VW), .N(COLS)) u_units (
      .clk(clk), .blk(blk), .busy(busy), .first(first), .last(last),
      .p(preg[i*PW +: PW]), .a_bit(a_bits[i]), .rescale(rreg[i]),
      .v_bit(v_bits), .qsh(qsh), .rd_word(rd_word),
      .rd_data(row_data[i])
    );
  end

  assign rd_data = row_data[rd_row];
endmodule
