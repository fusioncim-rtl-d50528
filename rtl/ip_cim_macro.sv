// ip_cim_macro: inner-product CIM macro computing the scores s = Q k^T.
//
// A ROWS x COLS array of DCIM units (one ip_cim_unit instance of COLS units
// per row) keeps one query tile stationary:
// unit (i,j) stores element j of query i, in one of BANK_WORDS bank words
// (selected by `blk`, the wordline).  A key vector k (COLS signed bytes) is
// presented on k_vec with `start`; the built-in bitline driver then sends it
// bit-serially, MSB first, down the columns over KW cycles.  Each row's adder
// tree sums the gated query bytes and the shift-and-add periphery forms
//   acc <- 2*acc + tree      (tree negated for the MSB, two's complement)
// so that after KW bit cycles acc_i = sum_j Q[i][j] * k[j].
//
// Timing: `start` is taken when the macro is idle or in its last bit cycle,
// so one vector can enter every KW cycles.  If start is taken at edge E0, the
// bits are processed at edges E1..E8 and `score`/`score_valid` are updated at
// E8 (score_valid is a one-cycle pulse; score holds until the next result).
// `ready` tells when start is accepted.  Query rows are written through
// q_wr_* (one row of COLS bytes per clock, into bank word q_wr_word).
//
// From the paper: the unit array, the 4x8 query bank, the 1b x 8b multipliers,
// per-row adder tree, shift-and-add and MSB-first bit-serial keys.  The
// write port, the start/ready handshake and the exact hand-over timing are
// this design's own.
module ip_cim_macro #(
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 128,
  parameter int unsigned BANK_WORDS = 4,
  parameter int unsigned KW         = 8,
  parameter int unsigned SW         = 2 * KW + $clog2(COLS)  // score width
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // query load
  input  logic                          q_wr_en,
  input  logic [$clog2(ROWS)-1:0]       q_wr_row,
  input  logic [$clog2(BANK_WORDS)-1:0] q_wr_word,
  input  logic [COLS*KW-1:0]            q_wr_data,
  // computation
  input  logic [$clog2(BANK_WORDS)-1:0] blk,
  input  logic                          start,
  input  logic [COLS*KW-1:0]            k_vec,
  output logic                          ready,
  output logic                          busy,
  output logic                          score_valid,
  output logic [ROWS*SW-1:0]            score
);
  localparam int unsigned TW = KW + $clog2(COLS);   // adder-tree width

  logic [COLS*KW-1:0]       kreg;     // bitline driver: key vector being sent
  logic [$clog2(KW)-1:0]    cnt;      // bit cycle, 0 = MSB
  logic [COLS-1:0]          k_bits;   // bits on the columns this cycle
  logic                     last;

  assign last  = busy && (cnt == $clog2(KW)'(KW - 1));
  assign ready = !busy || last;

  // Bitline driver: select bit (KW-1-cnt) of every key byte.
  always_comb begin
    for (int j = 0; j < COLS; j++) k_bits[j] = kreg[j*KW + (KW - 1 - int'(cnt))];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      cnt         <= '0;
      score_valid <= 1'b0;
    end else begin
      score_valid <= last;
      if (busy) cnt <= cnt + 1'b1;
      if (start && ready) begin
        kreg <= k_vec;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (last) begin
        busy <= 1'b0;
      end
    end
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    logic [COLS*KW-1:0]   prods;
    logic signed [TW-1:0] tree;
    logic signed [SW-1:0] acc, acc_next;

    // the COLS DCIM units of row i
    ip_cim_unit #(.BANK_WORDS(BANK_WORDS), .QW(KW), .N(COLS)) u_units (
      .clk     (clk),
      .wr_en   (q_wr_en && (q_wr_row == i[$clog2(ROWS)-1:0])),
      .wr_word (q_wr_word),
      .wr_data (q_wr_data),
      .wl      (blk),
      .k_bit   (k_bits),
      .prod    (prods)
    );

    adder_tree #(.N(COLS), .IW(KW), .OW(TW)) u_tree (.in(prods), .sum(tree));

    // Shift-and-add periphery.
    always_comb begin
      if (cnt == '0) acc_next = -SW'(tree);
      else           acc_next = (acc <<< 1) + SW'(tree);
    end

    always_ff @(posedge clk) begin
      if (busy) acc <= acc_next;
      if (last) score[i*SW +: SW] <= acc_next;
    end
  end
endmodule
