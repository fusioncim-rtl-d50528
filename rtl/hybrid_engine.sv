// hybrid_engine: one FusionCIM hybrid engine (HE), QO-stationary attention.
//
// An HE keeps one query block stationary in its IP-CIM macro and the matching
// output block stationary in its OP-CIM macro, and streams the key/value
// vectors of the tiles it is sent through a three-stage vector pipeline:
//
//   stage 1  IP-CIM   s = Q k^T        8 bit-serial cycles per key vector
//   stage 2  SoftMax  p = exp(s - m)   8 Taylor iterations, running max/sum
//   stage 3  OP-CIM   O = a*O + p v^T  8 bit-serial cycles per value vector
//
// so a new KV vector can enter every eight clocks and three vectors are in
// flight.  Tiles arrive from the on-chip network into the local kv_buffer;
// the intra_tile_scheduler issues each tile's keys in reverse order.  The K
// vector is read when the key enters stage 1, the V vector of the same token
// when it enters stage 3.  Small FIFOs carry each vector's tags (key index,
// slot, diagonal flag, last flag) to the stages that need them: the softmax
// for the causal mask, the OP-CIM for the V read and the slot release.
//
// Interface: network input (in_valid/in_ready; a FLIT_Q flit writes one query
// row `in_idx` of bank word `in_word`, a FLIT_KV flit one K/V pair of tile
// `in_tile`); per-pass configuration (q_tile = this HE's query tile number,
// blk = bank word in use, ssh = score scaling shift, qsh = output quantiser
// shift) and `pass_start`, which empties the softmax state; `idle`; counters of
// processed vectors and of output rescale events; and a read-out port giving
// row rd_row of O (bank word blk) and the row sum l of that row.
//
// The three macros, the vector and bit-level pipeline and the reverse-order
// scheduling follow the paper.  Tag FIFOs, the pass protocol, read-out and
// counters are this design's own.
module hybrid_engine
  import fusioncim_pkg::*;
#(
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 128,
  parameter int unsigned BANK_WORDS = 4,
  parameter int unsigned TIW        = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // on-chip network input
  input  logic                          in_valid,
  output logic                          in_ready,
  input  flit_kind_e                    in_kind,
  input  logic [TIW-1:0]                in_tile,
  input  logic [$clog2(ROWS)-1:0]       in_idx,
  input  logic [$clog2(BANK_WORDS)-1:0] in_word,
  input  logic                          in_last,
  input  logic [COLS*QW-1:0]            in_k,
  input  logic [COLS*QW-1:0]            in_v,
  // pass configuration
  input  logic [TIW-1:0]                q_tile,
  input  logic [$clog2(BANK_WORDS)-1:0] blk,
  input  logic [4:0]                    ssh,
  input  logic [3:0]                    qsh,
  input  logic                          pass_start,
  // status
  output logic                          idle,
  output logic [31:0]                   vec_cnt,
  output logic [31:0]                   rescale_cnt,
  // read-out
  input  logic [$clog2(ROWS)-1:0]       rd_row,
  output logic [COLS*OW-1:0]            rd_o,
  output logic [LW-1:0]                 rd_l
);
  localparam int unsigned SW  = 2 * QW + $clog2(COLS);
  localparam int unsigned RIW = $clog2(ROWS);

  typedef struct packed {
    logic [RIW-1:0] idx;
    logic           slot;
    logic           diag;
    logic           last;
  } tag_t;

  // tags travelling with a key from its issue to the later stages
  // (the softmax stage needs only the key index and the diagonal flag, the
  // OP-CIM stage only the key index, slot and last flag)
  typedef struct packed {
    logic [RIW-1:0] idx;
    logic           diag;
  } sm_tag_t;
  typedef struct packed {
    logic [RIW-1:0] idx;
    logic           slot;
    logic           last;
  } op_tag_t;
  sm_tag_t sm_tag;
  op_tag_t op_tag;
  logic sm_tag_empty, op_tag_empty, sm_tag_full, op_tag_full;

  // ---------------- network input and KV buffer ----------------
  logic kv_wr_ready;
  logic [1:0] fresh, full;
  logic [2*TIW-1:0] slot_tag;
  logic take, take_slot;
  logic release_en, release_slot;
  logic [COLS*QW-1:0] k_data, v_data;

  assign in_ready = (in_kind == FLIT_Q) ? 1'b1 : kv_wr_ready;

  // ---------------- intra-tile scheduler ----------------
  logic ip_ready, issue, sched_active;
  tag_t issue_tag;

  kv_buffer #(.TILE(ROWS), .COLS(COLS), .VW(QW), .SLOTS(2), .TIW(TIW)) u_kvbuf (
    .clk(clk), .rst_n(rst_n),
    .wr_valid(in_valid && in_kind == FLIT_KV), .wr_ready(kv_wr_ready),
    .wr_idx(in_idx), .wr_last(in_last), .wr_tile(in_tile), .wr_k(in_k), .wr_v(in_v),
    .fresh(fresh), .full(full), .tag(slot_tag),
    .take(take), .take_slot(take_slot),
    .release_en(release_en), .release_slot(release_slot),
    .k_slot(issue_tag.slot), .k_idx(issue_tag.idx), .k_data(k_data),
    .v_slot(op_tag.slot), .v_idx(op_tag.idx), .v_data(v_data)
  );

  intra_tile_scheduler #(.TILE(ROWS), .SLOTS(2), .TIW(TIW)) u_sched (
    .clk(clk), .rst_n(rst_n), .q_tile(q_tile), .fresh(fresh), .tag(slot_tag),
    .take(take), .take_slot(take_slot), .ip_ready(ip_ready), .issue(issue),
    .key_idx(issue_tag.idx), .slot(issue_tag.slot), .diag(issue_tag.diag),
    .last(issue_tag.last), .active(sched_active)
  );

  // ---------------- stage 1: IP-CIM ----------------
  logic              score_valid, ip_busy;
  logic [ROWS*SW-1:0] score;

  ip_cim_macro #(.ROWS(ROWS), .COLS(COLS), .BANK_WORDS(BANK_WORDS), .KW(QW), .SW(SW)) u_ip (
    .clk(clk), .rst_n(rst_n),
    .q_wr_en(in_valid && in_kind == FLIT_Q), .q_wr_row(in_idx), .q_wr_word(in_word),
    .q_wr_data(in_k), .blk(blk),
    .start(issue), .k_vec(k_data), .ready(ip_ready), .busy(ip_busy),
    .score_valid(score_valid), .score(score)
  );

  // tags from key issue to softmax start, and from key issue to OP-CIM start

  sync_fifo #(.W($bits(sm_tag_t)), .DEPTH(2)) u_sm_tags (
    .clk(clk), .rst_n(rst_n), .push(issue), .wr_data({issue_tag.idx, issue_tag.diag}),
    .pop(score_valid), .rd_data(sm_tag), .empty(sm_tag_empty), .full(sm_tag_full));

  // ---------------- stage 2: SoftMax ----------------
  logic               sm_valid;
  logic [ROWS*PW-1:0] p, alpha;
  logic [ROWS-1:0]    rescale;
  logic [$clog2(ROWS+1)-1:0] n_rescale;
  logic [ROWS*LW-1:0] l_all;

  softmax_macro #(.ROWS(ROWS), .SW(SW)) u_sm (
    .clk(clk), .rst_n(rst_n), .clear(pass_start), .start(score_valid), .score(score),
    .diag(sm_tag.diag), .key_idx(sm_tag.idx), .ssh(ssh),
    .out_valid(sm_valid), .p(p), .alpha(alpha), .rescale(rescale),
    .n_rescale(n_rescale), .l(l_all)
  );

  sync_fifo #(.W($bits(op_tag_t)), .DEPTH(4)) u_op_tags (
    .clk(clk), .rst_n(rst_n), .push(issue), .wr_data({issue_tag.idx, issue_tag.slot, issue_tag.last}),
    .pop(sm_valid), .rd_data(op_tag), .empty(op_tag_empty), .full(op_tag_full));

  // ---------------- stage 3: OP-CIM ----------------
  logic op_ready, op_busy, op_done;

  op_cim_macro #(.ROWS(ROWS), .COLS(COLS), .BANK_WORDS(BANK_WORDS), .OW(OW), .PW(PW), .VW(QW)) u_op (
    .clk(clk), .rst_n(rst_n), .blk(blk), .qsh(qsh),
    .start(sm_valid), .p(p), .alpha(alpha), .rescale(rescale), .v_vec(v_data),
    .ready(op_ready), .busy(op_busy), .done(op_done),
    .rd_row(rd_row), .rd_word(blk), .rd_data(rd_o)
  );

  assign release_en   = sm_valid && op_tag.last;
  assign release_slot = op_tag.slot;
  assign rd_l         = l_all[rd_row*LW +: LW];

  assign idle = (full == '0) && !sched_active && !ip_busy && op_tag_empty && !op_busy && !op_done;

  always_ff @(posedge clk) begin
    if (!rst_n || pass_start) begin
      vec_cnt     <= '0;
      rescale_cnt <= '0;
    end else begin
      if (op_done)  vec_cnt     <= vec_cnt + 1;
      if (sm_valid) rescale_cnt <= rescale_cnt + 32'(n_rescale);
    end
  end

  // every stage has the same period, so a stage is always ready for the next
  a_op_ready: assert property (@(posedge clk) disable iff (!rst_n) sm_valid |-> op_ready);
  a_sm_tag:   assert property (@(posedge clk) disable iff (!rst_n) score_valid |-> !sm_tag_empty);
  a_tag_room: assert property (@(posedge clk) disable iff (!rst_n) issue |-> !sm_tag_full && !op_tag_full);
  a_op_tag:   assert property (@(posedge clk) disable iff (!rst_n) sm_valid |-> !op_tag_empty);
endmodule
