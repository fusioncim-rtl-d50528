// fusioncim_top: the FusionCIM attention accelerator.
//
// N_HE hybrid engines, each holding one query tile in its IP-CIM macro and the
// matching output tile in its OP-CIM macro, are fed with key/value tiles by
// the top scheduler over the on-chip network.  The tiles come from external
// DRAM through the memory controller, which prefetches them into the 1 MB
// global buffer.  One command (a "pass") computes causal attention for the
// query tiles q0 .. q0+N_HE-1 of one head against KV tiles 0 .. q0+N_HE-1:
// engine h ends with O_h = sum_t exp(s_t - m) v_t and the row sums l in its
// macros, which the host reads out and divides (O/l).
//
// Host interface (all plain signals):
//   cmd_*      start a pass: first query tile q0, DRAM pair address of KV0;
//              cfg_* are held stable during a pass (bank word, score shift,
//              output quantiser shift)
//   qw_*       write one query row into one engine's IP-CIM (while idle)
//   dram_*     read requests (beat addresses) and in-order responses
//   rd_*       read row rd_row of engine rd_he: O (COLS x 16 bit) and l
//   done       pulses at the end of a pass; counters report the vectors
//              processed, output rescale events and stall cycles.
//
// The block structure (memory controller, global buffer, top scheduler, NoC,
// 16 hybrid engines) is the paper's; the host interface is this design's own.
module fusioncim_top
  import fusioncim_pkg::*;
#(
  parameter int unsigned N_HE     = NUM_HE,
  parameter int unsigned ROWS     = ARRAY_ROWS,
  parameter int unsigned COLS     = ARRAY_COLS,
  parameter int unsigned BANKW    = BANK_DEPTH,
  parameter int unsigned GB_DEPTH = GB_WORDS,
  parameter int unsigned DRAMW    = DRAM_BEAT_W,
  parameter int unsigned TIW      = 8,
  parameter int unsigned AW       = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // pass command and configuration
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  logic [TIW-1:0]           cmd_q0,
  input  logic [AW-1:0]            cmd_kv_base,
  input  logic [$clog2(BANKW)-1:0] cfg_blk,
  input  logic [4:0]               cfg_ssh,
  input  logic [3:0]               cfg_qsh,
  output logic                     done,
  // query load
  input  logic                     qw_valid,
  output logic                     qw_ready,
  input  logic [$clog2(N_HE)-1:0]  qw_he,
  input  logic [$clog2(ROWS)-1:0]  qw_row,
  input  logic [COLS*QW-1:0]       qw_data,
  // external DRAM
  output logic                     dram_req_valid,
  input  logic                     dram_req_ready,
  output logic [AW-1:0]            dram_req_addr,
  input  logic                     dram_resp_valid,
  input  logic [DRAMW-1:0]         dram_resp_data,
  // read-out
  input  logic [$clog2(N_HE)-1:0]  rd_he,
  input  logic [$clog2(ROWS)-1:0]  rd_row,
  output logic [COLS*OW-1:0]       rd_o,
  output logic [LW-1:0]            rd_l,
  // statistics
  output logic [31:0]              stat_vectors,
  output logic [31:0]              stat_rescales,
  output logic [31:0]              stat_stall_prefetch,
  output logic [31:0]              stat_stall_noc,
  output logic [31:0]              stat_tiles
);
  localparam int unsigned KVW = 2 * COLS * QW;
  localparam int unsigned RIW = $clog2(ROWS);
  localparam int unsigned BW  = $clog2(BANKW);
  localparam int unsigned PLW = 1 + TIW + RIW + BW + 1 + KVW;

  // ---- memory controller and global buffer ----
  logic                        job_valid, job_ready, job_done;
  logic [AW-1:0]               job_dram_addr;
  logic [$clog2(GB_DEPTH)-1:0] job_gb_addr;
  logic [15:0]                 job_count;
  logic                        gb_wr_en, gb_rd_en;
  logic [$clog2(GB_DEPTH)-1:0] gb_wr_addr, gb_rd_addr;
  logic [KVW-1:0]              gb_wr_data, gb_rd_data;

  memory_controller #(.W(KVW), .DRAM_W(DRAMW), .GB_DEPTH(GB_DEPTH), .AW(AW)) u_mc (
    .clk(clk), .rst_n(rst_n),
    .job_valid(job_valid), .job_ready(job_ready), .job_dram_addr(job_dram_addr),
    .job_gb_addr(job_gb_addr), .job_count(job_count), .job_done(job_done),
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_addr(dram_req_addr),
    .resp_valid(dram_resp_valid), .resp_data(dram_resp_data),
    .gb_wr_en(gb_wr_en), .gb_wr_addr(gb_wr_addr), .gb_wr_data(gb_wr_data)
  );

  global_buffer #(.DEPTH(GB_DEPTH), .W(KVW)) u_gb (
    .clk(clk), .wr_en(gb_wr_en), .wr_addr(gb_wr_addr), .wr_data(gb_wr_data),
    .rd_en(gb_rd_en), .rd_addr(gb_rd_addr), .rd_data(gb_rd_data)
  );

  // ---- top scheduler and network ----
  logic            noc_in_valid, noc_in_ready, noc_empty, pass_start;
  logic [N_HE-1:0] noc_dest, he_valid, he_ready, he_idle;
  logic [PLW-1:0]  noc_in_payload, noc_out_payload;
  logic [TIW-1:0]  q0_reg;

  top_scheduler #(.N_HE(N_HE), .ROWS(ROWS), .COLS(COLS), .BANKW(BANKW), .TIW(TIW),
                  .GB_DEPTH(GB_DEPTH), .AW(AW), .PLW(PLW)) u_sched (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_q0(cmd_q0), .cmd_kv_base(cmd_kv_base),
    .pass_start(pass_start), .done(done),
    .qw_valid(qw_valid), .qw_ready(qw_ready), .qw_he(qw_he), .qw_row(qw_row),
    .qw_word(cfg_blk), .qw_data(qw_data),
    .job_valid(job_valid), .job_ready(job_ready), .job_dram_addr(job_dram_addr),
    .job_gb_addr(job_gb_addr), .job_count(job_count), .job_done(job_done),
    .gb_rd_en(gb_rd_en), .gb_rd_addr(gb_rd_addr), .gb_rd_data(gb_rd_data),
    .noc_valid(noc_in_valid), .noc_ready(noc_in_ready), .noc_dest(noc_dest),
    .noc_payload(noc_in_payload), .noc_empty(noc_empty), .he_idle(he_idle),
    .stall_prefetch(stat_stall_prefetch), .stall_noc(stat_stall_noc), .tiles_sent(stat_tiles)
  );

  noc #(.N_HE(N_HE), .PLW(PLW)) u_noc (
    .clk(clk), .rst_n(rst_n),
    .in_valid(noc_in_valid), .in_ready(noc_in_ready), .in_dest(noc_dest),
    .in_payload(noc_in_payload),
    .out_valid(he_valid), .out_ready(he_ready), .out_payload(noc_out_payload),
    .empty(noc_empty)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) q0_reg <= '0;
    else if (cmd_valid && cmd_ready) q0_reg <= cmd_q0;
  end

  // ---- flit fields ----
  flit_kind_e     f_kind;
  logic [TIW-1:0] f_tile;
  logic [RIW-1:0] f_idx;
  logic [BW-1:0]  f_word;
  logic           f_last;
  logic [KVW-1:0] f_data;
  assign {f_kind, f_tile, f_idx, f_word, f_last, f_data} = noc_out_payload;

  // ---- hybrid engines ----
  logic [COLS*OW-1:0] he_o [N_HE];
  logic [LW-1:0]      he_l [N_HE];
  logic [31:0]        he_vec [N_HE];
  logic [31:0]        he_resc [N_HE];

  for (genvar h = 0; h < N_HE; h++) begin : g_he
    hybrid_engine #(.ROWS(ROWS), .COLS(COLS), .BANK_WORDS(BANKW), .TIW(TIW)) u_he (
      .clk(clk), .rst_n(rst_n),
      .in_valid(he_valid[h]), .in_ready(he_ready[h]), .in_kind(f_kind), .in_tile(f_tile),
      .in_idx(f_idx), .in_word(f_word), .in_last(f_last),
      .in_k(f_data[COLS*QW-1:0]), .in_v(f_data[KVW-1:COLS*QW]),
      .q_tile(TIW'(q0_reg + TIW'(h))), .blk(cfg_blk), .ssh(cfg_ssh), .qsh(cfg_qsh),
      .pass_start(pass_start),
      .idle(he_idle[h]), .vec_cnt(he_vec[h]), .rescale_cnt(he_resc[h]),
      .rd_row(rd_row), .rd_o(he_o[h]), .rd_l(he_l[h])
    );
  end

  assign rd_o = he_o[rd_he];
  assign rd_l = he_l[rd_he];

  always_comb begin
    stat_vectors  = '0;
    stat_rescales = '0;
    for (int h = 0; h < N_HE; h++) begin
      stat_vectors  += he_vec[h];
      stat_rescales += he_resc[h];
    end
  end
endmodule
