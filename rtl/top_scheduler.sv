// top_scheduler: inter-tile pattern-aware scheduler of the accelerator.
//
// A pass gives engine h the query tile q0+h (q0 = cmd_q0).  Causal attention
// then needs, for engine h, KV tiles 0 .. q0+h.  The scheduler walks the KV
// tiles from the highest, T-1 = q0+N_HE-1, down to 0 and broadcasts tile t
// to every engine whose query tile is t or later.  At step 0 only the last
// engine receives a tile (its diagonal one); at each further step one more
// engine joins, each starting on its own diagonal tile, until the step that
// sends KV0 to all.  Every engine therefore sees its diagonal tile first and
// then tiles further from the diagonal, which, with the reverse key order
// inside a tile, lets the running row maximum settle early.
//
// Prefetch: tiles are fetched from DRAM through the memory controller into a
// ring of GB_SLOTS tile slots of the global buffer, in the same descending
// order, as far ahead as free slots allow.  A step whose tile has not arrived
// yet waits (stall_prefetch counts those cycles); a flit the network cannot
// take because an engine's KV buffer is full waits too (stall_noc).
//
// Streaming: each tile is read from the global buffer one pair per two
// clocks (synchronous read, then network hand-off) and sent as FLIT_KV flits.
// Before a pass, while idle, the host can send query rows (FLIT_Q, one engine
// each) through qw_*.  `done` pulses when all tiles are sent and every engine
// is idle again.
//
// The staggered diagonal-first tile order is the paper's (Fig. 5); prefetch
// ring, stall accounting, pass command and the query-load path are this
// design's own.
module top_scheduler
  import fusioncim_pkg::*;
#(
  parameter int unsigned N_HE     = 16,
  parameter int unsigned ROWS     = 128,
  parameter int unsigned COLS     = 128,
  parameter int unsigned BANKW    = 4,
  parameter int unsigned TIW      = 8,
  parameter int unsigned GB_DEPTH = 4096,
  parameter int unsigned AW       = 32,
  parameter int unsigned PLW      = 1 + TIW + $clog2(ROWS) + $clog2(BANKW) + 1 + 2*COLS*QW
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // pass command
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  logic [TIW-1:0]              cmd_q0,
  input  logic [AW-1:0]               cmd_kv_base,
  output logic                        pass_start,
  output logic                        done,
  // query rows from the host
  input  logic                        qw_valid,
  output logic                        qw_ready,
  input  logic [$clog2(N_HE)-1:0]     qw_he,
  input  logic [$clog2(ROWS)-1:0]     qw_row,
  input  logic [$clog2(BANKW)-1:0]    qw_word,
  input  logic [COLS*QW-1:0]          qw_data,
  // memory controller jobs
  output logic                        job_valid,
  input  logic                        job_ready,
  output logic [AW-1:0]               job_dram_addr,
  output logic [$clog2(GB_DEPTH)-1:0] job_gb_addr,
  output logic [15:0]                 job_count,
  input  logic                        job_done,
  // global buffer read port
  output logic                        gb_rd_en,
  output logic [$clog2(GB_DEPTH)-1:0] gb_rd_addr,
  input  logic [2*COLS*QW-1:0]        gb_rd_data,
  // network input
  output logic                        noc_valid,
  input  logic                        noc_ready,
  output logic [N_HE-1:0]             noc_dest,
  output logic [PLW-1:0]              noc_payload,
  input  logic                        noc_empty,
  input  logic [N_HE-1:0]             he_idle,
  // statistics
  output logic [31:0]                 stall_prefetch,
  output logic [31:0]                 stall_noc,
  output logic [31:0]                 tiles_sent
);
  localparam int unsigned GB_SLOTS = GB_DEPTH / ROWS;
  localparam int unsigned SLW      = (GB_SLOTS > 1) ? $clog2(GB_SLOTS) : 1;
  localparam int unsigned RIW      = $clog2(ROWS);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [TIW-1:0]      q0;
  logic [AW-1:0]       kv_base;
  logic [TIW:0]        n_tiles;        // T = q0 + N_HE
  logic [TIW:0]        fetch_n, cons_n, done_n;   // tiles requested / consumed / arrived
  logic [SLW-1:0]      fetch_slot, cons_slot;
  logic [RIW:0]        idx;            // next pair of the tile to read
  logic                rd_pend;        // global-buffer read in flight
  logic [RIW-1:0]      rd_idx;
  logic                fire;

  // tile numbers (descending) of the next fetch and of the tile being sent
  logic [TIW-1:0] fetch_tile, cons_tile;
  assign fetch_tile = TIW'(n_tiles - 1'b1 - fetch_n);
  assign cons_tile  = TIW'(n_tiles - 1'b1 - cons_n);

  // ---- prefetch ----
  assign job_valid     = (state == S_RUN) && (fetch_n < n_tiles) &&
                         ((fetch_n - cons_n) < (TIW+1)'(GB_SLOTS));
  assign job_dram_addr = kv_base + AW'(fetch_tile) * AW'(ROWS);
  assign job_gb_addr   = {fetch_slot, {RIW{1'b0}}};
  assign job_count     = 16'(ROWS);

  // ---- destination mask: engines whose query tile is at or after the tile ----
  logic [N_HE-1:0] kv_dest;
  always_comb begin
    for (int h = 0; h < N_HE; h++)
      kv_dest[h] = ((TIW+1)'(q0) + (TIW+1)'(h)) >= (TIW+1)'(cons_tile);
  end

  // ---- global-buffer read and network hand-off ----
  logic tile_ready, can_issue;
  assign fire       = noc_valid && noc_ready;
  assign tile_ready = (done_n > cons_n);
  assign can_issue  = (state == S_RUN) && (cons_n < n_tiles) && tile_ready &&
                      (idx < (RIW+1)'(ROWS)) && !rd_pend && (!noc_valid || fire);
  assign gb_rd_en   = can_issue;
  assign gb_rd_addr = {cons_slot, idx[RIW-1:0]};

  assign cmd_ready = (state == S_IDLE);
  assign qw_ready  = (state == S_IDLE) && (!noc_valid || fire);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      noc_valid      <= 1'b0;
      rd_pend        <= 1'b0;
      pass_start     <= 1'b0;
      done           <= 1'b0;
      fetch_n        <= '0;
      cons_n         <= '0;
      done_n         <= '0;
      fetch_slot     <= '0;
      cons_slot      <= '0;
      idx            <= '0;
      n_tiles        <= '0;
      q0             <= '0;
      kv_base        <= '0;
      stall_prefetch <= '0;
      stall_noc      <= '0;
      tiles_sent     <= '0;
    end else begin
      pass_start <= 1'b0;
      done       <= 1'b0;
      if (fire) noc_valid <= 1'b0;
      if (job_done) done_n <= done_n + 1'b1;
      if (job_valid && job_ready) begin
        fetch_n    <= fetch_n + 1'b1;
        fetch_slot <= (fetch_slot == SLW'(GB_SLOTS - 1)) ? '0 : fetch_slot + 1'b1;
      end

      unique case (state)
        S_IDLE: begin
          if (qw_valid && qw_ready) begin
            noc_valid   <= 1'b1;
            noc_dest    <= N_HE'(1) << qw_he;
            noc_payload <= {FLIT_Q, TIW'(0), qw_row, qw_word, 1'b0, {COLS*QW{1'b0}}, qw_data};
          end else if (cmd_valid) begin
            state          <= S_RUN;
            q0             <= cmd_q0;
            kv_base        <= cmd_kv_base;
            n_tiles        <= (TIW+1)'(cmd_q0) + (TIW+1)'(N_HE);
            fetch_n        <= '0;
            cons_n         <= '0;
            done_n         <= '0;
            fetch_slot     <= '0;
            cons_slot      <= '0;
            idx            <= '0;
            pass_start     <= 1'b1;
            stall_prefetch <= '0;
            stall_noc      <= '0;
            tiles_sent     <= '0;
          end
        end
        S_RUN: begin
          if (cons_n < n_tiles && !tile_ready) stall_prefetch <= stall_prefetch + 1;
          if (noc_valid && !noc_ready) stall_noc <= stall_noc + 1;
          if (can_issue) begin
            idx     <= idx + 1'b1;
            rd_idx  <= idx[RIW-1:0];
          end
          rd_pend <= can_issue;
          if (rd_pend) begin
            noc_valid   <= 1'b1;
            noc_dest    <= kv_dest;
            noc_payload <= {FLIT_KV, cons_tile, rd_idx, {$clog2(BANKW){1'b0}},
                            (rd_idx == RIW'(ROWS - 1)), gb_rd_data};
            if (rd_idx == RIW'(ROWS - 1)) begin
              // last pair of the tile read: free its slot, move to the next tile
              cons_n     <= cons_n + 1'b1;
              cons_slot  <= (cons_slot == SLW'(GB_SLOTS - 1)) ? '0 : cons_slot + 1'b1;
              tiles_sent <= tiles_sent + 1;
              idx        <= '0;
              if (cons_n + 1'b1 == n_tiles) state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: begin
          if (!noc_valid && noc_empty && (&he_idle)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
