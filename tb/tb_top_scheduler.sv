// tb_top_scheduler: a 4-engine scheduler with 4-vector tiles and a global
// buffer of only two tile slots, so prefetch must wait for slots to free and
// streaming must wait for prefetch.  The environment models the memory
// controller (jobs finish after a random delay, in order), the buffer (data
// word = tile*256 + index of whatever tile was fetched into that slot), the
// network (random ready) and the engines (busy for a while after the last
// flit).  Checked: query flits, the descending tile order T-1 .. 0, the
// destination mask of each tile (engines whose query tile q0+h >= t), the
// vector order and last flag inside a tile, the data, and the stall counters.
module tb_top_scheduler;
  localparam int N = 4, ROWS = 4, COLS = 4, BANKW = 4, TIW = 8, GBD = 8, AW = 32;
  localparam int PLW = 1 + TIW + 2 + 2 + 1 + 2 * COLS * 8;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, pass_start, done;
  logic [TIW-1:0] cmd_q0;
  logic [AW-1:0] cmd_kv_base;
  logic qw_valid = 0, qw_ready;
  logic [1:0] qw_he, qw_row, qw_word;
  logic [COLS*8-1:0] qw_data;
  logic job_valid, job_ready, job_done;
  logic [AW-1:0] job_dram_addr;
  logic [2:0] job_gb_addr;
  logic [15:0] job_count;
  logic gb_rd_en;
  logic [2:0] gb_rd_addr;
  logic [2*COLS*8-1:0] gb_rd_data;
  logic noc_valid, noc_ready, noc_empty;
  logic [N-1:0] noc_dest, he_idle;
  logic [PLW-1:0] noc_payload;
  logic [31:0] stall_prefetch, stall_noc, tiles_sent;
  int checks = 0, failures = 0;

  top_scheduler #(.N_HE(N), .ROWS(ROWS), .COLS(COLS), .BANKW(BANKW), .TIW(TIW),
                  .GB_DEPTH(GBD), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- memory-controller model ----
  int slot_tile [2];
  int job_q [$];       // finish times
  int job_tiles [$];
  int cyc = 0;
  int fetched [$];
  assign job_ready = 1'b1;
  always @(posedge clk) begin
    cyc++;
    job_done <= 1'b0;
    if (job_valid && job_ready) begin
      int t;
      t = int'(job_dram_addr - cmd_kv_base) / ROWS;
      fetched.push_back(t);
      slot_tile[job_gb_addr / ROWS] = t;
      job_q.push_back(((job_q.size() > 0) ? job_q[$] : cyc) + 10 + $urandom % 40);
    end
    if (job_q.size() > 0 && job_q[0] <= cyc) begin
      job_done <= 1'b1;
      void'(job_q.pop_front());
    end
    if (gb_rd_en) gb_rd_data <= (2*COLS*8)'(slot_tile[gb_rd_addr / ROWS] * 256 + gb_rd_addr % ROWS);
  end

  // ---- network / engine model ----
  int last_flit = 0;
  always @(negedge clk) noc_ready = ($urandom % 3) != 0;
  assign noc_empty = 1'b1;
  always @(posedge clk) he_idle <= (cyc - last_flit > 30) ? '1 : '0;

  int exp_tile, exp_idx, q0;
  int n_q = 0;
  always @(posedge clk) begin
    if (rst_n && noc_valid && noc_ready) begin
      logic kind; logic [TIW-1:0] tile; logic [1:0] idx, word; logic lst; logic [2*COLS*8-1:0] data;
      {kind, tile, idx, word, lst, data} = noc_payload;
      last_flit = cyc;
      if (kind) begin
        n_q++;
        checks++;
        if (noc_dest != N'(1) << qw_he_last || data[COLS*8-1:0] != qw_data_last) failures++;
      end else begin
        logic [N-1:0] md;
        for (int h = 0; h < N; h++) md[h] = (q0 + h) >= exp_tile;
        checks += 4;
        if (int'(tile) != exp_tile) begin failures++; $display("FAIL tile %0d expected %0d", tile, exp_tile); end
        if (int'(idx) != exp_idx) begin failures++; $display("FAIL idx %0d expected %0d", idx, exp_idx); end
        if (noc_dest != md) begin failures++; $display("FAIL dest %b expected %b", noc_dest, md); end
        if (data != (2*COLS*8)'(exp_tile * 256 + exp_idx) || lst != (exp_idx == ROWS - 1)) begin
          failures++; $display("FAIL data %h", data);
        end
        if (exp_idx == ROWS - 1) begin exp_idx = 0; exp_tile--; end
        else exp_idx++;
      end
    end
  end

  logic [1:0] qw_he_last;
  logic [COLS*8-1:0] qw_data_last;

  initial begin
    int n_done;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // two query rows
    for (int i = 0; i < 2; i++) begin
      qw_valid = 1; qw_he = 2'(i + 1); qw_row = 2'(i); qw_word = 0; qw_data = $urandom;
      qw_he_last = qw_he; qw_data_last = qw_data;
      #1 while (!qw_ready) begin @(negedge clk); #1; end
      @(negedge clk); qw_valid = 0;
      repeat (4) @(negedge clk);
    end
    // two passes: q0 = 0 (tiles 3..0) and q0 = 2 (tiles 5..0)
    for (int pass = 0; pass < 2; pass++) begin
      q0 = pass * 2;
      exp_tile = q0 + N - 1; exp_idx = 0;
      cmd_valid = 1; cmd_q0 = TIW'(q0); cmd_kv_base = 32'd1000;
      #1 while (!cmd_ready) begin @(negedge clk); #1; end
      @(negedge clk); cmd_valid = 0;
      n_done = 0;
      while (!done) @(negedge clk);
      checks += 3;
      if (exp_tile != -1) begin failures++; $display("FAIL tiles left, next %0d", exp_tile); end
      if (int'(tiles_sent) != q0 + N) failures++;
      if (stall_prefetch == 0 || stall_noc == 0) begin
        failures++; $display("FAIL no stall seen: prefetch %0d noc %0d", stall_prefetch, stall_noc);
      end
      $display("pass q0=%0d: %0d tiles, prefetch stall %0d, network stall %0d",
               q0, tiles_sent, stall_prefetch, stall_noc);
    end
    checks++;
    if (n_q != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
