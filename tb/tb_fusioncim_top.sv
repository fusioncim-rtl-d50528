// tb_fusioncim_top: end-to-end test of a reduced accelerator (4 hybrid
// engines with 8 x 8 macros, so 8-vector tiles, a 2-tile global buffer and a
// 64-bit DRAM port) against a behavioural DRAM with random back-pressure.
//   pass A: query tiles 2..5 in bank word 0, KV tiles 0..5 (6 tiles through
//           a 2-slot buffer ring, so prefetch has to wait for free slots).
//   pass B: query tiles 0..3 in bank word 1 with new queries.
// After each pass every row of every engine is read out: O*2^qsh/l must match
// the floating-point softmax-weighted average of V within 2.0 (V in
// [-32, 31]), l the softmax denominator within 3 %, and the rescale counter
// the reference count for the diagonal-first reverse order exactly; the
// vector counter must equal the number of (query tile, key) pairs.  The pass
// time is checked against the pipeline rate (8 clocks per key) plus a margin
// for DRAM stalls.  Pass A's output must survive pass B in bank word 0.
// Every mechanism is counted and the test fails if one never happened:
// prefetch stalls, NoC stalls, multicast flits, output rescales, masked
// keys, DRAM back-pressure and the bank-word switch.
module tb_fusioncim_top;
  import fusioncim_pkg::*;
  localparam int N_HE = 4, ROWS = 8, COLS = 8, GBD = 16, DRAMW = 64, TIW = 8, AW = 32;
  localparam int SSH = 5, QSH = 3;
  localparam int HW = $clog2(N_HE), RW = $clog2(ROWS);

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  logic [TIW-1:0] cmd_q0;
  logic [AW-1:0] cmd_kv_base = '0;
  logic [1:0] cfg_blk = 0;
  logic [4:0] cfg_ssh = 5'(SSH);
  logic [3:0] cfg_qsh = 4'(QSH);
  logic done;
  logic qw_valid = 0, qw_ready;
  logic [HW-1:0] qw_he;
  logic [RW-1:0] qw_row;
  logic [COLS*QW-1:0] qw_data;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  logic [AW-1:0] dram_req_addr;
  logic [DRAMW-1:0] dram_resp_data;
  logic [HW-1:0] rd_he = 0;
  logic [RW-1:0] rd_row = 0;
  logic [COLS*OW-1:0] rd_o;
  logic [LW-1:0] rd_l;
  logic [31:0] stat_vectors, stat_rescales, stat_stall_prefetch, stat_stall_noc, stat_tiles;

  int checks = 0, failures = 0;
  int n_multicast = 0, n_masked = 0, n_events = 0, n_prefetch_stall = 0, n_noc_stall = 0;
  int n_bank_switch = 0;
  int qm [2][N_HE][ROWS][COLS];
  logic [COLS*OW-1:0] keep_o [ROWS];

  fusioncim_top #(.N_HE(N_HE), .ROWS(ROWS), .COLS(COLS), .GB_DEPTH(GBD), .DRAMW(DRAMW),
                  .TIW(TIW), .AW(AW)) dut (.*);

  dram_model #(.COLS(COLS), .DRAM_W(DRAMW), .LAT(20), .AW(AW)) u_dram (
    .clk(clk), .rst_n(rst_n), .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_addr(dram_req_addr), .resp_valid(dram_resp_valid), .resp_data(dram_resp_data));

  always #5 clk = ~clk;
  function automatic int now(); return int'($time / 10); endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // multicast: one flit accepted by the network for more than one engine
  always @(posedge clk) begin
    if (rst_n && dut.noc_in_valid && dut.noc_in_ready && $countones(dut.noc_dest) > 1)
      n_multicast++;
  end

  task automatic load_queries(input int w);
    cfg_blk = 2'(w);
    for (int h = 0; h < N_HE; h++)
      for (int i = 0; i < ROWS; i++) begin
        for (int c = 0; c < COLS; c++) begin
          qm[w][h][i][c] = int'($urandom % 32) - 16;
          qw_data[c*8 +: 8] = 8'(qm[w][h][i][c]);
        end
        qw_he = HW'(h); qw_row = RW'(i); qw_valid = 1;
        while (!qw_ready) @(negedge clk);
        @(negedge clk);
        qw_valid = 0;
      end
    @(negedge clk);
  endtask

  task automatic run_pass(input int q0, output int clocks);
    int t0;
    cmd_q0 = TIW'(q0); cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    t0 = now();
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    clocks = now() - t0;
  endtask

  task automatic check_pass(input int w, input int q0);
    int ev_total, vec_total;
    ev_total = 0; vec_total = 0;
    for (int h = 0; h < N_HE; h++) begin
      int qt;
      qt = q0 + h;
      vec_total += (qt + 1) * ROWS;
      for (int i = 0; i < ROWS; i++) begin
        int qrow [];
        int tok [$];
        bit mk [$];
        real avg [], lsum, got, lgot;
        int ev;
        qrow = new[COLS];
        foreach (qrow[c]) qrow[c] = qm[w][h][i][c];
        for (int t = qt; t >= 0; t--)
          for (int j = ROWS - 1; j >= 0; j--) begin
            tok.push_back(t * ROWS + j);
            mk.push_back(t == qt && j > i);
            if (t == qt && j > i) n_masked++;
          end
        tb_attn_pkg::ref_row(qrow, tok, mk, SSH, avg, lsum, ev);
        ev_total += ev;
        rd_he = HW'(h); rd_row = RW'(i);
        #1;
        lgot = real'(rd_l);
        checks++;
        if (lgot > lsum * 1.03 + 2 || lgot < lsum * 0.97 - 2) begin
          failures++; $display("FAIL he %0d row %0d l=%0f expected %0f", h, i, lgot, lsum);
        end
        if (h == 0 && w == 0) keep_o[i] = rd_o;
        for (int c = 0; c < COLS; c++) begin
          got = real'(signed'(rd_o[c*OW +: OW])) * (2.0 ** QSH) / lgot;
          checks++;
          if (got - avg[c] > 2.0 || avg[c] - got > 2.0) begin
            failures++; $display("FAIL he %0d row %0d col %0d: %f expected %f", h, i, c, got, avg[c]);
          end
        end
      end
    end
    n_events += ev_total;
    checks += 2;
    if (int'(stat_rescales) != ev_total) begin
      failures++; $display("FAIL rescales %0d expected %0d", stat_rescales, ev_total);
    end
    if (int'(stat_vectors) != vec_total) begin
      failures++; $display("FAIL vectors %0d expected %0d", stat_vectors, vec_total);
    end
  endtask

  initial begin
    int clocks, bound;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- pass A ----
    load_queries(0);
    run_pass(2, clocks);
    @(negedge clk);
    n_prefetch_stall += int'(stat_stall_prefetch);
    n_noc_stall      += int'(stat_stall_noc);
    $display("pass A: %0d clocks, %0d vectors, %0d rescales, %0d tiles, prefetch stall %0d, NoC stall %0d",
             clocks, stat_vectors, stat_rescales, stat_tiles, stat_stall_prefetch, stat_stall_noc);
    check_pass(0, 2);
    // the last engine sees 6 tiles of 8 keys, 8 clocks each; allow for the
    // DRAM (2 beats per vector, random back-pressure, 20-clock latency)
    bound = (N_HE + 2) * ROWS * 8 * 3 + 300;
    checks++;
    if (clocks > bound || clocks < (N_HE + 2) * ROWS * 8) begin
      failures++; $display("FAIL pass A took %0d clocks", clocks);
    end
    checks++;
    if (int'(stat_tiles) != N_HE + 2) begin failures++; $display("FAIL tiles %0d", stat_tiles); end

    // ---- pass B: other bank word ----
    load_queries(1);
    n_bank_switch++;
    run_pass(0, clocks);
    @(negedge clk);
    n_prefetch_stall += int'(stat_stall_prefetch);
    n_noc_stall      += int'(stat_stall_noc);
    $display("pass B: %0d clocks, %0d vectors, %0d rescales, %0d tiles, prefetch stall %0d, NoC stall %0d",
             clocks, stat_vectors, stat_rescales, stat_tiles, stat_stall_prefetch, stat_stall_noc);
    check_pass(1, 0);
    checks++;
    if (clocks > N_HE * ROWS * 8 * 3 + 300) begin failures++; $display("FAIL pass B took %0d clocks", clocks); end

    // pass A's output is still in bank word 0 of engine 0
    cfg_blk = 2'd0;
    rd_he = '0;
    for (int i = 0; i < ROWS; i++) begin
      rd_row = RW'(i);
      #1;
      checks++;
      if (rd_o !== keep_o[i]) begin failures++; $display("FAIL bank word 0 row %0d changed", i); end
    end

    $display("mechanisms: prefetch stall %0d, NoC stall %0d, multicast %0d, rescale %0d, masked %0d, DRAM stall %0d, bank switch %0d",
             n_prefetch_stall, n_noc_stall, n_multicast, n_events, n_masked, u_dram.n_stall, n_bank_switch);
    checks++;
    if (n_prefetch_stall == 0 || n_noc_stall == 0 || n_multicast == 0 || n_events == 0 ||
        n_masked == 0 || u_dram.n_stall == 0 || n_bank_switch == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
