// tb_hybrid_engine: one reduced hybrid engine (8 x 8 macros, 8-vector tiles)
// runs two attention passes end to end.
//   pass 1: query tile 2 in bank word 0; KV tiles 2 (diagonal), 1, 0 arrive
//           as the top scheduler would send them, with random gaps.
//   pass 2: query tile 0 in bank word 1; only its diagonal tile.
// After each pass every row is read out: O*2^qsh/l must match the softmax-
// weighted average of V from the floating-point reference within 2.0 (V is in
// [-32, 31]), l must match the softmax denominator within 3 %, and the
// number of output rescale events must equal the reference count for the
// reverse (diagonal-first) order exactly.  The vector count and the rate
// (eight clocks per key once the pipeline is full) are checked too, and
// pass 1's results must survive pass 2 in the other bank word.
module tb_hybrid_engine;
  import fusioncim_pkg::*;
  localparam int ROWS = 8, COLS = 8, TIW = 8, SSH = 5, QSH = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  flit_kind_e in_kind;
  logic [TIW-1:0] in_tile, q_tile;
  logic [2:0] in_idx, rd_row;
  logic [1:0] in_word, blk;
  logic [COLS*QW-1:0] in_k, in_v;
  logic [4:0] ssh = 5'(SSH);
  logic [3:0] qsh = 4'(QSH);
  logic pass_start = 0, idle;
  logic [31:0] vec_cnt, rescale_cnt;
  logic [COLS*OW-1:0] rd_o;
  logic [LW-1:0] rd_l;
  int checks = 0, failures = 0;
  int qm [2][ROWS][COLS];
  real keep_avg [ROWS][COLS];

  hybrid_engine #(.ROWS(ROWS), .COLS(COLS), .BANK_WORDS(4), .TIW(TIW)) dut (.*);
  always #5 clk = ~clk;
  function automatic int now(); return int'($time / 10); endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(flit_kind_e k, int tile, int idx, int word, bit lst, logic [COLS*QW-1:0] kd, logic [COLS*QW-1:0] vd);
    in_valid = 1; in_kind = k; in_tile = TIW'(tile); in_idx = 3'(idx); in_word = 2'(word);
    in_last = lst; in_k = kd; in_v = vd;
    #1 while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic send_tile(int t);
    logic [COLS*QW-1:0] kd, vd;
    for (int j = 0; j < ROWS; j++) begin
      int a = t * ROWS + j;
      for (int c = 0; c < COLS; c++) begin
        kd[c*8 +: 8] = 8'(tb_kv_pkg::kv_elem(a, c, 1'b0));
        vd[c*8 +: 8] = 8'(tb_kv_pkg::kv_elem(a, c, 1'b1));
      end
      send(FLIT_KV, t, j, 0, j == ROWS - 1, kd, vd);
      if ($urandom % 3 == 0) @(negedge clk);
    end
  endtask

  // reference for pass with query tile qt (bank word w) and check read-out
  task automatic check_pass(int w, int qt, int exp_events, output int events_total);
    events_total = 0;
    for (int i = 0; i < ROWS; i++) begin
      int qrow [] = new[COLS];
      int tok [$];
      bit mk [$];
      real avg [], lsum, got, lgot;
      int ev;
      foreach (qrow[c]) qrow[c] = qm[w][i][c];
      for (int t = qt; t >= 0; t--)
        for (int j = ROWS - 1; j >= 0; j--) begin
          tok.push_back(t * ROWS + j);
          mk.push_back(t == qt && j > i);
        end
      tb_attn_pkg::ref_row(qrow, tok, mk, SSH, avg, lsum, ev);
      events_total += ev;
      rd_row = 3'(i);
      #1;
      lgot = real'(rd_l);
      checks++;
      if (lgot > lsum * 1.03 + 2 || lgot < lsum * 0.97 - 2) begin
        failures++; $display("FAIL row %0d l=%0f expected %0f", i, lgot, lsum);
      end
      for (int c = 0; c < COLS; c++) begin
        got = real'(signed'(rd_o[c*OW +: OW])) * (2.0 ** QSH) / lgot;
        if (w == 0) keep_avg[i][c] = avg[c];
        checks++;
        if (got - avg[c] > 2.0 || avg[c] - got > 2.0) begin
          failures++; $display("FAIL row %0d col %0d: %f expected %f", i, c, got, avg[c]);
        end
      end
    end
  endtask

  initial begin
    int ev, t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load two query tiles into bank words 0 and 1
    for (int w = 0; w < 2; w++)
      for (int i = 0; i < ROWS; i++) begin
        logic [COLS*QW-1:0] qd;
        for (int c = 0; c < COLS; c++) begin
          qm[w][i][c] = int'($urandom % 32) - 16;
          qd[c*8 +: 8] = 8'(qm[w][i][c]);
        end
        send(FLIT_Q, 0, i, w, 0, qd, '0);
      end
    // ---- pass 1 ----
    q_tile = 8'd2; blk = 2'd0;
    @(negedge clk); pass_start = 1; @(negedge clk); pass_start = 0;
    t0 = now();
    send_tile(2);
    send_tile(1);
    send_tile(0);
    #1 while (!idle) begin @(negedge clk); #1; end
    t1 = now();
    check_pass(0, 2, 0, ev);
    checks += 2;
    if (int'(vec_cnt) != 3 * ROWS) begin failures++; $display("FAIL vec_cnt %0d", vec_cnt); end
    if (int'(rescale_cnt) != ev) begin failures++; $display("FAIL rescales %0d expected %0d", rescale_cnt, ev); end
    // 24 keys at 8 clocks each, plus loading of the first tile and pipeline fill
    checks++;
    if (t1 - t0 > 3 * ROWS * 8 + 2 * ROWS + 40) begin failures++; $display("FAIL pass took %0d clocks", t1 - t0); end
    $display("pass 1: %0d clocks, %0d vectors, %0d rescale events", t1 - t0, vec_cnt, rescale_cnt);
    // ---- pass 2 ----
    q_tile = 8'd0; blk = 2'd1;
    @(negedge clk); pass_start = 1; @(negedge clk); pass_start = 0;
    send_tile(0);
    #1 while (!idle) begin @(negedge clk); #1; end
    check_pass(1, 0, 0, ev);
    checks += 2;
    if (int'(vec_cnt) != ROWS) begin failures++; $display("FAIL pass 2 vec_cnt %0d", vec_cnt); end
    if (int'(rescale_cnt) != ev) begin failures++; $display("FAIL rescales %0d expected %0d", rescale_cnt, ev); end
    // pass 1 output still in bank word 0 (l is per pass, so compare shape only)
    blk = 2'd0;
    rd_row = 3'd7;
    #1;
    checks++;
    begin
      longint o0;
      o0 = longint'(signed'(rd_o[15:0]));
      if ((o0 > 0) != (keep_avg[7][0] > 0) && (keep_avg[7][0] > 1.0 || keep_avg[7][0] < -1.0)) begin
        failures++; $display("FAIL kept output %0d vs %f", o0, keep_avg[7][0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
