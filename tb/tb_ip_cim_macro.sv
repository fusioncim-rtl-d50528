// tb_ip_cim_macro: loads random signed query tiles into two bank words of a
// reduced 8 x 16 IP-CIM macro, streams 40 random key vectors back to back and
// checks every score against the dot product worked out here, with both bank
// words.  It also checks the rate (one vector every 8 clocks) and the
// latency (score_valid 8 clocks after the start edge).
module tb_ip_cim_macro;
  localparam int ROWS = 8, COLS = 16, KW = 8, BW = 4;
  localparam int SW = 2 * KW + $clog2(COLS);
  logic clk = 0, rst_n = 0;
  logic q_wr_en = 0;
  logic [$clog2(ROWS)-1:0] q_wr_row;
  logic [1:0] q_wr_word, blk;
  logic [COLS*KW-1:0] q_wr_data, k_vec;
  logic start = 0, ready, busy, score_valid;
  logic [ROWS*SW-1:0] score;
  int checks = 0, failures = 0;

  logic signed [7:0] q [BW][ROWS][COLS];
  logic signed [7:0] kq [$][COLS];
  int start_cycle [$];

  ip_cim_macro #(.ROWS(ROWS), .COLS(COLS), .BANK_WORDS(BW), .KW(KW)) dut (.*);

  always #5 clk = ~clk;
  // clock edge index: posedge k is at time 10k+5; at the negedge before it, $time/10 is k
  function automatic int now(); return int'($time / 10); endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: compare each result with the reference dot products
  always @(posedge clk) begin
    if (rst_n && score_valid) begin
      logic signed [7:0] kv [COLS];
      int sc;
      kv = kq[0]; kq.delete(0);
      sc = start_cycle.pop_front();
      checks++;
      if (now() - sc != 9) begin
        failures++;
        $display("FAIL latency %0d", now() - sc);
      end
      for (int i = 0; i < ROWS; i++) begin
        int r;
        r = 0;
        for (int j = 0; j < COLS; j++) r += int'(q[blk][i][j]) * int'(kv[j]);
        checks++;
        if (int'(signed'(score[i*SW +: SW])) != r) begin
          failures++;
          $display("FAIL row %0d score %0d expected %0d", i, signed'(score[i*SW +: SW]), r);
        end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 2; w++)
      for (int i = 0; i < ROWS; i++) begin
        @(negedge clk);
        q_wr_en = 1; q_wr_row = 3'(i); q_wr_word = 2'(w);
        for (int j = 0; j < COLS; j++) begin
          q[w][i][j] = 8'($urandom);
          if (i == 0 && w == 0) q[w][i][j] = -8'sd128;  // extreme values
          q_wr_data[j*8 +: 8] = q[w][i][j];
        end
      end
    @(negedge clk); q_wr_en = 0;
    for (int w = 0; w < 2; w++) begin
      blk = 2'(w);
      for (int t = 0; t < 20; t++) begin
        logic signed [7:0] kv [COLS];
        for (int j = 0; j < COLS; j++) begin
          kv[j] = 8'($urandom);
          if (t == 0) kv[j] = -8'sd128;
          k_vec[j*8 +: 8] = kv[j];
        end
        // wait until the macro accepts
        while (!ready) @(negedge clk);
        start = 1;
        kq.push_back(kv);
        start_cycle.push_back(now());
        @(negedge clk);
        start = 0;
        if (t > 0) begin
          // back to back: the next vector must be accepted 8 clocks later
          checks++;
          if (start_cycle.size() > 1 && start_cycle[$] - start_cycle[$-1] != 8) failures++;
        end
        repeat (7) @(negedge clk);
      end
      while (busy || kq.size() > 0) @(negedge clk);
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
