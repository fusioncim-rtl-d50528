// tb_kv_buffer: fills both slots of a reduced (8-vector) KV buffer with random
// tiles written in scrambled order, checks the fresh/full flags, tile tags and
// that a third tile is refused (wr_ready low) until a slot is released, then
// reads every K and V vector back through both ports.
module tb_kv_buffer;
  localparam int TILE = 8, COLS = 4, VW = 8, TIW = 8;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, wr_last = 0;
  logic [2:0] wr_idx;
  logic [TIW-1:0] wr_tile;
  logic [COLS*VW-1:0] wr_k, wr_v, k_data, v_data;
  logic [1:0] fresh, full;
  logic [2*TIW-1:0] tag;
  logic take = 0, take_slot = 0, release_en = 0, release_slot = 0;
  logic k_slot = 0, v_slot = 0;
  logic [2:0] k_idx = 0, v_idx = 0;
  int checks = 0, failures = 0;
  logic [COLS*VW-1:0] kref [2][TILE], vref [2][TILE];

  kv_buffer #(.TILE(TILE), .COLS(COLS), .VW(VW), .SLOTS(2), .TIW(TIW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin failures++; $display("FAIL %s = %0d expected %0d", what, got, exp_v); end
  endtask

  task automatic send_tile(int slot, int tile);
    int order [TILE];
    foreach (order[i]) order[i] = i;
    order.shuffle();
    for (int n = 0; n < TILE; n++) begin
      @(negedge clk);
      wr_valid = 1; wr_idx = 3'(order[n]); wr_last = (n == TILE - 1); wr_tile = TIW'(tile);
      wr_k = $urandom; wr_v = $urandom;
      kref[slot][order[n]] = wr_k; vref[slot][order[n]] = wr_v;
      #1 chk("wr_ready", wr_ready, 1);
    end
    @(negedge clk); wr_valid = 0; wr_last = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("full after reset", full, 0);
    send_tile(0, 5);
    chk("fresh", fresh, 2'b01); chk("full", full, 2'b01); chk("tag0", tag[7:0], 5);
    send_tile(1, 4);
    chk("fresh", fresh, 2'b11); chk("full", full, 2'b11); chk("tag1", tag[15:8], 4);
    // third tile must wait
    wr_valid = 1; #1 chk("wr_ready while full", wr_ready, 0);
    wr_valid = 0;
    take = 1; take_slot = 0; @(negedge clk); take = 0;
    chk("fresh after take", fresh, 2'b10); chk("full after take", full, 2'b11);
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < TILE; i++) begin
        k_slot = s[0]; k_idx = 3'(i); v_slot = s[0]; v_idx = 3'(TILE - 1 - i);
        #1;
        chk("k", k_data, kref[s][i]);
        chk("v", v_data, vref[s][TILE-1-i]);
      end
    @(negedge clk);
    release_en = 1; release_slot = 0; @(negedge clk); release_en = 0;
    chk("full after release", full, 2'b10);
    send_tile(0, 3);
    chk("tag0 new", tag[7:0], 3); chk("full", full, 2'b11);
    for (int i = 0; i < TILE; i++) begin
      k_slot = 0; k_idx = 3'(i); #1 chk("k new", k_data, kref[0][i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
