// tb_intra_tile_scheduler: offers fresh tiles in both slots and an IP-CIM
// ready signal that is high one clock in eight; the scheduler must take each
// slot in turn, issue keys 7 down to 0 only when ready, flag the last key and
// flag the diagonal tile (tile number equal to the query tile).
module tb_intra_tile_scheduler;
  localparam int TILE = 8, TIW = 8;
  logic clk = 0, rst_n = 0;
  logic [TIW-1:0] q_tile = 8'd3;
  logic [1:0] fresh = 0;
  logic [2*TIW-1:0] tag;
  logic take, take_slot, issue, slot, diag, last, active;
  logic ip_ready = 0;
  logic [2:0] key_idx;
  int checks = 0, failures = 0, cyc = 0;
  int issued [$];
  int tiles_tags [4] = '{3, 2, 1, 0};

  intra_tile_scheduler #(.TILE(TILE), .SLOTS(2), .TIW(TIW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // environment: a KV buffer with four tiles arriving into alternating slots
  int next_tile = 0;
  always @(negedge clk) begin
    cyc++;
    ip_ready = (cyc % 8 == 0);
    if (rst_n) begin
      for (int s = 0; s < 2; s++)
        if (!fresh[s] && next_tile < 4 && (next_tile % 2) == s) begin
          fresh[s] = 1; tag[s*TIW +: TIW] = TIW'(tiles_tags[next_tile]); next_tile++;
        end
    end
  end

  int exp_tile = 0, exp_key = TILE - 1;
  always @(posedge clk) begin
    if (rst_n && take) fresh[take_slot] <= 0;
    if (rst_n && issue) begin
      checks += 4;
      if (!ip_ready) failures++;
      if (int'(key_idx) != exp_key) begin failures++; $display("FAIL key %0d expected %0d", key_idx, exp_key); end
      if (int'(slot) != exp_tile % 2) failures++;
      if (diag != (tiles_tags[exp_tile] == 3)) failures++;
      checks++;
      if (last != (exp_key == 0)) failures++;
      if (exp_key == 0) begin exp_key = TILE - 1; exp_tile++; end
      else exp_key--;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (exp_tile < 4) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++;
    if (active) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
