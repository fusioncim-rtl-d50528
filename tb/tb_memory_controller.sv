// tb_memory_controller: the controller copies three jobs of KV pairs from the
// DRAM model (random request back-pressure, 20-clock latency, 4 beats per
// pair) into a global buffer.  Afterwards every written word is read back and
// compared with the pair generated here; job_done must pulse once per job.
module tb_memory_controller;
  localparam int COLS = 16, W = 2 * COLS * 8, DRAM_W = 64, GBD = 256, AW = 32;
  logic clk = 0, rst_n = 0;
  logic job_valid = 0, job_ready, job_done;
  logic [AW-1:0] job_dram_addr;
  logic [7:0] job_gb_addr;
  logic [15:0] job_count;
  logic req_valid, req_ready, resp_valid;
  logic [AW-1:0] req_addr;
  logic [DRAM_W-1:0] resp_data;
  logic gb_wr_en, gb_rd_en = 0;
  logic [7:0] gb_wr_addr, gb_rd_addr;
  logic [W-1:0] gb_wr_data, gb_rd_data;
  int checks = 0, failures = 0, n_done = 0;

  memory_controller #(.W(W), .DRAM_W(DRAM_W), .GB_DEPTH(GBD), .AW(AW)) dut (.*);
  dram_model #(.COLS(COLS), .DRAM_W(DRAM_W), .LAT(20), .AW(AW)) u_dram (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr),
    .resp_valid(resp_valid), .resp_data(resp_data));
  global_buffer #(.DEPTH(GBD), .W(W)) u_gb (
    .clk(clk), .wr_en(gb_wr_en), .wr_addr(gb_wr_addr), .wr_data(gb_wr_data),
    .rd_en(gb_rd_en), .rd_addr(gb_rd_addr), .rd_data(gb_rd_data));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && job_done) n_done++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int jd [3] = '{100, 7, 300};   // DRAM pair address
  int jg [3] = '{0, 40, 100};    // buffer address
  int jc [3] = '{32, 5, 17};     // pairs

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 3; j++) begin
      job_valid = 1; job_dram_addr = AW'(jd[j]); job_gb_addr = 8'(jg[j]); job_count = 16'(jc[j]);
      #1;
      while (!job_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      job_valid = 0;
      while (n_done < j + 1) @(negedge clk);
    end
    for (int j = 0; j < 3; j++)
      for (int i = 0; i < jc[j]; i++) begin
        gb_rd_en = 1; gb_rd_addr = 8'(jg[j] + i);
        @(negedge clk); gb_rd_en = 0;
        checks++;
        if (gb_rd_data != u_dram.pair_word(jd[j] + i)) begin
          failures++; $display("FAIL job %0d pair %0d", j, i);
        end
      end
    checks++;
    if (n_done != 3 || u_dram.n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
