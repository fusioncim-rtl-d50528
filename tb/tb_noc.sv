// tb_noc: sends 300 flits with random destination masks into a 16-port
// network while every engine's ready toggles at random.  Each engine must
// receive exactly the flits addressed to it, in order, each once; the source
// is throttled only while a flit is outstanding.
module tb_noc;
  localparam int N = 16, PLW = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, empty;
  logic [N-1:0] in_dest, out_valid, out_ready;
  logic [PLW-1:0] in_payload, out_payload;
  int checks = 0, failures = 0;
  logic [PLW-1:0] expq [N][$];
  int received = 0, expected = 0, multicasts = 0;

  noc #(.N_HE(N), .PLW(PLW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = N'($urandom) | N'($urandom);

  always @(posedge clk) begin
    if (rst_n) begin
      for (int h = 0; h < N; h++)
        if (out_valid[h] && out_ready[h]) begin
          checks++;
          received++;
          if (expq[h].size() == 0 || expq[h][0] != out_payload) begin
            failures++; $display("FAIL engine %0d got %h", h, out_payload);
          end
          if (expq[h].size() != 0) void'(expq[h].pop_front());
        end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      in_valid = 1; in_payload = $urandom;
      in_dest = N'($urandom);
      if (in_dest == 0) in_dest = 1;
      if ($countones(in_dest) > 1) multicasts++;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      for (int h = 0; h < N; h++) if (in_dest[h]) begin expq[h].push_back(in_payload); expected++; end
      @(negedge clk);
      in_valid = 0;
      if ($urandom % 4 == 0) @(negedge clk);
    end
    while (!empty) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (received != expected || multicasts == 0) failures++;
    $display("delivered %0d flit copies, %0d multicast flits", received, multicasts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
