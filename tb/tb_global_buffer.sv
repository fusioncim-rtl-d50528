// tb_global_buffer: random writes and reads of the global buffer; read data
// must be the last value written and appear one clock after rd_en.
module tb_global_buffer;
  localparam int DEPTH = 4096, W = 2048;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  logic [W-1:0] shadow [int];
  int checks = 0, failures = 0;

  global_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = $clog2(DEPTH)'($urandom % 64); wr_data = rnd();
      shadow[int'(wr_addr)] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    // the top and bottom words too
    wr_en = 1; wr_addr = '1; wr_data = rnd(); shadow[DEPTH-1] = wr_data;
    @(negedge clk); wr_en = 0;
    foreach (shadow[a]) begin
      rd_en = 1; rd_addr = $clog2(DEPTH)'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== shadow[a]) begin
        failures++;
        $display("FAIL addr %0d", a);
      end
      // data must hold while rd_en is low
      @(negedge clk);
      checks++;
      if (rd_data !== shadow[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
