// tb_exp_taylor_pe: the exponential PE against exp() computed here in floating
// point: result = round(256 * exp(-d / 2^ssh)), saturated at 255, within one
// LSB.  Arguments are random over several ranges and include 0 and values
// that underflow.  Starts are issued back to back; every result must arrive 8
// clocks after its start.
module tb_exp_taylor_pe;
  import fusioncim_pkg::*;
  localparam int DW = 24;
  logic clk = 0, rst_n = 0;
  logic start = 0, ready, done;
  logic [DW-1:0] d;
  logic [4:0] ssh;
  logic [NCOEF*CW-1:0] coef;
  logic [7:0] result;
  int checks = 0, failures = 0;
  real exp_q [$];
  int  sc_q [$];

  nl_lut u_lut (.coef(coef));
  exp_taylor_pe #(.DW(DW)) dut (.*);

  always #5 clk = ~clk;
  // clock edge index: posedge k is at time 10k+5; at the negedge before it, $time/10 is k
  function automatic int now(); return int'($time / 10); endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && done) begin
      real e;
      int  s, ref_v;
      e = exp_q[0]; exp_q.delete(0);
      s = sc_q[0]; sc_q.delete(0);
      ref_v = (e * 256.0 + 0.5 >= 255.0) ? 255 : int'($floor(e * 256.0 + 0.5));
      checks += 2;
      if (int'(result) > ref_v + 1 || int'(result) < ref_v - 1) begin
        failures++;
        $display("FAIL result %0d expected %0d (exp %f)", result, ref_v, e);
      end
      if (now() - s != 9) begin
        failures++;
        $display("FAIL latency %0d", now() - s);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int sh;
      sh = $urandom % 12;
      case (t % 4)
        0: d = DW'($urandom % (8 << sh));
        1: d = DW'($urandom % (1 << sh));
        2: d = DW'($urandom % (64 << sh));
        default: d = DW'($urandom % 4);
      endcase
      if (t == 1) d = 0;
      ssh = 5'(sh);
      while (!ready) @(negedge clk);
      start = 1;
      exp_q.push_back($exp(-real'(d) / (2.0 ** sh)));
      sc_q.push_back(now());
      @(negedge clk);
      start = 0;
      repeat (7) @(negedge clk);
    end
    repeat (12) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
