// tb_safe_softmax_unit: runs rows of random scores (some masked) through one
// online-softmax unit.  A model kept here tracks the running maximum and
// decides for each key whether it is masked, the row's first key, a new
// maximum or an ordinary key; p and alpha are checked against exp() in
// floating point (one LSB), the rescale flags, the event flag and the maximum
// exactly, and the row sum l against the update rule applied to the unit's
// own p and alpha.  Each result must appear 10 clocks after its start edge (8 iterations, the PE result register and the output register).
module tb_safe_softmax_unit;
  import fusioncim_pkg::*;
  localparam int SW = 23;
  logic clk = 0, rst_n = 0, clear = 0, start = 0, masked = 0;
  logic signed [SW-1:0] s;
  logic [4:0] ssh;
  logic [NCOEF*CW-1:0] coef;
  logic out_valid, rescale, rescale_event;
  logic [PW-1:0] p, alpha;
  logic signed [SW-1:0] m;
  logic [LW-1:0] l;
  int checks = 0, failures = 0;
  int n_events = 0, n_masked = 0, n_first = 0;

  nl_lut u_lut (.coef(coef));
  safe_softmax_unit #(.SW(SW)) dut (.*);

  always #5 clk = ~clk;
  function automatic int now(); return int'($time / 10); endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int q8(real e);
    if (e * 256.0 + 0.5 >= 255.0) return 255;
    return int'($floor(e * 256.0 + 0.5));
  endfunction

  task automatic expect_near(string what, int got, int exp_v);
    checks++;
    if (got > exp_v + 1 || got < exp_v - 1) begin
      failures++;
      $display("FAIL %s = %0d expected %0d", what, got, exp_v);
    end
  endtask

  task automatic expect_eq(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s = %0d expected %0d", what, got, exp_v);
    end
  endtask

  initial begin
    bit mv;         // model: row has a maximum
    longint mm;     // model maximum
    longint lref;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int row = 0; row < 12; row++) begin
      int sh;
      sh = 2 + $urandom % 6;
      ssh = 5'(sh);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      mv = 0; lref = 0;
      for (int t = 0; t < 24; t++) begin
        int ts;
        longint sv;
        bit mk;
        sv = longint'($urandom % 2000) - 1000;
        if (row == 0 && t == 3) sv = (1 << 21) - 1;     // large score
        if (row == 0 && t == 4) sv = -(1 << 21);        // very small score
        mk = ($urandom % 5 == 0) || (row == 1 && t < 3);
        s = SW'(sv); masked = mk;
        start = 1;
        ts = now();
        @(negedge clk); start = 0;
        while (!out_valid) @(negedge clk);
        expect_eq("latency", now() - ts, 10);
        if (mk) begin
          n_masked++;
          expect_eq("p(masked)", p, 0);
          expect_eq("rescale(masked)", rescale, 0);
        end else if (!mv) begin
          n_first++;
          expect_eq("p(first)", p, 255);
          expect_eq("alpha(first)", alpha, 0);
          expect_eq("rescale(first)", rescale, 1);
          expect_eq("event(first)", rescale_event, 0);
          mv = 1; mm = sv;
          lref = 255;
        end else if (sv > mm) begin
          n_events++;
          expect_eq("p(newmax)", p, 255);
          expect_near("alpha", alpha, q8($exp(-real'(sv - mm) / (2.0 ** sh))));
          expect_eq("rescale(newmax)", rescale, 1);
          expect_eq("event(newmax)", rescale_event, 1);
          mm = sv;
          lref = ((lref * longint'(alpha)) >> 8) + 255;
        end else begin
          expect_near("p", p, q8($exp(-real'(mm - sv) / (2.0 ** sh))));
          expect_eq("rescale", rescale, 0);
          lref = lref + longint'(p);
        end
        if (mv) expect_eq("m", m, mm);
        expect_eq("l", l, lref);
      end
    end
    checks++;
    if (n_events == 0 || n_masked == 0 || n_first == 0) failures++;
    $display("rescale events %0d, masked keys %0d, first keys %0d", n_events, n_masked, n_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
