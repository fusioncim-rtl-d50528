// tb_softmax_macro: an 8-row SoftMax macro processes two key tiles for one
// query tile: first the diagonal tile in reverse key order (keys 7..0, with
// the causal mask), then an earlier tile.  For every key the probabilities
// are checked against exp() computed here (one LSB), masked rows must give
// p = 0, and n_rescale must equal the number of rows whose maximum the model
// sees rise.  Keys are issued back to back, one every 8 clocks.
module tb_softmax_macro;
  import fusioncim_pkg::*;
  localparam int ROWS = 8, SW = 23;
  logic clk = 0, rst_n = 0, clear = 0, start = 0, diag = 0;
  logic [ROWS*SW-1:0] score;
  logic [2:0] key_idx;
  logic [4:0] ssh = 5'd5;
  logic out_valid;
  logic [ROWS*PW-1:0] p, alpha;
  logic [ROWS-1:0] rescale;
  logic [$clog2(ROWS+1)-1:0] n_rescale;
  logic [ROWS*LW-1:0] l;
  int checks = 0, failures = 0, total_events = 0, total_masked = 0;

  typedef struct { longint s[ROWS]; bit dg; int k; } key_t;
  key_t pend [$];
  bit   mv [ROWS];
  longint mm [ROWS];

  softmax_macro #(.ROWS(ROWS), .SW(SW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int q8(real e);
    if (e * 256.0 + 0.5 >= 255.0) return 255;
    return int'($floor(e * 256.0 + 0.5));
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      key_t kk;
      int ev;
      ev = 0;
      kk = pend[0]; pend.delete(0);
      for (int i = 0; i < ROWS; i++) begin
        int pi, ex;
        pi = int'(p[i*PW +: PW]);
        checks++;
        if (kk.dg && kk.k > i) begin
          total_masked++;
          if (pi != 0) begin failures++; $display("FAIL masked row %0d p=%0d", i, pi); end
        end else if (!mv[i]) begin
          mv[i] = 1; mm[i] = kk.s[i];
          if (pi != 255 || !rescale[i]) begin failures++; $display("FAIL first row %0d", i); end
        end else if (kk.s[i] > mm[i]) begin
          ev++;
          ex = q8($exp(-real'(kk.s[i] - mm[i]) / 32.0));
          mm[i] = kk.s[i];
          if (pi != 255 || !rescale[i] || int'(alpha[i*PW +: PW]) > ex + 1 || int'(alpha[i*PW +: PW]) < ex - 1) begin
            failures++; $display("FAIL newmax row %0d", i);
          end
        end else begin
          ex = q8($exp(-real'(mm[i] - kk.s[i]) / 32.0));
          if (pi > ex + 1 || pi < ex - 1 || rescale[i]) begin
            failures++; $display("FAIL row %0d p=%0d expected %0d", i, pi, ex);
          end
        end
      end
      checks++;
      total_events += ev;
      if (int'(n_rescale) != ev) begin
        failures++; $display("FAIL n_rescale %0d expected %0d", n_rescale, ev);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int tile = 0; tile < 2; tile++) begin
      for (int k = ROWS - 1; k >= 0; k--) begin
        key_t kk;
        kk.dg = (tile == 0); kk.k = k;
        for (int i = 0; i < ROWS; i++) begin
          kk.s[i] = longint'($urandom % 400) - 200;
          score[i*SW +: SW] = SW'(kk.s[i]);
        end
        diag = kk.dg; key_idx = 3'(k);
        pend.push_back(kk);
        start = 1;
        @(negedge clk); start = 0;
        repeat (7) @(negedge clk);
      end
    end
    repeat (12) @(negedge clk);
    checks++;
    if (pend.size() != 0 || total_events == 0 || total_masked != ROWS * (ROWS - 1) / 2) begin
      failures++;
      $display("FAIL pending %0d events %0d masked %0d", pend.size(), total_events, total_masked);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
