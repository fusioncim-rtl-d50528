// tb_op_cim_macro: a 4 x 8 OP-CIM macro accumulates random outer products
// p v^T, one every 8 clocks, with random rescale flags and factors per row;
// after each vector every row is read out and compared with the model
// O[i][j] = sat16((r_i ? floor(O*a_i/256) : O) + floor(p_i*v_j/2^qsh)).
// Also checks that `done` follows each start by 9 clocks and that a second
// bank word is untouched.
module tb_op_cim_macro;
  localparam int ROWS = 4, COLS = 8, BW = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic [1:0] blk = 0, rd_word = 0;
  logic [3:0] qsh;
  logic [ROWS*8-1:0] p, alpha;
  logic [ROWS-1:0] rescale;
  logic [COLS*8-1:0] v_vec;
  logic ready, busy, done;
  logic [1:0] rd_row;
  logic [COLS*16-1:0] rd_data;
  int checks = 0, failures = 0;
  longint oref [BW][ROWS][COLS];

  op_cim_macro #(.ROWS(ROWS), .COLS(COLS), .BANK_WORDS(BW), .OW(16)) dut (.*);
  always #5 clk = ~clk;
  function automatic int now(); return int'($time / 10); endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(int w);
    rd_word = 2'(w);
    for (int i = 0; i < ROWS; i++) begin
      rd_row = 2'(i);
      #1;
      for (int j = 0; j < COLS; j++) begin
        checks++;
        if (longint'(signed'(rd_data[j*16 +: 16])) != oref[w][i][j]) begin
          failures++;
          $display("FAIL w%0d O[%0d][%0d] = %0d expected %0d", w, i, j, signed'(rd_data[j*16 +: 16]), oref[w][i][j]);
        end
      end
    end
  endtask

  task automatic vec(int w, bit clr, int sh);
    int ts;
    longint pv [ROWS], av [ROWS], vv [COLS];
    bit rs [ROWS];
    blk = 2'(w); qsh = 4'(sh);
    for (int i = 0; i < ROWS; i++) begin
      pv[i] = $urandom % 256; av[i] = clr ? 0 : $urandom % 256; rs[i] = clr || ($urandom % 3 == 0);
      p[i*8 +: 8] = 8'(pv[i]); alpha[i*8 +: 8] = 8'(av[i]); rescale[i] = rs[i];
    end
    for (int j = 0; j < COLS; j++) begin
      vv[j] = longint'($urandom % 64) - 32;
      v_vec[j*8 +: 8] = 8'(vv[j]);
    end
    while (!ready) @(negedge clk);
    start = 1; ts = now();
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (now() - ts != 9) begin failures++; $display("FAIL latency %0d", now() - ts); end
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        longint base, sum;
        base = rs[i] ? ((oref[w][i][j] * av[i]) >>> 8) : oref[w][i][j];
        sum = base + ((pv[i] * vv[j]) >>> sh);
        if (sum > 32767) sum = 32767;
        if (sum < -32768) sum = -32768;
        oref[w][i][j] = sum;
      end
    compare(w);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    vec(1, 1, 0);
    for (int t = 0; t < 30; t++) vec(0, t == 0, 2);
    compare(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
