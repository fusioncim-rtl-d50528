// tb_op_cim_unit: drives one OP-CIM unit bit by bit, as the macro does
// (value bits and alpha bits MSB first over eight cycles), and checks the
// written-back word against
//   O_new = sat16( (rescale ? floor(O*alpha/256) : O) + floor(p*v / 2^qsh) )
// worked out here, for random p, v, alpha, qsh and both rescale settings,
// including saturation at both ends.
module tb_op_cim_unit;
  logic clk = 0;
  logic [1:0] blk = 0, rd_word = 0;
  logic busy = 0, first = 0, last = 0, a_bit = 0, rescale = 0, v_bit = 0;
  logic [7:0] p = 0;
  logic [3:0] qsh = 0;
  logic signed [15:0] rd_data;
  int checks = 0, failures = 0, n_sat = 0;
  longint oref [4];

  op_cim_unit #(.BANK_WORDS(4), .OW(16), .PW(8), .VW(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic op(int w, int pv, int vv, int av, bit rs, int sh);
    logic [7:0] vb, ab;
    longint base, sum;
    vb = 8'(vv); ab = 8'(av);
    blk = 2'(w); p = 8'(pv); rescale = rs; qsh = 4'(sh);
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      busy = 1; first = (b == 0); last = (b == 7);
      v_bit = vb[7 - b]; a_bit = ab[7 - b];
    end
    @(negedge clk);
    busy = 0; first = 0; last = 0;
    base = rs ? ((oref[w] * longint'(av)) >>> 8) : oref[w];
    sum  = base + ((longint'(pv) * longint'(vv)) >>> sh);
    if (sum > 32767) begin sum = 32767; n_sat++; end
    if (sum < -32768) begin sum = -32768; n_sat++; end
    oref[w] = sum;
  endtask

  task automatic check_all();
    for (int w = 0; w < 4; w++) begin
      rd_word = 2'(w);
      #1;
      checks++;
      if (longint'(rd_data) != oref[w]) begin
        failures++;
        $display("FAIL word %0d: %0d expected %0d", w, rd_data, oref[w]);
      end
    end
  endtask

  initial begin
    // clear every word with alpha = 0
    for (int w = 0; w < 4; w++) op(w, 0, 0, 0, 1, 0);
    for (int w = 0; w < 4; w++) oref[w] = 0;
    check_all();
    for (int t = 0; t < 300; t++) begin
      int w;
      w = $urandom % 4;
      op(w, $urandom % 256, int'($urandom % 256) - 128, $urandom % 256, ($urandom % 3 == 0), $urandom % 5);
      check_all();
    end
    // saturation
    for (int t = 0; t < 4; t++) op(0, 255, 127, 0, 0, 0);
    for (int t = 0; t < 8; t++) op(1, 255, -128, 0, 0, 0);
    check_all();
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
