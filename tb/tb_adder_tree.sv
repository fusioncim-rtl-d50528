// tb_adder_tree: the signed adder tree against a sequential sum, for random
// inputs and for the all-minimum / all-maximum extremes (128 inputs of 8 bits).
module tb_adder_tree;
  localparam int N = 128, IW = 8, OW = IW + $clog2(N);
  logic [N*IW-1:0] in;
  logic signed [OW-1:0] sum;
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .IW(IW)) dut (.in(in), .sum(sum));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int r = 0;
    for (int i = 0; i < N; i++) r += int'(signed'(in[i*IW +: IW]));
    #1;
    checks++;
    if (int'(sum) !== r) begin
      failures++;
      $display("FAIL sum %0d expected %0d", sum, r);
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) in[i*IW +: IW] = IW'($urandom);
      check();
    end
    for (int i = 0; i < N; i++) in[i*IW +: IW] = 8'h80;
    check();
    for (int i = 0; i < N; i++) in[i*IW +: IW] = 8'h7f;
    check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
