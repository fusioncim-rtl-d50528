// tb_ip_cim_unit: checks the query bank and the 1b x 8b multiplier of one
// IP-CIM unit.  All four bank words are written with random bytes, then every
// word is selected with key bit 0 and 1; the product must be zero or the
// stored byte.
module tb_ip_cim_unit;
  logic clk = 0;
  logic wr_en;
  logic [1:0] wr_word, wl;
  logic signed [7:0] wr_data, prod;
  logic k_bit;
  int checks = 0, failures = 0;
  logic signed [7:0] ref_bank [4];

  ip_cim_unit #(.BANK_WORDS(4), .QW(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wl = 0; k_bit = 0; wr_word = 0; wr_data = 0;
    for (int rep = 0; rep < 20; rep++) begin
      for (int w = 0; w < 4; w++) begin
        @(negedge clk);
        wr_en = 1; wr_word = 2'(w); wr_data = 8'($urandom); ref_bank[w] = wr_data;
      end
      @(negedge clk); wr_en = 0;
      for (int w = 0; w < 4; w++) begin
        for (int b = 0; b < 2; b++) begin
          wl = 2'(w); k_bit = b[0];
          #1;
          checks++;
          if (prod !== (b ? ref_bank[w] : 8'sd0)) begin
            failures++;
            $display("FAIL word %0d bit %0d: prod %0d", w, b, prod);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
