// dram_model: behavioural model of the external DRAM read channel.
//
// Accepts read requests (beat addresses) when req_ready is high -- it drops
// ready at random to create back-pressure -- and returns the beats in order
// LAT clocks later on resp_valid/resp_data.  Memory content is not stored:
// pair a (one K vector in the low half, one V vector in the high half, COLS
// bytes each) is generated by tb_kv_pkg::kv_elem, and beat b of pair a is
// bits b*DRAM_W +: DRAM_W of that pair.
module dram_model #(
  parameter int unsigned COLS   = 8,
  parameter int unsigned DRAM_W = 64,
  parameter int unsigned LAT    = 20,
  parameter int unsigned AW     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [AW-1:0]     req_addr,
  output logic              resp_valid,
  output logic [DRAM_W-1:0] resp_data
);
  localparam int unsigned W     = 2 * COLS * 8;
  localparam int unsigned BEATS = W / DRAM_W;

  typedef struct { longint due; logic [DRAM_W-1:0] data; } resp_t;
  resp_t q [$];
  longint cyc = 0;
  int unsigned n_stall = 0;

  function automatic logic [W-1:0] pair_word(int a);
    logic [W-1:0] w;
    for (int j = 0; j < COLS; j++) begin
      w[j*8 +: 8]          = 8'(tb_kv_pkg::kv_elem(a, j, 1'b0));
      w[(COLS + j)*8 +: 8] = 8'(tb_kv_pkg::kv_elem(a, j, 1'b1));
    end
    return w;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      q.delete();
      resp_valid <= 1'b0;
      req_ready  <= 1'b1;
    end else begin
      if (req_valid && req_ready) begin
        resp_t r;
        logic [W-1:0] w;
        w = pair_word(int'(req_addr / BEATS));
        r.due  = cyc + LAT;
        r.data = w[(req_addr % BEATS)*DRAM_W +: DRAM_W];
        q.push_back(r);
      end
      if (req_valid && !req_ready) n_stall++;
      req_ready <= ($urandom % 8) != 0;
      if (q.size() > 0 && q[0].due <= cyc) begin
        resp_valid <= 1'b1;
        resp_data  <= q[0].data;
        void'(q.pop_front());
      end else begin
        resp_valid <= 1'b0;
      end
    end
  end
endmodule
