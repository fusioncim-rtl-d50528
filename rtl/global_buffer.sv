// global_buffer: the shared on-chip SRAM that caches K and V tiles.
//
// DEPTH words of W bits (4096 x 2048 bit = 1 MB by default); one word holds
// the K vector and the V vector of one token.  One write port, used by the
// memory controller, and one synchronous read port, used by the top
// scheduler: rd_data is valid the clock after rd_en.  No reset; contents are
// written before they are read.
//
// The 1 MB capacity and its role (caching K and V between DRAM and the
// engines) are the paper's; the word layout and the two ports are this
// design's own.
module global_buffer #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = 2048
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
