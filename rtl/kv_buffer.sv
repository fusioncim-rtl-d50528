// kv_buffer: local K/V tile buffer of a hybrid engine.
//
// SLOTS tile slots (two by default, used ping-pong), each holding TILE key
// vectors and TILE value vectors of COLS bytes.  The write side takes the
// vectors of one tile in any index order from the on-chip network; the flit
// marked `wr_last` closes the tile: the slot becomes full and fresh, is tagged
// with the tile number, and writing moves to the next slot.  `wr_ready` is low
// while the slot being written is still occupied.
//
// The read side has two asynchronous ports, one for K (used by the IP-CIM when
// a key enters the pipeline) and one for V (used by the OP-CIM two stages
// later), both addressed by slot and vector index.  `take` clears the fresh
// flag when the intra-tile scheduler starts on a slot; `release` frees the
// slot once its last value vector has been read.
//
// The paper names the KV buffer and local key buffer; its size, the slot
// scheme and the ports are this design's own.
module kv_buffer #(
  parameter int unsigned TILE  = 128,
  parameter int unsigned COLS  = 128,
  parameter int unsigned VW    = 8,
  parameter int unsigned SLOTS = 2,
  parameter int unsigned TIW   = 8        // tile-number width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // write side
  input  logic                     wr_valid,
  output logic                     wr_ready,
  input  logic [$clog2(TILE)-1:0]  wr_idx,
  input  logic                     wr_last,
  input  logic [TIW-1:0]           wr_tile,
  input  logic [COLS*VW-1:0]       wr_k,
  input  logic [COLS*VW-1:0]       wr_v,
  // slot status
  output logic [SLOTS-1:0]         fresh,
  output logic [SLOTS-1:0]         full,
  output logic [SLOTS*TIW-1:0]     tag,
  input  logic                     take,
  input  logic [$clog2(SLOTS)-1:0] take_slot,
  input  logic                     release_en,
  input  logic [$clog2(SLOTS)-1:0] release_slot,
  // read ports
  input  logic [$clog2(SLOTS)-1:0] k_slot,
  input  logic [$clog2(TILE)-1:0]  k_idx,
  output logic [COLS*VW-1:0]       k_data,
  input  logic [$clog2(SLOTS)-1:0] v_slot,
  input  logic [$clog2(TILE)-1:0]  v_idx,
  output logic [COLS*VW-1:0]       v_data
);
  logic [COLS*VW-1:0]     kmem [SLOTS*TILE];
  logic [COLS*VW-1:0]     vmem [SLOTS*TILE];
  logic [$clog2(SLOTS)-1:0] wptr;

  assign wr_ready = !full[wptr];
  assign k_data   = kmem[{k_slot, k_idx}];
  assign v_data   = vmem[{v_slot, v_idx}];

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      kmem[{wptr, wr_idx}] <= wr_k;
      vmem[{wptr, wr_idx}] <= wr_v;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full  <= '0;
      fresh <= '0;
      tag   <= '0;
      wptr  <= '0;
    end else begin
      if (take) fresh[take_slot] <= 1'b0;
      if (release_en) full[release_slot] <= 1'b0;
      if (wr_valid && wr_ready && wr_last) begin
        full[wptr]            <= 1'b1;
        fresh[wptr]           <= 1'b1;
        tag[wptr*TIW +: TIW]  <= wr_tile;
        wptr                  <= (wptr == $clog2(SLOTS)'(SLOTS - 1)) ? '0 : wptr + 1'b1;
      end
    end
  end

  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) release_en |-> full[release_slot]);
endmodule
