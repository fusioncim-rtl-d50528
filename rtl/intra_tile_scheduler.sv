// intra_tile_scheduler: pattern-aware order of key vectors inside a tile.
//
// When the next slot of the KV buffer holds a fresh tile, the scheduler takes
// it and issues its key vectors in reverse index order, TILE-1 down to 0, one
// whenever the IP-CIM macro is ready (every eight clocks in steady state).
// For the tile that lies on the diagonal of the score matrix (its tile number
// equals the engine's query tile) the first keys issued are the ones nearest
// the diagonal, so each row meets its likely maximum early and the online
// softmax rescales the output less often.  With each key it reports the key
// index, slot, whether the tile is the diagonal one and whether the key is the
// tile's last.
//
// The reverse order (k127 .. k0) is the paper's; the slot round-robin and the
// handshake are this design's own.
module intra_tile_scheduler #(
  parameter int unsigned TILE  = 128,
  parameter int unsigned SLOTS = 2,
  parameter int unsigned TIW   = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [TIW-1:0]           q_tile,
  input  logic [SLOTS-1:0]         fresh,
  input  logic [SLOTS*TIW-1:0]     tag,
  output logic                     take,
  output logic [$clog2(SLOTS)-1:0] take_slot,
  input  logic                     ip_ready,
  output logic                     issue,
  output logic [$clog2(TILE)-1:0]  key_idx,
  output logic [$clog2(SLOTS)-1:0] slot,
  output logic                     diag,
  output logic                     last,
  output logic                     active
);
  logic [$clog2(SLOTS)-1:0] kptr;
  logic [TIW-1:0]           tile;

  assign take      = !active && fresh[kptr];
  assign take_slot = kptr;
  assign issue     = active && ip_ready;
  assign slot      = kptr;
  assign diag      = (tile == q_tile);
  assign last      = (key_idx == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active  <= 1'b0;
      kptr    <= '0;
      key_idx <= '0;
      tile    <= '0;
    end else if (take) begin
      active  <= 1'b1;
      key_idx <= $clog2(TILE)'(TILE - 1);
      tile    <= tag[kptr*TIW +: TIW];
    end else if (issue) begin
      if (last) begin
        active <= 1'b0;
        kptr   <= (kptr == $clog2(SLOTS)'(SLOTS - 1)) ? '0 : kptr + 1'b1;
      end else begin
        key_idx <= key_idx - 1'b1;
      end
    end
  end
endmodule
