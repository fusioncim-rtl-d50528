// noc: on-chip network from the top scheduler to the hybrid engines.
//
// A registered multicast bus.  A flit (payload plus a destination mask with one
// bit per engine) is accepted into a single holding register when the
// register is free.  It is then offered to every engine in its mask; each
// engine takes it when its ready is high, independently of the others, and
// the flit is retired once every destination has taken it.  This lets one
// key/value tile be broadcast to all engines that need it (inter-tile
// schedule) and a query row be sent to a single engine.
//
// Timing: one flit per clock at best (accept and retire in the same clock);
// latency one clock.  `empty` is high when no flit is held.
//
// The paper names the on-chip network only; the multicast bus with
// per-destination hand-shake is this design's own.
module noc #(
  parameter int unsigned N_HE = 16,
  parameter int unsigned PLW  = 2064
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [N_HE-1:0]   in_dest,
  input  logic [PLW-1:0]    in_payload,
  output logic [N_HE-1:0]   out_valid,
  input  logic [N_HE-1:0]   out_ready,
  output logic [PLW-1:0]    out_payload,
  output logic              empty
);
  logic [N_HE-1:0] pend;
  logic [N_HE-1:0] pend_next;

  assign out_valid = pend;
  assign pend_next = pend & ~out_ready;
  assign empty     = (pend == '0);
  assign in_ready  = (pend_next == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend <= '0;
    end else if (in_valid && in_ready) begin
      pend        <= in_dest;
      out_payload <= in_payload;
    end else begin
      pend <= pend_next;
    end
  end

  a_dest_nonzero: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_dest != '0);
endmodule
