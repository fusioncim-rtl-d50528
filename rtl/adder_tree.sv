// adder_tree: balanced binary tree of signed adders.
//
// Sums N signed IW-bit inputs, given packed as in[N*IW-1:0] with input 0 in the
// low bits, into one signed result of IW+$clog2(N) bits, without overflow.
// It is the "fully digital adder tree" that accumulates one row of CIM units.
// Purely combinational.  The tree is held as a heap: the leaves (padded with
// zeros to a power of two) sit at nodes NP..2NP-1 and node k adds nodes 2k
// and 2k+1, so the root, node 1, is the sum after log2(NP) adder levels.
module adder_tree #(
  parameter int unsigned N  = 128,
  parameter int unsigned IW = 8,
  parameter int unsigned OW = IW + $clog2(N)
) (
  input  logic [N*IW-1:0]   in,
  output logic signed [OW-1:0] sum
);
  localparam int unsigned NP = 1 << $clog2(N);   // leaves, power of two

  logic signed [OW-1:0] node [2*NP];

  always_comb begin
    node[0] = '0;   // unused
    for (int k = 0; k < NP; k++)
      node[NP + k] = (k < N) ? OW'(signed'(in[k*IW +: IW])) : '0;
    for (int k = NP - 1; k >= 1; k--)
      node[k] = node[2*k] + node[2*k + 1];
  end

  assign sum = node[1];
endmodule
