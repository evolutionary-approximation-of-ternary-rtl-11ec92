// popcount -- exact N-input population count, built as an adder tree.
//
// Sums N one-bit inputs into a cnt_bits(N)-bit count with a balanced tree of
// adders, the usual structure of an exact popcount. Level 0 holds the N input
// bits as 1-bit counts. Level l holds ceil(N / 2^l) counts, each the sum of two
// neighbouring counts of level l-1 in an (l+1)-bit adder; an odd count out at
// the end of a level is passed up unchanged. After clog2(N) levels one count
// remains. Each level is an array of its own; counts are stored W bits wide; the bits above a level's width are
// constant zero and are removed by synthesis.
//
// This is the exact (zero-error) popcount that hidden and output neurons
// start from; approximate popcounts found by evolutionary search would replace
// this module per neuron, but their netlists are not reproduced here.
//
// Interface: in[N-1:0] bits, cnt = number of ones. Purely combinational.
// N = 0 is allowed and gives a constant 0 count (a neuron without weights of
// one sign); in is then one unused bit wide.
module popcount #(
  parameter int unsigned N = 8,
  localparam int unsigned W = tnn_pkg::cnt_bits(N),
  localparam int unsigned NI = (N < 1) ? 1 : N,
  localparam int unsigned LEVELS = (N < 2) ? 0 : $clog2(N)
) (
  input  logic [NI-1:0] in,
  output logic [W-1:0]  cnt
);

  // number of counts at level l
  function automatic int unsigned nodes(input int unsigned l);
    return (NI + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= LEVELS; l++) begin : g_level
    localparam int unsigned LW = (l + 1 < W) ? l + 1 : W;   // adder width at this level
    logic [W-1:0] sum [nodes(l)];                             // counts of this level
    for (genvar k = 0; k < nodes(l); k++) begin : g_node
      if (l == 0) begin : g_leaf
        assign sum[k] = (N == 0) ? '0 : W'(in[k]);
      end else if (2 * k + 1 < nodes(l - 1)) begin : g_add
        assign sum[k] = W'(LW'(g_level[l-1].sum[2*k]) + LW'(g_level[l-1].sum[2*k+1]));
      end else begin : g_pass
        assign sum[k] = g_level[l-1].sum[2*k];
      end
    end
  end

  assign cnt = g_level[LEVELS].sum[0];

endmodule
