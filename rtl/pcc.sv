// pcc -- popcount-compare unit, the arithmetic of one hidden-layer neuron.
//
// A ternary neuron with binary inputs fires when sum(w_i * I_i) >= 0, which
// is the same as popcount(inputs with w = +1) >= popcount(inputs with w = -1).
// The unit therefore holds two popcounts, of N_POS and N_NEG bits, and one
// magnitude comparator J bits wide, J = bits of the larger count. The output
// is 1 when the positive count is greater than or equal to the negative one.
// Both popcounts here are exact; the structure (two popcounts and a
// comparator) is the published one. Equality counts as "fires" (>= 0) as in
// the neuron equation.
//
// Interface: pos[N_POS-1:0], neg[N_NEG-1:0] bits; ge is the neuron output.
// Either size may be 0. Purely combinational.
module pcc #(
  parameter int unsigned N_POS = 8,
  parameter int unsigned N_NEG = 8,
  localparam int unsigned NP = (N_POS < 1) ? 1 : N_POS,
  localparam int unsigned NN = (N_NEG < 1) ? 1 : N_NEG,
  localparam int unsigned J  = tnn_pkg::cnt_bits((N_POS > N_NEG) ? N_POS : N_NEG)
) (
  input  logic [NP-1:0] pos,
  input  logic [NN-1:0] neg,
  output logic          ge
);

  logic [tnn_pkg::cnt_bits(N_POS)-1:0] cnt_pos;
  logic [tnn_pkg::cnt_bits(N_NEG)-1:0] cnt_neg;

  popcount #(.N(N_POS)) u_pc_pos (.in(pos), .cnt(cnt_pos));
  popcount #(.N(N_NEG)) u_pc_neg (.in(neg), .cnt(cnt_neg));

  // J-bit comparator.
  assign ge = (J'(cnt_pos) >= J'(cnt_neg));

endmodule
