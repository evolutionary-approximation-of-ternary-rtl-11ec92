// hidden_neuron -- bespoke hidden-layer ternary neuron.
//
// The weights W are fixed at elaboration. Each input with weight +1 is wired
// to the positive popcount of a popcount-compare unit (pcc), each input with
// weight -1 to the negative popcount, and each input with weight 0 is left
// unconnected, so the neuron has no multipliers and no gates for the weights.
// The output is the binary step of the weighted sum: 1 when the sum is >= 0,
// 0 when it is negative. A hidden output of 0 stands for -1 in the next layer.
//
// Interface: in[N_IN-1:0] binary features (from the converters); W[i] is the
// 2-bit ternary weight of input i (encoding in tnn_pkg); act is the neuron
// output. Purely combinational.
module hidden_neuron
  import tnn_pkg::*;
#(
  parameter int unsigned N_IN = 3,
  parameter logic [N_IN-1:0][1:0] W = {TW_NEG, TW_POS, TW_ZERO},
  localparam int unsigned N_POS = count_w((2*MAX_FANIN)'(W), N_IN, TW_POS),
  localparam int unsigned N_NEG = count_w((2*MAX_FANIN)'(W), N_IN, TW_NEG)
) (
  input  logic [N_IN-1:0] in,
  output logic            act
);

  logic [((N_POS < 1) ? 1 : N_POS)-1:0] pos;
  logic [((N_NEG < 1) ? 1 : N_NEG)-1:0] neg;

  // Wire each input to its popcount bit (pure routing at elaboration time).
  if (N_POS == 0) begin : g_no_pos
    assign pos = '0;
  end else begin : g_pos
    for (genvar k = 0; k < N_POS; k++) begin : g_bit
      assign pos[k] = in[nth_w((2*MAX_FANIN)'(W), N_IN, TW_POS, k)];
    end
  end

  if (N_NEG == 0) begin : g_no_neg
    assign neg = '0;
  end else begin : g_neg
    for (genvar k = 0; k < N_NEG; k++) begin : g_bit
      assign neg[k] = in[nth_w((2*MAX_FANIN)'(W), N_IN, TW_NEG, k)];
    end
  end

  pcc #(.N_POS(N_POS), .N_NEG(N_NEG)) u_pcc (.pos(pos), .neg(neg), .ge(act));

endmodule
