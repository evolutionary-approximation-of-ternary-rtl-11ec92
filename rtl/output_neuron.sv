// output_neuron -- bespoke XNOR/popcount output-layer neuron.
//
// Hidden outputs are read as {-1, +1} (bit 0 is -1). Multiplying by a ternary
// weight becomes an XNOR with the weight's sign; with fixed weights the XNOR
// folds to a plain wire for +1 and an inverter for -1, and inputs with weight
// 0 are dropped. The score is the popcount of the N_NZ remaining bits. The
// zero weights would add a constant N_ZERO/2 to the score; it is left out,
// which leaves the argmax unchanged as long as every output neuron has the
// same number of zero weights (tnn_core checks this at elaboration).
//
// Interface: h[N_HID-1:0] hidden outputs; W[j] the ternary weight of hidden
// j (encoding in tnn_pkg); score is a cnt_bits(N_HID)-bit count, so that all
// output neurons of a layer share one score width. Purely combinational.
module output_neuron
  import tnn_pkg::*;
#(
  parameter int unsigned N_HID = 2,
  parameter logic [N_HID-1:0][1:0] W = {TW_NEG, TW_POS},
  localparam int unsigned N_PW = count_w((2*MAX_FANIN)'(W), N_HID, TW_POS),
  localparam int unsigned N_NW = count_w((2*MAX_FANIN)'(W), N_HID, TW_NEG),
  localparam int unsigned N_NZ = N_PW + N_NW,
  localparam int unsigned SW   = cnt_bits(N_HID)
) (
  input  logic [N_HID-1:0] h,
  output logic [SW-1:0]    score
);

  logic [((N_NZ < 1) ? 1 : N_NZ)-1:0] x;
  logic [cnt_bits(N_NZ)-1:0] cnt;

  if (N_NZ == 0) begin : g_empty
    assign x = '0;
  end else begin : g_xnor
    // Weight +1: wire. Weight -1: inverter.
    for (genvar k = 0; k < N_PW; k++) begin : g_p
      assign x[k] = h[nth_w((2*MAX_FANIN)'(W), N_HID, TW_POS, k)];
    end
    for (genvar k = 0; k < N_NW; k++) begin : g_n
      assign x[N_PW + k] = ~h[nth_w((2*MAX_FANIN)'(W), N_HID, TW_NEG, k)];
    end
  end

  popcount #(.N(N_NZ)) u_pc (.in(x), .cnt(cnt));

  assign score = SW'(cnt);

endmodule
