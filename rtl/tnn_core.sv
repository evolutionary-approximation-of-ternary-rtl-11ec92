// tnn_core -- digital part of the bespoke ternary neural network classifier.
//
// Everything of the classifier that is logic: a register for the converter
// bits, N_HID hidden neurons (hidden_neuron: two popcounts and a comparator,
// binary step output), N_OUT XNOR/popcount output neurons (output_neuron),
// argmax and a register for the class. All weights are parameters, so the
// network is hard-wired; zero weights cost nothing. This is the part whose
// area and power the published evaluation reports as the network's own, apart
// from the converters; tnn_classifier adds the converters in front of it.
//
// Defaults: the (3,2,2) example network, hidden weights [0,1,-1] and
// [-1,-1,1], output weights [1,-1] and [1,1]. W_HID[h][i] is the weight from
// input i to hidden neuron h and W_OUT[o][h] from hidden neuron h to output
// neuron o, 2-bit encoded as in tnn_pkg. Every output neuron must have the
// same number of zero weights (the dropped +1/2 per zero weight is then the
// same for all classes); this is checked at elaboration.
//
// Timing (this design's choice; the published circuits are only said to be
// evaluated at a 5 Hz clock): bits are registered into feat on each rising
// clk edge, the network after that register is combinational and the class
// is registered into cls on the next edge, so bits present at edge k give
// their class after edge k+1. rst_n is an asynchronous active-low reset
// clearing both registers. hidden shows the hidden-layer outputs for feat.
module tnn_core
  import tnn_pkg::*;
#(
  parameter int unsigned N_IN  = 3,
  parameter int unsigned N_HID = 2,
  parameter int unsigned N_OUT = 2,
  parameter logic [N_HID-1:0][N_IN-1:0][1:0] W_HID =
    {{TW_POS, TW_NEG, TW_NEG}, {TW_NEG, TW_POS, TW_ZERO}},
  parameter logic [N_OUT-1:0][N_HID-1:0][1:0] W_OUT =
    {{TW_POS, TW_POS}, {TW_NEG, TW_POS}},
  localparam int unsigned SW = cnt_bits(N_HID),
  localparam int unsigned CW = (N_OUT < 3) ? 1 : $clog2(N_OUT)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_IN-1:0]  bits,
  output logic [N_IN-1:0]  feat,
  output logic [N_HID-1:0] hidden,
  output logic [CW-1:0]    cls
);

  // ---------------------------------------------------------------- checks
  function automatic int unsigned zeros_of(input int unsigned o);
    return count_w((2*MAX_FANIN)'(W_OUT[o]), N_HID, TW_ZERO)
         + count_w((2*MAX_FANIN)'(W_OUT[o]), N_HID, 2'b10);
  endfunction

  for (genvar o = 1; o < N_OUT; o++) begin : g_zero_check
    if (zeros_of(o) != zeros_of(0)) begin : g_bad
      $error("output neuron %0d has %0d zero weights, neuron 0 has %0d",
             o, zeros_of(o), zeros_of(0));
    end
  end

  // ------------------------------------------------------- input register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) feat <= '0;
    else        feat <= bits;
  end

  // ---------------------------------------------------------- hidden layer
  for (genvar h = 0; h < N_HID; h++) begin : g_hid
    hidden_neuron #(.N_IN(N_IN), .W(W_HID[h])) u_neuron (
      .in (feat),
      .act(hidden[h])
    );
  end

  // ---------------------------------------------------------- output layer
  logic [N_OUT-1:0][SW-1:0] score;

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    output_neuron #(.N_HID(N_HID), .W(W_OUT[o])) u_neuron (
      .h    (hidden),
      .score(score[o])
    );
  end

  logic [CW-1:0] cls_d;

  argmax #(.N(N_OUT), .SW(SW)) u_argmax (.score(score), .cls(cls_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cls <= '0;
    else        cls <= cls_d;
  end

endmodule
