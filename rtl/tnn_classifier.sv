// tnn_classifier -- on-sensor bespoke ternary neural network classifier.
//
// One classifier for one trained model: N_IN sensor voltages go in, a class
// index comes out. Each sensor voltage is turned into one bit by its own
// analog-to-binary converter (abc), a resistor divider from the shared
// reference rail and a comparator; the resistor ratio puts the threshold at
// the feature's quantisation point VQ (a fraction of Vref). The bits feed the
// digital network tnn_core: a feature register, N_HID popcount-compare hidden
// neurons, N_OUT XNOR/popcount output neurons, argmax and a class register.
// The converter array, a shared Vref and the per-feature resistor ratio follow
// the published design; deriving R1 from VQ and a fixed R2 is this design's.
//
// Defaults: the (3,2,2) example network with hidden weights [0,1,-1] and
// [-1,-1,1], output weights [1,-1] and [1,1], and every converter threshold
// at Vref/2 (VQ = 16'h8000; the per-feature medians of training data that
// would set it are not available). Larger models are obtained by overriding
// N_IN, N_HID, N_OUT, W_HID, W_OUT and VQ; see tnn_core for the weight layout.
//
// Interface and timing: vref and vin[] are voltages (real). feat, hidden and
// cls are those of tnn_core: voltages present at rising clk edge k are in
// feat after edge k and give their class on cls after edge k+1. rst_n is an
// asynchronous active-low reset. Because the converters are a behavioural
// (real-valued) model, this top level is for simulation; tnn_core is the
// synthesizable part.
module tnn_classifier
  import tnn_pkg::*;
#(
  parameter int unsigned N_IN  = 3,
  parameter int unsigned N_HID = 2,
  parameter int unsigned N_OUT = 2,
  parameter logic [N_HID-1:0][N_IN-1:0][1:0] W_HID =
    {{TW_POS, TW_NEG, TW_NEG}, {TW_NEG, TW_POS, TW_ZERO}},
  parameter logic [N_OUT-1:0][N_HID-1:0][1:0] W_OUT =
    {{TW_POS, TW_POS}, {TW_NEG, TW_POS}},
  parameter logic [N_IN-1:0][15:0] VQ = {N_IN{16'h8000}},
  parameter real R2_OHM = 100.0e3,
  localparam int unsigned CW = (N_OUT < 3) ? 1 : $clog2(N_OUT)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  real              vref,
  input  real              vin [N_IN],
  output logic [N_IN-1:0]  feat,
  output logic [N_HID-1:0] hidden,
  output logic [CW-1:0]    cls
);

  // ------------------------------------------------------ sensor interface
  logic [N_IN-1:0] abc_bit;

  for (genvar i = 0; i < N_IN; i++) begin : g_abc
    // Vth / Vref = R2 / (R1 + R2) = VQ / 2^16  =>  R1 = R2 * (2^16 - VQ) / VQ
    localparam real VQF = (VQ[i] == 16'd0) ? (1.0 / 65536.0) : (real'(VQ[i]) / 65536.0);
    abc #(.R1(R2_OHM * (1.0 - VQF) / VQF), .R2(R2_OHM)) u_abc (
      .vin (vin[i]),
      .vref(vref),
      .out (abc_bit[i])
    );
  end

  // ------------------------------------------------------- digital network
  tnn_core #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT),
             .W_HID(W_HID), .W_OUT(W_OUT)) u_core (
    .clk   (clk),
    .rst_n (rst_n),
    .bits  (abc_bit),
    .feat  (feat),
    .hidden(hidden),
    .cls   (cls)
  );

endmodule
