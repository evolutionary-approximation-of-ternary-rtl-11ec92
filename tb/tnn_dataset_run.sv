// tnn_dataset_run -- drives one classifier of a given topology with random
// sensor voltages and checks it against a reference model (test helper).
//
// The weights are made up: the trained models behind the published
// topologies are not available, so a 32-bit linear congruential generator
// seeded with SEED draws every hidden weight from {-1, 0, +1} and every
// output weight from {-1, +1}, except that output neuron o has exactly
// N_HID/3 zero weights, at hidden positions (o + k) mod N_HID, so that all
// output neurons share one zero count as the classifier requires. The
// converter thresholds VQ are drawn between 1/8 and 7/8 of Vref.
//
// The reference recomputes, from the voltages and the decoded integer
// weights, the converter bits (Vin > Vref * VQ / 2^16), hidden outputs
// (weighted sum >= 0), output dot products with hidden read as -1/+1, and the
// lowest-index maximum. feat and hidden are checked one edge after the
// voltages and cls one edge later, for CYCLES cycles. Outputs: running
// check, failure and tie counts and done.
module tnn_dataset_run #(
  parameter int unsigned N_IN   = 11,
  parameter int unsigned N_HID  = 3,
  parameter int unsigned N_OUT  = 6,
  parameter int unsigned SEED   = 1,
  parameter int unsigned CYCLES = 300
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   ties,
  output int   zero_sums,
  output logic done
);
  import tnn_pkg::*;

  localparam int unsigned CW = (N_OUT < 3) ? 1 : $clog2(N_OUT);

  function automatic logic [31:0] lcg(input logic [31:0] x);
    return x * 32'd1103515245 + 32'd12345;
  endfunction

  function automatic logic [8191:0] gen_hid(input int unsigned seed);
    logic [8191:0] v = '0;
    logic [31:0] x = seed;
    for (int unsigned k = 0; k < N_HID * N_IN; k++) begin
      x = lcg(x);
      case (x[30:16] % 3)
        0:       v[2*k +: 2] = TW_ZERO;
        1:       v[2*k +: 2] = TW_POS;
        default: v[2*k +: 2] = TW_NEG;
      endcase
    end
    return v;
  endfunction

  function automatic logic [8191:0] gen_out(input int unsigned seed);
    logic [8191:0] v = '0;
    logic [31:0] x = seed ^ 32'h5a5a_1234;
    for (int unsigned o = 0; o < N_OUT; o++)
      for (int unsigned j = 0; j < N_HID; j++) begin
        x = lcg(x);
        v[2*(o*N_HID + j) +: 2] = x[20] ? TW_POS : TW_NEG;
      end
    for (int unsigned o = 0; o < N_OUT; o++)
      for (int unsigned k = 0; k < N_HID / 3; k++)
        v[2*(o*N_HID + (o + k) % N_HID) +: 2] = TW_ZERO;
    return v;
  endfunction

  function automatic logic [8191:0] gen_vq(input int unsigned seed);
    logic [8191:0] v = '0;
    logic [31:0] x = seed ^ 32'h0f0f_7777;
    for (int unsigned i = 0; i < N_IN; i++) begin
      x = lcg(x);
      v[16*i +: 16] = 16'h2000 + 16'(x[31:16] % 16'hC000);
    end
    return v;
  endfunction

  localparam logic [8191:0] WH_ALL = gen_hid(SEED);
  localparam logic [8191:0] WO_ALL = gen_out(SEED);
  localparam logic [8191:0] VQ_ALL = gen_vq(SEED);

  localparam logic [N_HID-1:0][N_IN-1:0][1:0]  W_HID = WH_ALL[2*N_HID*N_IN-1:0];
  localparam logic [N_OUT-1:0][N_HID-1:0][1:0] W_OUT = WO_ALL[2*N_OUT*N_HID-1:0];
  localparam logic [N_IN-1:0][15:0]            VQ    = VQ_ALL[16*N_IN-1:0];

  localparam real VREF = 0.6;

  logic rst_n;
  real  vref;
  real  vin [N_IN];
  logic [N_IN-1:0]  feat;
  logic [N_HID-1:0] hidden;
  logic [CW-1:0]    cls;

  tnn_classifier #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT),
                   .W_HID(W_HID), .W_OUT(W_OUT), .VQ(VQ)) dut (
    .clk(clk), .rst_n(rst_n), .vref(vref), .vin(vin),
    .feat(feat), .hidden(hidden), .cls(cls));

  function automatic int wval(input logic [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL [%0d,%0d,%0d] %s", N_IN, N_HID, N_OUT, msg);
    end
  endtask

  initial begin
    logic [N_IN-1:0]  f_exp;
    logic [N_HID-1:0] h_exp;
    int               c_exp;
    checks = 0; failures = 0; ties = 0; zero_sums = 0; done = 0;
    vref = VREF;
    foreach (vin[i]) vin[i] = 0.0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    c_exp = -1;
    for (int t = 0; t < CYCLES; t++) begin
      @(negedge clk);
      for (int i = 0; i < N_IN; i++) begin
        automatic real th = VREF * real'(VQ[i]) / 65536.0;
        automatic real v;
        do v = VREF * ($urandom_range(100000) / 100000.0);
        while (v > th - 1.0e-6 && v < th + 1.0e-6);
        vin[i]   = v;
        f_exp[i] = (v > th);
      end
      @(posedge clk); #1;
      chk(feat == f_exp, "feat");
      if (c_exp >= 0) chk(int'(cls) == c_exp, $sformatf("cls %0d exp %0d", cls, c_exp));
      for (int j = 0; j < N_HID; j++) begin
        automatic int s = 0;
        for (int i = 0; i < N_IN; i++) s += wval(W_HID[j][i]) * int'(f_exp[i]);
        h_exp[j] = (s >= 0);
        if (s == 0) zero_sums++;
      end
      chk(hidden == h_exp, "hidden");
      begin
        automatic int best = -100000, nbest = 0;
        for (int o = 0; o < N_OUT; o++) begin
          automatic int d = 0;
          for (int j = 0; j < N_HID; j++) d += wval(W_OUT[o][j]) * (h_exp[j] ? 1 : -1);
          if (d > best) begin best = d; c_exp = o; nbest = 1; end
          else if (d == best) nbest++;
        end
        if (nbest > 1) ties++;
      end
    end
    @(posedge clk); #1;
    chk(int'(cls) == c_exp, "last cls");
    done = 1;
  end
endmodule
