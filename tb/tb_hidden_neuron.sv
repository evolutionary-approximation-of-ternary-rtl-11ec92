// tb_hidden_neuron -- self-checking test of the bespoke hidden neuron.
//
// Three neurons are built with different hard-wired weight vectors: a mixed
// 7-input one, the [-1,-1,1] neuron of the small example network, and a
// neuron whose weights are all zero (no popcount inputs, output always 1).
// All input words are applied; the expected output is sum(w_i * I_i) >= 0
// worked out with integer weights in the testbench.
module tb_hidden_neuron;
  import tnn_pkg::*;
  int checks = 0, failures = 0, zero_sum = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam logic [6:0][1:0] WA = {TW_POS, TW_NEG, TW_NEG, TW_POS, TW_ZERO, TW_NEG, TW_POS};
  localparam int              IA [7] = '{1, -1, 0, 1, -1, -1, 1};   // index 0 first
  localparam logic [2:0][1:0] WB = {TW_POS, TW_NEG, TW_NEG};
  localparam int              IB [3] = '{-1, -1, 1};
  localparam logic [3:0][1:0] WC = {TW_ZERO, TW_ZERO, TW_ZERO, TW_ZERO};

  logic [6:0] ia; logic oa;
  logic [2:0] ib; logic ob;
  logic [3:0] ic; logic oc;

  hidden_neuron #(.N_IN(7), .W(WA)) u_a (.in(ia), .act(oa));
  hidden_neuron #(.N_IN(3), .W(WB)) u_b (.in(ib), .act(ob));
  hidden_neuron #(.N_IN(4), .W(WC)) u_c (.in(ic), .act(oc));

  task automatic check(input logic got, input int s, input string nm);
    checks++;
    if (s == 0) zero_sum++;
    if (got !== (s >= 0)) begin
      failures++;
      if (failures < 10) $display("FAIL %s sum=%0d got=%0b", nm, s, got);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 128; v++) begin
      int s;
      ia = 7'(v); ib = 3'(v); ic = 4'(v); #1;
      s = 0; for (int i = 0; i < 7; i++) s += IA[i] * int'(ia[i]);
      check(oa, s, "a");
      if (v < 8) begin
        s = 0; for (int i = 0; i < 3; i++) s += IB[i] * int'(ib[i]);
        check(ob, s, "b");
      end
      if (v < 16) check(oc, 0, "c");
    end
    checks++;
    if (zero_sum == 0) begin failures++; $display("FAIL no zero-sum case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
