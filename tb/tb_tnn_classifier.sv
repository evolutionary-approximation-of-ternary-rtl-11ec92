// tb_tnn_classifier -- end-to-end test of the classifier at its default size.
//
// The classifier is used exactly as its defaults build it: the (3,2,2)
// example network with hidden weights [0,1,-1], [-1,-1,1], output weights
// [1,-1], [1,1] and every converter threshold at Vref/2 (Vref = 0.6 V here).
// A reference model in the testbench recomputes, from the sensor voltages
// and the integer weights, the converter bits, the hidden outputs (sign of
// the weighted sum, 0 counting as positive), the output scores (signed dot
// product with hidden outputs read as -1/+1) and the winning class (lowest
// index on a tie).
//
// Checked: feat one edge after the voltages are applied, hidden in the same
// cycle as feat, cls one edge after feat (two edges after the voltages),
// reset clearing both registers, and an exact latency of two edges on a
// directed class change. Counted, and required to happen: converter bits
// rising and falling, a hidden neuron firing on a zero sum, the class
// changing in both directions, and every feature vector. In this network the
// two output scores always differ by one (only the second hidden neuron is
// weighted differently), so an argmax tie cannot occur here; ties are
// exercised by the multi-topology test.
module tb_tnn_classifier;
  int checks = 0, failures = 0;
  int n_rise = 0, n_fall = 0, n_zero_sum = 0, n_up = 0, n_down = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int WH [2][3] = '{'{0, 1, -1}, '{-1, -1, 1}};
  localparam int WO [2][2] = '{'{1, -1}, '{1, 1}};
  localparam real VREF = 0.6;

  logic rst_n;
  real  vref;
  real  vin [3];
  logic [2:0] feat;
  logic [1:0] hidden;
  logic       cls;

  tnn_classifier dut (.clk(clk), .rst_n(rst_n), .vref(vref), .vin(vin),
                      .feat(feat), .hidden(hidden), .cls(cls));

  // ------------------------------------------------------ reference model
  function automatic logic [1:0] ref_hidden(input logic [2:0] f, output int zs);
    logic [1:0] h;
    zs = 0;
    for (int j = 0; j < 2; j++) begin
      int s = 0;
      for (int i = 0; i < 3; i++) s += WH[j][i] * int'(f[i]);
      h[j] = (s >= 0);
      if (s == 0 && WH[j][0] + WH[j][1] + WH[j][2] != 0) zs++;
    end
    return h;
  endfunction

  function automatic logic ref_class(input logic [1:0] h);
    int best = -100, bi = 0;
    for (int o = 0; o < 2; o++) begin
      int d = 0;
      for (int j = 0; j < 2; j++) d += WO[o][j] * (h[j] ? 1 : -1);
      if (d > best) begin best = d; bi = o; end
    end
    return logic'(bi);
  endfunction

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // voltage for a wanted bit, away from the Vref/2 threshold
  function automatic real volt(input logic b);
    return b ? VREF * (0.55 + 0.4 * ($urandom_range(1000) / 1000.0))
             : VREF * (0.45 * ($urandom_range(1000) / 1000.0));
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] f_prev, f_now;
    logic       c_exp, c_last;
    logic [1:0] h_exp;
    int         zs;
    bit         seen [8];

    vref = VREF;
    foreach (vin[i]) vin[i] = 0.0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1;
    chk(feat == 3'b000 && cls == 1'b0, "reset clears registers");
    @(negedge clk) rst_n = 1;

    // random stream: all feature vectors, many times
    f_prev = '0;
    c_last = 0;
    c_exp  = 0;
    for (int t = 0; t < 400; t++) begin
      f_now = (t < 8) ? 3'(t) : 3'($urandom);
      @(negedge clk);
      foreach (vin[i]) vin[i] = volt(f_now[i]);
      @(posedge clk); #1;
      // feat now holds f_now; cls holds the class of f_prev
      chk(feat == f_now, $sformatf("feat %b exp %b", feat, f_now));
      h_exp = ref_hidden(f_now, zs);
      n_zero_sum += zs;
      chk(hidden == h_exp, $sformatf("hidden %b exp %b for %b", hidden, h_exp, f_now));
      if (t > 0) chk(cls == c_exp, $sformatf("cls %0d exp %0d (feat %b)", cls, c_exp, f_prev));
      for (int i = 0; i < 3; i++) begin
        if (f_now[i] && !f_prev[i]) n_rise++;
        if (!f_now[i] && f_prev[i]) n_fall++;
      end
      if (t > 0 && c_exp != c_last) begin if (c_exp) n_up++; else n_down++; end
      if (t > 0) c_last = c_exp;
      seen[f_now] = 1;
      c_exp  = ref_class(h_exp);
      f_prev = f_now;
    end

    // directed latency check: class 0 steady, then class 1 voltages
    @(negedge clk); foreach (vin[i]) vin[i] = volt(1'b0);   // 000 -> h2 = 1 -> class 1
    repeat (3) @(posedge clk);
    @(negedge clk); foreach (vin[i]) vin[i] = volt(1'b1);   // 111 -> sum2 = -1 -> class 0
    repeat (3) @(posedge clk);
    #1 chk(cls == 1'b0, "steady class 0");
    @(negedge clk); vin[0] = volt(1'b0); vin[1] = volt(1'b0); vin[2] = volt(1'b1); // 100 -> class 1
    @(posedge clk); #1 chk(cls == 1'b0, "class unchanged one edge after input");
    @(posedge clk); #1 chk(cls == 1'b1, "class updated two edges after input");

    // reset in the middle of operation
    @(negedge clk) rst_n = 0;
    #1 chk(feat == 3'b000 && cls == 1'b0, "asynchronous reset");
    @(negedge clk) rst_n = 1;

    foreach (seen[v]) chk(seen[v], $sformatf("feature vector %0d applied", v));
    chk(n_rise > 0,     "converter bit rose");
    chk(n_fall > 0,     "converter bit fell");
    chk(n_zero_sum > 0, "hidden neuron fired on zero sum");
    chk(n_up > 0,       "class changed 0->1");
    chk(n_down > 0,     "class changed 1->0");
    $display("rises=%0d falls=%0d zero_sum=%0d class_up=%0d class_down=%0d",
             n_rise, n_fall, n_zero_sum, n_up, n_down);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
