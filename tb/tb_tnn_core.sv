// tb_tnn_core -- self-checking test of the digital network.
//
// Two networks are built: the default (3,2,2) example and a (6,4,3) network
// with hand-picked weights in which every output neuron has one zero weight.
// Both get a random stream of feature bits (the first 64 cycles walk through
// every word of the larger one). A reference model recomputes hidden outputs
// (weighted sum >= 0), output dot products with hidden outputs read as -1/+1
// and the lowest-index maximum, from integer weights. feat and hidden are
// checked one edge after the bits are applied and cls one edge later.
// Reset is checked, and argmax ties and zero sums are counted and must occur.
module tb_tnn_core;
  import tnn_pkg::*;
  int checks = 0, failures = 0, ties = 0, zsums = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  // network B, integer form (index 0 first) and packed form (index 0 rightmost)
  localparam int BH [4][6] = '{'{1, -1, 0, 1, 0, -1}, '{-1, 1, 1, 0, -1, 0},
                               '{0, 0, 1, -1, 1, 1}, '{1, 1, -1, -1, 0, 0}};
  localparam int BO [3][4] = '{'{1, -1, 0, 1}, '{0, 1, 1, -1}, '{-1, 0, 1, 1}};

  function automatic logic [1:0] enc(input int w);
    return (w > 0) ? TW_POS : (w < 0) ? TW_NEG : TW_ZERO;
  endfunction
  function automatic logic [3:0][5:0][1:0] pack_h();
    logic [3:0][5:0][1:0] p;
    for (int h = 0; h < 4; h++) for (int i = 0; i < 6; i++) p[h][i] = enc(BH[h][i]);
    return p;
  endfunction
  function automatic logic [2:0][3:0][1:0] pack_o();
    logic [2:0][3:0][1:0] p;
    for (int o = 0; o < 3; o++) for (int h = 0; h < 4; h++) p[o][h] = enc(BO[o][h]);
    return p;
  endfunction

  logic rst_n;
  logic [2:0] ba, fa; logic [1:0] ha; logic ca;
  logic [5:0] bb, fb; logic [3:0] hb; logic [1:0] cb;

  tnn_core u_a (.clk(clk), .rst_n(rst_n), .bits(ba), .feat(fa), .hidden(ha), .cls(ca));
  tnn_core #(.N_IN(6), .N_HID(4), .N_OUT(3), .W_HID(pack_h()), .W_OUT(pack_o()))
    u_b (.clk(clk), .rst_n(rst_n), .bits(bb), .feat(fb), .hidden(hb), .cls(cb));

  localparam int AH [2][3] = '{'{0, 1, -1}, '{-1, -1, 1}};
  localparam int AO [2][2] = '{'{1, -1}, '{1, 1}};

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] hae; logic [3:0] hbe;
    int cae, cbe;
    ba = '0; bb = '0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 chk(fa == 0 && ca == 0 && fb == 0 && cb == 0, "reset");
    @(negedge clk) rst_n = 1;
    cae = -1; cbe = -1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      ba = 3'($urandom);
      bb = (t < 64) ? 6'(t) : 6'($urandom);
      @(posedge clk); #1;
      chk(fa == ba && fb == bb, "feat");
      if (cae >= 0) chk(int'(ca) == cae, $sformatf("A cls %0d exp %0d", ca, cae));
      if (cbe >= 0) chk(int'(cb) == cbe, $sformatf("B cls %0d exp %0d", cb, cbe));
      // network A
      for (int h = 0; h < 2; h++) begin
        automatic int s = 0;
        for (int i = 0; i < 3; i++) s += AH[h][i] * int'(ba[i]);
        hae[h] = (s >= 0);
      end
      chk(ha == hae, $sformatf("A hidden %b exp %b", ha, hae));
      begin
        automatic int best = -100;
        for (int o = 0; o < 2; o++) begin
          automatic int d = 0;
          for (int h = 0; h < 2; h++) d += AO[o][h] * (hae[h] ? 1 : -1);
          if (d > best) begin best = d; cae = o; end
        end
      end
      // network B
      for (int h = 0; h < 4; h++) begin
        automatic int s = 0;
        for (int i = 0; i < 6; i++) s += BH[h][i] * int'(bb[i]);
        hbe[h] = (s >= 0);
        if (s == 0) zsums++;
      end
      chk(hb == hbe, $sformatf("B hidden %b exp %b", hb, hbe));
      begin
        automatic int best = -100, nb = 0;
        for (int o = 0; o < 3; o++) begin
          automatic int d = 0;
          for (int h = 0; h < 4; h++) d += BO[o][h] * (hbe[h] ? 1 : -1);
          if (d > best) begin best = d; cbe = o; nb = 1; end
          else if (d == best) nb++;
        end
        if (nb > 1) ties++;
      end
    end
    @(posedge clk); #1;
    chk(int'(ca) == cae && int'(cb) == cbe, "last class");
    checks += 2;
    if (ties == 0)  begin failures++; $display("FAIL no argmax tie"); end
    if (zsums == 0) begin failures++; $display("FAIL no zero sum"); end
    $display("ties=%0d zero_sums=%0d", ties, zsums);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
