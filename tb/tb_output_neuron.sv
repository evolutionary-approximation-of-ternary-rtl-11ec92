// tb_output_neuron -- self-checking test of the XNOR/popcount output neuron.
//
// A 6-input neuron with weights [1,-1,0,-1,1,1] and the [1,-1] neuron of the
// small example network are driven with every hidden-output word. The
// reference takes hidden bits as -1/+1, forms the signed dot product d with
// the ternary weights and expects the score (d + NNZ) / 2, NNZ being the
// number of non-zero weights: the popcount of the XNOR bits, without the
// constant that the zero weights would add.
module tb_output_neuron;
  import tnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam logic [5:0][1:0] WA = {TW_POS, TW_POS, TW_NEG, TW_ZERO, TW_NEG, TW_POS};
  localparam int              IA [6] = '{1, -1, 0, -1, 1, 1};
  localparam logic [1:0][1:0] WB = {TW_NEG, TW_POS};
  localparam int              IB [2] = '{1, -1};

  logic [5:0] ha; logic [2:0] sa;
  logic [1:0] hb; logic [1:0] sb;

  output_neuron #(.N_HID(6), .W(WA)) u_a (.h(ha), .score(sa));
  output_neuron #(.N_HID(2), .W(WB)) u_b (.h(hb), .score(sb));

  function automatic int expect_score(input logic [7:0] h, input int w[], input int n);
    int d = 0, nz = 0;
    for (int i = 0; i < n; i++) begin
      d += w[i] * (h[i] ? 1 : -1);
      if (w[i] != 0) nz++;
    end
    return (d + nz) / 2;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      int e;
      ha = 6'(v); hb = 2'(v); #1;
      e = expect_score(8'(ha), IA, 6);
      checks++;
      if (int'(sa) != e) begin failures++; $display("FAIL a h=%b got %0d exp %0d", ha, sa, e); end
      if (v < 4) begin
        e = expect_score(8'(hb), IB, 2);
        checks++;
        if (int'(sb) != e) begin failures++; $display("FAIL b h=%b got %0d exp %0d", hb, sb, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
