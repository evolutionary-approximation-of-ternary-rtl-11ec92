// tb_pcc -- self-checking test of the popcount-compare unit.
//
// A (5,3) unit is driven exhaustively (256 input pairs) and a (45,39) unit,
// the size of the largest Arrhythmia hidden neuron, with random pairs whose
// densities are drawn so that the two counts are often equal or close. The
// expected output is count(pos) >= count(neg) from reference counts. The
// number of equal-count cases is reported and must be above zero.
module tb_pcc;
  int checks = 0, failures = 0, ties = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [4:0] p1; logic [2:0] n1; logic g1;
  logic [44:0] p2; logic [38:0] n2; logic g2;

  pcc #(.N_POS(5),  .N_NEG(3))  u_small (.pos(p1), .neg(n1), .ge(g1));
  pcc #(.N_POS(45), .N_NEG(39)) u_big   (.pos(p2), .neg(n2), .ge(g2));

  function automatic int ones(input logic [63:0] v);
    int c = 0;
    for (int i = 0; i < 64; i++) if (v[i]) c++;
    return c;
  endfunction

  // random word of n bits with about k ones
  function automatic logic [63:0] rand_k(input int n, input int k);
    logic [63:0] v = '0;
    for (int i = 0; i < n; i++) v[i] = ($urandom_range(n - 1) < k);
    return v;
  endfunction

  task automatic check(input logic got, input int cp, input int cn);
    checks++;
    if (cp == cn) ties++;
    if (got !== (cp >= cn)) begin
      failures++;
      if (failures < 10) $display("FAIL cp=%0d cn=%0d got=%0b", cp, cn, got);
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
    for (int v = 0; v < 256; v++) begin
      {p1, n1} = 8'(v); #1;
      check(g1, ones(64'(p1)), ones(64'(n1)));
    end
    for (int t = 0; t < 4000; t++) begin
      automatic int k = $urandom_range(39);
      p2 = 45'(rand_k(45, k));
      n2 = 39'(rand_k(39, k));
      #1;
      check(g2, ones(64'(p2)), ones(64'(n2)));
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no equal-count case"); end
    $display("equal-count cases: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
