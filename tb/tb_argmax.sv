// tb_argmax -- self-checking test of the argmax comparator chain.
//
// A 5-class, 3-bit-score argmax and a 2-class one get random score sets drawn
// from a narrow range so that ties are frequent. The expected class is the
// lowest index holding the maximum score. Tie cases are counted and must
// occur.
module tb_argmax;
  int checks = 0, failures = 0, ties = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [4:0][2:0] s5; logic [2:0] c5;
  logic [1:0][1:0] s2; logic       c2;

  argmax #(.N(5), .SW(3)) u_5 (.score(s5), .cls(c5));
  argmax #(.N(2), .SW(2)) u_2 (.score(s2), .cls(c2));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic int best, bi, nbest;
      automatic int lo = $urandom_range(5);
      for (int i = 0; i < 5; i++) s5[i] = 3'($urandom_range(7, lo));
      s2 = 4'($urandom);
      #1;
      best = -1; bi = 0; nbest = 0;
      for (int i = 0; i < 5; i++) if (int'(s5[i]) > best) begin best = int'(s5[i]); bi = i; end
      for (int i = 0; i < 5; i++) if (int'(s5[i]) == best) nbest++;
      if (nbest > 1) ties++;
      checks++;
      if (int'(c5) != bi) begin failures++; $display("FAIL n5 %p got %0d exp %0d", s5, c5, bi); end
      checks++;
      if (c2 !== (s2[1] > s2[0])) begin failures++; $display("FAIL n2 %p got %0d", s2, c2); end
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no tie case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
