// tb_popcount -- self-checking test of the exact popcount.
//
// An 8-input popcount is driven with all 256 input words and a 47-input one
// with 3000 random words (with runs of all-zero and all-one words). Each count
// is compared with a bit-by-bit reference count made in the testbench.
module tb_popcount;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [7:0]  a;  logic [3:0] ca;
  logic [46:0] b;  logic [5:0] cb;

  popcount #(.N(8))  u_a (.in(a), .cnt(ca));
  popcount #(.N(47)) u_b (.in(b), .cnt(cb));

  function automatic int ref_count(input logic [63:0] v, input int n);
    int c = 0;
    for (int i = 0; i < n; i++) if (v[i]) c++;
    return c;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      a = 8'(v); #1;
      checks++;
      if (int'(ca) != ref_count(64'(a), 8)) begin
        failures++; $display("FAIL n=8 in=%h got %0d", a, ca);
      end
    end
    for (int t = 0; t < 3000; t++) begin
      if (t < 5) b = '0;
      else if (t < 10) b = '1;
      else b = 47'({$urandom, $urandom});
      // thin or thicken the word to cover small and large counts
      if (t % 3 == 1) b = b & 47'({$urandom, $urandom});
      if (t % 3 == 2) b = b | 47'({$urandom, $urandom});
      #1;
      checks++;
      if (int'(cb) != ref_count(64'(b), 47)) begin
        failures++; $display("FAIL n=47 in=%h got %0d", b, cb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
