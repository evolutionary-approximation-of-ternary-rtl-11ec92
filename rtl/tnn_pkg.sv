// tnn_pkg -- shared types, constants and elaboration-time helpers of the
// bespoke ternary neural network (TNN) classifier.
//
// A bespoke TNN has its weights hard-wired into the netlist, so every weight
// is a parameter. Each ternary weight w in {-1, 0, +1} is held in a 2-bit
// field (tw_t). The encoding below is this design's own choice: 2'b00 is 0,
// 2'b01 is +1 and 2'b11 is -1 (two's complement of the value); 2'b10 is unused
// and treated as 0. The constant functions count the weights of one value in
// a weight vector and return the position of the k-th such weight. Neurons use
// them at elaboration time to give each popcount exactly as many inputs as
// the neuron has +1 (or -1) weights, and to wire each input straight to its
// popcount bit, with no gates for the selection.
package tnn_pkg;

  typedef logic [1:0] tw_t;

  localparam tw_t TW_ZERO = 2'b00;
  localparam tw_t TW_POS  = 2'b01;
  localparam tw_t TW_NEG  = 2'b11;

  // Largest fan-in handled by the constant functions (Arrhythmia has 274 inputs).
  localparam int unsigned MAX_FANIN = 1024;

  // Number of weights equal to `val` among the first n fields of w.
  function automatic int unsigned count_w(input logic [2*MAX_FANIN-1:0] w,
                                          input int unsigned n, input tw_t val);
    int unsigned c = 0;
    for (int unsigned i = 0; i < n; i++)
      if (w[2*i +: 2] == val) c++;
    return c;
  endfunction

  // Index of the k-th (from 0) weight equal to `val`; n when there is none.
  function automatic int unsigned nth_w(input logic [2*MAX_FANIN-1:0] w,
                                        input int unsigned n, input tw_t val,
                                        input int unsigned k);
    int unsigned c = 0;
    for (int unsigned i = 0; i < n; i++) begin
      if (w[2*i +: 2] == val) begin
        if (c == k) return i;
        c++;
      end
    end
    return n;
  endfunction

  // Bits needed to hold a count of 0..n.
  function automatic int unsigned cnt_bits(input int unsigned n);
    return (n < 1) ? 1 : $clog2(n + 1);
  endfunction

endpackage
