// argmax -- index of the largest of N scores.
//
// A chain of N-1 magnitude comparators walks the scores from index 0 up and
// keeps the running maximum and its index; a later score replaces it only
// when strictly larger, so a tie goes to the lowest index. The paper only
// says a set of comparators picks the highest-scoring output neuron; the
// chain form and the tie rule are this design's choices.
//
// Interface: score[i] is the SW-bit score of class i; cls is the winning
// class index, CW = max(1, clog2(N)) bits. Purely combinational.
module argmax #(
  parameter int unsigned N  = 2,
  parameter int unsigned SW = 2,
  localparam int unsigned CW = (N < 3) ? 1 : $clog2(N)
) (
  input  logic [N-1:0][SW-1:0] score,
  output logic [CW-1:0]        cls
);

  logic [SW-1:0] best;

  always_comb begin
    best = score[0];
    cls  = '0;
    for (int unsigned i = 1; i < N; i++) begin
      if (score[i] > best) begin
        best = score[i];
        cls  = CW'(i);
      end
    end
  end

endmodule
