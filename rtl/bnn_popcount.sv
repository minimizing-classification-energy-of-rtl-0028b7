// bnn_popcount -- the PCNT ("M-bit addition") unit of a processing engine.
//
// Counts the ones of an M-bit word: the population count that turns a
// bit-wise xnor of packed weights and packed activations into the number of
// agreeing +1/-1 pairs. Purely combinational; the surrounding PE registers its
// input (after the xnor) and its result (in the accumulator). The count needs
// log2(M)+1 bits, one more than the "logM" label of the drawing, so that an
// all-ones word is representable. The summation is written as a plain loop
// and left to synthesis to build as an adder tree.
module bnn_popcount #(
  parameter int unsigned M = 128,
  localparam int unsigned CW = $clog2(M) + 1
) (
  input  logic [M-1:0]  din,
  output logic [CW-1:0] count
);

  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < M; i++) count += CW'(din[i]);
  end

endmodule
