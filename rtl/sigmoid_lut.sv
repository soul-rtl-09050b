// sigmoid_lut: ten-row lookup-table approximation of the logistic function.
//
// p = 1 / (1 + exp(-z)) is replaced by a table: the dot product z (Q12.20) is
// split at the integers -4, -3, ..., 4 into ten ranges and each range returns a
// fixed probability (Q0.8), the logistic value at the middle of the range (rows
// in soul_pkg). The ten rows follow the paper; where the rows split and what they
// hold is this design's choice. The table is symmetric, so p >= 0.5 exactly when
// z >= 0.
//
// Interface: purely combinational, z in, p out.
module sigmoid_lut
  import soul_pkg::*;
(
  input  dot_t                         z,
  output prob_t                        p
);
  always_comb p = SIGMOID_ROWS[sigmoid_row(z)];
endmodule
