// bootstrap_logic: unsupervised label and SGD error term.
//
// With no external labels the classifier trains on its own decision: the
// probability p (Q0.8) is rounded to a label y = 1 when p >= 0.5, else 0, and
// the error term of the logistic-regression gradient, y - p, is formed as a
// signed Q1.8 number (range -1..1). Label and error follow the paper; the
// 10-bit error width is this design's choice.
//
// Interface: purely combinational.
module bootstrap_logic
  import soul_pkg::*;
(
  input  prob_t                    p,
  output logic                     label,
  output logic signed [PROB_W+1:0] err     // y - p, Q1.8
);
  localparam logic [PROB_W-1:0] HALF = PROB_W'(1) << (PROB_W - 1);
  always_comb begin
    label = (p >= HALF);
    err   = (label ? (PROB_W + 2)'(1 << PROB_W) : '0) - (PROB_W + 2)'(p);
  end
endmodule
