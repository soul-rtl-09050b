// mac_array: the four multipliers shared by classification and retraining.
//
// Classification: the four features x[k] of one channel are multiplied by their
// weights w[k] and the four products (Q12.20) are summed into psum; the
// classifier accumulates psum over the eight channels to get w.x.
// Retraining: the same multipliers form err * (x[k] >> 6), i.e. eta (y - p) x
// with eta = 1/64 applied as a right shift, and the adder gives the new weight
// w[k] + eta (y - p) x[k], truncated to Q6.10 and saturated to 16 bits.
// Sharing the multipliers between the two modes and the 1/64 shift follow the
// paper; truncation and saturation are this design's choices.
//
// Interface: purely combinational. mode selects what the multipliers see.
module mac_array
  import soul_pkg::*;
(
  input  mode_e                    mode,
  input  feature_t                 x     [N_FEAT],
  input  weight_t                  w     [N_FEAT],
  input  logic signed [PROB_W+1:0] err,               // y - p, Q1.8
  output dot_t                     psum,              // classification
  output weight_t                  w_next [N_FEAT]    // retraining
);
  localparam int unsigned PW = 2 * DATA_W;

  logic signed [PW-1:0] prod [N_FEAT];
  feature_t             eta_x [N_FEAT];

  always_comb begin
    psum = '0;
    for (int k = 0; k < N_FEAT; k++) begin
      eta_x[k] = x[k] >>> LR_SHIFT;     // learning rate 1/64
      if (mode == MODE_CLASSIFY)
        prod[k] = PW'(x[k]) * PW'(w[k]);
      else
        prod[k] = PW'(err) * PW'(eta_x[k]);  // Q6.18
      psum      = psum + DOT_W'(prod[k]);
      w_next[k] = sat16(48'(w[k]) + 48'(prod[k] >>> PROB_W));
    end
  end
endmodule
