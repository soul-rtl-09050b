// soul_pkg: constants, fixed-point types and tables shared by the SOUL seizure
// classifier.
//
// Number formats
//   sample_t / feature_t / weight_t : 16-bit signed two's complement, Q6.10
//                                     (6 integer bits incl. sign, 10 fraction bits)
//   coef_t                          : 16-bit signed IIR coefficient, Q2.14
//   prob_t                          : 8-bit unsigned probability, Q0.8 (value/256)
//   dot_t                           : dot-product accumulator, Q12.20 products summed
//
// The 8-channel, 4-feature, 100-sample window, 16-bit Q6.10 data, three
// second-order sections per band, ten LUT rows, 1/64 learning rate and the 16/160
// stage HC counters follow the paper. The coefficient and probability formats, the
// filter coefficients and the LUT row contents are this design's own choices.
package soul_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_CH      = 8;    // EEG channels
  localparam int unsigned N_FEAT    = 4;    // features per channel
  localparam int unsigned N_W       = N_CH * N_FEAT;  // 32 weights
  localparam int unsigned WIN       = 100;  // feature window, samples
  localparam int unsigned DATA_W    = 16;
  localparam int unsigned DATA_FRAC = 10;
  localparam int unsigned COEF_W    = 16;
  localparam int unsigned COEF_FRAC = 14;
  localparam int unsigned N_SOS     = 3;    // second-order sections per band
  localparam int unsigned PROB_W    = 8;
  localparam int unsigned LUT_ROWS  = 10;
  localparam int unsigned LR_SHIFT  = 6;    // learning rate 1/64
  localparam int unsigned HC_W      = 5;    // HC register, 0..16
  localparam int unsigned HC_SZ_MAX = 16;   // seizure series counter stages
  localparam int unsigned NS_FACTOR = 10;   // non-seizure HC = 10 x seizure HC
  localparam int unsigned HC_NS_MAX = HC_SZ_MAX * NS_FACTOR;  // 160 stages
  localparam int unsigned CH_W      = $clog2(N_CH);
  localparam int unsigned DOT_W     = 2 * DATA_W + $clog2(N_W) + 1;  // 38 bits
  localparam int unsigned DOT_FRAC  = 2 * DATA_FRAC;                 // Q12.20

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [DATA_W-1:0] feature_t;
  typedef logic signed [DATA_W-1:0] weight_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic        [PROB_W-1:0] prob_t;
  typedef logic signed [DOT_W-1:0]  dot_t;
  typedef logic        [CH_W-1:0]   ch_t;

  // One second-order section: {b0, b1, b2, a1, a2}, with
  // y[n] = b0 x[n] + b1 x[n-1] + b2 x[n-2] - a1 y[n-1] - a2 y[n-2].
  typedef coef_t sos_t [5];
  typedef sos_t  band_coef_t [N_SOS];

  // Elliptic bandpass filters for fs = 1 kHz, 3rd-order prototype (6th order
  // overall), 1 dB passband ripple, 20 dB stopband, split into three sections
  // with the overall gain shared equally. Values are round(c * 2^14).
  localparam band_coef_t COEF_ALPHA = '{   //  8 - 16 Hz
    '{16'sd3259,      16'sd0, -16'sd3259, -16'sd32165, 16'sd15862},
    '{16'sd3259, -16'sd6475,  16'sd3259, -16'sd32427, 16'sd16208},
    '{16'sd3259, -16'sd6512,  16'sd3259, -16'sd32639, 16'sd16296}};
  localparam band_coef_t COEF_BETA = '{    // 16 - 32 Hz
    '{16'sd4077,      16'sd0, -16'sd4077, -16'sd31420, 16'sd15356},
    '{16'sd4077, -16'sd7937,  16'sd4077, -16'sd31763, 16'sd16034},
    '{16'sd4077, -16'sd8124,  16'sd4077, -16'sd32428, 16'sd16208}};
  localparam band_coef_t COEF_GAMMA = '{   // 32 - 96 Hz
    '{16'sd6290,      16'sd0, -16'sd6290, -16'sd27206, 16'sd12584},
    '{16'sd6290, -16'sd9342,  16'sd6290, -16'sd25744, 16'sd14919},
    '{16'sd6290, -16'sd12413, 16'sd6290, -16'sd31595, 16'sd15856}};

  // Logistic LUT. Row r (0..9) covers z in [r-5, r-4) for r = 1..8, z < -4 for
  // r = 0 and z >= 4 for r = 9; it holds round(256 / (1 + exp(-m))) where m is
  // the middle of the row's range (-4.5, -3.5, ..., 4.5). Rows are symmetric
  // (row r + row 9-r = 256), so p >= 0.5 exactly when z >= 0.
  localparam prob_t SIGMOID_ROWS [LUT_ROWS] =
    '{8'd3, 8'd8, 8'd19, 8'd47, 8'd97, 8'd159, 8'd209, 8'd237, 8'd248, 8'd253};

  // Row index for a dot product z (Q12.20): floor(z) + 5, clamped to 0..9.
  function automatic int unsigned sigmoid_row(input dot_t z);
    dot_t zi;
    zi = z >>> DOT_FRAC;  // floor(z)
    if (zi < -4)      return 0;
    else if (zi > 3)  return LUT_ROWS - 1;
    else              return int'(zi) + 5;
  endfunction

  // Saturate a wide signed value to DATA_W bits.
  function automatic logic signed [DATA_W-1:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[DATA_W-1:0];
  endfunction

  typedef enum logic {MODE_CLASSIFY = 1'b0, MODE_RETRAIN = 1'b1} mode_e;

endpackage
