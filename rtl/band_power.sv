// band_power: spectral band power of one EEG band for all channels.
//
// By Parseval's theorem the power in a band over a window can be approximated
// without an FFT: bandpass-filter the signal, square it and sum the squares over
// the window. This unit chains an iir_bandpass, a squarer and a
// window_accumulator (100-sample running sum). The square of the Q6.10 filter
// output is kept as Q12.10 (the 32-bit product shifted right by 10, 21 bits)
// before summing; that width is this design's choice. The method follows the
// paper.
//
// Interface: in_valid/in_ch/in_sample; out_valid/out_ch/out_feature (Q6.10,
// saturated), two cycles after the input.
module band_power
  import soul_pkg::*;
#(
  parameter int unsigned NCH  = N_CH,
  parameter int unsigned W    = WIN,
  parameter band_coef_t  COEF = COEF_ALPHA
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [$clog2(NCH)-1:0] in_ch,
  input  sample_t                in_sample,
  output logic                   out_valid,
  output logic [$clog2(NCH)-1:0] out_ch,
  output feature_t               out_feature
);
  localparam int unsigned SQ_W = 2 * DATA_W - DATA_FRAC - 1;  // 21

  logic                    f_valid;
  logic [$clog2(NCH)-1:0]  f_ch;
  sample_t                 f_sample;
  logic signed [2*DATA_W-1:0] sq;
  logic [SQ_W-1:0]         sq_q610;

  iir_bandpass #(.NCH(NCH), .COEF(COEF)) u_filt (
    .clk, .rst_n,
    .in_valid, .in_ch, .in_sample,
    .out_valid (f_valid), .out_ch (f_ch), .out_sample (f_sample));

  always_comb begin
    sq      = f_sample * f_sample;                 // Q12.20, >= 0
    sq_q610 = SQ_W'(sq >>> DATA_FRAC);             // Q11.10 fits 21 bits
  end

  window_accumulator #(.NCH(NCH), .W(W), .IN_W(SQ_W), .OUT_W(DATA_W)) u_win (
    .clk, .rst_n,
    .in_valid (f_valid), .in_ch (f_ch), .in_value (sq_q610),
    .out_valid, .out_ch, .out_value (out_feature));

endmodule
