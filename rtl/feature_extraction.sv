// feature_extraction: the four features of every channel, one channel per cycle.
//
// The serialized stream from the channel multiplexer (one sample of one channel
// per cycle, with its channel ID) feeds four feature units in parallel:
//   x0 line length, x1 alpha (8-16 Hz), x2 beta (16-32 Hz), x3 gamma (32-96 Hz)
//   band power,
// each over a sliding 100-sample window, so every new sample of a channel gives
// four new features of that channel. The feature set, bands and window follow the
// paper; the order x0..x3 of the features is this design's choice.
//
// Interface: in_valid/in_ch/in_sample; feat_valid/feat_ch/feat[0:3] (Q6.10),
// two cycles after the input. All four units have the same latency.
module feature_extraction
  import soul_pkg::*;
#(
  parameter int unsigned NCH = N_CH,
  parameter int unsigned W   = WIN
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [$clog2(NCH)-1:0] in_ch,
  input  sample_t                in_sample,
  output logic                   feat_valid,
  output logic [$clog2(NCH)-1:0] feat_ch,
  output feature_t               feat [N_FEAT]
);
  logic                   v  [N_FEAT];
  logic [$clog2(NCH)-1:0] ch [N_FEAT];

  line_length #(.NCH(NCH), .W(W)) u_ll (
    .clk, .rst_n, .in_valid, .in_ch, .in_sample,
    .out_valid (v[0]), .out_ch (ch[0]), .out_feature (feat[0]));

  band_power #(.NCH(NCH), .W(W), .COEF(COEF_ALPHA)) u_alpha (
    .clk, .rst_n, .in_valid, .in_ch, .in_sample,
    .out_valid (v[1]), .out_ch (ch[1]), .out_feature (feat[1]));

  band_power #(.NCH(NCH), .W(W), .COEF(COEF_BETA)) u_beta (
    .clk, .rst_n, .in_valid, .in_ch, .in_sample,
    .out_valid (v[2]), .out_ch (ch[2]), .out_feature (feat[2]));

  band_power #(.NCH(NCH), .W(W), .COEF(COEF_GAMMA)) u_gamma (
    .clk, .rst_n, .in_valid, .in_ch, .in_sample,
    .out_valid (v[3]), .out_ch (ch[3]), .out_feature (feat[3]));

  assign feat_valid = v[0];
  assign feat_ch    = ch[0];

  // all four units run in lock step
  a_lock_step: assert property (@(posedge clk) disable iff (!rst_n)
    v[1] == v[0] && v[2] == v[0] && v[3] == v[0] &&
            (!v[0] || (ch[1] == ch[0] && ch[2] == ch[0] && ch[3] == ch[0])))
    else $error("feature units out of step");

endmodule
