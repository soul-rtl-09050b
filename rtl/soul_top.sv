// soul_top: SOUL seizure detector, feature extraction plus unsupervised online
// learning logistic-regression classifier.
//
// Data path: eight 16-bit EEG channels sampled at 1 kS/s enter either from the
// recording front end (adc_valid/adc_samples) or, in test, from the scan chain
// (scan_mode = 1). The channel multiplexer serializes each sample frame, one
// channel per cycle (an 8 kHz clock for 1 kS/s); the feature extractor computes
// line length and alpha/beta/gamma band power of that channel over a sliding
// 100-sample window; the classifier accumulates the 32-term dot product, looks
// up the logistic probability, outputs the seizure label and, after a series of
// high-confidence outputs, retrains its weights by SGD on its own label.
//
// Configuration: a word port writes (and reads back) the 32 weights at cfg_addr
// 0..31, the confidence threshold CT (Q0.8) at 32 and the HC count limit at 33.
// CT and HC reset to 0.7 and 7, the common setting the paper reports for its
// three iEEG patients; the weights reset to zero and must be loaded with the
// offline-trained values. The port and its address map are this design's own.
//
// Timing: res_valid pulses once per classified sample, 3 cycles after the
// sample frame's last channel left the multiplexer (11 cycles after
// adc_valid). Frames must be at least 8 cycles apart.
module soul_top
  import soul_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // recording front end
  input  logic     adc_valid,
  input  sample_t  adc_samples [N_CH],
  // scan chain
  input  logic     scan_mode,
  input  logic     scan_en,
  input  logic     scan_in,
  input  logic     scan_load,
  output logic     scan_out,
  // configuration
  input  logic     cfg_we,
  input  logic [5:0]  cfg_addr,
  input  logic [15:0] cfg_wdata,
  output logic [15:0] cfg_rdata,
  // results
  output logic     res_valid,
  output logic     seizure_detected,
  output prob_t    probability,
  output logic     retraining,
  output logic     retrain_sz,
  output logic     retrain_ns,
  output logic     dropped,
  output logic     overrun
);
  localparam logic [5:0] ADDR_CT = 6'd32;
  localparam logic [5:0] ADDR_HC = 6'd33;

  // hyperparameter registers
  prob_t           ct;
  logic [HC_W-1:0] hc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ct <= 8'd179;          // 0.7
      hc <= HC_W'(7);
    end else if (cfg_we) begin
      if (cfg_addr == ADDR_CT) ct <= cfg_wdata[PROB_W-1:0];
      if (cfg_addr == ADDR_HC) hc <= cfg_wdata[HC_W-1:0];
    end
  end

  // sample source
  logic     sc_valid;
  sample_t  sc_frame [N_CH];
  logic     src_valid;
  sample_t  src_samples [N_CH];

  always_comb begin
    src_valid   = scan_mode ? sc_valid : adc_valid;
    src_samples = scan_mode ? sc_frame : adc_samples;
  end

  // channel multiplexer
  logic     mx_valid;
  ch_t      mx_ch;
  sample_t  mx_sample;

  channel_mux u_mux (
    .clk, .rst_n,
    .sample_valid (src_valid), .samples (src_samples),
    .ch_valid (mx_valid), .ch_id (mx_ch), .ch_sample (mx_sample), .overrun);

  // feature extraction
  logic     fe_valid;
  ch_t      fe_ch;
  feature_t fe_feat [N_FEAT];

  feature_extraction u_fe (
    .clk, .rst_n,
    .in_valid (mx_valid), .in_ch (mx_ch), .in_sample (mx_sample),
    .feat_valid (fe_valid), .feat_ch (fe_ch), .feat (fe_feat));

  // classifier + online learning
  weight_t w_rdata;

  soul_classifier u_cls (
    .clk, .rst_n,
    .feat_valid (fe_valid), .feat_ch (fe_ch), .feat (fe_feat),
    .ct, .hc,
    .w_we (cfg_we && !cfg_addr[5]), .w_addr (cfg_addr[4:0]), .w_wdata (cfg_wdata),
    .w_rdata,
    .res_valid, .prob (probability), .seizure (seizure_detected),
    .retraining, .retrain_sz, .retrain_ns, .dropped);

  always_comb begin
    if (!cfg_addr[5])             cfg_rdata = w_rdata;
    else if (cfg_addr == ADDR_CT) cfg_rdata = 16'(ct);
    else if (cfg_addr == ADDR_HC) cfg_rdata = 16'(hc);
    else                          cfg_rdata = '0;
  end

  // scan chain
  scan_chain u_scan (
    .clk, .rst_n,
    .scan_en, .scan_in, .scan_load, .scan_out,
    .frame_valid (sc_valid), .frame (sc_frame),
    .cap_valid (res_valid), .cap_seizure (seizure_detected),
    .cap_retrain_sz (retrain_sz), .cap_retrain_ns (retrain_ns),
    .cap_dropped (dropped), .cap_prob (probability));

endmodule
