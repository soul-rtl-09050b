// soul_classifier: logistic-regression classifier with unsupervised online SGD.
//
// Classification mode. The four features of channel c arrive together (one
// channel per cycle, channels 0..7 in order). The mac_array multiplies them by
// the channel's four weights and the partial sums are accumulated; the features
// are also kept in a 32-word buffer. When channel 7 arrives the full dot product
// z = w.x is complete; the sigmoid LUT gives p, the bootstrap logic rounds p to
// the label (the seizure output) and p is passed to the retrain logic. Result
// outputs are registered: res_valid pulses the cycle after channel 7.
//
// Retraining mode. When the retrain logic reports a completed high-confidence
// series, the next eight cycles apply eq. (2), w <- w + (1/64)(y - p) x, to the
// buffered features of the sample just classified, one channel group of four
// weights per cycle, reusing the multipliers. The series registers are cleared
// when retraining starts. A sample whose channel 0 arrives while retraining runs
// is ignored as a whole (dropped pulses). With back-to-back samples, as at the
// paper's 8 kHz clock, exactly one sample is dropped per retraining.
//
// The two modes, the 8-cycle retraining, the shared multipliers, the dropped
// sample and the counter reset follow the paper. The feature buffer (the paper
// does not say where the features of the sample are kept for the update), the
// start of retraining in the cycle after the result, and the guard that keeps
// retraining from starting in the middle of a sample are this design's choices.
//
// Interface: feat_valid/feat_ch/feat in; ct/hc configuration; word port to the
// weights; res_valid/prob/seizure, retraining, retrain_sz/retrain_ns (pulse on
// the first retraining cycle, by cause) and dropped out.
module soul_classifier
  import soul_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // features from the extractor
  input  logic                     feat_valid,
  input  logic [$clog2(NCH)-1:0]   feat_ch,
  input  feature_t                 feat [N_FEAT],
  // hyperparameters
  input  prob_t                    ct,
  input  logic [HC_W-1:0]          hc,
  // weight load / read-back
  input  logic                     w_we,
  input  logic [$clog2(NCH*N_FEAT)-1:0] w_addr,
  input  weight_t                  w_wdata,
  output weight_t                  w_rdata,
  // results
  output logic                     res_valid,
  output prob_t                    prob,
  output logic                     seizure,
  output logic                     retraining,
  output logic                     retrain_sz,
  output logic                     retrain_ns,
  output logic                     dropped
);
  localparam int unsigned CW = $clog2(NCH);

  mode_e                   mode;
  logic [CW-1:0]           rcnt;
  dot_t                    acc;
  feature_t                fbuf [NCH][N_FEAT];
  logic                    drop_frame;    // rest of an ignored sample
  logic                    in_frame;      // a sample is being accumulated
  prob_t                   p_q;

  // datapath wires
  logic                    start_retrain, retrain_now, accept, last_ch;
  logic [CW-1:0]           step, grp;
  mode_e                   mac_mode;
  feature_t                mac_x  [N_FEAT];
  weight_t                 w_grp  [N_FEAT];
  weight_t                 w_next [N_FEAT];
  dot_t                    psum, z;
  prob_t                   p_lut;
  logic signed [PROB_W+1:0] err;
  logic                    rl_en, rl_sz, rl_ns;

  always_comb begin
    start_retrain = (mode == MODE_CLASSIFY) && rl_en && !in_frame;
    retrain_now   = (mode == MODE_RETRAIN) || start_retrain;
    step          = (mode == MODE_RETRAIN) ? rcnt : '0;
    accept        = feat_valid && !retrain_now && !(drop_frame || (feat_ch != '0 && !in_frame));
    last_ch       = (feat_ch == CW'(NCH - 1));
    grp           = retrain_now ? step : feat_ch;
    mac_mode      = retrain_now ? MODE_RETRAIN : MODE_CLASSIFY;
    for (int k = 0; k < N_FEAT; k++) mac_x[k] = retrain_now ? fbuf[step][k] : feat[k];
    z             = (feat_ch == '0) ? psum : acc + psum;
  end

  weight_memory #(.NCH(NCH)) u_wmem (
    .clk, .rst_n,
    .grp (grp), .grp_rdata (w_grp), .grp_we (retrain_now), .grp_wdata (w_next),
    .word_we (w_we), .word_addr (w_addr), .word_wdata (w_wdata), .word_rdata (w_rdata));

  mac_array u_mac (
    .mode (mac_mode), .x (mac_x), .w (w_grp), .err (err),
    .psum (psum), .w_next (w_next));

  sigmoid_lut u_lut (.z (z), .p (p_lut));

  bootstrap_logic u_boot (.p (p_q), .label (seizure), .err (err));

  retrain_logic u_rl (
    .clk, .rst_n,
    .p_valid (accept && last_ch), .p (p_lut), .ct, .hc,
    .clear (start_retrain),
    .retrain_sz (rl_sz), .retrain_ns (rl_ns), .retrain_en (rl_en));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode       <= MODE_CLASSIFY;
      rcnt       <= '0;
      acc        <= '0;
      drop_frame <= 1'b0;
      in_frame   <= 1'b0;
      p_q        <= '0;
      res_valid  <= 1'b0;
      dropped    <= 1'b0;
      for (int c = 0; c < NCH; c++)
        for (int k = 0; k < N_FEAT; k++) fbuf[c][k] <= '0;
    end else begin
      res_valid <= 1'b0;
      dropped   <= 1'b0;

      // retraining sequencer: steps 0..NCH-1, step 0 in the start cycle
      if (start_retrain) begin
        mode <= (NCH > 1) ? MODE_RETRAIN : MODE_CLASSIFY;
        rcnt <= CW'(1);
      end else if (mode == MODE_RETRAIN) begin
        if (rcnt == CW'(NCH - 1)) begin
          mode <= MODE_CLASSIFY;
          rcnt <= '0;
        end else begin
          rcnt <= rcnt + 1'b1;
        end
      end

      // sample bookkeeping
      if (feat_valid) begin
        if (feat_ch == '0 && retrain_now) begin
          drop_frame <= !last_ch;
          dropped    <= 1'b1;
        end else if (last_ch) begin
          drop_frame <= 1'b0;
        end
      end

      if (accept) begin
        fbuf[feat_ch] <= feat;
        acc           <= z;
        in_frame      <= !last_ch;
        if (last_ch) begin
          p_q       <= p_lut;
          res_valid <= 1'b1;
        end
      end
    end
  end

  assign prob       = p_q;
  assign retraining = retrain_now;
  assign retrain_sz = start_retrain && rl_sz;
  assign retrain_ns = start_retrain && rl_ns;

  // a sample must not start while the previous one is still being accumulated
  a_in_order: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> (feat_ch == '0 || in_frame))
    else $error("feature channel out of order");

endmodule
