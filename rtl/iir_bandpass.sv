// iir_bandpass: IIR bandpass filter of one EEG band, shared by all channels.
//
// Three second-order sections in cascade, each in Direct Form I:
//   y[n] = b0 x[n] + b1 x[n-1] + b2 x[n-2] - a1 y[n-1] - a2 y[n-2]
// Every section keeps four state registers (x[n-1], x[n-2], y[n-1], y[n-2]) per
// channel, so the state of all channels sits in register files indexed by the
// channel ID and the filter hardware is time-shared: each cycle it filters one
// sample of the channel on the input and updates only that channel's state.
// Data are 16-bit Q6.10; coefficients Q2.14 (soul_pkg). Each section's sum is
// formed at full width, rounded to nearest and saturated to 16 bits.
//
// The cascade of three Direct Form I sections, the 16-bit Q6.10 data and the
// elliptic response follow the paper; the coefficient values and format, the
// five multipliers per section and the rounding/saturation are this design's.
//
// Interface: in_valid/in_ch/in_sample; out_valid/out_ch/out_sample registered,
// one cycle after the input. The whole cascade is combinational within the
// cycle (the paper's system clock is only 8 kHz).
module iir_bandpass
  import soul_pkg::*;
#(
  parameter int unsigned NCH  = N_CH,
  parameter band_coef_t  COEF = COEF_ALPHA
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [$clog2(NCH)-1:0] in_ch,
  input  sample_t                in_sample,
  output logic                   out_valid,
  output logic [$clog2(NCH)-1:0] out_ch,
  output sample_t                out_sample
);
  localparam int unsigned ACC_W = 40;

  // per-channel, per-section state
  sample_t x1 [NCH][N_SOS];
  sample_t x2 [NCH][N_SOS];
  sample_t y1 [NCH][N_SOS];
  sample_t y2 [NCH][N_SOS];

  sample_t                   sec_in  [N_SOS];
  sample_t                   sec_out [N_SOS];
  logic signed [ACC_W-1:0]   acc     [N_SOS];

  sample_t v;

  always_comb begin
    v = in_sample;
    for (int s = 0; s < N_SOS; s++) begin
      sec_in[s] = v;
      acc[s] = ACC_W'(COEF[s][0] * sec_in[s])
             + ACC_W'(COEF[s][1] * x1[in_ch][s])
             + ACC_W'(COEF[s][2] * x2[in_ch][s])
             - ACC_W'(COEF[s][3] * y1[in_ch][s])
             - ACC_W'(COEF[s][4] * y2[in_ch][s])
             + (ACC_W'(1) <<< (COEF_FRAC - 1));
      sec_out[s] = sat16(48'(acc[s] >>> COEF_FRAC));
      v = sec_out[s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_ch     <= '0;
      out_sample <= '0;
      for (int c = 0; c < NCH; c++)
        for (int s = 0; s < N_SOS; s++) begin
          x1[c][s] <= '0; x2[c][s] <= '0;
          y1[c][s] <= '0; y2[c][s] <= '0;
        end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int s = 0; s < N_SOS; s++) begin
          x2[in_ch][s] <= x1[in_ch][s];
          x1[in_ch][s] <= sec_in[s];
          y2[in_ch][s] <= y1[in_ch][s];
          y1[in_ch][s] <= sec_out[s];
        end
        out_ch     <= in_ch;
        out_sample <= sec_out[N_SOS-1];
      end
    end
  end

endmodule
