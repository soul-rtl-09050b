// line_length: line-length feature, sum over the window of |x[i] - x[i-1]|.
//
// For the channel on the input, the previous sample of that channel is read from
// a per-channel register, the absolute difference is formed and registered, and
// a window_accumulator sums the last WIN differences. The formula and the
// 100-sample window follow the paper; the per-channel previous-sample register,
// the extra register stage (which gives line length the same two-cycle latency
// as the band-power features) and reset to zero are this design's choices.
//
// Interface: in_valid/in_ch/in_sample (Q6.10); out_valid/out_ch/out_feature
// (Q6.10, saturated), two cycles after the input.
module line_length
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
  output logic                   out_valid,
  output logic [$clog2(NCH)-1:0] out_ch,
  output feature_t               out_feature
);
  localparam int unsigned CW = $clog2(NCH);
  localparam int unsigned AW = DATA_W + 1;

  sample_t                prev [NCH];
  logic signed [AW-1:0]   diff;
  logic [AW-1:0]          absd_q;
  logic                   v_q;
  logic [CW-1:0]          ch_q;

  assign diff = AW'(in_sample) - AW'(prev[in_ch]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q    <= 1'b0;
      ch_q   <= '0;
      absd_q <= '0;
      for (int c = 0; c < NCH; c++) prev[c] <= '0;
    end else begin
      v_q <= in_valid;
      if (in_valid) begin
        prev[in_ch] <= in_sample;
        ch_q        <= in_ch;
        absd_q      <= diff[AW-1] ? AW'(-diff) : AW'(diff);
      end
    end
  end

  window_accumulator #(.NCH(NCH), .W(W), .IN_W(AW), .OUT_W(DATA_W)) u_win (
    .clk, .rst_n,
    .in_valid (v_q), .in_ch (ch_q), .in_value (absd_q),
    .out_valid, .out_ch, .out_value (out_feature));

endmodule
