// channel_mux: channel multiplexer / serializer in front of the feature extractor.
//
// The feature extractor is shared by all EEG channels, so one sample of every
// channel is latched when sample_valid pulses (once per 1 ms at 1 kS/s) and the
// channels are then sent out one per clock, channel 0 first, with their channel
// ID. At the paper's 8 kHz system clock a frame takes the whole sample period;
// with a faster clock the unit idles between frames.
//
// Interface: sample_valid/samples in; ch_valid/ch_id/ch_sample out, registered.
// Timing: ch_valid is high for N_CH consecutive cycles, starting the cycle after
// sample_valid. A sample_valid that arrives while a frame is still being sent is
// ignored and flagged on 'overrun' for one cycle; the overrun rule is this
// design's own.
module channel_mux
  import soul_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sample_valid,
  input  sample_t          samples [NCH],
  output logic             ch_valid,
  output logic [$clog2(NCH)-1:0] ch_id,
  output sample_t          ch_sample,
  output logic             overrun
);
  localparam int unsigned CW = $clog2(NCH);

  sample_t         frame [NCH];
  logic            busy;
  logic [CW-1:0]   cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      ch_valid  <= 1'b0;
      ch_id     <= '0;
      ch_sample <= '0;
      overrun   <= 1'b0;
      for (int c = 0; c < NCH; c++) frame[c] <= '0;
    end else begin
      overrun  <= sample_valid && busy;
      ch_valid <= 1'b0;
      if (busy) begin
        ch_valid  <= 1'b1;
        ch_id     <= cnt;
        ch_sample <= frame[cnt];
        if (cnt == CW'(NCH - 1)) begin
          busy <= 1'b0;
          cnt  <= '0;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end else if (sample_valid) begin
        for (int c = 0; c < NCH; c++) frame[c] <= samples[c];
        // channel 0 goes out straight away, the rest from the latched frame
        ch_valid  <= 1'b1;
        ch_id     <= '0;
        ch_sample <= samples[0];
        busy      <= (NCH > 1);
        cnt       <= CW'(1);
      end
    end
  end

endmodule
