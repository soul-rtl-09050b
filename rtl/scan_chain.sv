// scan_chain: serial test access to the classifier.
//
// Input side: while scan_en is high, scan_in is shifted into a register of
// N_CH x 16 bits, MSB first, channel 0 first. A scan_load pulse then hands the
// assembled frame to the core as one sample of every channel (frame_valid for
// one cycle). Output side: every classification result is captured into a
// 16-bit word {seizure, retrain_sz, retrain_ns, dropped, 4'b0, prob[7:0]},
// and each scan_en cycle shifts it out on scan_out, MSB first, so results
// stream out while the next frame streams in.
// That test data go in and classifier outputs come out through a scan chain
// follows the paper; the frame layout, output word and scan_load strobe are
// this design's choices. The scan chain runs on the system clock.
//
// Interface: scan_en/scan_in/scan_load in, scan_out out; frame_valid/frame to
// the channel multiplexer; cap_valid and the result fields from the classifier.
module scan_chain
  import soul_pkg::*;
#(
  parameter int unsigned NCH   = N_CH,
  parameter int unsigned OUT_W = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      scan_en,
  input  logic      scan_in,
  input  logic      scan_load,
  output logic      scan_out,
  output logic      frame_valid,
  output sample_t   frame [NCH],
  input  logic      cap_valid,
  input  logic      cap_seizure,
  input  logic      cap_retrain_sz,
  input  logic      cap_retrain_ns,
  input  logic      cap_dropped,
  input  prob_t     cap_prob
);
  localparam int unsigned FW = NCH * DATA_W;

  logic [FW-1:0]    in_sr;
  logic [OUT_W-1:0] out_sr;
  logic             flag_sz, flag_ns, flag_drop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_sr       <= '0;
      out_sr      <= '0;
      frame_valid <= 1'b0;
      flag_sz     <= 1'b0;
      flag_ns     <= 1'b0;
      flag_drop   <= 1'b0;
    end else begin
      frame_valid <= scan_load;
      if (scan_en) in_sr <= {in_sr[FW-2:0], scan_in};
      // retrain / drop events are remembered until the next result is captured
      if (cap_retrain_sz) flag_sz   <= 1'b1;
      if (cap_retrain_ns) flag_ns   <= 1'b1;
      if (cap_dropped)    flag_drop <= 1'b1;
      if (cap_valid) begin
        out_sr    <= OUT_W'({cap_seizure, flag_sz | cap_retrain_sz, flag_ns | cap_retrain_ns,
                             flag_drop | cap_dropped, 4'b0, cap_prob});
        flag_sz   <= 1'b0;
        flag_ns   <= 1'b0;
        flag_drop <= 1'b0;
      end else if (scan_en) begin
        out_sr <= {out_sr[OUT_W-2:0], 1'b0};
      end
    end
  end

  always_comb begin
    scan_out = out_sr[OUT_W-1];
    for (int c = 0; c < NCH; c++)
      frame[c] = in_sr[FW - 1 - c * DATA_W -: DATA_W];
  end

endmodule
