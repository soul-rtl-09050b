// window_accumulator: per-channel 100-sample delay line with a running-sum
// accumulator; the "delay line + sum + channel FIFO" of each feature.
//
// Each cycle one value of one channel arrives (in_valid, in_ch, in_value). The
// unit keeps, for every channel, the last WIN values in a register array and a
// running sum of them. The arriving value replaces the oldest one and the sum is
// updated as sum + new - oldest, so the output is the sum over the last WIN
// samples of that channel, i.e. a sliding window with a new result every sample
// (99 % overlap at WIN = 100). All channels advance together, so one write
// pointer serves all of them; it moves on after the last channel of a frame.
//
// Interface: in_* as above; out_valid/out_ch/out_value registered, one cycle
// after the input. The sum is kept exactly (IN_W + log2(WIN) bits) and
// saturated to OUT_W bits (Q6.10 feature) on output. The per-channel register
// file, exact sum and output saturation are this design's reading of the
// paper's "eight-address register file" channel FIFO; the window length follows
// the paper. The delay lines themselves are not reset (so they can map to a
// memory); until every slot has been written once after reset the oldest value
// reads as zero, so the first WIN-1 outputs of a channel sum fewer than WIN
// real values.
module window_accumulator
  import soul_pkg::*;
#(
  parameter int unsigned NCH   = N_CH,
  parameter int unsigned W     = WIN,
  parameter int unsigned IN_W  = 21,
  parameter int unsigned OUT_W = DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [$clog2(NCH)-1:0]   in_ch,
  input  logic [IN_W-1:0]          in_value,   // unsigned
  output logic                     out_valid,
  output logic [$clog2(NCH)-1:0]   out_ch,
  output logic signed [OUT_W-1:0]  out_value   // saturated, >= 0
);
  localparam int unsigned CW    = $clog2(NCH);
  localparam int unsigned PW    = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned SUM_W = IN_W + $clog2(W) + 1;
  localparam logic [SUM_W-1:0] OUT_MAX = SUM_W'((64'd1 << (OUT_W - 1)) - 1);

  localparam int unsigned AW    = $clog2(NCH * W);

  logic [IN_W-1:0]  line [NCH*W];    // delay lines, W words per channel
  logic [SUM_W-1:0] sums [NCH];      // running sums (the channel FIFO)
  logic [PW-1:0]    ptr;             // slot holding the oldest value
  logic             filled;          // every slot written since reset

  logic [AW-1:0]    addr;
  logic [IN_W-1:0]  oldest;
  logic [SUM_W-1:0] sum_next;

  always_comb begin
    addr     = AW'(in_ch) * AW'(W) + AW'(ptr);
    oldest   = filled ? line[addr] : '0;
    sum_next = sums[in_ch] + SUM_W'(in_value) - SUM_W'(oldest);
  end

  // delay-line storage: no reset, slots not yet written read as zero
  always_ff @(posedge clk)
    if (in_valid) line[addr] <= in_value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      filled    <= 1'b0;
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_value <= '0;
      for (int c = 0; c < NCH; c++) sums[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        sums[in_ch]      <= sum_next;
        out_ch           <= in_ch;
        out_value        <= (sum_next > OUT_MAX) ? OUT_MAX[OUT_W-1:0] : sum_next[OUT_W-1:0];
        if (in_ch == CW'(NCH - 1)) begin
          ptr <= (ptr == PW'(W - 1)) ? '0 : ptr + 1'b1;
          if (ptr == PW'(W - 1)) filled <= 1'b1;
        end
      end
    end
  end

endmodule
