// retrain_logic: confidence thresholding and high-confidence (HC) series counters.
//
// Every classification result p is compared with two thresholds: the seizure
// threshold CT and the non-seizure threshold 1 - CT. "p > CT" is shifted into a
// 16-stage seizure series register and "p < 1 - CT" into a 160-stage non-seizure
// series register. Retraining is requested when the newest HC bits of the seizure
// register are all 1 (HC consecutive confident seizure outputs), or the newest
// 10 x HC bits of the non-seizure register are all 1. An output that is not
// confident shifts in a 0 and so breaks the series. 'clear' empties both
// registers (done when retraining starts). CT (Q0.8) and HC (1..16) are
// programmable; HC = 0 never requests retraining.
//
// The two comparators, the 16/160-stage registers, the x10 non-seizure limit and
// the reset after retraining follow the paper. The strict comparisons, the
// all-ones window test for the count limit and HC = 0 are this design's reading.
//
// Interface: p_valid/p in; retrain_sz / retrain_ns / retrain_en are
// combinational from the registers, so they rise the cycle after the p_valid
// that completes a series.
module retrain_logic
  import soul_pkg::*;
#(
  parameter int unsigned SZ_STAGES = HC_SZ_MAX,
  parameter int unsigned NS_FACT   = NS_FACTOR
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          p_valid,
  input  prob_t         p,
  input  prob_t         ct,        // seizure confidence threshold, Q0.8
  input  logic [HC_W-1:0] hc,      // seizure HC count limit
  input  logic          clear,
  output logic          retrain_sz,
  output logic          retrain_ns,
  output logic          retrain_en
);
  localparam int unsigned NS_STAGES = SZ_STAGES * NS_FACT;

  logic [SZ_STAGES-1:0] sz_sr;     // bit 0 = newest
  logic [NS_STAGES-1:0] ns_sr;
  logic [SZ_STAGES-1:0] sz_mask;
  logic [NS_STAGES-1:0] ns_mask;
  logic [PROB_W:0]      ct_ns;     // 1 - CT, may be 256
  logic                 hi_conf_sz, hi_conf_ns;

  always_comb begin
    ct_ns      = (PROB_W + 1)'(1 << PROB_W) - (PROB_W + 1)'(ct);
    hi_conf_sz = (p > ct);
    hi_conf_ns = ((PROB_W + 1)'(p) < ct_ns);
    for (int i = 0; i < SZ_STAGES; i++) sz_mask[i] = (i < int'(hc));
    for (int i = 0; i < NS_STAGES; i++) ns_mask[i] = (i < int'(hc) * int'(NS_FACT));
    retrain_sz = (hc != '0) && ((sz_sr & sz_mask) == sz_mask);
    retrain_ns = (hc != '0) && ((ns_sr & ns_mask) == ns_mask);
    retrain_en = retrain_sz || retrain_ns;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sz_sr <= '0;
      ns_sr <= '0;
    end else if (clear) begin
      sz_sr <= '0;
      ns_sr <= '0;
    end else if (p_valid) begin
      sz_sr <= {sz_sr[SZ_STAGES-2:0], hi_conf_sz};
      ns_sr <= {ns_sr[NS_STAGES-2:0], hi_conf_ns};
    end
  end

endmodule
