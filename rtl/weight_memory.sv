// weight_memory: register file of the 32 logistic-regression feature weights.
//
// The weights are held in flip-flops (no SRAM), grouped by channel: group c holds
// w[4c .. 4c+3], the weights of the four features of channel c. The classifier
// reads one group per cycle and, when retraining, overwrites one group per cycle.
// A single-word port loads the offline-trained weights and reads any weight
// back. The register-based storage, 32 weights and four-at-a-time update follow
// the paper; the Q6.10 weight format, the load port and its priority over the
// group write are this design's choices.
//
// Interface: combinational group and word reads; writes on the clock edge.
module weight_memory
  import soul_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // group port (classifier)
  input  logic [$clog2(NCH)-1:0]   grp,
  output weight_t                  grp_rdata [N_FEAT],
  input  logic                     grp_we,
  input  weight_t                  grp_wdata [N_FEAT],
  // word port (configuration)
  input  logic                     word_we,
  input  logic [$clog2(NCH*N_FEAT)-1:0] word_addr,
  input  weight_t                  word_wdata,
  output weight_t                  word_rdata
);
  weight_t w [NCH*N_FEAT];

  always_comb begin
    for (int k = 0; k < N_FEAT; k++) grp_rdata[k] = w[int'(grp) * N_FEAT + k];
    word_rdata = w[word_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCH * N_FEAT; i++) w[i] <= '0;
    end else if (word_we) begin
      w[word_addr] <= word_wdata;
    end else if (grp_we) begin
      for (int k = 0; k < N_FEAT; k++) w[int'(grp) * N_FEAT + k] <= grp_wdata[k];
    end
  end
endmodule
