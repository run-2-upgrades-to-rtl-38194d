// s1_centrality: heavy-ion centrality estimator of the Stage-1 trigger.
//
// The total transverse energy in the forward (HF) regions, eta 0..3 and 18..21, is compared
// with eight programmable thresholds; bit i of 'cent_bits' is set when the sum reaches
// threshold i. Using the HF total ET as the centrality estimator, output in place of the
// isolated taus, follows the paper. Eight threshold bits and their default values (100, 200,
// ... 800) are this design's choice; the thresholds are written through 'cfg'.
//
// Interface: one event per clock in 'rgn' (not background subtracted). 'hf_et' is the sum.
// Timing: two clock latency.
module s1_centrality
  import calo_pkg::*;
(
  input  logic        clk,
  input  cfg_wr_t     cfg,
  input  rgn_et_t     rgn [N_ETA][N_PHI],
  output logic [15:0] hf_et,
  output logic [7:0]  cent_bits
);

  logic [15:0] thr [8];
  logic [15:0] sum_d, sum_q;

  initial for (int i = 0; i < 8; i++) thr[i] = 16'(100 * (i + 1));

  always_ff @(posedge clk)
    if (cfg.we && cfg.sel == REG_CENT && cfg.addr < 16'd8) thr[cfg.addr[2:0]] <= cfg.data;

  always_comb begin
    sum_d = '0;
    for (int e = 0; e < N_ETA; e++)
      if (e < HF_ETA_LO || e > HF_ETA_HI)
        for (int p = 0; p < N_PHI; p++) sum_d += 16'(rgn[e][p]);
  end

  always_ff @(posedge clk) begin
    sum_q <= sum_d;
    hf_et <= sum_q;
    for (int i = 0; i < 8; i++) cent_bits[i] <= (sum_q >= thr[i]);
  end

endmodule
