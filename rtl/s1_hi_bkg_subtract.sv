// s1_hi_bkg_subtract: heavy-ion background subtraction of the Stage-1 trigger.
//
// For each eta slice the mean transverse energy of its 18 regions is subtracted from every
// region of that slice, clipped at zero. Taking the slice mean as the background follows the
// paper. The division by 18 is this design's: the slice sum is multiplied by
// round(2^16/18) = 3641 and shifted right by 16, which equals floor(sum/18) for every sum a
// slice of 10-bit regions can reach.
//
// Interface: 'rgn_in' is the 22x18 region grid, one event per clock; 'rgn_out' the subtracted
// grid and 'bkg' the per-slice mean. Timing: two clock latency, one event per clock.
module s1_hi_bkg_subtract
  import calo_pkg::*;
(
  input  logic    clk,
  input  rgn_et_t rgn_in  [N_ETA][N_PHI],
  output rgn_et_t rgn_out [N_ETA][N_PHI],
  output rgn_et_t bkg     [N_ETA]
);

  localparam int SUM_W   = RGN_W + 5;
  localparam int RECIP18 = 3641;

  rgn_et_t rgn_q [N_ETA][N_PHI];
  rgn_et_t mean_q [N_ETA];

  for (genvar e = 0; e < N_ETA; e++) begin : g_eta
    logic [SUM_W-1:0]    sum;
    logic [SUM_W+12-1:0] prod;

    always_comb begin
      sum = '0;
      for (int p = 0; p < N_PHI; p++) sum += SUM_W'(rgn_in[e][p]);
      prod = (SUM_W+12)'(sum) * (SUM_W+12)'(RECIP18);
    end

    always_ff @(posedge clk) begin
      mean_q[e] <= RGN_W'(prod >> 16);
      rgn_q[e]  <= rgn_in[e];
    end

    always_ff @(posedge clk) begin
      bkg[e] <= mean_q[e];
      for (int p = 0; p < N_PHI; p++)
        rgn_out[e][p] <= (rgn_q[e][p] > mean_q[e]) ? rgn_q[e][p] - mean_q[e] : '0;
    end
  end

endmodule
