// s1_egamma_select: Stage-1 classification of the RCT electron/photon candidates.
//
// The RCT sends 4 isolated and 4 non-isolated e/gamma candidates per crate (144 in all), each
// a 6-bit rank and a region position. Proton running: a candidate is isolated when the RCT
// marks it isolated and a LUT, addressed by the pile-up-subtracted ET of the region that holds
// it and by its rank, says so. Heavy-ion running: candidates are split into barrel and endcap
// instead. Using the pile-up-subtracted regions for isolation and the barrel/endcap split
// follow the paper; the LUT address coding and default content are this design's
// (region ET >> ISO_SHIFT saturated to 6 bits; isolated when that ET, scaled back, is at most
// 1.5 times the rank). The barrel is taken as region eta 7..14 (|eta| < 1.39), since the
// region boundary nearest to the ECAL barrel edge at |eta| = 1.479 lies there.
//
// Interface: 'eg_in' holds the candidates with et = rank and flag = RCT isolation bit; 'rgn'
// the pile-up-subtracted grid of the same event. 'eg_a' gets isolated (pp) or barrel (HI)
// candidates, 'eg_b' the others, with zero in unused slots. Timing: one clock latency.
module s1_egamma_select
  import calo_pkg::*;
#(
  parameter int ISO_SHIFT = 2
) (
  input  logic      clk,
  input  run_mode_e mode,
  input  cfg_wr_t   cfg,
  input  cand_t     eg_in [N_EG_IN],
  input  rgn_et_t   rgn   [N_ETA][N_PHI],
  output cand_t     eg_a  [N_EG_IN],
  output cand_t     eg_b  [N_EG_IN]
);

  logic iso_lut [4096];

  initial
    for (int a = 0; a < 4096; a++)
      iso_lut[a] = ((a >> 6) << ISO_SHIFT) <= ((a & 63) + ((a & 63) >> 1));

  always_ff @(posedge clk)
    if (cfg.we && cfg.sel == LUT_EG_ISO) iso_lut[cfg.addr[11:0]] <= cfg.data[0];

  for (genvar i = 0; i < N_EG_IN; i++) begin : g_eg
    rgn_et_t    r, rs;
    logic [5:0] rq, rank;
    logic       cls;
    cand_t      c;

    always_comb begin
      c    = eg_in[i];
      rank = (c.et > 63) ? 6'd63 : c.et[5:0];
      r    = (int'(c.eta) < N_ETA && int'(c.phi) < N_PHI) ? rgn[c.eta][c.phi] : '0;
      rs   = r >> ISO_SHIFT;
      rq   = (rs > 63) ? 6'd63 : rs[5:0];
      if (mode == MODE_HI) cls = (c.eta >= 5'd7) && (c.eta <= 5'd14);
      else                 cls = c.flag && iso_lut[{rq, rank}];
      c.flag = cls;
    end

    always_ff @(posedge clk) begin
      eg_a[i] <= (c.et != '0 &&  cls) ? c : '0;
      eg_b[i] <= (c.et != '0 && !cls) ? c : '0;
    end
  end

endmodule
