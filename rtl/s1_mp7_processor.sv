// s1_mp7_processor: the Stage-1 algorithm firmware of the MP7 card.
//
// Each clock one event arrives: the 22x18 RCT region grid and, from the event nine clocks
// earlier, the 144 RCT electron/photon candidates (the RCT sends them nine bunch crossings
// after the regions). The regions are cleaned of pile-up (proton running: non-zero region
// count and per-eta LUTs) or of the underlying event (heavy-ion running: per-eta-slice mean),
// then jets, taus and global sums are computed from the cleaned regions, the e/gamma
// candidates are classified, and the four highest of each collection are selected. In proton
// running the four highest isolated taus are sent with a 3-bit coarse ET in the field that
// used to carry the HF sums; in heavy-ion running that field carries the centrality bits and
// the sums use the raw regions. All of this follows the paper. The clock (one event per clock
// rather than two clocks of 80 MHz on half the detector each), the pipeline depths and the
// output field layout are this design's choices.
//
// Interface: 'mode' selects proton (MODE_PP) or heavy-ion (MODE_HI) algorithms; 'cfg' writes
// the LUTs and thresholds. Outputs belong to the event whose regions entered OUT_LATENCY
// clocks earlier (its e/gamma candidates entered nine clocks after the regions).
// Timing: OUT_LATENCY = 18 clocks, one event per clock, no stalls.
module s1_mp7_processor
  import calo_pkg::*;
#(
  parameter int EG_DELAY      = 9,
  parameter int TAU_COARSE_SH = 3
) (
  input  logic        clk,
  input  run_mode_e   mode,
  input  cfg_wr_t     cfg,
  input  rgn_et_t     rgn_in [N_ETA][N_PHI],
  input  cand_t       eg_in  [N_EG_IN],
  output cand_t       jet_c  [4],
  output cand_t       jet_f  [4],
  output cand_t       tau    [4],
  output cand_t       eg_a   [4],   // isolated (pp) or barrel (HI)
  output cand_t       eg_b   [4],   // non-isolated (pp) or endcap (HI)
  output logic [11:0] hf_field,     // 4 x 3-bit isolated-tau ET (pp) or centrality (HI)
  output logic [15:0] ett,
  output logic [15:0] htt,
  output logic [15:0] met,
  output logic signed [19:0] met_x,
  output logic signed [19:0] met_y,
  output logic [NPU_W-1:0]   npu
);

  localparam int SORT_RGN    = $clog2(N_RGN);      // 9
  localparam int SORT_EG     = $clog2(N_EG_IN);    // 8
  localparam int T_SUB       = 2;                  // cleaned regions
  localparam int T_EG_OUT    = EG_DELAY + 1 + SORT_EG;
  localparam int OUT_LATENCY = T_EG_OUT;
  localparam int T_JET_OUT   = T_SUB + 1 + SORT_RGN;
  localparam int T_TAU_OUT   = T_SUB + 2 + SORT_RGN;
  localparam int T_SUM_OUT   = T_SUB + 1 + 2;
  localparam int T_CENT_OUT  = 2;

  // ---------------- region cleaning ----------------
  rgn_et_t rgn_pu [N_ETA][N_PHI];
  rgn_et_t rgn_hi [N_ETA][N_PHI];
  rgn_et_t rgn_bk [N_ETA];
  rgn_et_t rgn_cl [N_ETA][N_PHI];   // cleaned, time T_SUB
  rgn_et_t rgn_raw [T_SUB+1][N_ETA][N_PHI];
  logic [NPU_W-1:0] npu_q;

  s1_pu_subtract u_pu (.clk, .cfg, .rgn_in, .rgn_out(rgn_pu), .npu(npu_q));
  s1_hi_bkg_subtract u_hi (.clk, .rgn_in, .rgn_out(rgn_hi), .bkg(rgn_bk));

  assign rgn_cl = (mode == MODE_HI) ? rgn_hi : rgn_pu;

  // raw regions delayed: rgn_raw[k] is the event that entered k clocks ago
  assign rgn_raw[0] = rgn_in;
  always_ff @(posedge clk)
    for (int k = 1; k <= T_SUB; k++) rgn_raw[k] <= rgn_raw[k-1];

  // ---------------- jets, taus, sums, centrality ----------------
  cand_t jets_c [N_RGN], jets_f [N_RGN], taus [N_RGN], taus_iso [N_RGN];
  rgn_et_t rgn_sum_q [N_ETA][N_PHI];
  logic [15:0] ett_q, htt_q, met_q, hf_et;
  logic signed [19:0] mx_q, my_q;
  logic [7:0] cent_q;

  s1_jet_finder u_jet (.clk, .mode, .rgn(rgn_cl), .jets_c, .jets_f);
  s1_tau_finder u_tau (.clk, .mode, .cfg, .rgn(rgn_cl), .taus);

  // sums: cleaned regions in pp, raw regions in heavy-ion running, aligned with the jets
  always_ff @(posedge clk) rgn_sum_q <= (mode == MODE_HI) ? rgn_raw[T_SUB] : rgn_pu;

  s1_energy_sums u_sum (.clk, .rgn(rgn_sum_q), .jets(jets_c), .ett(ett_q), .htt(htt_q),
                        .met_x(mx_q), .met_y(my_q), .met(met_q));
  s1_centrality u_cent (.clk, .cfg, .rgn(rgn_in), .hf_et, .cent_bits(cent_q));

  always_comb
    for (int i = 0; i < N_RGN; i++) taus_iso[i] = taus[i].flag ? taus[i] : '0;

  // ---------------- e/gamma ----------------
  rgn_et_t rgn_eg [EG_DELAY-T_SUB+1][N_ETA][N_PHI];
  cand_t   eg_a_all [N_EG_IN], eg_b_all [N_EG_IN];

  assign rgn_eg[0] = rgn_pu;
  always_ff @(posedge clk)
    for (int k = 1; k <= EG_DELAY - T_SUB; k++) rgn_eg[k] <= rgn_eg[k-1];

  s1_egamma_select u_eg (.clk, .mode, .cfg, .eg_in, .rgn(rgn_eg[EG_DELAY-T_SUB]),
                         .eg_a(eg_a_all), .eg_b(eg_b_all));

  // ---------------- sorting ----------------
  cand_t jc_s [4], jf_s [4], tau_s [4], tiso_s [4], ega_s [4], egb_s [4];

  topk_sorter #(.N(N_RGN),   .K(4)) u_s_jc  (.clk, .cands(jets_c),   .top(jc_s));
  topk_sorter #(.N(N_RGN),   .K(4)) u_s_jf  (.clk, .cands(jets_f),   .top(jf_s));
  topk_sorter #(.N(N_RGN),   .K(4)) u_s_tau (.clk, .cands(taus),     .top(tau_s));
  topk_sorter #(.N(N_RGN),   .K(4)) u_s_ti  (.clk, .cands(taus_iso), .top(tiso_s));
  topk_sorter #(.N(N_EG_IN), .K(4)) u_s_ega (.clk, .cands(eg_a_all), .top(ega_s));
  topk_sorter #(.N(N_EG_IN), .K(4)) u_s_egb (.clk, .cands(eg_b_all), .top(egb_s));

  // ---------------- output alignment and GT formatting ----------------
  logic [11:0] hf_d;
  always_comb
    if (mode == MODE_HI) hf_d = {4'b0, cent_q};
    else
      for (int i = 0; i < 4; i++)
        hf_d[3*i +: 3] = ((tiso_s[i].et >> TAU_COARSE_SH) > 7) ? 3'd7
                        : 3'(tiso_s[i].et >> TAU_COARSE_SH);

  // Delay lines so that every output refers to the same event.
  cand_t jc_d [OUT_LATENCY-T_JET_OUT+1][4], jf_d [OUT_LATENCY-T_JET_OUT+1][4];
  cand_t tau_d [OUT_LATENCY-T_TAU_OUT+1][4];
  logic [11:0] hf_dl [OUT_LATENCY-T_TAU_OUT+1];
  logic [11:0] cent_dl [T_TAU_OUT-T_CENT_OUT+1];
  logic [16*3+40+NPU_W-1:0] sum_dl [OUT_LATENCY-T_SUM_OUT+1];
  logic [NPU_W-1:0] npu_dl [T_SUM_OUT-T_SUB+1];

  // centrality must reach the formatter at the same time as the isolated taus
  assign cent_dl[0] = {4'b0, cent_q};
  always_ff @(posedge clk)
    for (int k = 1; k <= T_TAU_OUT - T_CENT_OUT; k++) cent_dl[k] <= cent_dl[k-1];

  assign jc_d[0]  = jc_s;
  assign jf_d[0]  = jf_s;
  assign tau_d[0] = tau_s;
  assign hf_dl[0] = (mode == MODE_HI) ? cent_dl[T_TAU_OUT-T_CENT_OUT] : hf_d;
  assign npu_dl[0] = npu_q;
  assign sum_dl[0] = {ett_q, htt_q, met_q, mx_q, my_q, npu_dl[T_SUM_OUT-T_SUB]};

  always_ff @(posedge clk) begin
    for (int k = 1; k <= OUT_LATENCY - T_JET_OUT; k++) begin
      jc_d[k] <= jc_d[k-1];
      jf_d[k] <= jf_d[k-1];
    end
    for (int k = 1; k <= OUT_LATENCY - T_TAU_OUT; k++) begin
      tau_d[k] <= tau_d[k-1];
      hf_dl[k] <= hf_dl[k-1];
    end
    for (int k = 1; k <= OUT_LATENCY - T_SUM_OUT; k++) sum_dl[k] <= sum_dl[k-1];
    for (int k = 1; k <= T_SUM_OUT - T_SUB; k++) npu_dl[k] <= npu_dl[k-1];
  end

  assign jet_c    = jc_d[OUT_LATENCY-T_JET_OUT];
  assign jet_f    = jf_d[OUT_LATENCY-T_JET_OUT];
  assign tau      = tau_d[OUT_LATENCY-T_TAU_OUT];
  assign hf_field = hf_dl[OUT_LATENCY-T_TAU_OUT];
  assign eg_a     = ega_s;
  assign eg_b     = egb_s;
  assign {ett, htt, met, met_x, met_y, npu} = sum_dl[OUT_LATENCY-T_SUM_OUT];

endmodule
