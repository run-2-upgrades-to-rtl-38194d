// l1calo_run2_top: the Run-2 CMS Level-1 calorimeter trigger upgrade, both stages.
//
// Stage 1 is a single MP7 processor that takes the Run-1 regional data (22x18 regions plus
// RCT e/gamma candidates) and runs the improved algorithms with pile-up or heavy-ion
// background subtraction at one event per 40 MHz clock. Stage 2 is the time-multiplexed
// system: 18 Layer-1 cards send whole events at tower granularity to 9 Layer-2 nodes in turn,
// and a demux restores event order; it runs on the 240 MHz link clock. The two stages are
// independent systems that ran in parallel during commissioning, so the top holds both side by
// side with separate clocks and ports; it adds no logic of its own. Both stages follow the
// paper's architecture; holding them in one top is this design's packaging.
//
// Interface: s1_* ports on clk40 (see s1_mp7_processor: outputs 18 clocks after the regions),
// s2_* ports on clk240 (see s2_tm_system: demux output 44 clocks after bx_start).
module l1calo_run2_top
  import calo_pkg::*;
(
  // ---------------- Stage 1 (40 MHz) ----------------
  input  logic        clk40,
  input  run_mode_e   s1_mode,
  input  cfg_wr_t     s1_cfg,
  input  rgn_et_t     s1_rgn   [N_ETA][N_PHI],
  input  cand_t       s1_eg    [N_EG_IN],
  output cand_t       s1_jet_c [4],
  output cand_t       s1_jet_f [4],
  output cand_t       s1_tau   [4],
  output cand_t       s1_eg_a  [4],
  output cand_t       s1_eg_b  [4],
  output logic [11:0] s1_hf_field,
  output logic [15:0] s1_ett,
  output logic [15:0] s1_htt,
  output logic [15:0] s1_met,
  output logic signed [19:0] s1_met_x,
  output logic signed [19:0] s1_met_y,
  output logic [NPU_W-1:0]   s1_npu,
  // ---------------- Stage 2 (240 MHz) ----------------
  input  logic        clk240,
  input  logic        s2_rst,
  input  logic        s2_bx_start,
  input  logic [7:0]  s2_ecal  [S2_N_CARD][S2_N_IETA_SIDE][S2_PHI_CARD],
  input  logic [7:0]  s2_hcal  [S2_N_CARD][S2_N_IETA_SIDE][S2_PHI_CARD],
  output tower_word_t s2_ring_pos   [S2_N_NODE][S2_N_IPHI],
  output tower_word_t s2_ring_neg   [S2_N_NODE][S2_N_IPHI],
  output logic [5:0]  s2_ring_frame [S2_N_NODE],
  output logic        s2_ring_valid [S2_N_NODE],
  output l2_result_t  s2_gt_out,
  output logic        s2_gt_valid,
  output logic [31:0] s2_gt_event,
  output logic        s2_align_err  [S2_N_NODE],
  output logic        s2_order_err,
  output logic [15:0] s2_n_order_err
);

  s1_mp7_processor u_stage1 (
    .clk (clk40), .mode (s1_mode), .cfg (s1_cfg), .rgn_in (s1_rgn), .eg_in (s1_eg),
    .jet_c (s1_jet_c), .jet_f (s1_jet_f), .tau (s1_tau), .eg_a (s1_eg_a), .eg_b (s1_eg_b),
    .hf_field (s1_hf_field), .ett (s1_ett), .htt (s1_htt), .met (s1_met),
    .met_x (s1_met_x), .met_y (s1_met_y), .npu (s1_npu)
  );

  s2_tm_system u_stage2 (
    .clk (clk240), .rst (s2_rst), .bx_start (s2_bx_start), .ecal (s2_ecal), .hcal (s2_hcal),
    .ring_pos (s2_ring_pos), .ring_neg (s2_ring_neg), .ring_frame (s2_ring_frame),
    .ring_valid (s2_ring_valid), .gt_out (s2_gt_out), .gt_valid (s2_gt_valid),
    .gt_event (s2_gt_event), .align_err (s2_align_err), .order_err (s2_order_err),
    .n_order_err (s2_n_order_err)
  );

endmodule
