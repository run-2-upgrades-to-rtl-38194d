// calo_pkg: constants and types shared by the Stage-1 and Stage-2 calorimeter trigger RTL.
//
// Stage 1 works on a grid of 22 eta x 18 phi calorimeter regions (the grid size follows the
// paper). Eta indices 0-3 and 18-21 are the forward (HF) regions, 4-17 the central ones
// (|eta| < 3.0). Stage 2 works on 72 phi x 2 x 40 eta trigger towers: 28 ECAL/HCAL towers and
// 12 HF towers on each side. Widths that the paper does not give (region ET, candidate ET,
// tower ET) are this design's choice and are collected here.
package calo_pkg;

  // ---------------- Stage 1 region grid ----------------
  localparam int N_ETA      = 22;
  localparam int N_PHI      = 18;
  localparam int N_RGN      = N_ETA * N_PHI;  // 396
  localparam int HF_ETA_LO  = 4;              // first central eta index
  localparam int HF_ETA_HI  = 17;             // last central eta index
  localparam int RGN_W      = 10;             // region ET width
  localparam int NPU_W      = 9;              // 0..396 non-zero regions
  localparam int CAND_ET_W  = 14;             // wide enough for a 3x3 sum of regions

  typedef logic [RGN_W-1:0] rgn_et_t;
  typedef rgn_et_t rgn_grid_t [N_ETA][N_PHI];

  // A trigger candidate (jet, tau, e/gamma). 'flag' marks isolation in pp running and
  // barrel location for heavy-ion e/gamma.
  typedef struct packed {
    logic [CAND_ET_W-1:0] et;
    logic [4:0]           eta;
    logic [4:0]           phi;
    logic                 flag;
  } cand_t;

  // RCT e/gamma candidate as received: 6-bit rank, region position, RCT isolation bit.
  localparam int EG_PER_CRATE = 4;
  localparam int N_CRATE      = 18;
  localparam int N_EG_IN      = 2 * EG_PER_CRATE * N_CRATE;  // 4 iso + 4 non-iso per crate

  // Algorithm mode: proton-proton or heavy-ion running.
  typedef enum logic { MODE_PP = 1'b0, MODE_HI = 1'b1 } run_mode_e;

  // Write port for the look-up tables and registers (stands in for the IPbus register bus).
  typedef enum logic [2:0] {
    LUT_PU      = 3'd0,   // addr = {eta[4:0], npu[8:0]}
    LUT_TAU_ISO = 3'd1,   // addr = {e3x3_q[5:0], etau_q[5:0]}
    LUT_TAU_COR = 3'd2,   // addr = {eta[4:0], et_q[7:0]}
    LUT_EG_ISO  = 3'd3,   // addr = {rgn_q[5:0], rank[5:0]}
    REG_CENT    = 3'd4    // addr = threshold index 0..7
  } lut_sel_e;

  typedef struct packed {
    logic       we;
    lut_sel_e   sel;
    logic [15:0] addr;
    logic [15:0] data;
  } cfg_wr_t;

  // ---------------- Stage 2 tower data ----------------
  localparam int S2_N_IPHI      = 72;
  localparam int S2_N_IETA_SIDE = 40;   // 28 ECAL/HCAL + 12 HF towers per side
  localparam int S2_N_CARD      = 18;
  localparam int S2_PHI_CARD    = 8;    // towers in phi per Layer-1 card
  localparam int S2_LINKS_NODE  = 4;    // links from one card to one node (72 per node / 18)
  localparam int S2_N_NODE      = 9;
  localparam int S2_CLK_PER_BX  = 6;    // 240 MHz / 40 MHz

  typedef logic [15:0] tower_word_t;

  // Result of a Layer-2 node for one event.
  typedef struct packed {
    logic [20:0] ett;        // total tower ET (2880 towers x 511)
    logic [12:0] n_towers;   // towers with non-zero ET (pile-up estimator)
  } l2_result_t;

endpackage
