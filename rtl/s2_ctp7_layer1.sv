// s2_ctp7_layer1: one Layer-1 card of the Stage-2 trigger.
//
// The card sees 8 towers in phi and one half of the detector in eta: 28 ECAL+HCAL towers and
// 12 HF towers per phi column. Every tower goes through the pre-processing encoder (ECAL plus
// HCAL sum and ratio), then the time-multiplexing serializer sends each event to its Layer-2
// node. The card's coverage and its role follow the paper. HF towers carry no ECAL energy;
// their HF energy arrives on the 'hcal' input and the 'ecal' input of those towers is ignored
// (this design's convention).
//
// Interface: 'bx_start' marks a new event in 'ecal'/'hcal' (once per CLK_PER_BX clocks of
// the 240 MHz clock). Outputs per Layer-2 node as in s2_tm_serializer.
// Timing: frame 0 of an event leaves two clocks after its 'bx_start'.
module s2_ctp7_layer1
  import calo_pkg::*;
#(
  parameter int N_ETA_S = S2_N_IETA_SIDE,
  parameter int N_ECAL  = 28,
  parameter int N_NODE  = S2_N_NODE
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        bx_start,
  input  logic [7:0]  ecal       [N_ETA_S][S2_PHI_CARD],
  input  logic [7:0]  hcal       [N_ETA_S][S2_PHI_CARD],
  output logic [31:0] link_data  [N_NODE][S2_LINKS_NODE],
  output logic        link_valid [N_NODE]
);

  tower_word_t words [N_ETA_S][S2_PHI_CARD];
  logic        bx_start_q;

  for (genvar e = 0; e < N_ETA_S; e++) begin : g_eta
    for (genvar p = 0; p < S2_PHI_CARD; p++) begin : g_phi
      s2_tower_encoder u_enc (
        .clk,
        .ecal_et (e < N_ECAL ? ecal[e][p] : 8'd0),
        .hcal_et (hcal[e][p]),
        .word    (words[e][p])
      );
    end
  end

  always_ff @(posedge clk) bx_start_q <= rst ? 1'b0 : bx_start;

  s2_tm_serializer #(.N_ETA_S(N_ETA_S), .N_NODE(N_NODE)) u_tm (
    .clk, .rst, .bx_start(bx_start_q), .towers(words), .link_data, .link_valid
  );

endmodule
