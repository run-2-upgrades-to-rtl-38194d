// s2_tm_system: the Stage-2 time-multiplexed trigger: 18 Layer-1 cards, the fibre patch panel,
// 9 Layer-2 nodes and the demux.
//
// Every bunch crossing each Layer-1 card takes its slice of the event (8 phi x one eta half),
// encodes the towers and sends the event to node (event number mod 9). The patch panel is
// plain wiring: link l of card c towards node n lands on input 4c+l of node n, so each node
// has 72 input links and sees the whole event. Each node receives the event over about seven
// bunch crossings, while the other eight nodes receive the following events. The demux puts
// the node results back into event order. The card and node counts, the link counts and the
// routing follow the paper and its architecture figure; the redundant spare nodes of the
// figure are not included.
//
// Interface: 'ecal'/'hcal' are the tower energies per card, one event when 'bx_start' is
// high (every CLK_PER_BX clocks of the 240 MHz clock). Node ring streams are outputs for
// tower-level algorithms. Results appear on 'gt_out' in event order.
module s2_tm_system
  import calo_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        bx_start,
  input  logic [7:0]  ecal        [S2_N_CARD][S2_N_IETA_SIDE][S2_PHI_CARD],
  input  logic [7:0]  hcal        [S2_N_CARD][S2_N_IETA_SIDE][S2_PHI_CARD],
  output tower_word_t ring_pos    [S2_N_NODE][S2_N_IPHI],
  output tower_word_t ring_neg    [S2_N_NODE][S2_N_IPHI],
  output logic [5:0]  ring_frame  [S2_N_NODE],
  output logic        ring_valid  [S2_N_NODE],
  output l2_result_t  gt_out,
  output logic        gt_valid,
  output logic [31:0] gt_event,
  output logic        align_err   [S2_N_NODE],
  output logic        order_err,
  output logic [15:0] n_order_err
);

  localparam int NL = S2_N_CARD * S2_LINKS_NODE;

  logic [31:0] card_data  [S2_N_CARD][S2_N_NODE][S2_LINKS_NODE];
  logic        card_valid [S2_N_CARD][S2_N_NODE];
  logic [31:0] node_data  [S2_N_NODE][NL];
  logic        node_valid [S2_N_NODE][NL];
  l2_result_t  res        [S2_N_NODE];
  logic        res_valid  [S2_N_NODE];

  for (genvar c = 0; c < S2_N_CARD; c++) begin : g_card
    s2_ctp7_layer1 u_l1 (
      .clk, .rst, .bx_start,
      .ecal (ecal[c]), .hcal (hcal[c]),
      .link_data (card_data[c]), .link_valid (card_valid[c])
    );
  end

  // Patch panel: card c, link l towards node n -> node n, input 4c+l.
  always_comb
    for (int n = 0; n < S2_N_NODE; n++)
      for (int c = 0; c < S2_N_CARD; c++)
        for (int l = 0; l < S2_LINKS_NODE; l++) begin
          node_data[n][S2_LINKS_NODE*c + l]  = card_data[c][n][l];
          node_valid[n][S2_LINKS_NODE*c + l] = card_valid[c][n];
        end

  for (genvar n = 0; n < S2_N_NODE; n++) begin : g_node
    s2_l2_node u_l2 (
      .clk, .rst,
      .link_data (node_data[n]), .link_valid (node_valid[n]),
      .ring_pos (ring_pos[n]), .ring_neg (ring_neg[n]),
      .ring_frame (ring_frame[n]), .ring_valid (ring_valid[n]),
      .res (res[n]), .res_valid (res_valid[n]), .align_err (align_err[n])
    );
  end

  s2_demux u_demux (
    .clk, .rst, .res, .res_valid,
    .out (gt_out), .out_valid (gt_valid), .out_event (gt_event),
    .order_err, .n_order_err
  );

endmodule
