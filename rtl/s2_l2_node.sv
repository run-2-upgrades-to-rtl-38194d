// s2_l2_node: input pipeline of one Layer-2 processing node.
//
// The node receives whole events on 72 links, four from each of the 18 Layer-1 cards. Cards
// 0..8 cover positive eta and cards 9..17 negative eta, card c holding phi towers
// 8*(c mod 9) .. 8*(c mod 9)+7. On each 240 MHz clock one frame arrives: the ring of 72
// towers at the same |ieta| on both sides, starting at the centre of the detector. The
// pipeline turns each frame into two 72-tower rings (positive and negative side) as soon as
// it arrives, so algorithms can start on the first data word, and accumulates two whole-event
// quantities: the total tower ET and the number of towers with non-zero ET (the tower
// multiplicity that the Stage-2 tau and e/gamma algorithms use as pile-up estimator). Both
// quantities and the ring stream follow the paper's description; the ring layout, the sums'
// widths and the link alignment check are this design's. The tower clustering algorithms are
// not part of this module.
//
// Interface: 'link_data'/'link_valid' from the patch panel. 'ring_*' give each received ring
// one clock later with its frame number; 'res'/'res_valid' the event result one clock after
// the last ring; 'align_err' is set for a frame where the links are not all valid together.
module s2_l2_node
  import calo_pkg::*;
#(
  parameter int N_ETA_S = S2_N_IETA_SIDE
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] link_data  [S2_N_CARD*S2_LINKS_NODE],
  input  logic        link_valid [S2_N_CARD*S2_LINKS_NODE],
  output tower_word_t ring_pos   [S2_N_IPHI],
  output tower_word_t ring_neg   [S2_N_IPHI],
  output logic [5:0]  ring_frame,
  output logic        ring_valid,
  output l2_result_t  res,
  output logic        res_valid,
  output logic        align_err
);

  localparam int NL = S2_N_CARD * S2_LINKS_NODE;

  logic        all_v, any_v;
  tower_word_t pos_d [S2_N_IPHI], neg_d [S2_N_IPHI];
  logic [17:0] fsum;
  logic [7:0]  fcnt;
  logic [20:0] acc_et;
  logic [12:0] acc_n;
  logic [5:0]  frame;

  always_comb begin
    all_v = 1'b1;
    any_v = 1'b0;
    for (int i = 0; i < NL; i++) begin
      all_v &= link_valid[i];
      any_v |= link_valid[i];
    end
    for (int c = 0; c < S2_N_CARD; c++)
      for (int l = 0; l < S2_LINKS_NODE; l++)
        for (int h = 0; h < 2; h++)
          if (c < S2_N_CARD / 2) pos_d[8*c + 2*l + h]       = link_data[4*c + l][16*h +: 16];
          else                   neg_d[8*(c-9) + 2*l + h]   = link_data[4*c + l][16*h +: 16];
    fsum = '0;
    fcnt = '0;
    for (int p = 0; p < S2_N_IPHI; p++) begin
      fsum += 18'(pos_d[p][8:0]) + 18'(neg_d[p][8:0]);
      fcnt += 8'(pos_d[p][8:0] != '0) + 8'(neg_d[p][8:0] != '0);
    end
  end

  always_ff @(posedge clk) begin
    ring_pos   <= pos_d;
    ring_neg   <= neg_d;
    ring_valid <= all_v && !rst;
    ring_frame <= frame;
    res_valid  <= 1'b0;
    align_err  <= any_v && !all_v && !rst;
    if (rst) begin
      frame  <= '0;
      acc_et <= '0;
      acc_n  <= '0;
    end else if (all_v) begin
      if (int'(frame) == N_ETA_S - 1) begin
        frame     <= '0;
        acc_et    <= '0;
        acc_n     <= '0;
        res       <= '{ett: acc_et + 21'(fsum), n_towers: acc_n + 13'(fcnt)};
        res_valid <= 1'b1;
      end else begin
        frame  <= frame + 1'b1;
        acc_et <= acc_et + 21'(fsum);
        acc_n  <= acc_n + 13'(fcnt);
      end
    end
  end

endmodule
