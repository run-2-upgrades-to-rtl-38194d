// s2_tm_serializer: time-multiplexed output of one Layer-1 card.
//
// Each bunch crossing brings one event's towers of the card (40 eta x 8 phi on one side of
// the detector). Event number n goes to Layer-2 node (n mod N_NODE), so every node receives
// whole events, one in N_NODE. The card keeps one event buffer per node and streams it out
// over that node's LINKS links at the 240 MHz link clock, one eta ring per frame starting at
// the centre of the detector (frame f holds |ieta| = f+1) and two 16-bit towers per 32-bit
// link word (link l carries phi 2l and 2l+1 of the card). With 40 frames and 6 frames per
// bunch crossing, an event takes about seven bunch crossings to send, well inside the nine
// between two events to the same node. Event-to-node assignment, 32 bits per link per 240 MHz
// clock, centre-out readout and the seven-crossing transfer follow the paper; the buffer
// structure and frame layout are this design's choice.
//
// Interface: 'bx_start' marks the clock on which 'towers' holds a new event (once every
// CLK_PER_BX clocks); 'rst' restarts the event count at node 0. For each node, 'link_valid'
// is high on the N_ETA_S consecutive clocks that carry frames 0..N_ETA_S-1 in 'link_data'.
// Timing: frame 0 of an event leaves one clock after its 'bx_start'.
module s2_tm_serializer
  import calo_pkg::*;
#(
  parameter int N_ETA_S = S2_N_IETA_SIDE,
  parameter int N_PHI_C = S2_PHI_CARD,
  parameter int N_NODE  = S2_N_NODE,
  parameter int LINKS   = S2_LINKS_NODE
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        bx_start,
  input  tower_word_t towers     [N_ETA_S][N_PHI_C],
  output logic [31:0] link_data  [N_NODE][LINKS],
  output logic        link_valid [N_NODE]
);

  localparam int NW = (N_NODE < 2) ? 1 : $clog2(N_NODE);
  localparam int FW = $clog2(N_ETA_S + 1);

  logic [NW-1:0] node_sel;

  always_ff @(posedge clk)
    if (rst) node_sel <= '0;
    else if (bx_start) node_sel <= (int'(node_sel) == N_NODE - 1) ? '0 : node_sel + 1'b1;

  for (genvar n = 0; n < N_NODE; n++) begin : g_node
    tower_word_t  buffer [N_ETA_S][N_PHI_C];
    logic [FW-1:0] frame;
    logic          busy;
    logic          take;

    assign take = bx_start && int'(node_sel) == n;

    always_ff @(posedge clk) begin
      if (take) buffer <= towers;
      if (rst) begin
        busy  <= 1'b0;
        frame <= '0;
      end else if (take) begin
        busy  <= 1'b1;
        frame <= '0;
      end else if (busy) begin
        busy  <= (int'(frame) != N_ETA_S - 1);
        frame <= frame + 1'b1;
      end
    end

    assign link_valid[n] = busy;
    always_comb
      for (int l = 0; l < LINKS; l++)
        link_data[n][l] = busy ? {buffer[frame][2*l+1], buffer[frame][2*l]} : '0;

    // A node must have sent its previous event before it is given the next one.
    a_no_overrun: assert property (@(posedge clk) disable iff (rst) take |-> !busy || int'(frame) == N_ETA_S - 1);
  end

  initial assert (2 * LINKS == N_PHI_C) else $error("each link carries two towers");

endmodule
