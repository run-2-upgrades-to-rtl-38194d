// s2_demux: the demultiplexer card between the Layer-2 nodes and the Global Trigger.
//
// Event n is processed by node (n mod N_NODE), and because data volume and latency are fixed
// the results come back in event order, one node after the other. The demux follows that
// fixed order: it waits for the result of the node whose turn it is, forwards it with its
// event number, and moves on to the next node. A result from any other node is an ordering
// fault; it is counted and flagged rather than forwarded. The demultiplexing role follows the
// paper; the order check and the output layout are this design's.
//
// Interface: 'res'/'res_valid' from the nodes; 'out'/'out_valid'/'out_event' towards the
// Global Trigger; 'order_err' pulses on a fault and 'n_order_err' counts faults.
// Timing: one clock latency.
module s2_demux
  import calo_pkg::*;
#(
  parameter int N_NODE = S2_N_NODE
) (
  input  logic        clk,
  input  logic        rst,
  input  l2_result_t  res       [N_NODE],
  input  logic        res_valid [N_NODE],
  output l2_result_t  out,
  output logic        out_valid,
  output logic [31:0] out_event,
  output logic        order_err,
  output logic [15:0] n_order_err
);

  localparam int NW = (N_NODE < 2) ? 1 : $clog2(N_NODE);

  logic [NW-1:0] turn;
  logic [31:0]   evt;
  logic          stray;

  always_comb begin
    stray = 1'b0;
    for (int n = 0; n < N_NODE; n++)
      if (res_valid[n] && n != int'(turn)) stray = 1'b1;
  end

  always_ff @(posedge clk) begin
    out_valid <= 1'b0;
    order_err <= 1'b0;
    if (rst) begin
      turn        <= '0;
      evt         <= '0;
      n_order_err <= '0;
    end else begin
      if (res_valid[turn]) begin
        out       <= res[turn];
        out_valid <= 1'b1;
        out_event <= evt;
        evt       <= evt + 1;
        turn      <= (int'(turn) == N_NODE - 1) ? '0 : turn + 1'b1;
      end
      if (stray) begin
        order_err   <= 1'b1;
        n_order_err <= n_order_err + 1'b1;
      end
    end
  end

endmodule
