// topk_sorter: pipelined selection of the K highest-ET candidates among N.
//
// The inputs are padded to a power of two and fed to a binary tree of merge nodes. Each node
// merges two ET-ordered lists of K candidates into the K highest, and every tree level is
// registered, so a new set of N candidates is accepted every clock. Ties keep the candidate
// from the lower input index first. The paper asks for the four (Stage 1) or twelve (Stage 2)
// highest candidates; the merge tree is this design's way of finding them.
//
// Interface: 'cands' N candidates, one set per clock; 'top' K candidates, highest ET first,
// zero-ET entries when fewer than K are non-zero. Timing: latency $clog2(N) clocks.
module topk_sorter
  import calo_pkg::*;
#(
  parameter int N = 396,
  parameter int K = 4
) (
  input  logic  clk,
  input  cand_t cands [N],
  output cand_t top   [K]
);

  localparam int L = (N < 2) ? 1 : $clog2(N);
  localparam int P = 1 << L;

  typedef cand_t list_t [K];

  function automatic list_t merge(input list_t a, input list_t b);
    list_t m;
    int    ia, ib;
    ia = 0;
    ib = 0;
    for (int k = 0; k < K; k++) begin
      if (ia < K && (ib >= K || a[ia].et >= b[ib].et)) begin
        m[k] = a[ia];
        ia++;
      end else begin
        m[k] = b[ib];
        ib++;
      end
    end
    return m;
  endfunction

  // Heap-numbered tree: node 1 is the root; the children of node n are 2n and 2n+1, and
  // numbers P..2P-1 are the leaves (the inputs).
  list_t leaf [P];
  list_t node [1:P-1];

  always_comb
    for (int i = 0; i < P; i++) begin
      leaf[i] = '{default: '0};
      if (i < N) leaf[i][0] = cands[i];
    end

  for (genvar n = 1; n < P; n++) begin : g_node
    list_t a, b;
    if (2*n >= P) begin : g_leaves
      assign a = leaf[2*n-P];
      assign b = leaf[2*n+1-P];
    end else begin : g_inner
      assign a = node[2*n];
      assign b = node[2*n+1];
    end
    always_ff @(posedge clk) node[n] <= merge(a, b);
  end

  assign top = node[1];

endmodule
