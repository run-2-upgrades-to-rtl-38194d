// tb_topk_sorter: self-checking test of the pipelined top-K selection.
// Streams random candidate sets (one per clock, with many equal ETs and some all-zero sets)
// into a 396-input, K=4 sorter and compares the output, $clog2(396) = 9 clocks later, with a
// reference selection that scans the inputs in order and keeps the first of equal ETs.
module tb_topk_sorter;
  import calo_pkg::*;

  localparam int N   = 396;
  localparam int K   = 4;
  localparam int LAT = $clog2(N);
  localparam int NEV = 40;

  logic  clk = 0;
  cand_t cands [N];
  cand_t top   [K];

  int checks = 0, failures = 0;

  topk_sorter #(.N(N), .K(K)) dut (.clk, .cands, .top);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cand_t ev [NEV][N];

  initial begin
    for (int i = 0; i < NEV; i++)
      for (int j = 0; j < N; j++) begin
        ev[i][j] = '0;
        if (i % 7 != 3 && $urandom % 3 == 0) begin
          ev[i][j].et  = CAND_ET_W'($urandom % (i % 2 ? 8 : 5000) + 1);
          ev[i][j].eta = 5'(j / N_PHI);
          ev[i][j].phi = 5'(j % N_PHI);
        end
      end
    for (int c = 0; c < NEV + LAT - 1; c++) begin
      if (c < NEV) cands = ev[c];
      @(posedge clk);
      #1;
      if (c >= LAT - 1) begin
        int k;
        bit used [N];
        cand_t best;
        int bi;
        k = c - (LAT - 1);
        foreach (used[j]) used[j] = 0;
        for (int r = 0; r < K; r++) begin
          best = '0;
          bi = -1;
          for (int j = 0; j < N; j++)
            if (!used[j] && (bi < 0 || ev[k][j].et > best.et)) begin
              best = ev[k][j];
              bi = j;
            end
          used[bi] = 1;
          checks++;
          if (top[r].et != best.et || (best.et != 0 && top[r] != best)) begin
            failures++;
            if (failures < 10) $display("event %0d rank %0d: got %h expected %h", k, r, top[r], best);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
