// tb_s1_centrality: self-checking test of the heavy-ion centrality bits.
// Programs thresholds 50, 150, ... 750, drives events whose HF sum sweeps across them (with
// energy in central regions that must be ignored), and checks the sum and every threshold
// bit two clocks later.
module tb_s1_centrality;
  import calo_pkg::*;

  logic        clk = 0;
  cfg_wr_t     cfg;
  rgn_et_t     rgn [N_ETA][N_PHI];
  logic [15:0] hf_et;
  logic [7:0]  cent_bits;

  int checks = 0, failures = 0;

  s1_centrality dut (.clk, .cfg, .rgn, .hf_et, .cent_bits);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    cfg = '0;
    for (int i = 0; i < 8; i++) begin
      cfg = '{we: 1'b1, sel: REG_CENT, addr: 16'(i), data: 16'(50 + 100 * i)};
      @(posedge clk);
      #1;
    end
    cfg = '0;
    for (int it = 0; it < 60; it++) begin
      foreach (rgn[e, p]) rgn[e][p] = (e >= 4 && e <= 17) ? rgn_et_t'($urandom % 1024) : '0;
      s = 0;
      for (int k = 0; k < it % 12; k++) begin
        int e, p;
        e = ($urandom % 2) ? $urandom % 4 : 18 + $urandom % 4;
        p = $urandom % N_PHI;
        rgn[e][p] = rgn[e][p] + rgn_et_t'(it * 2);
      end
      foreach (rgn[e, p]) if (e < 4 || e > 17) s += rgn[e][p];
      repeat (2) begin @(posedge clk); #1; end
      checks++;
      if (int'(hf_et) != s) begin failures++; $display("hf_et %0d expected %0d", hf_et, s); end
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (cent_bits[i] != (s >= 50 + 100 * i)) begin
          failures++;
          $display("sum %0d threshold %0d bit %0d", s, i, cent_bits[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
