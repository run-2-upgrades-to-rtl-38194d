// tb_s2_tower_encoder: exhaustive self-checking test of the Layer-1 tower word.
// All 65536 ECAL/HCAL pairs are encoded, one per clock, and each word is compared one clock
// later with the sum, the ratio code floor(log2(larger/smaller)) computed by division, and
// the ECAL-larger flag.
module tb_s2_tower_encoder;
  import calo_pkg::*;

  logic        clk = 0;
  logic [7:0]  ecal_et, hcal_et;
  tower_word_t word;

  int checks = 0, failures = 0;

  s2_tower_encoder dut (.clk, .ecal_et, .hcal_et, .word);

  always #5 clk = ~clk;

  initial begin
    repeat (70000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ratio_m(int e, int h);
    int hi, lo, q, r;
    hi = e > h ? e : h;
    lo = e > h ? h : e;
    if (hi == 0) return 0;
    if (lo == 0) return 7;
    q = hi / lo;
    r = 0;
    while (q > 1) begin q = q / 2; r++; end
    return r > 7 ? 7 : r;
  endfunction

  initial begin
    int pe, ph, expw;
    for (int i = 0; i < 65536; i++) begin
      ecal_et = 8'(i >> 8);
      hcal_et = 8'(i);
      pe = i >> 8;
      ph = i & 255;
      @(posedge clk);
      #1;
      begin
        expw = (pe + ph) | (ratio_m(pe, ph) << 9) | ((pe > ph ? 1 : 0) << 12);
        checks++;
        if (int'(word) != expw) begin
          failures++;
          if (failures < 10) $display("e=%0d h=%0d word %h expected %h", pe, ph, word, expw);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
