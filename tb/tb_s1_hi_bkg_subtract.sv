// tb_s1_hi_bkg_subtract: self-checking test of the heavy-ion background subtraction.
// Streams random events (including a saturated one), one per clock, and compares each
// region with region - floor(slice sum / 18), clipped at zero, two clocks later.
module tb_s1_hi_bkg_subtract;
  import calo_pkg::*;

  localparam int NEV = 30;
  localparam int LAT = 2;

  logic    clk = 0;
  rgn_et_t rgn_in  [N_ETA][N_PHI];
  rgn_et_t rgn_out [N_ETA][N_PHI];
  rgn_et_t bkg     [N_ETA];

  int checks = 0, failures = 0;

  s1_hi_bkg_subtract dut (.clk, .rgn_in, .rgn_out, .bkg);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rgn_et_t ev [NEV][N_ETA][N_PHI];

  initial begin
    for (int i = 0; i < NEV; i++)
      foreach (ev[i][e, p]) ev[i][e][p] = rgn_et_t'($urandom % (i < 10 ? 1024 : 100));
    foreach (ev[0][e, p]) ev[0][e][p] = rgn_et_t'(1023);
    for (int c = 0; c < NEV + LAT - 1; c++) begin
      if (c < NEV) rgn_in = ev[c];
      @(posedge clk);
      #1;
      if (c >= LAT - 1) begin
        int k, s, m, x;
        k = c - (LAT - 1);
        for (int e = 0; e < N_ETA; e++) begin
          s = 0;
          for (int p = 0; p < N_PHI; p++) s += ev[k][e][p];
          m = s / 18;
          checks++;
          if (int'(bkg[e]) != m) begin
            failures++;
            $display("event %0d eta %0d: mean %0d expected %0d", k, e, bkg[e], m);
          end
          for (int p = 0; p < N_PHI; p++) begin
            x = int'(ev[k][e][p]) > m ? int'(ev[k][e][p]) - m : 0;
            checks++;
            if (int'(rgn_out[e][p]) != x) begin
              failures++;
              if (failures < 10) $display("event %0d %0d,%0d: %0d expected %0d", k, e, p, rgn_out[e][p], x);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
