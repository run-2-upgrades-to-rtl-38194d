// tb_s1_egamma_select: self-checking test of the Stage-1 e/gamma classification.
// Writes an isolation LUT (isolated when the region, in LUT units, is below the rank) and
// drives random RCT candidates over random region grids. In proton mode a candidate must land
// in the isolated list exactly when its RCT bit and the LUT agree; in heavy-ion mode it must
// land in the first list exactly when it sits at region eta 7..14. One clock latency.
module tb_s1_egamma_select;
  import calo_pkg::*;

  logic      clk = 0;
  run_mode_e mode;
  cfg_wr_t   cfg;
  cand_t     eg_in [N_EG_IN];
  rgn_et_t   rgn   [N_ETA][N_PHI];
  cand_t     eg_a  [N_EG_IN], eg_b [N_EG_IN];

  int checks = 0, failures = 0, n_a = 0, n_b = 0;

  s1_egamma_select dut (.clk, .mode, .cfg, .eg_in, .rgn, .eg_a, .eg_b);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lut_m(int a);
    return (a >> 6) < (a & 63) ? 1 : 0;
  endfunction

  initial begin
    int rq, cls;
    cand_t exp_a, exp_b;
    cfg = '0;
    for (int a = 0; a < 4096; a++) begin
      cfg = '{we: 1'b1, sel: LUT_EG_ISO, addr: 16'(a), data: 16'(lut_m(a))};
      @(posedge clk);
      #1;
    end
    cfg = '0;
    for (int m = 0; m < 2; m++) begin
      mode = m ? MODE_HI : MODE_PP;
      for (int it = 0; it < 20; it++) begin
        foreach (rgn[e, p]) rgn[e][p] = rgn_et_t'($urandom % 300);
        for (int i = 0; i < N_EG_IN; i++) begin
          eg_in[i] = '0;
          if ($urandom % 4 != 0) begin
            eg_in[i].et   = CAND_ET_W'($urandom % 63 + 1);
            eg_in[i].eta  = 5'($urandom % N_ETA);
            eg_in[i].phi  = 5'($urandom % N_PHI);
            eg_in[i].flag = (i % 8) < 4;
          end
        end
        @(posedge clk);
        #1;
        for (int i = 0; i < N_EG_IN; i++) begin
          rq = int'(rgn[eg_in[i].eta][eg_in[i].phi]) >> 2;
          if (rq > 63) rq = 63;
          if (mode == MODE_HI) cls = (eg_in[i].eta >= 7 && eg_in[i].eta <= 14);
          else cls = eg_in[i].flag && lut_m((rq << 6) | int'(eg_in[i].et));
          exp_a = '0;
          exp_b = '0;
          if (eg_in[i].et != 0) begin
            if (cls) begin exp_a = eg_in[i]; exp_a.flag = 1'b1; n_a++; end
            else     begin exp_b = eg_in[i]; exp_b.flag = 1'b0; n_b++; end
          end
          checks++;
          if (eg_a[i] != exp_a || eg_b[i] != exp_b) begin
            failures++;
            if (failures < 10) $display("mode %0d cand %0d: got %h/%h expected %h/%h", m, i,
                                        eg_a[i], eg_b[i], exp_a, exp_b);
          end
        end
      end
    end
    $display("first list %0d, second list %0d", n_a, n_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
