// tb_s1_tau_finder: self-checking test of the Stage-1 tau finder.
// Loads an isolation LUT (isolated when E_3x3 - E_tau < E_tau/2, in LUT units) and an
// eta-dependent correction LUT (et * (eta + 10) / 16, saturated) through the write port, then
// runs hand-made events (an isolated 2x1 tau, a non-isolated one) and random events in proton
// and heavy-ion mode and compares all 396 slots with a model two clocks later.
module tb_s1_tau_finder;
  import calo_pkg::*;

  logic      clk = 0;
  run_mode_e mode;
  cfg_wr_t   cfg;
  rgn_et_t   rgn [N_ETA][N_PHI];
  cand_t     taus [N_RGN];

  int checks = 0, failures = 0, n_iso = 0, n_noniso = 0;

  s1_tau_finder dut (.clk, .mode, .cfg, .rgn, .taus);

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int iso_m(int a);   // a = {e3_q, etau_q}
    int e3, et;
    e3 = a >> 6;
    et = a & 63;
    return (e3 - et) * 2 < et ? 1 : 0;
  endfunction

  function automatic int cor_m(int e, int et);
    int v;
    v = et * (e + 10) / 16;
    return v > 255 ? 255 : v;
  endfunction

  function automatic int q6(int x);
    return (x >> 2) > 63 ? 63 : (x >> 2);
  endfunction

  function automatic int at(int e, int p);
    if (e < 0 || e >= N_ETA) return 0;
    return int'(rgn[e][(p + N_PHI) % N_PHI]);
  endfunction

  task automatic check_event(string name);
    int c, s, nmax, is_max, etau;
    cand_t exp_c;
    @(posedge clk);
    #1;
    @(posedge clk);
    #1;
    for (int e = 0; e < N_ETA; e++)
      for (int p = 0; p < N_PHI; p++) begin
        c = at(e, p);
        is_max = (c != 0);
        s = 0;
        for (int de = -1; de <= 1; de++)
          for (int dp = -1; dp <= 1; dp++) begin
            s += at(e + de, p + dp);
            if (de < 0 || (de == 0 && dp < 0)) is_max &= (c > at(e + de, p + dp));
            else if (!(de == 0 && dp == 0)) is_max &= (c >= at(e + de, p + dp));
          end
        nmax = at(e - 1, p);
        if (at(e + 1, p) > nmax) nmax = at(e + 1, p);
        if (at(e, p - 1) > nmax) nmax = at(e, p - 1);
        if (at(e, p + 1) > nmax) nmax = at(e, p + 1);
        etau = c + nmax;
        exp_c = '0;
        if (e >= 4 && e <= 17) begin
          if (mode == MODE_HI && c != 0) begin
            exp_c.et = CAND_ET_W'(c);
            exp_c.eta = 5'(e);
            exp_c.phi = 5'(p);
          end else if (mode == MODE_PP && is_max) begin
            exp_c.et   = CAND_ET_W'(cor_m(e, etau > 255 ? 255 : etau));
            exp_c.eta  = 5'(e);
            exp_c.phi  = 5'(p);
            exp_c.flag = iso_m((q6(s) << 6) | q6(etau)) != 0;
            if (exp_c.flag) n_iso++; else n_noniso++;
          end
        end
        checks++;
        if (taus[e*N_PHI+p] != exp_c) begin
          failures++;
          if (failures < 10) $display("%s: %0d,%0d got %0d/%0d expected %0d/%0d", name, e, p,
                                      taus[e*N_PHI+p].et, taus[e*N_PHI+p].flag, exp_c.et, exp_c.flag);
        end
      end
  endtask

  initial begin
    cfg = '0;
    mode = MODE_PP;
    foreach (rgn[e, p]) rgn[e][p] = '0;
    for (int a = 0; a < 4096; a++) begin
      cfg = '{we: 1'b1, sel: LUT_TAU_ISO, addr: 16'(a), data: 16'(iso_m(a))};
      @(posedge clk);
      #1;
    end
    for (int a = 0; a < N_ETA * 256; a++) begin
      cfg = '{we: 1'b1, sel: LUT_TAU_COR, addr: 16'(a), data: 16'(cor_m(a / 256, a % 256))};
      @(posedge clk);
      #1;
    end
    cfg = '0;
    rgn[9][4] = 60; rgn[9][5] = 20;                      // isolated 2x1 tau
    rgn[14][12] = 40; rgn[15][12] = 10; rgn[13][11] = 30; rgn[14][13] = 30;  // not isolated
    check_event("hand");
    checks += 2;
    if (!taus[9*N_PHI+4].flag || taus[9*N_PHI+4].et != CAND_ET_W'(cor_m(9, 80))) begin
      failures++; $display("isolated tau wrong");
    end
    if (taus[14*N_PHI+12].flag) begin failures++; $display("non-isolated tau flagged"); end
    for (int m = 0; m < 2; m++) begin
      mode = m ? MODE_HI : MODE_PP;
      for (int i = 0; i < 20; i++) begin
        foreach (rgn[e, p]) rgn[e][p] = ($urandom % 5 == 0) ? rgn_et_t'($urandom % (i < 10 ? 100 : 600)) : '0;
        check_event(m ? "random HI" : "random pp");
      end
    end
    $display("isolated %0d, non-isolated %0d", n_iso, n_noniso);
    checks++;
    if (n_iso == 0 || n_noniso == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
