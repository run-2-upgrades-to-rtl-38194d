// tb_s1_jet_finder: self-checking test of the Stage-1 jet finder.
// Hand-made events (a single deposit, two equal neighbours, a cluster across the phi wrap, a
// forward jet) and random sparse events are run in proton and heavy-ion mode. Every one of
// the 396 candidate slots is compared with a model written from the rules: local maximum with
// the lower-neighbour strict tie rule, 3x3 sum (pp) or largest 2x2 containing the seed (HI),
// central for eta 4..17. One clock latency.
module tb_s1_jet_finder;
  import calo_pkg::*;

  logic      clk = 0;
  run_mode_e mode;
  rgn_et_t   rgn [N_ETA][N_PHI];
  cand_t     jets_c [N_RGN], jets_f [N_RGN];

  int checks = 0, failures = 0;
  int n_jets = 0;

  s1_jet_finder dut (.clk, .mode, .rgn, .jets_c, .jets_f);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int at(int e, int p);
    if (e < 0 || e >= N_ETA) return 0;
    return int'(rgn[e][(p + N_PHI) % N_PHI]);
  endfunction

  task automatic check_event(string name);
    int c, et, s, q, is_max;
    cand_t got, exp_c;
    @(posedge clk);
    #1;
    for (int e = 0; e < N_ETA; e++)
      for (int p = 0; p < N_PHI; p++) begin
        c = at(e, p);
        is_max = (c >= 1);
        s = 0;
        for (int de = -1; de <= 1; de++)
          for (int dp = -1; dp <= 1; dp++) begin
            s += at(e + de, p + dp);
            if (de < 0 || (de == 0 && dp < 0)) is_max &= (c > at(e + de, p + dp));
            else if (!(de == 0 && dp == 0)) is_max &= (c >= at(e + de, p + dp));
          end
        if (mode == MODE_HI) begin
          et = 0;
          for (int a = -1; a <= 1; a += 2)
            for (int b = -1; b <= 1; b += 2) begin
              q = c + at(e + a, p) + at(e, p + b) + at(e + a, p + b);
              if (q > et) et = q;
            end
        end else et = s;
        exp_c = '0;
        if (is_max) begin
          exp_c.et  = CAND_ET_W'(et);
          exp_c.eta = 5'(e);
          exp_c.phi = 5'(p);
          n_jets++;
        end
        got = (e >= 4 && e <= 17) ? jets_c[e*N_PHI+p] : jets_f[e*N_PHI+p];
        checks++;
        if (got != exp_c || ((e >= 4 && e <= 17) ? jets_f[e*N_PHI+p] : jets_c[e*N_PHI+p]) != '0) begin
          failures++;
          if (failures < 10) $display("%s: slot %0d,%0d got et %0d expected %0d", name, e, p, got.et, exp_c.et);
        end
      end
  endtask

  task automatic clear();
    foreach (rgn[e, p]) rgn[e][p] = '0;
  endtask

  initial begin
    int n_before;
    mode = MODE_PP;
    clear();
    rgn[10][5] = 50; rgn[10][6] = 20; rgn[11][5] = 7;
    check_event("single");
    if (jets_c[10*N_PHI+5].et != 77) begin failures++; $display("single jet ET %0d", jets_c[10*N_PHI+5].et); end
    checks++;
    clear();
    rgn[8][3] = 30; rgn[8][4] = 30;               // equal neighbours: exactly one jet
    n_before = n_jets;
    check_event("tie");
    checks++;
    if (n_jets - n_before != 1) begin failures++; $display("tie gave %0d jets", n_jets - n_before); end
    clear();
    rgn[6][17] = 40; rgn[6][0] = 10;              // wrap around in phi
    check_event("wrap");
    checks++;
    if (jets_c[6*N_PHI+17].et != 50) begin failures++; $display("wrap jet ET %0d", jets_c[6*N_PHI+17].et); end
    clear();
    rgn[1][9] = 25; rgn[0][9] = 5;
    check_event("forward");
    for (int m = 0; m < 2; m++) begin
      mode = m ? MODE_HI : MODE_PP;
      for (int i = 0; i < 20; i++) begin
        foreach (rgn[e, p]) rgn[e][p] = ($urandom % 4 == 0) ? rgn_et_t'($urandom % 200) : '0;
        check_event(m ? "random HI" : "random pp");
      end
    end
    $display("jets found: %0d", n_jets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
