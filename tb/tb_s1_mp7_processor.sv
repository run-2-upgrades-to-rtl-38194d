// tb_s1_mp7_processor: end-to-end test of the Stage-1 MP7 algorithm firmware.
// Part 1 streams 30 proton-running events back to back, one per clock. Each holds one
// central deposit, one forward deposit and (nine clocks later, as the RCT sends it) one
// isolated and one non-isolated e/gamma candidate; every output must come out exactly 18
// clocks after its regions, all belonging to the same event.
// Part 2 loads the pile-up LUTs and checks that a busy event loses its pile-up energy.
// Part 3 switches to heavy-ion mode and checks the background subtraction, the 2x2 jet
// energy, the centrality bits in the HF field and the barrel/endcap e/gamma split.
// Every mechanism is counted and must occur at least once.
module tb_s1_mp7_processor;
  import calo_pkg::*;

  localparam int LAT = 18;
  localparam int NEV = 30;

  logic        clk = 0;
  run_mode_e   mode;
  cfg_wr_t     cfg;
  rgn_et_t     rgn_in [N_ETA][N_PHI];
  cand_t       eg_in  [N_EG_IN];
  cand_t       jet_c [4], jet_f [4], tau [4], eg_a [4], eg_b [4];
  logic [11:0] hf_field;
  logic [15:0] ett, htt, met;
  logic signed [19:0] met_x, met_y;
  logic [NPU_W-1:0]   npu;

  int checks = 0, failures = 0;
  int n_pipelined = 0, n_pu = 0, n_hi_bkg = 0, n_cent = 0, n_iso_tau = 0, n_eg_iso = 0, n_barrel = 0;

  s1_mp7_processor dut (.clk, .mode, .cfg, .rgn_in, .eg_in, .jet_c, .jet_f, .tau, .eg_a, .eg_b,
                        .hf_field, .ett, .htt, .met, .met_x, .met_y, .npu);

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, want);
    end
  endtask

  task automatic clear_inputs();
    foreach (rgn_in[e, p]) rgn_in[e][p] = '0;
    foreach (eg_in[i]) eg_in[i] = '0;
  endtask

  // per-event stimulus of part 1
  int ce [NEV], cp [NEV], cv [NEV], fe [NEV], fp [NEV], fv [NEV], er [NEV];

  initial begin
    cfg = '0;
    mode = MODE_PP;
    clear_inputs();
    for (int k = 0; k < NEV; k++) begin
      ce[k] = 4 + k % 14;  cp[k] = (k * 5) % 18;  cv[k] = 20 + 7 * k;
      fe[k] = (k % 2) ? 1 : 20; fp[k] = (k * 7) % 18; fv[k] = 11 + k;
      er[k] = 10 + k;
    end
    // ---------------- part 1: pipelined proton running ----------------
    for (int t = 0; t < NEV + LAT + 9; t++) begin
      clear_inputs();
      if (t < NEV) begin
        rgn_in[ce[t]][cp[t]] = rgn_et_t'(cv[t]);
        rgn_in[fe[t]][fp[t]] = rgn_et_t'(fv[t]);
      end
      if (t >= 9 && t - 9 < NEV) begin
        int k;
        k = t - 9;
        eg_in[0] = '{et: CAND_ET_W'(er[k]), eta: 5'((ce[k] + 3) % 14 + 4), phi: 5'((cp[k] + 9) % 18), flag: 1'b1};
        eg_in[7] = '{et: CAND_ET_W'(er[k] + 1), eta: 5'(ce[k]), phi: 5'((cp[k] + 9) % 18), flag: 1'b0};
      end
      @(posedge clk);
      #1;
      if (t >= LAT - 1 && t - (LAT - 1) < NEV) begin
        int k;
        k = t - (LAT - 1);
        expect_eq("jet_c et", jet_c[0].et, cv[k]);
        expect_eq("jet_c eta", jet_c[0].eta, ce[k]);
        expect_eq("jet_c phi", jet_c[0].phi, cp[k]);
        expect_eq("jet_c[1]", jet_c[1].et, 0);
        expect_eq("jet_f et", jet_f[0].et, fv[k]);
        expect_eq("jet_f eta", jet_f[0].eta, fe[k]);
        expect_eq("tau et", tau[0].et, cv[k] > 255 ? 255 : cv[k]);
        expect_eq("tau iso", tau[0].flag, 1);
        expect_eq("iso tau coarse", hf_field[2:0], (cv[k] >> 3) > 7 ? 7 : cv[k] >> 3);
        expect_eq("eg iso", eg_a[0].et, er[k]);
        expect_eq("eg iso eta", eg_a[0].eta, (ce[k] + 3) % 14 + 4);
        expect_eq("eg non-iso", eg_b[0].et, er[k] + 1);
        expect_eq("ett", ett, cv[k]);
        expect_eq("htt", htt, cv[k] >= 10 ? cv[k] : 0);
        expect_eq("npu", npu, 2);
        // single region: the missing-ET estimate lies between its ET and 1.12 times it
        checks++;
        if (met < cv[k] - 1 || met > cv[k] * 112 / 100 + 2) begin
          failures++;
          $display("met %0d for a single region of %0d", met, cv[k]);
        end
        if (jet_c[0].et == CAND_ET_W'(cv[k])) n_pipelined++;
        if (eg_a[0].flag) n_eg_iso++;
        if (tau[0].flag) n_iso_tau++;
      end
    end
    // ---------------- part 2: pile-up subtraction ----------------
    for (int e = 0; e < N_ETA; e++)
      for (int n = 0; n < 512; n++) begin
        cfg = '{we: 1'b1, sel: LUT_PU, addr: 16'((e << 9) | n), data: 16'(n >= 100 ? 4 : 0)};
        @(posedge clk);
        #1;
      end
    cfg = '0;
    clear_inputs();
    for (int i = 0; i < 150; i++) rgn_in[4 + i / 18][i % 18] = 3;
    rgn_in[15][9] = 100;
    @(posedge clk);
    #1;
    clear_inputs();
    repeat (LAT - 1) @(posedge clk);
    #1;
    expect_eq("pu npu", npu, 151);
    expect_eq("pu jet", jet_c[0].et, 96);
    expect_eq("pu jet count", jet_c[1].et, 0);
    expect_eq("pu ett", ett, 96);
    if (npu == 151 && jet_c[0].et == 96) n_pu++;
    // ---------------- part 3: heavy-ion running ----------------
    mode = MODE_HI;
    clear_inputs();
    for (int p = 0; p < N_PHI; p++) rgn_in[10][p] = 20;
    rgn_in[10][3] = 60;
    rgn_in[0][0] = 200;
    rgn_in[21][5] = 200;
    @(posedge clk);
    #1;
    clear_inputs();
    repeat (8) @(posedge clk);
    #1;
    eg_in[0] = '{et: 30, eta: 10, phi: 2, flag: 1'b0};
    eg_in[1] = '{et: 25, eta: 5, phi: 2, flag: 1'b1};
    @(posedge clk);
    #1;
    clear_inputs();
    repeat (LAT - 10) @(posedge clk);
    #1;
    // mean of the slice = (17*20 + 60) / 18 = 22 -> the deposit keeps 38, the rest is removed
    expect_eq("hi jet", jet_c[0].et, 38);
    expect_eq("hi jet count", jet_c[1].et, 0);
    expect_eq("hi tau", tau[0].et, 38);
    expect_eq("hi centrality", hf_field, 12'b0000_0000_1111);
    expect_eq("hi barrel", eg_a[0].et, 30);
    expect_eq("hi endcap", eg_b[0].et, 25);
    expect_eq("hi ett raw", ett, 17 * 20 + 60);
    if (jet_c[0].et == 38) n_hi_bkg++;
    if (hf_field == 12'h00f) n_cent++;
    if (eg_a[0].et == 30) n_barrel++;
    $display("pipelined=%0d pu=%0d hi_bkg=%0d centrality=%0d iso_tau=%0d eg_iso=%0d barrel=%0d",
             n_pipelined, n_pu, n_hi_bkg, n_cent, n_iso_tau, n_eg_iso, n_barrel);
    checks++;
    if (n_pipelined != NEV || n_pu == 0 || n_hi_bkg == 0 || n_cent == 0 || n_iso_tau == 0
        || n_eg_iso == 0 || n_barrel == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
