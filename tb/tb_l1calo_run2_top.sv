// tb_l1calo_run2_top: end-to-end test of the whole trigger at its default sizes.
// Stage 1 (40 MHz): back-to-back proton events with one central and one forward deposit and
// e/gamma candidates nine clocks later, then a pile-up event after loading the pile-up LUTs,
// then a heavy-ion event (background subtraction, centrality, barrel/endcap). Stage 2 (240
// MHz, running at the same time): random tower events through 18 Layer-1 cards, 9 Layer-2
// nodes and the demux, checked for total ET, tower multiplicity and event order.
// Each mechanism is counted and must occur at least once.
module tb_l1calo_run2_top;
  import calo_pkg::*;

  localparam int LAT1 = 18;
  localparam int NEV1 = 12;
  localparam int NEV2 = 12;

  logic        clk40 = 0, clk240 = 0;
  run_mode_e   s1_mode;
  cfg_wr_t     s1_cfg;
  rgn_et_t     s1_rgn [N_ETA][N_PHI];
  cand_t       s1_eg [N_EG_IN];
  cand_t       s1_jet_c [4], s1_jet_f [4], s1_tau [4], s1_eg_a [4], s1_eg_b [4];
  logic [11:0] s1_hf_field;
  logic [15:0] s1_ett, s1_htt, s1_met;
  logic signed [19:0] s1_met_x, s1_met_y;
  logic [NPU_W-1:0]   s1_npu;
  logic        s2_rst, s2_bx_start;
  logic [7:0]  s2_ecal [18][40][8], s2_hcal [18][40][8];
  tower_word_t s2_ring_pos [9][72], s2_ring_neg [9][72];
  logic [5:0]  s2_ring_frame [9];
  logic        s2_ring_valid [9];
  l2_result_t  s2_gt_out;
  logic        s2_gt_valid, s2_order_err;
  logic [31:0] s2_gt_event;
  logic        s2_align_err [9];
  logic [15:0] s2_n_order_err;

  int checks = 0, failures = 0;
  int n_pipe = 0, n_pu = 0, n_hi = 0, n_cent = 0, n_iso_tau = 0, n_eg_iso = 0, n_barrel = 0;
  int n_tm_overlap = 0, n_s2_events = 0;
  bit s1_done = 0, s2_done = 0;

  l1calo_run2_top dut (.*);

  always #12 clk40 = ~clk40;
  always #2 clk240 = ~clk240;

  initial begin
    repeat (20000) @(posedge clk40);
    failures++;
    $display("watchdog expired");
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

  task automatic clear1();
    foreach (s1_rgn[e, p]) s1_rgn[e][p] = '0;
    foreach (s1_eg[i]) s1_eg[i] = '0;
  endtask

  // ---------------- Stage 1 ----------------
  initial begin
    int cv [NEV1];
    s1_cfg = '0;
    s1_mode = MODE_PP;
    clear1();
    for (int k = 0; k < NEV1; k++) cv[k] = 30 + 11 * k;
    for (int t = 0; t < NEV1 + LAT1 + 9; t++) begin
      clear1();
      if (t < NEV1) begin
        s1_rgn[5 + t][(2 * t) % 18] = rgn_et_t'(cv[t]);
        s1_rgn[19][t % 18] = rgn_et_t'(15 + t);
      end
      if (t >= 9 && t - 9 < NEV1) begin
        s1_eg[3]  = '{et: CAND_ET_W'(t), eta: 5'(16), phi: 5'(t - 9), flag: 1'b1};
        s1_eg[12] = '{et: CAND_ET_W'(t + 20), eta: 5'(8), phi: 5'(t - 9), flag: 1'b0};
      end
      @(posedge clk40);
      #1;
      if (t >= LAT1 - 1 && t - (LAT1 - 1) < NEV1) begin
        int k;
        k = t - (LAT1 - 1);
        expect_eq("jet_c", s1_jet_c[0].et, cv[k]);
        expect_eq("jet_c eta", s1_jet_c[0].eta, 5 + k);
        expect_eq("jet_f", s1_jet_f[0].et, 15 + k);
        expect_eq("tau", s1_tau[0].et, cv[k]);
        expect_eq("eg iso", s1_eg_a[0].et, k + 9);
        expect_eq("eg non-iso", s1_eg_b[0].et, k + 29);
        expect_eq("ett", s1_ett, cv[k]);
        expect_eq("npu", s1_npu, 2);
        if (s1_jet_c[0].et == CAND_ET_W'(cv[k])) n_pipe++;
        if (s1_tau[0].flag) n_iso_tau++;
        if (s1_eg_a[0].flag) n_eg_iso++;
      end
    end
    // pile-up: 61 regions of ET 2 plus one deposit; LUT entry 62 subtracts 2 everywhere
    for (int e = 0; e < N_ETA; e++) begin
      s1_cfg = '{we: 1'b1, sel: LUT_PU, addr: 16'((e << 9) | 62), data: 16'd2};
      @(posedge clk40);
      #1;
    end
    s1_cfg = '0;
    clear1();
    for (int i = 0; i < 61; i++) s1_rgn[4 + i / 18][i % 18] = 2;
    s1_rgn[14][14] = 70;
    @(posedge clk40);
    #1;
    clear1();
    repeat (LAT1 - 1) @(posedge clk40);
    #1;
    expect_eq("pu npu", s1_npu, 62);
    expect_eq("pu jet", s1_jet_c[0].et, 68);
    expect_eq("pu second jet", s1_jet_c[1].et, 0);
    if (s1_jet_c[0].et == 68) n_pu++;
    // heavy ion
    s1_mode = MODE_HI;
    clear1();
    for (int p = 0; p < N_PHI; p++) s1_rgn[12][p] = 10;
    s1_rgn[12][7] = 100;
    s1_rgn[2][3] = 350;
    @(posedge clk40);
    #1;
    clear1();
    repeat (8) @(posedge clk40);
    #1;
    s1_eg[0] = '{et: 40, eta: 12, phi: 7, flag: 1'b0};
    s1_eg[1] = '{et: 35, eta: 16, phi: 1, flag: 1'b1};
    @(posedge clk40);
    #1;
    clear1();
    repeat (LAT1 - 10) @(posedge clk40);
    #1;
    // slice mean = (17*10 + 100) / 18 = 15
    expect_eq("hi jet", s1_jet_c[0].et, 85);
    expect_eq("hi centrality", s1_hf_field, 12'h007);
    expect_eq("hi barrel", s1_eg_a[0].et, 40);
    expect_eq("hi endcap", s1_eg_b[0].et, 35);
    if (s1_jet_c[0].et == 85) n_hi++;
    if (s1_hf_field == 12'h007) n_cent++;
    if (s1_eg_a[0].et == 40) n_barrel++;
    s1_done = 1;
  end

  // ---------------- Stage 2 ----------------
  int exp_et [NEV2], exp_n [NEV2];
  int n_out = 0;

  always @(posedge clk240) begin
    int par;
    #1;
    par = 0;
    for (int n = 0; n < 9; n++) par += s2_ring_valid[n];
    if (par > 1) n_tm_overlap++;
    if (s2_gt_valid) begin
      checks += 3;
      if (n_out >= NEV2 || int'(s2_gt_out.ett) != exp_et[n_out]) begin failures++; $display("s2 ett"); end
      if (n_out >= NEV2 || int'(s2_gt_out.n_towers) != exp_n[n_out]) begin failures++; $display("s2 n"); end
      if (s2_gt_event != 32'(n_out)) begin failures++; $display("s2 order"); end
      n_out++;
    end
  end

  initial begin
    s2_rst = 1;
    s2_bx_start = 0;
    foreach (s2_ecal[c, f, p]) begin s2_ecal[c][f][p] = '0; s2_hcal[c][f][p] = '0; end
    repeat (3) @(posedge clk240);
    #1;
    s2_rst = 0;
    for (int t = 0; t < NEV2 * 6; t++) begin
      s2_bx_start = (t % 6 == 0);
      if (s2_bx_start) begin
        int k, e;
        k = t / 6;
        exp_et[k] = 0;
        exp_n[k] = 0;
        foreach (s2_ecal[c, f, p]) begin
          s2_ecal[c][f][p] = ($urandom % 6 == 0) ? 8'($urandom) : 8'd0;
          s2_hcal[c][f][p] = ($urandom % 6 == 0) ? 8'($urandom) : 8'd0;
          e = (f < 28) ? int'(s2_ecal[c][f][p]) : 0;
          exp_et[k] += e + s2_hcal[c][f][p];
          exp_n[k] += (e + s2_hcal[c][f][p] != 0);
        end
      end
      @(posedge clk240);
      #1;
    end
    s2_bx_start = 0;
    repeat (80) @(posedge clk240);
    #1;
    n_s2_events = n_out;
    checks += 3;
    if (n_out != NEV2) begin failures++; $display("stage 2 delivered %0d", n_out); end
    if (s2_n_order_err != 0) begin failures++; $display("stage 2 order errors"); end
    if (n_tm_overlap == 0) begin failures++; $display("no time-multiplexing overlap"); end
    s2_done = 1;
  end

  initial begin
    wait (s1_done && s2_done);
    $display("stage1: pipelined=%0d pile-up=%0d heavy-ion=%0d centrality=%0d iso-tau=%0d eg-iso=%0d barrel=%0d",
             n_pipe, n_pu, n_hi, n_cent, n_iso_tau, n_eg_iso, n_barrel);
    $display("stage2: events=%0d clocks with several nodes receiving=%0d", n_s2_events, n_tm_overlap);
    checks++;
    if (n_pipe != NEV1 || n_pu == 0 || n_hi == 0 || n_cent == 0 || n_iso_tau == 0 || n_eg_iso == 0
        || n_barrel == 0 || n_s2_events == 0 || n_tm_overlap == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
