// tb_s1_pu_subtract: self-checking test of the Stage-1 pile-up subtraction.
// Loads every per-eta LUT with pu(eta, n) = (n * (eta + 1)) / 32, then streams random events
// of varying occupancy, one per clock, and compares the subtracted grid and the non-zero
// region count with a model two clocks later (the block's latency).
module tb_s1_pu_subtract;
  import calo_pkg::*;

  localparam int NEV = 40;
  localparam int LAT = 2;

  logic    clk = 0;
  cfg_wr_t cfg;
  rgn_et_t rgn_in  [N_ETA][N_PHI];
  rgn_et_t rgn_out [N_ETA][N_PHI];
  logic [NPU_W-1:0] npu;

  int checks = 0, failures = 0;

  s1_pu_subtract dut (.clk, .cfg, .rgn_in, .rgn_out, .npu);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pu_model(int eta, int n);
    return (n * (eta + 1)) / 32;
  endfunction

  rgn_et_t ev [NEV][N_ETA][N_PHI];

  initial begin
    cfg = '0;
    foreach (rgn_in[e, p]) rgn_in[e][p] = '0;
    // load the LUTs
    for (int e = 0; e < N_ETA; e++)
      for (int n = 0; n < 512; n++) begin
        cfg.we   = 1'b1;
        cfg.sel  = LUT_PU;
        cfg.addr = 16'((e << 9) | n);
        cfg.data = 16'(pu_model(e, n) > 1023 ? 1023 : pu_model(e, n));
        @(posedge clk);
        #1;
      end
    cfg = '0;
    // events with occupancy from empty to full
    for (int i = 0; i < NEV; i++)
      foreach (ev[i][e, p])
        ev[i][e][p] = ($urandom % NEV < i) ? rgn_et_t'($urandom % 64 + 1) : '0;
    foreach (ev[3][e, p]) ev[3][e][p] = rgn_et_t'(1023);  // full occupancy

    for (int c = 0; c < NEV + LAT - 1; c++) begin
      if (c < NEV) rgn_in = ev[c];
      @(posedge clk);
      #1;
      if (c >= LAT - 1) begin
        int k, n, pu, exp_v;
        k = c - (LAT - 1);
        n = 0;
        foreach (ev[k][e, p]) n += (ev[k][e][p] != 0);
        checks++;
        if (npu != NPU_W'(n)) begin
          failures++;
          $display("event %0d: npu %0d expected %0d", k, npu, n);
        end
        for (int e = 0; e < N_ETA; e++) begin
          pu = pu_model(e, n);
          if (pu > 1023) pu = 1023;
          for (int p = 0; p < N_PHI; p++) begin
            exp_v = int'(ev[k][e][p]) > pu ? int'(ev[k][e][p]) - pu : 0;
            checks++;
            if (int'(rgn_out[e][p]) != exp_v) begin
              failures++;
              if (failures < 10) $display("event %0d region %0d,%0d: %0d expected %0d",
                                           k, e, p, rgn_out[e][p], exp_v);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
