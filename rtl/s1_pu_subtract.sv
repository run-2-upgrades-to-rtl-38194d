// s1_pu_subtract: event-by-event pile-up subtraction of the Stage-1 trigger (proton running).
//
// The number of regions with non-zero transverse energy in the whole event is the pile-up
// estimator. One look-up table per eta slice turns that number into the energy to subtract
// from every region of the slice, and the subtraction is clipped at zero. This follows the
// paper; the LUT contents are loaded at run time through 'cfg' (they come up as zero, i.e. no
// subtraction) and the clipping at zero is this design's choice.
//
// Interface: 'rgn_in' is the whole 22x18 region grid of one bunch crossing, one event per
// clock. 'rgn_out' is the subtracted grid and 'npu' the estimator of the same event.
// Timing: two clock latency (count, then LUT look-up and subtraction); one event per clock.
module s1_pu_subtract
  import calo_pkg::*;
#(
  parameter int N_ETA_P = N_ETA,
  parameter int N_PHI_P = N_PHI
) (
  input  logic      clk,
  input  cfg_wr_t   cfg,
  input  rgn_et_t   rgn_in  [N_ETA_P][N_PHI_P],
  output rgn_et_t   rgn_out [N_ETA_P][N_PHI_P],
  output logic [NPU_W-1:0] npu
);

  rgn_et_t          rgn_q [N_ETA_P][N_PHI_P];
  logic [NPU_W-1:0] npu_d, npu_q;

  // Stage 1: count non-zero regions.
  always_comb begin
    npu_d = '0;
    for (int e = 0; e < N_ETA_P; e++)
      for (int p = 0; p < N_PHI_P; p++)
        npu_d += NPU_W'(rgn_in[e][p] != '0);
  end

  always_ff @(posedge clk) begin
    rgn_q <= rgn_in;
    npu_q <= npu_d;
  end

  // Stage 2: one LUT per eta slice, addressed by the estimator.
  for (genvar e = 0; e < N_ETA_P; e++) begin : g_eta
    rgn_et_t lut [2**NPU_W];
    rgn_et_t pu_et;

    initial for (int i = 0; i < 2**NPU_W; i++) lut[i] = '0;

    always_ff @(posedge clk)
      if (cfg.we && cfg.sel == LUT_PU && cfg.addr[13:9] == 5'(e))
        lut[cfg.addr[8:0]] <= cfg.data[RGN_W-1:0];

    assign pu_et = lut[npu_q];

    always_ff @(posedge clk)
      for (int p = 0; p < N_PHI_P; p++)
        rgn_out[e][p] <= (rgn_q[e][p] > pu_et) ? rgn_q[e][p] - pu_et : '0;
  end

  always_ff @(posedge clk) npu <= npu_q;

endmodule
