// s1_tau_finder: Stage-1 tau candidates with relative isolation (proton running) and the
// heavy-ion single-region seeds.
//
// Proton running: a central region (eta 4..17) that is a local maximum of its 3x3
// neighbourhood seeds a tau of 2x1 regions, the seed plus its most energetic neighbour in eta
// or phi. The relative isolation (E_3x3 - E_tau)/E_tau is decided by a LUT addressed with the
// two energies, and the tau ET is corrected by an eta-dependent LUT. The 2x1 size, the 3x3
// isolation area around the highest region and both LUTs follow the paper. The LUT address
// coding is this design's: each energy is shifted right by ISO_SHIFT and saturated to 6 bits
// for the isolation LUT, and the tau ET is saturated to 8 bits to address the correction LUT.
// Default LUT contents: isolated when E_3x3 - E_tau <= E_tau/4 (in LUT units), and an
// identity correction; both can be overwritten through 'cfg'.
// Heavy-ion running: the algorithm is repurposed to deliver the most energetic single central
// regions, so every central region is a candidate with its own ET and no isolation.
//
// Interface: one event per clock in 'rgn'; 'taus' has one slot per region (index
// eta*18+phi), zero when there is no tau, flag = isolated. Timing: two clock latency.
module s1_tau_finder
  import calo_pkg::*;
#(
  parameter int ISO_SHIFT = 2
) (
  input  logic      clk,
  input  run_mode_e mode,
  input  cfg_wr_t   cfg,
  input  rgn_et_t   rgn  [N_ETA][N_PHI],
  output cand_t     taus [N_RGN]
);

  logic       iso_lut [4096];
  logic [7:0] cor_lut [N_ETA * 256];

  initial begin
    for (int a = 0; a < 4096; a++)
      iso_lut[a] = ((a >> 6) <= (a & 63)) || (((a >> 6) - (a & 63)) * 4 <= (a & 63));
    for (int a = 0; a < N_ETA * 256; a++) cor_lut[a] = 8'(a);
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == LUT_TAU_ISO) iso_lut[cfg.addr[11:0]] <= cfg.data[0];
    if (cfg.we && cfg.sel == LUT_TAU_COR && cfg.addr < 16'(N_ETA * 256))
      cor_lut[cfg.addr[12:0]] <= cfg.data[7:0];
  end

  function automatic logic [5:0] q6(input logic [CAND_ET_W-1:0] x);
    logic [CAND_ET_W-1:0] s;
    s = x >> ISO_SHIFT;
    return (s > 63) ? 6'd63 : s[5:0];
  endfunction

  for (genvar e = 0; e < N_ETA; e++) begin : g_eta
    for (genvar p = 0; p < N_PHI; p++) begin : g_phi
      localparam bit CENTRAL = (e >= HF_ETA_LO) && (e <= HF_ETA_HI);
      logic [RGN_W-1:0]     nb [3][3];
      logic                 is_max;
      logic [CAND_ET_W-1:0] e3, etau, nmax;
      logic [CAND_ET_W-1:0] e3_q, etau_q;
      logic                 seed_q;
      logic [7:0]           et8;

      always_comb begin
        for (int de = -1; de <= 1; de++)
          for (int dp = -1; dp <= 1; dp++)
            if (e + de < 0 || e + de >= N_ETA) nb[de+1][dp+1] = '0;
            else nb[de+1][dp+1] = rgn[e+de][(p + dp + N_PHI) % N_PHI];
        is_max = (nb[1][1] != '0);
        e3     = '0;
        for (int de = 0; de < 3; de++)
          for (int dp = 0; dp < 3; dp++) begin
            e3 += CAND_ET_W'(nb[de][dp]);
            if (de*3 + dp < 4) is_max &= (nb[1][1] > nb[de][dp]);
            else if (de*3 + dp > 4) is_max &= (nb[1][1] >= nb[de][dp]);
          end
        nmax = CAND_ET_W'(nb[0][1]);
        if (CAND_ET_W'(nb[2][1]) > nmax) nmax = CAND_ET_W'(nb[2][1]);
        if (CAND_ET_W'(nb[1][0]) > nmax) nmax = CAND_ET_W'(nb[1][0]);
        if (CAND_ET_W'(nb[1][2]) > nmax) nmax = CAND_ET_W'(nb[1][2]);
        etau = CAND_ET_W'(nb[1][1]) + nmax;
      end

      // Stage 1: candidate ET and isolation area.
      always_ff @(posedge clk) begin
        if (mode == MODE_HI) begin
          seed_q <= CENTRAL && (nb[1][1] != '0);
          etau_q <= CAND_ET_W'(nb[1][1]);
        end else begin
          seed_q <= CENTRAL && is_max;
          etau_q <= etau;
        end
        e3_q <= e3;
      end

      // Stage 2: isolation and correction LUTs.
      assign et8 = (etau_q > 255) ? 8'd255 : etau_q[7:0];

      always_ff @(posedge clk) begin
        if (!seed_q) taus[e*N_PHI+p] <= '0;
        else if (mode == MODE_HI) taus[e*N_PHI+p] <= '{et: etau_q, eta: 5'(e), phi: 5'(p), flag: 1'b0};
        else taus[e*N_PHI+p] <= '{et:   CAND_ET_W'(cor_lut[e*256 + int'(et8)]),
                                  eta:  5'(e), phi: 5'(p),
                                  flag: iso_lut[{q6(e3_q), q6(etau_q)}]};
      end
    end
  end

endmodule
