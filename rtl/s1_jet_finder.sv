// s1_jet_finder: Stage-1 jet finder on the 22x18 region grid.
//
// Every region that is a local maximum of its 3x3 neighbourhood (phi wraps around, eta does
// not) and has at least JET_SEED of ET seeds a jet at its position. In proton running the jet
// ET is the sum of the 3x3 regions; in heavy-ion running it is the largest of the four 2x2
// sums inside the 3x3 that contain the seed. Both ET definitions follow the paper. The local
// maximum rule, the seed threshold and the tie rule (the seed must be strictly above the
// neighbours at lower eta, or same eta and lower phi, and not below the others, so that two
// equal neighbours give one jet) are this design's choice. Seeds at eta 4..17 give central
// jets, the others forward jets.
//
// Interface: 'rgn' is the (background-subtracted) grid, one event per clock. 'jets_c' and
// 'jets_f' hold one candidate slot per region (index eta*18+phi); a slot that is not a jet of
// that kind is all zero. Timing: one clock latency.
module s1_jet_finder
  import calo_pkg::*;
#(
  parameter int JET_SEED = 1
) (
  input  logic      clk,
  input  run_mode_e mode,
  input  rgn_et_t   rgn    [N_ETA][N_PHI],
  output cand_t     jets_c [N_RGN],
  output cand_t     jets_f [N_RGN]
);

  for (genvar e = 0; e < N_ETA; e++) begin : g_eta
    for (genvar p = 0; p < N_PHI; p++) begin : g_phi
      logic [RGN_W-1:0]     nb [3][3];   // [de+1][dp+1]
      logic                 is_max;
      logic [CAND_ET_W-1:0] sum3, q [4], qmax, et;
      cand_t                c;

      always_comb begin
        for (int de = -1; de <= 1; de++)
          for (int dp = -1; dp <= 1; dp++)
            if (e + de < 0 || e + de >= N_ETA) nb[de+1][dp+1] = '0;
            else nb[de+1][dp+1] = rgn[e+de][(p + dp + N_PHI) % N_PHI];

        is_max = (nb[1][1] >= RGN_W'(JET_SEED));
        sum3   = '0;
        for (int de = 0; de < 3; de++)
          for (int dp = 0; dp < 3; dp++) begin
            sum3 += CAND_ET_W'(nb[de][dp]);
            if (de*3 + dp < 4) is_max &= (nb[1][1] > nb[de][dp]);
            else if (de*3 + dp > 4) is_max &= (nb[1][1] >= nb[de][dp]);
          end

        // The four 2x2 squares that contain the seed.
        for (int k = 0; k < 4; k++) begin
          q[k] = CAND_ET_W'(nb[1][1]) + CAND_ET_W'(nb[(k/2)*2][1])
               + CAND_ET_W'(nb[1][(k%2)*2]) + CAND_ET_W'(nb[(k/2)*2][(k%2)*2]);
        end
        qmax = q[0];
        for (int k = 1; k < 4; k++) if (q[k] > qmax) qmax = q[k];

        et     = (mode == MODE_HI) ? qmax : sum3;
        c.et   = is_max ? et : '0;
        c.eta  = 5'(e);
        c.phi  = 5'(p);
        c.flag = 1'b0;
        if (!is_max) c = '0;
      end

      always_ff @(posedge clk) begin
        jets_c[e*N_PHI+p] <= (e >= HF_ETA_LO && e <= HF_ETA_HI) ? c : '0;
        jets_f[e*N_PHI+p] <= (e >= HF_ETA_LO && e <= HF_ETA_HI) ? '0 : c;
      end
    end
  end

endmodule
