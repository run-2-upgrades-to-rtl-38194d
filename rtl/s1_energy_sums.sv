// s1_energy_sums: Stage-1 global energy sums.
//
// Total ET is the sum of the central regions (eta 4..17). The missing-ET vector is minus the
// vector sum of the same regions, with each phi slice of 20 degrees taken at its centre
// (phi = 20*p + 10 degrees); the cos/sin weights are 12-bit fixed point numbers computed at
// elaboration. Its magnitude is approximated as max(|x|,|y|) + min(|x|,|y|)/2, which is within
// 12 percent of the true length. HT is the scalar sum of central jets with ET >= HT_THR. The
// paper says only that the trigger computes global energy sums, and that in heavy-ion running
// they are computed without background subtraction; which sums, their region coverage and
// their arithmetic are this design's choice, modelled on the Run-1 sums.
//
// Interface: 'rgn' and 'jets' must belong to the same event (the caller aligns them); one
// event per clock. Timing: two clock latency.
module s1_energy_sums
  import calo_pkg::*;
#(
  parameter int HT_THR = 10
) (
  input  logic               clk,
  input  rgn_et_t            rgn  [N_ETA][N_PHI],
  input  cand_t              jets [N_RGN],
  output logic [15:0]        ett,
  output logic [15:0]        htt,
  output logic signed [19:0] met_x,
  output logic signed [19:0] met_y,
  output logic [15:0]        met
);

  localparam int FRAC = 12;
  typedef logic signed [FRAC+1:0] coef_t;
  typedef coef_t coef_tab_t [N_PHI];

  function automatic coef_tab_t make_tab(input bit use_sin);
    coef_tab_t t;
    real       ang;
    for (int p = 0; p < N_PHI; p++) begin
      ang  = (20.0 * p + 10.0) * 3.14159265358979 / 180.0;
      t[p] = coef_t'($rtoi((use_sin ? $sin(ang) : $cos(ang)) * (1 << FRAC)
                            + ((use_sin ? $sin(ang) : $cos(ang)) >= 0 ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam coef_tab_t COS_T = make_tab(1'b0);
  localparam coef_tab_t SIN_T = make_tab(1'b1);

  logic [15:0]        ett_d, htt_d;
  logic signed [31:0] sx, sy;
  logic signed [19:0] mx_q, my_q;
  logic [15:0]        ett_q, htt_q;

  always_comb begin
    ett_d = '0;
    htt_d = '0;
    sx    = '0;
    sy    = '0;
    for (int e = HF_ETA_LO; e <= HF_ETA_HI; e++)
      for (int p = 0; p < N_PHI; p++) begin
        ett_d += 16'(rgn[e][p]);
        sx    += 32'(signed'({1'b0, rgn[e][p]})) * 32'(COS_T[p]);
        sy    += 32'(signed'({1'b0, rgn[e][p]})) * 32'(SIN_T[p]);
      end
    for (int i = 0; i < N_RGN; i++)
      if (jets[i].et >= CAND_ET_W'(HT_THR) && jets[i].eta >= 5'(HF_ETA_LO)
          && jets[i].eta <= 5'(HF_ETA_HI))
        htt_d += 16'(jets[i].et);
  end

  always_ff @(posedge clk) begin
    ett_q <= ett_d;
    htt_q <= htt_d;
    mx_q  <= 20'(-(sx >>> FRAC));
    my_q  <= 20'(-(sy >>> FRAC));
  end

  logic [19:0] ax, ay, amax, amin;
  always_comb begin
    ax   = mx_q[19] ? 20'(-mx_q) : 20'(mx_q);
    ay   = my_q[19] ? 20'(-my_q) : 20'(my_q);
    amax = (ax > ay) ? ax : ay;
    amin = (ax > ay) ? ay : ax;
  end

  always_ff @(posedge clk) begin
    ett   <= ett_q;
    htt   <= htt_q;
    met_x <= mx_q;
    met_y <= my_q;
    met   <= 16'(amax + (amin >> 1));
  end

endmodule
