// s2_tower_encoder: Layer-1 tower pre-processing into the 16-bit Layer-1 to Layer-2 word.
//
// ECAL and HCAL transverse energies of one trigger tower are summed, and their ratio is kept
// as a 3-bit code so that Layer-2 can treat electromagnetic and hadronic energy apart. Summing
// ECAL and HCAL in Layer-1 and a 16-bit word carrying the sum plus ratio information follow
// the paper. The bit layout is this design's choice, close to the one used in the CMS
// Stage-2 trigger:
//   [8:0]   ECAL + HCAL ET
//   [11:9]  floor(log2(larger/smaller)), saturated at 7 (7 if the smaller is zero and the
//           larger is not, 0 if both are zero)
//   [12]    set when ECAL ET > HCAL ET
//   [15:13] reserved, zero
// Interface: 8-bit ECAL and HCAL ET in, word out. Timing: one clock latency.
module s2_tower_encoder
  import calo_pkg::*;
(
  input  logic        clk,
  input  logic [7:0]  ecal_et,
  input  logic [7:0]  hcal_et,
  output tower_word_t word
);

  logic [7:0]  e_hi, e_lo;
  logic [2:0]  ratio;
  logic [8:0]  sum;

  always_comb begin
    sum   = 9'(ecal_et) + 9'(hcal_et);
    e_hi   = (ecal_et > hcal_et) ? ecal_et : hcal_et;
    e_lo = (ecal_et > hcal_et) ? hcal_et : ecal_et;
    ratio = '0;
    if (e_hi == '0) ratio = 3'd0;
    else if (e_lo == '0) ratio = 3'd7;
    else
      for (int r = 1; r < 8; r++)
        if ((16'(e_lo) << r) <= 16'(e_hi)) ratio = 3'(r);
  end

  always_ff @(posedge clk) word <= {3'b000, ecal_et > hcal_et, ratio, sum};

endmodule
