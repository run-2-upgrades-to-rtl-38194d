// tb_s1_energy_sums: self-checking test of the Stage-1 global sums.
// Drives a single region (MET must point opposite to it with magnitude equal to its ET within
// the cos/sin rounding), a balanced pair, and random events with random jets. Total ET, HT
// and the missing-ET components are compared with a real-number model (components within
// 1 count per region of rounding), the magnitude with max + min/2 of the DUT's own components.
// Two clock latency, one event per clock.
module tb_s1_energy_sums;
  import calo_pkg::*;

  logic               clk = 0;
  rgn_et_t            rgn  [N_ETA][N_PHI];
  cand_t              jets [N_RGN];
  logic [15:0]        ett, htt, met;
  logic signed [19:0] met_x, met_y;

  int checks = 0, failures = 0;

  s1_energy_sums #(.HT_THR(10)) dut (.clk, .rgn, .jets, .ett, .htt, .met_x, .met_y, .met);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v);
    return v < 0 ? -v : v;
  endfunction

  task automatic check(string name);
    int e_t, h_t, n, ax, ay, amax, amin;
    real x, y, ang;
    e_t = 0; h_t = 0; x = 0; y = 0; n = 0;
    for (int e = 4; e <= 17; e++)
      for (int p = 0; p < N_PHI; p++) begin
        ang = (20.0 * p + 10.0) * 3.14159265358979 / 180.0;
        e_t += rgn[e][p];
        x -= rgn[e][p] * $cos(ang);
        y -= rgn[e][p] * $sin(ang);
        n += (rgn[e][p] != 0);
      end
    for (int i = 0; i < N_RGN; i++)
      if (jets[i].et >= 10 && jets[i].eta >= 4 && jets[i].eta <= 17) h_t += jets[i].et;
    repeat (2) begin @(posedge clk); #1; end
    checks += 4;
    if (ett != 16'(e_t)) begin failures++; $display("%s: ett %0d expected %0d", name, ett, e_t); end
    if (htt != 16'(h_t)) begin failures++; $display("%s: htt %0d expected %0d", name, htt, h_t); end
    if (rabs(real'(met_x) - x) > 2.0 + n * 0.13 || rabs(real'(met_y) - y) > 2.0 + n * 0.13) begin
      failures++;
      $display("%s: met_x/y %0d/%0d expected %f/%f", name, met_x, met_y, x, y);
    end
    ax = met_x < 0 ? -met_x : met_x;
    ay = met_y < 0 ? -met_y : met_y;
    amax = ax > ay ? ax : ay;
    amin = ax > ay ? ay : ax;
    if (int'(met) != amax + amin / 2) begin failures++; $display("%s: met %0d", name, met); end
  endtask

  initial begin
    foreach (rgn[e, p]) rgn[e][p] = '0;
    foreach (jets[i]) jets[i] = '0;
    rgn[8][0] = 100;
    check("single");
    rgn[8][9] = 100;                                   // opposite in phi: balanced
    check("balanced");
    checks++;
    if (met > 2) begin failures++; $display("balanced event MET %0d", met); end
    for (int it = 0; it < 30; it++) begin
      foreach (rgn[e, p]) rgn[e][p] = ($urandom % 3 == 0) ? rgn_et_t'($urandom % 1024) : '0;
      foreach (jets[i]) begin
        jets[i] = '0;
        if ($urandom % 20 == 0) begin
          jets[i].et  = CAND_ET_W'($urandom % 40);
          jets[i].eta = 5'(i / N_PHI);
          jets[i].phi = 5'(i % N_PHI);
        end
      end
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
