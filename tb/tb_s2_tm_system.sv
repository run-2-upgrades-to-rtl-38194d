// tb_s2_tm_system: end-to-end test of the Stage-2 time-multiplexed system at full size
// (18 Layer-1 cards, 9 Layer-2 nodes, demux).
// Sends NEV random events, one per bunch crossing (6 clocks of the 240 MHz clock). For each
// event the total tower ET and tower multiplicity are worked out from the ECAL/HCAL inputs
// with a model of the tower word, and the demux output must deliver them in event order with
// consecutive event numbers and a constant latency. Also counted: nodes receiving at the same
// time (time multiplexing), every node used, no alignment or ordering fault.
module tb_s2_tm_system;
  import calo_pkg::*;

  localparam int NEV = 24;

  logic        clk = 0, rst, bx_start;
  logic [7:0]  ecal [18][40][8], hcal [18][40][8];
  tower_word_t ring_pos [9][72], ring_neg [9][72];
  logic [5:0]  ring_frame [9];
  logic        ring_valid [9];
  l2_result_t  gt_out;
  logic        gt_valid, order_err;
  logic [31:0] gt_event;
  logic        align_err [9];
  logic [15:0] n_order_err;

  int checks = 0, failures = 0;

  s2_tm_system dut (.clk, .rst, .bx_start, .ecal, .hcal, .ring_pos, .ring_neg, .ring_frame,
                    .ring_valid, .gt_out, .gt_valid, .gt_event, .align_err, .order_err, .n_order_err);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_et [NEV], exp_n [NEV], start_cyc [NEV];
  int cyc = 0, n_out = 0, latency = -1, max_parallel = 0, n_align = 0;
  bit node_used [9];

  always @(posedge clk) begin
    int par;
    #1;
    cyc++;
    par = 0;
    for (int n = 0; n < 9; n++) begin
      if (ring_valid[n]) begin par++; node_used[n] = 1; end
      if (align_err[n]) n_align++;
    end
    if (par > max_parallel) max_parallel = par;
    if (gt_valid) begin
      checks += 3;
      if (n_out >= NEV || int'(gt_out.ett) != exp_et[n_out] || int'(gt_out.n_towers) != exp_n[n_out]) begin
        failures++;
        $display("event %0d: ett %0d n %0d expected %0d %0d", n_out, gt_out.ett, gt_out.n_towers,
                 exp_et[n_out], exp_n[n_out]);
      end
      if (gt_event != 32'(n_out)) begin failures++; $display("event number %0d", gt_event); end
      if (latency < 0) latency = cyc - start_cyc[n_out];
      else if (cyc - start_cyc[n_out] != latency) begin failures++; $display("latency changed"); end
      n_out++;
    end
  end

  initial begin
    foreach (node_used[n]) node_used[n] = 0;
    rst = 1;
    bx_start = 0;
    repeat (3) @(posedge clk);
    #1;
    rst = 0;
    for (int t = 0; t < NEV * 6; t++) begin
      bx_start = (t % 6 == 0);
      if (bx_start) begin
        int k, e, h;
        k = t / 6;
        exp_et[k] = 0;
        exp_n[k] = 0;
        for (int c = 0; c < 18; c++)
          for (int f = 0; f < 40; f++)
            for (int p = 0; p < 8; p++) begin
              ecal[c][f][p] = ($urandom % 4 == 0) ? 8'($urandom) : 8'd0;
              hcal[c][f][p] = ($urandom % 5 == 0) ? 8'($urandom) : 8'd0;
              e = (f < 28) ? int'(ecal[c][f][p]) : 0;
              h = int'(hcal[c][f][p]);
              exp_et[k] += e + h;
              exp_n[k] += (e + h != 0);
            end
        start_cyc[k] = cyc;
      end
      @(posedge clk);
      #1;
    end
    bx_start = 0;
    repeat (80) @(posedge clk);
    #1;
    checks += 5;
    if (n_out != NEV) begin failures++; $display("%0d of %0d events delivered", n_out, NEV); end
    if (max_parallel < 6) begin failures++; $display("only %0d nodes receiving at once", max_parallel); end
    foreach (node_used[n]) if (!node_used[n]) begin failures++; $display("node %0d unused", n); break; end
    if (n_align != 0) begin failures++; $display("%0d alignment errors", n_align); end
    if (n_order_err != 0) begin failures++; $display("%0d order errors", n_order_err); end
    $display("events %0d, latency %0d clocks (%0d bunch crossings), nodes receiving at once %0d",
             n_out, latency, latency / 6, max_parallel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
