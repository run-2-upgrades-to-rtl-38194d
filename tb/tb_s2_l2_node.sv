// tb_s2_l2_node: self-checking test of the Layer-2 node input pipeline.
// Plays three events into the 72 links as the Layer-1 cards would send them (40 frames, card
// c on links 4c..4c+3, cards 0-8 positive eta, 9-17 negative), with gaps between events. Checks
// every ring as it comes out (tower position mapping and frame number), the event total ET
// and tower multiplicity, and that a frame with one link missing raises the alignment error.
module tb_s2_l2_node;
  import calo_pkg::*;

  logic        clk = 0, rst;
  logic [31:0] link_data  [72];
  logic        link_valid [72];
  tower_word_t ring_pos [72], ring_neg [72];
  logic [5:0]  ring_frame;
  logic        ring_valid;
  l2_result_t  res;
  logic        res_valid, align_err;

  int checks = 0, failures = 0, n_res = 0, n_align = 0;

  s2_l2_node dut (.clk, .rst, .link_data, .link_valid, .ring_pos, .ring_neg, .ring_frame,
                  .ring_valid, .res, .res_valid, .align_err);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tower_word_t tw [2][40][72];   // [side][frame][iphi]
  int exp_et, exp_n;

  always @(posedge clk) begin
    #1;
    if (res_valid) begin
      n_res++;
      checks += 2;
      if (int'(res.ett) != exp_et) begin failures++; $display("ett %0d expected %0d", res.ett, exp_et); end
      if (int'(res.n_towers) != exp_n) begin failures++; $display("n %0d expected %0d", res.n_towers, exp_n); end
    end
    if (align_err) n_align++;
  end

  initial begin
    rst = 1;
    foreach (link_valid[i]) begin link_valid[i] = 0; link_data[i] = '0; end
    repeat (3) @(posedge clk);
    #1;
    rst = 0;
    for (int ev = 0; ev < 3; ev++) begin
      exp_et = 0;
      exp_n = 0;
      foreach (tw[s, f, p]) begin
        tw[s][f][p] = ($urandom % 3 == 0) ? tower_word_t'($urandom) : '0;
        exp_et += tw[s][f][p][8:0];
        exp_n += (tw[s][f][p][8:0] != 0);
      end
      for (int f = 0; f < 40; f++) begin
        for (int c = 0; c < 18; c++)
          for (int l = 0; l < 4; l++) begin
            link_valid[4*c+l] = 1;
            link_data[4*c+l] = {tw[c / 9][f][8*(c%9) + 2*l + 1], tw[c / 9][f][8*(c%9) + 2*l]};
          end
        @(posedge clk);
        #1;
        checks++;
        if (!ring_valid || int'(ring_frame) != f || ring_pos != tw[0][f] || ring_neg != tw[1][f]) begin
          failures++;
          if (failures < 10) $display("event %0d frame %0d ring mismatch (frame %0d)", ev, f, ring_frame);
        end
      end
      foreach (link_valid[i]) link_valid[i] = 0;
      repeat (5) @(posedge clk);
      #1;
    end
    // one link missing: alignment error
    foreach (link_valid[i]) link_valid[i] = (i != 17);
    @(posedge clk);
    #1;
    foreach (link_valid[i]) link_valid[i] = 0;
    repeat (2) @(posedge clk);
    #1;
    checks += 2;
    if (n_res != 3) begin failures++; $display("%0d results", n_res); end
    if (n_align != 1) begin failures++; $display("%0d alignment errors", n_align); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
