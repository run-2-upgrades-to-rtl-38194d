// tb_s2_ctp7_layer1: self-checking test of one Layer-1 card.
// Drives 12 random events (one per 6 clocks) of ECAL and HCAL tower energies and checks every
// link word the card sends: the node it goes to (event mod 9), its timing (frame 0 two clocks
// after bx_start), and each 16-bit tower word against a model encoder, including that ECAL
// energy of the HF towers (eta index 28..39) is ignored.
module tb_s2_ctp7_layer1;
  import calo_pkg::*;

  localparam int NEV = 12;

  logic        clk = 0, rst, bx_start;
  logic [7:0]  ecal [40][8], hcal [40][8];
  logic [31:0] link_data [9][4];
  logic        link_valid [9];

  int checks = 0, failures = 0;

  s2_ctp7_layer1 dut (.clk, .rst, .bx_start, .ecal, .hcal, .link_data, .link_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int enc(int e, int h);
    int hi, lo, q, r;
    hi = e > h ? e : h;
    lo = e > h ? h : e;
    if (hi == 0) r = 0;
    else if (lo == 0) r = 7;
    else begin
      q = hi / lo;
      r = 0;
      while (q > 1) begin q = q / 2; r++; end
      if (r > 7) r = 7;
    end
    return (e + h) | (r << 9) | ((e > h ? 1 : 0) << 12);
  endfunction

  logic [7:0] eva [NEV][40][8], evh [NEV][40][8];
  int start_cyc [NEV], node_cnt [9], frame_cnt [9];
  int cyc = 0, delivered = 0;

  initial begin
    foreach (node_cnt[n]) begin node_cnt[n] = 0; frame_cnt[n] = 0; end
    foreach (eva[i, e, p]) begin eva[i][e][p] = 8'($urandom); evh[i][e][p] = 8'($urandom % 64); end
    rst = 1;
    bx_start = 0;
    repeat (3) @(posedge clk);
    #1;
    rst = 0;
    for (int t = 0; t < NEV * 6 + 60; t++) begin
      bx_start = (t % 6 == 0) && (t / 6 < NEV);
      if (bx_start) begin
        ecal = eva[t / 6];
        hcal = evh[t / 6];
        start_cyc[t / 6] = cyc;
      end
      @(posedge clk);
      #1;
      cyc++;
      for (int n = 0; n < 9; n++)
        if (link_valid[n]) begin
          int k, f, w0, w1;
          k = n + 9 * node_cnt[n];
          f = frame_cnt[n];
          if (f == 0) begin
            checks++;
            if (k >= NEV || cyc - start_cyc[k] != 2) begin failures++; $display("timing node %0d", n); end
          end
          for (int l = 0; l < 4; l++) begin
            if (k < NEV) begin
              w0 = enc(f < 28 ? eva[k][f][2*l]   : 0, evh[k][f][2*l]);
              w1 = enc(f < 28 ? eva[k][f][2*l+1] : 0, evh[k][f][2*l+1]);
            end
            checks++;
            if (k >= NEV || link_data[n][l] != {16'(w1), 16'(w0)}) begin
              failures++;
              if (failures < 10) $display("node %0d event %0d frame %0d link %0d: %h expected %h",
                                          n, k, f, l, link_data[n][l], {16'(w1), 16'(w0)});
            end
          end
          frame_cnt[n]++;
          if (frame_cnt[n] == 40) begin frame_cnt[n] = 0; node_cnt[n]++; delivered++; end
        end
    end
    checks++;
    if (delivered != NEV) begin failures++; $display("delivered %0d", delivered); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
