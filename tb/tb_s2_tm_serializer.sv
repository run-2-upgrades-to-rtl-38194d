// tb_s2_tm_serializer: self-checking test of the Layer-1 time-multiplexing transmitter.
// Sends 30 random events, one every 6 clocks (one bunch crossing of the 240 MHz clock), and
// watches all 9 node outputs: event n must appear on node n mod 9 only, starting one clock
// after its bx_start, as 40 consecutive frames in centre-out eta order with the towers of
// phi 2l and 2l+1 on link l. Also checks that two nodes are sending at the same time (the
// time multiplexing overlap) and that every event was delivered.
module tb_s2_tm_serializer;
  import calo_pkg::*;

  localparam int NEV = 30;

  logic        clk = 0, rst;
  logic        bx_start;
  tower_word_t towers [40][8];
  logic [31:0] link_data [9][4];
  logic        link_valid [9];

  int checks = 0, failures = 0;

  s2_tm_serializer dut (.clk, .rst, .bx_start, .towers, .link_data, .link_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tower_word_t ev [NEV][40][8];
  int start_cyc [NEV];
  int node_cnt [9], frame_cnt [9];
  int cyc = 0, max_busy = 0, delivered = 0;

  initial begin
    foreach (node_cnt[n]) begin node_cnt[n] = 0; frame_cnt[n] = 0; end
    foreach (ev[i, e, p]) ev[i][e][p] = tower_word_t'($urandom);
    rst = 1;
    bx_start = 0;
    repeat (3) @(posedge clk);
    #1;
    rst = 0;
    for (int t = 0; t < NEV * 6 + 60; t++) begin
      bx_start = (t % 6 == 0) && (t / 6 < NEV);
      if (bx_start) begin
        towers = ev[t / 6];
        start_cyc[t / 6] = cyc;
      end
      @(posedge clk);
      #1;
      cyc++;
      begin
        int busy;
        busy = 0;
        for (int n = 0; n < 9; n++)
          if (link_valid[n]) begin
            int k, f;
            busy++;
            k = n + 9 * node_cnt[n];
            f = frame_cnt[n];
            if (f == 0) begin
              checks++;
              if (k >= NEV || cyc - start_cyc[k] != 1) begin
                failures++;
                $display("node %0d event %0d started at wrong time", n, k);
              end
            end
            for (int l = 0; l < 4; l++) begin
              checks++;
              if (k >= NEV || link_data[n][l] != {ev[k][f][2*l+1], ev[k][f][2*l]}) begin
                failures++;
                if (failures < 10) $display("node %0d event %0d frame %0d link %0d wrong", n, k, f, l);
              end
            end
            frame_cnt[n]++;
            if (frame_cnt[n] == 40) begin
              frame_cnt[n] = 0;
              node_cnt[n]++;
              delivered++;
            end
          end else if (frame_cnt[n] != 0) begin
            failures++;
            $display("node %0d stopped after %0d frames", n, frame_cnt[n]);
            frame_cnt[n] = 0;
          end
        if (busy > max_busy) max_busy = busy;
      end
    end
    checks += 2;
    if (delivered != NEV) begin failures++; $display("delivered %0d events", delivered); end
    if (max_busy < 6) begin failures++; $display("only %0d nodes busy at once", max_busy); end
    $display("events delivered %0d, nodes busy at once %0d", delivered, max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
