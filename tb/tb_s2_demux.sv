// tb_s2_demux: self-checking test of the Layer-2 demultiplexer.
// Nine model nodes return results in turn, every 6 clocks, as the time-multiplexed system
// does; the demux must forward all of them in event order with consecutive event numbers and
// report no fault. A result injected from the wrong node must be counted as an ordering
// fault and not forwarded.
module tb_s2_demux;
  import calo_pkg::*;

  logic        clk = 0, rst;
  l2_result_t  res [9];
  logic        res_valid [9];
  l2_result_t  out;
  logic        out_valid, order_err;
  logic [31:0] out_event;
  logic [15:0] n_order_err;

  int checks = 0, failures = 0, n_out = 0;

  s2_demux dut (.clk, .rst, .res, .res_valid, .out, .out_valid, .out_event, .order_err, .n_order_err);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic l2_result_t val(int k);
    return '{ett: 21'(k * 977 + 5), n_towers: 13'(k * 13)};
  endfunction

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      checks++;
      if (out != val(n_out) || out_event != 32'(n_out)) begin
        failures++;
        $display("output %0d: event %0d value %h", n_out, out_event, out);
      end
      n_out++;
    end
  end

  initial begin
    rst = 1;
    foreach (res_valid[n]) begin res_valid[n] = 0; res[n] = '0; end
    repeat (3) @(posedge clk);
    #1;
    rst = 0;
    for (int k = 0; k < 40; k++) begin
      res[k % 9] = val(k);
      res_valid[k % 9] = 1;
      @(posedge clk);
      #1;
      res_valid[k % 9] = 0;
      repeat (5) @(posedge clk);
      #1;
    end
    checks += 2;
    if (n_out != 40) begin failures++; $display("%0d outputs", n_out); end
    if (n_order_err != 0) begin failures++; $display("spurious order error"); end
    // node 3 answers out of turn (node 4 is next)
    res[3] = val(99);
    res_valid[3] = 1;
    @(posedge clk);
    #1;
    res_valid[3] = 0;
    repeat (2) @(posedge clk);
    #1;
    checks += 2;
    if (n_order_err != 1) begin failures++; $display("order error count %0d", n_order_err); end
    if (n_out != 40) begin failures++; $display("stray result forwarded"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
