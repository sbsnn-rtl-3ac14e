// tb_synapse_testchip: loads {NS, TIME_IN} through the serial test-mode port, runs
// 768 trials and checks that the flip count / 768 matches the expected switching
// probability for the count 11 - |TIME_IN| (worked out here), that TIME_IN = 0 or
// |TIME_IN| > 10 gives no flips, that the cell ends in the written state when it
// flipped, and that the run takes 768 x 16 cycles.
module tb_synapse_testchip;
  import sbsnn_pkg::*;
  logic clk = 0, rst_n = 0, gpo_shift = 0, gpo_data = 0, start = 0;
  logic busy, done, d;
  logic [14:0] flips;
  int checks = 0, failures = 0;

  synapse_testchip dut (.clk, .rst_n, .gpo_shift, .gpo_data, .start, .busy, .done, .d, .flips);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_of(int dt, int n);
    int c, code;
    real dd;
    c = (dt < 0) ? -dt : dt;
    if (c == 0 || c > 10) return 0.0;
    c = 11 - c;
    code = 63 - 6 * c;
    dd = (2.0 * code - 63.0) / 16.0;
    return (0.116 + 0.785 / (1.0 + $exp(dd))) * (n + 1) / 8.0;
  endfunction

  int tests [7] = '{1, 3, 6, -1, -4, 0, 12};

  initial begin
    logic [7:0] word;
    int cycles;
    real r, e;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (tests[k]) begin
      word = {3'd7, 5'(tests[k])};
      for (int b = 7; b >= 0; b--) begin @(negedge clk); gpo_shift = 1; gpo_data = word[b]; end
      @(negedge clk); gpo_shift = 0;
      @(negedge clk); @(negedge clk);
      start = 1; @(negedge clk); start = 0;
      cycles = 0;
      while (!done && cycles < 20000) begin cycles++; @(negedge clk); end
      @(negedge clk);
      checks++; if (cycles != 768 * 16) begin failures++; $display("FAIL cycles %0d", cycles); end
      r = real'(flips) / 768.0; e = p_of(tests[k], 7);
      checks++;
      if (r < e - 0.06 || r > e + 0.06) begin failures++; $display("FAIL time_in %0d p %f expected %f", tests[k], r, e); end
      else $display("time_in %0d: switching probability %f (expected %f)", tests[k], r, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
