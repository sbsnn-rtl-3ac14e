// tb_sneuron_testchip: loads {LC, RC, NS} through the serial test-mode port for a
// few codes, runs the 768-evaluation measurement and checks that the 15-bit count
// equals the OA pulses seen here, that count / 768 matches the expected switching
// probability (worked out here from the paper's 90.1 %..11.6 % curve), and that the
// run takes 768 x 2 cycles.
module tb_sneuron_testchip;
  import sbsnn_pkg::*;
  logic clk = 0, rst_n = 0, gpo_shift = 0, gpo_data = 0, start = 0;
  logic busy, done, oa, ob;
  logic [14:0] count;
  int checks = 0, failures = 0;

  sneuron_testchip dut (.clk, .rst_n, .gpo_shift, .gpo_data, .start, .busy, .done, .oa, .ob, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_of(int l, int n);
    real d;
    d = (2.0 * l - 63.0) / 16.0;
    return (0.116 + 0.785 / (1.0 + $exp(d))) * (n + 1) / 8.0;
  endfunction

  initial begin
    logic [14:0] word;
    int seen, cycles;
    real r, e;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < 64; l += 21) begin
      word = {6'(l), ~6'(l), 3'd7};
      for (int b = 14; b >= 0; b--) begin @(negedge clk); gpo_shift = 1; gpo_data = word[b]; end
      @(negedge clk); gpo_shift = 0;
      @(negedge clk); @(negedge clk);
      start = 1; @(negedge clk); start = 0;
      seen = 0; cycles = 0;
      while (!done && cycles < 5000) begin seen += oa; cycles++; @(negedge clk); end
      seen += oa;
      @(negedge clk);
      checks++; if (int'(count) != seen) begin failures++; $display("FAIL count %0d seen %0d", count, seen); end
      checks++; if (cycles != 768 * 2) begin failures++; $display("FAIL cycles %0d", cycles); end
      r = real'(count) / 768.0; e = p_of(l, 7);
      checks++; if (r < e - 0.06 || r > e + 0.06) begin failures++; $display("FAIL code %0d p %f expected %f", l, r, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
