// tb_output_neuron: with a 64-input column, drives random AND pulses and checks
// the reported sum (counted here), that the firing rate follows the modulated
// code through the stochastic-bit curve (worked out here), that a larger sum
// fires more, and that MASK or EN low silences the neuron.
module tb_output_neuron;
  import sbsnn_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, en = 0, mask = 0;
  logic [N-1:0] and_pulses = '0;
  logic [2:0] gain_shift = 3'd1;
  code_t bias = 6'd0;
  ns_t ns = 3'd7;
  logic [6:0] sum;
  logic post;
  int checks = 0, failures = 0;

  output_neuron #(.N_IN(N), .SUM_W(7)) dut (.clk, .rst_n, .en, .mask, .and_pulses,
    .gain_shift, .bias, .ns, .sum, .post);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_of(int s);
    int x, code;
    real d;
    x = (s << 1); if (x > 63) x = 63;
    code = 63 - x;
    d = (2.0 * code - 63.0) / 16.0;
    return 0.116 + 0.785 / (1.0 + $exp(d));
  endfunction

  task automatic set_pulses(int k);
    and_pulses = '0;
    for (int i = 0; i < k; i++) and_pulses[(i * 7) % N] = 1'b1;
  endtask

  initial begin
    real r, e;
    int hits;
    repeat (2) @(posedge clk); rst_n = 1;
    en = 1;
    for (int k = 0; k <= 40; k += 8) begin
      set_pulses(k);
      @(negedge clk);
      checks++; if (int'(sum) != k) begin failures++; $display("FAIL sum %0d expected %0d", sum, k); end
      hits = 0;
      for (int t = 0; t < 3000; t++) begin @(negedge clk); hits += post; end
      r = real'(hits) / 3000.0; e = p_of(k);
      checks++;
      if (r < e - 0.04 || r > e + 0.04) begin failures++; $display("FAIL sum %0d rate %f expected %f", k, r, e); end
    end
    // mask and enable
    set_pulses(40);
    mask = 1; @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      @(negedge clk); checks++; if (post) begin failures++; $display("FAIL spike while masked"); end
    end
    mask = 0; en = 0; @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      @(negedge clk); checks++; if (post) begin failures++; $display("FAIL spike while disabled"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
