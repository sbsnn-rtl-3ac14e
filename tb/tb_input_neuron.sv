// tb_input_neuron: the spike rate of an input neuron must follow the pixel
// intensity through code = 63 - pixel/4 and the stochastic-bit curve (worked out
// here), rise with intensity, and be zero with EN low.
module tb_input_neuron;
  import sbsnn_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0] pixel = 0;
  ns_t ns = 3'd7;
  logic spike;
  int checks = 0, failures = 0;

  input_neuron dut (.clk, .rst_n, .en, .pixel, .ns, .spike);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_of(int pix);
    int code;
    real d;
    code = 63 - pix / 4;
    d = (2.0 * code - 63.0) / 16.0;
    return 0.116 + 0.785 / (1.0 + $exp(d));
  endfunction

  initial begin
    real r, e, prev;
    int hits;
    repeat (2) @(posedge clk); rst_n = 1;
    prev = 0.0;
    for (int p = 0; p < 256; p += 51) begin
      pixel = 8'(p); en = 1; hits = 0;
      @(negedge clk);
      for (int k = 0; k < 3000; k++) begin @(negedge clk); hits += spike; end
      r = real'(hits) / 3000.0; e = p_of(p);
      checks++;
      if (r < e - 0.04 || r > e + 0.04) begin failures++; $display("FAIL pixel %0d rate %f expected %f", p, r, e); end
      checks++;
      if (r < prev - 0.03) begin failures++; $display("FAIL rate fell at pixel %0d", p); end
      prev = r;
    end
    en = 0;
    @(negedge clk);
    for (int k = 0; k < 100; k++) begin
      @(negedge clk);
      checks++; if (spike) begin failures++; $display("FAIL spike with EN low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
