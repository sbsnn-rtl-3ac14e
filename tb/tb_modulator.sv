// tb_modulator: checks the sum-to-code map code = 63 - min(63, (sum << g) + bias)
// over sums, gains and biases, computed here with integers.
module tb_modulator;
  import sbsnn_pkg::*;
  logic [9:0] sum;
  logic [2:0] gain_shift;
  code_t      bias, code;
  int checks = 0, failures = 0;

  modulator #(.SUM_W(10)) dut (.sum, .gain_shift, .bias, .code);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s <= 784; s += 7)
      for (int g = 0; g < 8; g++)
        for (int b = 0; b < 64; b += 21) begin
          int x;
          sum = 10'(s); gain_shift = 3'(g); bias = code_t'(b);
          #1;
          x = (s << g) + b;
          if (x > 63) x = 63;
          checks++;
          if (int'(code) != 63 - x) begin
            failures++; $display("FAIL sum %0d g %0d b %0d code %0d expected %0d", s, g, b, code, 63 - x);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
