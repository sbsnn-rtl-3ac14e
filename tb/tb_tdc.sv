// tb_tdc: for PRE/POST pairs dt = t_post - t_pre in -12..12 the second spike must
// report the direction and the count 11 - |dt| (0 outside the 10-step window).
module tb_tdc;
  import sbsnn_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, pre = 0, post = 0;
  logic valid, pot;
  tcnt_t count;
  int checks = 0, failures = 0;

  tdc dut (.clk, .rst_n, .clear, .pre, .post, .valid, .pot, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, e;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int dt = -12; dt <= 12; dt++) begin
      if (dt == 0) continue;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      a = dt < 0 ? -dt : dt;
      if (dt > 0) pre = 1; else post = 1;
      @(negedge clk); pre = 0; post = 0;
      repeat (a - 1) @(negedge clk);
      if (dt > 0) post = 1; else pre = 1;
      #1;
      e = (a <= 10) ? 11 - a : 0;
      checks++;
      if (!valid || pot != (dt > 0) || int'(count) != e) begin
        failures++; $display("FAIL dt %0d valid %0d pot %0d count %0d expected %0d", dt, valid, pot, count, e);
      end
      @(negedge clk); pre = 0; post = 0;
    end
    pre = 1; post = 1; #1;
    checks++; if (valid) begin failures++; $display("FAIL valid on simultaneous spikes"); end
    @(negedge clk); pre = 0; post = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
