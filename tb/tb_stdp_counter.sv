// tb_stdp_counter: checks that the timing counter loads the 10-step window on a
// spike, counts down once per step to 0 and stays there, ignores cycles without
// `step`, and clears; the expected counts are worked out here.
module tb_stdp_counter;
  import sbsnn_pkg::*;
  logic  clk = 0, rst_n = 0, clear = 0, step = 0, spike = 0;
  tcnt_t count;
  int checks = 0, failures = 0;

  stdp_counter #(.WINDOW(10)) dut (.clk, .rst_n, .clear, .step, .spike, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cnt(int e, string what);
    checks++;
    if (int'(count) != e) begin failures++; $display("FAIL %s: count %0d expected %0d", what, count, e); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); expect_cnt(0, "after reset");
    step = 1; spike = 1;
    @(negedge clk); spike = 0; expect_cnt(10, "after spike");
    // dt steps after the spike the count is 11 - dt
    for (int dt = 1; dt <= 12; dt++) begin
      @(negedge clk);
      expect_cnt((10 - dt) > 0 ? 10 - dt : 0, "count down");
    end
    spike = 1; @(negedge clk); spike = 0;
    step = 0;
    repeat (3) @(negedge clk);
    expect_cnt(10, "held without step");
    step = 1; @(negedge clk); expect_cnt(9, "resumed");
    spike = 1; @(negedge clk); spike = 0; expect_cnt(10, "re-armed");
    clear = 1; @(negedge clk); clear = 0; expect_cnt(0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
