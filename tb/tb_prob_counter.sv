// tb_prob_counter: random increments are counted here and compared; clear and
// saturation at 2^15 - 1 are checked (the latter with a 4-bit instance).
module tb_prob_counter;
  logic clk = 0, rst_n = 0, clear = 0, inc = 0;
  logic [14:0] count;
  logic [3:0]  cnt4;
  int checks = 0, failures = 0;

  prob_counter #(.W(15)) dut (.clk, .rst_n, .clear, .inc, .count);
  prob_counter #(.W(4))  dut4 (.clk, .rst_n, .clear, .inc, .count(cnt4));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_cnt = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      inc = ($urandom % 3) == 0;
      if (t % 1000 == 999) begin clear = 1; inc = 0; end else clear = 0;
      @(posedge clk); #1;
      if (clear) ref_cnt = 0; else if (inc) ref_cnt++;
      checks++;
      if (int'(count) != ref_cnt) begin failures++; $display("FAIL count %0d expected %0d", count, ref_cnt); end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; inc = 1;
    repeat (40) @(negedge clk);
    checks++; if (cnt4 != 4'hf) begin failures++; $display("FAIL no saturation"); end
    checks++; if (count != 15'd40) begin failures++; $display("FAIL count %0d", count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
