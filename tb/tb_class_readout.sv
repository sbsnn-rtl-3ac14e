// tb_class_readout: random POST spikes are counted per class group here and the
// module's counts and argmax must agree; clear restarts the counts.
module tb_class_readout;
  import sbsnn_pkg::*;
  localparam int N_OUT = 40;
  logic clk = 0, rst_n = 0, clear = 0, latch = 0;
  logic [N_OUT-1:0] post = '0;
  logic [15:0] class_count [N_CLASS];
  logic [3:0] predicted;
  logic valid;
  int checks = 0, failures = 0;

  class_readout #(.N_OUT(N_OUT), .CNT_W(16)) dut (.clk, .rst_n, .clear, .post, .latch,
    .class_count, .predicted, .valid);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_cnt [N_CLASS];
    int best;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      foreach (ref_cnt[c]) ref_cnt[c] = 0;
      for (int t = 0; t < 50; t++) begin
        for (int j = 0; j < N_OUT; j++) begin
          // favour class (trial % 10)
          post[j] = ($urandom % 100) < (((j / 4) == trial % 10) ? 40 : 10);
          if (post[j]) ref_cnt[j / 4]++;
        end
        @(negedge clk);
      end
      post = '0;
      latch = 1; @(negedge clk); latch = 0;
      best = 0;
      for (int c = 1; c < N_CLASS; c++) if (ref_cnt[c] > ref_cnt[best]) best = c;
      for (int c = 0; c < N_CLASS; c++) begin
        checks++;
        if (int'(class_count[c]) != ref_cnt[c]) begin failures++; $display("FAIL class %0d count %0d expected %0d", c, class_count[c], ref_cnt[c]); end
      end
      checks++;
      if (!valid || int'(predicted) != best) begin failures++; $display("FAIL predicted %0d expected %0d", predicted, best); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
