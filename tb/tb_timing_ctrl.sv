// tb_timing_ctrl: counts the trial strobes (768 at the default), checks their
// spacing, that busy covers them and that done pulses once right after the last
// trial period, and that the run takes N_TRIALS * PERIOD cycles.
module tb_timing_ctrl;
  localparam int N = 768, P = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic trial, busy, done;
  int checks = 0, failures = 0;

  timing_ctrl #(.N_TRIALS(N), .PERIOD(P)) dut (.clk, .rst_n, .start, .trial, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_trials, cycles, last, n_done;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      n_trials = 0; cycles = 0; last = -P; n_done = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done && cycles < 10000) begin
        if (trial) begin
          checks++;
          if (cycles - last != P) begin failures++; $display("FAIL spacing %0d", cycles - last); end
          last = cycles; n_trials++;
        end
        checks++; if (!busy) begin failures++; $display("FAIL not busy while running"); end
        cycles++;
        @(negedge clk);
      end
      checks++; if (n_trials != N) begin failures++; $display("FAIL trials %0d", n_trials); end
      checks++; if (cycles != N * P) begin failures++; $display("FAIL cycles %0d expected %0d", cycles, N * P); end
      @(negedge clk);
      checks++; if (done || busy) begin failures++; $display("FAIL done/busy after end"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
