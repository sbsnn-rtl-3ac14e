// tb_pulse_gen: for every TIME_IN in -10..10 the PRE and POST pulses must appear
// once each with t_post - t_pre = TIME_IN, the first one cycle after fire.
module tb_pulse_gen;
  logic clk = 0, rst_n = 0, fire = 0;
  logic signed [4:0] time_in = 0;
  logic pre, post, busy;
  int checks = 0, failures = 0;

  pulse_gen #(.T_W(5)) dut (.clk, .rst_n, .fire, .time_in, .pre, .post, .busy);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_pre, t_post, n_pre, n_post;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int dt = -10; dt <= 10; dt++) begin
      time_in = 5'(dt);
      n_pre = 0; n_post = 0; t_pre = -1; t_post = -1;
      @(negedge clk); fire = 1; @(negedge clk); fire = 0;
      for (int c = 1; c < 16; c++) begin
        if (pre)  begin n_pre++;  t_pre = c; end
        if (post) begin n_post++; t_post = c; end
        @(negedge clk);
      end
      checks++; if (n_pre != 1 || n_post != 1) begin failures++; $display("FAIL dt %0d pulses %0d %0d", dt, n_pre, n_post); end
      checks++; if (t_post - t_pre != dt) begin failures++; $display("FAIL dt %0d measured %0d", dt, t_post - t_pre); end
      checks++; if ((t_pre < t_post ? t_pre : t_post) != 1) begin failures++; $display("FAIL first pulse late"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
