// tb_sbsnn_ctrl: checks the pattern sequence (one clear cycle, t_present input
// steps, one drain step, done), its cycle count, and the class-cluster enables in
// training (only the label's group) and inference (all neurons).
module tb_sbsnn_ctrl;
  localparam int N_OUT = 40;
  logic clk = 0, rst_n = 0, start = 0, train = 0;
  logic [3:0] label = 0;
  logic [7:0] t_present = 8'd6;
  logic busy, clear, in_en, run, train_en, done;
  logic [N_OUT-1:0] class_en;
  int checks = 0, failures = 0;

  sbsnn_ctrl #(.N_OUT(N_OUT), .T_W(8)) dut (.clk, .rst_n, .start, .train, .label, .t_present,
    .busy, .clear, .in_en, .run, .train_en, .class_en, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_pattern(logic tr, int lab, int tp);
    int n_clear = 0, n_in = 0, n_run = 0, cycles = 0;
    logic [N_OUT-1:0] exp_en;
    for (int j = 0; j < N_OUT; j++) exp_en[j] = !tr || (j / 4) == lab;
    t_present = 8'(tp);
    @(negedge clk); start = 1; train = tr; label = 4'(lab);
    @(negedge clk); start = 0;
    while (!done && cycles < 1000) begin
      n_clear += clear; n_in += in_en; n_run += run;
      if (run) begin
        checks++;
        if (class_en !== exp_en) begin failures++; $display("FAIL class_en %h expected %h", class_en, exp_en); end
        checks++;
        if (train_en !== tr) begin failures++; $display("FAIL train_en"); end
      end else begin
        checks++;
        if (class_en !== '0 || train_en) begin failures++; $display("FAIL enables outside run"); end
      end
      cycles++;
      @(negedge clk);
    end
    checks++; if (n_clear != 1) begin failures++; $display("FAIL clear cycles %0d", n_clear); end
    checks++; if (n_in != tp) begin failures++; $display("FAIL input steps %0d expected %0d", n_in, tp); end
    checks++; if (n_run != tp + 1) begin failures++; $display("FAIL run steps %0d", n_run); end
    checks++; if (cycles != tp + 2) begin failures++; $display("FAIL latency %0d expected %0d", cycles, tp + 2); end
    @(negedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    one_pattern(1, 3, 6);
    one_pattern(1, 9, 10);
    one_pattern(0, 0, 20);
    one_pattern(1, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
