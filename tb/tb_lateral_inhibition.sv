// tb_lateral_inhibition: a spike of one neuron must mask all the others for the
// hold time and never the winner; simultaneous winners are both spared; a hold of
// 0 disables inhibition; clear drops the mask.
module tb_lateral_inhibition;
  localparam int N = 40;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [N-1:0] post, mask;
  logic [7:0] hold_steps;
  logic active;
  int checks = 0, failures = 0;

  lateral_inhibition #(.N_OUT(N), .HOLD_W(8)) dut (.clk, .rst_n, .clear, .post, .hold_steps, .mask, .active);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_mask(logic [N-1:0] e, string what);
    checks++;
    if (mask !== e) begin failures++; $display("FAIL %s: mask %h expected %h", what, mask, e); end
  endtask

  initial begin
    post = '0; hold_steps = 8'd5;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); expect_mask('0, "idle");
    for (int w = 0; w < N; w += 13) begin
      logic [N-1:0] win;
      win = '0; win[w] = 1'b1;
      post = win; @(negedge clk); post = '0;
      for (int k = 0; k < 5; k++) begin
        expect_mask(~win, "held");
        checks++; if (!active) begin failures++; $display("FAIL not active"); end
        @(negedge clk);
      end
      expect_mask('0, "released");
    end
    // two winners together
    post = '0; post[3] = 1; post[30] = 1;
    @(negedge clk); post = '0;
    expect_mask(~((40'd1 << 3) | (40'd1 << 30)), "two winners");
    clear = 1; @(negedge clk); clear = 0;
    expect_mask('0, "cleared");
    hold_steps = 0;
    post = 40'd1; @(negedge clk); post = '0;
    expect_mask('0, "disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
