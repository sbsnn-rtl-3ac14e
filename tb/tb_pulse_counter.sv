// tb_pulse_counter: checks the ones counter at the paper's 784 inputs against a
// count made here bit by bit, for all-zero, all-one, single-bit and random inputs.
module tb_pulse_counter;
  localparam int N = 784;
  localparam int W = 10;
  logic [N-1:0] pulses;
  logic [W-1:0] count;
  int checks = 0, failures = 0;

  pulse_counter #(.N(N), .W(W)) dut (.pulses, .count);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_once();
    int ref_cnt = 0;
    for (int i = 0; i < N; i++) if (pulses[i]) ref_cnt++;
    #1;
    checks++;
    if (int'(count) != ref_cnt) begin
      failures++; $display("FAIL count %0d expected %0d", count, ref_cnt);
    end
  endtask

  initial begin
    pulses = '0;       check_once();
    pulses = '1;       check_once();
    for (int b = 0; b < N; b += 97) begin pulses = '0; pulses[b] = 1'b1; check_once(); end
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) pulses[i] = ($urandom % 100) < (t % 100);
      check_once();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
