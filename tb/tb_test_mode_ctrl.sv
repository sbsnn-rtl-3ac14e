// tb_test_mode_ctrl: shifts random 15-bit words in MSB first and checks that the
// configuration takes the word only when shifting stops and holds it meanwhile.
module tb_test_mode_ctrl;
  logic clk = 0, rst_n = 0, shift = 0, sdata = 0;
  logic [14:0] cfg;
  int checks = 0, failures = 0;

  test_mode_ctrl #(.W(15)) dut (.clk, .rst_n, .shift, .sdata, .cfg);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [14:0] word, prev;
    repeat (2) @(posedge clk); rst_n = 1;
    prev = '0;
    for (int t = 0; t < 50; t++) begin
      word = 15'($urandom);
      for (int b = 14; b >= 0; b--) begin
        @(negedge clk); shift = 1; sdata = word[b];
        checks++; if (cfg !== prev) begin failures++; $display("FAIL cfg changed during shift"); end
      end
      @(negedge clk); shift = 0;
      @(negedge clk); @(negedge clk);
      checks++; if (cfg !== word) begin failures++; $display("FAIL cfg %h expected %h", cfg, word); end
      prev = word;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
