// tb_sbit: checks the stochastic-bit model.
// For several codes it runs 4000 evaluations and compares the OA rate with the
// expected probability worked out here from the paper's end points (90.1 % and
// 11.6 %) and the model's sigmoid; it also checks that exactly one of OA/OB pulses
// per evaluation, that nothing pulses with EN low, that the rate falls with the
// code and that the NS code scales it.
module tb_sbit;
  import sbsnn_pkg::*;

  logic  clk = 0, rst_n = 0, en = 0;
  code_t lc, rc;
  ns_t   ns;
  logic  oa, ob;
  int    checks = 0, failures = 0;

  sbit dut (.clk, .rst_n, .en, .lc, .rc, .ns, .oa, .ob);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real expect_p(int l, int n);
    real d;
    d = (2.0 * l - 63.0) / 16.0;
    return (0.116 + 0.785 / (1.0 + $exp(d))) * (n + 1) / 8.0;
  endfunction

  task automatic measure(input int l, input int n, output real rate);
    int hits = 0, excl_bad = 0;
    lc = code_t'(l); rc = ~code_t'(l); ns = ns_t'(n);
    en = 1;
    @(posedge clk);
    for (int k = 0; k < 4000; k++) begin
      @(posedge clk);
      #1;
      hits += oa;
      if (oa == ob) excl_bad++;
    end
    en = 0;
    @(posedge clk); @(posedge clk);
    checks++;
    if (excl_bad != 0) begin failures++; $display("FAIL oa/ob not exclusive at code %0d", l); end
    rate = real'(hits) / 4000.0;
  endtask

  real r, e, prev;
  initial begin
    lc = '0; rc = '1; ns = 3'd7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    prev = 1.0;
    for (int l = 0; l < 64; l += 9) begin
      measure(l, 7, r);
      e = expect_p(l, 7);
      checks++;
      if (r < e - 0.035 || r > e + 0.035) begin
        failures++; $display("FAIL code %0d rate %f expected %f", l, r, e);
      end
      checks++;
      if (r > prev + 0.03) begin failures++; $display("FAIL rate rose at code %0d", l); end
      prev = r;
    end
    // the paper's end points
    measure(0, 7, r);
    checks++; if (r < 0.86) begin failures++; $display("FAIL code 0 rate %f", r); end
    measure(63, 7, r);
    checks++; if (r > 0.15 || r < 0.08) begin failures++; $display("FAIL code 63 rate %f", r); end
    // NS scaling
    measure(0, 1, r);
    e = expect_p(0, 1);
    checks++; if (r < e - 0.03 || r > e + 0.03) begin failures++; $display("FAIL ns=1 rate %f expected %f", r, e); end
    // no pulse while EN is low
    en = 0;
    for (int k = 0; k < 200; k++) begin
      @(posedge clk); #1;
      checks++;
      if (oa || ob) begin failures++; $display("FAIL pulse with EN low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
