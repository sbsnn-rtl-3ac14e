// tb_stoch_synapse: checks the stochastic binary synapse.
//  * a POST spike after a PRE, with POT count c, writes 1 with probability p(c);
//    a PRE spike after a POST, with DEP count c, writes 0 with probability p(c);
//    p is worked out here from the stochastic-bit curve, the count-to-code map
//    (code = 63 - 6c) and the NMOS code, separately for pot_ns and dep_ns;
//  * a count of 0 (outside the window), a repeated POST with no PRE between, or
//    training off never change the weight;
//  * PRE and POST in the same step after a PRE potentiate (POST wins);
//  * the weight changes exactly two cycles after the spike step;
//  * and_out = weight AND PRE.
module tb_stoch_synapse;
  import sbsnn_pkg::*;
  logic  clk = 0, rst_n = 0, train_en = 0, step = 1, pre = 0, post = 0;
  tcnt_t pot_cnt = 0, dep_cnt = 0;
  ns_t   pot_ns = 3'd7, dep_ns = 3'd7;
  logic  weight, and_out;
  int checks = 0, failures = 0;

  stoch_synapse dut (.clk, .rst_n, .train_en, .step, .pre, .post, .pot_cnt, .dep_cnt,
                     .pot_ns, .dep_ns, .weight, .and_out);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_of(int c, int n);
    real d;
    int code;
    code = 63 - 6 * c;
    d = (2.0 * code - 63.0) / 16.0;
    return (0.116 + 0.785 / (1.0 + $exp(d))) * (n + 1) / 8.0;
  endfunction

  // One spike step; returns whether the weight changed and checks the latency.
  task automatic spike(input logic p, input logic q, output logic changed);
    logic w0;
    w0 = weight;
    @(negedge clk); pre = p; post = q;
    @(negedge clk); pre = 0; post = 0;
    checks++;
    if (weight != w0) begin failures++; $display("FAIL weight changed after one cycle"); end
    @(negedge clk);
    changed = (weight != w0);
    @(negedge clk);
    checks++;
    if (weight != w0 && !changed) begin failures++; $display("FAIL late weight change"); end
  endtask

  // Puts the latch on the side opposite to `post_side` with a spike whose count
  // is 0 (no update), then gives the spike of `post_side` with count c.
  task automatic pair(input logic post_side, input int c, output logic changed);
    logic ch;
    if (post_side) begin dep_cnt = 0; spike(1, 0, ch); pot_cnt = tcnt_t'(c); spike(0, 1, changed); end
    else           begin pot_cnt = 0; spike(0, 1, ch); dep_cnt = tcnt_t'(c); spike(1, 0, changed); end
  endtask

  task automatic set_weight(input logic v);
    logic ch;
    int guard = 0;
    while (weight != v && guard < 200) begin
      pair(v, 10, ch);
      guard++;
    end
    checks++;
    if (weight != v) begin failures++; $display("FAIL could not set weight to %0d", v); end
  endtask

  // Measures the switching rate of pair(post_side, c) over n trials.
  task automatic rate(input logic post_side, input int c, input int n, input int ns_v);
    logic ch;
    int hits = 0;
    real r, e;
    for (int t = 0; t < n; t++) begin
      set_weight(!post_side);
      pair(post_side, c, ch);
      if (ch) begin
        hits++;
        checks++; if (weight !== post_side) begin failures++; $display("FAIL update wrote %0d", weight); end
      end
    end
    r = real'(hits) / real'(n); e = p_of(c, ns_v);
    checks++;
    if (r < e - 0.07 || r > e + 0.07) begin failures++; $display("FAIL %s c=%0d ns=%0d rate %f expected %f", post_side ? "pot" : "dep", c, ns_v, r, e); end
    else $display("%s c=%0d ns=%0d rate %f expected %f", post_side ? "pot" : "dep", c, ns_v, r, e);
  endtask

  initial begin
    logic ch;
    int hits;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (weight !== 1'b0) begin failures++; $display("FAIL reset weight"); end
    train_en = 1;
    // potentiation and depression probability at several counts
    for (int c = 10; c >= 4; c -= 3) rate(1, c, 600, 7);
    for (int c = 10; c >= 4; c -= 3) rate(0, c, 600, 7);
    // separate NMOS codes for potentiation and depression
    pot_ns = 3'd3; dep_ns = 3'd7;
    rate(1, 10, 600, 3);
    rate(0, 10, 600, 7);
    pot_ns = 3'd7; dep_ns = 3'd3;
    rate(0, 10, 600, 3);
    pot_ns = 3'd7; dep_ns = 3'd7;
    // outside the window: no change
    for (int t = 0; t < 50; t++) begin
      set_weight(0);
      pair(1, 0, ch);
      checks++; if (ch) begin failures++; $display("FAIL update outside window"); end
    end
    // a second POST with no PRE in between forms no new pair: no change
    for (int t = 0; t < 50; t++) begin
      set_weight(1);
      pair(0, 0, ch);               // latch to DEP, no update
      pot_cnt = 0; spike(0, 1, ch); // latch to POT, no update
      pot_cnt = 10; spike(0, 1, ch);
      checks++; if (ch) begin failures++; $display("FAIL update on repeated POST"); end
    end
    // PRE and POST together after a PRE: POST wins, the POT count is used
    hits = 0;
    for (int t = 0; t < 300; t++) begin
      set_weight(0);
      dep_cnt = 0; spike(1, 0, ch);
      pot_cnt = 10; dep_cnt = 10; spike(1, 1, ch);
      if (ch) hits++;
      checks++; if (ch && weight !== 1'b1) begin failures++; $display("FAIL simultaneous spikes depressed"); end
    end
    checks++;
    if (hits < 200) begin failures++; $display("FAIL simultaneous spikes potentiated %0d/300", hits); end
    // training off: weight frozen
    train_en = 0;
    for (int t = 0; t < 50; t++) begin
      pair(t[0], 10, ch);
      checks++; if (ch) begin failures++; $display("FAIL update with training off"); end
    end
    // AND gate
    train_en = 1; set_weight(0); set_weight(1); train_en = 0;
    for (int v = 0; v < 2; v++) begin
      @(negedge clk); pre = v[0]; #1;
      checks++; if (and_out !== (weight & pre)) begin failures++; $display("FAIL and_out"); end
    end
    pre = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
