// tb_sbsnn_top: end-to-end test of the chip top level at a reduced size of 20
// inputs x 20 output neurons (2 per class). The stochastic-bit and synapse
// characterisation structures are exercised through their serial ports in
// parallel with the network.
// The network is trained on two input patterns (label 0: first quarter of the
// inputs bright, label 1: second quarter) and then runs them in inference. Each
// mechanism below is counted, and any count that stays zero is a failure:
//  * input encoding: bright inputs spike more often than dark ones;
//  * output spikes in training, all inside the label's class group (gating);
//  * potentiation (weight 0 -> 1) and depression (1 -> 0) in training;
//  * lateral inhibition active;
//  * mode switch: in inference, spikes outside the trained group and no weight
//    change at all;
//  * readout: class counts equal the POST spikes seen here and `predicted` is the
//    class with the most spikes (lowest index on ties);
//  * presentation latency t_present + 4 cycles;
//  * stochastic-bit test: the counter equals the OA ones seen and the rate is
//    near the expected curve value;
//  * synapse test: the flip count is near the expected switching probability.
module tb_sbsnn_top;
  import sbsnn_pkg::*;
  localparam int N_IN = 20, N_OUT = 20, GROUP = N_OUT / N_CLASS;

  logic clk = 0, rst_n = 0, start = 0, train = 0;
  logic [7:0] pixels [N_IN];
  logic [3:0] label = 0;
  logic [7:0] t_present = 8'd30, inhib_steps = 8'd2;
  ns_t in_ns = 3'd2, out_ns = 3'd7, pot_ns = 3'd3, dep_ns = 3'd4;
  logic [2:0] gain_shift = 3'd4;
  code_t bias = 6'd0;
  logic busy, done, inhibit_active;
  logic [N_IN-1:0] pre;
  logic [N_OUT-1:0] post;
  logic [N_IN-1:0] weights [N_OUT];
  logic [15:0] class_count [N_CLASS];
  logic [3:0] predicted;
  logic sb_gpo_shift = 0, sb_gpo_data = 0, sb_start = 0, sb_busy, sb_done, sb_oa, sb_ob;
  logic [14:0] sb_count;
  logic sy_gpo_shift = 0, sy_gpo_data = 0, sy_start = 0, sy_busy, sy_done, sy_d;
  logic [14:0] sy_flips;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_pre_bright = 0, n_pre_dark = 0, n_post_train = 0, n_gated_bad = 0;
  int n_pot = 0, n_dep = 0, n_inhib = 0, n_post_infer_other = 0, n_frozen_bad = 0;
  int n_readout = 0, n_latency = 0, n_sbit_test = 0, n_syn_test = 0;
  logic in_inference = 0, chk_frozen = 0, training = 0;
  int   cur_label = 0;

  sbsnn_top #(.N_IN(N_IN), .N_OUT(N_OUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic bright(int i, int k);
    return ((i * 4) / N_IN) == (k % 4);
  endfunction

  function automatic real p_curve(int code, int n);
    real d;
    d = (2.0 * code - 63.0) / 16.0;
    return (0.116 + 0.785 / (1.0 + $exp(d))) * (n + 1) / 8.0;
  endfunction

  // Per-cycle monitor of weights, spikes and inhibition.
  logic [N_IN-1:0] w_prev [N_OUT];
  always @(negedge clk) begin
    if (rst_n) begin
      for (int j = 0; j < N_OUT; j++) begin
        if (training) begin
          n_pot += $countones(weights[j] & ~w_prev[j]);
          n_dep += $countones(~weights[j] & w_prev[j]);
        end
        if (chk_frozen && in_inference && weights[j] != w_prev[j]) n_frozen_bad++;
        if (post[j]) begin
          if (training) begin
            n_post_train++;
            if (j / GROUP != cur_label) n_gated_bad++;
          end
          if (in_inference && j / GROUP != cur_label) n_post_infer_other++;
        end
      end
      for (int i = 0; i < N_IN; i++) if (pre[i]) begin
        if (bright(i, cur_label)) n_pre_bright++; else n_pre_dark++;
      end
      if (inhibit_active) n_inhib++;
    end
    w_prev <= weights;
    chk_frozen <= in_inference;
  end

  task automatic present(logic tr, int lab);
    int cycles = 0, best = 0;
    int counted [N_CLASS];
    foreach (counted[c]) counted[c] = 0;
    for (int i = 0; i < N_IN; i++) pixels[i] = bright(i, lab) ? 8'd255 : 8'd0;
    cur_label = lab;
    @(negedge clk); start = 1; train = tr; label = 4'(lab); training = tr;
    @(negedge clk); start = 0;
    while (!done && cycles < 1000) begin
      for (int j = 0; j < N_OUT; j++) if (post[j]) counted[j / GROUP]++;
      cycles++;
      @(negedge clk);
    end
    training = 0;
    checks++;
    if (cycles != int'(t_present) + 4) begin failures++; $display("FAIL latency %0d", cycles); end
    else n_latency++;
    for (int c = 1; c < N_CLASS; c++) if (counted[c] > counted[best]) best = c;
    checks++;
    if (int'(predicted) != best) begin failures++; $display("FAIL predicted %0d expected %0d", predicted, best); end
    for (int c = 0; c < N_CLASS; c++) begin
      checks++;
      if (int'(class_count[c]) != counted[c]) begin failures++; $display("FAIL class %0d count %0d counted %0d", c, class_count[c], counted[c]); end
    end
    n_readout++;
  endtask

  task automatic network();
    for (int rep = 0; rep < 4; rep++) begin
      present(1, 0);
      present(1, 1);
    end
    in_inference = 1;
    for (int rep = 0; rep < 2; rep++) begin
      present(0, 0);
      present(0, 1);
    end
    in_inference = 0;
  endtask

  // Stochastic-bit test: LC = 21, RC = ~21, NS = 7, 768 evaluations.
  task automatic sbit_test();
    logic [14:0] word;
    int seen = 0, cycles = 0;
    real r, e;
    word = {6'd21, ~6'd21, 3'd7};
    for (int b = 14; b >= 0; b--) begin @(negedge clk); sb_gpo_shift = 1; sb_gpo_data = word[b]; end
    @(negedge clk); sb_gpo_shift = 0;
    @(negedge clk); sb_start = 1; @(negedge clk); sb_start = 0;
    while (!sb_done && cycles < 5000) begin seen += sb_oa; cycles++; @(negedge clk); end
    seen += sb_oa;
    @(negedge clk);
    r = real'(sb_count) / 768.0; e = p_curve(21, 7);
    checks++; if (int'(sb_count) != seen) begin failures++; $display("FAIL sbit count %0d seen %0d", sb_count, seen); end
    checks++;
    if (r < e - 0.06 || r > e + 0.06) begin failures++; $display("FAIL sbit rate %f expected %f", r, e); end
    else begin n_sbit_test++; $display("stochastic-bit test: P(OA) %f (expected %f)", r, e); end
  endtask

  // Synapse test: TIME_IN = +3 (POST 3 steps after PRE), NS = 7, 768 trials.
  task automatic synapse_test();
    logic [7:0] word;
    int cycles = 0;
    real r, e;
    word = {3'd7, 5'd3};
    for (int b = 7; b >= 0; b--) begin @(negedge clk); sy_gpo_shift = 1; sy_gpo_data = word[b]; end
    @(negedge clk); sy_gpo_shift = 0;
    @(negedge clk); sy_start = 1; @(negedge clk); sy_start = 0;
    while (!sy_done && cycles < 20000) begin cycles++; @(negedge clk); end
    @(negedge clk);
    r = real'(sy_flips) / 768.0; e = p_curve(63 - 6 * (11 - 3), 7);
    checks++;
    if (r < e - 0.06 || r > e + 0.06) begin failures++; $display("FAIL synapse flip rate %f expected %f", r, e); end
    else begin n_syn_test++; $display("synapse test: switching probability %f (expected %f)", r, e); end
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
    else $display("%s: %0d", what, n);
  endtask

  initial begin
    for (int i = 0; i < N_IN; i++) pixels[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      network();
      begin sbit_test(); synapse_test(); end
    join
    checks++; if (n_gated_bad != 0) begin failures++; $display("FAIL %0d training spikes outside the label group", n_gated_bad); end
    checks++; if (n_frozen_bad != 0) begin failures++; $display("FAIL %0d weight changes in inference", n_frozen_bad); end
    checks++;
    if (n_pre_bright <= n_pre_dark) begin failures++; $display("FAIL input spikes bright %0d dark %0d", n_pre_bright, n_pre_dark); end
    need("input spikes from bright pixels", n_pre_bright);
    need("output spikes in training", n_post_train);
    need("potentiations", n_pot);
    need("depressions", n_dep);
    need("inhibited cycles", n_inhib);
    need("inference spikes outside the trained group", n_post_infer_other);
    need("readouts", n_readout);
    need("presentations with correct latency", n_latency);
    need("stochastic-bit tests", n_sbit_test);
    need("synapse tests", n_syn_test);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
