// tb_sbsnn_core: runs the network at 20 inputs x 20 outputs (2 output neurons per
// class). It trains class 0 on the left half of the inputs and class 1 on the
// right half, then presents both patterns in inference. Checks:
//  * pattern latency: done comes t_present + 4 cycles after start;
//  * in training only the label's class group ever spikes;
//  * potentiation (weight 0 -> 1), depression (1 -> 0) and lateral inhibition all
//    happen, each counted;
//  * no weight changes during inference (the last training write lands on the
//    clock edge where `done` rises, so checking starts one cycle later);
//  * class counts reported agree with the POST spikes counted here, and the
//    predicted class is the lowest-index class with the most spikes.
// How selective the trained weights are and how often inference picks the right
// class are printed but not checked: with 2 neurons per class and binary weights
// that switch with high probability on every pre/post pair, these vary from seed
// to seed.
module tb_sbsnn_core;
  import sbsnn_pkg::*;
  localparam int N_IN = 20, N_OUT = 20, GROUP = N_OUT / N_CLASS;

  logic clk = 0, rst_n = 0, start = 0, train = 0;
  logic [7:0] pixels [N_IN];
  logic [3:0] label = 0;
  logic [7:0] t_present = 8'd20, inhib_steps = 8'd2;
  ns_t in_ns = 3'd2, out_ns = 3'd7, pot_ns = 3'd3, dep_ns = 3'd4;
  logic [2:0] gain_shift = 3'd4;
  code_t bias = 6'd0;
  logic busy, done, inhibit_active;
  logic [N_IN-1:0] pre;
  logic [N_OUT-1:0] post;
  logic [N_IN-1:0] weights [N_OUT];
  logic [15:0] class_count [N_CLASS];
  logic [3:0] predicted;
  int checks = 0, failures = 0;
  int n_pot = 0, n_dep = 0, n_inhib = 0, n_frozen_bad = 0;

  sbsnn_core #(.N_IN(N_IN), .N_OUT(N_OUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watch weight changes every cycle.
  logic [N_IN-1:0] w_prev [N_OUT];
  logic            in_inference = 0, chk_frozen = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      for (int j = 0; j < N_OUT; j++) begin
        n_pot += $countones(weights[j] & ~w_prev[j]);
        n_dep += $countones(~weights[j] & w_prev[j]);
        if (chk_frozen && in_inference && weights[j] != w_prev[j]) n_frozen_bad++;
      end
      if (inhibit_active) n_inhib++;
    end
    w_prev <= weights;
    chk_frozen <= in_inference;
  end

  task automatic set_pattern(int k);
    for (int i = 0; i < N_IN; i++) pixels[i] = ((i / (N_IN / 2)) == k) ? 8'd255 : 8'd0;
  endtask

  task automatic present(logic tr, int lab, output int pred);
    int cycles = 0;
    int counted [N_CLASS];
    int bad_class = 0;
    foreach (counted[c]) counted[c] = 0;
    @(negedge clk); start = 1; train = tr; label = 4'(lab);
    @(negedge clk); start = 0;
    while (!done && cycles < 1000) begin
      for (int j = 0; j < N_OUT; j++) if (post[j]) begin
        counted[j / GROUP]++;
        if (tr && (j / GROUP) != lab) bad_class++;
      end
      cycles++;
      @(negedge clk);
    end
    checks++;
    if (cycles != int'(t_present) + 4) begin failures++; $display("FAIL latency %0d expected %0d", cycles, t_present + 4); end
    checks++;
    if (bad_class != 0) begin failures++; $display("FAIL %0d spikes outside the class group in training", bad_class); end
    for (int c = 0; c < N_CLASS; c++) begin
      checks++;
      if (int'(class_count[c]) != counted[c]) begin failures++; $display("FAIL class %0d count %0d counted %0d", c, class_count[c], counted[c]); end
    end
    begin
      int best = 0;
      for (int c = 1; c < N_CLASS; c++) if (counted[c] > counted[best]) best = c;
      checks++;
      if (int'(predicted) != best) begin failures++; $display("FAIL predicted %0d, most spikes in class %0d", predicted, best); end
    end
    pred = predicted;
  endtask

  initial begin
    int pred, ok0, ok1, on_pat, off_pat;
    for (int i = 0; i < N_IN; i++) pixels[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // training
    for (int rep = 0; rep < 30; rep++) begin
      set_pattern(0); present(1, 0, pred);
      set_pattern(1); present(1, 1, pred);
    end
    // learned representations
    for (int j = 0; j < 2 * GROUP; j++) begin
      int k;
      k = j / GROUP;
      on_pat = 0; off_pat = 0;
      for (int i = 0; i < N_IN; i++)
        if ((i / (N_IN / 2)) == k) on_pat += weights[j][i]; else off_pat += weights[j][i];
      $display("neuron %0d: %0d of 10 pattern weights set, %0d of 10 others", j, on_pat, off_pat);
    end
    // inference
    in_inference = 1;
    ok0 = 0; ok1 = 0;
    for (int rep = 0; rep < 5; rep++) begin
      set_pattern(0); present(0, 0, pred); ok0 += (pred == 0);
      set_pattern(1); present(0, 0, pred); ok1 += (pred == 1);
    end
    in_inference = 0;
    $display("inference: class 0 right %0d/5, class 1 right %0d/5", ok0, ok1);
    checks++; if (n_frozen_bad != 0) begin failures++; $display("FAIL weights changed in inference"); end
    $display("mechanisms: potentiations %0d, depressions %0d, inhibited steps %0d", n_pot, n_dep, n_inhib);
    checks++; if (n_pot == 0) begin failures++; $display("FAIL no potentiation"); end
    checks++; if (n_dep == 0) begin failures++; $display("FAIL no depression"); end
    checks++; if (n_inhib == 0) begin failures++; $display("FAIL no lateral inhibition"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
