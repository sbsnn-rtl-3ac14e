// stoch_synapse: stochastic binary synapses (paper Fig. 7(b) and Fig. 9).
//
// One instance holds N synapses that share a POST line and its DEP counter, i.e.
// N rows of one column; N = 1 is a single synapse. Each synapse has the parts of
// the paper's figure:
//  * SR latch: POST sets it (potentiation), PRE resets it (depression). Its output
//    selects through a 2:1 mux which timing count drives the stochastic bit:
//    1 -> t_post - t_pre from the POT counter of the synapse's input neuron,
//    0 -> t_pre - t_post from the DEP counter of the column's output neuron.
//  * stochastic bit: the selected count, turned into a PMOS code (tdc_to_code),
//    sets its OA probability; an OA pulse drives the SRAM wordline. The latch
//    also picks the NMOS code: pot_ns for potentiation, dep_ns for depression, so
//    the peak probabilities of the two windows (gamma_pot, gamma_dep of the sSTDP
//    rule) can differ, as in the paper's measured curves. The paper does not say
//    how the two NMOS codes are applied; this mux is this design's.
//  * 1-bit SRAM: written with the latch value (bitlines H/L for potentiation,
//    L/H for depression) when the wordline pulses.
//  * AND gate: weight AND PRE, one input of the output neuron's pulse counter.
//
// Choices of this design where the paper is silent: the stochastic bit is
// evaluated only when the latch changes state, i.e. on the first POST after a PRE
// (potentiation) or the first PRE after a POST (depression), and only if the
// selected count is non-zero (inside the window). Later spikes of the same side
// form no new pair; without this rule a fast-firing input would be depressed once
// per PRE spike and lose its weight. In a step where PRE and POST spike together
// the latch is set (POST wins) and the POT count, which still holds the time since
// the previous PRE, is used. The latch resets to DEP. The
// weight resets to 0. With train_en low the stochastic bit is never enabled
// ("we disable the clock signal of the stochastic bit in the synapses") and the
// weight is used deterministically.
//
// Timing: spike in step t -> stochastic bit evaluates at the end of step t ->
// wordline pulse in the next cycle -> weight updated at the end of that cycle.
module stoch_synapse
  import sbsnn_pkg::*;
#(
  parameter int N = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              train_en,  // clock of the synapses' stochastic bits
  input  logic              step,      // a network time step ends this cycle
  input  logic  [N-1:0]     pre,       // PRE spikes (input neurons)
  input  logic              post,      // POST spike (output neuron)
  input  tcnt_t [N-1:0]     pot_cnt,   // t_post - t_pre counts from the POT counters
  input  tcnt_t             dep_cnt,   // t_pre - t_post count from the DEP counter
  input  ns_t               pot_ns,    // NMOS code used for potentiation
  input  ns_t               dep_ns,    // NMOS code used for depression
  output logic  [N-1:0]     weight,    // stored binary weights (SRAM D)
  output logic  [N-1:0]     and_out    // weight AND PRE
);

  logic  [N-1:0] q;          // SR latches: 1 = POT, 0 = DEP
  logic  [N-1:0] q_next;
  logic  [N-1:0] event_now;
  logic  [N-1:0] sb_en;
  code_t [N-1:0] lc, rc;
  ns_t   [N-1:0] ns;
  logic  [N-1:0] wl;         // SRAM wordlines
  logic  [N-1:0] ob_unused;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      tcnt_t       sel_cnt;
      sbit_drive_t drv;
      q_next[i]    = (step && (pre[i] | post)) ? post : q[i];
      event_now[i] = (q_next[i] != q[i]);   // the latch flips: a new pre/post pair
      sel_cnt      = q_next[i] ? pot_cnt[i] : dep_cnt;   // mux: 1 = POT, 0 = DEP
      drv          = make_drive(tdc_to_code(sel_cnt), q_next[i] ? pot_ns : dep_ns);
      lc[i]        = drv.lc;
      rc[i]        = drv.rc;
      ns[i]        = drv.ns;
      sb_en[i]     = train_en && event_now[i] && sel_cnt != '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= q_next;
  end

  sbit #(.N(N)) u_sbit (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (sb_en),
    .lc   (lc),
    .rc   (rc),
    .ns   (ns),
    .oa   (wl),
    .ob   (ob_unused)
  );

  // 1-bit SRAM cells: BL = q, BL' = ~q while the wordline is open.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) weight <= '0;
    else        weight <= (wl & q) | (~wl & weight);
  end

  assign and_out = weight & pre;

endmodule
