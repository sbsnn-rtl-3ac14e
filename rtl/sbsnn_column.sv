// sbsnn_column: one output neuron with its column of synapses (one column of the
// paper's Fig. 9).
//
// N_IN stochastic synapses (one vector stoch_synapse instance) share the column's POST line and DEP counter; each
// synapse row i gets PRE_i and the count of input neuron i's POT counter. The AND
// outputs of the column feed the output neuron's pulse counter, and the output
// neuron's POST spike drives the synapses, the DEP counter and (outside this
// module) lateral inhibition.
//
// Timing: PRE pulses in step t -> POST in step t+1; learning events as in
// stoch_synapse.
module sbsnn_column
  import sbsnn_pkg::*;
#(
  parameter int N_IN  = 784,
  parameter int SUM_W = $clog2(N_IN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,       // new pattern: forget spike timing
  input  logic             step,
  input  logic             train_en,
  input  logic             neuron_en,   // time-step and class enable of the neuron
  input  logic             mask,        // lateral inhibition
  input  logic [N_IN-1:0]  pre,
  input  tcnt_t [N_IN-1:0]  pot_cnt,
  input  logic [2:0]       gain_shift,
  input  code_t            bias,
  input  ns_t              neuron_ns,
  input  ns_t              pot_ns,
  input  ns_t              dep_ns,
  output logic             post,
  output logic [SUM_W-1:0] sum,
  output logic [N_IN-1:0]  weights
);

  tcnt_t           dep_cnt;
  logic [N_IN-1:0] and_out;

  stdp_counter u_dep (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(clear),
    .step (step),
    .spike(post),
    .count(dep_cnt)
  );

  stoch_synapse #(.N(N_IN)) u_syn (
    .clk     (clk),
    .rst_n   (rst_n),
    .train_en(train_en),
    .step    (step),
    .pre     (pre),
    .post    (post),
    .pot_cnt (pot_cnt),
    .dep_cnt (dep_cnt),
    .pot_ns  (pot_ns),
    .dep_ns  (dep_ns),
    .weight  (weights),
    .and_out (and_out)
  );

  output_neuron #(.N_IN(N_IN), .SUM_W(SUM_W)) u_neuron (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (neuron_en),
    .mask      (mask),
    .and_pulses(and_out),
    .gain_shift(gain_shift),
    .bias      (bias),
    .ns        (neuron_ns),
    .sum       (sum),
    .post      (post)
  );

endmodule
