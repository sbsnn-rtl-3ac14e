// sbsnn_core: the two-layer fully connected stochastic binary spiking network
// with on-chip sSTDP learning (paper Fig. 8 and Fig. 9).
//
// Structure, from the paper: N_IN input sNeurons (one per pixel) each with a POT
// counter; an N_IN x N_OUT array of stochastic binary synapses; N_OUT output
// sNeurons each with a pulse counter, modulator, stochastic bit and DEP counter;
// lateral inhibition between the output neurons. Added by this design to run it:
// a controller that presents one pattern for t_present steps and gates the class
// clusters, and a readout that counts spikes per class group.
//
// Per time step (one clock): input neurons spike with a probability set by their
// pixel; each column counts PRE AND weight; each output neuron spikes with a
// probability set by that count (one step later); the first POST after a PRE
// potentiates a synapse with a probability set by the time since that PRE, the
// first PRE after a POST depresses it with a probability set by the time since
// that POST. Only a pair inside the 10-step window can update a synapse.
//
// Interface: load `pixels`, set the run-time settings, pulse `start` with `train`
// and `label`; `done` pulses when the pattern is finished and `predicted` /
// `class_count` are valid. Settings must be stable while `busy`.
module sbsnn_core
  import sbsnn_pkg::*;
#(
  parameter int N_IN   = 784,
  parameter int N_OUT  = 400,
  parameter int T_W    = 8,
  parameter int HOLD_W = 8,
  parameter int CNT_W  = 16,
  parameter int SUM_W  = $clog2(N_IN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // pattern and command
  input  logic [PIX_W-1:0] pixels [N_IN],
  input  logic             start,
  input  logic             train,
  input  logic [3:0]       label,
  // run-time settings
  input  logic [T_W-1:0]   t_present,
  input  logic [HOLD_W-1:0] inhib_steps,
  input  ns_t              in_ns,
  input  ns_t              out_ns,
  input  ns_t              pot_ns,
  input  ns_t              dep_ns,
  input  logic [2:0]       gain_shift,
  input  code_t            bias,
  // status and results
  output logic             busy,
  output logic             done,
  output logic [N_IN-1:0]  pre,
  output logic [N_OUT-1:0] post,
  output logic             inhibit_active,
  output logic [N_IN-1:0]  weights [N_OUT],
  output logic [CNT_W-1:0] class_count [N_CLASS],
  output logic [3:0]       predicted
);

  logic             clear, in_en, train_en, ctrl_done, valid_unused;
  logic [N_OUT-1:0] class_en, mask;
  tcnt_t [N_IN-1:0] pot_cnt;
  logic             step;

  // Every clock cycle is a network time step.
  assign step = 1'b1;

  sbsnn_ctrl #(.N_OUT(N_OUT), .T_W(T_W)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .train    (train),
    .label    (label),
    .t_present(t_present),
    .busy     (busy),
    .clear    (clear),
    .in_en    (in_en),
    .run      (),
    .train_en (train_en),
    .class_en (class_en),
    .done     (ctrl_done)
  );

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    input_neuron u_in (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (in_en),
      .pixel(pixels[i]),
      .ns   (in_ns),
      .spike(pre[i])
    );

    stdp_counter u_pot (
      .clk  (clk),
      .rst_n(rst_n),
      .clear(clear),
      .step (step),
      .spike(pre[i]),
      .count(pot_cnt[i])
    );
  end

  // Learning keeps going one cycle past `run` so that the last spikes' wordline
  // pulses land; the synapse stochastic bits are only enabled while training.
  logic train_hold;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) train_hold <= 1'b0;
    else        train_hold <= train_en;
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_col
    sbsnn_column #(.N_IN(N_IN), .SUM_W(SUM_W)) u_col (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (clear),
      .step      (step),
      .train_en  (train_en | train_hold),
      .neuron_en (class_en[j]),
      .mask      (mask[j]),
      .pre       (pre),
      .pot_cnt   (pot_cnt),
      .gain_shift(gain_shift),
      .bias      (bias),
      .neuron_ns (out_ns),
      .pot_ns    (pot_ns),
      .dep_ns    (dep_ns),
      .post      (post[j]),
      .sum       (),
      .weights   (weights[j])
    );
  end

  lateral_inhibition #(.N_OUT(N_OUT), .HOLD_W(HOLD_W)) u_inhib (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (clear),
    .post      (post),
    .hold_steps(inhib_steps),
    .mask      (mask),
    .active    (inhibit_active)
  );

  // The last POST spikes of a pattern appear one cycle after the controller
  // finishes; the result is latched one cycle later to include them, and `done`
  // rises with the latched result.
  logic latch;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      latch <= 1'b0;
      done  <= 1'b0;
    end else begin
      latch <= ctrl_done;
      done  <= latch;
    end
  end

  class_readout #(.N_OUT(N_OUT), .CNT_W(CNT_W)) u_readout (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (clear),
    .post       (post),
    .latch      (latch),
    .class_count(class_count),
    .predicted  (predicted),
    .valid      (valid_unused)
  );

endmodule
