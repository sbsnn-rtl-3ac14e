// sbsnn_top: chip top.
//
// Holds the stochastic binary spiking network (sbsnn_core, 784 inputs x 400
// outputs by default, the paper's network) and the two characterisation
// structures the paper measured on silicon: one for a bare stochastic bit
// (sneuron_testchip) and one for a stochastic binary synapse
// (synapse_testchip). The three share the clock and reset and have separate
// control and result ports; the FPGA that drives them in the paper is off chip.
module sbsnn_top
  import sbsnn_pkg::*;
#(
  parameter int N_IN   = 784,
  parameter int N_OUT  = 400,
  parameter int T_W    = 8,
  parameter int HOLD_W = 8,
  parameter int CNT_W  = 16,
  parameter int N_EVAL = 768
) (
  input  logic             clk,
  input  logic             rst_n,
  // network
  input  logic [PIX_W-1:0] pixels [N_IN],
  input  logic             start,
  input  logic             train,
  input  logic [3:0]       label,
  input  logic [T_W-1:0]   t_present,
  input  logic [HOLD_W-1:0] inhib_steps,
  input  ns_t              in_ns,
  input  ns_t              out_ns,
  input  ns_t              pot_ns,
  input  ns_t              dep_ns,
  input  logic [2:0]       gain_shift,
  input  code_t            bias,
  output logic             busy,
  output logic             done,
  output logic [N_IN-1:0]  pre,
  output logic [N_OUT-1:0] post,
  output logic             inhibit_active,
  output logic [N_IN-1:0]  weights [N_OUT],
  output logic [CNT_W-1:0] class_count [N_CLASS],
  output logic [3:0]       predicted,
  // stochastic-bit characterisation
  input  logic             sb_gpo_shift,
  input  logic             sb_gpo_data,
  input  logic             sb_start,
  output logic             sb_busy,
  output logic             sb_done,
  output logic             sb_oa,
  output logic             sb_ob,
  output logic [14:0]      sb_count,
  // synapse characterisation
  input  logic             sy_gpo_shift,
  input  logic             sy_gpo_data,
  input  logic             sy_start,
  output logic             sy_busy,
  output logic             sy_done,
  output logic             sy_d,
  output logic [14:0]      sy_flips
);

  sbsnn_core #(
    .N_IN(N_IN), .N_OUT(N_OUT), .T_W(T_W), .HOLD_W(HOLD_W), .CNT_W(CNT_W)
  ) u_core (
    .clk           (clk),
    .rst_n         (rst_n),
    .pixels        (pixels),
    .start         (start),
    .train         (train),
    .label         (label),
    .t_present     (t_present),
    .inhib_steps   (inhib_steps),
    .in_ns         (in_ns),
    .out_ns        (out_ns),
    .pot_ns        (pot_ns),
    .dep_ns        (dep_ns),
    .gain_shift    (gain_shift),
    .bias          (bias),
    .busy          (busy),
    .done          (done),
    .pre           (pre),
    .post          (post),
    .inhibit_active(inhibit_active),
    .weights       (weights),
    .class_count   (class_count),
    .predicted     (predicted)
  );

  sneuron_testchip #(.N_EVAL(N_EVAL)) u_sb_test (
    .clk      (clk),
    .rst_n    (rst_n),
    .gpo_shift(sb_gpo_shift),
    .gpo_data (sb_gpo_data),
    .start    (sb_start),
    .busy     (sb_busy),
    .done     (sb_done),
    .oa       (sb_oa),
    .ob       (sb_ob),
    .count    (sb_count)
  );

  synapse_testchip #(.N_TRIALS(N_EVAL)) u_sy_test (
    .clk      (clk),
    .rst_n    (rst_n),
    .gpo_shift(sy_gpo_shift),
    .gpo_data (sy_gpo_data),
    .start    (sy_start),
    .busy     (sy_busy),
    .done     (sy_done),
    .d        (sy_d),
    .flips    (sy_flips)
  );

endmodule
