// output_neuron: output (post-synaptic) sNeuron.
//
// As in the paper's Fig. 7(a): a pulse counter adds up the AND-gate pulses of the
// neuron's synapse column, a modulator turns the sum into a PMOS code, and a
// stochastic bit fires with the matching probability. The neuron keeps no state
// (no membrane potential): each step depends only on that step's inputs. The EN of
// the stochastic bit is gated by `en` (time-step / class enable) and by `mask`
// (lateral inhibition from the other output neurons).
//
// Timing: the AND pulses of step t give a POST pulse (if any) in step t+1.
module output_neuron
  import sbsnn_pkg::*;
#(
  parameter int N_IN  = 784,
  parameter int SUM_W = $clog2(N_IN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,          // time-step and class-cluster enable
  input  logic             mask,        // lateral inhibition: suppress EN
  input  logic [N_IN-1:0]  and_pulses,  // AND outputs of the synapse column
  input  logic [2:0]       gain_shift,  // modulator setting
  input  code_t            bias,        // modulator setting
  input  ns_t              ns,          // NMOS code of the output layer
  output logic [SUM_W-1:0] sum,         // weighted input sum of this step
  output logic             post         // POST spike
);

  code_t       code;
  sbit_drive_t drv;
  logic        ob_unused;

  pulse_counter #(.N(N_IN), .W(SUM_W)) u_cnt (
    .pulses(and_pulses),
    .count (sum)
  );

  modulator #(.SUM_W(SUM_W)) u_mod (
    .sum       (sum),
    .gain_shift(gain_shift),
    .bias      (bias),
    .code      (code)
  );

  assign drv = make_drive(code, ns);

  sbit u_sbit (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (en & ~mask),
    .lc   (drv.lc),
    .rc   (drv.rc),
    .ns   (drv.ns),
    .oa   (post),
    .ob   (ob_unused)
  );

endmodule
