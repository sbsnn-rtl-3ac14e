// stdp_counter: the POT or DEP timing counter of the sSTDP rule.
//
// The paper measures spike timing with one counter per input neuron (POT) and one
// per output neuron (DEP): each is reset by its neuron's spike and then decremented
// by one every time step, and the count is sampled by the opposite neuron's spike.
// The count left is therefore WINDOW + 1 - (t_sample - t_spike) for timing
// differences of 1..WINDOW steps and 0 beyond, so it grows with the strength the
// sSTDP rule asks for and reaches 0 at the edge of the 10-step window. Loading
// WINDOW on reset and stopping at 0 are this design's reading of "reset at every
// pre-spike (post-spike) and decremented by unity at successive time-steps".
// `step` lets the count advance only in network time steps.
module stdp_counter
  import sbsnn_pkg::*;
#(
  parameter int WINDOW = STDP_WINDOW
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,   // forget all past spikes
  input  logic  step,    // a network time step ends this cycle
  input  logic  spike,   // the owning neuron spikes (sampled on `step`)
  output tcnt_t count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                count <= '0;
    else if (clear)            count <= '0;
    else if (step && spike)    count <= tcnt_t'(WINDOW);
    else if (step && count != '0) count <= count - 1'b1;
  end

endmodule
