// pulse_counter: the ones counter of one output neuron.
//
// Counts how many of the N AND-gate outputs of a synapse column pulse in the
// current time step; with binary inputs and weights this count is the weighted
// input sum. The paper gives a 10-bit ones counter for the 784-input network.
// Built here as a combinational population count (an adder tree after synthesis);
// the paper does not say how the counter is built.
module pulse_counter #(
  parameter int N = 784,                 // inputs (synapses in the column)
  parameter int W = $clog2(N + 1)        // 10 for N = 784
) (
  input  logic [N-1:0] pulses,
  output logic [W-1:0] count
);

  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count = count + W'(pulses[i]);
  end

endmodule
