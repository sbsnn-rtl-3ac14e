// lateral_inhibition: winner-take-all masking of the output layer.
//
// When one or more output neurons spike, every other output neuron gets its
// stochastic-bit EN masked, so the spiking neuron alone goes on learning the
// presented pattern (paper Sec. III-D and Fig. 7(a), where each neuron's MASK input
// is fed by the other "# of output neuron - 1" neurons). The paper does not say how
// long the mask lasts; here it is held for `hold_steps` time steps after the most
// recent spike (0 turns inhibition off), and `clear` drops it at the start of a new
// input pattern. A winner that spikes again restarts the hold time.
//
// Timing: POST pulses in step t mask the other neurons from step t+1 on.
module lateral_inhibition #(
  parameter int N_OUT  = 400,
  parameter int HOLD_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [N_OUT-1:0]  post,
  input  logic [HOLD_W-1:0] hold_steps,
  output logic [N_OUT-1:0]  mask,
  output logic              active      // inhibition in force this step
);

  logic [HOLD_W-1:0] timer;
  logic [N_OUT-1:0]  winners;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer   <= '0;
      winners <= '0;
    end else if (clear) begin
      timer   <= '0;
      winners <= '0;
    end else if (|post && hold_steps != '0) begin
      timer   <= hold_steps;
      winners <= post;
    end else if (timer != '0) begin
      timer   <= timer - 1'b1;
    end
  end

  assign active = (timer != '0);
  assign mask   = active ? ~winners : '0;

endmodule
