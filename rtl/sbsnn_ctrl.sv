// sbsnn_ctrl: presents one input pattern to the network.
//
// On `start` it clears the timing counters and inhibition (one cycle), then runs
// `t_present` time steps with the input neurons enabled, then one more step so the
// last input spikes reach the output neurons, and pulses `done`. One time step is
// one clock cycle (the paper's 37.5 MHz clock, 26.7 ns per step).
//
// Training follows the paper's cluster scheme: the output neurons are split into
// N_CLASS equal groups (neuron j belongs to class j / (N_OUT / N_CLASS)) and, while
// training on a pattern of class `label`, only that group's neurons are enabled.
// In inference every group is enabled and the synapse stochastic bits are off.
// The state machine, the group order and the single drain step are this design's.
module sbsnn_ctrl
  import sbsnn_pkg::*;
#(
  parameter int N_OUT   = 400,
  parameter int T_W     = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             train,        // 1 = sSTDP training, 0 = inference
  input  logic [3:0]       label,        // class of the pattern (training)
  input  logic [T_W-1:0]   t_present,    // time steps per pattern (>= 1)
  output logic             busy,
  output logic             clear,        // one-cycle clear before a pattern
  output logic             in_en,        // input neurons enabled
  output logic             run,          // a time step of the pattern is running
  output logic             train_en,     // synapse stochastic bits enabled
  output logic [N_OUT-1:0] class_en,     // output neuron enables
  output logic             done
);

  localparam int GROUP = N_OUT / N_CLASS;

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN, S_DRAIN} state_t;

  state_t         state;
  logic [T_W-1:0] steps_left;
  logic           train_q;
  logic [3:0]     label_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      steps_left <= '0;
      train_q    <= 1'b0;
      label_q    <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_CLEAR;
          train_q <= train;
          label_q <= label;
        end
        S_CLEAR: begin
          state      <= S_RUN;
          steps_left <= (t_present == '0) ? T_W'(1) : t_present;
        end
        S_RUN: begin
          steps_left <= steps_left - 1'b1;
          if (steps_left == T_W'(1)) state <= S_DRAIN;
        end
        S_DRAIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign clear    = (state == S_CLEAR);
  assign in_en    = (state == S_RUN);
  assign run      = (state == S_RUN) || (state == S_DRAIN);
  assign train_en = train_q && run;

  always_comb begin
    for (int j = 0; j < N_OUT; j++)
      class_en[j] = run && (!train_q || (j / GROUP) == int'(label_q));
  end

endmodule
