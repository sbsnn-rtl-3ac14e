// timing_ctrl: on-chip timing controller of the characterisation structures.
//
// After `start` it issues N_TRIALS one-cycle `trial` strobes, one every PERIOD
// cycles, then pulses `done`. In the stochastic-bit test each strobe is one EN
// evaluation (the paper uses 768 per measurement); in the synapse test each strobe
// resets the SRAM cell and launches one PRE/POST pair. The paper gives the count
// of 768 and the signals EN, RD and RESET; the strobe spacing is this design's.
module timing_ctrl #(
  parameter int N_TRIALS = 768,
  parameter int PERIOD   = 2,
  parameter int N_W      = $clog2(N_TRIALS + 1),
  parameter int P_W      = $clog2(PERIOD + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic trial,   // one-cycle strobe per trial (EN / RESET)
  output logic busy,
  output logic done
);

  logic [N_W-1:0] left;
  logic [P_W-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left  <= '0;
      phase <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (left == '0) begin
        if (start) begin
          left  <= N_W'(N_TRIALS);
          phase <= '0;
        end
      end else if (phase == P_W'(PERIOD - 1)) begin
        phase <= '0;
        left  <= left - 1'b1;
        if (left == N_W'(1)) done <= 1'b1;
      end else begin
        phase <= phase + 1'b1;
      end
    end
  end

  assign busy  = (left != '0);
  assign trial = busy && (phase == '0);

endmodule
