// modulator: turns the weighted input sum of an output neuron into the PMOS code
// of its stochastic bit.
//
// The paper names this block and says it "generates and modulates the weighted
// input" but gives no circuit. This design uses the simplest programmable map:
//     x    = min(CODE_MAX, (sum << gain_shift) + bias)
//     code = CODE_MAX - x
// so a larger sum gives a lower code and, through the stochastic bit's sigmoid,
// a higher firing probability. gain_shift and bias are run-time settings, in line
// with the paper's remark that the probability curve is programmable on chip.
// Combinational.
module modulator
  import sbsnn_pkg::*;
#(
  parameter int SUM_W = 10
) (
  input  logic [SUM_W-1:0] sum,
  input  logic [2:0]       gain_shift,
  input  code_t            bias,
  output code_t            code
);

  logic [SUM_W+7:0] scaled;
  logic [SUM_W+8:0] total;

  always_comb begin
    scaled = (SUM_W+8)'(sum) << gain_shift;
    total  = (SUM_W+9)'(scaled) + (SUM_W+9)'(bias);
    if (total > (SUM_W+9)'(CODE_MAX)) code = code_t'(0);
    else                              code = code_t'(CODE_MAX) - code_t'(total);
  end

endmodule
