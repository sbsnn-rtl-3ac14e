// prob_counter: the 15-bit on-chip event counter of the characterisation
// structures.
//
// Counts one-cycle pulses on `inc` (OA pulses of the stochastic bit, or flips of
// the synapse's SRAM cell) from `clear` on; it stops at its maximum. The switching
// probability is count / number of trials. 15 bits is the paper's width.
module prob_counter #(
  parameter int W = 15
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         inc,
  output logic [W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     count <= '0;
    else if (clear)                 count <= '0;
    else if (inc && count != '1)    count <= count + 1'b1;
  end

endmodule
