// test_mode_ctrl: configuration register of a characterisation structure.
//
// The paper names a "test mode controller" that takes the FPGA's GPO lines and
// drives the LC, RC and NS codes (and TIME_IN in the synapse test), without
// describing it. Here it is the simplest such thing: a W-bit serial shift register,
// loaded MSB first one bit per clock while `shift` is high, whose content is held
// as `cfg` once `shift` falls (so the codes never change in the middle of a load).
module test_mode_ctrl #(
  parameter int W = 15
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         shift,    // GPO shift enable
  input  logic         sdata,    // GPO serial data
  output logic [W-1:0] cfg
);

  logic [W-1:0] sreg;
  logic         shift_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg    <= '0;
      cfg     <= '0;
      shift_q <= 1'b0;
    end else begin
      shift_q <= shift;
      if (shift) sreg <= {sreg[W-2:0], sdata};
      if (shift_q && !shift) cfg <= sreg;
    end
  end

endmodule
