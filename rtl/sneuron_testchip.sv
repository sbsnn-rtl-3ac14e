// sneuron_testchip: characterisation structure of the stochastic bit (the
// paper's Fig. 11(a)).
//
// The FPGA shifts a 15-bit word {LC[5:0], RC[5:0], NS[2:0]} into the test-mode
// register through GPO, then pulses `start`. The timing controller gives the
// stochastic bit N_EVAL EN evaluations (768 in the paper), and the 15-bit counter
// counts the OA pulses; count / N_EVAL is the switching probability read back on
// GPI. The OA/OB outputs are also brought out.
module sneuron_testchip
  import sbsnn_pkg::*;
#(
  parameter int N_EVAL = 768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gpo_shift,
  input  logic        gpo_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        oa,
  output logic        ob,
  output logic [14:0] count
);

  logic [2*CODE_W+NS_W-1:0] cfg;
  logic                     en;

  test_mode_ctrl #(.W(2*CODE_W+NS_W)) u_tmc (
    .clk  (clk),
    .rst_n(rst_n),
    .shift(gpo_shift),
    .sdata(gpo_data),
    .cfg  (cfg)
  );

  timing_ctrl #(.N_TRIALS(N_EVAL), .PERIOD(2)) u_tcon (
    .clk  (clk),
    .rst_n(rst_n),
    .start(start),
    .trial(en),
    .busy (busy),
    .done (done)
  );

  sbit u_sbit (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (en),
    .lc   (cfg[2*CODE_W+NS_W-1 -: CODE_W]),
    .rc   (cfg[CODE_W+NS_W-1 -: CODE_W]),
    .ns   (cfg[NS_W-1:0]),
    .oa   (oa),
    .ob   (ob)
  );

  prob_counter #(.W(15)) u_cnt (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(start),
    .inc  (oa),
    .count(count)
  );

endmodule
