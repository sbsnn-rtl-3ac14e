// tdc: time-to-digital converter of the synapse characterisation structure.
//
// Built as the paper suggests ("TDC can be realized using a counter for
// potentiation (depression) that resets when PRE (POST) is high"): a POT
// stdp_counter reset by PRE and a DEP stdp_counter reset by POST. When the second
// spike of a pair arrives it reports, for one cycle, the direction (1 = POST after
// PRE, potentiation) and the count of the counter that started first, which is
// WINDOW + 1 - |t_post - t_pre| inside the window and 0 outside. `valid` is high in
// every cycle with exactly one spike; after `clear` the first spike of a pair reads
// a count of 0, which the user treats as "no update". PRE and POST in the same
// cycle give no result. Combinational outputs, registered counts.
module tdc
  import sbsnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  pre,
  input  logic  post,
  output logic  valid,
  output logic  pot,      // 1: potentiation (t_post > t_pre), 0: depression
  output tcnt_t count
);

  tcnt_t pot_cnt, dep_cnt;

  stdp_counter u_pot (
    .clk(clk), .rst_n(rst_n), .clear(clear), .step(1'b1), .spike(pre), .count(pot_cnt)
  );
  stdp_counter u_dep (
    .clk(clk), .rst_n(rst_n), .clear(clear), .step(1'b1), .spike(post), .count(dep_cnt)
  );

  assign valid = pre ^ post;
  assign pot   = post;
  assign count = post ? pot_cnt : dep_cnt;

endmodule
