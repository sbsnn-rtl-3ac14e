// synapse_testchip: characterisation structure of the stochastic binary synapse
// (the paper's Fig. 12(a)).
//
// The FPGA shifts an 8-bit word {NS[2:0], TIME_IN[4:0]} (TIME_IN signed, in clocks)
// into the test-mode register and pulses `start`. For each of N_TRIALS trials the
// timing controller resets the 1-bit SRAM cell (to 0 for a positive TIME_IN, a
// potentiation test, to 1 otherwise), clears the TDC and fires the pulse
// generator; the TDC turns the PRE/POST pair into a direction and a count, the
// stochastic bit gets the count's PMOS code and, if it fires, opens the SRAM
// wordline with the bitlines set by the direction. The 15-bit counter counts the
// trials in which the cell flipped; `d` is the cell itself (GPI).
// The paper shows the parts and the signals TIME_IN, RESET, WL and D; the
// per-trial reset value, the trial length of 16 clocks and the flip counter's use
// here are this design's. The paper also notes that the TDC and pulse generator
// are measurement aids: in the network the POT/DEP counters do this job.
module synapse_testchip
  import sbsnn_pkg::*;
#(
  parameter int N_TRIALS = 768,
  parameter int PERIOD   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gpo_shift,
  input  logic        gpo_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        d,          // SRAM cell content
  output logic [14:0] flips
);

  logic [7:0]         cfg;
  ns_t                ns;
  logic signed [4:0]  time_in;
  logic               trial, trial_d;
  logic               pre, post, pg_busy;
  logic               t_valid, t_pot;
  tcnt_t              t_count;
  logic               dir;        // latched direction: bitline value
  sbit_drive_t        drv;
  logic               wl, ob_unused;
  logic               reset_val;

  assign ns      = cfg[7:5];
  assign time_in = signed'(cfg[4:0]);

  test_mode_ctrl #(.W(8)) u_tmc (
    .clk  (clk),
    .rst_n(rst_n),
    .shift(gpo_shift),
    .sdata(gpo_data),
    .cfg  (cfg)
  );

  timing_ctrl #(.N_TRIALS(N_TRIALS), .PERIOD(PERIOD)) u_tcon (
    .clk  (clk),
    .rst_n(rst_n),
    .start(start),
    .trial(trial),
    .busy (busy),
    .done (done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trial_d <= 1'b0;
    else        trial_d <= trial;
  end

  pulse_gen #(.T_W(5)) u_pg (
    .clk    (clk),
    .rst_n  (rst_n),
    .fire   (trial_d),
    .time_in(time_in),
    .pre    (pre),
    .post   (post),
    .busy   (pg_busy)
  );

  tdc u_tdc (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(trial),
    .pre  (pre),
    .post (post),
    .valid(t_valid),
    .pot  (t_pot),
    .count(t_count)
  );

  assign drv = make_drive(tdc_to_code(t_count), ns);

  sbit u_sbit (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (t_valid && t_count != '0),
    .lc   (drv.lc),
    .rc   (drv.rc),
    .ns   (drv.ns),
    .oa   (wl),
    .ob   (ob_unused)
  );

  assign reset_val = !(time_in > 0);

  // SRAM cell with RESET from the timing controller; `dir` plays the SR latch.
  logic d_before;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d        <= 1'b0;
      dir      <= 1'b0;
      d_before <= 1'b0;
    end else begin
      if (t_valid) dir <= t_pot;
      if (start) begin
        d_before <= d;
      end else if (trial) begin
        d        <= reset_val;
        d_before <= reset_val;
      end else if (wl) begin
        d        <= dir;
      end
    end
  end

  // A trial counts as a flip when the cell differs from its reset value at the
  // start of the next trial or at the end of the run.
  logic count_flip;
  assign count_flip = (trial || done) && (d != d_before) && !pg_busy;

  prob_counter #(.W(15)) u_cnt (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(start),
    .inc  (count_flip),
    .count(flips)
  );

endmodule
