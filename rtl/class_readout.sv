// class_readout: inference decision of the network.
//
// Adds up the POST spikes of each class group of output neurons over the time a
// pattern is presented, and on `latch` reports the class whose group spiked most
// (ties go to the lower class number). Because all groups have the same size the
// highest total is also the highest average spike count, the paper's rule. Counts
// restart on `clear`. Counters saturate at their maximum.
module class_readout
  import sbsnn_pkg::*;
#(
  parameter int N_OUT = 400,
  parameter int CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [N_OUT-1:0] post,
  input  logic             latch,                 // pattern finished
  output logic [CNT_W-1:0] class_count [N_CLASS],
  output logic [3:0]       predicted,
  output logic             valid
);

  localparam int GROUP = N_OUT / N_CLASS;
  localparam int GW    = $clog2(GROUP + 1);

  logic [GW-1:0] group_spikes [N_CLASS];
  logic [3:0]    best;

  always_comb begin
    for (int c = 0; c < N_CLASS; c++) begin
      group_spikes[c] = '0;
      for (int k = 0; k < GROUP; k++)
        group_spikes[c] = group_spikes[c] + GW'(post[c*GROUP + k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CLASS; c++) class_count[c] <= '0;
    end else if (clear) begin
      for (int c = 0; c < N_CLASS; c++) class_count[c] <= '0;
    end else begin
      for (int c = 0; c < N_CLASS; c++) begin
        if ({1'b0, class_count[c]} + (CNT_W+1)'(group_spikes[c]) > (CNT_W+1)'({CNT_W{1'b1}}))
          class_count[c] <= '1;
        else
          class_count[c] <= class_count[c] + CNT_W'(group_spikes[c]);
      end
    end
  end

  always_comb begin
    best = '0;
    for (int c = 1; c < N_CLASS; c++)
      if (class_count[c] > class_count[best]) best = 4'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      predicted <= '0;
      valid     <= 1'b0;
    end else if (clear) begin
      valid     <= 1'b0;
    end else if (latch) begin
      predicted <= best;
      valid     <= 1'b1;
    end
  end

endmodule
