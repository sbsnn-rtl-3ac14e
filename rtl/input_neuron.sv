// input_neuron: input (pre-synaptic) sNeuron.
//
// A stochastic bit whose PMOS code is taken straight from the pixel intensity, so
// the neuron spikes in each enabled time step with a probability that rises with
// the intensity (the paper: the stochastic bit "can inherently realize an input
// sNeuron by mapping the pixel intensity to PMOS code"). The mapping keeps the top
// six bits of the 8-bit pixel and inverts them (pixel_to_code in sbsnn_pkg); that
// choice, and the 8-bit pixel, are this design's.
//
// Timing: a spike is a one-cycle pulse on `spike` one clock after an enabled cycle.
module input_neuron
  import sbsnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,      // time-step enable (EN)
  input  logic [PIX_W-1:0] pixel,   // pixel intensity, 0 = black
  input  ns_t              ns,      // NMOS code shared by the input layer
  output logic             spike    // PRE spike
);

  sbit_drive_t drv;
  logic        ob_unused;

  assign drv = make_drive(pixel_to_code(pixel), ns);

  sbit u_sbit (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (en),
    .lc   (drv.lc),
    .rc   (drv.rc),
    .ns   (drv.ns),
    .oa   (spike),
    .ob   (ob_unused)
  );

endmodule
