// sbsnn_pkg: constants, types and small functions shared by the stochastic-bit
// binary spiking network (sBSNN).
//
// The widths of the stochastic-bit codes follow the paper: a 6-bit PMOS code on
// each wing (LC, RC) and a 3-bit NMOS footer code (NS). One network time step is
// one clock cycle; the paper's sSTDP window is 10 time steps (267 ns at 37.5 MHz).
// The mapping from a timing count to a PMOS code (tdc_to_code) and from a pixel to
// a PMOS code (pixel_to_code) are this design's own choices: the paper says only
// that the count or the intensity "is mapped to" the PMOS code.
package sbsnn_pkg;

  localparam int CODE_W      = 6;              // PMOS code width per wing
  localparam int NS_W        = 3;              // NMOS footer code width
  localparam int CODE_MAX    = (1 << CODE_W) - 1;
  localparam int STDP_WINDOW = 10;             // sSTDP window in time steps
  localparam int TCNT_W      = 4;              // width of a POT/DEP count (0..STDP_WINDOW)
  localparam int TDC_STEP    = 6;              // PMOS code step per count of the timing counter
  localparam int N_CLASS     = 10;             // MNIST classes
  localparam int PIX_W       = 8;              // pixel intensity width

  typedef logic [CODE_W-1:0] code_t;
  typedef logic [NS_W-1:0]   ns_t;
  typedef logic [TCNT_W-1:0] tcnt_t;

  // Stochastic-bit drive: the left-wing code; the right wing gets its complement,
  // so the wing asymmetry runs from fully left-strong to fully right-strong.
  // The probability of an OA pulse falls as lc rises (Fig. 11(b) of the paper).
  typedef struct packed {
    code_t lc;
    code_t rc;
    ns_t   ns;
  } sbit_drive_t;

  function automatic sbit_drive_t make_drive(code_t lc, ns_t ns);
    sbit_drive_t d;
    d.lc = lc;
    d.rc = ~lc;
    d.ns = ns;
    return d;
  endfunction

  // A timing count c (STDP_WINDOW = spikes one step apart, 0 = outside the window)
  // becomes a PMOS code that is lowest (highest OA probability) for the closest
  // spikes: code = CODE_MAX - c * TDC_STEP.
  function automatic code_t tdc_to_code(tcnt_t c);
    int v;
    v = CODE_MAX - int'(c) * TDC_STEP;
    if (v < 0) v = 0;
    return code_t'(v);
  endfunction

  // Brighter pixel -> lower PMOS code -> higher spike probability.
  function automatic code_t pixel_to_code(logic [PIX_W-1:0] p);
    return code_t'(CODE_MAX) - code_t'(p >> (PIX_W - CODE_W));
  endfunction

endpackage
