// sbit: BEHAVIOURAL MODEL of the CMOS 'stochastic bit' (not synthesizable).
//
// The real part is analog: a cross-coupled inverter pair whose supply is given
// through binary-weighted PMOS headers (left code LC, right code RC, 6 bits each,
// weights 1x..32x) and whose ground is given through NMOS footers (3-bit code NS,
// weights 1x..4x). While EN is low both nodes A and B are precharged to the same
// level; when EN rises, thermal noise and the header asymmetry decide which node
// wins. A read strobe RD then buffers the result to OA or OB, so exactly one of
// them pulses per evaluation. The mask of lateral inhibition works by keeping EN low.
//
// Model: one evaluation per clock edge where en = 1 (EN = CLK gated by en; the RD
// strobe inside the EN-high phase is folded into the registered outputs). The
// result is a one-cycle pulse on oa or ob in the following cycle. oa is chosen
// with probability
//     p = (ns + 1) / 8 * ( P_LO + (P_HI - P_LO) / (1 + exp((lc - rc) / (2*SLOPE))) )
// so with rc = ~lc and ns = 7 it falls sigmoidally from P_HI at lc = 0 to P_LO at
// lc = 63, the measured 90.1 % .. 11.6 % range of the paper (Fig. 11(b), 1.4 V).
// The paper shows that NS changes the height and shape of the curve (Fig. 11(c))
// but prints no formula; the linear (ns+1)/8 scale and SLOPE are this model's own.
// Randomness comes from $urandom, standing in for thermal noise.
// N independent stochastic bits can share one instance (vector ports, one set of
// codes per bit); a synapse column uses this so that a 784 x 400 array stays
// a manageable number of instances. N = 1 is a single bit.
module sbit
  import sbsnn_pkg::*;
#(
  parameter real P_HI  = 0.901,  // OA probability at the left-strongest code (paper)
  parameter real P_LO  = 0.116,  // OA probability at the right-strongest code (paper)
  parameter real SLOPE = 8.0,    // sigmoid width in code steps (assumed)
  parameter int  N     = 1       // number of independent bits
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic  [N-1:0]     en,  // evaluate this cycle (EN not masked)
  input  code_t [N-1:0]     lc,  // left-wing PMOS codes
  input  code_t [N-1:0]     rc,  // right-wing PMOS codes
  input  ns_t   [N-1:0]     ns,  // NMOS footer codes
  output logic  [N-1:0]     oa,  // one-cycle pulse: node A side won
  output logic  [N-1:0]     ob   // one-cycle pulse: node B side won
);

  function automatic real p_oa(code_t l, code_t r, ns_t n);
    real d, s;
    d = (real'(l) - real'(r)) / (2.0 * SLOPE);
    s = P_LO + (P_HI - P_LO) / (1.0 + $exp(d));
    return s * (real'(n) + 1.0) / 8.0;
  endfunction

  // Threshold in units of 2^-24, compared with a 24-bit uniform random number.
  function automatic logic [24:0] threshold(code_t l, code_t r, ns_t n);
    return 25'(int'(p_oa(l, r, n) * 16777216.0));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin : eval
    logic [23:0] noise;
    logic [24:0] thr;
    if (!rst_n) begin
      oa <= '0;
      ob <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        if (en[i]) begin
          noise = 24'($urandom);
          thr   = threshold(lc[i], rc[i], ns[i]);
          oa[i] <= ({1'b0, noise} < thr);
          ob[i] <= ({1'b0, noise} >= thr);
        end else begin
          oa[i] <= 1'b0;
          ob[i] <= 1'b0;
        end
      end
    end
  end

endmodule
