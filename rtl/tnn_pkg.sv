// tnn_pkg -- constants and types shared by the temporal neural network.
//
// Time is discrete. The fast clock marks unit time and TMAX unit cycles make
// one gamma cycle, the period in which one volley of spikes crosses one
// pipeline stage. Between stages a spike is carried as its time of
// occurrence inside the gamma cycle (0..TMAX-1); the all-ones code stands
// for "no spike" (infinity). Each stage turns that number back into a unit
// time event by comparing it with the unit-time counter.
//
// Synaptic weights are saturating counters: WINT integer bits (0..WMAX) plus
// WFRAC fraction bits, so that the small STDP steps of the prototype
// (down to 1/1024) can accumulate. Only the integer part drives inference.
// Voter counters use the same integer range with VFRAC fraction bits, enough
// for voting thresholds in steps of 1/64.
//
// Following the source design: gamma cycles of TMAX unit cycles with TMAX in
// the 8..16 range, weights 0..wmax initialised at wmax/2, fraction bits
// derived from the smallest learning step. This design's own choices:
// TMAX = 8, WMAX = 7 (3-bit weights), binary time codes between stages.
package tnn_pkg;

  parameter int unsigned TMAX = 8;                 // unit cycles per gamma cycle
  parameter int unsigned TW   = $clog2(TMAX + 1);  // bits of a spike time
  typedef logic [TW-1:0] spk_t;
  localparam spk_t INF = '1;                       // "no spike"

  parameter int unsigned WMAX  = 7;                // largest synaptic weight
  parameter int unsigned WINT  = 3;                // integer weight bits
  parameter int unsigned WFRAC = 10;               // fraction bits (mu_s = 1/1024)
  parameter int unsigned WW    = WINT + WFRAC;
  typedef logic [WW-1:0] wfx_t;
  typedef logic [WINT-1:0] wint_t;
  localparam wfx_t WMAX_FX  = wfx_t'(WMAX << WFRAC);
  localparam wfx_t WHALF_FX = wfx_t'((WMAX << WFRAC) / 2);   // wmax/2

  parameter int unsigned VFRAC = 6;                // voter fraction bits (1/64)
  parameter int unsigned VW    = WINT + VFRAC;
  typedef logic [VW-1:0] vfx_t;
  localparam vfx_t VMAX_FX  = vfx_t'(WMAX << VFRAC);
  localparam vfx_t VHALF_FX = vfx_t'((WMAX << VFRAC) / 2);

  parameter int unsigned NCLASS = 10;              // classes (MNIST digits)
  parameter int unsigned CLW    = $clog2(NCLASS);

  // Ramp-no-leak response rho(w, t - x) at unit time t of a synapse whose
  // input spike came at time x.
  function automatic int unsigned rnl_response(wint_t w, spk_t x, spk_t t);
    int unsigned d;
    if (x == INF || t < x) return 0;
    d = int'(t) - int'(x) + 1;
    return (d < int'(w)) ? d : int'(w);
  endfunction

endpackage
