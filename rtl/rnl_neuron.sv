// rnl_neuron -- ramp integrate-and-fire excitatory neuron (ramp-no-leak).
//
// Each synapse i contributes the response rho(w_i, t - x_i): zero before its
// input spike, then a ramp rising by one per unit cycle (1, 2, ...) that
// stops at the weight w_i. The body potential is the sum of all responses;
// fire is high in every unit cycle where the potential is at or above
// THETA. The enclosing column records the first such cycle as the output
// spike time. Purely combinational: t is the local unit time and x the
// input spike times in the same local frame (INF = no spike).
// The response and spiking functions follow the source design exactly;
// evaluating the ramp from the stored spike time, rather than with a
// counter per synapse, is this design's choice (the two are equivalent).
module rnl_neuron import tnn_pkg::*; #(
  parameter int unsigned P     = 8,
  parameter int unsigned THETA = 4,
  localparam int unsigned PW   = $clog2(P * WMAX + 1)
) (
  input  spk_t            t,
  input  spk_t            x [P],
  input  wint_t           w [P],
  output logic [PW-1:0]   potential,
  output logic            fire
);
  always_comb begin
    potential = '0;
    for (int i = 0; i < P; i++)
      potential = potential + PW'(rnl_response(w[i], x[i], t));
  end

  assign fire = (potential >= PW'(THETA));
endmodule
