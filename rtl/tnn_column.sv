// tnn_column -- one clustering column: synaptic crossbar, RIF neurons,
// winner-take-all inhibition and STDP learning.
//
// A volley x of P input spike times is held at the input for a whole gamma
// cycle. The column moves it to local time by subtracting its earliest spike
// (the first spike starts the column's clock). In each unit cycle t of the
// gamma cycle, Q ramp-no-leak neurons compare their body potentials with
// THETA; the first cycle in which neuron j fires is kept as its spike time
// y_j (INF if it never does within the gamma cycle). In the last unit cycle
// (gamma_end) the y volley passes winner-take-all inhibition; the result, a
// one-hot temporal cluster identifier, is registered on z for the next stage
// during the following gamma cycle. In the same clock edge, if learn_en is
// high, every weight takes its STDP update from the local input times and
// the inhibited outputs. The first-fire registers clear at every gamma
// boundary.
//
// Weights reset to wmax/2 (rst_n, asynchronous). Latency: one gamma cycle
// from input volley to registered output.
// Follows the source design: the neuron, inhibition and learning functions,
// the crossbar of p x q weights, initialisation at wmax/2, one column per
// pipeline stage. This design's own choices: a shared local-time origin for
// all neurons of the column, and STDP driven by the inhibited outputs.
module tnn_column import tnn_pkg::*; #(
  parameter int unsigned P        = 8,
  parameter int unsigned Q        = 12,
  parameter int unsigned THETA    = 4,
  parameter int unsigned MU_PLUS  = 512,
  parameter int unsigned MU_MINUS = 512,
  parameter int unsigned MU_S     = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  spk_t  t,
  input  logic  gamma_end,
  input  logic  learn_en,
  input  spk_t  x [P],
  output spk_t  z [Q]
);
  wfx_t  w      [Q][P];   // synaptic crossbar (fixed point)
  wfx_t  w_next [Q][P];
  spk_t  xl     [P];      // input times, local frame
  spk_t  xmin;
  spk_t  y_q    [Q];      // first-fire time so far in this gamma cycle
  spk_t  y_now  [Q];      // including the current unit cycle
  spk_t  z_next [Q];
  logic  fire   [Q];

  // local time: earliest input spike is t = 0
  always_comb begin
    xmin = INF;
    for (int i = 0; i < P; i++)
      if (x[i] < xmin) xmin = x[i];
    for (int i = 0; i < P; i++)
      xl[i] = (x[i] == INF) ? INF : spk_t'(x[i] - xmin);
  end

  for (genvar j = 0; j < Q; j++) begin : g_neuron
    wint_t wrow [P];
    always_comb
      for (int i = 0; i < P; i++) wrow[i] = w[j][i][WW-1:WFRAC];

    rnl_neuron #(.P(P), .THETA(THETA)) u_neuron (
      .t(t), .x(xl), .w(wrow), .potential(), .fire(fire[j])
    );

    assign y_now[j] = (y_q[j] != INF) ? y_q[j] : (fire[j] ? t : INF);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          y_q[j] <= INF;
      else if (gamma_end)  y_q[j] <= INF;
      else                 y_q[j] <= y_now[j];
    end
  end

  wta_inhibit #(.Q(Q)) u_wta (.y(y_now), .z(z_next));

  stdp_update #(
    .P(P), .Q(Q), .MU_PLUS(MU_PLUS), .MU_MINUS(MU_MINUS), .MU_S(MU_S)
  ) u_stdp (.x(xl), .y(z_next), .w(w), .w_next(w_next));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < Q; j++) begin
        z[j] <= INF;
        for (int i = 0; i < P; i++) w[j][i] <= WHALF_FX;
      end
    end else if (gamma_end) begin
      z <= z_next;
      if (learn_en) w <= w_next;
    end
  end
endmodule
