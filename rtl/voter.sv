// voter -- supervised mapping from a cluster identifier to class votes.
//
// Input z is the temporal one-hot cluster identifier of one last-layer
// column: at most one line i carries a spike, at time k. Spike times are
// first clamped to the voter's effective window (k >= TEFF-1 counts as
// TEFF-1). The crossbar holds, for every line i, class j and time k, a
// saturating counter c[i][j][k] in 0..wmax (fixed point, VFRAC fraction
// bits, reset to wmax/2).
//   Inference: class j receives a vote when c[i][j][k] >= wmax/2; with no
//   spike on z there are no votes.
//   Learning (learn_en, at the gamma boundary): for the selected i and k,
//   c[i][j][k] moves up by 1 - THETA_V for the labelled class (label[j] = 1,
//   a spike at t = 0) and down by THETA_V for every other class. A counter
//   therefore drifts to wmax when its class follows this cluster identifier
//   with probability above THETA_V, and to 0 otherwise.
// THETA_V is in units of 2^-VFRAC. Votes are registered on gamma_end, so the
// voter is one gamma-cycle pipeline stage; they come from the counters as
// they were before that cycle's update (votes do not influence learning).
// Follows the source design's crossbar, counter update and threshold; the
// clamp to TEFF-1 (so that there are exactly TEFF counters per crosspoint)
// and the fixed-point format are this design's choices.
module voter import tnn_pkg::*; #(
  parameter int unsigned Q       = 20,
  parameter int unsigned R       = NCLASS,
  parameter int unsigned TEFF    = 3,
  parameter int unsigned THETA_V = 42      // 21/32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          gamma_end,
  input  logic          learn_en,
  input  spk_t          z     [Q],
  input  logic [R-1:0]  label,
  output logic [R-1:0]  votes
);
  localparam int unsigned KW = (TEFF > 1) ? $clog2(TEFF) : 1;
  localparam int unsigned QW = (Q > 1) ? $clog2(Q) : 1;

  vfx_t              cnt [Q][R][TEFF];
  logic              hit;
  logic [QW-1:0]     sel_i;
  logic [KW-1:0]     sel_k;
  logic [R-1:0]      votes_next;

  // decode the one-hot temporal cluster identifier
  always_comb begin
    hit   = 1'b0;
    sel_i = '0;
    sel_k = '0;
    for (int i = Q - 1; i >= 0; i--)
      if (z[i] != INF) begin
        hit   = 1'b1;
        sel_i = QW'(i);
        sel_k = (z[i] >= spk_t'(TEFF - 1)) ? KW'(TEFF - 1) : KW'(z[i]);
      end
    for (int j = 0; j < int'(R); j++)
      votes_next[j] = hit && (cnt[sel_i][j][sel_k] >= VHALF_FX);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      votes <= '0;
      for (int i = 0; i < int'(Q); i++)
        for (int j = 0; j < int'(R); j++)
          for (int k = 0; k < int'(TEFF); k++)
            cnt[i][j][k] <= VHALF_FX;
    end else if (gamma_end) begin
      votes <= votes_next;
      if (learn_en && hit)
        for (int j = 0; j < int'(R); j++) begin
          if (label[j]) begin
            if (int'(cnt[sel_i][j][sel_k]) + int'((1 << VFRAC) - THETA_V) >= int'(VMAX_FX))
              cnt[sel_i][j][sel_k] <= VMAX_FX;
            else
              cnt[sel_i][j][sel_k] <= cnt[sel_i][j][sel_k] + vfx_t'((1 << VFRAC) - THETA_V);
          end else begin
            if (int'(cnt[sel_i][j][sel_k]) <= int'(THETA_V))
              cnt[sel_i][j][sel_k] <= '0;
            else
              cnt[sel_i][j][sel_k] <= cnt[sel_i][j][sel_k] - vfx_t'(THETA_V);
          end
        end
    end
  end
endmodule
