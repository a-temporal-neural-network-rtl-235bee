// stdp_update -- STDP weight update for every synapse of one column.
//
// One small update rule per synapse (i = input line, j = neuron), applied to
// the whole p x q crossbar in parallel. From the synapse's input spike time
// x_i, its neuron's output time y_j and its weight w_ij:
//   x_i, y_j both present, x_i <= y_j : w += F+(w)   (input caused output)
//   x_i, y_j both present, x_i >  y_j : w -= F-(w)
//   x_i present, y_j absent           : w += MU_S    (search mode)
//   x_i absent,  y_j present          : w -= F-(w)
//   both absent                       : no change
// F+(w) is MU_PLUS when w >= wmax/2, else MU_PLUS/2; F-(w) is MU_MINUS when
// w < wmax/2, else MU_MINUS/2, which biases a weight to stay in its half of
// the range. Results saturate at 0 and wmax. Weights and steps are fixed
// point with WFRAC fraction bits (MU_* are in units of 2^-WFRAC).
// Combinational; the column loads w_next at the end of a gamma cycle.
// The table follows the source design; the step is taken as F(w) itself
// (full or half step), which is what its prose describes. y is the column's
// output after inhibition, so only the winning neuron learns the input.
module stdp_update import tnn_pkg::*; #(
  parameter int unsigned P        = 8,
  parameter int unsigned Q        = 12,
  parameter int unsigned MU_PLUS  = 512,   // 1/2
  parameter int unsigned MU_MINUS = 512,   // 1/2
  parameter int unsigned MU_S     = 1      // 1/1024
) (
  input  spk_t x [P],
  input  spk_t y [Q],
  input  wfx_t w      [Q][P],
  output wfx_t w_next [Q][P]
);
  always_comb begin
    for (int j = 0; j < Q; j++) begin
      for (int i = 0; i < P; i++) begin
        int unsigned cur, inc, dec, nxt;
        cur = int'(w[j][i]);
        inc = 0;
        dec = 0;
        if (x[i] != INF && y[j] != INF) begin
          if (x[i] <= y[j]) inc = (w[j][i] >= WHALF_FX) ? MU_PLUS  : MU_PLUS / 2;
          else              dec = (w[j][i] <  WHALF_FX) ? MU_MINUS : MU_MINUS / 2;
        end else if (x[i] != INF) begin
          inc = MU_S;
        end else if (y[j] != INF) begin
          dec = (w[j][i] < WHALF_FX) ? MU_MINUS : MU_MINUS / 2;
        end
        if (cur + inc > int'(WMAX_FX)) nxt = int'(WMAX_FX);
        else                           nxt = cur + inc;
        if (nxt < dec) nxt = 0;
        else           nxt = nxt - dec;
        w_next[j][i] = wfx_t'(nxt);
      end
    end
  end
endmodule
