// wta_inhibit -- winner-take-all lateral inhibition over a bundle of lines.
//
// Only the earliest spike of the input volley y passes to the output z; a
// tie for earliest goes to the lowest line index, and every other line is
// inhibited (INF). With no input spike the output is all INF. Combinational.
// This is the source design's inhibition function as written; the
// min-then-first-match circuit is this design's choice.
module wta_inhibit import tnn_pkg::*; #(
  parameter int unsigned Q = 12
) (
  input  spk_t y [Q],
  output spk_t z [Q]
);
  spk_t ymin;
  logic taken;

  always_comb begin
    ymin = INF;
    for (int j = 0; j < Q; j++)
      if (y[j] < ymin) ymin = y[j];
    taken = 1'b0;
    for (int j = 0; j < Q; j++) begin
      z[j] = INF;
      if (!taken && ymin != INF && y[j] == ymin) begin
        z[j]  = y[j];
        taken = 1'b1;
      end
    end
  end
endmodule
