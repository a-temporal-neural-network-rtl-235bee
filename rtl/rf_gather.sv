// rf_gather -- wiring from one column layer to the next.
//
// Each column of the next layer sits on a 3x3 window of the previous
// layer's column grid and takes the cluster identifiers of the window's four
// corner columns: top-left, top-right, bottom-left, bottom-right, Q lines
// each, in that order, giving a 4*Q-line input bundle. A SIDE_IN grid
// therefore feeds a (SIDE_IN-2) grid. Pure wiring, no timing.
// The corner rule is the one the source design's encoder applies to pixels;
// its use between column layers is inferred from that design's synapse
// counts (4 x 12 inputs for each of 24x24 layer-2 columns).
module rf_gather import tnn_pkg::*; #(
  parameter int unsigned SIDE_IN  = 26,
  parameter int unsigned Q        = 12,
  localparam int unsigned SIDE_OUT = SIDE_IN - 2,
  localparam int unsigned N_IN    = SIDE_IN * SIDE_IN,
  localparam int unsigned N_OUT   = SIDE_OUT * SIDE_OUT
) (
  input  spk_t z_in  [N_IN][Q],
  output spk_t x_out [N_OUT][4*Q]
);
  for (genvar r = 0; r < SIDE_OUT; r++) begin : g_row
    for (genvar c = 0; c < SIDE_OUT; c++) begin : g_col
      for (genvar k = 0; k < 4; k++) begin : g_corner
        for (genvar j = 0; j < Q; j++) begin : g_line
          assign x_out[r*SIDE_OUT + c][k*Q + j] =
            z_in[(r + 2*(k/2))*SIDE_IN + c + 2*(k%2)][j];
        end
      end
    end
  end
endmodule
