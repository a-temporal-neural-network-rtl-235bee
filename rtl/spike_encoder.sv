// spike_encoder -- PosNeg corner encoder for the first column layer.
//
// A grayscale image of IMG x IMG pixels is binarized (pixel >= PIX_THRESH is
// foreground). For every overlapping 3x3 receptive field (row r, column c,
// r,c = 0..IMG-3) the four corner pixels are taken, and each yields two
// lines: the positive line spikes at t = 0 when the pixel is foreground, the
// negative line spikes at t = 0 when it is background. Exactly four of the
// eight lines of a field spike. Line order: positive corners top-left,
// top-right, bottom-left, bottom-right (lines 0..3), then their negatives
// (4..7). Field n = r*(IMG-2) + c feeds layer-1 column n.
// The volleys are registered when load is high (the gamma boundary) and held
// for the next gamma cycle: the encoder is the first pipeline stage.
// Corner selection and PosNeg coding follow the source design; the
// binarization threshold and the line order are this design's choices.
module spike_encoder import tnn_pkg::*; #(
  parameter int unsigned IMG        = 28,
  parameter int unsigned PIX_W      = 8,
  parameter int unsigned PIX_THRESH = 128,
  localparam int unsigned SIDE      = IMG - 2,
  localparam int unsigned N         = SIDE * SIDE
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [PIX_W-1:0] img [IMG][IMG],
  output spk_t             x   [N][8]
);
  logic bin [IMG][IMG];
  spk_t x_next [N][8];

  for (genvar r = 0; r < IMG; r++) begin : g_bin
    always_comb
      for (int c = 0; c < int'(IMG); c++)
        bin[r][c] = (img[r][c] >= PIX_W'(PIX_THRESH));
  end

  // one generate per field row keeps each procedural loop short
  for (genvar r = 0; r < SIDE; r++) begin : g_row
    always_comb
      for (int c = 0; c < int'(SIDE); c++)
        for (int k = 0; k < 4; k++) begin
          x_next[r*SIDE + c][k]     = bin[r + 2*(k/2)][c + 2*(k%2)] ? spk_t'(0) : INF;
          x_next[r*SIDE + c][k + 4] = bin[r + 2*(k/2)][c + 2*(k%2)] ? INF : spk_t'(0);
        end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int c = 0; c < int'(SIDE); c++)
          for (int k = 0; k < 8; k++) x[r*SIDE + c][k] <= INF;
      end else if (load) begin
        for (int c = 0; c < int'(SIDE); c++)
          for (int k = 0; k < 8; k++) x[r*SIDE + c][k] <= x_next[r*SIDE + c][k];
      end
    end
  end
endmodule
