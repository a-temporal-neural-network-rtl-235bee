// tnn_system -- ECCVT online supervised classifier built from a temporal
// neural network (TNN).
//
// Five gamma-cycle pipeline stages, one new image per gamma cycle (TMAX
// unit clock cycles):
//   E  spike_encoder  image -> PosNeg corner volleys, one 8-line bundle per
//                     3x3 receptive field ((IMG-2)^2 fields)
//   C  column_layer 1 (IMG-2)^2 columns, 8 inputs, 12 neurons each
//   C  column_layer 2 (IMG-4)^2 columns fed through rf_gather, 48 inputs,
//                     20 neurons each
//   V  two voters per layer-2 column, high and low voting threshold
//   T  tally of all votes -> predicted class
// Clustering in both column layers is unsupervised (STDP, always on for
// valid inputs). Only the voters use the label.
//
// Interface: an image (img) with its one-hot label (label, all zero for "no
// supervision") is sampled on the clock edge where accept is high, if
// in_valid is high. The label travels down the pipeline with its image and
// trains the voters in the gamma cycle when that image's cluster
// identifiers reach them. Five gamma cycles after acceptance the class
// appears on out_class with out_valid high, out_any_vote telling whether any
// vote was cast, and the vote totals on out_counts; they are held for one
// gamma cycle. rst_n (asynchronous, active low) clears the pipeline and
// puts every weight and counter at wmax/2.
// Structure, layer sizes, thresholds and learning rates follow the source
// design's two-column-layer prototype. Carrying the label with its image,
// the valid bits and the output register are this design's choices.
module tnn_system import tnn_pkg::*; #(
  parameter int unsigned IMG        = 16,
  parameter int unsigned PIX_W      = 8,
  parameter int unsigned PIX_THRESH = 128,
  parameter int unsigned L1_Q       = 12,
  parameter int unsigned L1_THETA   = 4,
  parameter int unsigned L1_MU_P    = 512,   // 1/2
  parameter int unsigned L1_MU_M    = 512,   // 1/2
  parameter int unsigned L1_MU_S    = 1,     // 1/1024
  parameter int unsigned L2_Q       = 20,
  parameter int unsigned L2_THETA   = 8,
  parameter int unsigned L2_MU_P    = 256,   // 1/4
  parameter int unsigned L2_MU_M    = 256,   // 1/4
  parameter int unsigned L2_MU_S    = 2,     // 1/512
  parameter int unsigned TEFF       = 3,
  parameter int unsigned THETA_HI   = 42,    // 21/32
  parameter int unsigned THETA_LO   = 1,     // 1/64
  localparam int unsigned S1        = IMG - 2,
  localparam int unsigned S2        = IMG - 4,
  localparam int unsigned N1        = S1 * S1,
  localparam int unsigned N2        = S2 * S2,
  localparam int unsigned NV        = 2 * N2,
  localparam int unsigned CW        = $clog2(NV + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [PIX_W-1:0]  img   [IMG][IMG],
  input  logic [NCLASS-1:0] label,
  output logic              accept,
  output logic              out_valid,
  output logic [CLW-1:0]    out_class,
  output logic              out_any_vote,
  output logic [CW-1:0]     out_counts [NCLASS]
);
  spk_t t;
  logic gamma_end;

  gamma_timer u_timer (
    .clk(clk), .rst_n(rst_n), .t(t), .gamma_start(), .gamma_end(gamma_end)
  );
  assign accept = gamma_end;

  // stage valid bits and labels travelling with the volleys
  logic              v_e, v_c1, v_c2, v_v;
  logic [NCLASS-1:0] lab_e, lab_c1, lab_c2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v_e, v_c1, v_c2, v_v, out_valid} <= '0;
      {lab_e, lab_c1, lab_c2} <= '0;
    end else if (gamma_end) begin
      v_e       <= in_valid;
      v_c1      <= v_e;
      v_c2      <= v_c1;
      v_v       <= v_c2;
      out_valid <= v_v;
      lab_e     <= in_valid ? label : '0;
      lab_c1    <= lab_e;
      lab_c2    <= lab_c1;
    end
  end

  // E
  spk_t x1 [N1][8];
  spike_encoder #(.IMG(IMG), .PIX_W(PIX_W), .PIX_THRESH(PIX_THRESH)) u_enc (
    .clk(clk), .rst_n(rst_n), .load(gamma_end), .img(img), .x(x1)
  );

  // C (layer 1)
  spk_t z1 [N1][L1_Q];
  column_layer #(
    .SIDE(S1), .P(8), .Q(L1_Q), .THETA(L1_THETA),
    .MU_PLUS(L1_MU_P), .MU_MINUS(L1_MU_M), .MU_S(L1_MU_S)
  ) u_layer1 (
    .clk(clk), .rst_n(rst_n), .t(t), .gamma_end(gamma_end),
    .learn_en(v_e), .x(x1), .z(z1)
  );

  // C (layer 2)
  spk_t x2 [N2][4*L1_Q];
  spk_t z2 [N2][L2_Q];
  rf_gather #(.SIDE_IN(S1), .Q(L1_Q)) u_gather (.z_in(z1), .x_out(x2));

  column_layer #(
    .SIDE(S2), .P(4*L1_Q), .Q(L2_Q), .THETA(L2_THETA),
    .MU_PLUS(L2_MU_P), .MU_MINUS(L2_MU_M), .MU_S(L2_MU_S)
  ) u_layer2 (
    .clk(clk), .rst_n(rst_n), .t(t), .gamma_end(gamma_end),
    .learn_en(v_c1), .x(x2), .z(z2)
  );

  // V: a high- and a low-threshold voter per layer-2 column
  logic [NCLASS-1:0] votes [NV];
  logic              learn_v;
  assign learn_v = v_c2 && (lab_c2 != '0);

  for (genvar n = 0; n < N2; n++) begin : g_vote
    spk_t zc [L2_Q];
    always_comb
      for (int j = 0; j < int'(L2_Q); j++) zc[j] = z2[n][j];

    voter #(.Q(L2_Q), .R(NCLASS), .TEFF(TEFF), .THETA_V(THETA_HI)) u_hi (
      .clk(clk), .rst_n(rst_n), .gamma_end(gamma_end), .learn_en(learn_v),
      .z(zc), .label(lab_c2), .votes(votes[2*n])
    );
    voter #(.Q(L2_Q), .R(NCLASS), .TEFF(TEFF), .THETA_V(THETA_LO)) u_lo (
      .clk(clk), .rst_n(rst_n), .gamma_end(gamma_end), .learn_en(learn_v),
      .z(zc), .label(lab_c2), .votes(votes[2*n+1])
    );
  end

  // T
  logic [CW-1:0]  counts [NCLASS];
  logic [CLW-1:0] winner;
  logic           any_vote;
  tally #(.NV(NV), .R(NCLASS)) u_tally (
    .votes(votes), .counts(counts), .winner(winner), .any_vote(any_vote)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_class    <= '0;
      out_any_vote <= 1'b0;
      for (int j = 0; j < int'(NCLASS); j++) out_counts[j] <= '0;
    end else if (gamma_end) begin
      out_class    <= winner;
      out_any_vote <= any_vote;
      out_counts   <= counts;
    end
  end
endmodule
