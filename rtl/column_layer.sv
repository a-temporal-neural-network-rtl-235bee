// column_layer -- one TNN layer: a SIDE x SIDE grid of identical columns.
//
// Column number n = row*SIDE + col takes its own input bundle x[n] (P lines)
// and drives its own cluster identifier z[n] (Q lines). All columns share
// the unit-time counter and the gamma boundary, so the layer is a single
// gamma-cycle pipeline stage: the volleys presented during one gamma cycle
// appear, clustered, on z during the next. learn_en gates STDP for the whole
// layer (high when the volley belongs to a real input).
// The grid arrangement follows the column counts of the source design
// (26x26, 24x24 and 22x22); the columns are independent of one another.
module column_layer import tnn_pkg::*; #(
  parameter int unsigned SIDE     = 14,
  parameter int unsigned P        = 8,
  parameter int unsigned Q        = 12,
  parameter int unsigned THETA    = 4,
  parameter int unsigned MU_PLUS  = 512,
  parameter int unsigned MU_MINUS = 512,
  parameter int unsigned MU_S     = 1,
  localparam int unsigned N       = SIDE * SIDE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  spk_t  t,
  input  logic  gamma_end,
  input  logic  learn_en,
  input  spk_t  x [N][P],
  output spk_t  z [N][Q]
);
  for (genvar n = 0; n < N; n++) begin : g_col
    spk_t xc [P];
    spk_t zc [Q];
    always_comb begin
      for (int i = 0; i < P; i++) xc[i] = x[n][i];
      for (int j = 0; j < Q; j++) z[n][j] = zc[j];
    end
    tnn_column #(
      .P(P), .Q(Q), .THETA(THETA),
      .MU_PLUS(MU_PLUS), .MU_MINUS(MU_MINUS), .MU_S(MU_S)
    ) u_col (
      .clk(clk), .rst_n(rst_n), .t(t), .gamma_end(gamma_end),
      .learn_en(learn_en), .x(xc), .z(zc)
    );
  end
endmodule
