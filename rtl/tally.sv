// tally -- vote counter and winner selection.
//
// Adds, for each of R classes, the votes of all NV voters (a parallel
// counter per class) and names the class with the most votes. A tie goes to
// the lowest class index; any_vote is low when no voter voted at all (the
// winner is then class 0 and meaningless). Combinational; the enclosing
// design registers the result at the gamma boundary as the last pipeline
// stage. Summing and picking the maximum follows the source design; the
// tie-breaking rule is this design's choice.
module tally import tnn_pkg::*; #(
  parameter int unsigned NV = 1152,
  parameter int unsigned R  = NCLASS,
  localparam int unsigned CW = $clog2(NV + 1),
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1
) (
  input  logic [R-1:0]  votes  [NV],
  output logic [CW-1:0] counts [R],
  output logic [RW-1:0] winner,
  output logic          any_vote
);
  logic [CW-1:0] best;

  for (genvar j = 0; j < R; j++) begin : g_class
    always_comb begin
      counts[j] = '0;
      for (int v = 0; v < int'(NV); v++)
        counts[j] = counts[j] + CW'(votes[v][j]);
    end
  end

  always_comb begin
    best   = '0;
    winner = '0;
    for (int j = 0; j < int'(R); j++)
      if (counts[j] > best) begin
        best   = counts[j];
        winner = RW'(j);
      end
    any_vote = (best != '0);
  end
endmodule
