// gamma_timer -- unit-time counter that frames gamma cycles.
//
// The unit clock marks model time; TMAX unit cycles form a gamma cycle, the
// period of one pipeline stage. The counter t runs 0..TMAX-1 and wraps.
// gamma_start is high while t == 0, gamma_end while t == TMAX-1; every stage
// register of the network loads on a clock edge where gamma_end is high, so
// a new volley is presented to each stage when t returns to 0.
// Reset (rst_n low, asynchronous) puts t at 0. A free-running modulo
// counter is this design's choice; the source design only fixes the ratio of
// the two clock levels.
module gamma_timer import tnn_pkg::*; #(
  parameter int unsigned T = TMAX
) (
  input  logic   clk,
  input  logic   rst_n,
  output spk_t   t,
  output logic   gamma_start,
  output logic   gamma_end
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          t <= '0;
    else if (gamma_end)  t <= '0;
    else                 t <= t + 1'b1;
  end

  assign gamma_start = (t == '0);
  assign gamma_end   = (t == spk_t'(T - 1));
endmodule
