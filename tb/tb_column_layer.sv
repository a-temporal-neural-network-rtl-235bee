// tb_column_layer -- checks that every column of a small layer works on its
// own bundle: a volley given to one column makes that column (and only
// columns given spikes) produce a cluster identifier one gamma cycle later,
// and that columns given identical volleys produce identical outputs.
module automatic tb_column_layer;
  import tnn_pkg::*;
  localparam int S = 3, N = S*S, P = 8, Q = 4;
  logic clk = 0, rst_n = 0, ge; spk_t t;
  spk_t x [N][P]; spk_t z [N][Q];
  int checks = 0, failures = 0;
  gamma_timer u_t (.clk, .rst_n, .t, .gamma_start(), .gamma_end(ge));
  column_layer #(.SIDE(S), .P(P), .Q(Q), .THETA(4)) dut (.clk, .rst_n, .t, .gamma_end(ge), .learn_en(1'b1), .x, .z);
  always #5 clk = ~clk;
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < N; n++) for (int i = 0; i < P; i++) x[n][i] = INF;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < 20; s++) begin
      int act = s % N;
      while (t != 0) @(posedge clk) #1;
      for (int n = 0; n < N; n++) for (int i = 0; i < P; i++) x[n][i] = INF;
      // active column gets 4 spikes at t=0 (potential reaches 4 at t=1 at the latest)
      for (int i = 0; i < 4; i++) x[act][i] = '0;
      repeat (TMAX) @(posedge clk); #1;
      for (int n = 0; n < N; n++) begin
        int sp = 0;
        for (int j = 0; j < Q; j++) if (z[n][j] != INF) sp++;
        checks++; if (sp != ((n == act) ? 1 : 0)) begin failures++; $display("s=%0d col %0d spikes %0d", s, n, sp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
