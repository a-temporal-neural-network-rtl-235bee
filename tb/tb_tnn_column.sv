// tb_tnn_column -- checks one column cycle-accurately against a reference
// model written from the neuron, inhibition and learning definitions.
// Random volleys (with random offsets, so local time matters) are held for
// a gamma cycle each; after every gamma boundary the registered output z
// and (through hierarchy) all weights are compared with the model. Also
// checks that the output appears exactly one gamma cycle (TMAX clocks)
// after the volley and that bubbles (learn_en low) leave weights unchanged.
module automatic tb_tnn_column;
  import tnn_pkg::*;
  localparam int P = 8, Q = 4, TH = 6, MP = 512, MM = 512, MS = 64;
  logic clk = 0, rst_n = 0, ge, le;
  spk_t t; spk_t x [P]; spk_t z [Q];
  int checks = 0, failures = 0, fired = 0, none = 0;
  int mw [Q][P];
  gamma_timer u_t (.clk, .rst_n, .t, .gamma_start(), .gamma_end(ge));
  tnn_column #(.P(P), .Q(Q), .THETA(TH), .MU_PLUS(MP), .MU_MINUS(MM), .MU_S(MS)) dut (
    .clk, .rst_n, .t, .gamma_end(ge), .learn_en(le), .x, .z);
  always #5 clk = ~clk;
  initial begin #10ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int rho(int w, int d);
    if (d < 0) return 0;
    return (d + 1 < w) ? d + 1 : w;
  endfunction

  initial begin
    int xl [P]; int y [Q]; int zexp [Q]; int xmin, best, half;
    half = WMAX * 512;
    for (int j = 0; j < Q; j++) for (int i = 0; i < P; i++) mw[j][i] = half;
    for (int i = 0; i < P; i++) x[i] = INF;
    le = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      // wait for start of gamma cycle, then present a volley
      while (t != 0) @(posedge clk) #1;
      xmin = 99;
      for (int i = 0; i < P; i++) begin
        x[i] = ($urandom_range(0, 2) == 0) ? INF : spk_t'($urandom_range(0, 2) + (s % 3));
        if (x[i] != INF && int'(x[i]) < xmin) xmin = int'(x[i]);
      end
      le = (s % 10 != 9);
      for (int i = 0; i < P; i++) xl[i] = (x[i] == INF) ? -1 : int'(x[i]) - xmin;
      // reference neurons
      for (int j = 0; j < Q; j++) begin
        y[j] = -1;
        for (int tt = TMAX - 1; tt >= 0; tt--) begin
          int b = 0;
          for (int i = 0; i < P; i++) if (xl[i] >= 0) b += rho(mw[j][i] / 1024, tt - xl[i]);
          if (b >= TH) y[j] = tt;
        end
      end
      best = -1;
      for (int j = 0; j < Q; j++) if (y[j] >= 0 && (best < 0 || y[j] < y[best])) best = j;
      for (int j = 0; j < Q; j++) zexp[j] = (j == best) ? y[j] : -1;
      if (best >= 0) fired++; else none++;
      // reference STDP
      if (le) for (int j = 0; j < Q; j++) for (int i = 0; i < P; i++) begin
        int d = 0;
        if (xl[i] >= 0 && zexp[j] >= 0) d = (xl[i] <= zexp[j]) ? ((mw[j][i] >= half) ? MP : MP/2) : -((mw[j][i] < half) ? MM : MM/2);
        else if (xl[i] >= 0) d = MS;
        else if (zexp[j] >= 0) d = -((mw[j][i] < half) ? MM : MM/2);
        mw[j][i] += d;
        if (mw[j][i] > WMAX * 1024) mw[j][i] = WMAX * 1024;
        if (mw[j][i] < 0) mw[j][i] = 0;
      end
      // output must still be the old one until the boundary
      repeat (TMAX - 1) @(posedge clk);
      @(posedge clk); #1;     // boundary passed
      for (int j = 0; j < Q; j++) begin
        checks++;
        if (int'(z[j]) != ((zexp[j] < 0) ? int'(INF) : zexp[j])) begin
          failures++; $display("s=%0d z[%0d]=%0d exp %0d", s, j, z[j], zexp[j]); end
      end
      for (int j = 0; j < Q; j++) for (int i = 0; i < P; i++) begin
        checks++; if (int'(dut.w[j][i]) != mw[j][i]) failures++;
      end
    end
    checks++; if (fired == 0 || none == 0) failures++;
    $display("volleys with a winner %0d, without %0d", fired, none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
