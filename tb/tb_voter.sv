// tb_voter -- checks the voter against a reference model of its counters:
// time clamping to the effective window, +(1-theta) / -theta updates with
// saturation, votes from counters >= wmax/2 (before the same cycle's
// update), no votes and no learning without a cluster identifier.
module automatic tb_voter;
  import tnn_pkg::*;
  localparam int Q = 4, R = 3, TE = 3, TV = 20;
  logic clk = 0, rst_n = 0, ge = 0, le;
  spk_t z [Q]; logic [R-1:0] label, votes;
  int checks = 0, failures = 0, voted = 0;
  int mc [Q][R][TE];
  voter #(.Q(Q), .R(R), .TEFF(TE), .THETA_V(TV)) dut (.clk, .rst_n, .gamma_end(ge), .learn_en(le), .z, .label, .votes);
  always #5 clk = ~clk;
  initial begin #10ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int hi, k; logic [R-1:0] ev;
    for (int i = 0; i < Q; i++) for (int j = 0; j < R; j++) for (int kk = 0; kk < TE; kk++) mc[i][j][kk] = WMAX * 32;
    for (int i = 0; i < Q; i++) z[i] = INF;
    label = '0; le = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < 600; s++) begin
      for (int i = 0; i < Q; i++) z[i] = INF;
      hi = ($urandom_range(0, 7) == 0) ? -1 : $urandom_range(0, Q-1);
      k = $urandom_range(0, TMAX-1);
      if (hi >= 0) z[hi] = spk_t'(k);
      if (k > TE - 1) k = TE - 1;
      label = R'(1) << ((hi >= 0 && $urandom_range(0, 3) != 0) ? (hi % R) : $urandom_range(0, R-1));
      le = ($urandom_range(0, 9) != 0);
      ev = '0;
      if (hi >= 0) for (int j = 0; j < R; j++) ev[j] = (mc[hi][j][k] >= WMAX * 32);
      if (hi >= 0 && le) for (int j = 0; j < R; j++) begin
        mc[hi][j][k] += label[j] ? (64 - TV) : -TV;
        if (mc[hi][j][k] > WMAX * 64) mc[hi][j][k] = WMAX * 64;
        if (mc[hi][j][k] < 0) mc[hi][j][k] = 0;
      end
      ge = 1; @(posedge clk); #1 ge = 0;
      checks++; if (votes != ev) begin failures++; $display("s=%0d votes %b exp %b", s, votes, ev); end
      if (votes != 0) voted++;
      for (int i = 0; i < Q; i++) for (int j = 0; j < R; j++) for (int kk = 0; kk < TE; kk++) begin
        checks++; if (int'(dut.cnt[i][j][kk]) != mc[i][j][kk]) failures++;
      end
      @(posedge clk); #1;
    end
    checks++; if (voted == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
