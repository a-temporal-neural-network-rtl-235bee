// tb_tally -- checks per-class vote sums and the winner (most votes, tie to
// the lowest class) against a reference, including the no-vote case.
module automatic tb_tally;
  localparam int NV = 12, R = 10;
  logic [R-1:0] votes [NV]; logic [3:0] counts [R]; logic [3:0] winner; logic any;
  int checks = 0, failures = 0, ties = 0;
  tally #(.NV(NV), .R(R)) dut (.votes, .counts, .winner, .any_vote(any));
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 400; n++) begin
      int c [R]; int best = 0, w = 0;
      for (int v = 0; v < NV; v++) votes[v] = (n == 0) ? '0 : R'($urandom_range(0, 1023) & $urandom_range(0, 1023));
      #1;
      for (int j = 0; j < R; j++) begin c[j] = 0; for (int v = 0; v < NV; v++) c[j] += votes[v][j]; end
      for (int j = 0; j < R; j++) if (c[j] > best) begin best = c[j]; w = j; end
      for (int j = w + 1; j < R; j++) if (c[j] == best && best > 0) begin ties++; break; end
      for (int j = 0; j < R; j++) begin checks++; if (int'(counts[j]) != c[j]) failures++; end
      checks++; if (int'(winner) != w || any != (best > 0)) failures++;
    end
    checks++; if (ties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
