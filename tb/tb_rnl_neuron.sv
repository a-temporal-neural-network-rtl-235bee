// tb_rnl_neuron -- checks the ramp-no-leak body potential and threshold.
// First the worked example of four inputs: spike times [1, 0, none, 3],
// weights [3, 4, 1, 2]; the potential is 1, 3, 5, 8, 9 at t = 0..4, so a
// threshold of 9 is first reached at t = 4. Then random volleys against a
// reference that builds each response by counting unit steps.
module automatic tb_rnl_neuron;
  import tnn_pkg::*;
  localparam int P = 4, TH = 9;
  spk_t t; spk_t x [P]; wint_t w [P];
  logic [$clog2(P*WMAX+1)-1:0] pot; logic fire;
  int checks = 0, failures = 0;
  rnl_neuron #(.P(P), .THETA(TH)) dut (.t, .x, .w, .potential(pot), .fire);
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int ref_pot(int tt);
    int s = 0;
    for (int i = 0; i < P; i++) begin
      int r = 0;
      if (x[i] != INF) for (int u = int'(x[i]); u <= tt; u++) if (r < int'(w[i])) r++;
      s += r;
    end
    return s;
  endfunction
  initial begin
    int expv [5] = '{1, 3, 5, 8, 9};
    x = '{4'd1, 4'd0, INF, 4'd3}; w = '{3'd3, 3'd4, 3'd1, 3'd2};
    for (int tt = 0; tt < 5; tt++) begin
      t = spk_t'(tt); #1;
      checks++; if (int'(pot) != expv[tt] || fire != (tt == 4)) begin failures++; $display("t=%0d pot=%0d", tt, pot); end
    end
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < P; i++) begin
        x[i] = ($urandom_range(0, 3) == 0) ? INF : spk_t'($urandom_range(0, TMAX-1));
        w[i] = wint_t'($urandom_range(0, WMAX));
      end
      t = spk_t'($urandom_range(0, TMAX-1)); #1;
      checks++; if (int'(pot) != ref_pot(int'(t)) || fire != (ref_pot(int'(t)) >= TH)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
