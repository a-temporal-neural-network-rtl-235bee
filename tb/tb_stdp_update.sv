// tb_stdp_update -- checks each row of the STDP rule table, the full/half
// step around wmax/2 and saturation at 0 and wmax, against a reference.
module automatic tb_stdp_update;
  import tnn_pkg::*;
  localparam int P = 4, Q = 3, MP = 512, MM = 256, MS = 1;
  spk_t x [P]; spk_t y [Q]; wfx_t w [Q][P]; wfx_t wn [Q][P];
  int checks = 0, failures = 0;
  stdp_update #(.P(P), .Q(Q), .MU_PLUS(MP), .MU_MINUS(MM), .MU_S(MS)) dut (.x, .y, .w, .w_next(wn));
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int ref_w(int wi, spk_t xi, spk_t yj);
    int half = (WMAX * 1024) / 2, d = 0;
    if (xi != INF && yj != INF) d = (xi <= yj) ? ((wi >= half) ? MP : MP/2) : -((wi < half) ? MM : MM/2);
    else if (xi != INF) d = MS;
    else if (yj != INF) d = -((wi < half) ? MM : MM/2);
    wi += d;
    if (wi > WMAX * 1024) wi = WMAX * 1024;
    if (wi < 0) wi = 0;
    return wi;
  endfunction
  initial begin
    // directed: weight at 3.5 (upper half) with x<=y -> +1/2
    x = '{4'd0, 4'd3, INF, INF}; y = '{4'd1, INF, INF};
    for (int j = 0; j < Q; j++) for (int i = 0; i < P; i++) w[j][i] = WHALF_FX;
    #1;
    checks++; if (wn[0][0] != WHALF_FX + 512) failures++;      // x<=y, full step
    checks++; if (wn[0][1] != WHALF_FX - 128) failures++;      // x>y, upper half: half step
    checks++; if (wn[0][2] != WHALF_FX - 128) failures++;      // no x, y present
    checks++; if (wn[1][0] != WHALF_FX + 1) failures++;        // search mode
    checks++; if (wn[2][2] != WHALF_FX) failures++;            // nothing
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < P; i++) x[i] = ($urandom_range(0, 2) == 0) ? INF : spk_t'($urandom_range(0, TMAX-1));
      for (int j = 0; j < Q; j++) y[j] = ($urandom_range(0, 2) == 0) ? INF : spk_t'($urandom_range(0, TMAX-1));
      for (int j = 0; j < Q; j++) for (int i = 0; i < P; i++)
        w[j][i] = ($urandom_range(0, 4) == 0) ? wfx_t'($urandom_range(0, 3) * 7168 / 3) : wfx_t'($urandom_range(0, WMAX * 1024));
      #1;
      for (int j = 0; j < Q; j++) for (int i = 0; i < P; i++) begin
        checks++; if (int'(wn[j][i]) != ref_w(int'(w[j][i]), x[i], y[j])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
