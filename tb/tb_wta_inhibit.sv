// tb_wta_inhibit -- checks winner-take-all: only the earliest spike passes,
// ties to the lowest index, no input spike gives no output spike.
module automatic tb_wta_inhibit;
  import tnn_pkg::*;
  localparam int Q = 8;
  spk_t y [Q]; spk_t z [Q];
  int checks = 0, failures = 0;
  wta_inhibit #(.Q(Q)) dut (.y, .z);
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    // column example: neurons 5..7 at 2, neuron 4 at 1, others none
    y = '{INF, INF, INF, 4'd1, 4'd2, 4'd2, 4'd2, INF}; #1;
    checks++; if (z != '{INF, INF, INF, 4'd1, INF, INF, INF, INF}) failures++;
    for (int n = 0; n < 500; n++) begin
      int best = -1;
      for (int j = 0; j < Q; j++) y[j] = ($urandom_range(0, 2) == 0) ? INF : spk_t'($urandom_range(0, TMAX-1));
      #1;
      for (int j = 0; j < Q; j++) if (y[j] != INF && (best < 0 || y[j] < y[best])) best = j;
      for (int j = 0; j < Q; j++) begin
        checks++; if (z[j] != ((j == best) ? y[j] : INF)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
