// tb_rf_gather -- checks that each output bundle holds the four corner
// columns of its 3x3 window in the order TL, TR, BL, BR.
module automatic tb_rf_gather;
  import tnn_pkg::*;
  localparam int SI = 6, Q = 3, SO = SI - 2;
  spk_t zi [SI*SI][Q]; spk_t xo [SO*SO][4*Q];
  int checks = 0, failures = 0;
  rf_gather #(.SIDE_IN(SI), .Q(Q)) dut (.z_in(zi), .x_out(xo));
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int dr [4] = '{0, 0, 2, 2}; int dc [4] = '{0, 2, 0, 2};
    for (int n = 0; n < 20; n++) begin
      for (int a = 0; a < SI*SI; a++) for (int j = 0; j < Q; j++) zi[a][j] = spk_t'($urandom_range(0, 15));
      #1;
      for (int r = 0; r < SO; r++) for (int c = 0; c < SO; c++) for (int k = 0; k < 4; k++) for (int j = 0; j < Q; j++) begin
        checks++; if (xo[r*SO+c][k*Q+j] != zi[(r+dr[k])*SI + c + dc[k]][j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
