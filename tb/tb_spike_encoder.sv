// tb_spike_encoder -- checks PosNeg corner encoding of random grayscale
// images: corner pixel positions, threshold, exactly four spikes per field,
// all at t = 0, and that volleys change only on load.
module automatic tb_spike_encoder;
  import tnn_pkg::*;
  localparam int IMG = 7, S = IMG - 2;
  logic clk = 0, rst_n = 0, load = 0;
  logic [7:0] img [IMG][IMG]; spk_t x [S*S][8];
  int checks = 0, failures = 0;
  spike_encoder #(.IMG(IMG)) dut (.clk, .rst_n, .load, .img, .x);
  always #5 clk = ~clk;
  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic b [IMG][IMG];
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) begin
        img[r][c] = 8'($urandom_range(0, 255)); b[r][c] = img[r][c] > 127;
      end
      load = 1; @(posedge clk); #1 load = 0;
      for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) img[r][c] = ~img[r][c];
      @(posedge clk); #1;   // no load: must hold
      for (int r = 0; r < S; r++) for (int c = 0; c < S; c++) begin
        int cnt = 0;
        logic cb [4];
        cb = '{b[r][c], b[r][c+2], b[r+2][c], b[r+2][c+2]};
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (x[r*S+c][k] != (cb[k] ? spk_t'(0) : INF) || x[r*S+c][k+4] != (cb[k] ? INF : spk_t'(0))) failures++;
        end
        for (int k = 0; k < 8; k++) if (x[r*S+c][k] == 0) cnt++;
        checks++; if (cnt != 4) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
