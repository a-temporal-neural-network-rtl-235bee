// tb_gamma_timer -- checks the unit-time counter: t counts 0..TMAX-1 and
// wraps, gamma_start/gamma_end mark the first and last unit cycle, and a
// gamma cycle lasts exactly TMAX clock cycles.
module automatic tb_gamma_timer;
  import tnn_pkg::*;
  logic clk = 0, rst_n = 0;
  spk_t t; logic gs, ge;
  int checks = 0, failures = 0;
  gamma_timer dut (.clk, .rst_n, .t, .gamma_start(gs), .gamma_end(ge));
  always #5 clk = ~clk;
  initial begin #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int exp_t = 0, last_end = -1;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int c = 0; c < 5 * TMAX; c++) begin
      checks++; if (int'(t) != exp_t || gs != (exp_t == 0) || ge != (exp_t == TMAX-1)) begin
        failures++; $display("cycle %0d t=%0d exp %0d", c, t, exp_t); end
      if (ge) begin
        if (last_end >= 0) begin checks++; if (c - last_end != TMAX) failures++; end
        last_end = c;
      end
      @(posedge clk); #1; exp_t = (exp_t + 1) % TMAX;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
