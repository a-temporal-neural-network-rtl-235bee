// tb_tnn_system -- end-to-end test of the ECCVT pipeline at its default size.
//
// Streams images of two synthetic classes (a vertical bar and a horizontal
// bar, with a few random noise pixels) with labels. Checks: the pipeline
// latency of five gamma cycles (out_valid exactly five accepted gamma cycles
// after each valid input, TMAX unit cycles per gamma cycle), that after
// training the predicted class matches the label for most images, and that
// every mechanism was exercised at least once: layer-2 cluster identifiers
// carrying a late spike (temporal, not binary), votes cast, a bubble (an
// empty gamma cycle) passing through, and unsupervised inputs.
module automatic tb_tnn_system;
  import tnn_pkg::*;
  localparam int IMG = 10;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [7:0] img [IMG][IMG];
  logic [NCLASS-1:0] label;
  logic accept, out_valid, out_any_vote;
  logic [CLW-1:0] out_class;
  logic [$clog2(2*(IMG-4)*(IMG-4)+1)-1:0] out_counts [NCLASS];
  int checks = 0, failures = 0;
  int exp_q[$];
  int correct = 0, scored = 0, late_spikes = 0, vote_cycles = 0, bubbles = 0, unsup = 0;
  int gamma_cnt = 0, last_gamma = 0, cyc = 0;

  tnn_system #(.IMG(IMG)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20ms; failures++; $display("watchdog"); 
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic void make_img(int cls);
    for (int r = 0; r < IMG; r++)
      for (int c = 0; c < IMG; c++) begin
        logic on;
        on = (cls == 0) ? (c >= 4 && c <= 5) : (r >= 4 && r <= 5);
        if ($urandom_range(0, 19) == 0) on = ~on;
        img[r][c] = on ? 8'd200 : 8'd10;
      end
  endfunction

  always @(posedge clk) cyc++;
  // gamma cycle length check
  always @(posedge clk) if (rst_n && accept) begin
    if (gamma_cnt > 0) begin
      checks++;
      if (cyc - last_gamma != TMAX) begin failures++; $display("gamma length %0d", cyc - last_gamma); end
    end
    last_gamma = cyc; gamma_cnt++;
  end
  // observe late layer-2 spikes
  always @(posedge clk) if (rst_n && accept)
    for (int n = 0; n < (IMG-4)*(IMG-4); n++)
      for (int j = 0; j < 20; j++) if (dut.z2[n][j] != INF && dut.z2[n][j] > 0) late_spikes++;

  initial begin
    int cls;
    label = '0; make_img(0);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 400; s++) begin
      @(negedge clk); while (!accept) @(negedge clk);
      if (s % 37 == 5) begin in_valid = 0; bubbles++; exp_q.push_back(-1); end
      else begin
        cls = $urandom_range(0, 1);
        make_img(cls); in_valid = 1;
        if (s % 29 == 3) begin label = '0; unsup++; end else label = NCLASS'(1) << cls;
        exp_q.push_back(cls);
      end
      @(posedge clk);
    end
    in_valid = 0;
    repeat (8 * TMAX) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("outputs missing: %0d", exp_q.size()); end
    checks++; if (scored == 0 || correct * 10 < scored * 9) begin failures++; $display("accuracy %0d/%0d", correct, scored); end
    checks++; if (late_spikes == 0) begin failures++; $display("no late spikes"); end
    checks++; if (vote_cycles == 0) begin failures++; $display("no votes"); end
    checks++; if (bubbles == 0 || unsup == 0) failures++;
    $display("accuracy(last 200) %0d/%0d late_spikes=%0d vote_cycles=%0d bubbles=%0d unsupervised=%0d",
             correct, scored, late_spikes, vote_cycles, bubbles, unsup);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker: one output per accepted gamma cycle, 5 gamma cycles later
  int k = 0;
  always @(posedge clk) if (rst_n && accept) begin
    // values registered at this edge are visible after it; sample before
    if (k >= 5) begin
      int e;
      if (exp_q.size() > 0) begin
        e = exp_q[0];
        checks++;
        if ((e >= 0) != out_valid) begin failures++; $display("valid mismatch at %0d", k); end
        if (out_valid && out_any_vote) vote_cycles++;
        if (e >= 0 && k > 205) begin scored++; if (int'(out_class) == e) correct++; end
        void'(exp_q.pop_front());
      end
    end
    k++;
  end
endmodule
