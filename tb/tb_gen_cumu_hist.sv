// tb_gen_cumu_hist: self-checking testbench of the cumulative histogram.
// For random histograms it runs the two calls the driver makes, [0, T] and
// [T+1, 255], for thresholds that include 0 and 255 (empty upper bound), and
// checks all 256 entries of the combined cumulative array against the
// reference model (each half restarts from 0 and entries outside a call's
// bound stay unchanged), and that each call takes (h - l + 1) + 1 cycles.
module tb_gen_cumu_hist;
  import mmbebhe_pkg::*;
  import mmbebhe_ref_pkg::*;

  logic   clk = 0, rst_n = 0, start = 0;
  count_t freq [LEVELS];
  bound_t idx_l, idx_h;
  count_t cumu_freq [LEVELS];
  logic   busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gen_cumu_hist dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic call(input int l, input int h);
    int cyc, exp_cyc;
    idx_l = bound_t'(l);
    idx_h = bound_t'(h);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin
      @(negedge clk);
      cyc++;
    end
    exp_cyc = ((h >= l) ? h - l + 1 : 0) + 1;
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      $display("FAIL [%0d,%0d]: done after %0d cycles, expected %0d", l, h, cyc, exp_cyc);
    end
  endtask

  task automatic run(input arr_t f, input int t);
    arr_t r;
    int   bad = 0;
    for (int k = 0; k < LEVELS; k++) begin
      freq[k] = count_t'(f[k]);
      r[k]    = 0;
    end
    call(0, t);
    call(t + 1, LEVELS - 1);
    ref_cumu(f, 0, t, r);
    ref_cumu(f, t + 1, LEVELS - 1, r);
    // an empty upper half leaves the entries written by the lower call
    for (int k = 0; k < LEVELS; k++)
      if (longint'(cumu_freq[k]) != r[k]) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL T=%0d: %0d cumulative entries wrong", t, bad);
    end
  endtask

  initial begin
    arr_t f;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (f[k]) f[k] = $urandom_range(5000);
    run(f, 100);
    foreach (f[k]) f[k] = ($urandom_range(2) == 0) ? $urandom_range(70000) : 0;
    run(f, 0);
    run(f, 254);
    foreach (f[k]) f[k] = $urandom_range(9);
    run(f, 255);
    for (int i = 0; i < 5; i++) begin
      foreach (f[k]) f[k] = $urandom_range(100000);
      run(f, $urandom_range(255));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
