// tb_find_threshold: self-checking testbench of the threshold search.
// Drives SMBE arrays with random signed values, absent-level markers, ties
// of equal magnitude and opposite sign, a minimum at level 0 and at level
// 255, and checks the chosen level and its magnitude against the reference
// model, and that done rises L + 1 = 257 cycles after the start edge.
module tb_find_threshold;
  import mmbebhe_pkg::*;
  import mmbebhe_ref_pkg::*;

  logic   clk = 0, rst_n = 0, start = 0;
  smbe_t  smbe [LEVELS];
  pix_t   threshold;
  smbe_t  threshold_val;
  logic   busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  find_threshold dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input arr_t s, input string name);
    int     t, cyc;
    longint mag;
    for (int k = 0; k < LEVELS; k++) smbe[k] = smbe_t'(s[k]);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin
      @(negedge clk);
      cyc++;
    end
    t   = ref_threshold(s);
    mag = (s[t] < 0) ? -s[t] : s[t];
    checks++;
    if (int'(threshold) != t) begin
      failures++;
      $display("FAIL %s: threshold %0d expected %0d", name, threshold, t);
    end
    checks++;
    if (longint'(threshold_val) != mag) begin
      failures++;
      $display("FAIL %s: threshold_val %0d expected %0d", name, threshold_val, mag);
    end
    checks++;
    if (cyc != LEVELS + 1) begin
      failures++;
      $display("FAIL %s: done after %0d cycles, expected %0d", name, cyc, LEVELS + 1);
    end
  endtask

  initial begin
    arr_t s;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      for (int k = 0; k < LEVELS; k++)
        s[k] = ($urandom_range(4) == 0) ? 64'h7fff_ffff
                                        : longint'($signed($urandom_range(2000000))) - 1000000;
      run(s, $sformatf("random %0d", r));
    end
    // decreasing SMBE crossing zero: the minimum is near the middle, negative side
    for (int k = 0; k < LEVELS; k++) s[k] = 5000 - 37 * k;
    run(s, "ramp");
    // tie of equal magnitude, negative first: lower level wins
    for (int k = 0; k < LEVELS; k++) s[k] = 64'h7fff_ffff;
    s[10] = -7; s[20] = 7; s[30] = 9;
    run(s, "tie negative first");
    // tie, positive first
    s[10] = 7; s[20] = -7;
    run(s, "tie positive first");
    // minimum at the last level
    for (int k = 0; k < LEVELS; k++) s[k] = 1000 + k;
    s[255] = -3;
    run(s, "last level");
    // minimum at level 0 with value zero
    s[0] = 0;
    run(s, "zero at level 0");
    // every level absent: threshold stays 0
    for (int k = 0; k < LEVELS; k++) s[k] = 64'h7fff_ffff;
    run(s, "all absent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
