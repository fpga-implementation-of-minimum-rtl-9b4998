// tb_create_map: self-checking testbench of the map stage.
// Builds consistent cumulative histograms of random sub-images, runs the two
// calls [0, T] and [T+1, 255] with their pixel counts, and checks all 256
// map entries against the reference model, the cycle count of each call,
// and that the rounding step (remainder greater than half the pixel count)
// was taken and also skipped at least once. Also covers an empty upper
// sub-image (num_entries = 0), T = 255, a one-pixel sub-image and images of
// a million pixels, whose product (b_h - b_l) * cumu_freq passes 2**32.
module tb_create_map;
  import mmbebhe_pkg::*;
  import mmbebhe_ref_pkg::*;

  logic   clk = 0, rst_n = 0, start = 0;
  count_t cumu_freq [LEVELS];
  bound_t b_l, b_h;
  count_t num_entries;
  pix_t   map [LEVELS];
  logic   busy, done;
  int checks = 0, failures = 0;
  int n_round_up = 0, n_round_none = 0;

  always #5 clk = ~clk;

  create_map dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic call(input int l, input int h, input longint n, input arr_t c);
    int cyc, exp_cyc;
    b_l = bound_t'(l);
    b_h = bound_t'(h);
    num_entries = count_t'(n);
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
    // rounding coverage, from the reference arithmetic
    if (n != 0)
      for (int k = l; k <= h; k++) begin
        longint p = longint'(h - l) * c[k];
        if ((p % n) > (n / 2)) n_round_up++;
        else                   n_round_none++;
      end
  endtask

  // f: histogram, t: threshold
  task automatic run(input arr_t f, input int t, input string name);
    arr_t c, r;
    int   bad = 0;
    foreach (c[k]) begin
      c[k] = 0;
      r[k] = 0;
    end
    ref_cumu(f, 0, t, c);
    ref_cumu(f, t + 1, LEVELS - 1, c);
    foreach (c[k]) cumu_freq[k] = count_t'(c[k]);
    call(0, t, c[t], c);
    call(t + 1, LEVELS - 1, c[LEVELS-1], c);
    ref_map(c, 0, t, c[t], r);
    ref_map(c, t + 1, LEVELS - 1, c[LEVELS-1], r);
    // entries above an empty upper bound keep the values of the lower call
    for (int k = 0; k < LEVELS; k++)
      if (longint'(map[k]) != r[k]) begin
        if (bad < 4) $display("  %s: map[%0d] = %0d expected %0d", name, k, map[k], r[k]);
        bad++;
      end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d map entries wrong", name, bad);
    end
  endtask

  initial begin
    arr_t f;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (f[k]) f[k] = $urandom_range(300);
    run(f, 120, "dense");
    foreach (f[k]) f[k] = ($urandom_range(3) == 0) ? $urandom_range(1000, 1) : 0;
    run(f, 60, "sparse");
    // upper sub-image empty: all pixels at or below T
    foreach (f[k]) f[k] = (k <= 80) ? $urandom_range(50) : 0;
    run(f, 80, "empty upper");
    // threshold at the top level
    foreach (f[k]) f[k] = $urandom_range(20);
    run(f, 255, "T = 255");
    // one pixel in the lower sub-image
    foreach (f[k]) f[k] = (k > 3) ? $urandom_range(40) : 0;
    f[3] = 1;
    run(f, 3, "one-pixel lower");
    // large image: about a million pixels
    foreach (f[k]) f[k] = $urandom_range(8000);
    run(f, 140, "large");
    checks++;
    if (n_round_up == 0 || n_round_none == 0) begin
      failures++;
      $display("FAIL coverage: rounded up %0d, not rounded %0d", n_round_up, n_round_none);
    end
    $display("rounded up %0d times, not rounded %0d times", n_round_up, n_round_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
