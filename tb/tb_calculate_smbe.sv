// tb_calculate_smbe: self-checking testbench of the SMBE stage.
// Drives histograms of several shapes (dense random, sparse with absent
// levels including level 0, a single level, two extreme levels) together
// with their pixel count and pixel sum, and checks all 256 SMBE entries
// against the reference model, including the 0x7fffffff marker of absent
// levels and negative values, and that done rises L + 1 = 257 cycles after
// the start edge (one grey level per clock). A second instance with
// PREV_ON_ABSENT = 1 is checked against the closed form of recursion (7),
// SMBE(k) = n*(L + k) - L*C(k) - 2*sum.
module tb_calculate_smbe;
  import mmbebhe_pkg::*;
  import mmbebhe_ref_pkg::*;

  logic   clk = 0, rst_n = 0, start = 0;
  count_t freq [LEVELS];
  count_t img_size, img_sum;
  smbe_t  smbe [LEVELS];
  logic   busy, done;
  smbe_t  smbe_e [LEVELS];   // PREV_ON_ABSENT = 1 instance
  logic   busy_e, done_e;
  int checks = 0, failures = 0;
  int n_absent = 0, n_negative = 0;

  always #5 clk = ~clk;

  calculate_smbe dut (.*);

  calculate_smbe #(.PREV_ON_ABSENT(1'b1)) dut_e (
    .clk(clk), .rst_n(rst_n), .start(start), .freq(freq), .img_size(img_size),
    .img_sum(img_sum), .smbe(smbe_e), .busy(busy_e), .done(done_e));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input arr_t f, input string name);
    arr_t   r;
    longint n = 0, s = 0;
    int     cyc, bad;
    for (int k = 0; k < LEVELS; k++) begin
      n += f[k];
      s += longint'(k) * f[k];
      freq[k] = count_t'(f[k]);
    end
    img_size = count_t'(n);
    img_sum  = count_t'(s);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin
      @(negedge clk);
      cyc++;
    end
    ref_smbe(f, n, s, r);
    bad = 0;
    for (int k = 0; k < LEVELS; k++) begin
      if (longint'(smbe[k]) != r[k]) begin
        if (bad < 4) $display("  %s: smbe[%0d] = %0d expected %0d", name, k, smbe[k], r[k]);
        bad++;
      end
      if (r[k] == 64'h7fff_ffff) n_absent++;
      if (r[k] < 0) n_negative++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d SMBE entries wrong", name, bad);
    end
    // every-level variant against the closed form of recursion (7)
    ref_smbe(f, n, s, r, 1'b1);
    bad = 0;
    for (int k = 0; k < LEVELS; k++)
      if (longint'(smbe_e[k]) != r[k]) begin
        if (bad < 4) $display("  %s (every level): smbe[%0d] = %0d expected %0d", name, k, smbe_e[k], r[k]);
        bad++;
      end
    checks++;
    if (bad != 0 || !done_e) begin
      failures++;
      $display("FAIL %s (every level): %0d SMBE entries wrong", name, bad);
    end
    checks++;
    if (cyc != LEVELS + 1) begin
      failures++;
      $display("FAIL %s: done after %0d cycles, expected %0d", name, cyc, LEVELS + 1);
    end
  endtask

  initial begin
    arr_t f;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // dense random histogram
    for (int k = 0; k < LEVELS; k++) f[k] = $urandom_range(1000);
    run(f, "dense");
    // sparse histogram, level 0 absent
    for (int k = 0; k < LEVELS; k++) f[k] = ($urandom_range(3) == 0 && k != 0) ? $urandom_range(500, 1) : 0;
    run(f, "sparse");
    // dark image: only low levels
    for (int k = 0; k < LEVELS; k++) f[k] = (k < 40) ? $urandom_range(300) : 0;
    run(f, "dark");
    // bright image: only high levels, gap at the start
    for (int k = 0; k < LEVELS; k++) f[k] = (k > 200) ? $urandom_range(300, 1) : 0;
    run(f, "bright");
    // a single level
    for (int k = 0; k < LEVELS; k++) f[k] = (k == 128) ? 1000 : 0;
    run(f, "single level");
    // two extreme levels
    for (int k = 0; k < LEVELS; k++) f[k] = (k == 0 || k == 255) ? 4096 : 0;
    run(f, "two extremes");
    // the cases above must have exercised both special values
    checks++;
    if (n_absent == 0 || n_negative == 0) begin
      failures++;
      $display("FAIL coverage: absent=%0d negative=%0d", n_absent, n_negative);
    end
    $display("absent levels seen %0d, negative SMBE seen %0d", n_absent, n_negative);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
