// tb_mmbebhe: end-to-end, self-checking testbench of the MMBEBHE engine at
// its default parameters (64 Ki-pixel image buffer).
// Each run loads an image through the load port, pulses start, waits for
// done and compares the threshold and all 256 map entries with the software
// reference model; it also checks the cycle count from start to done
// (img_size + 1046: one pixel per clock for the histogram, one grey level
// per clock for every other stage, two cycles of hand-over per stage) and
// that the mapped image keeps every pixel on its side of the threshold.
// The images are chosen so that each mechanism of the design happens, and
// the testbench counts how often:
//   absent grey levels (SMBE marker 0x7fffffff),
//   a threshold whose SMBE is negative and one whose SMBE is non-negative,
//   round-up in the map division,
//   an upper sub-image with no pixels (num_entries = 0),
//   a threshold of 255 (empty upper bound),
//   a full 65536-pixel image.
// A sweep runs 24 images of random size and grey range. One run uses
// 62,304 pixels, the image size implied by the reported
// histogram time of the F16 test image.
// A mechanism that never happened counts as a failure.
module tb_mmbebhe;
  import mmbebhe_pkg::*;
  import mmbebhe_ref_pkg::*;

  localparam int DEPTH = 1 << 16;

  logic       clk = 0, rst_n = 0, start = 0;
  logic       load_en = 0;
  logic [15:0] load_addr = 0;
  pix_t       load_data = 0;
  count_t     img_size = 0;
  logic       busy, done;
  pix_t       threshold;
  pix_t       map [LEVELS];

  int checks = 0, failures = 0;
  int m_absent = 0, m_neg_thr = 0, m_pos_thr = 0, m_round = 0;
  int m_empty_upper = 0, m_top_thr = 0, m_full = 0;

  always #5 clk = ~clk;

  mmbebhe dut (
    .clk(clk), .rst_n(rst_n), .load_en(load_en), .load_addr(load_addr),
    .load_data(load_data), .start(start), .img_size(img_size),
    .busy(busy), .done(done), .threshold(threshold), .map(map));

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(input byte unsigned img [], input int n, input string name);
    arr_t   rmap, freq, smbe, cumu;
    longint sum;
    int     t, cyc, bad;
    // load
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      load_en = 1; load_addr = i[15:0]; load_data = img[i];
    end
    @(negedge clk);
    load_en = 0; img_size = n; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;  // rising edges after the start edge
    while (!done && cyc < 200000) begin
      @(negedge clk);
      cyc++;
    end
    // reference
    ref_mmbebhe(img, n, t, rmap);
    ref_hist(img, n, freq, sum);
    ref_smbe(freq, n, sum, smbe);
    foreach (cumu[k]) cumu[k] = 0;
    ref_cumu(freq, 0, t, cumu);
    ref_cumu(freq, t + 1, LEVELS - 1, cumu);
    check(int'(threshold) == t, $sformatf("%s: threshold %0d expected %0d", name, threshold, t));
    bad = 0;
    for (int k = 0; k < LEVELS; k++)
      if (longint'(map[k]) != rmap[k]) begin
        if (bad < 4) $display("  %s: map[%0d] = %0d expected %0d", name, k, map[k], rmap[k]);
        bad++;
      end
    check(bad == 0, $sformatf("%s: %0d map entries wrong", name, bad));
    check(cyc == n + 1046, $sformatf("%s: done after %0d cycles, expected %0d", name, cyc, n + 1046));
    // equalised pixels stay on their own side of the threshold
    bad = 0;
    for (int i = 0; i < n; i++)
      if ((img[i] <= t) != (int'(map[img[i]]) <= t)) bad++;
    check(bad == 0, $sformatf("%s: %0d pixels crossed the threshold", name, bad));
    // mechanism counts
    foreach (smbe[k]) if (smbe[k] == 64'h7fff_ffff) m_absent++;
    if (smbe[t] < 0) m_neg_thr++; else m_pos_thr++;
    for (int k = 0; k < LEVELS; k++) begin
      longint nn = (k <= t) ? cumu[t] : cumu[LEVELS-1];
      longint p  = (k <= t) ? longint'(t) * cumu[k] : longint'(LEVELS - 1 - (t + 1)) * cumu[k];
      if (nn != 0 && (p % nn) > (nn / 2)) m_round++;
    end
    if (t < LEVELS - 1 && cumu[LEVELS-1] == 0) m_empty_upper++;
    if (t == LEVELS - 1) m_top_thr++;
    if (n == DEPTH) m_full++;
    $display("%s: %0d pixels, threshold %0d, %0d cycles", name, n, threshold, cyc);
  endtask

  initial begin
    byte unsigned img [];
    img = new[DEPTH];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !done, "idle after reset");

    // small mid-grey image with a narrow range
    foreach (img[i]) img[i] = 8'($urandom_range(100, 140));
    run(img, 500, "narrow");
    // dark image with a bright tail
    foreach (img[i]) img[i] = ($urandom_range(9) == 0) ? 8'($urandom_range(200, 255))
                                                     : 8'($urandom_range(0, 60));
    run(img, 3000, "dark with tail");
    // bright image
    foreach (img[i]) img[i] = 8'($urandom_range(180, 250));
    run(img, 2000, "bright");
    // constant image below white: upper sub-image empty
    foreach (img[i]) img[i] = 8'd100;
    run(img, 64, "constant 100");
    // constant white image: threshold 255
    foreach (img[i]) img[i] = 8'd255;
    run(img, 64, "constant 255");
    // two levels
    foreach (img[i]) img[i] = (i % 4 == 0) ? 8'd30 : 8'd220;
    run(img, 400, "two levels");
    // three quarters at 0, one quarter at 2: SMBE(2) = 0 is the threshold
    foreach (img[i]) img[i] = (i % 4 == 0) ? 8'd2 : 8'd0;
    run(img, 1024, "levels 0 and 2");
    // uniform random over the full range
    foreach (img[i]) img[i] = 8'($urandom);
    run(img, 5000, "uniform");
    // image of 62,304 pixels: the histogram-stage time reported for the F16
    // test image, 207.68 us at 300 MHz, is 62,304 cycles at one pixel per clock
    foreach (img[i]) img[i] = 8'($urandom_range(60, 230));
    run(img, 62304, "F16-sized");
    // sweep: random sizes (including a single pixel) and random grey ranges
    for (int r = 0; r < 24; r++) begin
      int lo, hi, n;
      lo = $urandom_range(255);
      hi = $urandom_range(255, lo);
      n  = (r == 0) ? 1 : $urandom_range(4000, 1);
      foreach (img[i]) img[i] = 8'($urandom_range(hi, lo));
      run(img, n, $sformatf("sweep %0d [%0d..%0d]", r, lo, hi));
    end
    // full-size image: bell-shaped grey levels 20..218 with gaps
    foreach (img[i]) img[i] = 8'(20 + ($urandom_range(99) + $urandom_range(99)));
    run(img, DEPTH, "full size");

    check(m_absent > 0,      "mechanism never seen: absent grey level");
    check(m_neg_thr > 0,     "mechanism never seen: negative SMBE at threshold");
    check(m_pos_thr > 0,     "mechanism never seen: non-negative SMBE at threshold");
    check(m_round > 0,       "mechanism never seen: round-up in the map");
    check(m_empty_upper > 0, "mechanism never seen: empty upper sub-image");
    check(m_top_thr > 0,     "mechanism never seen: threshold 255");
    check(m_full > 0,        "mechanism never seen: full-size image");
    $display("mechanisms: absent=%0d negthr=%0d posthr=%0d roundup=%0d emptyupper=%0d thr255=%0d full=%0d",
             m_absent, m_neg_thr, m_pos_thr, m_round, m_empty_upper, m_top_thr, m_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
