// tb_mmbebhe_eq7: end-to-end, self-checking testbench of the engine built
// with PREV_ON_ABSENT = 1, in which the SMBE recursion runs over every grey
// level. Runs images with empty grey-level ranges (where the two SMBE modes
// disagree) and one without, and checks threshold and map against the
// reference model in its every-level mode. It also counts the images on
// which the default mode would have chosen a different threshold, and
// requires at least one. A 4 Ki-pixel buffer keeps the run short.
module tb_mmbebhe_eq7;
  import mmbebhe_pkg::*;
  import mmbebhe_ref_pkg::*;

  localparam int ADDR_W = 12;

  logic              clk = 0, rst_n = 0, start = 0;
  logic              load_en = 0;
  logic [ADDR_W-1:0] load_addr = 0;
  pix_t              load_data = 0;
  count_t            img_size = 0;
  logic              busy, done;
  pix_t              threshold;
  pix_t              map [LEVELS];
  int checks = 0, failures = 0, n_differ = 0;

  always #5 clk = ~clk;

  mmbebhe #(.ADDR_W(ADDR_W), .PREV_ON_ABSENT(1'b1)) dut (
    .clk(clk), .rst_n(rst_n), .load_en(load_en), .load_addr(load_addr),
    .load_data(load_data), .start(start), .img_size(img_size),
    .busy(busy), .done(done), .threshold(threshold), .map(map));

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input byte unsigned img [], input int n, input string name);
    arr_t rmap, dmap;
    int   t, td, bad = 0, cyc = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      load_en = 1; load_addr = i[ADDR_W-1:0]; load_data = img[i];
    end
    @(negedge clk);
    load_en = 0; img_size = n; start = 1;
    @(negedge clk);
    start = 0;
    while (!done && cyc < 100000) begin
      @(negedge clk);
      cyc++;
    end
    ref_mmbebhe(img, n, t, rmap, 1'b1);
    ref_mmbebhe(img, n, td, dmap, 1'b0);
    if (td != t) n_differ++;
    checks++;
    if (int'(threshold) != t) begin
      failures++;
      $display("FAIL %s: threshold %0d expected %0d", name, threshold, t);
    end
    for (int k = 0; k < LEVELS; k++) if (longint'(map[k]) != rmap[k]) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d map entries wrong", name, bad);
    end
    checks++;
    if (cyc != n + 1046) begin
      failures++;
      $display("FAIL %s: done after %0d cycles, expected %0d", name, cyc, n + 1046);
    end
    $display("%s: threshold %0d (default mode would pick %0d)", name, threshold, td);
  endtask

  initial begin
    byte unsigned img [];
    img = new[1 << ADDR_W];
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (img[i]) img[i] = 8'($urandom_range(60, 230));
    run(img, 4096, "levels 60..230");
    foreach (img[i]) img[i] = 8'($urandom_range(180, 250));
    run(img, 3000, "bright");
    foreach (img[i]) img[i] = ($urandom_range(9) == 0) ? 8'($urandom_range(200, 255))
                                                     : 8'($urandom_range(0, 60));
    run(img, 4000, "dark with tail");
    foreach (img[i]) img[i] = 8'($urandom);
    run(img, 4096, "uniform");
    checks++;
    if (n_differ == 0) begin
      failures++;
      $display("FAIL: the two SMBE modes never disagreed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
