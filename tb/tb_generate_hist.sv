// tb_generate_hist: self-checking testbench of the histogram stage.
// A small image buffer (256 pixels) is loaded with images of several kinds
// (random, constant, two-level, single pixel, empty) and sizes; for each run
// the testbench checks every histogram bin and the pixel sum against the
// reference model, and checks that done rises exactly img_size + 2 cycles
// after the start edge (one pixel per clock; 1 cycle for an empty image).
module tb_generate_hist;
  import mmbebhe_pkg::*;
  import mmbebhe_ref_pkg::*;

  localparam int ADDR_W = 8;
  localparam int DEPTH  = 1 << ADDR_W;

  logic              clk = 0, rst_n = 0, start = 0;
  logic              wr_en = 0;
  logic [ADDR_W-1:0] wr_addr = 0, rd_addr;
  pix_t              wr_data = 0, rd_data;
  count_t            img_size = 0;
  count_t            freq [LEVELS];
  count_t            sum;
  logic              busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  img_arr #(.ADDR_W(ADDR_W), .PIX_W(8)) u_mem (
    .clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_addr(rd_addr), .rd_data(rd_data));

  generate_hist #(.ADDR_W(ADDR_W)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .img_size(img_size),
    .img_addr(rd_addr), .img_data(rd_data), .freq(freq), .sum(sum),
    .busy(busy), .done(done));

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input byte unsigned img [], input int n, input string name);
    arr_t   rf;
    longint rs;
    int     cyc;
    int     bad;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = i[ADDR_W-1:0]; wr_data = img[i];
    end
    @(negedge clk);
    wr_en = 0; img_size = n; start = 1;
    @(posedge clk);
    @(negedge clk);
    start = 0;
    cyc = 0;  // rising edges after the start edge
    while (!done && cyc < 10000) begin
      @(posedge clk);
      @(negedge clk);
      cyc++;
    end
    ref_hist(img, n, rf, rs);
    bad = 0;
    for (int k = 0; k < LEVELS; k++)
      if (longint'(freq[k]) != rf[k]) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d histogram bins wrong", name, bad);
    end
    checks++;
    if (longint'(sum) != rs) begin
      failures++;
      $display("FAIL %s: sum %0d expected %0d", name, sum, rs);
    end
    checks++;
    if (cyc != ((n == 0) ? 1 : n + 2)) begin
      failures++;
      $display("FAIL %s: done after %0d cycles, expected %0d", name, cyc, n + 2);
    end
  endtask

  initial begin
    byte unsigned img [];
    img = new[DEPTH];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random full-range image filling the buffer
    foreach (img[i]) img[i] = 8'($urandom);
    run(img, DEPTH, "random 256");
    // random image with a narrow grey range, partial size
    foreach (img[i]) img[i] = 8'($urandom_range(90, 110));
    run(img, 200, "narrow 200");
    // constant image
    foreach (img[i]) img[i] = 8'd255;
    run(img, 77, "constant 255");
    // two levels, extremes
    foreach (img[i]) img[i] = (i % 3 == 0) ? 8'd0 : 8'd255;
    run(img, 150, "two-level");
    // one pixel
    img[0] = 8'd42;
    run(img, 1, "single pixel");
    // empty image: histogram of a previous run must be cleared
    run(img, 0, "empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
