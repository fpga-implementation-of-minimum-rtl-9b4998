// tb_img_arr: self-checking testbench of the image buffer.
// Fills a small buffer (64 pixels) with random pixels, reads every address
// back through the synchronous port and checks the one-cycle read latency,
// then checks that a read and a write to the same address in one cycle
// return the old pixel.
module tb_img_arr;
  localparam int ADDR_W = 6;
  localparam int DEPTH  = 1 << ADDR_W;

  logic              clk = 0;
  logic              wr_en;
  logic [ADDR_W-1:0] wr_addr, rd_addr;
  logic [7:0]        wr_data, rd_data;
  logic [7:0]        model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  img_arr #(.ADDR_W(ADDR_W), .PIX_W(8)) dut (.*);

  task automatic check(input logic [7:0] got, input logic [7:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = a[ADDR_W-1:0]; wr_data = 8'($urandom);
      model[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    // read every address: data appears after the next rising edge
    for (int a = DEPTH - 1; a >= 0; a--) begin
      rd_addr = a[ADDR_W-1:0];
      @(negedge clk);
      check(rd_data, model[a], $sformatf("read addr %0d", a));
    end
    // read-during-write of the same address returns the old pixel
    for (int i = 0; i < 8; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      rd_addr = a[ADDR_W-1:0]; wr_addr = a[ADDR_W-1:0];
      wr_en = 1; wr_data = ~model[a];
      @(negedge clk);
      wr_en = 0;
      check(rd_data, model[a], "read during write, old data");
      model[a] = ~model[a];
      @(negedge clk);
      check(rd_data, model[a], "read after write, new data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
