// img_arr: image buffer that holds the 8-bit input image.
//
// A plain single-clock memory of 2**ADDR_W pixels with one write port, used
// to load the image, and one synchronous read port, through which the
// histogram stage fetches one pixel per cycle. rd_data shows the pixel at the
// rd_addr sampled on the previous rising edge (one cycle read latency, as in
// an FPGA block RAM). A write and a read of the same address in one cycle
// return the old pixel.
//
// The reference design only shows the image as an array the histogram stage
// walks with a pointer; the memory, its depth (64 Ki pixels by default) and
// its registered read port are this implementation's choices.
module img_arr #(
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned PIX_W  = 8
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [PIX_W-1:0]  wr_data,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [PIX_W-1:0]  rd_data
);

  logic [PIX_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
