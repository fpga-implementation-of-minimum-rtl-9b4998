// generate_hist: frequency histogram and pixel sum of the image.
//
// After a one-cycle start pulse the block clears its histogram and its sum,
// then walks the image buffer with a pointer, index = 0 .. img_size-1, one
// pixel per clock. Each fetched pixel adds one to freq[pixel] and its value
// to the running sum. When every pixel has been counted, done goes high and
// stays high, with freq and sum held, until the next start.
//
// Interface: img_addr drives the read address of the image buffer, whose
// pixel must come back on img_data one cycle later (synchronous read).
// Timing: done is high img_size + 2 cycles after the start edge (one cycle
// of read latency, one to raise done; 1 cycle for an empty image); one pixel
// per cycle, as in the reference design.
//
// Follows the reference design: the pointer, one pixel per clock, the 32-bit
// freq registers and sum register, the done flag. This implementation's
// choices: the start pulse, the synchronous read and the clear on start.
// img_size must not exceed the buffer depth 2**ADDR_W.
module generate_hist
  import mmbebhe_pkg::*;
#(
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  count_t            img_size,
  output logic [ADDR_W-1:0] img_addr,
  input  pix_t              img_data,
  output count_t            freq [LEVELS],
  output count_t            sum,
  output logic              busy,
  output logic              done
);

  count_t index;      // pointer into the image
  logic   pix_valid;  // img_data holds a pixel fetched last cycle

  assign img_addr = index[ADDR_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      index     <= '0;
      pix_valid <= 1'b0;
      sum       <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      for (int i = 0; i < LEVELS; i++) freq[i] <= '0;
    end else if (start && !busy) begin
      index     <= '0;
      pix_valid <= 1'b0;
      sum       <= '0;
      busy      <= 1'b1;
      done      <= 1'b0;
      for (int i = 0; i < LEVELS; i++) freq[i] <= '0;
    end else begin
      pix_valid <= 1'b0;
      if (busy) begin
        if (index < img_size) begin
          index     <= index + 1;
          pix_valid <= 1'b1;
        end else if (!pix_valid) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      if (pix_valid) begin
        freq[img_data] <= freq[img_data] + 1;
        sum            <= sum + count_t'(img_data);
      end
    end
  end

  // A new run may only be requested when the block is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("generate_hist: start while busy");

  // The image size may not exceed the buffer.
  a_size_fits: assert property (@(posedge clk) disable iff (!rst_n)
                                start |-> img_size <= count_t'(2**ADDR_W))
    else $error("generate_hist: img_size larger than the image buffer");

endmodule
