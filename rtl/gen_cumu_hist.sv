// gen_cumu_hist: cumulative histogram over one grey-level bound.
//
// For the bound [idx_l, idx_h] it writes
//     cumu_freq[k] = freq[idx_l] + ... + freq[k],   idx_l <= k <= idx_h,
// restarting from 0 at idx_l, and leaves every entry outside the bound
// unchanged. The driver calls it twice, with [0, T] and [T+1, L-1], so that
// after both calls cumu_freq holds the cumulative histograms of the two
// sub-images side by side. A bound with idx_l > idx_h (T = 255) writes
// nothing.
//
// It works serially with a running register prev (cleared on start) and an
// offset idx_offset: index = idx_l + idx_offset; the loop runs while
// index <= idx_h, one level per clock.
//
// Interface: start pulse, with idx_l and idx_h held during the run; done
// goes high (idx_h - idx_l + 1) + 1 cycles after the start edge and stays high
// until the next start.
//
// Follows the reference design: prev, idx_offset, the loop condition and the
// adder. This implementation's choices: the 9-bit bounds, the start pulse,
// one level per cycle, and keeping entries outside the bound.
module gen_cumu_hist
  import mmbebhe_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  count_t freq [LEVELS],
  input  bound_t idx_l,
  input  bound_t idx_h,
  output count_t cumu_freq [LEVELS],
  output logic   busy,
  output logic   done
);

  bound_t idx_offset;
  bound_t index;
  count_t prev;
  count_t sum_val;

  always_comb begin
    index   = idx_l + idx_offset;
    sum_val = prev + freq[index[PIX_W-1:0]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx_offset <= '0;
      prev       <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
      for (int i = 0; i < LEVELS; i++) cumu_freq[i] <= '0;
    end else if (start && !busy) begin
      idx_offset <= '0;
      prev       <= '0;
      busy       <= 1'b1;
      done       <= 1'b0;
    end else if (busy) begin
      if (index <= idx_h) begin
        cumu_freq[index[PIX_W-1:0]] <= sum_val;
        prev       <= sum_val;
        idx_offset <= idx_offset + 1;
      end else begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("gen_cumu_hist: start while busy");

  a_bound: assert property (@(posedge clk) disable iff (!rst_n)
                            start |-> idx_h < bound_t'(LEVELS) && idx_l <= bound_t'(LEVELS))
    else $error("gen_cumu_hist: bound outside 0..L");

endmodule
