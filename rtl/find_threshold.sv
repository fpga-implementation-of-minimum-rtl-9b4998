// find_threshold: grey level whose SMBE has the smallest magnitude.
//
// Walks smbe[0 .. L-1], one entry per clock, keeping the best magnitude so
// far in threshold_val and its level in threshold. An entry replaces the
// best one when
//     (SMBE < 0  and -SMBE < threshold_val)  or
//     (SMBE >= 0 and  SMBE < threshold_val),
// and threshold_val then takes -SMBE or SMBE. The comparison is strict, so
// among equal magnitudes the lowest level wins, and an entry holding the
// absent-level marker 0x7fffffff can never win.
//
// Interface: start pulse; done goes high L+1 cycles after the start edge and
// stays high, with threshold and threshold_val held, until the next start.
//
// Follows the reference design: the two comparisons, the stored index and
// the loop over all 256 levels. This implementation's choices: threshold_val
// starts at 0x7fffffff and threshold at 0 (used only if every level is
// absent), the start pulse, and one entry per cycle.
module find_threshold
  import mmbebhe_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  smbe_t  smbe [LEVELS],
  output pix_t   threshold,
  output smbe_t  threshold_val,
  output logic   busy,
  output logic   done
);

  bound_t index;
  smbe_t  smbe_val;
  logic   take_neg, take_pos;

  always_comb begin
    smbe_val = smbe[index[PIX_W-1:0]];
    take_neg = (smbe_val <  0) && (-smbe_val < threshold_val);
    take_pos = (smbe_val >= 0) && ( smbe_val < threshold_val);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      index         <= '0;
      threshold     <= '0;
      threshold_val <= SMBE_ABSENT;
      busy          <= 1'b0;
      done          <= 1'b0;
    end else if (start && !busy) begin
      index         <= '0;
      threshold     <= '0;
      threshold_val <= SMBE_ABSENT;
      busy          <= 1'b1;
      done          <= 1'b0;
    end else if (busy) begin
      if (index == bound_t'(LEVELS)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        if (take_neg) begin
          threshold_val <= -smbe_val;
          threshold     <= index[PIX_W-1:0];
        end else if (take_pos) begin
          threshold_val <= smbe_val;
          threshold     <= index[PIX_W-1:0];
        end
        index <= index + 1;
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("find_threshold: start while busy");

endmodule
