// calculate_smbe: scaled mean brightness error for every grey level.
//
// For each candidate threshold the SMBE is a scaled integer form of the
// difference between the input mean brightness and the mean brightness
// bi-histogram equalisation would give with that threshold. The block walks
// the histogram serially, level 0 .. L-1, one level per clock:
//   - a level with freq = 0 gets SMBE_ABSENT (0x7fffffff) so it can never be
//     chosen as threshold, and the running value prev is left alone
//     (unless PREV_ON_ABSENT, see below);
//   - the first level with freq > 0 (register first still 0) gets the base
//     case  SMBE = L*(n - freq) - 2*sum,
//   - every later level with freq > 0 gets  SMBE = prev + (n - L*freq),
//   and prev takes the new value.
// n is the pixel count img_size and sum the pixel sum from generate_hist.
//
// Interface: start pulse; done goes high L+1 cycles after the start edge and
// stays high, with smbe[] held, until the next start.
//
// Follows the reference design: the recursion, the 32-bit prev register, the
// first sentinel, the 0x7fffffff marker and, by default, the rule that prev
// only moves on a level present in the image. That rule makes every level
// after an absent one miss the (n - L*0) = n term the recursion (7) adds for
// the absent level, which lowers the SMBE by n per absent level below it and
// moves the threshold on images with empty grey levels. PREV_ON_ABSENT = 1
// runs recursion (7) over every level instead: the base case is taken at
// level 0 and prev advances by n on an absent level, whose stored SMBE is
// still the marker. The start pulse, the one-level-per-cycle rate and the
// PREV_ON_ABSENT option are this implementation's choices. 32-bit signed
// arithmetic bounds the image to below 2**23 pixels.
module calculate_smbe
  import mmbebhe_pkg::*;
#(
  parameter bit PREV_ON_ABSENT = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  count_t freq [LEVELS],
  input  count_t img_size,
  input  count_t img_sum,
  output smbe_t  smbe [LEVELS],
  output logic   busy,
  output logic   done
);

  bound_t index;
  logic   first;
  smbe_t  prev;

  count_t f;
  smbe_t  base_val, rec_val, new_val;

  always_comb begin
    f        = freq[index[PIX_W-1:0]];
    // equation (6): L*(n - F) - 2*sum
    base_val = smbe_t'(LEVELS) * (smbe_t'(img_size) - smbe_t'(f)) - (smbe_t'(img_sum) <<< 1);
    // equation (7): prev + (n - L*F)
    rec_val  = prev + (smbe_t'(img_size) - smbe_t'(LEVELS) * smbe_t'(f));
    new_val  = first ? rec_val : base_val;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      index <= '0;
      first <= 1'b0;
      prev  <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      for (int i = 0; i < LEVELS; i++) smbe[i] <= '0;
    end else if (start && !busy) begin
      index <= '0;
      first <= 1'b0;
      prev  <= '0;
      busy  <= 1'b1;
      done  <= 1'b0;
    end else if (busy) begin
      if (index == bound_t'(LEVELS)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        smbe[index[PIX_W-1:0]] <= (f == '0) ? SMBE_ABSENT : new_val;
        if (f != '0 || PREV_ON_ABSENT) begin
          prev  <= new_val;
          first <= 1'b1;
        end
        index <= index + 1;
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("calculate_smbe: start while busy");

endmodule
