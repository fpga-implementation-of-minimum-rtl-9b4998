// create_map: histogram-equalisation map over one grey-level bound.
//
// Integer form of HE for the sub-image whose levels lie in [b_l, b_h]:
//     map[k] = b_l + round((b_h - b_l) * cumu_freq[k] / num_entries),
// which equals (n*X0 + (X_{L-1} - X0)*fc(k)) / n with X0 = b_l,
// X_{L-1} = b_h and n = num_entries, the pixel count of the sub-image.
// The quotient comes from an integer divider; the remainder of the same
// division is compared with half_num_entries = num_entries >> 1 (latched on
// start) and the map value is raised by one when the remainder is greater.
// Levels are handled serially, one per clock; entries outside the bound are
// left unchanged, so the two calls (lower and upper half) build one map.
// With num_entries = 0 (an empty sub-image, whose levels never occur) the
// entries get b_l.
//
// Interface: start pulse, with b_l, b_h and num_entries held during the run;
// done goes high (b_h - b_l + 1) + 1 cycles after the start edge and stays
// high until the next start. The divider is combinational, so it sets the
// clock period.
//
// Follows the reference design: the formula, the divide and modulus,
// half_num_entries as a right shift, the "remainder greater than half"
// rounding. This implementation's choices: the 40-bit product (no overflow
// for images up to 2**32 pixels), the 8-bit map entries, the guard against
// num_entries = 0, the start pulse and one level per cycle.
module create_map
  import mmbebhe_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  count_t cumu_freq [LEVELS],
  input  bound_t b_l,
  input  bound_t b_h,
  input  count_t num_entries,
  output pix_t   map [LEVELS],
  output logic   busy,
  output logic   done
);

  localparam int unsigned PROD_W = DATA_W + PIX_W;
  typedef logic [PROD_W-1:0] prod_t;

  bound_t curr_index;
  count_t half_num_entries;

  prod_t  prod, quot, rem;
  bound_t map_val;

  always_comb begin
    prod = (prod_t'(b_h) - prod_t'(b_l)) * prod_t'(cumu_freq[curr_index[PIX_W-1:0]]);
    if (num_entries == '0) begin
      quot = '0;
      rem  = '0;
    end else begin
      quot = prod / prod_t'(num_entries);
      rem  = prod % prod_t'(num_entries);
    end
    map_val = b_l + bound_t'(quot) + bound_t'(rem > prod_t'(half_num_entries));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      curr_index       <= '0;
      half_num_entries <= '0;
      busy             <= 1'b0;
      done             <= 1'b0;
      for (int i = 0; i < LEVELS; i++) map[i] <= '0;
    end else if (start && !busy) begin
      curr_index       <= b_l;
      half_num_entries <= num_entries >> 1;
      busy             <= 1'b1;
      done             <= 1'b0;
    end else if (busy) begin
      if (curr_index <= b_h) begin
        map[curr_index[PIX_W-1:0]] <= map_val[PIX_W-1:0];
        curr_index <= curr_index + 1;
      end else begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("create_map: start while busy");

  // Equalisation keeps every level of the sub-image inside its own bound.
  a_in_bound: assert property (@(posedge clk) disable iff (!rst_n)
                               busy && curr_index <= b_h &&
                               cumu_freq[curr_index[PIX_W-1:0]] <= num_entries
                               |-> map_val <= b_h && quot <= prod_t'(b_h) - prod_t'(b_l))
    else $error("create_map: map value above the upper bound");

endmodule
