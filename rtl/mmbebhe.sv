// mmbebhe: Minimum Mean Brightness Error Bi-Histogram Equalisation engine.
//
// Takes an 8-bit grey image and its size and produces the 256-entry map from
// input to output grey levels; replacing each pixel by map[pixel] gives the
// equalised image. A driver state machine runs the stages one after the
// other, each started by a one-cycle pulse once the previous stage has
// raised its done flag:
//   HIST     generate_hist   histogram freq[] and pixel sum
//   SMBE     calculate_smbe  scaled mean brightness error per grey level
//   THRESH   find_threshold  threshold T = level of smallest |SMBE|
//   CUMU_LO  gen_cumu_hist   cumulative histogram over [0, T]
//   CUMU_HI  gen_cumu_hist   cumulative histogram over [T+1, 255]
//   MAP_LO   create_map      map over [0, T],       n = cumu_freq[T]
//   MAP_HI   create_map      map over [T+1, 255],   n = cumu_freq[255]
// The one gen_cumu_hist and the one create_map are each used twice, and
// both calls write their half of one shared array. After MAP_HI the engine
// stops with done high, map[] and threshold held, until the next start.
//
// Interface: load the image through load_en/load_addr/load_data (one pixel
// per cycle, while the engine is idle), set img_size (1 .. 2**ADDR_W) and
// pulse start. busy is high from the cycle after start until done rises.
// Timing: about img_size + 4*256 + 20 cycles per image, the histogram
// taking one cycle per pixel and every other stage one cycle per grey level.
//
// Follows the reference design: the stage order, the two calls with bounds
// [0, T] and [T+1, 255], image and size in, map out. This implementation's
// choices (the reference design's driver schematic is not available): the
// image buffer and its load port, the start/busy/done handshake, taking the
// sub-image pixel counts from cumu_freq[T] and cumu_freq[255], running
// both cumulative-histogram calls before both map calls, and the
// PREV_ON_ABSENT option of calculate_smbe (default 0, the reference design's
// behaviour; 1 runs the SMBE recursion over every grey level).
module mmbebhe
  import mmbebhe_pkg::*;
#(
  parameter int unsigned ADDR_W         = 16,
  parameter bit          PREV_ON_ABSENT = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  // image load port
  input  logic              load_en,
  input  logic [ADDR_W-1:0] load_addr,
  input  pix_t              load_data,
  // control
  input  logic              start,
  input  count_t            img_size,
  output logic              busy,
  output logic              done,
  // results
  output pix_t              threshold,
  output pix_t              map [LEVELS]
);

  typedef enum logic [3:0] {
    S_IDLE, S_HIST, S_SMBE, S_THRESH, S_CUMU_LO, S_CUMU_HI,
    S_MAP_LO, S_MAP_HI, S_DONE
  } state_t;

  state_t state;
  logic   kick;        // first cycle of a stage: start pulse to its block

  // stage interconnect
  logic [ADDR_W-1:0] img_rd_addr;
  pix_t              img_rd_data;
  count_t            freq [LEVELS];
  count_t            img_sum;
  smbe_t             smbe [LEVELS];
  smbe_t             threshold_val;
  count_t            cumu_freq [LEVELS];
  count_t            size_q;
  bound_t            lo_l, lo_h, hi_l, hi_h;
  bound_t            cur_l, cur_h;
  count_t            num_entries;

  logic hist_busy, hist_done, smbe_busy, smbe_done, thr_busy, thr_done;
  logic cumu_busy, cumu_done, map_busy, map_done;

  // the two grey-level bounds of the bi-histogram
  assign lo_l = '0;
  assign lo_h = bound_t'(threshold);
  assign hi_l = bound_t'(threshold) + 1'b1;
  assign hi_h = bound_t'(LEVELS - 1);

  always_comb begin
    if (state == S_CUMU_HI || state == S_MAP_HI) begin
      cur_l = hi_l;
      cur_h = hi_h;
    end else begin
      cur_l = lo_l;
      cur_h = lo_h;
    end
    // pixel count of the sub-image = its cumulative count at its top level
    num_entries = cumu_freq[cur_h[PIX_W-1:0]];
  end

  img_arr #(.ADDR_W(ADDR_W), .PIX_W(PIX_W)) u_img_arr (
    .clk     (clk),
    .wr_en   (load_en),
    .wr_addr (load_addr),
    .wr_data (load_data),
    .rd_addr (img_rd_addr),
    .rd_data (img_rd_data)
  );

  generate_hist #(.ADDR_W(ADDR_W)) u_generate_hist (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (kick && state == S_HIST),
    .img_size (size_q),
    .img_addr (img_rd_addr),
    .img_data (img_rd_data),
    .freq     (freq),
    .sum      (img_sum),
    .busy     (hist_busy),
    .done     (hist_done)
  );

  calculate_smbe #(.PREV_ON_ABSENT(PREV_ON_ABSENT)) u_calculate_smbe (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (kick && state == S_SMBE),
    .freq     (freq),
    .img_size (size_q),
    .img_sum  (img_sum),
    .smbe     (smbe),
    .busy     (smbe_busy),
    .done     (smbe_done)
  );

  find_threshold u_find_threshold (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (kick && state == S_THRESH),
    .smbe          (smbe),
    .threshold     (threshold),
    .threshold_val (threshold_val),
    .busy          (thr_busy),
    .done          (thr_done)
  );

  gen_cumu_hist u_gen_cumu_hist (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (kick && (state == S_CUMU_LO || state == S_CUMU_HI)),
    .freq      (freq),
    .idx_l     (cur_l),
    .idx_h     (cur_h),
    .cumu_freq (cumu_freq),
    .busy      (cumu_busy),
    .done      (cumu_done)
  );

  create_map u_create_map (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (kick && (state == S_MAP_LO || state == S_MAP_HI)),
    .cumu_freq   (cumu_freq),
    .b_l         (cur_l),
    .b_h         (cur_h),
    .num_entries (num_entries),
    .map         (map),
    .busy        (map_busy),
    .done        (map_done)
  );

  // done flag of the block that runs in the current state
  logic stage_done;
  always_comb begin
    unique case (state)
      S_HIST:              stage_done = hist_done;
      S_SMBE:              stage_done = smbe_done;
      S_THRESH:            stage_done = thr_done;
      S_CUMU_LO, S_CUMU_HI: stage_done = cumu_done;
      S_MAP_LO, S_MAP_HI:  stage_done = map_done;
      default:             stage_done = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      kick   <= 1'b0;
      size_q <= '0;
    end else begin
      kick <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            size_q <= img_size;
            state  <= S_HIST;
            kick   <= 1'b1;
          end
        end
        default: begin
          // a block clears done on its start edge, so done seen after the
          // kick cycle belongs to this run
          if (!kick && stage_done) begin
            kick <= (state != S_MAP_HI);
            unique case (state)
              S_HIST:    state <= S_SMBE;
              S_SMBE:    state <= S_THRESH;
              S_THRESH:  state <= S_CUMU_LO;
              S_CUMU_LO: state <= S_CUMU_HI;
              S_CUMU_HI: state <= S_MAP_LO;
              S_MAP_LO:  state <= S_MAP_HI;
              default:   state <= S_DONE;
            endcase
          end
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !load_en)
    else $error("mmbebhe: image written while the engine runs");

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("mmbebhe: start while busy");

  // Stages run one at a time: a block is busy only in its own state(s).
  a_one_stage: assert property (@(posedge clk) disable iff (!rst_n)
      (hist_busy -> state == S_HIST) && (smbe_busy -> state == S_SMBE) &&
      (thr_busy  -> state == S_THRESH) &&
      (cumu_busy -> (state == S_CUMU_LO || state == S_CUMU_HI)) &&
      (map_busy  -> (state == S_MAP_LO  || state == S_MAP_HI)))
    else $error("mmbebhe: a stage runs outside its state");

  // A non-empty image always has a present grey level to choose as threshold.
  a_threshold_found: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_CUMU_LO && size_q != '0) |-> threshold_val != SMBE_ABSENT)
    else $error("mmbebhe: no grey level chosen as threshold");

endmodule
