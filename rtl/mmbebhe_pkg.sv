// mmbebhe_pkg: sizes, types and constants shared by the MMBEBHE blocks.
//
// The design works on 8-bit grey images, so there are L = 256 grey levels.
// Every count, sum and scaled brightness error is a 32-bit integer, as in
// the reference design; SMBE values are signed. A grey-level bound needs one
// bit more than a pixel, because the upper sub-histogram starts at T+1,
// which is 256 when the threshold T is 255.
// The marker 0x7fffffff, stored as the SMBE of a level that does not occur in
// the image, is taken from the reference design. The bound width and the
// struct-free plain typedefs are this implementation's choices.
package mmbebhe_pkg;

  localparam int unsigned PIX_W   = 8;            // bits per pixel
  localparam int unsigned LEVELS  = 1 << PIX_W;   // L, number of grey levels
  localparam int unsigned DATA_W  = 32;           // counts, sums, SMBE
  localparam int unsigned BOUND_W = PIX_W + 1;    // holds 0 .. L

  typedef logic [PIX_W-1:0]          pix_t;
  typedef logic [BOUND_W-1:0]        bound_t;
  typedef logic [DATA_W-1:0]         count_t;
  typedef logic signed [DATA_W-1:0]  smbe_t;

  // SMBE stored for a grey level that is absent from the image
  localparam smbe_t SMBE_ABSENT = 32'sh7fff_ffff;

endpackage
