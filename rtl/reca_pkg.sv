// reca_pkg: sizes and types shared by the cellular-automaton reservoir classifier.
//
// The classifier turns an 8-bit grayscale image into Q class scores (logits). The image is
// split into B bit planes; every row and every column of every plane is a one-dimensional
// rule-90 automaton. After each automaton step the row and column results are XORed, the
// planes are read back as 8-bit pixels, max-pooled 2x2 and multiplied by a weight set that
// belongs to that step; the products are summed into the logits.
//
// Numbers that follow the paper: a 28x28 image (MNIST), 8 bit planes, rule 90, M = 16
// iterations, Q = 10 classes, 8-bit weights, 2x2 pooling with stride 2, and 4 multipliers
// per class. Numbers chosen by this design: the 32-bit logit width and the signed
// two's-complement weight format.
package reca_pkg;

  // Image and bit-plane geometry.
  localparam int unsigned IMG_W   = 28;  // pixels per row (columns)
  localparam int unsigned IMG_H   = 28;  // rows
  localparam int unsigned BITS    = 8;   // bit planes per pixel (grayscale depth)

  // Reservoir and read-out.
  localparam int unsigned M_ITER  = 16;  // automaton iterations; slices k = 0 .. M_ITER are read out
  localparam int unsigned Q       = 10;  // classes (logit registers)
  localparam int unsigned WBITS   = 8;   // weight width
  localparam int unsigned DSP     = 4;   // multipliers per class
  localparam int unsigned POOL    = 2;   // max-pooling window and stride
  localparam int unsigned LOGIT_W = 32;  // accumulator width

  // Number of pooled pixels of one slice for a given image size.
  function automatic int unsigned pooled_count(int unsigned w, int unsigned h);
    return (w / POOL) * (h / POOL);
  endfunction

  // Number of multiply-accumulate cycles one slice needs with d multipliers per class.
  function automatic int unsigned groups_per_slice(int unsigned w, int unsigned h, int unsigned d);
    return (pooled_count(w, h) + d - 1) / d;
  endfunction

  // Signed 8-bit weight.
  typedef logic signed [WBITS-1:0] weight_t;

  // Unsigned 8-bit pixel (bit l is bit plane l).
  typedef logic [BITS-1:0] pixel_t;

  // Controller states.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,  // waiting for start; logits hold the last result
    ST_RUN  = 2'd1,  // accumulating slice after slice
    ST_DONE = 2'd2   // one cycle: logits and class are valid
  } ctrl_state_e;

endpackage
