// stereo_pkg: constants and types shared by the stereo pipeline.
//
// The numbers that come from the paper are the 720p frame (1280x720), the
// 9x9 single-layer convolution with 32 output channels (one 32-bit binary
// descriptor per pixel) and int8 weights, biases and activations. The
// disparity range, box size, pixel width and all stream formats are this
// design's own choices.
package stereo_pkg;

  // Paper: 720p input, 9x9 kernel, 32 output channels -> 32-bit descriptor.
  localparam int unsigned DEF_IMG_W     = 1280;
  localparam int unsigned DEF_IMG_H     = 720;
  localparam int unsigned DEF_KSIZE     = 9;
  localparam int unsigned DESC_BITS = 32;

  // Own choices: 8-bit grey pixels, 64 disparities, 3x3 box filter,
  // 4 fractional bits of sub-pixel disparity.
  localparam int unsigned PIX_W     = 8;
  localparam int unsigned DEF_N_DISP    = 64;
  localparam int unsigned DEF_BOX       = 3;
  localparam int unsigned DEF_FRAC      = 4;
  localparam int unsigned X_W       = 16;  // column index width of every stream

  typedef logic [DESC_BITS-1:0] desc_t;
  typedef logic [PIX_W-1:0]     pix_t;
  typedef logic [X_W-1:0]       xcoord_t;

  // Pass of the stereo vision accelerator: direct (left view is the
  // reference) or swapped and mirrored (right view is the reference).
  typedef enum logic {PASS_LR = 1'b0, PASS_RL = 1'b1} pass_e;

  // Side-band that travels with every position of a branch stream.
  typedef struct packed {
    pass_e   pass;       // which pass the position belongs to
    logic    lr_line;    // this line is processed in both passes
    logic    first_row;  // first row of a frame
    logic    pad;        // position past the end of the line (flush)
    xcoord_t x;          // position in the (possibly mirrored) line
  } tag_t;

endpackage
