// view_mux: the view multiplexer beside the stereo vision accelerator.
// It hands the matching branch the image of whichever view is the reference
// of the current pass: the left view in the direct pass (sel = 0) and the
// right view in the swapped pass (sel = 1), whose select comes from the
// swap/flip unit. The branch uses that image to adapt its smoothness
// penalty at intensity edges.
//
// Combinational, no clock. The multiplexer and its select come from the
// paper's block diagram; pixel width is this design's choice.
module view_mux
  import stereo_pkg::*;
(
  input  logic sel,
  input  pix_t left_pix,
  input  pix_t right_pix,
  output pix_t ref_pix
);
  always_comb ref_pix = sel ? right_pix : left_pix;
endmodule
