// branch: the matching core of the stereo vision accelerator. It turns a
// stream of (reference descriptor, target descriptor, reference pixel)
// positions into one disparity per position:
//   hamming_cost -> box_filter -> sgm -> wta_subpixel
// The same hardware serves both passes of the left-right check; all state
// that spans lines (box-filter rows, SGM paths from the row above) is kept per pass, so
// direct and mirrored lines may alternate freely.
//
// The result leaves on one of two output channels according to the pass:
// lr_* carries the left-reference disparities (direct pass), rl_* the
// right-reference disparities (mirrored pass, so rl_x counts from the
// right edge of the image). *_x is the column of the disparity in its
// pass, *_disp the sub-pixel disparity (FRAC fractional bits), *_dint the
// integer argmin, *_first the first-row flag and *_lr whether the line has
// both passes.
//
// Timing: one position per cycle in, W+R positions per pass, W
// disparities per pass out; latency R + 4 cycles.
//
// The stage order (cost, box filter, SGM, argmin) and the two output
// streams into the consistency check follow the paper's description and
// block diagram; the split into the stages' widths is this design's.
module branch
  import stereo_pkg::*;
#(
  parameter int unsigned N    = stereo_pkg::DEF_N_DISP,
  parameter int unsigned W    = stereo_pkg::DEF_IMG_W - stereo_pkg::DEF_KSIZE + 1,
  parameter int unsigned K    = stereo_pkg::DEF_BOX,
  parameter int unsigned FRAC = stereo_pkg::DEF_FRAC,
  parameter int unsigned PW   = 8,
  parameter int unsigned DW   = $clog2(N) + FRAC
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [PW-1:0] p1,
  input  logic [PW-1:0] p2,
  input  logic [PW-1:0] p2_edge,
  input  pix_t          edge_th,
  input  logic          i_valid,
  input  tag_t          i_tag,
  input  desc_t         i_ref,
  input  desc_t         i_tgt,
  input  pix_t          i_pix,
  output logic          lr_valid,
  output xcoord_t       lr_x,
  output logic [DW-1:0] lr_disp,
  output logic [$clog2(N)-1:0] lr_dint,
  output logic          lr_first,
  output logic          lr_lr,
  output logic          rl_valid,
  output xcoord_t       rl_x,
  output logic [DW-1:0] rl_disp,
  output logic [$clog2(N)-1:0] rl_dint,
  output logic          rl_first
);
  localparam int unsigned CW = $clog2(DESC_BITS + 1);
  localparam int unsigned BW = CW + $clog2(K * K);
  localparam int unsigned LW = ((BW > PW) ? BW : PW) + 1;
  localparam int unsigned SW = LW + 2;

  logic            c_valid, b_valid, s_valid, d_valid;
  tag_t            c_tag, b_tag, s_tag, d_tag;
  pix_t            c_pix, b_pix;
  logic [N*CW-1:0] c_cost;
  logic [N*BW-1:0] b_box;
  logic [N*SW-1:0] s_sum;
  logic [DW-1:0]   d_disp;
  logic [$clog2(N)-1:0] d_dint;

  hamming_cost #(.N(N), .CW(CW)) u_cost (
    .clk, .rst_n, .i_valid, .i_tag, .i_ref, .i_tgt, .i_pix,
    .o_valid(c_valid), .o_tag(c_tag), .o_pix(c_pix), .o_cost(c_cost)
  );

  box_filter #(.N(N), .W(W), .K(K), .CW(CW), .BW(BW)) u_box (
    .clk, .rst_n, .i_valid(c_valid), .i_tag(c_tag), .i_pix(c_pix), .i_cost(c_cost),
    .o_valid(b_valid), .o_tag(b_tag), .o_pix(b_pix), .o_box(b_box)
  );

  sgm #(.N(N), .W(W), .BW(BW), .PW(PW), .LW(LW), .SW(SW)) u_sgm (
    .clk, .rst_n, .p1, .p2, .p2_edge, .edge_th,
    .i_valid(b_valid), .i_tag(b_tag), .i_pix(b_pix), .i_cost(b_box),
    .o_valid(s_valid), .o_tag(s_tag), .o_sum(s_sum)
  );

  wta_subpixel #(.N(N), .SW(SW), .FRAC(FRAC), .DW(DW)) u_wta (
    .clk, .rst_n, .i_valid(s_valid), .i_tag(s_tag), .i_sum(s_sum),
    .o_valid(d_valid), .o_tag(d_tag), .o_disp(d_disp), .o_dint(d_dint)
  );

  always_comb begin
    lr_valid = d_valid && d_tag.pass == PASS_LR;
    rl_valid = d_valid && d_tag.pass == PASS_RL;
    lr_x = d_tag.x;       rl_x = d_tag.x;
    lr_disp = d_disp;     rl_disp = d_disp;
    lr_dint = d_dint;     rl_dint = d_dint;
    lr_first = d_tag.first_row;
    rl_first = d_tag.first_row;
    lr_lr = d_tag.lr_line;
  end
endmodule
