// sva: the stereo vision accelerator. It receives the binary descriptor
// maps of both views (one network pass per stereo pair) and produces the
// disparity map:
//   swap_flip -> branch (cost, box filter, SGM, argmin) -> lr_check
// In left-right check mode every descriptor line is matched twice, once
// with the left view as reference and once swapped and mirrored with the
// right view as reference, and the two results are checked against each
// other. With lr_mode off only the direct pass runs.
//
// The view multiplexer sits outside this module, as in the block diagram:
// view_sel, o_lpix and o_rpix go out to it and its output returns on
// ref_pix in the same cycle.
//
// Interface: l_*/r_* valid/ready descriptor streams with the centre pixel
// of each descriptor; o_* one disparity per cycle in bursts of W
// (o_disp with FRAC fractional bits, o_ok = 0 for invalidated pixels).
// Throughput: 2(W+R) cycles per line in lr_mode, W+R otherwise, i.e. about
// one disparity every two clock cycles with the consistency check on.
//
// The module split and the two-pass scheme follow the paper's block
// diagram and its statement that the network runs once per stereo pair;
// configuration ports and widths are this design's choices.
module sva
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
  input  logic          lr_mode,
  input  logic [PW-1:0] p1,
  input  logic [PW-1:0] p2,
  input  logic [PW-1:0] p2_edge,
  input  pix_t          edge_th,
  input  logic          l_valid,
  output logic          l_ready,
  input  desc_t         l_desc,
  input  pix_t          l_pix,
  input  logic          l_sof,
  input  logic          r_valid,
  output logic          r_ready,
  input  desc_t         r_desc,
  input  pix_t          r_pix,
  input  logic          r_sof,
  output logic          view_sel,
  output pix_t          o_lpix,
  output pix_t          o_rpix,
  input  pix_t          ref_pix,
  output logic          o_valid,
  output xcoord_t       o_x,
  output logic [DW-1:0] o_disp,
  output logic          o_ok,
  output logic          o_sof,
  output logic          o_eol
);
  localparam int unsigned NW = $clog2(N);

  logic          s_valid;
  tag_t          s_tag;
  desc_t         s_ref, s_tgt;

  logic          lr_valid, lr_first, lr_lr, rl_valid, rl_first;
  xcoord_t       lr_x, rl_x;
  logic [DW-1:0] lr_disp, rl_disp;
  logic [NW-1:0] lr_dint, rl_dint;

  swap_flip #(.W(W), .R(K / 2)) u_swap (
    .clk, .rst_n, .lr_mode,
    .l_valid, .l_ready, .l_desc, .l_pix, .l_sof,
    .r_valid, .r_ready, .r_desc, .r_pix, .r_sof,
    .o_valid(s_valid), .o_tag(s_tag), .o_ref(s_ref), .o_tgt(s_tgt),
    .o_lpix, .o_rpix, .view_sel
  );

  branch #(.N(N), .W(W), .K(K), .FRAC(FRAC), .PW(PW), .DW(DW)) u_branch (
    .clk, .rst_n, .p1, .p2, .p2_edge, .edge_th,
    .i_valid(s_valid), .i_tag(s_tag), .i_ref(s_ref), .i_tgt(s_tgt), .i_pix(ref_pix),
    .lr_valid, .lr_x, .lr_disp, .lr_dint, .lr_first, .lr_lr,
    .rl_valid, .rl_x, .rl_disp, .rl_dint, .rl_first
  );

  lr_check #(.N(N), .W(W), .FRAC(FRAC), .DW(DW)) u_lrc (
    .clk, .rst_n,
    .lr_valid, .lr_x, .lr_disp, .lr_dint, .lr_first, .lr_lr,
    .rl_valid, .rl_x, .rl_dint,
    .o_valid, .o_x, .o_disp, .o_ok, .o_sof, .o_eol
  );
endmodule
