// stereo_top: the complete stereo depth module. Two submodules of the
// neural network accelerator turn the left and right camera images into
// 32-bit binary descriptor maps with the same 9x9 single-layer network;
// the stereo vision accelerator matches them (Hamming cost, box filter,
// SGM, argmin with sub-pixel refinement) twice, left- and right-referenced,
// and keeps only disparities that pass the left-right consistency check.
// The view multiplexer feeds the accelerator the image of the current
// reference view.
//
// Interface. cfg_*: network coefficients, broadcast to both submodules
// (the network is shared by both views). l_*/r_*: valid/ready 8-bit pixel
// streams of IMG_W x IMG_H frames in raster order, *_sof on pixel (0,0);
// both views must be fed the same frame. lr_mode: consistency check on
// (latched at each frame start). p1, p2, p2_edge, edge_th: SGM penalties.
// o_*: disparity map of (IMG_W-8) x (IMG_H-8) values, one row burst at a
// time, o_disp with FRAC fractional bits, o_ok = 0 where invalidated.
//
// Timing. The network submodules take one pixel per cycle; the matching
// needs 2(W+R) cycles per row in lr_mode (W = IMG_W-8, R = 1), so with the
// check on the cameras are throttled to about one pixel every two cycles,
// and a disparity leaves every two cycles once the pipeline is full.
//
// The structure follows the paper's block diagram; parameter defaults are
// the paper's 720p frame and 32-bit descriptor, and this design's choice of
// 64 disparities and a 3x3 box.
module stereo_top
  import stereo_pkg::*;
#(
  parameter int unsigned IMG_W = stereo_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H = stereo_pkg::DEF_IMG_H,
  parameter int unsigned N     = stereo_pkg::DEF_N_DISP,
  parameter int unsigned K     = stereo_pkg::DEF_BOX,
  parameter int unsigned FRAC  = stereo_pkg::DEF_FRAC,
  parameter int unsigned M_W   = 8,
  parameter int unsigned H_W   = 5,
  parameter int unsigned PW    = 8,
  parameter int unsigned DW    = $clog2(N) + FRAC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_w_we,
  input  logic [4:0]        cfg_ch,
  input  logic [6:0]        cfg_tap,
  input  logic signed [7:0] cfg_w,
  input  logic              cfg_b_we,
  input  logic signed [7:0] cfg_b,
  input  logic              cfg_q_we,
  input  logic [M_W-1:0]    cfg_m,
  input  logic [H_W-1:0]    cfg_h,
  input  logic              lr_mode,
  input  logic [PW-1:0]     p1,
  input  logic [PW-1:0]     p2,
  input  logic [PW-1:0]     p2_edge,
  input  pix_t              edge_th,
  input  logic              l_valid,
  output logic              l_ready,
  input  pix_t              l_pix,
  input  logic              l_sof,
  input  logic              r_valid,
  output logic              r_ready,
  input  pix_t              r_pix,
  input  logic              r_sof,
  output logic              o_valid,
  output xcoord_t           o_x,
  output logic [DW-1:0]     o_disp,
  output logic              o_ok,
  output logic              o_sof,
  output logic              o_eol
);
  localparam int unsigned KS = stereo_pkg::DEF_KSIZE;
  localparam int unsigned W  = IMG_W - KS + 1;

  logic  ld_valid, ld_ready, ld_sof, ld_eol;
  logic  rd_valid, rd_ready, rd_sof, rd_eol;
  desc_t ld_desc, rd_desc;
  pix_t  ld_pix, rd_pix;
  logic  view_sel;
  pix_t  sel_lpix, sel_rpix, ref_pix;

  desc_cnn #(.IMG_W(IMG_W), .IMG_H(IMG_H), .K(KS), .CH(DESC_BITS), .M_W(M_W), .H_W(H_W))
  u_nna_left (
    .clk, .rst_n,
    .cfg_w_we, .cfg_ch, .cfg_tap, .cfg_w, .cfg_b_we, .cfg_b, .cfg_q_we, .cfg_m, .cfg_h,
    .in_valid(l_valid), .in_ready(l_ready), .in_pix(l_pix), .in_sof(l_sof),
    .out_valid(ld_valid), .out_ready(ld_ready), .out_desc(ld_desc), .out_pix(ld_pix),
    .out_sof(ld_sof), .out_eol(ld_eol)
  );

  desc_cnn #(.IMG_W(IMG_W), .IMG_H(IMG_H), .K(KS), .CH(DESC_BITS), .M_W(M_W), .H_W(H_W))
  u_nna_right (
    .clk, .rst_n,
    .cfg_w_we, .cfg_ch, .cfg_tap, .cfg_w, .cfg_b_we, .cfg_b, .cfg_q_we, .cfg_m, .cfg_h,
    .in_valid(r_valid), .in_ready(r_ready), .in_pix(r_pix), .in_sof(r_sof),
    .out_valid(rd_valid), .out_ready(rd_ready), .out_desc(rd_desc), .out_pix(rd_pix),
    .out_sof(rd_sof), .out_eol(rd_eol)
  );

  view_mux u_mux (.sel(view_sel), .left_pix(sel_lpix), .right_pix(sel_rpix), .ref_pix);

  sva #(.N(N), .W(W), .K(K), .FRAC(FRAC), .PW(PW), .DW(DW)) u_sva (
    .clk, .rst_n, .lr_mode, .p1, .p2, .p2_edge, .edge_th,
    .l_valid(ld_valid), .l_ready(ld_ready), .l_desc(ld_desc), .l_pix(ld_pix), .l_sof(ld_sof),
    .r_valid(rd_valid), .r_ready(rd_ready), .r_desc(rd_desc), .r_pix(rd_pix), .r_sof(rd_sof),
    .view_sel, .o_lpix(sel_lpix), .o_rpix(sel_rpix), .ref_pix,
    .o_valid, .o_x, .o_disp, .o_ok, .o_sof, .o_eol
  );

  // the two views advance in lockstep: a row's end leaves both submodules together
  a_rows_paired: assert property (@(posedge clk) disable iff (!rst_n)
    (ld_valid && ld_ready && ld_eol && rd_valid && rd_ready) |-> rd_eol);
endmodule
