// swap_flip: front of the stereo vision accelerator. It turns one pass of
// the neural network (one descriptor map per view) into the two matching
// passes needed by the left-right consistency check.
//
// How it works. Each view's descriptor stream (with the view pixel at each
// descriptor's centre) is written into one of two line banks per view.
// When both views have filled the same bank, that line is replayed:
//   pass 0 (PASS_LR): positions x = 0 .. W-1+R, reference = left[x],
//                     target = right[x]                   (left-reference)
//   pass 1 (PASS_RL): positions x = 0 .. W-1+R, reference = right[W-1-x],
//                     target = left[W-1-x]     (swapped and mirrored)
// Mirroring makes a right-reference search, which looks to the right in
// the left view, look to the left like the direct pass, so one matching
// branch serves both. The last R positions of every pass are flush
// positions (tag.pad) that let the centred box filter finish the line.
// Pass 1 is only replayed when lr_mode was set at the first row of the
// frame (the mode is latched per frame). view_sel tells the view
// multiplexer which image belongs to the current reference.
//
// Interface. l_*/r_*: valid/ready descriptor streams (sof marks the first
// descriptor of a frame). o_*: one position per cycle, no back-pressure.
// Timing: a line of W descriptors leaves as W+R (lr_mode=0) or 2(W+R)
// (lr_mode=1) consecutive positions, starting two cycles after both views
// have delivered the line; while a line is replayed the next is accepted.
//
// From the paper: the swap/flip function and the select to the view
// multiplexer (Fig. 1), a single network pass per stereo pair. The
// double-buffered line banks, flush positions and the per-frame mode latch
// are this design's choices.
module swap_flip
  import stereo_pkg::*;
#(
  parameter int unsigned W = stereo_pkg::DEF_IMG_W - stereo_pkg::DEF_KSIZE + 1,
  parameter int unsigned R = stereo_pkg::DEF_BOX / 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    lr_mode,
  input  logic    l_valid,
  output logic    l_ready,
  input  desc_t   l_desc,
  input  pix_t    l_pix,
  input  logic    l_sof,
  input  logic    r_valid,
  output logic    r_ready,
  input  desc_t   r_desc,
  input  pix_t    r_pix,
  input  logic    r_sof,
  output logic    o_valid,
  output tag_t    o_tag,
  output desc_t   o_ref,
  output desc_t   o_tgt,
  output pix_t    o_lpix,
  output pix_t    o_rpix,
  output logic    view_sel
);
  localparam int unsigned AW = $clog2(W + R + 1);

  desc_t ldesc [2][W];
  desc_t rdesc [2][W];
  pix_t  lpix  [2][W];
  pix_t  rpix  [2][W];

  logic [AW-1:0] lwp, rwp;       // write pointers
  logic          lwb, rwb;       // write bank per view
  logic [1:0]    lfull, rfull;   // bank holds a complete line
  logic [1:0]    first;          // bank holds the first row of a frame

  assign l_ready = !lfull[lwb];
  assign r_ready = !rfull[rwb];

  // reader state
  logic          busy, rb, pass, lr_frame, lr_line;
  logic [AW-1:0] rx;
  logic          start, pass_end;
  logic [AW-1:0] idx;

  logic          line_end, nrb;
  assign pass_end = busy && (rx == AW'(W + R - 1));
  assign line_end = pass_end && !(lr_line && !pass);
  // next line to replay; a full bank starts right after the previous line
  assign nrb      = busy ? ~rb : rb;
  assign start    = (!busy || line_end) && lfull[nrb] && rfull[nrb];

  always_ff @(posedge clk) begin
    if (l_valid && l_ready) begin
      ldesc[lwb][lwp] <= l_desc;
      lpix[lwb][lwp]  <= l_pix;
    end
    if (r_valid && r_ready) begin
      rdesc[rwb][rwp] <= r_desc;
      rpix[rwb][rwp]  <= r_pix;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lwp <= '0; rwp <= '0; lwb <= 1'b0; rwb <= 1'b0;
      lfull <= '0; rfull <= '0; first <= '0;
      busy <= 1'b0; rb <= 1'b0; pass <= 1'b0; rx <= '0;
      lr_frame <= 1'b0; lr_line <= 1'b0;
    end else begin
      if (l_valid && l_ready) begin
        if (l_sof || lwp == '0) first[lwb] <= l_sof;
        if (lwp == AW'(W - 1)) begin
          lwp <= '0;
          lfull[lwb] <= 1'b1;
          lwb <= ~lwb;
        end else lwp <= lwp + 1'b1;
      end
      if (r_valid && r_ready) begin
        if (rwp == AW'(W - 1)) begin
          rwp <= '0;
          rfull[rwb] <= 1'b1;
          rwb <= ~rwb;
        end else rwp <= rwp + 1'b1;
      end
      if (line_end) begin
        lfull[rb] <= 1'b0;
        rfull[rb] <= 1'b0;
        rb <= ~rb;
      end
      if (start) begin
        busy <= 1'b1;
        pass <= 1'b0;
        rx   <= '0;
        if (first[nrb]) begin
          lr_frame <= lr_mode;
          lr_line  <= lr_mode;
        end else lr_line <= lr_frame;
      end else if (busy) begin
        if (pass_end) begin
          rx <= '0;
          if (!line_end) pass <= 1'b1;
          else busy <= 1'b0;
        end else rx <= rx + 1'b1;
      end
    end
  end

  // read side (registered outputs)
  always_comb idx = pass ? AW'(W - 1) - rx : rx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_tag <= '0;
      o_ref <= '0;
      o_tgt <= '0;
      o_lpix <= '0;
      o_rpix <= '0;
      view_sel <= 1'b0;
    end else begin
      o_valid <= busy;
      if (busy) begin
        o_tag.pass      <= pass_e'(pass);
        o_tag.lr_line   <= lr_line;
        o_tag.first_row <= first[rb];
        o_tag.pad       <= rx >= AW'(W);
        o_tag.x         <= xcoord_t'(rx);
        view_sel        <= pass;
        if (rx < AW'(W)) begin
          o_ref  <= pass ? rdesc[rb][idx] : ldesc[rb][idx];
          o_tgt  <= pass ? ldesc[rb][idx] : rdesc[rb][idx];
          o_lpix <= lpix[rb][idx];
          o_rpix <= rpix[rb][idx];
        end else begin
          o_ref  <= '0;
          o_tgt  <= '0;
          o_lpix <= '0;
          o_rpix <= '0;
        end
      end
    end
  end

  // a right-view stream must mark its frame start together with the left
  a_sof_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (r_valid && r_ready && r_sof) |-> (rwp == '0));
endmodule
