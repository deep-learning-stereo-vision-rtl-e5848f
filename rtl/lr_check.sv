// lr_check: left-right consistency check that merges the left-reference
// and right-reference disparity maps into the final disparity map.
//
// How it works. Disparities of the direct pass are stored per column,
// those of the mirrored pass at their image column W-1-x, in one of two
// line banks. When a line is complete the bank is read out in column
// order while the next line fills the other bank. For left column x with
// integer disparity dl, the right-reference disparity dr at column x-dl is
// looked up; the pixel is kept when |dr - dl| <= TH and invalidated
// (o_ok = 0, o_disp = 0) otherwise, or when x-dl falls left of the image.
// Lines processed without the mirrored pass (lr_mode off) are passed
// through with o_ok = 1.
//
// Interface: lr_*/rl_* from the branch, one value per cycle at most, no
// back-pressure. Output one disparity per cycle during read-out:
// o_disp (FRAC fractional bits), o_ok, o_x, o_sof (first column of the
// first row), o_eol (last column). Timing: read-out of a line starts the
// cycle after its last disparity arrives and lasts W cycles, shorter than
// the W+R cycles the next line needs, so the two banks never overrun.
//
// From the paper: checking the two maps for consistency and merging them
// (Fig. 1). The threshold TH = 1, the use of the integer disparities for
// the test and the zero value of invalidated pixels are this design's
// choices.
module lr_check
  import stereo_pkg::*;
#(
  parameter int unsigned N    = stereo_pkg::DEF_N_DISP,
  parameter int unsigned W    = stereo_pkg::DEF_IMG_W - stereo_pkg::DEF_KSIZE + 1,
  parameter int unsigned FRAC = stereo_pkg::DEF_FRAC,
  parameter int unsigned DW   = $clog2(N) + FRAC,
  parameter int unsigned TH   = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          lr_valid,
  input  xcoord_t       lr_x,
  input  logic [DW-1:0] lr_disp,
  input  logic [$clog2(N)-1:0] lr_dint,
  input  logic          lr_first,
  input  logic          lr_lr,
  input  logic          rl_valid,
  input  xcoord_t       rl_x,
  input  logic [$clog2(N)-1:0] rl_dint,
  output logic          o_valid,
  output xcoord_t       o_x,
  output logic [DW-1:0] o_disp,
  output logic          o_ok,
  output logic          o_sof,
  output logic          o_eol
);
  localparam int unsigned NW = $clog2(N);
  localparam int unsigned AW = $clog2(W);

  logic [DW-1:0] dl_mem [2][W];
  logic [NW-1:0] di_mem [2][W];
  logic [NW-1:0] dr_mem [2][W];
  logic [1:0]    line_first, line_lr, ready;
  logic          wb, db, draining;
  logic [AW-1:0] dx;
  logic          lr_done, rl_done;

  assign lr_done = lr_valid && lr_x == xcoord_t'(W - 1) && !lr_lr;
  assign rl_done = rl_valid && rl_x == xcoord_t'(W - 1);

  always_ff @(posedge clk) begin
    if (lr_valid) begin
      dl_mem[wb][AW'(lr_x)] <= lr_disp;
      di_mem[wb][AW'(lr_x)] <= lr_dint;
    end
    if (rl_valid) dr_mem[wb][AW'(W - 1) - AW'(rl_x)] <= rl_dint;
  end

  // consistency decision for column dx of bank db
  logic [DW-1:0] dl;
  logic [NW-1:0] di, dr;
  logic          ok;
  logic [AW:0]   xr;
  always_comb begin
    dl = dl_mem[db][dx];
    di = di_mem[db][dx];
    xr = (AW+1)'(dx) - (AW+1)'(di);
    dr = dr_mem[db][xr[AW-1:0]];
    if (!line_lr[db]) ok = 1'b1;
    else if ((AW+1)'(di) > (AW+1)'(dx)) ok = 1'b0;
    else ok = ((dr > di) ? dr - di : di - dr) <= NW'(TH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= 1'b0; db <= 1'b0; draining <= 1'b0; dx <= '0;
      ready <= '0; line_first <= '0; line_lr <= '0;
      o_valid <= 1'b0; o_x <= '0; o_disp <= '0; o_ok <= 1'b0;
      o_sof <= 1'b0; o_eol <= 1'b0;
    end else begin
      if (lr_valid && lr_x == '0) begin
        line_first[wb] <= lr_first;
        line_lr[wb]    <= lr_lr;
      end
      if (lr_done || rl_done) begin
        ready[wb] <= 1'b1;
        wb <= ~wb;
      end
      o_valid <= draining;
      if (draining) begin
        o_x    <= xcoord_t'(dx);
        o_disp <= ok ? dl : '0;
        o_ok   <= ok;
        o_sof  <= line_first[db] && dx == '0;
        o_eol  <= dx == AW'(W - 1);
        if (dx == AW'(W - 1)) begin
          draining <= 1'b0;
          ready[db] <= 1'b0;
          db <= ~db;
          dx <= '0;
        end else dx <= dx + 1'b1;
      end else if (ready[db]) begin
        draining <= 1'b1;
        dx <= '0;
      end
    end
  end

  // a line may only complete into a bank that has been read out
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (lr_done || rl_done) |-> !ready[wb]);
endmodule
