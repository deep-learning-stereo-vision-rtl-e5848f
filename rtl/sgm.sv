// sgm: semi-global matching aggregation of the box-filtered cost volume.
//
// For every position p and disparity d, each path r carries
//   L_r(p,d) = C(p,d) + min( L_r(p-r,d),
//                            L_r(p-r,d-1) + P1, L_r(p-r,d+1) + P1,
//                            min_k L_r(p-r,k) + P2' ) - min_k L_r(p-r,k)
// and the aggregated cost is S(p,d) = sum_r L_r(p,d). This streaming
// version runs the four paths that a raster scan can evaluate with one
// position per cycle: along the line in scan direction (previous position,
// kept in registers), and from the previous row straight above, above-left
// and above-right (three line memories per pass). Above-left is read from
// the line memory one position earlier, before it is overwritten, and held
// in a register; above-right is read one position ahead. In the mirrored
// pass left and right swap in image coordinates. P2' is P2 lowered to
// P2_EDGE where the reference image changes by more than EDGE_TH along the
// path (never below P1), as in the original SGM formulation that adapts P2
// to intensity edges. A path starts with L = C where its previous position
// lies outside the image (line start, line end for above-right, first row).
//
// Interface: one position per cycle, no back-pressure, positions x = 0..W-1
// of each pass in order. i_cost[d] BW bits; o_sum[d] SW bits. The
// penalties are static configuration inputs. Latency one cycle.
//
// From the paper: "Semi Global Matching (SGM)" after the box filter. The
// paper gives no path set, penalties or widths; the four raster paths, the
// edge-adaptive P2 and all widths are this design's choices.
module sgm
  import stereo_pkg::*;
#(
  parameter int unsigned N   = stereo_pkg::DEF_N_DISP,
  parameter int unsigned W   = stereo_pkg::DEF_IMG_W - stereo_pkg::DEF_KSIZE + 1,
  parameter int unsigned BW  = 10,
  parameter int unsigned PW  = 8,
  parameter int unsigned LW  = ((BW > PW) ? BW : PW) + 1,
  parameter int unsigned SW  = LW + 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PW-1:0]   p1,
  input  logic [PW-1:0]   p2,
  input  logic [PW-1:0]   p2_edge,
  input  pix_t            edge_th,
  input  logic            i_valid,
  input  tag_t            i_tag,
  input  pix_t            i_pix,
  input  logic [N*BW-1:0] i_cost,
  output logic            o_valid,
  output tag_t            o_tag,
  output logic [N*SW-1:0] o_sum
);
  localparam int unsigned AW = $clog2(W);

  // previous row, per pass
  logic [N*LW-1:0] lv_mem [2][W];
  pix_t            pv_mem [2][W];
  // previous position of the line path
  logic [N*LW-1:0] lh_prev;
  pix_t            ph_prev;

  logic [AW-1:0]   xa;
  assign xa = AW'(i_tag.x);

  // one path step: prev vector, previous pixel, whether the path starts here
  function automatic logic [N*LW-1:0] step(input logic [N*LW-1:0] prev,
                                           input logic start,
                                           input logic [N*BW-1:0] c,
                                           input logic [PW-1:0] pen1,
                                           input logic [PW-1:0] pen2);
    logic [N*LW-1:0] res;
    logic [LW:0] mp, best, cand;
    mp = '1;
    for (int d = 0; d < N; d++)
      if ((LW+1)'(prev[d*LW +: LW]) < mp) mp = (LW+1)'(prev[d*LW +: LW]);
    for (int d = 0; d < N; d++) begin
      if (start) res[d*LW +: LW] = LW'(c[d*BW +: BW]);
      else begin
        best = (LW+1)'(prev[d*LW +: LW]);
        if (d > 0) begin
          cand = (LW+1)'(prev[(d-1)*LW +: LW]) + (LW+1)'(pen1);
          if (cand < best) best = cand;
        end
        if (d < N - 1) begin
          cand = (LW+1)'(prev[(d+1)*LW +: LW]) + (LW+1)'(pen1);
          if (cand < best) best = cand;
        end
        cand = mp + (LW+1)'(pen2);
        if (cand < best) best = cand;
        res[d*LW +: LW] = LW'((LW+1)'(c[d*BW +: BW]) + best - mp);
      end
    end
    return res;
  endfunction

  function automatic logic [PW-1:0] pen2_of(input pix_t a, input pix_t b,
                                            input logic [PW-1:0] pen1,
                                            input logic [PW-1:0] pen2,
                                            input logic [PW-1:0] pen2e,
                                            input pix_t th);
    logic [PW-1:0] r;
    pix_t diff;
    diff = (a > b) ? a - b : b - a;
    r = (diff > th) ? pen2e : pen2;
    if (r < pen1) r = pen1;
    return r;
  endfunction

  // previous row, above-left and above-right paths, per pass
  logic [N*LW-1:0] ll_mem [2][W];
  logic [N*LW-1:0] lr_mem [2][W];

  logic [N*LW-1:0] lh, lv, ll, lr, lv_prev, ll_cur, lr_prev, ll_hold;
  pix_t            pv_prev, pr_prev, pl_hold;
  logic [PW-1:0]   p2h, p2v, p2l, p2r;
  logic [N*SW-1:0] s;
  logic [AW-1:0]   xn;
  logic            last_x;

  assign last_x = xa == AW'(W - 1);
  assign xn     = last_x ? xa : xa + 1'b1;

  always_comb begin
    lv_prev = lv_mem[i_tag.pass][xa];
    pv_prev = pv_mem[i_tag.pass][xa];
    ll_cur  = ll_mem[i_tag.pass][xa];       // row above at x, kept for x+1
    lr_prev = lr_mem[i_tag.pass][xn];       // row above at x+1
    pr_prev = pv_mem[i_tag.pass][xn];
    p2h = pen2_of(i_pix, ph_prev, p1, p2, p2_edge, edge_th);
    p2v = pen2_of(i_pix, pv_prev, p1, p2, p2_edge, edge_th);
    p2l = pen2_of(i_pix, pl_hold, p1, p2, p2_edge, edge_th);
    p2r = pen2_of(i_pix, pr_prev, p1, p2, p2_edge, edge_th);
    lh = step(lh_prev, i_tag.x == '0, i_cost, p1, p2h);
    lv = step(lv_prev, i_tag.first_row, i_cost, p1, p2v);
    ll = step(ll_hold, i_tag.first_row || i_tag.x == '0, i_cost, p1, p2l);
    lr = step(lr_prev, i_tag.first_row || last_x, i_cost, p1, p2r);
    for (int d = 0; d < N; d++)
      s[d*SW +: SW] = SW'(lh[d*LW +: LW]) + SW'(lv[d*LW +: LW])
                    + SW'(ll[d*LW +: LW]) + SW'(lr[d*LW +: LW]);
  end

  always_ff @(posedge clk) begin
    if (i_valid) begin
      lv_mem[i_tag.pass][xa] <= lv;
      ll_mem[i_tag.pass][xa] <= ll;
      lr_mem[i_tag.pass][xa] <= lr;
      pv_mem[i_tag.pass][xa] <= i_pix;
      lh_prev <= lh;
      ph_prev <= i_pix;
      ll_hold <= ll_cur;
      pl_hold <= pv_prev;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_tag   <= '0;
      o_sum   <= '0;
    end else begin
      o_valid <= i_valid;
      if (i_valid) begin
        o_tag <= i_tag;
        o_sum <= s;
      end
    end
  end
endmodule
