// wta_subpixel: disparity selection. Picks the disparity with the lowest
// aggregated cost (winner takes all, the lowest disparity on a tie) and
// refines it to sub-pixel precision by fitting a parabola through the
// costs at d-1, d and d+1:
//   offset = (S[d-1] - S[d+1]) / (2 * (S[d-1] + S[d+1] - 2 S[d]))
// Because S[d] is the minimum, |offset| <= 1/2. The offset is rounded
// toward zero to FRAC fractional bits. At d = 0, d = N-1 or a flat
// neighbourhood the offset is 0.
//
// Interface: one position per cycle. o_disp is unsigned fixed point with
// FRAC fractional bits (d*2^FRAC + offset); o_dint is the integer argmin.
// Latency one cycle.
//
// From the paper: argmin disparity selection and a sub-pixel capable
// output. The parabola fit and FRAC = 4 are this design's choices.
module wta_subpixel
  import stereo_pkg::*;
#(
  parameter int unsigned N    = stereo_pkg::DEF_N_DISP,
  parameter int unsigned SW   = 12,
  parameter int unsigned FRAC = stereo_pkg::DEF_FRAC,
  parameter int unsigned DW   = $clog2(N) + FRAC
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             i_valid,
  input  tag_t             i_tag,
  input  logic [N*SW-1:0]  i_sum,
  output logic             o_valid,
  output tag_t             o_tag,
  output logic [DW-1:0]    o_disp,
  output logic [$clog2(N)-1:0] o_dint
);
  localparam int unsigned NW = $clog2(N);

  logic [NW-1:0]   best_d;
  logic [SW-1:0]   best_s, sa, sb, sc;
  logic [SW+1:0]   num, den;
  logic [SW+FRAC+1:0] q;
  logic            neg;
  logic [DW-1:0]   disp;

  always_comb begin
    best_d = '0;
    best_s = i_sum[SW-1:0];
    for (int d = 1; d < N; d++)
      if (i_sum[d*SW +: SW] < best_s) begin
        best_s = i_sum[d*SW +: SW];
        best_d = NW'(d);
      end
    sa = '0; sb = best_s; sc = '0;
    num = '0; den = '0; neg = 1'b0; q = '0;
    if (best_d != '0 && best_d != NW'(N - 1)) begin
      sa = i_sum[(32'(best_d) - 1) * SW +: SW];
      sc = i_sum[(32'(best_d) + 1) * SW +: SW];
      neg = sc > sa;                       // the minimum lies toward d-1
      num = neg ? (SW+2)'(sc - sa) : (SW+2)'(sa - sc);
      den = ((SW+2)'(sa) + (SW+2)'(sc) - ((SW+2)'(sb) << 1)) << 1;
      if (den != '0) q = ((SW+FRAC+2)'(num) << FRAC) / (SW+FRAC+2)'(den);
    end
    // sa > sc means the true minimum lies toward d+1
    if (neg) disp = (DW'(best_d) << FRAC) - DW'(q);
    else     disp = (DW'(best_d) << FRAC) + DW'(q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_tag   <= '0;
      o_disp  <= '0;
      o_dint  <= '0;
    end else begin
      o_valid <= i_valid;
      if (i_valid) begin
        o_tag  <= i_tag;
        o_disp <= disp;
        o_dint <= best_d;
      end
    end
  end
endmodule
