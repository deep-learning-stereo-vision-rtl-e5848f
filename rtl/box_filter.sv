// box_filter: K x K box filter over the cost volume, applied separately to
// every disparity plane, before semi-global matching.
//
// How it works. For each pass (direct and swapped) the module keeps the
// cost vectors of the previous K-1 lines in line memories. The vertical sum
// V(x) = C(y,x) + C(y-1,x) + ... + C(y-K+1,x) is formed as a position
// arrives (rows before the first row of the frame count as zero), and the
// last K vertical sums are added horizontally. The horizontal window is
// centred: the output for column x-R (R = K/2) is produced when column x
// arrives, and the R flush positions at the end of each pass complete the
// line; columns left of 0 count as zero. The vertical window is trailing,
// so output row y aggregates rows y-K+1..y (the map shifts down by R rows,
// identically in both passes, so the consistency check is unaffected).
//
// Interface: one position per cycle, no back-pressure. i_cost[d] is CW
// bits wide; o_box[d] is CW + clog2(K*K) bits. o_tag.x is the output
// column, o_pix the reference pixel of that column. Latency: R positions
// plus one register stage; W output positions per pass.
//
// From the paper: a "very basic box filter that smooths the volume
// values". The size (3x3), trailing rows and edge treatment are this
// design's choices.
module box_filter
  import stereo_pkg::*;
#(
  parameter int unsigned N  = stereo_pkg::DEF_N_DISP,
  parameter int unsigned W  = stereo_pkg::DEF_IMG_W - stereo_pkg::DEF_KSIZE + 1,
  parameter int unsigned K  = stereo_pkg::DEF_BOX,
  parameter int unsigned CW = 6,
  parameter int unsigned BW = CW + $clog2(K * K)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            i_valid,
  input  tag_t            i_tag,
  input  pix_t            i_pix,
  input  logic [N*CW-1:0] i_cost,
  output logic            o_valid,
  output tag_t            o_tag,
  output pix_t            o_pix,
  output logic [N*BW-1:0] o_box
);
  localparam int unsigned R  = K / 2;
  localparam int unsigned LW = W + R;            // positions per pass
  localparam int unsigned RW = $clog2(K);
  localparam int unsigned AW = $clog2(LW);

  logic [N*CW-1:0] lb [2][K-1][LW];
  logic [RW-1:0]   rows_seen [2];
  logic [N*BW-1:0] vh [K-1];                     // vh[j] = V(x-1-j)
  pix_t            ph [K];                       // ph[j] = pixel(x-1-j)

  logic [RW-1:0]   rs;
  logic [N*BW-1:0] v, hsum;
  pix_t            pix_c;
  logic [AW-1:0]   xa;

  assign xa = AW'(i_tag.x);

  always_comb begin
    rs = i_tag.first_row ? '0 : rows_seen[i_tag.pass];
    for (int d = 0; d < N; d++) begin
      v[d*BW +: BW] = BW'(i_cost[d*CW +: CW]);
      for (int j = 0; j < K - 1; j++)
        if (j < 32'(rs))
          v[d*BW +: BW] += BW'(lb[i_tag.pass][j][xa][d*CW +: CW]);
      hsum[d*BW +: BW] = v[d*BW +: BW];
      for (int j = 1; j < K; j++)
        if (32'(i_tag.x) >= j)
          hsum[d*BW +: BW] += vh[j-1][d*BW +: BW];
    end
    pix_c = (R == 0) ? i_pix : ph[(R == 0) ? 0 : R - 1];
  end

  always_ff @(posedge clk) begin
    if (i_valid) begin
      lb[i_tag.pass][0][xa] <= i_cost;
      for (int j = 1; j < K - 1; j++)
        lb[i_tag.pass][j][xa] <= lb[i_tag.pass][j-1][xa];
      vh[0] <= v;
      for (int j = 1; j < K - 1; j++) vh[j] <= vh[j-1];
      ph[0] <= i_pix;
      for (int j = 1; j < K; j++) ph[j] <= ph[j-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rows_seen[0] <= '0;
      rows_seen[1] <= '0;
      o_valid <= 1'b0;
      o_tag <= '0;
      o_pix <= '0;
      o_box <= '0;
    end else begin
      o_valid <= i_valid && (32'(i_tag.x) >= R);
      if (i_valid) begin
        if (32'(i_tag.x) == LW - 1)
          rows_seen[i_tag.pass] <= (32'(rs) == K - 1) ? rs : rs + 1'b1;
        if (32'(i_tag.x) >= R) begin
          o_tag     <= i_tag;
          o_tag.x   <= i_tag.x - xcoord_t'(R);
          o_tag.pad <= 1'b0;
          o_pix     <= pix_c;
          o_box     <= hsum;
        end
      end
    end
  end
endmodule
