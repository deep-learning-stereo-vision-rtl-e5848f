// tb_sgm: drives random box-filtered costs and random reference pixels for
// two interleaved passes over four rows and compares every aggregated cost
// with a reference model of the four-path SGM recursion (line path, column
// path and the two diagonals from the row above, edge-adaptive P2) written
// out here.
module tb_sgm;
  import stereo_pkg::*;
  localparam int N = 6, W = 6, BW = 10, PW = 8, LW = 11, SW = 13;
  localparam int ROWS = 4;
  localparam int P1 = 3, P2 = 20, P2E = 8, TH = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PW-1:0] p1 = P1, p2 = P2, p2_edge = P2E;
  pix_t edge_th = TH;
  logic i_valid = 0;
  tag_t i_tag = '0;
  pix_t i_pix = '0;
  logic [N*BW-1:0] i_cost = '0;
  logic o_valid;
  tag_t o_tag;
  logic [N*SW-1:0] o_sum;

  sgm #(.N(N), .W(W), .BW(BW), .PW(PW), .LW(LW), .SW(SW)) dut (.*);

  int checks = 0, failures = 0;
  int c [2][ROWS][W][N];
  int px [2][ROWS][W];
  int lh [2][ROWS][W][N];
  int lv [2][ROWS][W][N];
  int ll [2][ROWS][W][N];
  int lr [2][ROWS][W][N];

  function automatic int pen2(int a, int b);
    int diff = (a > b) ? a - b : b - a;
    int r = (diff > TH) ? P2E : P2;
    return (r < P1) ? P1 : r;
  endfunction

  // one path step from a previous vector
  function automatic void path(input int p, input int y, input int x, input bit start,
                               input int prev [N], input int pp, output int res [N]);
    int mp = prev[0];
    for (int k = 1; k < N; k++) if (prev[k] < mp) mp = prev[k];
    for (int d = 0; d < N; d++) begin
      if (start) res[d] = c[p][y][x][d];
      else begin
        int best = prev[d];
        int pn = pen2(px[p][y][x], pp);
        if (d > 0 && prev[d-1] + P1 < best) best = prev[d-1] + P1;
        if (d < N - 1 && prev[d+1] + P1 < best) best = prev[d+1] + P1;
        if (mp + pn < best) best = mp + pn;
        res[d] = c[p][y][x][d] + best - mp;
      end
    end
  endfunction

  initial begin
    for (int p = 0; p < 2; p++)
      for (int y = 0; y < ROWS; y++)
        for (int x = 0; x < W; x++) begin
          px[p][y][x] = $urandom_range(0, 255);
          for (int d = 0; d < N; d++) c[p][y][x][d] = $urandom_range(0, 288);
        end
    // reference
    for (int p = 0; p < 2; p++)
      for (int y = 0; y < ROWS; y++)
        for (int x = 0; x < W; x++) begin
          int prev [N];
          int res [N];
          for (int d = 0; d < N; d++) prev[d] = (x > 0) ? lh[p][y][x-1][d] : 0;
          path(p, y, x, x == 0, prev, (x > 0) ? px[p][y][x-1] : 0, res);
          for (int d = 0; d < N; d++) lh[p][y][x][d] = res[d];
          for (int d = 0; d < N; d++) prev[d] = (y > 0) ? lv[p][y-1][x][d] : 0;
          path(p, y, x, y == 0, prev, (y > 0) ? px[p][y-1][x] : 0, res);
          for (int d = 0; d < N; d++) lv[p][y][x][d] = res[d];
          for (int d = 0; d < N; d++) prev[d] = (y > 0 && x > 0) ? ll[p][y-1][x-1][d] : 0;
          path(p, y, x, y == 0 || x == 0, prev, (y > 0 && x > 0) ? px[p][y-1][x-1] : 0, res);
          for (int d = 0; d < N; d++) ll[p][y][x][d] = res[d];
          for (int d = 0; d < N; d++) prev[d] = (y > 0 && x < W - 1) ? lr[p][y-1][x+1][d] : 0;
          path(p, y, x, y == 0 || x == W - 1, prev, (y > 0 && x < W - 1) ? px[p][y-1][x+1] : 0,
               res);
          for (int d = 0; d < N; d++) lr[p][y][x][d] = res[d];
        end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < ROWS; y++)
      for (int p = 0; p < 2; p++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          i_valid = 1;
          i_tag = '0;
          i_tag.pass = pass_e'(p);
          i_tag.first_row = (y == 0);
          i_tag.x = xcoord_t'(x);
          i_pix = 8'(px[p][y][x]);
          for (int d = 0; d < N; d++) i_cost[d*BW +: BW] = BW'(c[p][y][x][d]);
          @(posedge clk);
          #1;
          for (int d = 0; d < N; d++) begin
            automatic int e = lh[p][y][x][d] + lv[p][y][x][d] + ll[p][y][x][d] + lr[p][y][x][d];
            checks++;
            if (int'(o_sum[d*SW +: SW]) != e) begin
              failures++;
              $display("p%0d y%0d x%0d d%0d: S=%0d exp %0d", p, y, x, d, o_sum[d*SW +: SW], e);
            end
          end
          checks++;
          if (!o_valid || o_tag.x != xcoord_t'(x)) failures++;
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
