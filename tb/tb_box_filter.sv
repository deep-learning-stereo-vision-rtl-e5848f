// tb_box_filter: drives random cost lines of two interleaved passes over two
// frames and compares every box sum with a direct 3x3 sum computed here
// (columns centred, rows trailing, outside the frame counted as zero).
// Also checks the output column sequence and the pixel alignment.
module tb_box_filter;
  import stereo_pkg::*;
  localparam int N = 4, W = 7, K = 3, R = 1, CW = 6, BW = 10;
  localparam int ROWS = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic i_valid = 0;
  tag_t i_tag = '0;
  pix_t i_pix = '0;
  logic [N*CW-1:0] i_cost = '0;
  logic o_valid;
  tag_t o_tag;
  pix_t o_pix;
  logic [N*BW-1:0] o_box;

  box_filter #(.N(N), .W(W), .K(K), .CW(CW), .BW(BW)) dut (.*);

  int checks = 0, failures = 0;
  int cost [2][2][ROWS][W][N];   // frame, pass, row, x, d
  int cur_f, cur_row, exp_x, n_out;

  function automatic int ref_box(int f, int p, int y, int x, int d);
    int s = 0;
    for (int dy = 0; dy < K; dy++)
      for (int dx = -R; dx <= R; dx++)
        if (y - dy >= 0 && x + dx >= 0 && x + dx < W) s += cost[f][p][y-dy][x+dx][d];
    return s;
  endfunction

  always @(posedge clk) begin
    if (rst_n && o_valid) begin
      automatic int p = int'(o_tag.pass);
      automatic int x = int'(o_tag.x);
      checks++;
      if (x != exp_x) begin
        failures++;
        $display("column %0d expected %0d", x, exp_x);
      end
      exp_x = (exp_x == W - 1) ? 0 : exp_x + 1;
      for (int d = 0; d < N; d++) begin
        automatic int e = ref_box(cur_f, p, cur_row, x, d);
        checks++;
        if (int'(o_box[d*BW +: BW]) != e) begin
          failures++;
          $display("f%0d p%0d row %0d x %0d d %0d: %0d exp %0d", cur_f, p, cur_row, x, d,
                   o_box[d*BW +: BW], e);
        end
      end
      checks++;
      if (o_pix !== 8'(100 * p + x)) begin
        failures++;
        $display("pixel misaligned at x %0d: %0d", x, o_pix);
      end
      n_out++;
    end
  end

  task automatic send_line(int f, int p, int y);
    for (int x = 0; x < W + R; x++) begin
      @(negedge clk);
      i_valid = 1;
      i_tag = '0;
      i_tag.pass = pass_e'(p);
      i_tag.first_row = (y == 0);
      i_tag.pad = (x >= W);
      i_tag.x = xcoord_t'(x);
      i_pix = 8'(100 * p + x);
      for (int d = 0; d < N; d++) i_cost[d*CW +: CW] = (x < W) ? CW'(cost[f][p][y][x][d]) : '0;
    end
    @(negedge clk) i_valid = 0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    for (int f = 0; f < 2; f++)
      for (int p = 0; p < 2; p++)
        for (int y = 0; y < ROWS; y++)
          for (int x = 0; x < W; x++)
            for (int d = 0; d < N; d++) cost[f][p][y][x][d] = $urandom_range(0, 32);
    exp_x = 0;
    n_out = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < ROWS; y++)
        for (int p = 0; p < 2; p++) begin
          cur_f = f; cur_row = y;
          if (f == 1 && p == 1 && y > 2) continue;   // second frame: mixed modes
          send_line(f, p, y);
        end
    checks++;
    if (n_out != W * (4 * ROWS - 2)) begin
      failures++;
      $display("outputs %0d", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
