// tb_branch: end-to-end test of the matching core on a synthetic scene.
// The right descriptor map is the left one moved by SHIFT columns, so every
// left pixel whose match lies inside the image has disparity SHIFT, and so
// does every right pixel (in the mirrored pass). Lines are sent as the
// swap/flip unit sends them: direct pass, then swapped and mirrored pass,
// each with its flush position. Checks: W disparities per pass in column
// order on the right channel, the pass latency, and that the interior
// disparities equal SHIFT with a sub-pixel value within half a pixel.
module tb_branch;
  import stereo_pkg::*;
  localparam int N = 8, W = 24, K = 3, R = 1, FRAC = 4, DW = 7, ROWS = 6, SHIFT = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] p1 = 4, p2 = 24, p2_edge = 10;
  pix_t edge_th = 40;
  logic i_valid = 0;
  tag_t i_tag = '0;
  desc_t i_ref = '0, i_tgt = '0;
  pix_t i_pix = '0;
  logic lr_valid, lr_first, lr_lr, rl_valid, rl_first;
  xcoord_t lr_x, rl_x;
  logic [DW-1:0] lr_disp, rl_disp;
  logic [2:0] lr_dint, rl_dint;

  branch #(.N(N), .W(W), .K(K), .FRAC(FRAC), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  desc_t ld [ROWS][W + SHIFT];
  desc_t rd [ROWS][W];
  int n_lr = 0, n_rl = 0, exp_lx = 0, exp_rx = 0, hit = 0, interior = 0, cyc = 0, first_in = -1, first_out = -1;

  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    if (rst_n && lr_valid) begin
      n_lr++;
      if (first_out < 0) first_out = cyc;
      checks++;
      if (int'(lr_x) != exp_lx) begin
        failures++;
        $display("lr column %0d expected %0d", lr_x, exp_lx);
      end
      if (int'(lr_x) >= SHIFT + 1) begin
        interior++;
        if (int'(lr_dint) == SHIFT && lr_disp >= DW'(SHIFT * 16 - 8) && lr_disp <= DW'(SHIFT * 16 + 8))
          hit++;
      end
      exp_lx = (exp_lx == W - 1) ? 0 : exp_lx + 1;
    end
    if (rst_n && rl_valid) begin
      n_rl++;
      checks++;
      if (int'(rl_x) != exp_rx) begin
        failures++;
        $display("rl column %0d expected %0d", rl_x, exp_rx);
      end
      // mirrored column rl_x is right-image column W-1-rl_x; its match is inside if W-1-rl_x+SHIFT < W+SHIFT
      if (int'(rl_x) >= SHIFT + 1) interior++;
      if (int'(rl_x) >= SHIFT + 1 && int'(rl_dint) == SHIFT && rl_disp >= DW'(SHIFT * 16 - 8) && rl_disp <= DW'(SHIFT * 16 + 8))
        hit++;
      exp_rx = (exp_rx == W - 1) ? 0 : exp_rx + 1;
    end
  end

  initial begin
    for (int y = 0; y < ROWS; y++) begin
      for (int x = 0; x < W + SHIFT; x++) ld[y][x] = $urandom;
      for (int x = 0; x < W; x++) rd[y][x] = ld[y][x + SHIFT];   // right(x) = left(x+SHIFT)
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < ROWS; y++)
      for (int p = 0; p < 2; p++)
        for (int x = 0; x < W + R; x++) begin
          automatic int i = p ? W - 1 - x : x;
          @(negedge clk);
          if (first_in < 0) first_in = cyc;
          i_valid = 1;
          i_tag = '0;
          i_tag.pass = pass_e'(p);
          i_tag.lr_line = 1;
          i_tag.first_row = (y == 0);
          i_tag.pad = (x >= W);
          i_tag.x = xcoord_t'(x);
          i_ref = (x >= W) ? '0 : p ? rd[y][i] : ld[y][i];
          i_tgt = (x >= W) ? '0 : p ? ld[y][i] : rd[y][i];
          i_pix = 8'(i * 9);
        end
    @(negedge clk) i_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (hit * 100 < interior * 95) begin
      failures++;
      $display("only %0d of %0d interior disparities found the shift", hit, interior);
    end
    // latency: first disparity valid R + 4 clock edges after the edge that
    // takes the first position; it is seen by the checker one edge later
    checks++;
    if (first_out - first_in != R + 4 + 1) begin
      failures++;
      $display("latency %0d", first_out - first_in);
    end
    checks++;
    if (exp_lx != 0 || exp_rx != 0) failures++;
    checks++;
    if (n_lr != ROWS * W || n_rl != ROWS * W) begin
      failures++;
      $display("%0d left-reference and %0d right-reference disparities", n_lr, n_rl);
    end
    $display("interior %0d hit %0d", interior, hit);
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
