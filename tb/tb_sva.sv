// tb_sva: stereo vision accelerator fed with synthetic descriptor maps in
// which the right map is the left one moved by SHIFT columns. Frame 0 runs
// with the left-right check, frame 1 without it. Checks: one disparity per
// descriptor in row bursts of W with correct flags; interior pixels carry
// disparity SHIFT; in the checked frame the columns whose match falls left
// of the image are invalidated and the rest kept; in the unchecked frame
// nothing is invalidated; and the row period matches the pass schedule,
// 2(W+R) cycles per row with the check and W+R without it.
module tb_sva;
  import stereo_pkg::*;
  localparam int N = 8, W = 24, K = 3, R = 1, FRAC = 4, DW = 7, ROWS = 5, SHIFT = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lr_mode = 1;
  logic [7:0] p1 = 4, p2 = 24, p2_edge = 10;
  pix_t edge_th = 40;
  logic l_valid = 0, r_valid = 0, l_ready, r_ready, l_sof = 0, r_sof = 0;
  desc_t l_desc = '0, r_desc = '0;
  pix_t l_pix = '0, r_pix = '0;
  logic view_sel;
  pix_t o_lpix, o_rpix, ref_pix;
  logic o_valid, o_ok, o_sof, o_eol;
  xcoord_t o_x;
  logic [DW-1:0] o_disp;

  sva #(.N(N), .W(W), .K(K), .FRAC(FRAC), .DW(DW)) dut (.*);
  view_mux u_mux (.sel(view_sel), .left_pix(o_lpix), .right_pix(o_rpix), .ref_pix);

  int checks = 0, failures = 0;
  desc_t ld [2][ROWS][W + SHIFT];
  int n_out = 0, row = 0, frame = 0, col = 0, cyc = 0;
  int row_start [2][ROWS];

  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    if (rst_n && o_valid) begin
      automatic int x = int'(o_x);
      automatic bit interior = (x >= SHIFT + 1) && (x <= W - 2);
      if (x == 0) row_start[frame][row] = cyc;
      checks++;
      if (x != col || o_sof != (row == 0 && x == 0) || o_eol != (x == W - 1)) begin
        failures++;
        $display("frame %0d row %0d: column %0d expected %0d", frame, row, x, col);
      end
      if (frame == 0 && x < SHIFT) begin
        checks++;
        if (o_ok) begin
          failures++;
          $display("column %0d should be invalidated", x);
        end
      end
      if (interior) begin
        checks++;
        if (!o_ok || o_disp < DW'(SHIFT * 16 - 8) || o_disp > DW'(SHIFT * 16 + 8)) begin
          failures++;
          $display("frame %0d row %0d x %0d: ok=%0b disp=%0d", frame, row, x, o_ok, o_disp);
        end
      end
      if (frame == 1) begin
        checks++;
        if (!o_ok) failures++;
      end
      n_out++;
      if (x == W - 1) begin
        col = 0;
        if (row == ROWS - 1) begin
          row = 0;
          frame++;
        end else row++;
      end else col++;
    end
  end

  task automatic feed(int f);
    fork
      begin
      for (int y = 0; y < ROWS; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          l_valid = 1; l_desc = ld[f][y][x]; l_pix = 8'(x * 7); l_sof = (x == 0 && y == 0);
          @(posedge clk);
          while (!l_ready) @(posedge clk);
        end
      @(negedge clk) l_valid = 0;
      end
      begin
      for (int y = 0; y < ROWS; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          r_valid = 1; r_desc = ld[f][y][x + SHIFT]; r_pix = 8'((x + SHIFT) * 7);
          r_sof = (x == 0 && y == 0);
          @(posedge clk);
          while (!r_ready) @(posedge clk);
        end
      @(negedge clk) r_valid = 0;
      end
    join
  endtask

  initial begin
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < ROWS; y++)
        for (int x = 0; x < W + SHIFT; x++) ld[f][y][x] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    feed(0);
    // switch the mode once the last line of frame 0 has been taken
    lr_mode = 0;
    feed(1);
    repeat (6 * W) @(posedge clk);
    checks++;
    if (n_out != 2 * ROWS * W) begin
      failures++;
      $display("outputs %0d expected %0d", n_out, 2 * ROWS * W);
    end
    // row period in steady state
    checks++;
    if (row_start[0][3] - row_start[0][2] != 2 * (W + R)) begin
      failures++;
      $display("checked row period %0d", row_start[0][3] - row_start[0][2]);
    end
    checks++;
    if (row_start[1][3] - row_start[1][2] > W + R + 2) begin
      failures++;
      $display("unchecked row period %0d", row_start[1][3] - row_start[1][2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
