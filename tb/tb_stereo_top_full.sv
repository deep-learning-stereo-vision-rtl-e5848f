// tb_stereo_top_full: one complete 1280x720 frame through the whole stereo
// module with every parameter at its default (64 disparities), with the
// left-right consistency check on.
// Random int8 network coefficients are loaded into both network
// submodules; the left camera sees random texture and the right camera the
// same texture moved by SHIFT pixels, so every descriptor of the right map
// equals the left descriptor SHIFT columns further right, and the true
// disparity of every left pixel with a match is SHIFT.
// Checks: the map size and raster order with frame and row flags; the left
// SHIFT columns (no match in the right view) invalidated in checked frames;
// at least 95 % of the other pixels valid with disparity SHIFT +- 1/2; the
// row period of 2(W+R) cycles with the consistency check (one disparity
// every two cycles). It also counts how often each mechanism happened and
// fails if one never did: camera stalls, swapped passes, flush positions,
// invalidated pixels, sub-pixel offsets, edge-adapted penalties.
module tb_stereo_top_full;
  import stereo_pkg::*;
  localparam int IMG_W = 1280, IMG_H = 720, N = 64, SHIFT = 3, FRAMES = 1;
  localparam int W = IMG_W - 8, H = IMG_H - 8, R = 1, DW = $clog2(N) + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_w_we = 0, cfg_b_we = 0, cfg_q_we = 0;
  logic [4:0] cfg_ch = 0;
  logic [6:0] cfg_tap = 0;
  logic signed [7:0] cfg_w = 0, cfg_b = 0;
  logic [7:0] cfg_m = 0;
  logic [4:0] cfg_h = 0;
  logic lr_mode = 1;
  logic [7:0] p1 = 4, p2 = 32, p2_edge = 12;
  pix_t edge_th = 24;
  logic l_valid = 0, r_valid = 0, l_ready, r_ready, l_sof = 0, r_sof = 0;
  pix_t l_pix = 0, r_pix = 0;
  logic o_valid, o_ok, o_sof, o_eol;
  xcoord_t o_x;
  logic [DW-1:0] o_disp;

  stereo_top dut (.*);

  int checks = 0, failures = 0;
  byte unsigned img [IMG_H][IMG_W + SHIFT];
  int frame = 0, row = 0, col = 0, cyc = 0;
  int interior = 0, good = 0;
  int row_start [FRAMES][4];
  // mechanism counters
  int n_stall = 0, n_swap = 0, n_pad = 0, n_invalid = 0, n_subpix = 0, n_edgepen = 0;
  int n_unchecked = 0;
  bit frame_lr [FRAMES];

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (l_valid && !l_ready) n_stall++;
      if (dut.u_sva.s_valid && dut.view_sel) n_swap++;
      if (dut.u_sva.s_valid && dut.u_sva.s_tag.pad) n_pad++;
      if (dut.u_sva.u_branch.b_valid && dut.u_sva.u_branch.u_sgm.p2h != p2) n_edgepen++;
    end
  end

  always @(posedge clk) begin
    if (rst_n && o_valid) begin
      automatic int x = int'(o_x);
      if (x == 0 && row < 4) row_start[frame][row] = cyc;
      checks++;
      if (x != col || o_sof != (row == 0 && x == 0) || o_eol != (x == W - 1)) begin
        failures++;
        if (failures < 10) $display("frame %0d row %0d: column %0d expected %0d", frame, row, x, col);
      end
      if (!o_ok) n_invalid++;
      if (o_ok && o_disp[3:0] != 0) n_subpix++;
      if (!frame_lr[frame]) begin
        n_unchecked++;
        checks++;
        if (!o_ok) failures++;
      end
      if (frame_lr[frame] && x < SHIFT) begin
        checks++;
        if (o_ok) begin
          failures++;
          if (failures < 10) $display("row %0d column %0d has no match but is valid", row, x);
        end
      end
      if (x >= SHIFT + 1 && x <= W - 2 && row >= 2) begin
        interior++;
        if (o_ok && o_disp >= DW'(SHIFT * 16 - 8) && o_disp <= DW'(SHIFT * 16 + 8)) good++;
      end
      if (x == W - 1) begin
        col = 0;
        if (row == H - 1) begin
          row = 0;
          frame++;
        end else row++;
      end else col++;
    end
  end

  task automatic feed_left(int f);
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        @(negedge clk);
        l_valid = 1; l_pix = img[y][x]; l_sof = (x == 0 && y == 0);
        @(posedge clk);
        while (!l_ready) @(posedge clk);
      end
    @(negedge clk) l_valid = 0;
  endtask

  task automatic feed_right(int f);
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        @(negedge clk);
        r_valid = 1; r_pix = img[y][x + SHIFT]; r_sof = (x == 0 && y == 0);
        @(posedge clk);
        while (!r_ready) @(posedge clk);
      end
    @(negedge clk) r_valid = 0;
  endtask

  initial begin
    int t0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 32; c++) begin
      for (int t = 0; t < 81; t++) begin
        @(negedge clk);
        cfg_w_we = 1; cfg_ch = 5'(c); cfg_tap = 7'(t); cfg_w = 8'($urandom);
      end
      @(negedge clk);
      cfg_w_we = 0; cfg_b_we = 1; cfg_q_we = 1;
      cfg_b = 8'($urandom); cfg_m = 8'($urandom_range(1, 255)); cfg_h = 5'($urandom_range(6, 14));
    end
    @(negedge clk);
    cfg_b_we = 0; cfg_q_we = 0;
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < IMG_H; y++)
        for (int x = 0; x < IMG_W + SHIFT; x++) img[y][x] = 8'($urandom);
      frame_lr[f] = (f % 2 == 0);
      lr_mode = frame_lr[f];
      fork
        feed_left(f);
        feed_right(f);
      join
      // the accelerator still holds the last rows of this frame; the
      // next frame's rows arrive only after nine new camera rows
    end
    t0 = cyc;
    while (frame < FRAMES && cyc - t0 < 8 * (W + R) * 2 * 12) @(posedge clk);
    checks++;
    if (frame != FRAMES) begin
      failures++;
      $display("only %0d of %0d frames came out", frame, FRAMES);
    end
    checks++;
    if (good * 100 < interior * 95) begin
      failures++;
      $display("%0d of %0d interior pixels found the disparity", good, interior);
    end
    checks++;
    if (row_start[0][3] - row_start[0][2] != 2 * (W + R)) begin
      failures++;
      $display("row period with the check: %0d cycles, expected %0d", row_start[0][3] - row_start[0][2], 2 * (W + R));
    end
    $display("stalls %0d swapped %0d flush %0d invalid %0d subpixel %0d edge-penalty %0d unchecked %0d",
             n_stall, n_swap, n_pad, n_invalid, n_subpix, n_edgepen, n_unchecked);
    $display("interior %0d good %0d cycles %0d", interior, good, cyc);
    checks++; if (n_stall == 0) begin failures++; $display("no stall"); end
    checks++; if (n_swap == 0) begin failures++; $display("no swapped pass"); end
    checks++; if (n_pad == 0) begin failures++; $display("no flush position"); end
    checks++; if (n_invalid == 0) begin failures++; $display("no invalidation"); end
    checks++; if (n_subpix == 0) begin failures++; $display("no sub-pixel offset"); end
    checks++; if (n_edgepen == 0) begin failures++; $display("no edge-adapted penalty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
