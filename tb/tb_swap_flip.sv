// tb_swap_flip: feeds two frames of random descriptor lines for both views
// with random gaps, the first frame in left-right mode and the second
// without it (the mode input is toggled mid-frame to check that it is only
// taken at a frame start). Every replayed position is compared with the
// expected order: direct pass, then swapped and mirrored pass, each ending
// in R flush positions, and each pass must leave on consecutive cycles.
module tb_swap_flip;
  import stereo_pkg::*;
  localparam int W = 6, R = 1, ROWS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lr_mode = 1;
  logic l_valid = 0, r_valid = 0, l_ready, r_ready, l_sof = 0, r_sof = 0;
  desc_t l_desc = '0, r_desc = '0;
  pix_t l_pix = '0, r_pix = '0;
  logic o_valid, view_sel;
  tag_t o_tag;
  desc_t o_ref, o_tgt;
  pix_t o_lpix, o_rpix;

  swap_flip #(.W(W), .R(R)) dut (.*);

  int checks = 0, failures = 0;
  desc_t ld [2][ROWS][W];
  desc_t rd [2][ROWS][W];

  typedef struct {
    int pass, x, row;
    bit pad, first;
    desc_t rf, tg;
    int lp, rp;
  } exp_t;
  exp_t expq [$];
  int n_out = 0, last_out_cycle = -10, cyc = 0, gaps = 0;

  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    if (rst_n && o_valid) begin
      exp_t e;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        e = expq.pop_front();
        checks++;
        if (int'(o_tag.pass) != e.pass || int'(o_tag.x) != e.x || o_tag.pad != e.pad ||
            o_tag.first_row != e.first || o_tag.lr_line != (e.row < 100) ||
            view_sel != e.pass[0]) begin
          failures++;
          $display("tag mismatch: pass %0d x %0d pad %0b first %0b, expected %0d %0d %0b %0b",
                   o_tag.pass, o_tag.x, o_tag.pad, o_tag.first_row, e.pass, e.x, e.pad, e.first);
        end
        if (!e.pad) begin
          checks++;
          if (o_ref != e.rf || o_tgt != e.tg || int'(o_lpix) != e.lp || int'(o_rpix) != e.rp) begin
            failures++;
            $display("data mismatch pass %0d x %0d: %h %h %0d %0d exp %h %h %0d %0d", e.pass, e.x,
                     o_ref, o_tgt, o_lpix, o_rpix, e.rf, e.tg, e.lp, e.rp);
          end
        end
        if (e.x != 0 && last_out_cycle != cyc - 1) gaps++;
      end
      last_out_cycle = cyc;
      n_out++;
    end
  end

  task automatic feed(int f);
    fork
      for (int y = 0; y < ROWS; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          while ($urandom_range(0, 2) == 0) @(negedge clk);
          l_valid = 1; l_desc = ld[f][y][x]; l_pix = 8'(16 * y + x); l_sof = (x == 0 && y == 0);
          @(posedge clk);
          while (!l_ready) @(posedge clk);
          @(negedge clk) l_valid = 0;
        end
      for (int y = 0; y < ROWS; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          while ($urandom_range(0, 2) == 0) @(negedge clk);
          r_valid = 1; r_desc = rd[f][y][x]; r_pix = 8'(128 + 16 * y + x); r_sof = (x == 0 && y == 0);
          @(posedge clk);
          while (!r_ready) @(posedge clk);
          @(negedge clk) r_valid = 0;
        end
    join
  endtask

  initial begin
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < ROWS; y++)
        for (int x = 0; x < W; x++) begin
          ld[f][y][x] = $urandom;
          rd[f][y][x] = $urandom;
        end
    // expected replay
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < ROWS; y++)
        for (int p = 0; p < (f == 0 ? 2 : 1); p++)
          for (int x = 0; x < W + R; x++) begin
            exp_t e;
            automatic int i = p ? W - 1 - x : x;
            e.pass = p; e.x = x; e.row = (f == 0) ? y : 100 + y;
            e.pad = (x >= W); e.first = (y == 0);
            if (!e.pad) begin
              e.rf = p ? rd[f][y][i] : ld[f][y][i];
              e.tg = p ? ld[f][y][i] : rd[f][y][i];
              e.lp = 16 * y + i;
              e.rp = 128 + 16 * y + i;
            end
            expq.push_back(e);
          end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      feed(0);
      begin
        @(posedge clk iff o_valid);
        lr_mode = 0;   // mid-frame change: takes effect at the next frame
      end
    join
    feed(1);
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != ROWS * (3 * (W + R))) begin
      failures++;
      $display("outputs %0d", n_out);
    end
    checks++;
    if (gaps != 0) begin
      failures++;
      $display("%0d gaps inside a pass", gaps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
