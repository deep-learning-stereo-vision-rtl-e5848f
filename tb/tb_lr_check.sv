// tb_lr_check: feeds left-reference and mirrored right-reference disparity
// lines (some consistent, some not, some pointing left of the image) and
// lines without the mirrored pass, back to back as the branch would, and
// compares every merged output with a reference consistency test computed
// here. Also checks the output column order and the frame/row flags.
module tb_lr_check;
  import stereo_pkg::*;
  localparam int N = 8, W = 10, FRAC = 4, DW = 7, LINES = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lr_valid = 0, lr_first = 0, lr_lr = 0, rl_valid = 0;
  xcoord_t lr_x = '0, rl_x = '0;
  logic [DW-1:0] lr_disp = '0;
  logic [2:0] lr_dint = '0, rl_dint = '0;
  logic o_valid, o_ok, o_sof, o_eol;
  xcoord_t o_x;
  logic [DW-1:0] o_disp;

  lr_check #(.N(N), .W(W), .FRAC(FRAC), .DW(DW), .TH(1)) dut (.*);

  int checks = 0, failures = 0;
  int dl [LINES][W];
  int df [LINES][W];
  int dr [LINES][W];
  bit lrl [LINES];
  int out_line = 0, out_x = 0, n_ok = 0, n_bad = 0;

  always @(posedge clk) begin
    if (rst_n && o_valid) begin
      automatic int x = int'(o_x);
      automatic int l = out_line;
      automatic bit ok;
      automatic int e;
      if (!lrl[l]) ok = 1;
      else if (dl[l][x] > x) ok = 0;
      else begin
        automatic int r = dr[l][x - dl[l][x]];
        ok = ((r > dl[l][x]) ? r - dl[l][x] : dl[l][x] - r) <= 1;
      end
      e = ok ? dl[l][x] * 16 + df[l][x] : 0;
      if (ok) n_ok++; else n_bad++;
      checks++;
      if (x != out_x || o_ok != ok || int'(o_disp) != e) begin
        failures++;
        $display("line %0d x %0d (exp x %0d): ok=%0b disp=%0d expected ok=%0b disp=%0d",
                 l, x, out_x, o_ok, o_disp, ok, e);
      end
      checks++;
      if (o_sof != (l == 0 && x == 0) || o_eol != (x == W - 1)) begin
        failures++;
        $display("flags at line %0d x %0d", l, x);
      end
      if (x == W - 1) begin
        out_line++;
        out_x = 0;
      end else out_x++;
    end
  end

  initial begin
    for (int l = 0; l < LINES; l++) begin
      lrl[l] = (l != 3);
      for (int x = 0; x < W; x++) begin
        dl[l][x] = $urandom_range(0, 4);
        df[l][x] = $urandom_range(0, 15);
        // right map: mostly consistent, sometimes off by one or far off
        dr[l][x] = $urandom_range(0, 4);
      end
      for (int x = 0; x < W; x++)
        if (dl[l][x] <= x && $urandom_range(0, 2) != 0)
          dr[l][x - dl[l][x]] = dl[l][x] + $urandom_range(0, 1);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < LINES; l++) begin
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        lr_valid = 1; lr_x = xcoord_t'(x); lr_first = (l == 0); lr_lr = lrl[l];
        lr_dint = 3'(dl[l][x]); lr_disp = DW'(dl[l][x] * 16 + df[l][x]);
      end
      @(negedge clk) lr_valid = 0;
      if (lrl[l]) begin
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          rl_valid = 1; rl_x = xcoord_t'(x); rl_dint = 3'(dr[l][W - 1 - x]);
        end
        @(negedge clk) rl_valid = 0;
      end
    end
    repeat (2 * W) @(posedge clk);
    checks++;
    if (out_line != LINES || n_ok == 0 || n_bad == 0) begin
      failures++;
      $display("lines out %0d, kept %0d, invalidated %0d", out_line, n_ok, n_bad);
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
