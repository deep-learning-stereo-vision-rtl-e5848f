// tb_wta_subpixel: applies random and hand-made cost vectors and compares
// the selected disparity and its sub-pixel refinement with a reference
// argmin and parabola fit computed here.
module tb_wta_subpixel;
  import stereo_pkg::*;
  localparam int N = 16, SW = 12, FRAC = 4, DW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic i_valid = 0;
  tag_t i_tag = '0;
  logic [N*SW-1:0] i_sum = '0;
  logic o_valid;
  tag_t o_tag;
  logic [DW-1:0] o_disp;
  logic [3:0] o_dint;

  wta_subpixel #(.N(N), .SW(SW), .FRAC(FRAC), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  int s [N];

  task automatic apply_check();
    int bd = 0, e;
    for (int d = 1; d < N; d++) if (s[d] < s[bd]) bd = d;
    e = bd * 16;
    if (bd > 0 && bd < N - 1) begin
      int a = s[bd-1], b = s[bd], cc = s[bd+1];
      int den = 2 * (a + cc - 2 * b);
      if (den != 0) begin
        int num = a - cc;
        int q = ((num < 0 ? -num : num) * 16) / den;
        e = (num < 0) ? e - q : e + q;
      end
    end
    @(negedge clk);
    i_valid = 1;
    for (int d = 0; d < N; d++) i_sum[d*SW +: SW] = SW'(s[d]);
    @(posedge clk);
    #1;
    checks++;
    if (int'(o_dint) != bd || int'(o_disp) != e || !o_valid) begin
      failures++;
      $display("dint=%0d disp=%0d expected %0d %0d", o_dint, o_disp, bd, e);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // exact parabola with vertex at 5.25
    for (int d = 0; d < N; d++) s[d] = 100 + (4 * d - 21) * (4 * d - 21);
    apply_check();
    checks++;
    if (o_disp != 8'd84) begin
      failures++;
      $display("vertex 5.25 gave %0d/16", o_disp);
    end
    // tie: lowest disparity wins
    for (int d = 0; d < N; d++) s[d] = 50;
    s[3] = 10; s[9] = 10;
    apply_check();
    for (int i = 0; i < 500; i++) begin
      for (int d = 0; d < N; d++) s[d] = $urandom_range(0, 4095);
      apply_check();
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
