// tb_desc_cnn: self-checking test of the descriptor convolution engine.
// Loads random int8 weights, biases and multiply-shift factors, streams two
// random 14x12 frames with random output back-pressure, and compares every
// descriptor, centre pixel and frame/row flag with a direct convolution
// computed here. Also checks the descriptor count and that the first
// descriptor leaves while the ninth row is being streamed.
module tb_desc_cnn;
  localparam int W = 14, H = 12, K = 9, CH = 32;
  localparam int OW = W - K + 1, OH = H - K + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_w_we = 0, cfg_b_we = 0, cfg_q_we = 0;
  logic [4:0] cfg_ch = 0;
  logic [6:0] cfg_tap = 0;
  logic signed [7:0] cfg_w = 0, cfg_b = 0;
  logic [7:0] cfg_m = 0;
  logic [4:0] cfg_h = 0;
  logic in_valid = 0, in_ready, in_sof = 0;
  logic [7:0] in_pix = 0;
  logic out_valid, out_ready = 1, out_sof, out_eol;
  logic [31:0] out_desc;
  logic [7:0] out_pix;

  desc_cnn #(.IMG_W(W), .IMG_H(H)) dut (.*);

  int checks = 0, failures = 0;
  int w [CH][K*K];
  int b [CH];
  int m [CH];
  int hh [CH];
  int img [2][H][W];
  int n_out = 0, frame_out = 0;
  int pixels_sent = 0, first_out_pixel = -1;

  function automatic logic [31:0] ref_desc(int f, int ox, int oy);
    logic [31:0] d;
    for (int c = 0; c < CH; c++) begin
      longint acc = b[c];
      longint p;
      for (int r = 0; r < K; r++)
        for (int k = 0; k < K; k++)
          acc += w[c][r*K+k] * (img[f][oy+r][ox+k] - 128);
      p = (acc * m[c]) >>> hh[c];
      if (p > 127) p = 127;
      if (p < -128) p = -128;
      d[c] = (p > 0);
    end
    return d;
  endfunction

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      automatic int f = n_out / (OW * OH);
      automatic int idx = n_out % (OW * OH);
      automatic int ox = idx % OW, oy = idx / OW;
      automatic logic [31:0] exp_d = ref_desc(f, ox, oy);
      if (first_out_pixel < 0) first_out_pixel = pixels_sent;
      checks++;
      if (out_desc !== exp_d) begin
        failures++;
        $display("desc mismatch f%0d (%0d,%0d): %h exp %h", f, ox, oy, out_desc, exp_d);
      end
      checks++;
      if (out_pix !== 8'(img[f][oy+K/2][ox+K/2])) begin
        failures++;
        $display("pix mismatch (%0d,%0d)", ox, oy);
      end
      checks++;
      if (out_sof !== (idx == 0) || out_eol !== (ox == OW - 1)) begin
        failures++;
        $display("flag mismatch (%0d,%0d) sof=%b eol=%b", ox, oy, out_sof, out_eol);
      end
      n_out++;
    end
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    for (int c = 0; c < CH; c++) begin
      for (int t = 0; t < K*K; t++) w[c][t] = $signed(8'($urandom));
      b[c] = $signed(8'($urandom));
      m[c] = $urandom_range(1, 255);
      hh[c] = $urandom_range(0, 12);
    end
    for (int f = 0; f < 2; f++)
      for (int yy = 0; yy < H; yy++)
        for (int xx = 0; xx < W; xx++) img[f][yy][xx] = $urandom_range(0, 255);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load coefficients
    for (int c = 0; c < CH; c++) begin
      for (int t = 0; t < K*K; t++) begin
        @(negedge clk);
        cfg_w_we = 1; cfg_ch = 5'(c); cfg_tap = 7'(t); cfg_w = 8'(w[c][t]);
      end
      @(negedge clk);
      cfg_w_we = 0; cfg_b_we = 1; cfg_q_we = 1; cfg_b = 8'(b[c]);
      cfg_m = 8'(m[c]); cfg_h = 5'(hh[c]);
    end
    @(negedge clk);
    cfg_b_we = 0; cfg_q_we = 0;
    // stream two frames
    for (int f = 0; f < 2; f++)
      for (int yy = 0; yy < H; yy++)
        for (int xx = 0; xx < W; xx++) begin
          @(negedge clk);
          in_valid = 1; in_pix = 8'(img[f][yy][xx]); in_sof = (xx == 0 && yy == 0);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          pixels_sent++;
        end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (n_out != 2 * OW * OH) begin
      failures++;
      $display("count %0d expected %0d", n_out, 2 * OW * OH);
    end
    // first descriptor must leave while row 8 is streamed (pixel index 8*W+8 accepted)
    checks++;
    if (first_out_pixel < (K-1)*W + K || first_out_pixel > (K-1)*W + K + 6) begin
      failures++;
      $display("first descriptor after %0d pixels", first_out_pixel);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
