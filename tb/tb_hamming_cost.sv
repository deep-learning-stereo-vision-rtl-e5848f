// tb_hamming_cost: streams two random descriptor lines (with flush
// positions) through the cost stage and compares every cost against a
// bit-by-bit Hamming distance computed here, including the maximum cost
// left of the line start and zero cost at flush positions.
module tb_hamming_cost;
  import stereo_pkg::*;
  localparam int N = 8, CW = 6, W = 20, R = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic i_valid = 0;
  tag_t i_tag = '0;
  desc_t i_ref = '0, i_tgt = '0;
  pix_t i_pix = '0;
  logic o_valid;
  tag_t o_tag;
  pix_t o_pix;
  logic [N*CW-1:0] o_cost;

  hamming_cost #(.N(N), .CW(CW)) dut (.*);

  int checks = 0, failures = 0;
  desc_t refl [2][W];
  desc_t tgtl [2][W];

  function automatic int hd(desc_t a, desc_t b);
    int n = 0;
    for (int i = 0; i < 32; i++) if (a[i] != b[i]) n++;
    return n;
  endfunction

  always @(posedge clk) begin
    if (rst_n && o_valid) begin
      automatic int x = int'(o_tag.x);
      automatic int ln = int'(o_tag.pass);
      for (int d = 0; d < N; d++) begin
        automatic int e = o_tag.pad ? 0 : (x < d) ? 32 : hd(refl[ln][x], tgtl[ln][x-d]);
        checks++;
        if (int'(o_cost[d*CW +: CW]) != e) begin
          failures++;
          $display("line %0d x=%0d d=%0d cost=%0d exp %0d", ln, x, d, o_cost[d*CW +: CW], e);
        end
      end
      checks++;
      if (o_pix !== 8'(x + 16 * ln)) failures++;
    end
  end

  initial begin
    for (int l = 0; l < 2; l++)
      for (int x = 0; x < W; x++) begin
        refl[l][x] = $urandom;
        // targets: copies of the reference shifted by 3 with a few flipped bits
        tgtl[l][x] = $urandom;
      end
    for (int l = 0; l < 2; l++)
      for (int x = 3; x < W; x++) tgtl[l][x-3] = refl[l][x] ^ (32'h1 << (x % 32));
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++)
      for (int x = 0; x < W + R; x++) begin
        @(negedge clk);
        i_valid = 1;
        i_tag = '0;
        i_tag.pass = pass_e'(l);
        i_tag.x = xcoord_t'(x);
        i_tag.pad = (x >= W);
        i_ref = (x < W) ? refl[l][x] : '0;
        i_tgt = (x < W) ? tgtl[l][x] : '0;
        i_pix = 8'(x + 16 * l);
      end
    @(negedge clk) i_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
