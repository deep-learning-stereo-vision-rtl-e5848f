// hamming_cost: cost matching stage. For every position x of a pass it
// compares the reference descriptor at x with the N target descriptors at
// x, x-1, ..., x-N+1 and outputs the Hamming distance (popcount of the XOR)
// for each disparity d = 0..N-1.
//
// A shift register keeps the last N-1 target descriptors of the line.
// Disparities that would reach left of the line start (x < d) get the
// largest possible cost, DESC_BITS, so they never win. Flush positions
// (tag.pad) get cost 0 for every disparity, which leaves the argmin of
// the neighbouring box sums unchanged.
//
// Interface: i_valid/i_tag/i_ref/i_tgt/i_pix, one position per cycle, no
// back-pressure. Output cost vector cost[d] (d = 0 is bits [CW-1:0]) and
// the delayed tag and pixel, registered: latency one cycle.
//
// From the paper: binary descriptors compared by Hamming distance over the
// range [x-N, x]. The number of disparities N is not given; 64 is this
// design's choice.
module hamming_cost
  import stereo_pkg::*;
#(
  parameter int unsigned N  = stereo_pkg::DEF_N_DISP,
  parameter int unsigned CW = $clog2(DESC_BITS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_valid,
  input  tag_t          i_tag,
  input  desc_t         i_ref,
  input  desc_t         i_tgt,
  input  pix_t          i_pix,
  output logic          o_valid,
  output tag_t          o_tag,
  output pix_t          o_pix,
  output logic [N*CW-1:0] o_cost
);
  desc_t hist [N-1];          // hist[k] = target at x-1-k
  desc_t tap  [N];
  logic [N*CW-1:0] cost;

  always_comb begin
    tap[0] = i_tgt;
    for (int d = 1; d < N; d++) tap[d] = hist[d-1];
    for (int d = 0; d < N; d++) begin
      if (i_tag.pad)
        cost[d*CW +: CW] = '0;
      else if (32'(i_tag.x) < d)
        cost[d*CW +: CW] = CW'(DESC_BITS);
      else
        cost[d*CW +: CW] = CW'($countones(i_ref ^ tap[d]));
    end
  end

  always_ff @(posedge clk) begin
    if (i_valid) begin
      hist[0] <= i_tgt;
      for (int k = 1; k < N - 1; k++) hist[k] <= hist[k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_tag   <= '0;
      o_pix   <= '0;
      o_cost  <= '0;
    end else begin
      o_valid <= i_valid;
      if (i_valid) begin
        o_tag  <= i_tag;
        o_pix  <= i_pix;
        o_cost <= cost;
      end
    end
  end
endmodule
