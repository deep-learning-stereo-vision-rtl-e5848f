// requant: per-channel multiply-shift rescale of a convolution accumulator
// back to the int8 range.
//
// The quantisation scheme this design follows replaces the division by the
// layer scale factor with an integer multiply and an arithmetic right shift:
//   y = clamp((acc * m) >>> h, -128, 127)
// with m and h unsigned integers in [0, 2^z - 1] chosen offline per output
// channel. With relu set the result is further clamped to [0, 127]
// (the "ReLU_127" activation). The descriptor layer of this design uses it
// without ReLU and keeps only the sign of y.
//
// Purely combinational; no clock. ACC_W, M_W and H_W are this design's
// choices (the paper names z but gives no value; M_W = H_W = z = 5 would be
// the literal reading, M_W = 8 gives a finer multiplier).
module requant #(
  parameter int unsigned ACC_W = 24,
  parameter int unsigned M_W   = 8,
  parameter int unsigned H_W   = 5
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic        [M_W-1:0]   m,
  input  logic        [H_W-1:0]   h,
  input  logic                    relu,
  output logic signed [7:0]       y
);
  localparam int unsigned P_W = ACC_W + M_W + 1;

  logic signed [P_W-1:0] prod;
  logic signed [P_W-1:0] shifted;

  always_comb begin
    prod    = P_W'(acc) * $signed({1'b0, m});
    shifted = prod >>> h;
    if (shifted > P_W'(127))       y = 8'sd127;
    else if (shifted < -P_W'(128)) y = -8'sd128;
    else                           y = shifted[7:0];
    if (relu && y < 0) y = 8'sd0;
  end
endmodule
