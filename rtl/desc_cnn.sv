// desc_cnn: one neural-network-accelerator submodule running the stereo
// descriptor network, a single 9x9 convolution with 32 output channels,
// quantised to int8, whose outputs are thresholded on zero into a 32-bit
// binary descriptor per pixel.
//
// Operation. Pixels arrive in raster order, one per accepted cycle. Eight
// line memories hold the previous eight rows; together with the incoming
// pixel they give one 9-pixel column per cycle, which is shifted into a 9x9
// window register. As soon as the ninth row is reached (and the ninth column
// of each row) the window is complete, and the descriptor of that window is
// computed in the next cycle: for every channel c
//   acc_c = sum_{r,k} W[c][r*9+k] * (pix(r,k) - 128) + B[c]
//   bit c = requant(acc_c, m_c, h_c) > 0
// The output map is the "valid" convolution: (IMG_W-8) x (IMG_H-8)
// descriptors, the first one leaving while row 8 (the ninth) is streamed in.
// Along with each descriptor the pixel at the window centre is given, so the
// view image stays aligned with its descriptor map.
//
// Interface. in_*: valid/ready pixel stream, in_sof marks pixel (0,0).
// out_*: valid/ready descriptor stream; out_sof marks descriptor (0,0),
// out_eol the last descriptor of a row. Weight, bias and multiply-shift
// registers are written through cfg_* one value per cycle; they are not
// reset and must be loaded before use. Tap index = row*9 + column of the
// window, row 0 and column 0 being the oldest.
//
// Timing. Throughput one pixel per cycle; latency from the pixel completing
// a window to its descriptor is two cycles. A stalled output (out_ready low)
// stalls the input.
//
// From the paper: kernel 9x9, 1 input / 32 output channels, int8 weights and
// biases, multiply-shift rescale, threshold on zero, streaming after nine
// lines. Own choices: 8-bit pixels centred by subtracting 128, bias added at
// accumulator scale, the configuration port and the stream handshake.
module desc_cnn
  import stereo_pkg::*;
#(
  parameter int unsigned IMG_W = stereo_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H = stereo_pkg::DEF_IMG_H,
  parameter int unsigned K     = stereo_pkg::DEF_KSIZE,
  parameter int unsigned CH    = stereo_pkg::DESC_BITS,
  parameter int unsigned M_W   = 8,
  parameter int unsigned H_W   = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_w_we,
  input  logic [$clog2(CH)-1:0]  cfg_ch,
  input  logic [$clog2(K*K)-1:0] cfg_tap,
  input  logic signed [7:0] cfg_w,
  input  logic              cfg_b_we,
  input  logic signed [7:0] cfg_b,
  input  logic              cfg_q_we,
  input  logic [M_W-1:0]    cfg_m,
  input  logic [H_W-1:0]    cfg_h,
  // pixel stream
  input  logic              in_valid,
  output logic              in_ready,
  input  pix_t              in_pix,
  input  logic              in_sof,
  // descriptor stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [CH-1:0]     out_desc,
  output pix_t              out_pix,
  output logic              out_sof,
  output logic              out_eol
);
  localparam int unsigned ACC_W = 24;
  localparam int unsigned XW = $clog2(IMG_W);
  localparam int unsigned YW = $clog2(IMG_H);
  localparam int unsigned SW = $clog2(K-1);

  // coefficient registers
  logic signed [7:0] wgt [CH][K*K];
  logic signed [7:0] bias [CH];
  logic [M_W-1:0]    qm [CH];
  logic [H_W-1:0]    qh [CH];

  always_ff @(posedge clk) begin
    if (cfg_w_we) wgt[cfg_ch][cfg_tap] <= cfg_w;
    if (cfg_b_we) bias[cfg_ch] <= cfg_b;
    if (cfg_q_we) begin
      qm[cfg_ch] <= cfg_m;
      qh[cfg_ch] <= cfg_h;
    end
  end

  // position of the incoming pixel
  logic [XW-1:0] x;
  logic [YW-1:0] y;
  logic [XW-1:0] x_in;
  logic [YW-1:0] y_in;
  assign x_in = in_sof ? '0 : x;
  assign y_in = in_sof ? '0 : y;

  // line memories: slot s holds the row whose index is s modulo K-1
  pix_t linebuf [K-1][IMG_W];
  pix_t col [K];
  logic [SW-1:0] slot_base;  // y modulo K-1

  always_comb begin
    for (int r = 0; r < K - 1; r++) begin
      // row y-(K-1)+r sits in slot (y+r) mod (K-1)
      col[r] = linebuf[(32'(slot_base) + r) % (K - 1)][x_in];
    end
    col[K-1] = in_pix;
  end

  pix_t win [K][K];
  logic win_valid, win_sof, win_eol;
  logic adv, accept;

  assign adv      = !out_valid || out_ready;
  assign in_ready = adv;
  assign accept   = in_valid && adv;

  always_ff @(posedge clk) begin
    if (accept) begin
      linebuf[in_sof ? '0 : slot_base][x_in] <= in_pix;
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < K - 1; c++) win[r][c] <= win[r][c+1];
        win[r][K-1] <= col[r];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
      slot_base <= '0;
      win_valid <= 1'b0;
      win_sof <= 1'b0;
      win_eol <= 1'b0;
    end else if (adv) begin
      win_valid <= accept && (x_in >= XW'(K - 1)) && (y_in >= YW'(K - 1));
      win_sof   <= (x_in == XW'(K - 1)) && (y_in == YW'(K - 1));
      win_eol   <= (x_in == XW'(IMG_W - 1));
      if (accept) begin
        if (x_in == XW'(IMG_W - 1)) begin
          x <= '0;
          y <= (y_in == YW'(IMG_H - 1)) ? '0 : y_in + 1'b1;
          if (y_in == YW'(IMG_H - 1)) slot_base <= '0;
          else slot_base <= ((in_sof ? '0 : slot_base) == SW'(K - 2)) ? '0
                          : (in_sof ? '0 : slot_base) + 1'b1;
        end else begin
          x <= x_in + 1'b1;
          if (in_sof) begin
            y <= '0;
            slot_base <= '0;
          end
        end
      end
    end
  end

  // convolution, rescale and threshold
  logic signed [ACC_W-1:0] acc [CH];
  logic signed [7:0]       act [CH];
  logic [CH-1:0]           desc_c;

  always_comb begin
    for (int c = 0; c < CH; c++) begin
      acc[c] = ACC_W'(bias[c]);
      for (int r = 0; r < K; r++)
        for (int k = 0; k < K; k++)
          acc[c] += ACC_W'(wgt[c][r*K+k] * $signed({1'b0, win[r][k]} - 9'sd128));
    end
  end

  for (genvar c = 0; c < CH; c++) begin : g_rq
    requant #(.ACC_W(ACC_W), .M_W(M_W), .H_W(H_W)) u_rq (
      .acc(acc[c]), .m(qm[c]), .h(qh[c]), .relu(1'b0), .y(act[c])
    );
    assign desc_c[c] = act[c] > 8'sd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_desc  <= '0;
      out_pix   <= '0;
      out_sof   <= 1'b0;
      out_eol   <= 1'b0;
    end else if (adv) begin
      out_valid <= win_valid;
      if (win_valid) begin
        out_desc <= desc_c;
        out_pix  <= win[K/2][K/2];
        out_sof  <= win_sof;
        out_eol  <= win_eol;
      end
    end
  end
endmodule
