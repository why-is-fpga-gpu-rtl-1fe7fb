// dhm_conv: one convolution layer mapped directly onto logic.
//
// An input feature map of IMG_H x IMG_W pixels with C_IN channels streams in
// in raster order, one pixel per accepted cycle. A window_extractor keeps the
// last K rows on chip and presents the K x K x C_IN neighbourhood of the
// newest pixel; N filters of K x K x C_IN multipliers each (all N*K*K*C_IN
// of them exist in hardware, none is shared) produce all N channels of an
// output pixel at once from that window. The weights live in a
// weight_store loaded through wt_we/wt_data; weight (n, r, c, ch) is
// the (((n*K + r)*K + c)*C_IN + ch)-th weight written (counting from 0), r and c counted from the top-left
// of the kernel. Accumulators are 32 bits and are requantised to 8 bits by
// dhm_pkg::requant.
//
// The layer computes a valid convolution (no padding) with stride STRIDE:
// the output map is OUT_H x OUT_W with OUT_W = (IMG_W - K)/STRIDE + 1.
// Padding, where a network needs it, is added to the map by the sender.
// Interface: valid/ready streams on both sides. A pixel is taken when
// in_valid && in_ready; in_ready = !out_valid || out_ready, so a stalled
// output stalls the whole layer. The output pixel for window position
// (y, x) is valid the cycle after the pixel (y, x) is taken and stays until
// out_ready; out_last marks the last output pixel of a frame. Row and column
// counters wrap at the end of each frame, so frames follow back to back.
// The fully parallel, weight-next-to-multiplier organisation follows direct
// hardware mapping; the single register stage (window registers feed the
// multiplier trees combinationally), the stream handshake and the
// no-padding convention are this design's choices.
module dhm_conv #(
  parameter int unsigned IMG_W  = 224,
  parameter int unsigned IMG_H  = 224,
  parameter int unsigned C_IN   = 3,
  parameter int unsigned K      = 5,
  parameter int unsigned N      = 64,
  parameter int unsigned STRIDE = 1,
  parameter int unsigned W_FRAC = dhm_pkg::W_FRAC
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // input feature map stream
  input  logic                                 in_valid,
  output logic                                 in_ready,
  input  logic [C_IN-1:0][dhm_pkg::DATA_W-1:0] in_pix,
  // output feature map stream
  output logic                                 out_valid,
  input  logic                                 out_ready,
  output logic [N-1:0][dhm_pkg::DATA_W-1:0]    out_pix,
  output logic                                 out_last,
  // weight load port
  input  logic                                 wt_we,
  input  logic [dhm_pkg::DATA_W-1:0]           wt_data
);
  import dhm_pkg::*;

  localparam int unsigned NW     = N * K * K * C_IN;
  localparam int unsigned OUT_W  = (IMG_W - K) / STRIDE + 1;
  localparam int unsigned OUT_H  = (IMG_H - K) / STRIDE + 1;
  localparam int unsigned LAST_X = K - 1 + (OUT_W - 1) * STRIDE;
  localparam int unsigned LAST_Y = K - 1 + (OUT_H - 1) * STRIDE;
  localparam int unsigned XW     = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  localparam int unsigned YW     = (IMG_H > 1) ? $clog2(IMG_H) : 1;

  logic [K-1:0][K-1:0][C_IN-1:0][DATA_W-1:0] win;
  logic [NW-1:0][DATA_W-1:0]                 w_all;
  logic [XW-1:0]                             x;
  logic [YW-1:0]                             y;
  logic                                      take, keep, last_pos;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  // Position of the pixel being taken decides whether its window is kept.
  assign keep = (32'(x) >= K - 1) && (32'(y) >= K - 1) &&
                ((32'(x) - (K - 1)) % STRIDE == 0) &&
                ((32'(y) - (K - 1)) % STRIDE == 0);
  assign last_pos = (32'(x) == LAST_X) && (32'(y) == LAST_Y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x         <= '0;
      y         <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      if (take) begin
        if (32'(x) == IMG_W - 1) begin
          x <= '0;
          y <= (32'(y) == IMG_H - 1) ? '0 : y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
        out_valid <= keep;
        out_last  <= keep && last_pos;
      end else if (out_ready) begin
        out_valid <= 1'b0;
        out_last  <= 1'b0;
      end
    end
  end

  window_extractor #(.IMG_W(IMG_W), .K(K), .C(C_IN)) u_win (
    .clk, .rst_n, .shift(take), .in_pix, .win
  );

  weight_store #(.NUM(NW)) u_wts (
    .clk, .rst_n, .we(wt_we), .wdata(wt_data), .w_all
  );

  // N filters, each its own dot_product over the flattened window. The
  // window is flattened as (r, c, ch), matching the weight order.
  localparam int unsigned LEN = K * K * C_IN;
  logic [LEN-1:0][DATA_W-1:0] win_flat;
  assign win_flat = win;

  for (genvar n = 0; n < N; n++) begin : g_filter
    dot_product #(.LEN(LEN), .W_FRAC(W_FRAC)) u_dot (
      .a(win_flat), .w(w_all[n*LEN +: LEN]), .res(out_pix[n])
    );
  end

endmodule
