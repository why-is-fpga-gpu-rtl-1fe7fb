// pointwise_conv: the 1x1 convolution of a depth-wise separable layer.
//
// In the depth-wise partition the GPU runs the k x k per-channel
// convolution and the FPGA runs the following 1x1 convolution, which holds
// most of the layer's weights. Each pixel of the depth-wise output (C_IN
// channels) is mapped to N output channels by N dot products of length
// C_IN, all computed in parallel by N*C_IN multipliers whose weights sit in
// a weight_store (weight (n, ch) is the (n*C_IN + ch)-th written). Accumulators are
// requantised to 8 bits by dhm_pkg::requant.
// Interface: valid/ready streams. A pixel is taken when in_valid && in_ready
// (in_ready = !out_valid || out_ready) and registered; its output is valid
// the next cycle and holds until out_ready. A pixel counter over
// IMG_W*IMG_H marks the last output pixel of a frame with out_last. The
// partition follows the paper's depth-wise mapping; the registered input,
// the handshake and the frame counter are this design's choices.
module pointwise_conv #(
  parameter int unsigned IMG_W  = 224,
  parameter int unsigned IMG_H  = 224,
  parameter int unsigned C_IN   = 3,
  parameter int unsigned N      = 64,
  parameter int unsigned W_FRAC = dhm_pkg::W_FRAC
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  output logic                                 in_ready,
  input  logic [C_IN-1:0][dhm_pkg::DATA_W-1:0] in_pix,
  output logic                                 out_valid,
  input  logic                                 out_ready,
  output logic [N-1:0][dhm_pkg::DATA_W-1:0]    out_pix,
  output logic                                 out_last,
  input  logic                                 wt_we,
  input  logic [dhm_pkg::DATA_W-1:0]           wt_data
);
  import dhm_pkg::*;

  localparam int unsigned NW    = N * C_IN;
  localparam int unsigned NPIX  = IMG_W * IMG_H;
  localparam int unsigned CNT_W = (NPIX > 1) ? $clog2(NPIX) : 1;

  logic [C_IN-1:0][DATA_W-1:0] pix_q;
  logic [NW-1:0][DATA_W-1:0]   w_all;
  logic [CNT_W-1:0]            cnt;
  logic                        take;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_q     <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else if (take) begin
      pix_q     <= in_pix;
      cnt       <= (32'(cnt) == NPIX - 1) ? '0 : cnt + 1'b1;
      out_valid <= 1'b1;
      out_last  <= (32'(cnt) == NPIX - 1);
    end else if (out_ready) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end
  end

  weight_store #(.NUM(NW)) u_wts (
    .clk, .rst_n, .we(wt_we), .wdata(wt_data), .w_all
  );

  for (genvar n = 0; n < N; n++) begin : g_filter
    dot_product #(.LEN(C_IN), .W_FRAC(W_FRAC)) u_dot (
      .a(pix_q), .w(w_all[n*C_IN +: C_IN]), .res(out_pix[n])
    );
  end

endmodule
