// fused_layers: two convolution layers fused on the FPGA.
//
// Layer 1 (K1 x K1, C_IN -> N1 channels) and layer 2 (K2 x K2, N1 -> N2
// channels) are two dhm_conv instances joined by a valid/ready stream. The
// intermediate feature map exists only as that stream and in layer 2's line
// buffers: it is never sent off chip. Only layer 2's output map leaves the
// block. Layer 2 sees a map of MID_H x MID_W pixels, the valid-convolution
// output size of layer 1. Both layers run concurrently as a pipeline; a stall
// at the output propagates back through layer 2 to layer 1 and to the input.
// Weights are loaded through one port; wt_layer selects the layer (0 or 1)
// and the weights are written in dhm_conv's order. Output timing: the output for
// the last input pixel of a frame is valid two cycles after that pixel is
// taken, one cycle per layer, when nothing stalls. Fusing two layers follows
// the paper's fused-layer partition; the sizes K1, N1, K2 and the stride 1
// of both layers are this design's defaults. A simulation-only check at
// the end compares layer 1's end-of-frame marker with layer 2's position;
// it samples rst_n on the clock, which lint reports as a reset used both
// synchronously and asynchronously. That use is in the check only, not in
// the logic.
module fused_layers #(
  parameter int unsigned IMG_W  = 224,
  parameter int unsigned IMG_H  = 224,
  parameter int unsigned C_IN   = 3,
  parameter int unsigned K1     = 3,
  parameter int unsigned N1     = 8,
  parameter int unsigned K2     = 3,
  parameter int unsigned N2     = 64,
  parameter int unsigned W_FRAC = dhm_pkg::W_FRAC
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  output logic                                 in_ready,
  input  logic [C_IN-1:0][dhm_pkg::DATA_W-1:0] in_pix,
  output logic                                 out_valid,
  input  logic                                 out_ready,
  output logic [N2-1:0][dhm_pkg::DATA_W-1:0]   out_pix,
  output logic                                 out_last,
  input  logic                                 wt_we,
  input  logic                                 wt_layer,
  input  logic [dhm_pkg::DATA_W-1:0]           wt_data
);

  localparam int unsigned MID_W = IMG_W - K1 + 1;
  localparam int unsigned MID_H = IMG_H - K1 + 1;

  logic                               mid_valid, mid_ready, mid_last;
  logic [N1-1:0][dhm_pkg::DATA_W-1:0] mid_pix;

  dhm_conv #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .C_IN(C_IN), .K(K1), .N(N1),
    .STRIDE(1), .W_FRAC(W_FRAC)
  ) u_l1 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_pix,
    .out_valid(mid_valid), .out_ready(mid_ready), .out_pix(mid_pix),
    .out_last(mid_last),
    .wt_we(wt_we && !wt_layer), .wt_data
  );

  dhm_conv #(
    .IMG_W(MID_W), .IMG_H(MID_H), .C_IN(N1), .K(K2), .N(N2),
    .STRIDE(1), .W_FRAC(W_FRAC)
  ) u_l2 (
    .clk, .rst_n,
    .in_valid(mid_valid), .in_ready(mid_ready), .in_pix(mid_pix),
    .out_valid, .out_ready, .out_pix, .out_last,
    .wt_we(wt_we && wt_layer), .wt_data
  );

  // Layer 2 frames its own map; layer 1's end-of-frame marker must agree.
  always_ff @(posedge clk) begin
    if (rst_n && mid_valid && mid_ready && mid_last)
      assert (32'(u_l2.x) == MID_W - 1 && 32'(u_l2.y) == MID_H - 1)
        else $error("fused_layers: layer 1 frame end is not layer 2's last pixel");
  end

endmodule
