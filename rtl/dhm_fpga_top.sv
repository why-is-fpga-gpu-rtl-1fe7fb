// dhm_fpga_top: FPGA side of the FPGA-GPU heterogeneous CNN accelerator.
//
// The GPU runs most of a CNN module; the FPGA runs the part that direct
// hardware mapping does best and returns its output feature map over PCIe.
// Three partitions of a module are built here side by side, and part_mode
// picks the one in use:
//   PART_DWCONV  pointwise_conv: the 1x1 convolution after the GPU's
//                depth-wise k x k convolution (C_IN -> N_OUT channels);
//   PART_GCONV   dhm_conv: a K x K convolution over the g_l = C_IN input
//                channels given to the FPGA (C_IN -> N_OUT channels), the
//                GPU computing the other channels and concatenating;
//   PART_FUSED   fused_layers: two layers (C_IN -> F_N1 -> N_OUT channels)
//                whose intermediate map stays on chip.
// The input feature map arrives from the PCIe endpoint's DMA as a raster
// stream of C_IN-channel pixels (in_*); the chosen partition's output pixels
// (N_OUT channels) go through ofm_serializer and leave as LINK_W-bit beats
// (link_*), link_last on the final beat of a map. Weights are loaded through
// wt_*: wt_sel 0 = pointwise, 1 = GConv layer, 2 = fused layer 1, 3 = fused
// layer 2; each engine takes its weights in its own order, one per cycle.
// Timing: all streams are valid/ready. The serializer needs
// ceil(N_OUT*8/LINK_W) cycles per output pixel, so with the defaults the link
// is the bottleneck and the convolution engines stall on it. part_mode must
// only change between frames, when the last beat has left and no input pixel
// is pending. Offering the three partitions in one design behind a mode
// select is this design's choice; the partitions themselves, 8-bit fixed
// point and the 224x224x3 input with 64 filters of 5x5 follow the paper.
module dhm_fpga_top #(
  parameter int unsigned IMG_W  = 224,
  parameter int unsigned IMG_H  = 224,
  parameter int unsigned C_IN   = 3,
  parameter int unsigned N_OUT  = 64,
  parameter int unsigned K      = 5,
  parameter int unsigned STRIDE = 1,
  parameter int unsigned F_K1   = 3,
  parameter int unsigned F_N1   = 8,
  parameter int unsigned F_K2   = 3,
  parameter int unsigned LINK_W = 64
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  dhm_pkg::part_mode_e                  part_mode,
  // input feature map from the PCIe endpoint
  input  logic                                 in_valid,
  output logic                                 in_ready,
  input  logic [C_IN-1:0][dhm_pkg::DATA_W-1:0] in_pix,
  // output feature map to the PCIe endpoint
  output logic                                 link_valid,
  input  logic                                 link_ready,
  output logic [LINK_W-1:0]                    link_data,
  output logic                                 link_last,
  // weight load
  input  logic                                 wt_we,
  input  logic [1:0]                           wt_sel,
  input  logic [dhm_pkg::DATA_W-1:0]           wt_data
);
  import dhm_pkg::*;

  typedef logic [N_OUT-1:0][DATA_W-1:0] opix_t;

  logic  pw_in_ready, gc_in_ready, fu_in_ready;
  logic  pw_valid, gc_valid, fu_valid;
  logic  pw_last, gc_last, fu_last;
  opix_t pw_pix, gc_pix, fu_pix;
  logic  sel_valid, sel_ready, sel_last;
  opix_t sel_pix;

  pointwise_conv #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .C_IN(C_IN), .N(N_OUT)
  ) u_pw (
    .clk, .rst_n,
    .in_valid(in_valid && part_mode == PART_DWCONV), .in_ready(pw_in_ready),
    .in_pix,
    .out_valid(pw_valid), .out_ready(sel_ready && part_mode == PART_DWCONV),
    .out_pix(pw_pix), .out_last(pw_last),
    .wt_we(wt_we && wt_sel == 2'd0), .wt_data
  );

  dhm_conv #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .C_IN(C_IN), .K(K), .N(N_OUT),
    .STRIDE(STRIDE)
  ) u_gconv (
    .clk, .rst_n,
    .in_valid(in_valid && part_mode == PART_GCONV), .in_ready(gc_in_ready),
    .in_pix,
    .out_valid(gc_valid), .out_ready(sel_ready && part_mode == PART_GCONV),
    .out_pix(gc_pix), .out_last(gc_last),
    .wt_we(wt_we && wt_sel == 2'd1), .wt_data
  );

  fused_layers #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .C_IN(C_IN),
    .K1(F_K1), .N1(F_N1), .K2(F_K2), .N2(N_OUT)
  ) u_fused (
    .clk, .rst_n,
    .in_valid(in_valid && part_mode == PART_FUSED), .in_ready(fu_in_ready),
    .in_pix,
    .out_valid(fu_valid), .out_ready(sel_ready && part_mode == PART_FUSED),
    .out_pix(fu_pix), .out_last(fu_last),
    .wt_we(wt_we && wt_sel[1]), .wt_layer(wt_sel[0]), .wt_data
  );

  always_comb begin
    unique case (part_mode)
      PART_DWCONV: begin
        in_ready = pw_in_ready; sel_valid = pw_valid;
        sel_pix  = pw_pix;      sel_last  = pw_last;
      end
      PART_GCONV: begin
        in_ready = gc_in_ready; sel_valid = gc_valid;
        sel_pix  = gc_pix;      sel_last  = gc_last;
      end
      PART_FUSED: begin
        in_ready = fu_in_ready; sel_valid = fu_valid;
        sel_pix  = fu_pix;      sel_last  = fu_last;
      end
      default: begin
        in_ready = 1'b0; sel_valid = 1'b0;
        sel_pix  = '0;   sel_last  = 1'b0;
      end
    endcase
  end

  ofm_serializer #(.PIX_W(N_OUT * DATA_W), .LINK_W(LINK_W)) u_ser (
    .clk, .rst_n,
    .in_valid(sel_valid), .in_ready(sel_ready), .in_pix(sel_pix),
    .in_last(sel_last),
    .out_valid(link_valid), .out_ready(link_ready), .out_data(link_data),
    .out_last(link_last)
  );

endmodule
