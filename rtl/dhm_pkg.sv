// dhm_pkg: types, constants and the fixed-point requantisation shared by the
// directly mapped CNN layers.
//
// All feature maps and weights are 8-bit two's-complement fixed point, the
// precision the design is built around. Weights carry W_FRAC fractional bits;
// a layer's accumulator is therefore shifted right by W_FRAC (round half up)
// and saturated to 8 bits, so every feature map keeps one format from layer to
// layer. The fraction count and the rounding rule are this design's choice.
package dhm_pkg;

  parameter int unsigned DATA_W = 8;   // feature map and weight width
  parameter int unsigned W_FRAC = 6;   // fractional bits of a weight
  parameter int unsigned ACC_W  = 32;  // accumulator width

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Which FPGA partition of a CNN module the top runs.
  typedef enum logic [1:0] {
    PART_DWCONV = 2'd0,  // 1x1 half of a depth-wise separable convolution
    PART_GCONV  = 2'd1,  // k x k convolution on the FPGA's g_l channels
    PART_FUSED  = 2'd2   // two fused layers, intermediate map kept on chip
  } part_mode_e;

  // Round half up, shift right by frac bits, saturate to DATA_W bits.
  function automatic fx_t requant(input acc_t acc, input int frac);
    acc_t r;
    if (frac > 0) r = (acc + (acc_t'(1) <<< (frac - 1))) >>> frac;
    else          r = acc;
    if (r > acc_t'(127))       return fx_t'(8'sd127);
    else if (r < acc_t'(-128)) return fx_t'(-8'sd128);
    else                       return fx_t'(r[DATA_W-1:0]);
  endfunction

endpackage
