// dot_product: one filter of a directly mapped layer.
//
// LEN multipliers, one per (input value, weight) pair, feed an adder tree;
// the sum is requantised to 8 bits by dhm_pkg::requant (shift right by
// W_FRAC with rounding, then saturation). The block is purely
// combinational: a layer registers its inputs and reads res in the same
// cycle. Each layer instantiates one dot_product per output channel, so
// every filter has its own multipliers, as direct hardware mapping does.
module dot_product #(
  parameter int unsigned LEN    = 75,
  parameter int unsigned W_FRAC = dhm_pkg::W_FRAC
) (
  input  logic [LEN-1:0][dhm_pkg::DATA_W-1:0] a,
  input  logic [LEN-1:0][dhm_pkg::DATA_W-1:0] w,
  output logic [dhm_pkg::DATA_W-1:0]          res
);
  import dhm_pkg::*;

  acc_t prod [LEN];
  acc_t acc;

  always_comb begin
    for (int i = 0; i < LEN; i++)
      prod[i] = acc_t'(fx_t'(a[i])) * acc_t'(fx_t'(w[i]));
  end

  always_comb begin
    acc = '0;
    for (int i = 0; i < LEN; i++) acc += prod[i];
  end

  assign res = requant(acc, int'(W_FRAC));

endmodule
