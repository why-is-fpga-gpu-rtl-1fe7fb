// weight_store: on-chip store of every kernel weight of one layer.
//
// In direct hardware mapping the weights sit next to the multipliers and are
// never fetched from external memory during inference. This store is a
// register chain: each cycle with we high shifts one 8-bit weight in at the
// top (index NUM-1) and every stored weight down by one place, so after NUM
// writes the first weight written sits at index 0 and the last at NUM-1.
// All NUM weights are presented in parallel on w_all, one per multiplier.
// A write is visible on w_all the cycle after we is sampled. Reset clears
// all weights to zero. Loading weights through a port, and doing so as a
// shift chain rather than by address (which keeps the load logic linear in
// NUM), is this design's choice; the paper's mapping only requires that the
// weights be held on chip next to the logic.
module weight_store #(
  parameter int unsigned NUM = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                we,
  input  logic [dhm_pkg::DATA_W-1:0]          wdata,
  output logic [NUM-1:0][dhm_pkg::DATA_W-1:0] w_all
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  w_all <= '0;
    else if (we) w_all <= {wdata, w_all[NUM-1:1]};
  end

endmodule
