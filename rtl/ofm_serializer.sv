// ofm_serializer: cuts wide output pixels into link-width beats.
//
// A layer produces all N channels of an output pixel at once (PIX_W bits),
// far wider than the data path of the PCIe endpoint that carries the output
// feature map to the GPU. This block holds one pixel and sends it as
// BEATS = ceil(PIX_W / LINK_W) beats of LINK_W bits, least significant
// bits (lowest channels) first; the last beat is zero-filled above PIX_W.
// out_last is set on the final beat of a pixel that came with in_last,
// marking the end of the feature map for the DMA.
// Interface: valid/ready streams. in_ready is high when no pixel is held or
// when the held pixel's final beat is being taken, so back-to-back pixels
// flow without a gap; while a pixel is still being sent, in_ready is low and
// the layers upstream stall. Throughput is one pixel per BEATS cycles.
// The link speed limit is the paper's observation; the beat order, zero
// fill and handshake are this design's choices.
module ofm_serializer #(
  parameter int unsigned PIX_W  = 512,
  parameter int unsigned LINK_W = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [PIX_W-1:0]  in_pix,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [LINK_W-1:0] out_data,
  output logic              out_last
);

  localparam int unsigned BEATS = (PIX_W + LINK_W - 1) / LINK_W;
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic [BEATS*LINK_W-1:0] pix_q;
  logic                    last_q;
  logic [BW-1:0]           beat;
  logic                    final_beat, take;

  assign final_beat = (32'(beat) == BEATS - 1);
  assign in_ready   = !out_valid || (out_ready && final_beat);
  assign take       = in_valid && in_ready;
  assign out_data   = pix_q[beat*LINK_W +: LINK_W];
  assign out_last   = out_valid && last_q && final_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_q     <= '0;
      last_q    <= 1'b0;
      beat      <= '0;
      out_valid <= 1'b0;
    end else if (take) begin
      pix_q     <= (BEATS*LINK_W)'(in_pix);
      last_q    <= in_last;
      beat      <= '0;
      out_valid <= 1'b1;
    end else if (out_valid && out_ready) begin
      if (final_beat) out_valid <= 1'b0;
      else            beat      <= beat + 1'b1;
    end
  end

  // A beat on offer is not withdrawn before it is taken.
  logic             hold_valid;
  logic [LINK_W-1:0] hold_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_valid <= 1'b0;
      hold_data  <= '0;
    end else begin
      hold_valid <= out_valid && !out_ready;
      hold_data  <= out_data;
      if (hold_valid)
        assert (out_valid && out_data == hold_data)
          else $error("ofm_serializer: beat withdrawn or changed while stalled");
    end
  end

endmodule
