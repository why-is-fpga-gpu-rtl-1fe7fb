// window_extractor: line buffers and sliding k x k window over a pixel stream.
//
// The input feature map arrives one pixel (all C channels) per accepted
// cycle, in raster order, row after row of IMG_W pixels. K-1 line buffers
// keep the previous K-1 rows on chip, so the feature map is never stored off
// chip; together with the newest pixel they supply one K-tall column per
// pixel, and a K x K register window shifts that column in. After the shift
// on which pixel (row y, column x) is taken, win holds rows y-K+1..y and
// columns x-K+1..x of the map: win[0][0] is the oldest (top-left) pixel,
// win[K-1][K-1] the newest. Window contents are only meaningful where
// y >= K-1 and x >= K-1; the user of the window decides which positions to
// keep. Timing: shift is the accept strobe of the stream; win changes the
// cycle after shift is sampled and holds otherwise. The line buffers are
// arrays written and read at the same column, oldest row first. The stream
// framing (raster order, no gaps in a row) follows the streaming data flow of
// direct hardware mapping; the buffer organisation is this design's own.
// The column counter is reset by rst_n; the buffers and window are not,
// since no value written before a frame's first K-1 rows reaches a kept
// window position.
module window_extractor #(
  parameter int unsigned IMG_W = 224,
  parameter int unsigned K     = 5,
  parameter int unsigned C     = 3
) (
  input  logic                                           clk,
  input  logic                                           rst_n,
  input  logic                                           shift,
  input  logic [C-1:0][dhm_pkg::DATA_W-1:0]              in_pix,
  output logic [K-1:0][K-1:0][C-1:0][dhm_pkg::DATA_W-1:0] win
);

  localparam int unsigned COL_W = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  typedef logic [C-1:0][dhm_pkg::DATA_W-1:0] pix_t;

  logic [COL_W-1:0] col;
  pix_t             column [K];   // column entering the window, row 0 oldest

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    col <= '0;
    else if (shift && col == COL_W'(IMG_W - 1)) col <= '0;
    else if (shift)                col <= col + 1'b1;
  end

  generate
    if (K > 1) begin : g_lines
      pix_t lines [K-1][IMG_W];   // lines[0] oldest row, lines[K-2] previous row

      always_comb begin
        for (int r = 0; r < K - 1; r++) column[r] = lines[r][col];
        column[K-1] = in_pix;
      end

      always_ff @(posedge clk) begin
        if (shift) begin
          for (int r = 0; r < K - 2; r++) lines[r][col] <= lines[r+1][col];
          lines[K-2][col] <= in_pix;
        end
      end
    end else begin : g_nolines
      always_comb column[0] = in_pix;
    end
  endgenerate

  always_ff @(posedge clk) begin
    if (shift) begin
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < K - 1; c++) win[r][c] <= win[r][c+1];
        win[r][K-1] <= column[r];
      end
    end
  end

endmodule
