// dhm_fpga_top_full_tb: one complete operation of dhm_fpga_top at its
// default sizes: the 5x5 convolution of the grouped-convolution partition,
// 64 filters over a 224 x 224 x 3 input map, output sent as 64-bit beats.
// All 4800 weights are loaded, the map is streamed in, and every output
// pixel (220 x 220 x 64 channels) is compared with a convolution computed
// here. The link is always ready, so the run also checks the rate: the
// serializer needs 8 cycles per output pixel, and the input stalls.
module dhm_fpga_top_full_tb;
  import dhm_pkg::*;
  localparam int W = 224, H = 224, C = 3, N = 64, K = 5, LW = 64;
  localparam int BEATS = N * 8 / LW, OW = W - K + 1, OH = H - K + 1, NW = N * K * K * C;

  logic clk = 0, rst_n = 0;
  part_mode_e part_mode = PART_GCONV;
  logic in_valid = 0, in_ready, link_valid, link_ready = 1, link_last, wt_we = 0;
  logic [C-1:0][7:0] in_pix = '0;
  logic [LW-1:0] link_data;
  logic [1:0] wt_sel = 2'd1;
  logic [7:0] wt_data = 0;
  logic signed [7:0] wg [NW];
  logic signed [7:0] img [H][W][C];
  int checks = 0, failures = 0, in_stalls = 0;
  longint t_first = 0, t_last = 0;

  dhm_fpga_top dut (.*);
  always #5 clk = ~clk;

  // Pixel values follow a fixed formula so the map needs no file.
  function automatic logic signed [7:0] pix_val(input int y, input int x, input int c);
    return 8'((y * 37 + x * 11 + c * 71 + (y * x) % 13) & 8'hff);
  endfunction

  function automatic logic signed [7:0] ref_pix(input int y, input int x, input int n);
    longint acc, r;
    acc = 0;
    for (int a = 0; a < K; a++) for (int b = 0; b < K; b++) for (int c = 0; c < C; c++)
      acc += longint'(img[y+a][x+b][c]) * longint'(wg[((n*K + a)*K + b)*C + c]);
    r = (acc + 32) >>> 6;
    if (r > 127) return 8'sd127;
    if (r < -128) return -8'sd128;
    return 8'(r);
  endfunction

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NW; i++) wg[i] = 8'($urandom_range(40) - 20);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < C; c++)
      img[y][x][c] = pix_val(y, x, c);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NW; i++) begin wt_we = 1; wt_data = wg[i]; @(negedge clk); end
    wt_we = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        in_valid = 1;
        for (int c = 0; c < C; c++) in_pix[c] = img[y][x][c];
        #1;
        while (!in_ready) begin in_stalls++; @(negedge clk); #1; end
        @(negedge clk);
      end
    in_valid = 0;
  end

  initial begin
    int y = 0, x = 0, b = 0, npix = 0;
    logic [N*8-1:0] pix;
    wait (rst_n);
    forever begin
      @(negedge clk);
      #2;
      if (link_valid) begin
        pix[b*LW +: LW] = link_data;
        if (b == BEATS - 1) begin
          b = 0;
          if (npix == 1) t_first = $time;
          for (int n = 0; n < N; n++) begin
            checks++;
            if ($signed(pix[n*8 +: 8]) != ref_pix(y, x, n)) begin
              failures++;
              if (failures < 10) $display("(%0d,%0d) n%0d: got %0d expected %0d", y, x, n,
                                          $signed(pix[n*8 +: 8]), ref_pix(y, x, n));
            end
          end
          checks++;
          if (link_last != (y == OH - 1 && x == OW - 1)) begin failures++; $display("link_last wrong"); end
          npix++;
          if (x == OW - 1) begin
            x = 0;
            if (y == OH - 1) break;
            y++;
          end else x++;
        end else b++;
      end
    end
    t_last = $time;
    // From the second pixel on, the link carries one pixel per BEATS cycles
    // except where a row change leaves the engine without a window for
    // K-1 pixels; those gaps are hidden behind the serializer, so the
    // pixels arrive exactly BEATS cycles apart.
    checks++;
    if ((t_last - t_first) / 10 != longint'(OW * OH - 2) * BEATS) begin
      failures++;
      $display("rate: %0d cycles for %0d pixels", (t_last - t_first) / 10, OW * OH - 2);
    end
    checks++;
    if (in_stalls == 0) begin failures++; $display("input never stalled"); end
    $display("output pixels %0d, input stalls %0d", npix, in_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
