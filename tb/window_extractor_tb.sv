// window_extractor_tb: streams a 3-channel map through window_extractor
// (IMG_W = 7, K = 3) with random gaps between pixels, and after every shift
// compares the whole window, at positions where it is complete, with the
// pixels a reference frame buffer says it must hold. Pixel values encode
// (frame, row, column, channel), so a misplaced pixel is caught.
module window_extractor_tb;
  localparam int W = 7, H = 6, K = 3, C = 3;
  logic clk = 0, rst_n = 0, shift = 0;
  logic [C-1:0][7:0] in_pix;
  logic [K-1:0][K-1:0][C-1:0][7:0] win;
  int checks = 0, failures = 0;
  logic [7:0] ref_map [H][W][C];

  window_extractor #(.IMG_W(W), .K(K), .C(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          while ($urandom_range(3) == 0) @(posedge clk);
          for (int ch = 0; ch < C; ch++) begin
            ref_map[y][x][ch] = 8'((f * 97 + y * 29 + x * 5 + ch * 61) & 8'hff);
            in_pix[ch] <= ref_map[y][x][ch];
          end
          shift <= 1;
          @(posedge clk);
          shift <= 0;
          #1;
          if (y >= K - 1 && x >= K - 1) begin
            checks++;
            for (int r = 0; r < K; r++)
              for (int c = 0; c < K; c++)
                for (int ch = 0; ch < C; ch++)
                  if (win[r][c][ch] != ref_map[y-K+1+r][x-K+1+c][ch]) begin
                    failures++;
                    $display("mismatch f%0d y%0d x%0d r%0d c%0d ch%0d", f, y, x, r, c, ch);
                  end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
