// fused_layers_tb: streams two frames through a small fused pair of layers
// (7 x 6 x 2 map, layer 1 3x3 -> 3 channels, layer 2 2x2 -> 4 channels) with
// random input gaps and output stalls. The expected output is computed here
// layer by layer: layer 1's full map, requantised, then layer 2 over it.
// Checks every output channel, the pixel count, out_last, and that a stall
// on the output reaches the input (in_ready drops).
module fused_layers_tb;
  localparam int W = 7, H = 6, C = 2, K1 = 3, N1 = 3, K2 = 2, N2 = 4, FRAMES = 2;
  localparam int MW = W - K1 + 1, MH = H - K1 + 1, OW = MW - K2 + 1, OH = MH - K2 + 1;
  localparam int NW1 = N1 * K1 * K1 * C, NW2 = N2 * K2 * K2 * N1;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, wt_we = 0, wt_layer = 0;
  logic [C-1:0][7:0] in_pix = '0;
  logic [N2-1:0][7:0] out_pix;
  logic [7:0] wt_data = 0;
  logic signed [7:0] w1 [NW1], w2 [NW2];
  logic signed [7:0] img [FRAMES][H][W][C], mid [FRAMES][MH][MW][N1], expd [FRAMES][OH][OW][N2];
  int checks = 0, failures = 0, stalls = 0;

  fused_layers #(.IMG_W(W), .IMG_H(H), .C_IN(C), .K1(K1), .N1(N1), .K2(K2), .N2(N2)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic signed [7:0] q(input longint acc);
    longint r = (acc + 32) >>> 6;
    if (r > 127) return 8'sd127;
    if (r < -128) return -8'sd128;
    return 8'(r);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NW1; i++) w1[i] = 8'($urandom_range(255));
    for (int i = 0; i < NW2; i++) w2[i] = 8'($urandom_range(255));
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < C; c++)
        img[f][y][x][c] = 8'($urandom_range(255));
      for (int y = 0; y < MH; y++) for (int x = 0; x < MW; x++) for (int n = 0; n < N1; n++) begin
        longint acc;
        acc = 0;
        for (int r = 0; r < K1; r++) for (int c = 0; c < K1; c++) for (int ch = 0; ch < C; ch++)
          acc += longint'(img[f][y+r][x+c][ch]) * longint'(w1[((n*K1 + r)*K1 + c)*C + ch]);
        mid[f][y][x][n] = q(acc);
      end
      for (int y = 0; y < OH; y++) for (int x = 0; x < OW; x++) for (int n = 0; n < N2; n++) begin
        longint acc;
        acc = 0;
        for (int r = 0; r < K2; r++) for (int c = 0; c < K2; c++) for (int ch = 0; ch < N1; ch++)
          acc += longint'(mid[f][y+r][x+c][ch]) * longint'(w2[((n*K2 + r)*K2 + c)*N1 + ch]);
        expd[f][y][x][n] = q(acc);
      end
    end
    // Stimulus changes after a falling edge; handshakes are decided from
    // values sampled then, stable until the next rising edge.
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NW1; i++) begin @(negedge clk); wt_we = 1; wt_layer = 0; wt_data = w1[i]; end
    for (int i = 0; i < NW2; i++) begin @(negedge clk); wt_we = 1; wt_layer = 1; wt_data = w2[i]; end
    @(negedge clk);
    wt_we = 0;
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          in_valid = ($urandom_range(4) != 0);
          for (int c = 0; c < C; c++) in_pix[c] = img[f][y][x][c];
          #1;
          while (!(in_valid && in_ready)) begin
            if (in_valid) stalls++;
            @(negedge clk); in_valid = 1; #1;
          end
          @(negedge clk);
        end
    in_valid = 0;
  end

  initial begin
    int f = 0, y = 0, x = 0;
    wait (rst_n);
    while (f < FRAMES) begin
      @(negedge clk);
      out_ready = ($urandom_range(3) == 0);
      #2;
      if (out_valid && out_ready) begin
        for (int n = 0; n < N2; n++) begin
          checks++;
          if ($signed(out_pix[n]) != expd[f][y][x][n]) begin
            failures++;
            $display("f%0d (%0d,%0d) n%0d: got %0d expected %0d", f, y, x, n, $signed(out_pix[n]), expd[f][y][x][n]);
          end
        end
        checks++;
        if (out_last != (y == OH - 1 && x == OW - 1)) begin failures++; $display("out_last wrong"); end
        if (x == OW - 1) begin x = 0; if (y == OH - 1) begin y = 0; f++; end else y++; end
        else x++;
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall reached the input"); end
    $display("input stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
