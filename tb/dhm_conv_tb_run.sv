// dhm_conv_tb_run: drives one dhm_conv instance for dhm_conv_tb and checks
// its output stream against a reference convolution (see dhm_conv_tb).
module dhm_conv_tb_run #(
  parameter int W = 8, parameter int H = 7, parameter int C = 2,
  parameter int K = 3, parameter int N = 4, parameter int S = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   done
);
  localparam int OW = (W - K) / S + 1, OH = (H - K) / S + 1, NW = N * K * K * C;
  localparam int FRAMES = 2;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, wt_we = 0;
  logic [C-1:0][7:0] in_pix = '0;
  logic [N-1:0][7:0] out_pix;
  logic [7:0] wt_data = 0;
  logic signed [7:0] wts [NW];
  logic signed [7:0] img [FRAMES][H][W][C];

  dhm_conv #(.IMG_W(W), .IMG_H(H), .C_IN(C), .K(K), .N(N), .STRIDE(S)) dut (.*);

  function automatic logic signed [7:0] ref_q(input longint acc);
    longint r;
    r = (acc + 32) >>> 6;
    if (r > 127) return 8'sd127;
    if (r < -128) return -8'sd128;
    return 8'(r);
  endfunction

  function automatic logic signed [7:0] ref_pix(input int f, input int oy, input int ox, input int n);
    longint acc = 0;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++)
        for (int ch = 0; ch < C; ch++)
          acc += longint'(img[f][oy*S + r][ox*S + c][ch]) *
                 longint'(wts[((n*K + r)*K + c)*C + ch]);
    return ref_q(acc);
  endfunction

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int i = 0; i < NW; i++) wts[i] = 8'($urandom_range(255));
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int ch = 0; ch < C; ch++)
            img[f][y][x][ch] = 8'($urandom_range(255));
  end

  // All stimulus changes just after a falling edge and every handshake is
  // decided from values sampled then, stable until the next rising edge.
  // driver: load weights, then stream the frames with random gaps
  initial begin
    wait (rst_n);
    for (int i = 0; i < NW; i++) begin
      @(negedge clk);
      wt_we = 1; wt_data = wts[i];
    end
    @(negedge clk);
    wt_we = 0;
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          in_valid = ($urandom_range(4) != 0);
          for (int ch = 0; ch < C; ch++) in_pix[ch] = img[f][y][x][ch];
          #1;
          while (!(in_valid && in_ready)) begin
            @(negedge clk);
            in_valid = 1;
            #1;
          end
          @(negedge clk);
        end
    in_valid = 0;
  end

  // monitor: random stalls in frame 0, none in frame 1; in frame 1 every
  // pixel taken at a kept position must show its output one cycle later
  initial begin
    int f = 0, oy = 0, ox = 0, ty = 0, tx = 0, tf = 0;
    logic [N-1:0][7:0] held;
    logic was_stalled = 0, pending = 0;
    wait (rst_n);
    while (f < FRAMES) begin
      @(negedge clk);
      out_ready = (f == 1) ? 1'b1 : ($urandom_range(2) != 0);
      #2;
      if (pending) begin
        checks++;
        if (!out_valid) begin failures++; $display("S%0d: latency is not one cycle", S); end
      end
      pending = 0;
      if (in_valid && in_ready) begin
        pending = (tf == 1 && ty >= K - 1 && tx >= K - 1 &&
                   (ty - K + 1) % S == 0 && (tx - K + 1) % S == 0);
        if (tx == W - 1) begin
          tx = 0;
          if (ty == H - 1) begin ty = 0; tf++; end else ty++;
        end else tx++;
      end
      if (was_stalled) begin
        checks++;
        if (!out_valid || out_pix != held) begin
          failures++; $display("S%0d: output changed under stall", S);
        end
      end
      was_stalled = out_valid && !out_ready;
      held = out_pix;
      if (out_valid && out_ready) begin
        for (int n = 0; n < N; n++) begin
          checks++;
          if ($signed(out_pix[n]) != ref_pix(f, oy, ox, n)) begin
            failures++;
            $display("S%0d f%0d (%0d,%0d) n%0d: got %0d expected %0d", S, f, oy, ox, n,
                     $signed(out_pix[n]), ref_pix(f, oy, ox, n));
          end
        end
        checks++;
        if (out_last != (oy == OH - 1 && ox == OW - 1)) begin
          failures++; $display("S%0d: out_last wrong at (%0d,%0d)", S, oy, ox);
        end
        if (ox == OW - 1) begin
          ox = 0;
          if (oy == OH - 1) begin oy = 0; f++; end
          else oy++;
        end else ox++;
      end
    end
    done = 1;
  end
endmodule
