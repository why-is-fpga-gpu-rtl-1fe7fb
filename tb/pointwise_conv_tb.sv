// pointwise_conv_tb: streams two frames of a 4 x 3 map with 5 channels
// through pointwise_conv (N = 6) with random input gaps and output stalls,
// and compares each output pixel with 1x1 dot products computed here
// (round-half-up shift by 6 bits, saturation). Large weights make some
// outputs saturate. Also checks out_last on the last pixel of each frame
// only, and that a stalled output holds.
module pointwise_conv_tb;
  localparam int W = 4, H = 3, C = 5, N = 6, FRAMES = 2, NPIX = W * H;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, wt_we = 0;
  logic [C-1:0][7:0] in_pix = '0;
  logic [N-1:0][7:0] out_pix;
  logic [7:0] wt_data = 0;
  logic signed [7:0] wts [N*C];
  logic signed [7:0] img [FRAMES*NPIX][C];
  int checks = 0, failures = 0;

  pointwise_conv #(.IMG_W(W), .IMG_H(H), .C_IN(C), .N(N)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic signed [7:0] ref_pix(input int p, input int n);
    longint acc = 0, r;
    for (int ch = 0; ch < C; ch++) acc += longint'(img[p][ch]) * longint'(wts[n*C + ch]);
    r = (acc + 32) >>> 6;
    if (r > 127) return 8'sd127;
    if (r < -128) return -8'sd128;
    return 8'(r);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N*C; i++) wts[i] = 8'($urandom_range(255));
    for (int p = 0; p < FRAMES*NPIX; p++)
      for (int ch = 0; ch < C; ch++) img[p][ch] = 8'($urandom_range(255));
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < N*C; i++) begin
      wt_we <= 1; wt_data <= wts[i]; @(posedge clk);
    end
    wt_we <= 0;
    for (int p = 0; p < FRAMES*NPIX; p++) begin
      in_valid <= ($urandom_range(3) != 0);
      for (int ch = 0; ch < C; ch++) in_pix[ch] <= img[p][ch];
      @(posedge clk);
      while (!(in_valid && in_ready)) begin in_valid <= 1; @(posedge clk); end
      in_valid <= 0;
    end
  end

  initial begin
    int p = 0;
    logic stalled = 0;
    logic [N-1:0][7:0] held;
    wait (rst_n);
    while (p < FRAMES*NPIX) begin
      out_ready <= ($urandom_range(2) != 0);
      @(posedge clk);
      if (stalled) begin
        checks++;
        if (!out_valid || out_pix != held) begin failures++; $display("output changed under stall"); end
      end
      stalled = out_valid && !out_ready;
      held = out_pix;
      if (out_valid && out_ready) begin
        for (int n = 0; n < N; n++) begin
          checks++;
          if ($signed(out_pix[n]) != ref_pix(p, n)) begin
            failures++;
            $display("pixel %0d n%0d: got %0d expected %0d", p, n, $signed(out_pix[n]), ref_pix(p, n));
          end
        end
        checks++;
        if (out_last != (p % NPIX == NPIX - 1)) begin failures++; $display("out_last wrong at %0d", p); end
        p++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
