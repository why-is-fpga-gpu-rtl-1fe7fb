// dhm_fpga_top_tb: end-to-end test of the FPGA side at small sizes.
//
// Loads the weights of all four layers, then sends one input map per
// partition in the order 1x1 (depth-wise partition), k x k (grouped
// partition), fused pair, and k x k again, switching part_mode between
// frames. The link is stalled at random. Output beats are reassembled into
// pixels and compared with reference maps computed here (valid convolution,
// round-half-up shift by 6, saturation). Counted and required at least once:
// input stalls, link stalls, mode switches and frame ends (link_last).
module dhm_fpga_top_tb;
  import dhm_pkg::*;
  localparam int W = 7, H = 6, C = 2, N = 4, K = 3, FK1 = 2, FN1 = 3, FK2 = 2, LW = 16;
  localparam int BEATS = N * 8 / LW;
  localparam int GW = W - K + 1, GH = H - K + 1;
  localparam int MW = W - FK1 + 1, MH = H - FK1 + 1, FW = MW - FK2 + 1, FH = MH - FK2 + 1;
  localparam int NWP = N * C, NWG = N * K * K * C, NW1 = FN1 * FK1 * FK1 * C, NW2 = N * FK2 * FK2 * FN1;
  localparam int RUNS = 4;

  logic clk = 0, rst_n = 0;
  part_mode_e part_mode = PART_DWCONV;
  logic in_valid = 0, in_ready, link_valid, link_ready = 0, link_last, wt_we = 0;
  logic [C-1:0][7:0] in_pix = '0;
  logic [LW-1:0] link_data;
  logic [1:0] wt_sel = 0;
  logic [7:0] wt_data = 0;

  logic signed [7:0] wp [NWP], wg [NWG], w1 [NW1], w2 [NW2];
  logic signed [7:0] img [RUNS][H][W][C];
  logic signed [7:0] mid [MH][MW][FN1];
  logic signed [7:0] expd [RUNS][H][W][N];
  int exp_w [RUNS], exp_h [RUNS];
  part_mode_e run_mode [RUNS];
  int checks = 0, failures = 0;
  int in_stalls = 0, link_stalls = 0, mode_switches = 0, frame_ends = 0;

  dhm_fpga_top #(
    .IMG_W(W), .IMG_H(H), .C_IN(C), .N_OUT(N), .K(K), .STRIDE(1),
    .F_K1(FK1), .F_N1(FN1), .F_K2(FK2), .LINK_W(LW)
  ) dut (.*);
  always #5 clk = ~clk;

  function automatic logic signed [7:0] q(input longint acc);
    longint r;
    r = (acc + 32) >>> 6;
    if (r > 127) return 8'sd127;
    if (r < -128) return -8'sd128;
    return 8'(r);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference maps
  initial begin
    longint acc;
    run_mode[0] = PART_DWCONV; run_mode[1] = PART_GCONV;
    run_mode[2] = PART_FUSED;  run_mode[3] = PART_GCONV;
    for (int i = 0; i < NWP; i++) wp[i] = 8'($urandom_range(255));
    for (int i = 0; i < NWG; i++) wg[i] = 8'($urandom_range(60) - 30);
    for (int i = 0; i < NW1; i++) w1[i] = 8'($urandom_range(80) - 40);
    for (int i = 0; i < NW2; i++) w2[i] = 8'($urandom_range(80) - 40);
    for (int f = 0; f < RUNS; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < C; c++)
        img[f][y][x][c] = 8'($urandom_range(255));
      case (run_mode[f])
        PART_DWCONV: begin
          exp_w[f] = W; exp_h[f] = H;
          for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int n = 0; n < N; n++) begin
            acc = 0;
            for (int c = 0; c < C; c++) acc += longint'(img[f][y][x][c]) * longint'(wp[n*C + c]);
            expd[f][y][x][n] = q(acc);
          end
        end
        PART_GCONV: begin
          exp_w[f] = GW; exp_h[f] = GH;
          for (int y = 0; y < GH; y++) for (int x = 0; x < GW; x++) for (int n = 0; n < N; n++) begin
            acc = 0;
            for (int r = 0; r < K; r++) for (int s = 0; s < K; s++) for (int c = 0; c < C; c++)
              acc += longint'(img[f][y+r][x+s][c]) * longint'(wg[((n*K + r)*K + s)*C + c]);
            expd[f][y][x][n] = q(acc);
          end
        end
        default: begin
          exp_w[f] = FW; exp_h[f] = FH;
          for (int y = 0; y < MH; y++) for (int x = 0; x < MW; x++) for (int n = 0; n < FN1; n++) begin
            acc = 0;
            for (int r = 0; r < FK1; r++) for (int s = 0; s < FK1; s++) for (int c = 0; c < C; c++)
              acc += longint'(img[f][y+r][x+s][c]) * longint'(w1[((n*FK1 + r)*FK1 + s)*C + c]);
            mid[y][x][n] = q(acc);
          end
          for (int y = 0; y < FH; y++) for (int x = 0; x < FW; x++) for (int n = 0; n < N; n++) begin
            acc = 0;
            for (int r = 0; r < FK2; r++) for (int s = 0; s < FK2; s++) for (int c = 0; c < FN1; c++)
              acc += longint'(mid[y+r][x+s][c]) * longint'(w2[((n*FK2 + r)*FK2 + s)*FN1 + c]);
            expd[f][y][x][n] = q(acc);
          end
        end
      endcase
    end
  end

  // Stimulus changes after a falling edge; handshakes are decided from the
  // values then, which hold until the next rising edge.
  int run_done = -1;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NWP; i++) begin wt_we = 1; wt_sel = 0; wt_data = wp[i]; @(negedge clk); end
    for (int i = 0; i < NWG; i++) begin wt_we = 1; wt_sel = 1; wt_data = wg[i]; @(negedge clk); end
    for (int i = 0; i < NW1; i++) begin wt_we = 1; wt_sel = 2; wt_data = w1[i]; @(negedge clk); end
    for (int i = 0; i < NW2; i++) begin wt_we = 1; wt_sel = 3; wt_data = w2[i]; @(negedge clk); end
    wt_we = 0;
    for (int f = 0; f < RUNS; f++) begin
      // a new partition is chosen only once the previous map has left
      wait (run_done == f - 1);
      @(negedge clk);
      if (part_mode != run_mode[f]) mode_switches++;
      part_mode = run_mode[f];
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          in_valid = ($urandom_range(5) != 0);
          for (int c = 0; c < C; c++) in_pix[c] = img[f][y][x][c];
          #1;
          while (!(in_valid && in_ready)) begin
            if (in_valid) in_stalls++;
            @(negedge clk); in_valid = 1; #1;
          end
          @(negedge clk);
        end
      in_valid = 0;
    end
  end

  // Link side: collect beats into pixels and compare.
  initial begin
    int f = 0, y = 0, x = 0, b = 0;
    logic [N*8-1:0] pix;
    wait (rst_n);
    while (f < RUNS) begin
      @(negedge clk);
      link_ready = ($urandom_range(2) != 0);
      #2;
      if (link_valid && !link_ready) link_stalls++;
      if (link_valid && link_ready) begin
        pix[b*LW +: LW] = link_data;
        checks++;
        if (link_last != (b == BEATS - 1 && y == exp_h[f] - 1 && x == exp_w[f] - 1)) begin
          failures++; $display("run %0d: link_last wrong at (%0d,%0d) beat %0d", f, y, x, b);
        end
        if (b == BEATS - 1) begin
          b = 0;
          for (int n = 0; n < N; n++) begin
            checks++;
            if ($signed(pix[n*8 +: 8]) != expd[f][y][x][n]) begin
              failures++;
              $display("run %0d (%0d,%0d) n%0d: got %0d expected %0d", f, y, x, n,
                       $signed(pix[n*8 +: 8]), expd[f][y][x][n]);
            end
          end
          if (x == exp_w[f] - 1) begin
            x = 0;
            if (y == exp_h[f] - 1) begin y = 0; frame_ends++; run_done = f; f++; end
            else y++;
          end else x++;
        end else b++;
      end
    end
    $display("input stalls %0d, link stalls %0d, mode switches %0d, frame ends %0d",
             in_stalls, link_stalls, mode_switches, frame_ends);
    checks += 4;
    if (in_stalls == 0)     begin failures++; $display("no input stall"); end
    if (link_stalls == 0)   begin failures++; $display("no link stall"); end
    if (mode_switches < 3)  begin failures++; $display("mode switches missing"); end
    if (frame_ends != RUNS) begin failures++; $display("frame ends missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
