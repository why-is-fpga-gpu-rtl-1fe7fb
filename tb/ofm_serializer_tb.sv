// ofm_serializer_tb: sends pixels of 20 bytes through ofm_serializer with a
// 64-bit link (3 beats, the last one zero-filled), with random gaps on both
// sides, and checks every beat against the expected slice, out_last on the
// final beat of a pixel sent with in_last only, that in_ready drops while a
// pixel is being sent, and that back-to-back pixels with an always-ready
// link take exactly 3 cycles each.
module ofm_serializer_tb;
  localparam int PIX_W = 160, LINK_W = 64, BEATS = 3, NPIX = 24;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  logic [PIX_W-1:0] in_pix = '0;
  logic [LINK_W-1:0] out_data;
  logic [PIX_W-1:0] pix [NPIX];
  int checks = 0, failures = 0, busy_seen = 0;

  ofm_serializer #(.PIX_W(PIX_W), .LINK_W(LINK_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPIX; p++)
      for (int b = 0; b < PIX_W / 32; b++) pix[p][b*32 +: 32] = $urandom;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int p = 0; p < NPIX; p++) begin
      in_valid <= (p >= NPIX / 2) || ($urandom_range(2) != 0);
      in_pix   <= pix[p];
      in_last  <= (p % 8 == 7);
      @(posedge clk);
      while (!(in_valid && in_ready)) begin in_valid <= 1; @(posedge clk); end
      in_valid <= 0;
    end
  end

  initial begin
    int p = 0, b = 0, first_fast = -1;
    logic [BEATS*LINK_W-1:0] wide;
    wait (rst_n);
    while (p < NPIX) begin
      out_ready <= (p >= NPIX / 2) || ($urandom_range(2) != 0);
      @(posedge clk);
      if (in_valid && !in_ready) busy_seen++;
      if (out_valid && out_ready) begin
        wide = (BEATS*LINK_W)'(pix[p]);
        checks++;
        if (out_data != wide[b*LINK_W +: LINK_W]) begin
          failures++; $display("pixel %0d beat %0d wrong", p, b);
        end
        checks++;
        if (out_last != (b == BEATS - 1 && p % 8 == 7)) begin
          failures++; $display("out_last wrong at pixel %0d beat %0d", p, b);
        end
        if (b == BEATS - 1) begin
          b = 0; p++;
          if (p == NPIX / 2 + 2) first_fast = $time;
          if (p == NPIX) begin
            checks++;
            if (($time - first_fast) != (NPIX / 2 - 2) * BEATS * 10) begin
              failures++; $display("rate: %0d time units for %0d pixels", $time - first_fast, NPIX / 2 - 2);
            end
          end
        end else b++;
      end
    end
    checks++;
    if (busy_seen == 0) begin failures++; $display("in_ready never dropped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
