// dhm_conv_tb: runs two frames through small dhm_conv layers, one with
// stride 1 and one with stride 2, with random input gaps and random output
// stalls. Every output pixel is compared with a convolution computed here
// from the same map and weights (valid convolution, round-half-up shift by
// 6 bits, saturation to 8 bits). Also checked: the number of output pixels
// per frame, out_last on exactly the last one, that an output held under a
// stall does not change, and the one-cycle latency from taking a pixel to
// its output when nothing stalls.
module dhm_conv_tb;
  localparam int W = 8, H = 7, C = 2, K = 3, N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int done;
  dhm_conv_tb_run #(.W(W), .H(H), .C(C), .K(K), .N(N), .S(1)) u_s1 (.clk, .rst_n, .checks, .failures, .done);
  int done2;
  int checks2, failures2;
  dhm_conv_tb_run #(.W(9), .H(9), .C(1), .K(3), .N(3), .S(2)) u_s2 (.clk, .rst_n, .checks(checks2), .failures(failures2), .done(done2));

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    wait (done == 1 && done2 == 1);
    checks += checks2;
    failures += failures2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
