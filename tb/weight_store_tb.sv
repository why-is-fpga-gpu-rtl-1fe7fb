// weight_store_tb: shifts NUM random weights into weight_store, with idle
// cycles in between, and checks that w_all holds the first weight written at
// index 0 and the last at NUM-1; then checks that idle cycles change nothing,
// that a further write shifts by one place, and that reset clears the store.
module weight_store_tb;
  localparam int NUM = 12;
  logic clk = 0, rst_n = 0, we = 0;
  logic [7:0] wdata = 0;
  logic [NUM-1:0][7:0] w_all;
  logic [7:0] exp_w [NUM];
  int checks = 0, failures = 0;

  weight_store #(.NUM(NUM)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input int i, input logic [7:0] e);
    checks++;
    if (w_all[i] !== e) begin
      failures++;
      $display("%s: w_all[%0d]=%0h expected %0h", what, i, w_all[i], e);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Inputs change on the falling edge, outputs are checked before the next
  // rising edge.
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NUM; i++) check("reset", i, 8'h00);
    for (int i = 0; i < NUM; i++) begin
      exp_w[i] = 8'($urandom);
      wdata = exp_w[i];
      we    = 1;
      @(negedge clk);
      we    = 0;
      repeat ($urandom_range(2)) @(negedge clk);
    end
    for (int i = 0; i < NUM; i++) check("load", i, exp_w[i]);
    repeat (3) @(negedge clk);
    for (int i = 0; i < NUM; i++) check("hold", i, exp_w[i]);
    wdata = 8'h5a; we = 1;
    @(negedge clk);
    we = 0;
    for (int i = 0; i < NUM - 1; i++) check("shift", i, exp_w[i+1]);
    check("shift", NUM - 1, 8'h5a);
    rst_n = 0;
    #1;
    for (int i = 0; i < NUM; i++) check("clear", i, 8'h00);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
