// tb_mc_average: feeds groups of T = 4 random vectors with gaps and checks
// that avg_valid comes exactly after the 4th and that avg is the floor of
// the mean; checks that clear restarts the count.
module tb_mc_average;
  localparam int COLS = 6, IN_W = 8, LOG2_T = 2, T = 1 << LOG2_T;
  logic clk = 1'b0, rst_n, clear, in_valid, avg_valid;
  logic [IN_W-1:0] value [COLS];
  logic [IN_W-1:0] avg [COLS];
  logic [LOG2_T:0] count;
  int sum [COLS];
  int checks = 0, failures = 0, n = 0;

  always #5 clk = ~clk;

  mc_average #(.COLS(COLS), .IN_W(IN_W), .LOG2_T(LOG2_T)) dut (
    .clk, .rst_n, .clear, .in_valid, .value, .avg_valid, .avg, .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; in_valid = 1'b0;
    for (int j = 0; j < COLS; j++) begin value[j] = '0; sum[j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // a partial group, then clear
    in_valid = 1'b1;
    for (int j = 0; j < COLS; j++) value[j] = 8'hFF;
    repeat (2) @(negedge clk);
    in_valid = 1'b0; clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    check(count == 0 && !avg_valid, "clear restarts");
    for (int g = 0; g < 30; g++) begin
      for (int j = 0; j < COLS; j++) sum[j] = 0;
      for (int t = 0; t < T; t++) begin
        repeat ($urandom % 3) @(negedge clk);
        in_valid = 1'b1;
        for (int j = 0; j < COLS; j++) begin value[j] = IN_W'($urandom); sum[j] += int'(value[j]); end
        @(negedge clk);
        in_valid = 1'b0;
        check(avg_valid == (t == T - 1), "avg_valid after T inputs");
      end
      for (int j = 0; j < COLS; j++) check(int'(avg[j]) == sum[j] / T, "average value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
