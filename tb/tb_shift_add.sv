// tb_shift_add: random accumulation sequences with random mux settings and
// shifts, checked against a reference per column; clear and reset zero all.
module tb_shift_add;
  localparam int COLS = 12, RATIO = 3, IN_W = 4, ACC_W = 14, LANES = COLS / RATIO;
  logic clk = 1'b0, rst_n, clear, en;
  logic [1:0] sel;
  logic [2:0] shift;
  logic [IN_W-1:0] lane [LANES];
  logic [ACC_W-1:0] acc [COLS];
  int unsigned ref_acc [COLS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shift_add #(.COLS(COLS), .RATIO(RATIO), .IN_W(IN_W), .ACC_W(ACC_W)) dut (
    .clk, .rst_n, .clear, .en, .sel, .shift, .lane, .acc);

  task automatic compare(input string what);
    for (int j = 0; j < COLS; j++) begin
      checks++;
      if (int'(acc[j]) != int'(ref_acc[j] % (1 << ACC_W))) begin
        failures++;
        $display("FAIL %s: col %0d got %0d exp %0d", what, j, acc[j], ref_acc[j]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; en = 1'b0; sel = '0; shift = '0;
    for (int a = 0; a < LANES; a++) lane[a] = '0;
    for (int j = 0; j < COLS; j++) ref_acc[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    compare("reset");
    for (int t = 0; t < 400; t++) begin
      en = ($urandom % 4) != 0;
      clear = ($urandom % 50) == 0;
      sel = 2'($urandom % RATIO);
      shift = (t < 200) ? 3'd0 : 3'($urandom % 3);
      for (int a = 0; a < LANES; a++) lane[a] = IN_W'($urandom);
      @(negedge clk);
      if (clear) for (int j = 0; j < COLS; j++) ref_acc[j] = 0;
      else if (en) for (int a = 0; a < LANES; a++)
        ref_acc[a * RATIO + sel] += int'(lane[a]) << shift;
      compare("step");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
