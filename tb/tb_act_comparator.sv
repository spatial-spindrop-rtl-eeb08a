// tb_act_comparator: programs random thresholds and checks act = acc >= thr
// per column for random sums, including the equal case.
module tb_act_comparator;
  localparam int COLS = 8, ACC_W = 6;
  logic clk = 1'b0, rst_n, thr_we;
  logic [2:0] thr_col;
  logic [ACC_W-1:0] thr_data;
  logic [ACC_W-1:0] acc [COLS];
  logic [COLS-1:0] act;
  int ref_thr [COLS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  act_comparator #(.COLS(COLS), .ACC_W(ACC_W)) dut (.clk, .rst_n, .thr_we, .thr_col, .thr_data, .acc, .act);

  initial begin
    rst_n = 1'b0; thr_we = 1'b0; thr_col = '0; thr_data = '0;
    for (int j = 0; j < COLS; j++) begin acc[j] = '0; ref_thr[j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < COLS; j++) begin
      thr_we = 1'b1; thr_col = 3'(j); thr_data = ACC_W'($urandom);
      ref_thr[j] = int'(thr_data);
      @(negedge clk);
    end
    thr_we = 1'b0;
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < COLS; j++) acc[j] = (t % 4 == 0) ? ACC_W'(ref_thr[j]) : ACC_W'($urandom);
      #1;
      for (int j = 0; j < COLS; j++) begin
        checks++;
        if (act[j] != (int'(acc[j]) >= ref_thr[j])) begin
          failures++;
          $display("FAIL: col %0d acc %0d thr %0d act %b", j, acc[j], ref_thr[j], act[j]);
        end
      end
      @(negedge clk);
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
