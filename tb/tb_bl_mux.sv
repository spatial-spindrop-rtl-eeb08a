// tb_bl_mux: checks that every lane carries column lane*RATIO + sel for all
// settings of sel, with random column values.
module tb_bl_mux;
  localparam int COLS = 16, RATIO = 4, W = 6, LANES = COLS / RATIO;
  logic [W-1:0] col [COLS];
  logic [1:0] sel;
  logic [W-1:0] lane [LANES];
  int checks = 0, failures = 0;

  bl_mux #(.COLS(COLS), .RATIO(RATIO), .W(W)) dut (.col, .sel, .lane);

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int j = 0; j < COLS; j++) col[j] = W'($urandom);
      for (int s = 0; s < RATIO; s++) begin
        sel = 2'(s);
        #1;
        for (int a = 0; a < LANES; a++) begin
          checks++;
          if (lane[a] !== col[a * RATIO + s]) begin
            failures++;
            $display("FAIL: sel=%0d lane %0d", s, a);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
