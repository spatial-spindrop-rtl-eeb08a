// tb_cim_crossbar: writes random weights row by row through the word lines
// and checks the column counts (XNOR popcount over the active rows) for
// random word-line and input patterns against a reference copy.
module tb_cim_crossbar;
  localparam int ROWS = 27, COLS = 8, CW = $clog2(ROWS + 1);
  logic clk = 1'b0, we;
  logic [ROWS-1:0] wl, x;
  logic [COLS-1:0] wdata;
  logic [CW-1:0] col_cnt [COLS];
  logic [COLS-1:0] ref_w [ROWS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cim_crossbar #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .we, .wl, .wdata, .x, .col_cnt);

  initial begin
    we = 1'b0; wl = '0; x = '0; wdata = '0;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      wl = '0; wl[r] = 1'b1; we = 1'b1; wdata = COLS'($urandom);
      ref_w[r] = wdata;
      @(negedge clk);
    end
    we = 1'b0;
    for (int t = 0; t < 300; t++) begin
      wl = ROWS'({$urandom, $urandom});
      if (t % 3 == 0) wl = ROWS'(32'h1FF << (9 * (t % 3)));
      x = ROWS'({$urandom, $urandom});
      #1;
      for (int j = 0; j < COLS; j++) begin
        int e;
        e = 0;
        for (int r = 0; r < ROWS; r++) if (wl[r] && (x[r] == ref_w[r][j])) e++;
        checks++;
        if (int'(col_cnt[j]) != e) begin
          failures++;
          $display("FAIL: t=%0d col %0d got %0d exp %0d", t, j, col_cnt[j], e);
        end
      end
      @(negedge clk);
    end
    // a write with no word line active changes nothing
    wl = '0; we = 1'b1; wdata = '1;
    @(negedge clk);
    we = 1'b0; wl = '1; x = '1;
    #1;
    for (int j = 0; j < COLS; j++) begin
      int e;
      e = 0;
      for (int r = 0; r < ROWS; r++) if (ref_w[r][j]) e++;
      checks++;
      if (int'(col_cnt[j]) != e) begin
        failures++;
        $display("FAIL: write without word line changed column %0d", j);
      end
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
