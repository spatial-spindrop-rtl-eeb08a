// tb_wl_decoder: exhaustive check of single-row and group decoding for a
// 36-row decoder with groups of 9, and of the disabled decoder.
module tb_wl_decoder;
  localparam int ROWS = 36, G = 9, AW = $clog2(ROWS);
  logic en, group_mode;
  logic [AW-1:0] addr;
  logic [ROWS-1:0] wl, exp_wl;
  int checks = 0, failures = 0;

  wl_decoder #(.ROWS(ROWS), .GROUP(G)) dut (.en, .group_mode, .addr, .wl);

  initial begin
    for (int m = 0; m < 2; m++) begin
      for (int a = 0; a < ROWS; a++) begin
        for (int e = 0; e < 2; e++) begin
          en = e[0]; group_mode = m[0]; addr = AW'(a);
          #1;
          exp_wl = '0;
          if (e == 1) begin
            if (m == 0) exp_wl[a] = 1'b1;
            else if (a < ROWS / G) for (int r = a * G; r < a * G + G; r++) exp_wl[r] = 1'b1;
          end
          checks++;
          if (wl !== exp_wl) begin
            failures++;
            $display("FAIL: en=%0d mode=%0d addr=%0d wl=%h exp=%h", e, m, a, wl, exp_wl);
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
