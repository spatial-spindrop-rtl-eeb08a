// tb_spatial_spindrop_cim_full: the layer at its default size (mapping
// strategy 1, C_in = 256, K = 3, C_out = 512, 2304 x 512 array), taken
// through one complete operation: all 2304 weight rows and 512 thresholds
// are written, then a Bayesian run of N = 3 input cycles with the spatial
// mask drawn in the first cycle and held, then one deterministic input
// cycle. All 512 column sums and activations are compared with a reference
// computed from the weights, inputs and the mask shown on keep_mask, the
// cycles per input cycle are checked, and the drop rate must be plausible
// for p = 15 % over 256 feature maps.
module tb_spatial_spindrop_cim_full;
  localparam int K = 3, KK = 9, CI = 256, CO = 512, R = 4, LOG2_T = 4;
  localparam int ROWS = KK * CI, RW = $clog2(ROWS), ACC_W = $clog2(ROWS + 1);
  localparam int SAMPLE_LAT = 15;

  logic clk = 1'b0, rst_n;
  logic w_we, thr_we, start, drop_en, resample_each, avg_en, in_valid, in_ready;
  logic [RW-1:0] w_row;
  logic [CO-1:0] w_data;
  logic [$clog2(CO)-1:0] thr_col;
  logic [ACC_W-1:0] thr_data;
  logic [15:0] n_cycles, cycle_idx;
  logic [CI-1:0] module_en, keep_mask;
  logic [ROWS-1:0] x;
  logic out_valid, done, busy, avg_valid, adc_sat;
  logic [CO-1:0] out_act;
  logic [ACC_W-1:0] out_sum [CO];
  logic [ACC_W-1:0] avg_sum [CO];
  logic [LOG2_T:0] avg_count;

  always #5 clk = ~clk;

  spatial_spindrop_cim dut (
    .clk, .rst_n, .w_we, .w_row, .w_data, .thr_we, .thr_col, .thr_data,
    .start, .n_cycles, .drop_en, .resample_each, .avg_en, .module_en,
    .in_valid, .in_ready, .x, .out_valid, .out_act, .out_sum, .done, .busy,
    .cycle_idx, .avg_valid, .avg_sum, .avg_count, .keep_mask, .adc_sat
  );

  logic [CO-1:0] wt [ROWS];
  int thr [CO];
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  task automatic run(input int n, input bit drop);
    logic [CI-1:0] first_mask;
    n_cycles = 16'(n); drop_en = drop; resample_each = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int c = 0; c < n; c++) begin
      int cyc, kept;
      for (int r = 0; r < ROWS; r++) x[r] = ($urandom & 1) != 0;
      while (!in_ready) @(negedge clk);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      cyc = 1;
      while (!out_valid) begin
        @(negedge clk);
        cyc++;
      end
      check(cyc == CI * R + 1 + ((drop && c == 0) ? SAMPLE_LAT + 2 : 0), "cycles per input cycle");
      for (int j = 0; j < CO; j++) begin
        int e, g;
        e = 0;
        for (int ch = 0; ch < CI; ch++) begin
          if (drop && !keep_mask[ch]) continue;
          g = 0;
          for (int k = 0; k < KK; k++) if (x[ch*KK + k] == wt[ch*KK + k][j]) g++;
          e += g;
        end
        check(int'(out_sum[j]) == e, "column sum");
        check(out_act[j] == (e >= thr[j]), "activation");
      end
      check(!adc_sat, "no ADC saturation with 4-bit ADC and 9-row groups");
      check(done == (c == n - 1), "done on last cycle");
      if (drop) begin
        kept = $countones(keep_mask);
        if (c == 0) begin
          first_mask = keep_mask;
          $display("feature maps dropped: %0d of %0d", CI - kept, CI);
          // 15 % of 256 = 38.4, sigma = 5.7
          check(CI - kept > 15 && CI - kept < 62, "drop rate near 15 %");
        end else begin
          check(keep_mask == first_mask, "mask held over the N input cycles");
        end
      end
      @(negedge clk);
    end
    check(!busy, "idle after run");
  endtask

  initial begin
    rst_n = 1'b0; w_we = 1'b0; thr_we = 1'b0; start = 1'b0; drop_en = 1'b0;
    resample_each = 1'b0; avg_en = 1'b0; in_valid = 1'b0; module_en = '1;
    w_row = '0; w_data = '0; thr_col = '0; thr_data = '0; n_cycles = '0; x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < ROWS; r++) begin
      w_we = 1'b1; w_row = RW'(r);
      for (int j = 0; j < CO; j += 32) w_data[j +: 32] = $urandom;
      wt[r] = w_data;
      @(negedge clk);
    end
    w_we = 1'b0;
    for (int j = 0; j < CO; j++) begin
      // around the mean count of the kept rows
      thr_we = 1'b1; thr_col = 9'(j); thr_data = ACC_W'(960 + ($urandom % 80));
      thr[j] = int'(thr_data);
      @(negedge clk);
    end
    thr_we = 1'b0;
    run(3, 1'b1);
    run(1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
