// tb_spatial_spindrop_cim_fc: the two topology-wise dropout configurations,
// where dropout sits in front of a fully connected classifier and a new
// mask is needed for every read.
//   dut_a: no adaptive average pool. Each of the C_in feature maps is 2 x 2
//          and flattened, so one dropout unit must gate H*W = 4 consecutive
//          rows. This is the top with K = 2 (K*K = H*W).
//   dut_b: after an adaptive average pool, one value per feature map, so
//          one unit per row: the top with K = 1.
// Both run T = 4 Monte Carlo passes of the same input as one run of
// N = 4 input cycles with resample_each set and averaging on. Every pass
// must draw a new mask (17 extra cycles each), each column sum must match a
// reference built from the weights, input and the mask shown on keep_mask,
// the masks must change between passes, the average after the fourth pass
// must be floor(sum / 4), and the drop rate over all draws must be near
// 15 %. The weights are written one row per cycle through the same port
// the layer uses for convolutions.
module tb_spatial_spindrop_cim_fc;
  localparam int CI = 8, CO = 8, R = 2, LOG2_T = 2, T = 4, RUNS = 6;
  localparam int HW = 4;                              // 2 x 2 maps, flattened
  localparam int ROWS_A = HW * CI, ROWS_B = CI;
  localparam int RW_A = $clog2(ROWS_A), RW_B = $clog2(ROWS_B);
  localparam int AW_A = $clog2(ROWS_A + 1), AW_B = $clog2(ROWS_B + 1);
  localparam int SAMPLE_LAT = 15;

  logic clk = 1'b0, rst_n;
  logic start, drop_en, resample_each, avg_en, in_valid, thr_we;
  logic [15:0] n_cycles;
  logic [CI-1:0] module_en;
  logic [$clog2(CO)-1:0] thr_col;

  logic we_a, we_b;
  logic [RW_A-1:0] row_a;
  logic [RW_B-1:0] row_b;
  logic [CO-1:0] wd_a, wd_b;
  logic [AW_A-1:0] thr_a;
  logic [AW_B-1:0] thr_b;
  logic [ROWS_A-1:0] x_a;
  logic [ROWS_B-1:0] x_b;

  logic rdy_a, rdy_b, ov_a, ov_b, done_a, done_b, busy_a, busy_b;
  logic av_a, av_b, sat_a, sat_b;
  logic [CO-1:0] act_a, act_b;
  logic [AW_A-1:0] sum_a [CO], avg_a [CO];
  logic [AW_B-1:0] sum_b [CO], avg_b [CO];
  logic [15:0] cidx_a, cidx_b;
  logic [LOG2_T:0] acnt_a, acnt_b;
  logic [CI-1:0] keep_a, keep_b;

  always #5 clk = ~clk;

  spatial_spindrop_cim #(
    .STRATEGY(1), .K(2), .C_IN(CI), .C_OUT(CO), .MUX_RATIO(R), .LOG2_T(LOG2_T)
  ) dut_a (
    .clk, .rst_n, .w_we(we_a), .w_row(row_a), .w_data(wd_a),
    .thr_we, .thr_col, .thr_data(thr_a),
    .start, .n_cycles, .drop_en, .resample_each, .avg_en, .module_en,
    .in_valid, .in_ready(rdy_a), .x(x_a), .out_valid(ov_a), .out_act(act_a),
    .out_sum(sum_a), .done(done_a), .busy(busy_a), .cycle_idx(cidx_a),
    .avg_valid(av_a), .avg_sum(avg_a), .avg_count(acnt_a), .keep_mask(keep_a),
    .adc_sat(sat_a)
  );

  spatial_spindrop_cim #(
    .STRATEGY(1), .K(1), .C_IN(CI), .C_OUT(CO), .MUX_RATIO(R), .LOG2_T(LOG2_T)
  ) dut_b (
    .clk, .rst_n, .w_we(we_b), .w_row(row_b), .w_data(wd_b),
    .thr_we, .thr_col, .thr_data(thr_b),
    .start, .n_cycles, .drop_en, .resample_each, .avg_en, .module_en,
    .in_valid, .in_ready(rdy_b), .x(x_b), .out_valid(ov_b), .out_act(act_b),
    .out_sum(sum_b), .done(done_b), .busy(busy_b), .cycle_idx(cidx_b),
    .avg_valid(av_b), .avg_sum(avg_b), .avg_count(acnt_b), .keep_mask(keep_b),
    .adc_sat(sat_b)
  );

  logic [CO-1:0] wt_a [ROWS_A];
  logic [CO-1:0] wt_b [ROWS_B];
  int th_a [CO], th_b [CO];
  int checks = 0, failures = 0;
  int draws = 0, dropped = 0, mask_changes = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // one run: T passes of one input, a fresh mask per pass
  task automatic mc_run();
    int acc_a [CO], acc_b [CO];
    logic [CI-1:0] prev_a, prev_b;
    for (int j = 0; j < CO; j++) begin
      acc_a[j] = 0;
      acc_b[j] = 0;
    end
    for (int r = 0; r < ROWS_A; r++) x_a[r] = ($urandom & 1) != 0;
    for (int r = 0; r < ROWS_B; r++) x_b[r] = ($urandom & 1) != 0;
    n_cycles = 16'(T); drop_en = 1'b1; resample_each = 1'b1; avg_en = 1'b1;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int t = 0; t < T; t++) begin
      int cyc;
      while (!(rdy_a && rdy_b)) @(negedge clk);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      cyc = 1;
      while (!ov_a) begin
        check(!ov_b, "both layers in step");
        @(negedge clk);
        cyc++;
      end
      check(ov_b, "both layers in step");
      check(cyc == CI * R + 1 + SAMPLE_LAT + 2, "a mask drawn for every pass");
      for (int j = 0; j < CO; j++) begin
        int ea, eb;
        ea = 0;
        eb = 0;
        for (int c = 0; c < CI; c++) begin
          if (keep_a[c])
            for (int p = 0; p < HW; p++) if (x_a[c*HW + p] == wt_a[c*HW + p][j]) ea++;
          if (keep_b[c] && x_b[c] == wt_b[c][j]) eb++;
        end
        check(int'(sum_a[j]) == ea, "flattened maps: column sum");
        check(int'(sum_b[j]) == eb, "pooled features: column sum");
        check(act_a[j] == (ea >= th_a[j]), "flattened maps: activation");
        check(act_b[j] == (eb >= th_b[j]), "pooled features: activation");
        acc_a[j] += ea;
        acc_b[j] += eb;
      end
      check(done_a == (t == T - 1) && done_b == (t == T - 1), "done on last pass");
      draws += 2 * CI;
      dropped += CI - $countones(keep_a) + CI - $countones(keep_b);
      if (t > 0) mask_changes += int'(keep_a != prev_a) + int'(keep_b != prev_b);
      prev_a = keep_a;
      prev_b = keep_b;
      @(negedge clk);
      if (t == T - 1) begin
        check(av_a && av_b, "average ready after T passes");
        for (int j = 0; j < CO; j++) begin
          check(int'(avg_a[j]) == acc_a[j] / T, "flattened maps: Monte Carlo average");
          check(int'(avg_b[j]) == acc_b[j] / T, "pooled features: Monte Carlo average");
        end
      end else begin
        check(!av_a && !av_b && int'(acnt_a) == t + 1 && int'(acnt_b) == t + 1,
              "averaging in progress");
      end
    end
    check(!busy_a && !busy_b, "idle after run");
    avg_en = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; drop_en = 1'b0; resample_each = 1'b0;
    avg_en = 1'b0; in_valid = 1'b0; thr_we = 1'b0; module_en = '1;
    n_cycles = '0; thr_col = '0; we_a = 1'b0; we_b = 1'b0; row_a = '0;
    row_b = '0; wd_a = '0; wd_b = '0; thr_a = '0; thr_b = '0; x_a = '0; x_b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < ROWS_A; r++) begin
      we_a = 1'b1; row_a = RW_A'(r); wd_a = CO'($urandom);
      wt_a[r] = wd_a;
      we_b = r < ROWS_B;
      row_b = RW_B'(r % ROWS_B); wd_b = CO'($urandom);
      if (r < ROWS_B) wt_b[r] = wd_b;
      @(negedge clk);
    end
    we_a = 1'b0; we_b = 1'b0;
    for (int j = 0; j < CO; j++) begin
      thr_we = 1'b1; thr_col = 3'(j);
      thr_a = AW_A'(12 + ($urandom % 5));
      thr_b = AW_B'(3 + ($urandom % 2));
      th_a[j] = int'(thr_a);
      th_b[j] = int'(thr_b);
      @(negedge clk);
    end
    thr_we = 1'b0;
    for (int i = 0; i < RUNS; i++) mc_run();
    $display("draws=%0d dropped=%0d mask changes between passes=%0d", draws, dropped,
             mask_changes);
    // 15 % of 384 draws = 57.6, sigma = 7.0
    check(dropped > 29 && dropped < 86, "drop rate near 15 %");
    check(mask_changes > 0, "masks are resampled between passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
