// tb_spatial_spindrop_cim: end-to-end test of the CiM layer at reduced size
// (C_in = 8, K = 3, C_out = 8, multiplexer ratio 2, T = 4). Three layers
// run in lock step on the same inputs: mapping strategy 1, mapping
// strategy 2, and strategy 1 with a 3-bit ADC that saturates.
// Weights and thresholds are written, then runs cover: deterministic
// inference (dropout bypassed), Bayesian inference with the mask held over
// N input cycles, a new mask every cycle, modules disabled through Enable,
// and T-pass Monte Carlo averaging. Every output is compared with a
// reference computed here from the weights, the inputs and the mask the
// layer shows on keep_mask; the cycles per input cycle are checked; and
// each mechanism is counted and must occur at least once.
module tb_spatial_spindrop_cim;
  localparam int K = 3, KK = 9, CI = 8, CO = 8, R = 2, LOG2_T = 2, T = 4;
  localparam int ROWS = KK * CI, RW = $clog2(ROWS), ACC_W = $clog2(ROWS + 1);
  localparam int ND = 3;            // 0: strategy 1, 1: strategy 2, 2: strategy 1, 3-bit ADC
  localparam int SAMPLE_LAT = 15;

  logic clk = 1'b0, rst_n;
  logic w_we, thr_we, start, drop_en, resample_each, avg_en, in_valid;
  logic [RW-1:0] w_row;
  logic [CO-1:0] w_data;
  logic [2:0] thr_col;
  logic [ACC_W-1:0] thr_data;
  logic [15:0] n_cycles;
  logic [CI-1:0] module_en;
  logic [ROWS-1:0] x;

  logic             in_ready  [ND];
  logic             out_valid [ND];
  logic [CO-1:0]    out_act   [ND];
  logic [ACC_W-1:0] out_sum   [ND][CO];
  logic             done      [ND];
  logic             busy      [ND];
  logic [15:0]      cycle_idx [ND];
  logic             avg_valid [ND];
  logic [ACC_W-1:0] avg_sum   [ND][CO];
  logic [LOG2_T:0]  avg_count [ND];
  logic [CI-1:0]    keep_mask [ND];
  logic             adc_sat   [ND];

  always #5 clk = ~clk;

  for (genvar i = 0; i < ND; i++) begin : g_dut
    spatial_spindrop_cim #(
      .STRATEGY(i == 1 ? 2 : 1), .K(K), .C_IN(CI), .C_OUT(CO), .MUX_RATIO(R),
      .ADC_BITS(i == 2 ? 3 : 4), .LOG2_T(LOG2_T)
    ) dut (
      .clk, .rst_n, .w_we, .w_row, .w_data, .thr_we, .thr_col, .thr_data,
      .start, .n_cycles, .drop_en, .resample_each, .avg_en, .module_en,
      .in_valid, .in_ready(in_ready[i]), .x,
      .out_valid(out_valid[i]), .out_act(out_act[i]), .out_sum(out_sum[i]),
      .done(done[i]), .busy(busy[i]), .cycle_idx(cycle_idx[i]),
      .avg_valid(avg_valid[i]), .avg_sum(avg_sum[i]), .avg_count(avg_count[i]),
      .keep_mask(keep_mask[i]), .adc_sat(adc_sat[i])
    );
  end

  logic [CO-1:0] wt [ROWS];
  int thr [CO];
  int checks = 0, failures = 0;
  // mechanism counters
  int n_det = 0, n_held = 0, n_resampled = 0, n_dropped = 0, n_disabled = 0;
  int n_avg = 0, n_sat = 0, n_equal12 = 0, n_act1 = 0, n_act0 = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic int ref_sum(int d, int j, bit drop, logic [CI-1:0] keep);
    int s, g, adcmax;
    adcmax = (d == 2) ? 7 : 15;
    s = 0;
    for (int c = 0; c < CI; c++) begin
      if (drop && !(keep[c] && module_en[c])) continue;
      g = 0;
      for (int k = 0; k < KK; k++) if (x[c*KK + k] == wt[c*KK + k][j]) g++;
      // strategy 1 converts one K*K group per ADC sample; strategy 2 one row
      // per crossbar, which never reaches full scale
      if (d != 1 && g > adcmax) g = adcmax;
      s += g;
    end
    return s;
  endfunction

  function automatic bit would_saturate(int j);
    int g;
    for (int c = 0; c < CI; c++) begin
      g = 0;
      for (int k = 0; k < KK; k++) if (x[c*KK + k] == wt[c*KK + k][j]) g++;
      if (g > 7) return 1'b1;
    end
    return 1'b0;
  endfunction

  int last_sum [ND][CO];
  int avg_acc [ND][CO];

  // One layer run of n input cycles; force_match makes the first window
  // equal to column 0's weights so that the 3-bit ADC saturates.
  task automatic run(input int n, input bit drop, input bit resamp, input bit force_match,
                     input bit check_avg);
    logic [CI-1:0] first_mask [ND];
    logic [CI-1:0] prev_mask [ND];
    n_cycles = 16'(n); drop_en = drop; resample_each = resamp;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int c = 0; c < n; c++) begin
      int cyc;
      bit sampled;
      for (int r = 0; r < ROWS; r++) x[r] = ($urandom & 1) != 0;
      if (force_match && c == 0) for (int r = 0; r < ROWS; r++) x[r] = wt[r][0];
      while (!in_ready[0]) @(negedge clk);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      cyc = 1;
      while (!out_valid[0]) begin
        @(negedge clk);
        cyc++;
      end
      sampled = drop && (c == 0 || resamp);
      check(cyc == CI * R + 1 + (sampled ? SAMPLE_LAT + 2 : 0), "cycles per input cycle");
      if (cyc != CI * R + 1 + (sampled ? SAMPLE_LAT + 2 : 0)) $display("cyc=%0d sampled=%0d", cyc, sampled);
      for (int d = 0; d < ND; d++) begin
        bit sat_exp;
        check(out_valid[d] && int'(cycle_idx[d]) == c && done[d] == (c == n - 1), "lock step");
        sat_exp = 1'b0;
        for (int j = 0; j < CO; j++) begin
          int e;
          e = ref_sum(d, j, drop, keep_mask[d]);
          check(int'(out_sum[d][j]) == e, "column sum");
          if (int'(out_sum[d][j]) != e)
            $display("  dut %0d col %0d got %0d exp %0d mask %b", d, j, out_sum[d][j], e, keep_mask[d]);
          check(out_act[d][j] == (e >= thr[j]), "activation");
          if (d == 0) begin
            if (out_act[d][j]) n_act1++; else n_act0++;
          end
          last_sum[d][j] = int'(out_sum[d][j]);
          if (check_avg) avg_acc[d][j] += int'(out_sum[d][j]);
          if (d == 2 && (!drop || keep_mask[d] == '1) && would_saturate(j)) sat_exp = 1'b1;
        end
        if (sat_exp) begin
          check(adc_sat[d], "ADC saturation flagged");
          n_sat++;
        end
        if (drop) begin
          if (keep_mask[d] != '1) n_dropped++;
          if (module_en != '1) n_disabled++;
          if (c == 0) first_mask[d] = keep_mask[d];
          else if (!resamp) begin
            check(keep_mask[d] == first_mask[d], "mask held over N cycles");
            n_held++;
          end else if (keep_mask[d] != prev_mask[d]) n_resampled++;
          prev_mask[d] = keep_mask[d];
        end
      end
      if (!drop) begin
        check(last_sum[0] == last_sum[1], "strategies 1 and 2 agree");
        n_equal12++;
        n_det++;
      end
      @(negedge clk);
    end
    check(!busy[0] && !busy[1] && !busy[2], "idle after run");
  endtask

  initial begin
    rst_n = 1'b0; w_we = 1'b0; thr_we = 1'b0; start = 1'b0; drop_en = 1'b0;
    resample_each = 1'b0; avg_en = 1'b0; in_valid = 1'b0; module_en = '1;
    w_row = '0; w_data = '0; thr_col = '0; thr_data = '0; n_cycles = '0; x = '0;
    for (int d = 0; d < ND; d++) for (int j = 0; j < CO; j++) avg_acc[d][j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // program weights (dropout path bypassed while idle) and thresholds
    for (int r = 0; r < ROWS; r++) begin
      w_we = 1'b1; w_row = RW'(r); w_data = CO'($urandom);
      wt[r] = w_data;
      @(negedge clk);
    end
    w_we = 1'b0;
    for (int j = 0; j < CO; j++) begin
      thr_we = 1'b1; thr_col = 3'(j); thr_data = ACC_W'(28 + ($urandom % 10));
      thr[j] = int'(thr_data);
      @(negedge clk);
    end
    thr_we = 1'b0;
    repeat (30) @(negedge clk);   // dropout modules finish their first RESET

    run(3, 1'b0, 1'b0, 1'b1, 1'b0);             // deterministic, saturating window
    for (int i = 0; i < 6; i++) run(4, 1'b1, 1'b0, 1'b0, 1'b0);  // held mask
    run(8, 1'b1, 1'b1, 1'b0, 1'b0);             // resample every cycle
    module_en = 8'b1010_1111;
    run(3, 1'b1, 1'b0, 1'b0, 1'b0);             // two modules disabled
    module_en = '1;
    // Monte Carlo averaging over T passes of one input cycle each
    avg_en = 1'b1;
    for (int d = 0; d < ND; d++) for (int j = 0; j < CO; j++) avg_acc[d][j] = 0;
    for (int t = 0; t < T; t++) begin
      run(1, 1'b1, 1'b0, 1'b0, 1'b1);
      if (t == T - 1) begin
        for (int d = 0; d < ND; d++) begin
          check(avg_valid[d], "average ready after T passes");
          for (int j = 0; j < CO; j++)
            check(int'(avg_sum[d][j]) == avg_acc[d][j] / T, "Monte Carlo average");
        end
        n_avg++;
      end else begin
        check(!avg_valid[0] && int'(avg_count[0]) == t + 1, "averaging in progress");
      end
    end
    avg_en = 1'b0;

    $display("mechanisms: deterministic=%0d held=%0d resampled=%0d dropped=%0d disabled=%0d avg=%0d sat=%0d s1==s2=%0d act1=%0d act0=%0d",
             n_det, n_held, n_resampled, n_dropped, n_disabled, n_avg, n_sat, n_equal12, n_act1, n_act0);
    check(n_det > 0, "deterministic inference happened");
    check(n_held > 0, "held mask happened");
    check(n_resampled > 0, "resampling happened");
    check(n_dropped > 0, "dropped feature maps happened");
    check(n_disabled > 0, "disabled modules happened");
    check(n_avg > 0, "averaging happened");
    check(n_sat > 0, "ADC saturation happened");
    check(n_equal12 > 0, "strategy comparison happened");
    check(n_act1 > 0 && n_act0 > 0, "both activation values happened");
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
