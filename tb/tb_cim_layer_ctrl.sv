// tb_cim_layer_ctrl: drives the layer controller with a model of the
// dropout modules (ready / mask_valid with a 15-cycle sampling latency and a
// 5-cycle background reset) and checks, per input cycle, the word-line group
// and multiplexer sequence, the cycle count from input handshake to
// out_valid, that a mask is requested only in the first input cycle (or in
// every one with resample_each, or never without dropout), path_enable,
// accumulator clear and done.
module tb_cim_layer_ctrl;
  localparam int NG = 4, R = 2, SAMPLE_LAT = 15, RST_LAT = 5;
  logic clk = 1'b0, rst_n;
  logic start, drop_en, resample_each, in_valid, in_ready, x_load;
  logic [15:0] n_cycles, cycle_idx;
  logic all_ready, all_mask_valid, sample_req, path_enable;
  logic dec_en, acc_en, acc_clear, out_valid, busy, done;
  logic [1:0] dec_addr;
  logic mux_sel;
  int checks = 0, failures = 0, requests = 0;

  always #5 clk = ~clk;

  cim_layer_ctrl #(.NGROUPS(NG), .MUX_RATIO(R)) dut (
    .clk, .rst_n, .start, .n_cycles, .drop_en, .resample_each,
    .in_valid, .in_ready, .x_load, .all_ready, .all_mask_valid, .sample_req, .path_enable,
    .dec_en, .dec_addr, .mux_sel, .acc_en, .acc_clear, .out_valid, .busy, .done, .cycle_idx);

  // model of the dropout modules
  int sd_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sd_cnt <= 0; all_ready <= 1'b1; all_mask_valid <= 1'b0;
    end else if (sample_req && all_ready) begin
      requests <= requests + 1;
      all_ready <= 1'b0; all_mask_valid <= 1'b0; sd_cnt <= 1;
    end else if (sd_cnt > 0) begin
      sd_cnt <= sd_cnt + 1;
      if (sd_cnt == SAMPLE_LAT) all_mask_valid <= 1'b1;
      if (sd_cnt == SAMPLE_LAT + RST_LAT) begin all_ready <= 1'b1; sd_cnt <= 0; end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  task automatic run(input int n, input bit drop, input bit resamp);
    int req0;
    req0 = requests;
    n_cycles = 16'(n); drop_en = drop; resample_each = resamp;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(busy, "busy after start");
    for (int c = 0; c < n; c++) begin
      int cyc;
      bit sampled;
      repeat ($urandom % 3) begin
        check(!acc_en && !dec_en, "idle while waiting for input");
        @(negedge clk);
      end
      in_valid = 1'b1;
      #1;
      check(in_ready && x_load, "input accepted");
      @(negedge clk);
      in_valid = 1'b0;
      cyc = 1;
      sampled = drop && (c == 0 || resamp);
      if (sampled) begin
        while (!acc_en) begin
          check(!dec_en, "no word line while sampling");
          @(negedge clk);
          cyc++;
        end
      end
      for (int g = 0; g < NG; g++) begin
        for (int m = 0; m < R; m++) begin
          check(acc_en && dec_en && int'(dec_addr) == g && int'(mux_sel) == m, "group/mux sequence");
          check(path_enable == drop, "path enable follows drop_en");
          if (drop) check(all_mask_valid, "mask valid while reading");
          @(negedge clk);
          cyc++;
        end
      end
      check(out_valid && acc_clear && int'(cycle_idx) == c, "out_valid after all groups");
      check(done == (c == n - 1), "done on last cycle");
      // SAMPLE: request cycle + SAMPLE_LAT + one cycle to leave; then NG*R + 1
      check(cyc == NG * R + 1 + (sampled ? SAMPLE_LAT + 2 : 0), "cycles per input cycle");
      if (cyc != NG * R + 1 + (sampled ? SAMPLE_LAT + 2 : 0)) $display("cyc=%0d", cyc);
      @(negedge clk);
    end
    check(!busy, "idle after run");
    check(requests - req0 == (drop ? (resamp ? n : 1) : 0), "number of mask samples");
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; in_valid = 1'b0; drop_en = 1'b0; resample_each = 1'b0; n_cycles = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !path_enable, "idle, dropout bypassed");
    run(5, 1'b1, 1'b0);
    run(4, 1'b1, 1'b1);
    run(3, 1'b0, 1'b0);
    run(1, 1'b1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
