// tb_spatial_spindrop: runs 2000 mask samples through one complete
// Spatial-SpinDrop module. Checks the sampling latency (15 cycles), that
// the drop rate is near 15 %, that the mask stays constant between samples
// and the word lines follow it (path enable on), that path enable off
// passes the decoder lines and that Enable off blocks the group.
module tb_spatial_spindrop;
  localparam int G = 9;
  logic clk = 1'b0, rst_n;
  logic sample_req, enable, path_enable, ready, mask_valid, keep;
  logic [G-1:0] wl_in, wl_out;
  int checks = 0, failures = 0, drops = 0;
  localparam int SAMPLES = 2000;

  always #5 clk = ~clk;

  spatial_spindrop #(.GROUP(G)) dut (.clk, .rst_n, .sample_req, .enable, .path_enable,
    .wl_in, .ready, .mask_valid, .keep, .wl_out);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    int lat;
    logic k0;
    rst_n = 1'b0; sample_req = 1'b0; enable = 1'b1; path_enable = 1'b1; wl_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < SAMPLES; s++) begin
      while (!ready) @(negedge clk);
      sample_req = 1'b1;
      @(negedge clk);
      sample_req = 1'b0;
      lat = 0;   // cycles counted from the edge that accepts the request
      while (!mask_valid) begin
        @(negedge clk);
        lat++;
      end
      if (s < 50) begin check(lat == 15, "sampling latency 15 cycles"); if (lat != 15) $display("lat=%0d", lat); end
      k0 = keep;
      if (!keep) drops++;
      for (int i = 0; i < 8; i++) begin
        wl_in = G'($urandom);
        #1;
        check(keep == k0, "mask held");
        check(wl_out == (k0 ? wl_in : '0), "word lines follow mask");
        @(negedge clk);
      end
      if (s % 100 == 0) begin
        path_enable = 1'b0; #1;
        check(wl_out == wl_in, "bypass passes decoder lines");
        path_enable = 1'b1; enable = 1'b0; #1;
        check(wl_out == '0 && !keep, "Enable low blocks group");
        enable = 1'b1;
      end
    end
    $display("dropped %0d of %0d", drops, SAMPLES);
    // 15 % of 2000 = 300, sigma = 16
    check(drops > 236 && drops < 364, "drop rate near 15 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (SAMPLES * 40 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
