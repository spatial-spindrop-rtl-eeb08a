// tb_spindrop_ctrl: checks the phase sequence of one sample cycle by cycle:
// RESET after reset, SET for SET_CYCLES, one precharge cycle (hold, Vpol,
// Ctrl low), evaluation with Ctrl high, mask_valid exactly SET+SENSE = 15
// cycles after the accepted request, Ctrl kept high with hold low while the
// mask is valid, background RESET, ready again, and requests ignored while
// busy.
module tb_spindrop_ctrl;
  logic clk = 1'b0, rst_n;
  logic sample_req, ready, mask_valid, set_en, reset_en, vpol, hold, ctrl;
  int checks = 0, failures = 0;
  localparam int SETC = 10, SENC = 5, RSTC = 5;

  always #5 clk = ~clk;

  spindrop_ctrl dut (.clk, .rst_n, .sample_req, .ready, .mask_valid,
                     .set_en, .reset_en, .vpol, .hold, .ctrl);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  task automatic one_sample();
    // wait for ready
    while (!ready) @(negedge clk);
    sample_req = 1'b1;
    @(negedge clk);
    sample_req = 1'b0;
    check(!mask_valid, "mask invalid after request");
    for (int i = 0; i < SETC; i++) begin
      check(set_en && !reset_en && !hold && !vpol && !ctrl && !ready, "SET phase");
      sample_req = 1'b1;   // must be ignored
      @(negedge clk);
      sample_req = 1'b0;
    end
    check(hold && vpol && !ctrl && !set_en, "precharge phase");
    @(negedge clk);
    for (int i = 1; i < SENC; i++) begin
      check(hold && vpol && ctrl && !mask_valid, "evaluation phase");
      @(negedge clk);
    end
    check(mask_valid && ctrl && !hold && !vpol, "mask valid at 15 cycles");
    for (int i = 0; i < RSTC; i++) begin
      check(reset_en && !set_en && mask_valid && ctrl && !ready, "background RESET");
      @(negedge clk);
    end
    check(ready && mask_valid && ctrl && !hold, "ready, mask held");
    repeat (7) begin
      @(negedge clk);
      check(mask_valid && ctrl && !hold && !set_en && !reset_en, "idle hold");
    end
  endtask

  initial begin
    rst_n = 1'b0; sample_req = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < RSTC; i++) begin
      check(reset_en && !ready && !mask_valid && !ctrl, "initial RESET");
      @(negedge clk);
    end
    check(ready && !mask_valid, "ready after initial RESET");
    repeat (6) one_sample();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
