// tb_mtj_sense_amp: checks the precharge (both outputs high while Ctrl is
// low), resolution of both MTJ states on the Ctrl rising edge with Vpol and
// hold on, and that the latch keeps its value while Ctrl stays high even
// when hold drops and the MTJ changes.
module tb_mtj_sense_amp;
  import spindrop_pkg::*;

  logic clk = 1'b0;
  logic vpol, hold, ctrl, out, out_n;
  mtj_state_e st;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mtj_sense_amp dut (.clk, .vpol, .hold, .ctrl, .mtj_state(st), .out, .out_n);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (out=%b out_n=%b)", what, out, out_n);
    end
  endtask

  task automatic read_state(input mtj_state_e s);
    st = s; vpol = 1'b1; hold = 1'b1; ctrl = 1'b0;
    @(negedge clk);
    check(out && out_n, "precharge");
    ctrl = 1'b1;
    @(negedge clk);
    check(out == (s == MTJ_P) && out_n == (s != MTJ_P), "resolve");
    vpol = 1'b0; hold = 1'b0;
    st = (s == MTJ_P) ? MTJ_AP : MTJ_P;
    repeat (5) begin
      @(negedge clk);
      check(out == (s == MTJ_P) && out_n == (s != MTJ_P), "latched value held");
    end
  endtask

  initial begin
    vpol = 1'b0; hold = 1'b0; ctrl = 1'b0; st = MTJ_P;
    repeat (2) @(negedge clk);
    for (int i = 0; i < 20; i++) read_state(($urandom & 1) ? MTJ_AP : MTJ_P);
    read_state(MTJ_P);
    read_state(MTJ_AP);
    ctrl = 1'b0;
    @(negedge clk);
    check(out && out_n, "precharge after release");
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
