// tb_mtj_stochastic_cell: checks the stochastic MTJ model. RESET must always
// give the parallel state, a SET pulse must switch it with the set
// probability (15 %, checked within four standard deviations over 4000
// trials), a SET on an antiparallel MTJ must leave it there, and the
// probability extremes 0 and 65535/65536 must never / always switch.
module tb_mtj_stochastic_cell;
  import spindrop_pkg::*;

  logic clk = 1'b0;
  logic set_en, reset_en;
  mtj_state_e st, st0, st1;
  int checks = 0, failures = 0;
  int switched = 0, switched0 = 0, switched1 = 0;
  localparam int TRIALS = 4000;

  always #5 clk = ~clk;

  mtj_stochastic_cell dut (.clk, .set_en, .reset_en, .state(st));
  mtj_stochastic_cell #(.P_SET_Q16(0))     dut0 (.clk, .set_en(set_en), .reset_en, .state(st0));
  mtj_stochastic_cell #(.P_SET_Q16(65535)) dut1 (.clk, .set_en(set_en), .reset_en, .state(st1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic pulse_reset();
    reset_en = 1'b1;
    repeat (3) @(negedge clk);
    reset_en = 1'b0;
    repeat (2) @(negedge clk);
  endtask

  task automatic pulse_set();
    set_en = 1'b1;
    repeat (3) @(negedge clk);
    set_en = 1'b0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    set_en = 1'b0;
    reset_en = 1'b0;
    repeat (2) @(negedge clk);
    for (int t = 0; t < TRIALS; t++) begin
      pulse_reset();
      check(st == MTJ_P && st0 == MTJ_P && st1 == MTJ_P, "RESET gives parallel");
      pulse_set();
      if (st == MTJ_AP) switched++;
      if (st0 == MTJ_AP) switched0++;
      if (st1 == MTJ_AP) switched1++;
      if (t % 500 == 0 && st == MTJ_AP) begin
        pulse_set();
        check(st == MTJ_AP, "SET keeps antiparallel");
      end
    end
    // 15 % of 4000 = 600, sigma = 22.6
    $display("switched %0d of %0d", switched, TRIALS);
    check(switched > 510 && switched < 690, "switching rate near 15 %");
    check(switched0 == 0, "probability 0 never switches");
    check(switched1 > TRIALS - 5, "probability ~1 always switches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (TRIALS * 12 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
