// mtj_sense_amp: BEHAVIOURAL MODEL (not synthesizable) of the two-stage read
// circuit of the dropout MTJ: a pre-amplifier and a StrongARM latch.
//
// First stage: while Vpol and hold are both active, a small current flows
// through the MTJ and through the reference element REF, whose resistance
// lies between the parallel and antiparallel values; the resistance
// difference becomes the voltage pair V_MTJ / V_ref. Second stage: with
// Ctrl = 0 both latch outputs are precharged to VDD (Out = Out_n = 1); when
// Ctrl rises the latch discharges and regenerates the voltage difference
// into complementary logic levels, which it keeps as long as Ctrl stays 1,
// even after hold is released.
//
// Interface and timing: the circuit is modelled on the system clock. The
// latch resolves on the first clock edge with Ctrl = 1 after a cycle with
// Ctrl = 0, using the MTJ state at that edge. Out = 1 means the MTJ is
// still parallel (not switched by SET), Out = 0 that it switched. If hold or
// Vpol is off at that edge the pre-amplifier gives no difference; the model
// then resolves to Out = 0 (drop), the safe side.
//
// Following the paper: the two stages, the Vpol / hold / Ctrl roles and the
// precharge. This design's choice: the polarity of Out and the clocked
// abstraction.
module mtj_sense_amp
  import spindrop_pkg::*;
(
  input  logic       clk,
  input  logic       vpol,
  input  logic       hold,
  input  logic       ctrl,
  input  mtj_state_e mtj_state,
  output logic       out,
  output logic       out_n
);

  logic ctrl_q;

  initial begin
    ctrl_q = 1'b0;
    out    = 1'b1;
    out_n  = 1'b1;
  end

  always @(posedge clk) begin
    ctrl_q <= ctrl;
    if (!ctrl) begin
      out   <= 1'b1;            // precharge
      out_n <= 1'b1;
    end else if (!ctrl_q) begin // evaluation edge
      if (vpol && hold) begin
        out   <= (mtj_state == MTJ_P);
        out_n <= (mtj_state != MTJ_P);
      end else begin
        out   <= 1'b0;          // no input difference: resolves low
        out_n <= 1'b1;
      end
    end
    // Ctrl held at 1: the cross-coupled latch keeps its value.
  end

endmodule
