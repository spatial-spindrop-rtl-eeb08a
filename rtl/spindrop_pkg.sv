// spindrop_pkg: types and constants shared by the Spatial-SpinDrop CiM layer.
//
// The dropout MTJ is a two-state device: parallel (low resistance, the
// state RESET restores) and antiparallel (high resistance, reached by a
// stochastic SET). The dropout-module controller steps through the phases
// of one mask sample; the layer controller through one input cycle.
// Encodings are this design's own; the paper names the phases but gives no
// encoding.
package spindrop_pkg;

  // MTJ magnetic state.
  typedef enum logic {
    MTJ_P  = 1'b0,   // parallel, low resistance (after RESET)
    MTJ_AP = 1'b1    // antiparallel, high resistance (switched by SET)
  } mtj_state_e;

  // Phases of the Spatial-SpinDrop module controller.
  typedef enum logic [2:0] {
    SD_RESET = 3'd0,   // RESET pulse: MTJ back to parallel
    SD_READY = 3'd1,   // mask held in the latch, ready for a new sample
    SD_SET   = 3'd2,   // stochastic SET pulse
    SD_PRE   = 3'd3,   // hold=1, Ctrl=0: latch precharged
    SD_EVAL  = 3'd4    // hold=1, Ctrl=1: latch resolves MTJ state
  } sd_phase_e;

  // Phases of the layer controller.
  typedef enum logic [2:0] {
    LC_IDLE    = 3'd0,   // weights may be written, dropout bypassed
    LC_WAIT_IN = 3'd1,   // waiting for the next moving-window input
    LC_SAMPLE  = 3'd2,   // dropout modules sampling a new mask
    LC_MVM     = 3'd3,   // group-wise WL selection and accumulation
    LC_OUT     = 3'd4    // activation presented, accumulators cleared
  } lc_phase_e;

  // Dropout probability 15 %, as a 16-bit fraction: round(0.15 * 65536).
  localparam int unsigned P_DROP_Q16 = 9830;

endpackage
