// spatial_spindrop: one Spatial-SpinDrop module, the spintronic dropout unit
// shared by one input feature map.
//
// It holds one stochastic MTJ with its SET/RESET write circuit, the
// two-stage sense amplifier, the sequencer and the word-line gates. A
// sample writes the MTJ with a SET pulse that switches it with the dropout
// probability, reads it through the latch and keeps the latched bit while
// hold is low. All GROUP word lines of the feature map are then kept or
// dropped together, which is spatial dropout: one Bernoulli draw per
// feature map instead of one per crossbar row.
//
// Interface: sample_req / ready / mask_valid as in spindrop_ctrl (latency
// SET_CYCLES + SENSE_CYCLES); keep is the latched bit ANDed with enable,
// valid while mask_valid is high; wl_in / wl_out as in wl_dropout_gate.
//
// The MTJ and the sense amplifier are behavioural models, so this module
// simulates but is not synthesizable as a whole; its digital parts are
// spindrop_ctrl and wl_dropout_gate. Structure and signal names follow the
// paper; the default phase lengths are this design's choice.
module spatial_spindrop
  import spindrop_pkg::*;
#(
  parameter int unsigned GROUP        = 9,
  parameter int unsigned P_SET_Q16    = P_DROP_Q16,
  parameter int unsigned SET_CYCLES   = 10,
  parameter int unsigned SENSE_CYCLES = 5,
  parameter int unsigned RESET_CYCLES = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sample_req,
  input  logic             enable,
  input  logic             path_enable,
  input  logic [GROUP-1:0] wl_in,
  output logic             ready,
  output logic             mask_valid,
  output logic             keep,
  output logic [GROUP-1:0] wl_out
);

  logic       set_en, reset_en, vpol, hold, ctrl;
  logic       sa_out, sa_out_n;
  mtj_state_e mtj_state;

  spindrop_ctrl #(
    .SET_CYCLES  (SET_CYCLES),
    .SENSE_CYCLES(SENSE_CYCLES),
    .RESET_CYCLES(RESET_CYCLES)
  ) u_ctrl (
    .clk, .rst_n, .sample_req, .ready, .mask_valid,
    .set_en, .reset_en, .vpol, .hold, .ctrl
  );

  mtj_stochastic_cell #(.P_SET_Q16(P_SET_Q16)) u_mtj (
    .clk, .set_en, .reset_en, .state(mtj_state)
  );

  mtj_sense_amp u_sa (
    .clk, .vpol, .hold, .ctrl, .mtj_state, .out(sa_out), .out_n(sa_out_n)
  );

  wl_dropout_gate #(.GROUP(GROUP)) u_gate (
    .sa_out, .enable, .path_enable, .wl_in, .dropout(keep), .wl_out
  );

  // The latch outputs are complementary once resolved.
  a_latch: assert property (@(posedge clk) disable iff (!rst_n)
    mask_valid |-> (sa_out != sa_out_n));

endmodule
