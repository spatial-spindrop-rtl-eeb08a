// mtj_stochastic_cell: BEHAVIOURAL MODEL (not synthesizable) of the dropout
// MTJ with its four-transistor SET/RESET write circuit.
//
// The write circuit drives current through the MTJ in either direction.
// A SET pulse switches the free layer from parallel to antiparallel with a
// probability fixed by the write voltage and pulse width; this is the
// dropout probability. A RESET pulse always restores the parallel state.
// The model draws one uniform 16-bit number per completed SET pulse and
// switches when it falls below P_SET_Q16/65536; device physics (switching
// time, thermal stability) are not modelled.
//
// Interface: set_en / reset_en are the gate controls of the SET and RESET
// transistor pairs (never both high). The pulse takes effect on the clock
// edge at which the enable falls, so a pulse of any length is one trial.
// state is the MTJ state seen by the read circuit.
//
// Following the paper: SET is stochastic with the dropout probability, RESET
// restores the original state. This model's own choices: the parallel state
// is the reset state, and the probability is a parameter rather than a
// voltage.
module mtj_stochastic_cell
  import spindrop_pkg::*;
#(
  parameter int unsigned P_SET_Q16 = P_DROP_Q16  // switching probability * 65536
) (
  input  logic       clk,
  input  logic       set_en,
  input  logic       reset_en,
  output mtj_state_e state
);

  logic set_q, reset_q;
  mtj_state_e st;

  initial begin
    st      = MTJ_AP;   // unknown magnetisation at power-up: RESET needed
    set_q   = 1'b0;
    reset_q = 1'b0;
  end

  always @(posedge clk) begin
    set_q   <= set_en;
    reset_q <= reset_en;
    if (reset_q && !reset_en) begin
      st <= MTJ_P;
    end else if (set_q && !set_en && st == MTJ_P) begin
      if (($urandom & 32'hFFFF) < P_SET_Q16) st <= MTJ_AP;
    end
  end

  assign state = st;

  // The SET and RESET pairs must never conduct together.
  always @(posedge clk) begin
    assert (!(set_en && reset_en))
      else $error("mtj_stochastic_cell: SET and RESET enabled together");
  end

endmodule
