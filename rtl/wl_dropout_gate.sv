// wl_dropout_gate: word-line gating of one Spatial-SpinDrop module.
//
// The latched sense-amplifier output Out is ANDed with the module's Enable
// to form the Dropout signal. Each of the GROUP word lines coming from the
// decoder(s) is ANDed with Dropout, giving the "Dropped" word line, and a
// pair of transmission gates steered by Path enable passes either that
// gated line or the decoder's word line unchanged to WL_n. One module gates
// the K x K word lines of one input channel: consecutive rows of one
// decoder in mapping strategy 1, the same row index of K x K decoders in
// strategy 2.
//
// Purely combinational. Path enable = 1 selects the gated (dropout) path,
// used for reading; Path enable = 0 gives the decoder direct access, used
// for writing the weights, or for reading without dropout. On the gated
// path Out = 1 keeps the rows and Out = 0 drops them; Enable = 0 forces
// Dropout low and so blocks the whole group, as the printed AND gate does.
//
// The AND gates, the transmission-gate multiplexer and the signal names
// follow the paper's figure; which transmission gate Path enable turns on
// is this design's choice (the paper only says dropout is off while
// writing).
module wl_dropout_gate #(
  parameter int unsigned GROUP = 9   // word lines per module: K*K, K = 3
) (
  input  logic             sa_out,       // Out of the StrongARM latch
  input  logic             enable,       // module enable (AND input)
  input  logic             path_enable,  // 1: dropout path, 0: bypass
  input  logic [GROUP-1:0] wl_in,        // from the WL decoder(s)
  output logic             dropout,      // Out AND Enable
  output logic [GROUP-1:0] wl_out        // to the crossbar(s)
);

  logic [GROUP-1:0] dropped;

  always_comb begin
    dropout = sa_out & enable;
    dropped = wl_in & {GROUP{dropout}};
    wl_out  = path_enable ? dropped : wl_in;
  end

endmodule
