// bl_mux: bit-line multiplexer in front of the ADCs.
//
// COLS columns share COLS/RATIO ADCs. Lane a serves the RATIO neighbouring
// columns a*RATIO .. a*RATIO+RATIO-1; sel picks which of them is sensed in
// this cycle, so all columns are converted in RATIO cycles. Combinational.
//
// The paper uses multiplexers to choose the bit lines sensed by the ADCs;
// the ratio and the column-to-lane assignment are this design's choice.
module bl_mux #(
  parameter int unsigned COLS  = 512,
  parameter int unsigned RATIO = 4,
  parameter int unsigned W     = 12,
  localparam int unsigned LANES = COLS / RATIO,
  localparam int unsigned SW    = (RATIO > 1) ? $clog2(RATIO) : 1
) (
  input  logic [W-1:0]  col   [COLS],
  input  logic [SW-1:0] sel,
  output logic [W-1:0]  lane  [LANES]
);

  always_comb begin
    for (int unsigned a = 0; a < LANES; a++) lane[a] = col[a*RATIO + 32'(sel)];
  end

  initial assert (COLS % RATIO == 0) else $error("bl_mux: COLS must be a multiple of RATIO");

endmodule
