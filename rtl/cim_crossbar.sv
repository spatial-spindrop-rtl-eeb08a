// cim_crossbar: BEHAVIOURAL MODEL of a 1T-1MTJ STT-MRAM crossbar with its
// bit-line and source-line drivers, giving the digital equivalent of the
// analog matrix-vector product.
//
// Each cross-point stores one binary weight as the resistance state of an
// MTJ. Writing: with we high, every row whose word line is active takes
// wdata (one bit per column) from the bit-line driver. Reading: every row
// whose word line is active takes part in the product; the drivers apply
// the row's binary input x[r], and the current of column j is modelled as
// the number of active rows whose input equals the stored weight (the XNOR
// popcount of a binary network). A row whose word line is off, for example
// because its dropout module dropped it, contributes nothing. Column
// counts are combinational in wl and x; writes take effect at the clock edge.
//
// Following the paper: binary weights in MTJs, word lines gated by the
// dropout modules, MVM by column currents. This design's own: the XNOR
// popcount as the measure of the current, and one logical array of ROWS x
// COLS instead of a tiling into physical arrays.
module cim_crossbar #(
  parameter int unsigned ROWS = 2304,  // K*K*C_in
  parameter int unsigned COLS = 512,   // C_out
  localparam int unsigned CW  = $clog2(ROWS + 1)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [ROWS-1:0] wl,
  input  logic [COLS-1:0] wdata,
  input  logic [ROWS-1:0] x,
  output logic [CW-1:0]   col_cnt [COLS]
);

  logic [COLS-1:0] g [ROWS];   // stored weights

  always_ff @(posedge clk) begin
    if (we) begin
      for (int unsigned r = 0; r < ROWS; r++) begin
        if (wl[r]) g[r] <= wdata;
      end
    end
  end

  always_comb begin
    logic [COLS-1:0] match;
    match = '0;
    for (int unsigned j = 0; j < COLS; j++) col_cnt[j] = '0;
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (wl[r]) begin
        match = ~(g[r] ^ {COLS{x[r]}});
        for (int unsigned j = 0; j < COLS; j++) col_cnt[j] = col_cnt[j] + CW'(match[j]);
      end
    end
  end

endmodule
