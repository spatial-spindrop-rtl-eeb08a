// wl_decoder: adapted word-line decoder.
//
// For writing it selects the single row addr (one-hot). For group-wise
// reading it selects the GROUP consecutive rows addr*GROUP ..
// addr*GROUP+GROUP-1, so that all the rows of one input channel (K x K rows
// in mapping strategy 1) are active at once and reach their dropout module
// together. With GROUP = 1 it is a plain decoder, as used for each of the
// K x K crossbars of mapping strategy 2. en = 0 selects no row. Purely
// combinational.
//
// The paper says an adapted decoder activates several consecutive addresses;
// the addressing by group index is this design's choice.
module wl_decoder #(
  parameter int unsigned ROWS  = 2304,  // K*K*C_in = 9*256
  parameter int unsigned GROUP = 9,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            en,
  input  logic            group_mode,   // 1: read a group, 0: single row
  input  logic [AW-1:0]   addr,         // row (write) or group index (read)
  output logic [ROWS-1:0] wl
);

  always_comb begin
    wl = '0;
    if (en) begin
      for (int unsigned r = 0; r < ROWS; r++) begin
        if (group_mode) wl[r] = ((r / GROUP) == 32'(addr));
        else            wl[r] = (r == 32'(addr));
      end
    end
  end

endmodule
