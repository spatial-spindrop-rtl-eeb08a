// shift_add: shift-adder and accumulator bank behind the ADCs.
//
// Holds one ACC_W-bit partial sum per column. In a cycle with en high, the
// value of lane a is shifted left by shift and added to the sum of column
// a*RATIO + sel (the column the multiplexer routes to that lane). The sums
// grow over all word-line groups of an input cycle until every row has
// been selected; clear zeroes all of them (clear wins over en). Registered:
// acc shows the sum one cycle after the en cycle.
//
// The paper uses shift-adders to shift and accumulate partial sums; with
// one-bit weights and inputs shift stays 0, and a non-zero shift serves
// multi-bit inputs applied bit-serially. The bank layout is this design's.
module shift_add #(
  parameter int unsigned COLS  = 512,
  parameter int unsigned RATIO = 4,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned ACC_W = 12,
  localparam int unsigned LANES = COLS / RATIO,
  localparam int unsigned SW    = (RATIO > 1) ? $clog2(RATIO) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             en,
  input  logic [SW-1:0]    sel,
  input  logic [2:0]       shift,
  input  logic [IN_W-1:0]  lane [LANES],
  output logic [ACC_W-1:0] acc  [COLS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned j = 0; j < COLS; j++) acc[j] <= '0;
    end else if (clear) begin
      for (int unsigned j = 0; j < COLS; j++) acc[j] <= '0;
    end else if (en) begin
      for (int unsigned a = 0; a < LANES; a++)
        acc[a*RATIO + 32'(sel)] <= acc[a*RATIO + 32'(sel)] + (ACC_W'(lane[a]) << shift);
    end
  end

endmodule
