// act_comparator: digital comparator implementing the binary activation.
//
// Each column has a threshold register, written through thr_we / thr_col /
// thr_data. The activation of column j is 1 when its accumulated count
// reaches the threshold. With the XNOR count c over R active rows, the
// +-1 dot product is 2c - R, so a sign activation after batch
// normalisation reduces to c >= thr for a suitable per-column thr; the
// threshold is computed off-line. act is combinational in acc; the
// thresholds reset to 0.
//
// The paper uses a digital comparator for the activation function; the
// threshold form and its register file are this design's.
module act_comparator #(
  parameter int unsigned COLS  = 512,
  parameter int unsigned ACC_W = 12,
  localparam int unsigned CAW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             thr_we,
  input  logic [CAW-1:0]   thr_col,
  input  logic [ACC_W-1:0] thr_data,
  input  logic [ACC_W-1:0] acc [COLS],
  output logic [COLS-1:0]  act
);

  logic [ACC_W-1:0] thr [COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned j = 0; j < COLS; j++) thr[j] <= '0;
    end else if (thr_we) begin
      thr[thr_col] <= thr_data;
    end
  end

  always_comb begin
    for (int unsigned j = 0; j < COLS; j++) act[j] = (acc[j] >= thr[j]);
  end

endmodule
