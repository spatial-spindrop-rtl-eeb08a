// mc_average: averaging block of the last layer over T Monte Carlo passes.
//
// Bayesian inference runs the network T = 2**LOG2_T times with fresh
// dropout masks and averages the outputs. Each in_valid adds the COLS input
// values to running sums; the T-th one makes avg_valid high for one cycle
// with avg = sum / T (a right shift; T is a power of two) and restarts the
// sums. clear restarts them at any time. avg is registered and stays until
// the next average.
//
// The paper averages the last layer's outputs in an averaging block; T, the
// power-of-two restriction and averaging the column sums are this design's.
module mc_average #(
  parameter int unsigned COLS   = 512,
  parameter int unsigned IN_W   = 12,
  parameter int unsigned LOG2_T = 4,
  localparam int unsigned SUM_W = IN_W + LOG2_T
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            in_valid,
  input  logic [IN_W-1:0] value [COLS],
  output logic            avg_valid,
  output logic [IN_W-1:0] avg   [COLS],
  output logic [LOG2_T:0] count
);

  logic last;  // this input completes the T passes

  assign last = in_valid && (count == (LOG2_T+1)'((1 << LOG2_T) - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      avg_valid <= 1'b0;
    end else begin
      avg_valid <= !clear && last;
      if (clear || last) count <= '0;
      else if (in_valid) count <= count + 1'b1;
    end
  end

  // one running sum per column
  for (genvar j = 0; j < COLS; j++) begin : g_col
    logic [SUM_W-1:0] sum, nxt;

    assign nxt = sum + SUM_W'(value[j]);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        sum    <= '0;
        avg[j] <= '0;
      end else if (clear || last) begin
        sum <= '0;
        if (!clear) avg[j] <= IN_W'(nxt >> LOG2_T);
      end else if (in_valid) begin
        sum <= nxt;
      end
    end
  end

endmodule
