// cim_adc: BEHAVIOURAL MODEL of the column ADC.
//
// Converts the sensed bit-line current, given here as the count of matching
// active rows, into a BITS-bit code. Currents beyond full scale saturate at
// 2**BITS - 1, so BITS must cover the rows active at once (K*K = 9 rows in
// mapping strategy 1 needs 4 bits). Combinational; conversion time is not
// modelled. sat flags a clipped conversion.
//
// The paper names the ADC only; resolution and saturation are this
// design's choice.
module cim_adc #(
  parameter int unsigned IN_W = 12,
  parameter int unsigned BITS = 4
) (
  input  logic [IN_W-1:0] current,
  output logic [BITS-1:0] code,
  output logic            sat
);

  localparam logic [IN_W:0] FULL = (IN_W+1)'((1 << BITS) - 1);

  always_comb begin
    sat  = ({1'b0, current} > FULL);
    code = sat ? BITS'(FULL) : BITS'(current);
  end

endmodule
