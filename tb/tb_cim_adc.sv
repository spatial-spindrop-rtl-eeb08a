// tb_cim_adc: sweeps every input current of a 3-bit ADC with a 6-bit input
// and checks the code and the saturation flag.
module tb_cim_adc;
  localparam int IN_W = 6, BITS = 3;
  logic [IN_W-1:0] current;
  logic [BITS-1:0] code;
  logic sat;
  int checks = 0, failures = 0;

  cim_adc #(.IN_W(IN_W), .BITS(BITS)) dut (.current, .code, .sat);

  initial begin
    for (int i = 0; i < (1 << IN_W); i++) begin
      current = IN_W'(i);
      #1;
      checks++;
      if (int'(code) != ((i > 7) ? 7 : i) || sat != (i > 7)) begin
        failures++;
        $display("FAIL: current=%0d code=%0d sat=%b", i, code, sat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
