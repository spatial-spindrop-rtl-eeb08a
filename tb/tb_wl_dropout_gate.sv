// tb_wl_dropout_gate: exhaustive check of the AND / transmission-gate
// word-line gating for a group of four word lines.
module tb_wl_dropout_gate;
  localparam int G = 4;
  logic sa_out, enable, path_enable, dropout;
  logic [G-1:0] wl_in, wl_out, exp_wl;
  int checks = 0, failures = 0;

  wl_dropout_gate #(.GROUP(G)) dut (.sa_out, .enable, .path_enable, .wl_in, .dropout, .wl_out);

  initial begin
    for (int v = 0; v < (1 << (G + 3)); v++) begin
      {sa_out, enable, path_enable, wl_in} = (G+3)'(v);
      #1;
      exp_wl = path_enable ? (wl_in & {G{sa_out & enable}}) : wl_in;
      checks++;
      if (dropout !== (sa_out & enable) || wl_out !== exp_wl) begin
        failures++;
        $display("FAIL: v=%0d dropout=%b wl_out=%b exp=%b", v, dropout, wl_out, exp_wl);
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
