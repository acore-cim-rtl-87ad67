// tb_input_dac: checks all 128 input codes against the transfer function
// V = 0.4 V +/- 0.2 V * D/64 (D6 = 1 positive), in microvolts.
module tb_input_dac;
  import cim_pkg::*;
  logic [6:0] code;
  uv_t v;
  int checks = 0, failures = 0;
  input_dac dut (.code, .v_dac(v));
  initial begin
    for (int k = 0; k < 128; k++) begin
      int exp;
      code = 7'(k); #1;
      exp = 400000 + ((k >= 64) ? 1 : -1) * 3125 * (k % 64);
      checks++;
      if (v != exp) begin failures++; $display("FAIL code %0d v=%0d exp=%0d", k, v, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
