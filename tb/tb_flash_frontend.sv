// tb_flash_frontend: sweeps the input across and beyond the reference range
// for two reference settings; the thermometer word must have exactly
// round((V - V_L) / LSB) ones (clipped to 0..63), LSB = (V_H - V_L)/63.
module tb_flash_frontend;
  import cim_pkg::*;
  uv_t v_in, v_l, v_h;
  logic [62:0] thermo;
  int checks = 0, failures = 0;
  flash_frontend #(.BQ(6)) dut (.v_in, .v_ref_l(v_l), .v_ref_h(v_h), .thermo);
  initial begin
    for (int s = 0; s < 2; s++) begin
      v_l = s ? 190000 : 200000; v_h = s ? 630000 : 600000;
      for (int v = 150000; v <= 650000; v += 997) begin
        int exp, ones; logic [62:0] ref_t;
        v_in = v; #1;
        // integer rounding of 63*(v - vl)/(vh - vl)
        exp = (2 * 63 * (v - v_l) + (v_h - v_l)) / (2 * (v_h - v_l));
        if (v < v_l) exp = 0;
        if (exp > 63) exp = 63;
        ref_t = (exp == 0) ? '0 : 63'((64'(1) << exp) - 1);
        checks++;
        if (thermo != ref_t) begin failures++; $display("FAIL v=%0d exp=%0d got %h", v, exp, thermo); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
