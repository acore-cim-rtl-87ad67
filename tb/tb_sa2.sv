// tb_sa2: with errors switched off, checks V_SA = V_CAL + R_SA (I+ - I-) for
// random currents and trims (R_SA from the potentiometer code, V_CAL from
// the calibration code), the S1-open output and clipping. With errors on,
// checks that the measured gain and offset of each line stay within the
// configured bounds and differ from ideal.
module tb_sa2;
  import cim_pkg::*;
  pa_t ip, in_;
  logic s1;
  logic [5:0] p1, p2, c1, c2;
  uv_t vx0, vs0, vx1, vs1;
  int checks = 0, failures = 0;
  sa2 #(.COL(0), .SEED(1), .GAIN_ERR(0.0), .OFFSET_ERR_UV(0)) ideal (
    .i_pos(ip), .i_neg(in_), .s1, .pot1(p1), .pot2(p2), .vcal1(c1), .vcal2(c2), .v_x(vx0), .v_sa(vs0));
  sa2 #(.COL(3), .SEED(1), .GAIN_ERR(0.08), .OFFSET_ERR_UV(15000)) errd (
    .i_pos(ip), .i_neg(in_), .s1, .pot1(p1), .pot2(p2), .vcal1(c1), .vcal2(c2), .v_x(vx1), .v_sa(vs1));

  task automatic near(input real got, input real exp, input real tol, input string what);
    checks++;
    if (got - exp > tol || exp - got > tol) begin failures++; $display("FAIL %s got %f exp %f", what, got, exp); end
  endtask

  initial begin
    real r, vc, e;
    s1 = 1;
    // nominal trims: ideal summing amplifier
    p1 = 32; p2 = 32; c1 = 32; c2 = 32;
    for (int t = 0; t < 100; t++) begin
      ip = int'($urandom % 18000000); in_ = int'($urandom % 18000000); #1;
      e = 400000.0 + 10700.0 * (real'(ip) - real'(in_)) * 1.0e-6;
      if (e < 0.0) e = 0.0;
      if (e > 800000.0) e = 800000.0;
      near(real'(vs0), e, 2.0, "ideal transfer");
    end
    // potentiometer and calibration-DAC codes on the negative line (V_X = V_CAL1 = V_CAL2)
    for (int t = 0; t < 100; t++) begin
      int k, v;
      k = int'($urandom % 64); v = int'($urandom % 64);
      p1 = 32; p2 = 6'(k); c1 = 6'(v); c2 = 6'(v);
      ip = 0; in_ = int'($urandom % 10000000); #1;
      r = 10700.0 * (96.0 + real'(k)) / 128.0;
      vc = 200000.0 + 400000.0 * real'(v) / 64.0;
      e = vc - r * real'(in_) * 1.0e-6;
      if (e < 0.0) e = 0.0;
      near(real'(vs0), e, 2.0, $sformatf("pot2=%0d vcal=%0d", k, v));
    end
    // SA1 gain through the positive line: V_SA = V + R1 * I+ (R2 nominal)
    for (int t = 0; t < 50; t++) begin
      int k; k = int'($urandom % 64);
      p1 = 6'(k); p2 = 32; c1 = 32; c2 = 32; in_ = 0; ip = int'($urandom % 15000000); #1;
      near(real'(vs0), 400000.0 + 10700.0 * (96.0 + real'(k)) / 128.0 * real'(ip) * 1.0e-6, 2.0, "pot1");
    end
    // S1 open: output is V_CAL2
    s1 = 0; c2 = 6'd40; ip = 5000000; #1;
    near(real'(vs0), 200000.0 + 400000.0 * 40.0 / 64.0, 1.0, "S1 open");
    s1 = 1;
    // model with errors: gain and offset within bounds, not ideal
    p1 = 32; p2 = 32; c1 = 32; c2 = 32;
    begin
      real o, g; ip = 0; in_ = 0; #1; o = real'(vs1);
      in_ = 10000000; #1; g = (o - real'(vs1)) / (10700.0 * 10.0);
      checks++;
      if (g < 0.92 || g > 1.08 || (g > 0.9999 && g < 1.0001)) begin failures++; $display("FAIL neg gain %f", g); end
      checks++;
      if (o - 400000.0 > 45000.0 || 400000.0 - o > 45000.0 || o == 400000.0) begin failures++; $display("FAIL offset %f", o); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
